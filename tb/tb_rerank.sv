// tb_rerank: the rerank unit with its similarity buffer and chunk IDs map.
// Random results (dot product, norm product, id) are offered with random
// gaps; the testbench keeps its own sorted list (a newcomer goes before the
// first entry it strictly beats, compared as dot_new*np_i > dot_i*np_new),
// and after each stream compares count, every id, root row (id*8) and score.
// The decision (insert or discard) must come exactly one cycle per visited
// entry after the accepting edge: insertion position + 1 cycles, or count + 1
// when nothing is beaten. Streams cover: fewer results than K, many more
// than K, ties, MIPS-like norm products of 1, a second bank, and clear.
module tb_rerank;
  import rag_pkg::*;
  localparam int unsigned K = 50, KW = $clog2(K), CW = $clog2(K + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 1'b0, in_valid = 1'b0, in_ready;
  sim_result_t in_res = '0;
  logic [KW-1:0] rd_idx, ins_idx;
  sim_entry_t rd_entry;
  logic ins_valid;
  sim_result_t ins_res;
  logic [CW-1:0] count;
  logic busy, ev_insert, ev_break, ev_discard;
  logic wr_bank = 1'b0;
  logic [KW-1:0] rd_idx_a = '0, rd_idx_b = '0;
  logic [ID_W-1:0] rd_id_a, rd_id_b;
  logic [ROW_AW-1:0] rd_root_a;
  logic [ID_W-1:0] final_ids [K];
  logic [ROW_AW-1:0] final_roots [K];
  sim_entry_t entries [K];
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  rerank #(.K(K)) u_rr (.clk, .rst_n, .clear, .in_valid, .in_ready, .in_res, .rd_idx, .rd_entry,
    .ins_valid, .ins_idx, .ins_res, .count, .busy, .ev_insert, .ev_break, .ev_discard);
  similarity_buffer #(.K(K)) u_sb (.clk, .rd_idx, .rd_entry, .ins_valid, .ins_idx,
    .ins_entry(ins_res.s), .entries);
  chunk_ids_map #(.K(K)) u_cm (.clk, .wr_bank, .ins_valid, .ins_idx, .ins_id(ins_res.id),
    .rd_idx_a, .rd_id_a, .rd_root_a, .rd_idx_b, .rd_id_b, .final_ids, .final_roots);

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  int     r_id [K];
  longint r_dot [K], r_np [K];
  int     r_n;

  function automatic int ref_insert(int id, longint dot, longint np);
    int pos = r_n;
    for (int i = 0; i < r_n; i++)
      if (dot * r_np[i] > r_dot[i] * np) begin pos = i; break; end
    if (pos < int'(K)) begin
      for (int j = int'(K) - 1; j > pos; j--) begin
        r_id[j] = r_id[j-1]; r_dot[j] = r_dot[j-1]; r_np[j] = r_np[j-1];
      end
      r_id[pos] = id; r_dot[pos] = dot; r_np[pos] = np;
      if (r_n < int'(K)) r_n++;
    end
    return pos;   // entries visited = pos + 1
  endfunction

  task automatic stream(input int n, input int kind, input bit bank);
    wr_bank = bank;
    @(negedge clk); clear = 1'b1; @(negedge clk); clear = 1'b0;
    r_n = 0;
    for (int k = 0; k < n; k++) begin
      longint dot, np, t0;
      int pos;
      dot = (kind == 2) ? longint'($urandom_range(0, 5)) - 2 : longint'(int'($urandom)) / 256;
      np  = (kind == 1) ? 1 : (kind == 2) ? longint'($urandom_range(1, 3)) : longint'($urandom_range(1, 1 << 30));
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      in_valid = 1'b1;
      in_res.s.dot = DOT_W'(dot);
      in_res.s.nprod = NP_W'(np);
      in_res.id = ID_W'(k + 100 * kind);
      pos = ref_insert(k + 100 * kind, dot, np);
      #1;
      chk(in_ready, $sformatf("ready when idle k=%0d kind=%0d state=%0d", k, kind, u_rr.state_q));
      @(posedge clk);
      t0 = cycle;
      @(negedge clk);
      in_valid = 1'b0;
      while (!(ev_insert || ev_discard)) @(negedge clk);
      // the decision comes pos+1 cycles after the accepting edge: one
      // comparison cycle per visited entry
      chk(cycle - t0 == longint'(pos) + 1, $sformatf("loop length %0d vs %0d", cycle - t0, pos));
      @(negedge clk);
    end
    chk(int'(count) == r_n, $sformatf("count %0d vs %0d", count, r_n));
    for (int j = 0; j < r_n; j++) begin
      chk(longint'(entries[j].dot) == r_dot[j] && longint'(entries[j].nprod) == r_np[j],
          $sformatf("score %0d", j));
      if (bank) begin
        chk(int'(final_ids[j]) == r_id[j], $sformatf("final id %0d: %0d vs %0d", j, final_ids[j], r_id[j]));
        chk(int'(final_roots[j]) == 8 * r_id[j], "final root");
      end else begin
        rd_idx_a = KW'(j); rd_idx_b = KW'(r_n - 1 - j);
        #1;
        chk(int'(rd_id_a) == r_id[j], $sformatf("candidate id %0d: %0d vs %0d", j, rd_id_a, r_id[j]));
        chk(int'(rd_root_a) == 8 * r_id[j], "candidate root");
        chk(int'(rd_id_b) == r_id[r_n - 1 - j], "second read port");
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    stream(30, 0, 1'b0);
    stream(200, 0, 1'b0);
    stream(150, 1, 1'b1);
    stream(120, 2, 1'b1);
    // bank 0 must be untouched by the bank-1 streams: re-check the last
    // bank-0 list by replaying it
    stream(80, 0, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
