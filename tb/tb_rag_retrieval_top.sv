// tb_rag_retrieval_top: end-to-end test of the two-stage retrieval
// accelerator at its default parameters (K = 50, 16-row SRAM buffers).
//
// The testbench models the external DRAM itself: document embeddings are
// random INT8 vectors kept as entries; a row request for row 8d+r is
// answered, after a fixed latency and in order, with bit 7-r of all 512
// entries of document d. Requests see random back-pressure. Document norms
// are computed here with real arithmetic (16 x sqrt(sum d^2), floored) and
// served on the norm channel.
//
// A reference model computes, independently of the RTL, the stage-1 list
// (MSB nibble dot products), then re-ranks those candidates by the exact
// INT8 dot product, both with the fraction ordering (cosine) or the plain
// dot product (MIPS), and predicts the number of DRAM rows and norms read.
// Five queries run back to back: cosine with fewer documents than K, cosine
// with many documents, MIPS, and the edge cases of one and of no document. Each mechanism of the design (stage switch, stage-1
// appends, insertions that break the comparison loop, discards of a full
// list, SRAM-buffer and result-FIFO stalls, DRAM back-pressure, both
// similarity modes) is counted and must occur.
module tb_rag_retrieval_top;
  import rag_pkg::*;

  localparam int unsigned K     = TOPK;
  localparam int unsigned MAXN  = 320;
  localparam int unsigned LAT   = 6;
  localparam int unsigned CW    = $clog2(K + 1);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              start = 1'b0;
  logic [ID_W-1:0]   num_docs = '0;
  sim_mode_e         mode = SIM_COSINE;
  logic              busy, done;
  logic              q_in_valid = 1'b0, q_in_ready;
  logic [QWORD_W-1:0] q_in_data = '0;
  logic              dram_req_valid, dram_req_ready = 1'b0;
  logic [ROW_AW-1:0] dram_req_addr;
  logic              dram_rvalid = 1'b0;
  logic [ROW_W-1:0]  dram_rdata = '0;
  logic              norm_req_valid, norm_req_ready = 1'b0;
  logic [ID_W-1:0]   norm_req_id;
  logic              norm_rvalid = 1'b0;
  logic [NORM_W-1:0] norm_rdata = '0;
  logic [CW-1:0]     topk_count;
  logic [ID_W-1:0]   topk_ids    [K];
  logic [ROW_AW-1:0] topk_roots  [K];
  sim_entry_t        topk_scores [K];

  rag_retrieval_top dut (.*);

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // ---------------- data ----------------
  logic signed [7:0] emb [MAXN][DIM];
  logic signed [7:0] qv  [DIM];
  longint            dnorm [MAXN];

  function automatic longint isqrt_ref(input longint x);
    return longint'($floor($sqrt(real'(x))));
  endfunction

  // ---------------- DRAM model ----------------
  longint rq_time[$];
  int     rq_addr[$];
  longint nq_time[$];
  int     nq_id[$];
  int     rows_read = 0, norms_read = 0, rows_high = 0, backpressure = 0;

  always @(posedge clk) begin
    dram_req_ready <= ($urandom_range(0, 9) < 7);
    norm_req_ready <= ($urandom_range(0, 9) < 8);
    if (rst_n && dram_req_valid && !dram_req_ready) backpressure++;
    if (rst_n && dram_req_valid && dram_req_ready) begin
      rq_time.push_back(cycle + longint'(LAT));
      rq_addr.push_back(int'(dram_req_addr));
      rows_read++;
      if (dram_req_addr[2:0] >= 3'd4) rows_high++;
    end
    if (rst_n && norm_req_valid && norm_req_ready) begin
      nq_time.push_back(cycle + longint'(LAT) + 2);
      nq_id.push_back(int'(norm_req_id));
      norms_read++;
    end
    dram_rvalid <= 1'b0;
    if (rq_time.size() > 0 && rq_time[0] <= cycle) begin
      int a, d, r;
      logic [ROW_W-1:0] row;
      a = rq_addr.pop_front();
      void'(rq_time.pop_front());
      d = a / 8;
      r = a % 8;
      for (int i = 0; i < DIM; i++) row[i] = emb[d][i][7-r];
      dram_rvalid <= 1'b1;
      dram_rdata  <= row;
    end
    norm_rvalid <= 1'b0;
    if (nq_time.size() > 0 && nq_time[0] <= cycle) begin
      void'(nq_time.pop_front());
      norm_rvalid <= 1'b1;
      norm_rdata  <= NORM_W'(dnorm[nq_id.pop_front()]);
    end
  end

  // ---------------- mechanism counters ----------------
  int n_switch = 0, n_buf_stall = 0, n_res_stall = 0, n_break = 0, n_discard = 0;
  int n_append = 0, n_cos = 0, n_mips = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.ev_stage_switch) n_switch++;
    if (dut.u_ctrl.ev_buf_stall)    n_buf_stall++;
    if (dut.u_ctrl.ev_res_stall)    n_res_stall++;
    if (dut.u_rr.ev_break)          n_break++;
    if (dut.u_rr.ev_discard)        n_discard++;
    if (dut.u_rr.ev_insert && !dut.u_rr.ev_break) n_append++;
  end

  // ---------------- reference model ----------------
  int     ref_id [K];
  longint ref_dot[K], ref_np[K];
  int     ref_n;

  function automatic bit ref_gt(longint a, longint b, longint c, longint d);
    return a * d > c * b;
  endfunction

  function automatic void ref_insert(int id, longint dot, longint np);
    int pos = ref_n;
    for (int i = 0; i < ref_n; i++)
      if (ref_gt(dot, np, ref_dot[i], ref_np[i])) begin pos = i; break; end
    if (pos >= int'(K)) return;
    for (int j = int'(K) - 1; j > pos; j--) begin
      ref_id[j] = ref_id[j-1]; ref_dot[j] = ref_dot[j-1]; ref_np[j] = ref_np[j-1];
    end
    ref_id[pos] = id; ref_dot[pos] = dot; ref_np[pos] = np;
    if (ref_n < int'(K)) ref_n++;
  endfunction

  function automatic int hi(logic signed [7:0] v);
    return int'(v) >>> 4;
  endfunction

  // ---------------- one query ----------------
  task automatic run_query(input int n, input sim_mode_e m);
    longint qsq, qn, np, dot;
    int     cand [K];
    int     ncand, rows0, norms0;
    longint t0;
    // data
    for (int d = 0; d < n; d++) begin
      longint s = 0;
      for (int i = 0; i < DIM; i++) begin
        emb[d][i] = 8'($urandom);
        s += longint'(emb[d][i]) * longint'(emb[d][i]);
      end
      dnorm[d] = isqrt_ref(s * 256);
    end
    qsq = 0;
    for (int i = 0; i < DIM; i++) begin
      qv[i] = 8'($urandom);
      qsq += longint'(qv[i]) * longint'(qv[i]);
    end
    qn = isqrt_ref(qsq * 256);
    // reference stage 1
    ref_n = 0;
    for (int d = 0; d < n; d++) begin
      dot = 0;
      for (int i = 0; i < DIM; i++) dot += longint'(hi(qv[i]) * hi(emb[d][i]));
      np = (m == SIM_MIPS) ? 1 : qn * dnorm[d];
      ref_insert(d, dot, np);
    end
    ncand = ref_n;
    for (int j = 0; j < ncand; j++) cand[j] = ref_id[j];
    // reference stage 2
    ref_n = 0;
    for (int j = 0; j < ncand; j++) begin
      dot = 0;
      for (int i = 0; i < DIM; i++) dot += longint'(qv[i]) * longint'(emb[cand[j]][i]);
      np = (m == SIM_MIPS) ? 1 : qn * dnorm[cand[j]];
      ref_insert(cand[j], dot, np);
    end
    // run
    rows0 = rows_read; norms0 = norms_read;
    rows_high = 0;
    @(negedge clk);
    num_docs = ID_W'(n);
    mode     = m;
    start    = 1'b1;
    @(negedge clk);
    start    = 1'b0;
    t0 = cycle;
    for (int w = 0; w < int'(QWORDS); w++) begin
      logic [QWORD_W-1:0] word;
      for (int j = 0; j < 16; j++) word[8*j +: 8] = qv[16*w + j];
      while ($urandom_range(0, 3) == 0) @(negedge clk);
      q_in_valid = 1'b1;
      q_in_data  = word;
      @(posedge clk);
      while (!q_in_ready) @(posedge clk);
      @(negedge clk);
      q_in_valid = 1'b0;
    end
    while (!done) @(posedge clk);
    @(negedge clk);
    $display("query n=%0d mode=%s: %0d cycles, %0d rows, %0d norms", n, m.name(),
             cycle - t0, rows_read - rows0, norms_read - norms0);
    if (m == SIM_MIPS) n_mips++; else n_cos++;
    // results
    check(dut.u_sc.q_norm == NORM_W'(qn) || m == SIM_MIPS, $sformatf("query norm %0d vs %0d", dut.u_sc.q_norm, qn));
    check(int'(topk_count) == ncand, $sformatf("count %0d vs %0d", topk_count, ncand));
    for (int j = 0; j < ncand; j++) begin
      check(int'(topk_ids[j]) == ref_id[j], $sformatf("rank %0d id %0d vs %0d", j, topk_ids[j], ref_id[j]));
      check(int'(topk_roots[j]) == 8 * ref_id[j], $sformatf("rank %0d root", j));
      check(longint'(topk_scores[j].dot) == ref_dot[j], $sformatf("rank %0d dot %0d vs %0d", j, topk_scores[j].dot, ref_dot[j]));
      check(longint'(topk_scores[j].nprod) == ref_np[j], $sformatf("rank %0d nprod", j));
    end
    // bit-planar access: 4 MSB rows per document, 8 rows per candidate
    check(rows_read - rows0 == 4 * n + 8 * ncand, $sformatf("rows %0d vs %0d", rows_read - rows0, 4 * n + 8 * ncand));
    check(rows_high == 4 * ncand, "low-nibble rows only read for candidates");
    check(norms_read - norms0 == ((m == SIM_MIPS) ? 0 : n + ncand), "norm reads");
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    run_query(20, SIM_COSINE);
    run_query(MAXN, SIM_COSINE);
    run_query(120, SIM_MIPS);
    run_query(1, SIM_COSINE);
    run_query(0, SIM_MIPS);
    check(n_switch == 5,     "stage switches");
    check(n_append > 0,      "appends at the end of the list");
    check(n_break > 0,       "insertions breaking the comparison loop");
    check(n_discard > 0,     "discards of a full list");
    check(n_buf_stall > 0,   "SRAM buffer full stalls");
    check(n_res_stall > 0,   "result FIFO stalls (rerank busy)");
    check(backpressure > 0,  "DRAM back-pressure");
    check(n_cos > 0 && n_mips > 0, "both similarity modes");
    $display("mechanisms: switch=%0d append=%0d break=%0d discard=%0d buf_stall=%0d res_stall=%0d dram_bp=%0d cos=%0d mips=%0d",
             n_switch, n_append, n_break, n_discard, n_buf_stall, n_res_stall, backpressure, n_cos, n_mips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
