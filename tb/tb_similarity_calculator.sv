// tb_similarity_calculator: checks the query norm and the dot-product fusion.
// Query norm: random queries (and an all -128 query, the largest) are loaded
// word by word with gaps; q_norm must equal floor(16 * sqrt(sum q^2)),
// computed here with real arithmetic, and q_norm_valid must rise within
// 20 cycles of the last word. Fusion: random PE results of the four lanes
// are applied as stage-1 documents (one pass) and stage-2 documents (four
// passes weighted 256, 16, 16, 1); each result must give the weighted sum,
// the id, the norm product (or 1 in MIPS mode), one cycle after the last pass.
module tb_similarity_calculator;
  import rag_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  sim_mode_e mode = SIM_COSINE;
  logic q_clear = 1'b0, q_valid = 1'b0, q_last = 1'b0;
  logic [127:0] q_data = '0;
  logic [NORM_W-1:0] q_norm;
  logic q_norm_valid;
  logic pe_valid = 1'b0;
  logic [LANES-1:0][MAC_W-1:0] pe_mac = '0;
  pass_tag_t pe_tag = '0;
  logic res_valid;
  sim_result_t res;
  int checks = 0, failures = 0;

  similarity_calculator dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic load_query(input int kind, output longint qn);
    longint s;
    s = 0;
    @(negedge clk); q_clear = 1'b1; @(negedge clk); q_clear = 1'b0;
    for (int w = 0; w < int'(QWORDS); w++) begin
      for (int j = 0; j < 16; j++) begin
        logic signed [7:0] v;
        v = (kind == 1) ? -8'sd128 : 8'($urandom);
        q_data[8*j +: 8] = v;
        s += longint'(v) * longint'(v);
      end
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      q_valid = 1'b1; q_last = (w == int'(QWORDS) - 1);
      @(negedge clk);
      q_valid = 1'b0; q_last = 1'b0;
    end
    qn = longint'($floor($sqrt(real'(s * 256))));
    for (int t = 0; t < 20 && !q_norm_valid; t++) @(negedge clk);
    chk(q_norm_valid, "query norm valid in time");
    chk(longint'(q_norm) == qn, $sformatf("query norm %0d vs %0d", q_norm, qn));
  endtask

  task automatic run_doc(input bit stage2, input int id, input longint qn);
    longint acc;
    int     np;
    logic [NORM_W-1:0] dn;
    acc = 0;
    np  = stage2 ? 4 : 1;
    dn  = NORM_W'($urandom);
    for (int p = 0; p < np; p++) begin
      int sh, sum;
      sh = !stage2 ? 0 : (p == 0) ? 8 : (p == 3) ? 0 : 4;
      sum = 0;
      @(negedge clk);
      for (int l = 0; l < int'(LANES); l++) begin
        logic signed [15:0] m;
        m = 16'($urandom);
        pe_mac[l] = m;
        sum += int'(m);
      end
      acc += longint'(sum) <<< sh;
      pe_valid = 1'b1;
      pe_tag.last = (p == np - 1);
      pe_tag.shift = 4'(sh);
      pe_tag.id = ID_W'(id);
      pe_tag.dnorm = dn;
      #1;
      chk(!res_valid, "no result before the last pass");
    end
    @(negedge clk);
    pe_valid = 1'b0;
    chk(res_valid, "result one cycle after the last pass");
    chk(longint'(res.s.dot) == acc, $sformatf("dot %0d vs %0d", res.s.dot, acc));
    chk(int'(res.id) == id, "id");
    chk(longint'(res.s.nprod) == ((mode == SIM_MIPS) ? 1 : qn * longint'(dn)), "norm product");
  endtask

  initial begin
    longint qn;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 6; k++) begin
      load_query(k == 0 ? 1 : 0, qn);
      mode = (k % 2) ? SIM_MIPS : SIM_COSINE;
      for (int d = 0; d < 30; d++) run_doc(d % 3 != 0, $urandom_range(0, 65535), qn);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
