// tb_pe: loads a random stationary query into one PE, then streams random
// document nibbles with every operand-sign combination used by the design
// (high x high for stage 1; hh, hl, lh, ll for stage 2) one pass per cycle,
// with gaps. Each MAC<15:0> result is compared with the sum of the 128
// products computed here, and must appear exactly 2 cycles after its pass,
// with its tag. The extreme operands (-8 x -8 and 15 x 15 over all entries)
// are included.
module tb_pe;
  localparam int unsigned LANE_DIM = 128, TAG_W = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic q_we = 1'b0;
  logic [2:0] q_slot = '0;
  logic [127:0] q_wdata = '0;
  logic in_valid = 1'b0, d_signed = 1'b0, q_hi = 1'b0;
  logic [LANE_DIM-1:0][3:0] d_nib = '0;
  logic [TAG_W-1:0] in_tag = '0, out_tag;
  logic out_valid;
  logic signed [15:0] mac;
  logic [7:0] q [LANE_DIM];
  int checks = 0, failures = 0;
  longint cycle = 0;

  pe #(.LANE_DIM(LANE_DIM), .GROUP_DIM(32), .MAC_W(16), .TAG_W(TAG_W)) dut (.*);

  always @(posedge clk) cycle <= cycle + 1;

  // expected results, indexed by tag
  int     exp_mac [256];
  longint exp_cyc [256];

  function automatic int expect_mac(input logic [LANE_DIM-1:0][3:0] d, input bit ds, input bit qh);
    int s = 0;
    for (int i = 0; i < LANE_DIM; i++) begin
      int a, b;
      a = qh ? (int'(q[i]) >= 128 ? int'(q[i]) - 256 : int'(q[i])) >>> 4 : int'(q[i]) % 16;
      b = ds ? (int'(d[i]) >= 8 ? int'(d[i]) - 16 : int'(d[i])) : int'(d[i]);
      s += a * b;
    end
    return s;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (int'(mac) != exp_mac[out_tag]) begin
      failures++;
      $display("FAIL tag %0d: mac %0d expected %0d", out_tag, mac, exp_mac[out_tag]);
    end
    if (cycle != exp_cyc[out_tag] + 2) begin
      failures++;
      $display("FAIL tag %0d: latency %0d", out_tag, cycle - exp_cyc[out_tag]);
    end
  end

  task automatic load_query(input int kind);
    for (int i = 0; i < LANE_DIM; i++)
      q[i] = (kind == 1) ? 8'h80 : (kind == 2) ? 8'hFF : 8'($urandom);
    for (int s = 0; s < LANE_DIM / 16; s++) begin
      @(negedge clk);
      q_we = 1'b1; q_slot = 3'(s);
      for (int j = 0; j < 16; j++) q_wdata[8*j +: 8] = q[16*s + j];
    end
    @(negedge clk);
    q_we = 1'b0;
  endtask

  initial begin
    int tag;
    tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int kind = 0; kind < 3; kind++) begin
      load_query(kind == 0 ? 0 : kind);
      for (int n = 0; n < 300; n++) begin
        @(negedge clk);
        in_valid = ($urandom_range(0, 3) != 0);
        d_signed = 1'($urandom_range(0, 1));
        q_hi     = 1'($urandom_range(0, 1));
        for (int i = 0; i < LANE_DIM; i++)
          d_nib[i] = (kind == 1) ? 4'h8 : (kind == 2) ? 4'hF : 4'($urandom);
        if (kind == 1) begin d_signed = 1'b1; q_hi = 1'b1; end   // -8 x -8
        if (kind == 2) begin d_signed = 1'b0; q_hi = 1'b0; end   // 15 x 15
        in_tag = TAG_W'(tag);
        if (in_valid) begin
          exp_mac[tag] = expect_mac(d_nib, d_signed, q_hi);
          exp_cyc[tag] = cycle;
          tag = (tag + 1) % 256;
        end
      end
      @(negedge clk);
      in_valid = 1'b0;
      repeat (4) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
