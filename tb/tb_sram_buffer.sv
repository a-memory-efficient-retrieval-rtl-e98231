// tb_sram_buffer: checks the streaming buffer as a simple dual-port memory.
// Random rows are written through the write port while the read port reads
// rows back; each read is compared one cycle later with a shadow copy kept
// by the testbench, so both the data and the one-cycle read latency are
// checked. A read of a row written in the same cycle must return the old row.
module tb_sram_buffer;
  localparam int unsigned WIDTH = 128, DEPTH = 16, AW = $clog2(DEPTH);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] shadow [DEPTH];
  bit   known [DEPTH];
  int checks = 0, failures = 0;

  sram_buffer #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    logic [WIDTH-1:0] expect_q;
    bit               pending;
    pending = 0;
    for (int i = 0; i < DEPTH; i++) known[i] = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (pending) begin
        checks++;
        if (rdata !== expect_q) begin
          failures++;
          $display("FAIL cycle %0d: read %h expected %h", t, rdata, expect_q);
        end
      end
      we    = $urandom_range(0, 1);
      waddr = AW'($urandom);
      wdata = {$urandom, $urandom, $urandom, $urandom};
      re    = $urandom_range(0, 1);
      raddr = AW'($urandom);
      pending  = re && known[raddr];
      expect_q = shadow[raddr];
      @(posedge clk);
      if (we) begin
        shadow[waddr] = wdata;
        known[waddr]  = 1;
      end
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
