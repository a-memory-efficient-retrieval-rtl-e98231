// tb_query_buffer: writes the 32 words of random queries into the query
// buffer, reads them back in a different order and compares each word one
// cycle after the read strobe with the word that was written.
module tb_query_buffer;
  localparam int unsigned WORD_W = 128, WORDS = 32, AW = $clog2(WORDS);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [WORD_W-1:0] wdata = '0, rdata;
  logic [WORD_W-1:0] words [WORDS];
  int checks = 0, failures = 0;

  query_buffer #(.WORD_W(WORD_W), .WORDS(WORDS)) dut (.*);

  initial begin
    for (int q = 0; q < 4; q++) begin
      for (int w = 0; w < int'(WORDS); w++) begin
        words[w] = {$urandom, $urandom, $urandom, $urandom};
        @(negedge clk);
        we = 1'b1; waddr = AW'(w); wdata = words[w];
      end
      @(negedge clk);
      we = 1'b0;
      for (int k = 0; k < int'(WORDS); k++) begin
        int w;
        w = (k * 7 + q) % int'(WORDS);
        re = 1'b1; raddr = AW'(w);
        @(negedge clk);
        re = 1'b0;
        checks++;
        if (rdata !== words[w]) begin
          failures++;
          $display("FAIL query %0d word %0d: %h vs %h", q, w, rdata, words[w]);
        end
        // the read port holds its output while re is low
        @(negedge clk);
        checks++;
        if (rdata !== words[w]) failures++;
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
