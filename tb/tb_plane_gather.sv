// tb_plane_gather: feeds random documents to the input register as
// bit-planes (MSB plane first, as rows 0..7 of a DRAM block) and checks the
// high and low nibbles presented after the transfer against the original
// INT8 entries. It also checks that a document being collected does not
// disturb the one held for the PE, that a plane arriving in the transfer
// cycle belongs to the next document, and the stage-1 case of 4 planes.
module tb_plane_gather;
  localparam int unsigned LANE_DIM = 128;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic plane_valid = 1'b0, xfer = 1'b0, nib_hi = 1'b0;
  logic [2:0] plane_bit = '0;
  logic [LANE_DIM-1:0] plane_data = '0;
  logic [LANE_DIM-1:0][3:0] d_nib;
  logic [7:0] doc [2][LANE_DIM];
  int checks = 0, failures = 0;

  plane_gather #(.LANE_DIM(LANE_DIM)) dut (.*);

  task automatic send_plane(input int which, input int b, input bit with_xfer);
    @(negedge clk);
    plane_valid = 1'b1;
    plane_bit   = 3'(b);
    for (int i = 0; i < LANE_DIM; i++) plane_data[i] = doc[which][i][b];
    xfer = with_xfer;
    @(negedge clk);
    plane_valid = 1'b0;
    xfer = 1'b0;
  endtask

  task automatic check_operand(input int which, input int planes);
    @(negedge clk);
    nib_hi = 1'b1;
    #1;
    for (int i = 0; i < LANE_DIM; i++) begin
      checks++;
      if (d_nib[i] !== doc[which][i][7:4]) begin
        failures++;
        if (failures < 10) $display("FAIL hi nibble entry %0d: %h vs %h", i, d_nib[i], doc[which][i][7:4]);
      end
    end
    if (planes == 8) begin
      nib_hi = 1'b0;
      #1;
      for (int i = 0; i < LANE_DIM; i++) begin
        checks++;
        if (d_nib[i] !== doc[which][i][3:0]) begin
          failures++;
          if (failures < 10) $display("FAIL lo nibble entry %0d", i);
        end
      end
    end
  endtask

  initial begin
    for (int rnd = 0; rnd < 20; rnd++) begin
      int planes;
      planes = (rnd % 2) ? 8 : 4;
      for (int i = 0; i < LANE_DIM; i++) begin
        doc[0][i] = 8'($urandom);
        doc[1][i] = 8'($urandom);
      end
      // collect doc 0, transfer it
      for (int b = 7; b >= 8 - planes; b--) send_plane(0, b, 1'b0);
      @(negedge clk); xfer = 1'b1; @(negedge clk); xfer = 1'b0;
      check_operand(0, planes);
      // collect doc 1 with the first plane in the same cycle as a transfer
      // of the (unchanged) doc 0 collection; operand must still show doc 0
      send_plane(1, 7, 1'b1);
      for (int b = 6; b >= 8 - planes; b--) send_plane(1, b, 1'b0);
      check_operand(0, planes);
      @(negedge clk); xfer = 1'b1; @(negedge clk); xfer = 1'b0;
      check_operand(1, planes);
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
