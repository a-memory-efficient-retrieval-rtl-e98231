// sram_buffer: one of the four dual-port streaming buffers of the accelerator.
//
// Each lane owns 128 of the 512 embedding dimensions; a DRAM row (one
// bit-plane of one document) is split into four 128-bit slices and slice l
// is written here in lane l. The buffer is a plain simple-dual-port memory:
// the write port is fed from DRAM, the read port feeds the lane's input
// register, and the controller runs the pair as a ring (DEPTH rows).
// Read is synchronous: rdata holds the row the cycle after re. A read of the
// row being written in the same cycle returns the old contents; the
// controller never does that. The 128-bit width follows the paper; the depth
// of 16 rows (two whole INT8 documents) is this design's choice. In silicon
// this is a compiled SRAM macro; here it is an array that synthesis maps to
// a memory.
module sram_buffer #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
