// query_buffer: on-chip store of the 512-entry INT8 query embedding.
//
// The query arrives from the embedding model as 32 words of 128 bits, each
// word carrying 16 consecutive INT8 entries (entry 16*w+j in bits 8j+7:8j of
// word w). After loading, the controller reads the words back in order to
// fill the stationary query registers of the four PEs (words 8l..8l+7 belong
// to lane l). One write port and one read port; the read is synchronous, so
// rdata shows the addressed word the cycle after re. The word organisation
// and read timing are this design's choice; the paper states only that the
// query is held here before it is loaded into the PEs and kept stationary.
module query_buffer #(
  parameter int unsigned WORD_W = 128,
  parameter int unsigned WORDS  = 32,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [WORD_W-1:0] wdata,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [WORD_W-1:0] rdata
);

  logic [WORD_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
