// plane_gather: the per-lane input register between SRAM buffer and PE.
//
// Documents are stored bit-planar: a row holds one bit of all entries. This
// block turns planes back into entries. Each arriving plane (plane_valid)
// writes bit plane_bit of all LANE_DIM entries of the collect register. When
// a document is complete the controller pulses xfer, which copies the
// collect register into the operand register in one cycle, so the next
// document can be collected while the PE works on this one. The operand
// register drives d_nib combinationally: the high nibble (bits 7:4) when
// nib_hi is 1, the low nibble (bits 3:0) otherwise. In stage 1 only planes
// 7..4 are ever written for a document and only the high nibble is used.
// A plane and xfer in the same cycle are allowed: xfer copies the register
// as it was before that plane. The paper draws this register (labelled
// "Input") but not its insides; the double buffering is this design's.
module plane_gather #(
  parameter int unsigned LANE_DIM = 128
) (
  input  logic                     clk,
  input  logic                     plane_valid,
  input  logic [2:0]               plane_bit,
  input  logic [LANE_DIM-1:0]      plane_data,
  input  logic                     xfer,
  input  logic                     nib_hi,
  output logic [LANE_DIM-1:0][3:0] d_nib
);

  logic [LANE_DIM-1:0][7:0] collect_q;
  logic [LANE_DIM-1:0][7:0] operand_q;

  always_ff @(posedge clk) begin
    if (plane_valid) begin
      for (int i = 0; i < LANE_DIM; i++) collect_q[i][plane_bit] <= plane_data[i];
    end
    if (xfer) operand_q <= collect_q;
  end

  always_comb begin
    for (int i = 0; i < LANE_DIM; i++)
      d_nib[i] = nib_hi ? operand_q[i][7:4] : operand_q[i][3:0];
  end

endmodule
