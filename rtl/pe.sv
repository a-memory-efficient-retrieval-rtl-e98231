// pe: processing element, 128 4-bit multiplies per cycle with a two-stage
// carry-save adder tree (query-stationary).
//
// The PE keeps LANE_DIM query entries stationary as INT8 (loaded 16 at a
// time through q_we/q_slot/q_wdata before a search). Every cycle with
// in_valid it multiplies one nibble of each query entry with the matching
// document nibble d_nib and sums the LANE_DIM products:
//   q_hi=1 : query high nibble q[7:4], sign-extended
//   q_hi=0 : query low nibble  q[3:0], zero-extended
//   d_signed=1 : document nibble is a high nibble, sign-extended
//   d_signed=0 : document nibble is a low nibble, zero-extended
// So a stage-1 (MSB INT4) dot product is one pass (q_hi=1, d_signed=1) and a
// full INT8 dot product is four passes whose results the similarity
// calculator weights by 256, 16, 16 and 1.
//
// Addition follows the paper's two-stage structure. Stage 1: the products
// are split into groups of GROUP_DIM (Q0.., Q32.., Q64.., Q96.. as drawn in
// the paper's PE figure); each group is reduced by a chain of 3:2 carry-save
// adders to a sum and a carry vector, registered. Stage 2 ("fusion adder"):
// the 2*GROUPS vectors are compressed again and one carry-propagate addition
// gives the MAC<15:0> result, registered. Latency is 2 cycles from in_valid
// to out_valid, one new pass per cycle; in_tag is carried alongside. The
// 5-bit operand extension that lets the 4-bit multipliers serve the INT8
// stage is this design's choice; 128 products of at most 15*15 still fit the
// 16-bit result.
module pe #(
  parameter int unsigned LANE_DIM  = 128,
  parameter int unsigned GROUP_DIM = 32,
  parameter int unsigned MAC_W     = 16,
  parameter int unsigned TAG_W     = 8,
  localparam int unsigned GROUPS   = LANE_DIM / GROUP_DIM,
  localparam int unsigned SLOTS    = LANE_DIM / 16,
  localparam int unsigned SW       = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // stationary query load
  input  logic                     q_we,
  input  logic [SW-1:0]            q_slot,
  input  logic [127:0]             q_wdata,
  // one pass
  input  logic                     in_valid,
  input  logic [LANE_DIM-1:0][3:0] d_nib,
  input  logic                     d_signed,
  input  logic                     q_hi,
  input  logic [TAG_W-1:0]         in_tag,
  // result
  output logic                     out_valid,
  output logic signed [MAC_W-1:0]  mac,
  output logic [TAG_W-1:0]         out_tag
);

  logic [LANE_DIM-1:0][7:0] q_q;

  always_ff @(posedge clk) begin
    if (q_we) begin
      for (int j = 0; j < 16; j++) q_q[q_slot*16 + j] <= q_wdata[8*j +: 8];
    end
  end

  // 3:2 compressor on whole vectors
  function automatic void csa(input  logic [MAC_W-1:0] a, b, c,
                              output logic [MAC_W-1:0] s, cy);
    s  = a ^ b ^ c;
    cy = ((a & b) | (a & c) | (b & c)) << 1;
  endfunction

  // 4-bit multiplies (5-bit signed operands) and stage 1 carry-save groups
  logic [GROUPS-1:0][MAC_W-1:0] grp_s, grp_c;

  always_comb begin
    logic signed [4:0] qa, da;
    logic signed [9:0] p;
    logic [MAC_W-1:0]  s, c, ns, nc;
    for (int g = 0; g < GROUPS; g++) begin
      s = '0;
      c = '0;
      for (int j = 0; j < GROUP_DIM; j++) begin
        qa = q_hi ? {q_q[g*GROUP_DIM+j][7], q_q[g*GROUP_DIM+j][7:4]}
                  : {1'b0, q_q[g*GROUP_DIM+j][3:0]};
        da = d_signed ? {d_nib[g*GROUP_DIM+j][3], d_nib[g*GROUP_DIM+j]}
                      : {1'b0, d_nib[g*GROUP_DIM+j]};
        p  = qa * da;
        csa(s, c, MAC_W'(p), ns, nc);
        s = ns;
        c = nc;
      end
      grp_s[g] = s;
      grp_c[g] = c;
    end
  end

  logic [GROUPS-1:0][MAC_W-1:0] s1_s, s1_c;
  logic                         s1_valid;
  logic [TAG_W-1:0]             s1_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1_s   <= grp_s;
      s1_c   <= grp_c;
      s1_tag <= in_tag;
    end
  end

  // stage 2: fusion adder
  logic [MAC_W-1:0] fused;

  always_comb begin
    logic [MAC_W-1:0] s, c, ns, nc;
    s = '0;
    c = '0;
    for (int g = 0; g < GROUPS; g++) begin
      csa(s, c, s1_s[g], ns, nc);
      csa(ns, nc, s1_c[g], s, c);
    end
    fused = s + c;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s1_valid;
  end

  always_ff @(posedge clk) begin
    if (s1_valid) begin
      mac     <= signed'(fused);
      out_tag <= s1_tag;
    end
  end

endmodule
