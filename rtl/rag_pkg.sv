// rag_pkg: sizes and types shared by the two-stage retrieval accelerator.
//
// The embedding geometry follows the paper: 512-dimensional INT8 document and
// query embeddings, a 512-bit DRAM row holding one bit-plane of a document,
// four lanes of 128 dimensions, 16-bit PE results and a top-50 candidate set.
// Norm format, accumulator widths and id width are this design's choices:
// norms are unsigned 12.4 fixed point (16 x the Euclidean norm), dot products
// are carried in 32-bit two's complement and document ids are 16 bits.
package rag_pkg;

  localparam int unsigned DIM       = 512;           // embedding dimensions
  localparam int unsigned LANES     = 4;             // SRAM buffer / PE pairs
  localparam int unsigned LANE_DIM  = DIM / LANES;   // 128 dimensions per lane
  localparam int unsigned ROW_W     = DIM;           // one DRAM row = one bit-plane
  localparam int unsigned PLANES    = 8;             // INT8: 8 rows per document
  localparam int unsigned MSB_PLANES = 4;            // stage 1 reads bits 7..4 only
  localparam int unsigned QWORD_W   = 128;           // query word: 16 INT8 entries
  localparam int unsigned QWORDS    = DIM * 8 / QWORD_W;      // 32 words per query
  localparam int unsigned QSLOTS    = LANE_DIM * 8 / QWORD_W; // 8 words per PE
  localparam int unsigned MAC_W     = 16;            // PE output, MAC<15:0>
  localparam int unsigned NORM_W    = 16;            // unsigned 12.4 norm
  localparam int unsigned DOT_W     = 32;            // fused dot product
  localparam int unsigned NP_W      = 2 * NORM_W;    // ||Q|| * ||D||
  localparam int unsigned ID_W      = 16;            // document id
  localparam int unsigned ROW_AW    = ID_W + 3;      // root row = id * 8
  localparam int unsigned TOPK      = 50;            // candidate set size

  typedef enum logic {
    SIM_COSINE = 1'b0,
    SIM_MIPS   = 1'b1
  } sim_mode_e;

  // Sideband that travels with every PE pass.
  typedef struct packed {
    logic              last;    // last pass of this document
    logic [3:0]        shift;   // weight of the pass: 0, 4 or 8
    logic [ID_W-1:0]   id;      // document id
    logic [NORM_W-1:0] dnorm;   // document norm (unused in MIPS mode)
  } pass_tag_t;

  // What the similarity buffer keeps for each ranked document.
  typedef struct packed {
    logic signed [DOT_W-1:0] dot;    // sum Q.D
    logic [NP_W-1:0]         nprod;  // ||Q||.||D|| (1 in MIPS mode)
  } sim_entry_t;

  // One finished document on its way to the rerank unit.
  typedef struct packed {
    sim_entry_t      s;
    logic [ID_W-1:0] id;
  } sim_result_t;

  // True when a/b ranks strictly above c/d, decided without a division:
  // a*d > c*b, valid because the norm products b and d are never negative.
  function automatic logic frac_greater(input logic signed [DOT_W-1:0] a,
                                        input logic [NP_W-1:0]         b,
                                        input logic signed [DOT_W-1:0] c,
                                        input logic [NP_W-1:0]         d);
    logic signed [DOT_W+NP_W:0] lhs, rhs;
    lhs = (DOT_W+NP_W+1)'(a) * $signed({1'b0, d});
    rhs = (DOT_W+NP_W+1)'(c) * $signed({1'b0, b});
    return lhs > rhs;
  endfunction

endpackage
