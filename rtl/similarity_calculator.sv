// similarity_calculator: fuses PE partial sums into sum Q.D, computes the
// query norm while the query loads, and forms the norm product ||Q||.||D||.
//
// Query norm: q_clear starts a new query; every q_valid word adds the squares
// of its 16 INT8 entries to a running sum. After q_last an iterative integer
// square root (one result bit per cycle, 16 cycles) turns 256*sum(q^2) into
// ||Q|| in unsigned 12.4 fixed point; q_norm_valid then rises and stays high
// until the next q_clear.
//
// Dot product: each pe_valid cycle brings one pass of all LANES PEs. Their
// MAC results are added (the cross-PE fusion), shifted left by the pass
// weight pe_tag.shift and accumulated. On the pass marked last the result
// leaves one cycle later on res_valid with the document id, the dot product
// and the norm product ||Q|| x ||D|| (D's norm travels in the tag); in MIPS
// mode the norm product is 1, so the rerank compares plain dot products.
// A stage-1 document is a single pass of weight 1; a stage-2 document is four
// passes of weight 256, 16, 16, 1.
// The fusion and the norm product follow the paper's similarity calculator;
// the 12.4 norm format and the bit-serial square root are this design's.
module similarity_calculator import rag_pkg::*; (
  input  logic                        clk,
  input  logic                        rst_n,
  input  sim_mode_e                   mode,
  // query norm
  input  logic                        q_clear,
  input  logic                        q_valid,
  input  logic                        q_last,
  input  logic [127:0]                q_data,
  output logic [NORM_W-1:0]           q_norm,
  output logic                        q_norm_valid,
  // PE partial sums
  input  logic                        pe_valid,
  input  logic [LANES-1:0][MAC_W-1:0] pe_mac,
  input  pass_tag_t                   pe_tag,
  // to rerank
  output logic                        res_valid,
  output sim_result_t                 res
);

  // ---------------- query norm ----------------
  logic [31:0] sumsq_q;
  logic [31:0] word_sq;

  always_comb begin
    logic signed [7:0] v;
    word_sq = '0;
    for (int j = 0; j < 16; j++) begin
      v = q_data[8*j +: 8];
      word_sq += 32'(v * v);
    end
  end

  // digit-by-digit square root of rad = 256 * sum(q^2)
  logic [31:0] sq_op, sq_res, sq_one;
  logic        sq_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sumsq_q      <= '0;
      sq_busy      <= 1'b0;
      q_norm_valid <= 1'b0;
      q_norm       <= '0;
      sq_op        <= '0;
      sq_res       <= '0;
      sq_one       <= '0;
    end else if (q_clear) begin
      sumsq_q      <= '0;
      sq_busy      <= 1'b0;
      q_norm_valid <= 1'b0;
    end else begin
      if (q_valid) begin
        sumsq_q <= sumsq_q + word_sq;
        if (q_last) begin
          sq_op   <= (sumsq_q + word_sq) << 8;
          sq_res  <= '0;
          sq_one  <= 32'h4000_0000;
          sq_busy <= 1'b1;
        end
      end
      if (sq_busy) begin
        if (sq_op >= sq_res + sq_one) begin
          sq_op  <= sq_op - (sq_res + sq_one);
          sq_res <= (sq_res >> 1) + sq_one;
        end else begin
          sq_res <= sq_res >> 1;
        end
        sq_one <= sq_one >> 2;
        if (sq_one == 32'd1) begin
          sq_busy      <= 1'b0;
          q_norm_valid <= 1'b1;
          q_norm       <= (sq_op >= sq_res + sq_one) ? NORM_W'((sq_res >> 1) + sq_one)
                                                     : NORM_W'(sq_res >> 1);
        end
      end
    end
  end

  // ---------------- dot product fusion ----------------
  logic signed [DOT_W-1:0] fused, acc_q, acc_next;

  always_comb begin
    fused = '0;
    for (int l = 0; l < LANES; l++) fused += DOT_W'(signed'(pe_mac[l]));
    acc_next = acc_q + (fused <<< pe_tag.shift);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q     <= '0;
      res_valid <= 1'b0;
      res       <= '0;
    end else begin
      res_valid <= 1'b0;
      if (pe_valid) begin
        if (pe_tag.last) begin
          acc_q       <= '0;
          res_valid   <= 1'b1;
          res.s.dot   <= acc_next;
          res.s.nprod <= (mode == SIM_MIPS) ? NP_W'(1) : NP_W'(q_norm) * NP_W'(pe_tag.dnorm);
          res.id      <= pe_tag.id;
        end else begin
          acc_q <= acc_next;
        end
      end
    end
  end

endmodule
