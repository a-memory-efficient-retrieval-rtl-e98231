// rerank: inserts each finished document into the sorted top-K list using
// the non-division fraction comparison.
//
// Cosine similarity is sum Q.D / (||Q||.||D||). Rather than divide, a new
// document Din beats ranked entry i when
//     sum Q.Din * ||Q||.||D[i]||  >  sum Q.D[i] * ||Q||.||Din||
// (both norm products are non-negative); in MIPS mode the norm products are
// 1 and this is a plain compare of dot products.
// Operation, as drawn in the paper: when idle (in_ready) the unit takes a
// result from in_valid/in_res. It then walks the list from i = 0, one
// comparison per cycle against rd_entry = similarity_buffer[rd_idx]. At the
// first entry the newcomer beats it breaks the loop and inserts at i
// (ins_valid/ins_idx/ins_res, both the similarity buffer and the chunk IDs
// map take it), otherwise i+1. When i reaches count, the newcomer is
// appended if the list holds fewer than K entries and dropped otherwise.
// A document costs 1 cycle to accept plus one cycle per entry visited
// (at most K+2 cycles). Ties keep the earlier document ahead. clear empties
// the list for a new stage. ev_insert/ev_break/ev_discard pulse for
// statistics. The valid/ready handshake is this design's choice.
module rerank import rag_pkg::*; #(
  parameter int unsigned K = 50,
  localparam int unsigned KW = $clog2(K),
  localparam int unsigned CW = $clog2(K + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_valid,
  output logic          in_ready,
  input  sim_result_t   in_res,
  output logic [KW-1:0] rd_idx,
  input  sim_entry_t    rd_entry,
  output logic          ins_valid,
  output logic [KW-1:0] ins_idx,
  output sim_result_t   ins_res,
  output logic [CW-1:0] count,
  output logic          busy,
  output logic          ev_insert,
  output logic          ev_break,
  output logic          ev_discard
);

  typedef enum logic {R_IDLE, R_CMP} rstate_e;

  rstate_e       state_q;
  sim_result_t   cand_q;
  logic [CW-1:0] i_q;
  logic          at_end, beats;

  assign in_ready = (state_q == R_IDLE) && !clear;
  assign busy     = (state_q == R_CMP);
  assign rd_idx   = KW'(i_q);
  assign at_end   = (i_q == count);
  assign beats    = frac_greater(cand_q.s.dot, cand_q.s.nprod, rd_entry.dot, rd_entry.nprod);

  always_comb begin
    ins_valid  = 1'b0;
    ins_idx    = KW'(i_q);
    ins_res    = cand_q;
    ev_break   = 1'b0;
    ev_discard = 1'b0;
    if (state_q == R_CMP) begin
      if (at_end) begin
        ins_valid  = (count < CW'(K));
        ev_discard = !(count < CW'(K));
      end else if (beats) begin
        ins_valid = 1'b1;
        ev_break  = 1'b1;
      end
    end
  end
  assign ev_insert = ins_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= R_IDLE;
      count   <= '0;
      i_q     <= '0;
      cand_q  <= '0;
    end else if (clear) begin
      state_q <= R_IDLE;
      count   <= '0;
      i_q     <= '0;
    end else begin
      case (state_q)
        R_IDLE: if (in_valid) begin
          cand_q  <= in_res;
          i_q     <= '0;
          state_q <= R_CMP;
        end
        R_CMP: begin
          if (ins_valid || ev_discard) begin
            state_q <= R_IDLE;
            if (ins_valid && count < CW'(K)) count <= count + 1'b1;
          end else begin
            i_q <= i_q + 1'b1;
          end
        end
        default: state_q <= R_IDLE;
      endcase
    end
  end

  // the list never grows beyond K and a comparison never reads past it
  a_count_bound: assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(K));
  a_idx_bound:   assert property (@(posedge clk) disable iff (!rst_n)
                                  state_q == R_CMP |-> i_q <= count);

endmodule
