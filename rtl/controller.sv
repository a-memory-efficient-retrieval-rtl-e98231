// controller: sequences one retrieval query through both stages.
//
// A query runs   IDLE -> QLOAD -> QDIST -> WAITN -> RUN(stage 1) ->
// RUN(stage 2) -> DONE.
//   QLOAD  accepts the 32 query words (q_in_valid/q_in_ready), writes them to
//          the query buffer and shows them to the similarity calculator,
//          which sums their squares.
//   QDIST  reads the query buffer back and loads word w into slot w%8 of the
//          stationary query registers of PE w/8.
//   WAITN  waits for the query norm (cosine mode only).
//   RUN    stage 1 visits documents 0..num_docs-1 and reads only rows 0..3
//          of each 8-row block (bits 7..4, the MSB INT4); stage 2 visits the
//          candidates ranked in bank 0 of the chunk IDs map and reads all 8
//          rows. The rerank list is cleared at the switch and bank 1 of the
//          map collects the final ranking.
// During RUN four engines work concurrently:
//   fetch  issues DRAM row reads (valid/ready, in-order responses) while the
//          SRAM ring has room for them (BUF_DEPTH rows counting rows in
//          flight) and pushes each document's id into an id FIFO;
//   norm   (cosine) requests each document's pre-computed norm on its own
//          channel and queues the answers in a norm FIFO;
//   read   moves rows from the SRAM buffers into the input registers, one
//          bit-plane per cycle, and hands a complete document to the PEs;
//   pass   issues PE passes: one per stage-1 document (high x high nibble),
//          four per stage-2 document (hh<<8, hl<<4, lh<<4, ll). A document
//          starts only when its id and norm are queued and the result FIFO in
//          front of the rerank unit has room (RES_DEPTH documents in flight),
//          which is how a busy rerank stalls the pipeline.
// A stage ends when the rerank unit has taken every document of it.
// The stage order, bit-planar row selection and chunk-map reload follow the
// paper; the protocol, credits, FIFOs and state machine are this design's.
module controller import rag_pkg::*; #(
  parameter int unsigned K          = 50,
  parameter int unsigned BUF_DEPTH  = 16,
  parameter int unsigned META_DEPTH = 8,
  parameter int unsigned RES_DEPTH  = 4,
  localparam int unsigned KW  = $clog2(K),
  localparam int unsigned CW  = $clog2(K + 1),
  localparam int unsigned BAW = $clog2(BUF_DEPTH),
  localparam int unsigned QAW = $clog2(QWORDS)
) (
  input  logic                clk,
  input  logic                rst_n,
  // command
  input  logic                start,
  input  logic [ID_W-1:0]     num_docs,
  input  sim_mode_e           mode_in,
  output sim_mode_e           mode,
  output logic                busy,
  output logic                done,
  output logic                stage2,
  // query loading
  input  logic                q_in_valid,
  output logic                q_in_ready,
  output logic                qb_we,
  output logic [QAW-1:0]      qb_waddr,
  output logic                sc_q_clear,
  output logic                sc_q_valid,
  output logic                sc_q_last,
  input  logic                q_norm_valid,
  output logic                qb_re,
  output logic [QAW-1:0]      qb_raddr,
  output logic [LANES-1:0]    pe_q_we,
  output logic [2:0]          pe_q_slot,
  // DRAM row channel
  output logic                dram_req_valid,
  input  logic                dram_req_ready,
  output logic [ROW_AW-1:0]   dram_req_addr,
  input  logic                dram_rvalid,
  // DRAM norm channel
  output logic                norm_req_valid,
  input  logic                norm_req_ready,
  output logic [ID_W-1:0]     norm_req_id,
  input  logic                norm_rvalid,
  input  logic [NORM_W-1:0]   norm_rdata,
  // SRAM buffers
  output logic                buf_we,
  output logic [BAW-1:0]      buf_waddr,
  output logic                buf_re,
  output logic [BAW-1:0]      buf_raddr,
  // input registers
  output logic                plane_valid,
  output logic [2:0]          plane_bit,
  output logic                xfer,
  output logic                nib_hi,
  // PEs
  output logic                pe_in_valid,
  output logic                pe_q_hi,
  output pass_tag_t           pe_tag,
  // chunk IDs map
  output logic                cm_wr_bank,
  output logic [KW-1:0]       cm_rd_idx_a,
  input  logic [ID_W-1:0]     cm_rd_id_a,
  input  logic [ROW_AW-1:0]   cm_rd_root_a,
  output logic [KW-1:0]       cm_rd_idx_b,
  input  logic [ID_W-1:0]     cm_rd_id_b,
  // rerank side
  input  logic                res_pop,
  input  logic                rr_doc_done,
  input  logic [CW-1:0]       rr_count,
  output logic                rr_clear,
  // events
  output logic                ev_stage_switch,
  output logic                ev_buf_stall,
  output logic                ev_res_stall
);

  typedef enum logic [2:0] {S_IDLE, S_QLOAD, S_QDIST, S_WAITN, S_RUN, S_DONE} state_e;

  state_e          state_q;
  logic [ID_W-1:0] nd_q;                  // documents in this stage
  logic [QAW-1:0]  qw_q;                  // query word counter
  logic [QAW:0]    qd_q;                  // query distribution read counter
  logic            qd_valid_q;
  logic [QAW-1:0]  qd_word_q;

  logic            run;
  assign run    = (state_q == S_RUN);
  assign busy   = (state_q != S_IDLE) && (state_q != S_DONE);
  assign done   = (state_q == S_DONE);
  assign cm_wr_bank = stage2;

  // ---------------- query load and distribution ----------------
  assign q_in_ready = (state_q == S_QLOAD);
  assign qb_we      = q_in_valid && q_in_ready;
  assign qb_waddr   = qw_q;
  assign sc_q_valid = qb_we;
  assign sc_q_last  = qb_we && (qw_q == QAW'(QWORDS - 1));
  assign sc_q_clear = start && !busy;
  assign qb_re      = (state_q == S_QDIST) && (qd_q < (QAW+1)'(QWORDS));
  assign qb_raddr   = qd_q[QAW-1:0];
  assign pe_q_slot  = qd_word_q[2:0];

  always_comb begin
    for (int l = 0; l < LANES; l++)
      pe_q_we[l] = qd_valid_q && (int'(qd_word_q) / int'(QSLOTS) == l);
  end

  // ---------------- per-stage geometry ----------------
  logic [3:0] planes;      // rows read per document
  logic [2:0] npass;       // PE passes per document
  assign planes = stage2 ? 4'(PLANES) : 4'(MSB_PLANES);
  assign npass  = stage2 ? 3'd4 : 3'd1;

  // ---------------- id / norm FIFOs ----------------
  localparam int unsigned MCW = $clog2(META_DEPTH + 1);
  logic            idf_push, idf_pop, idf_empty, idf_full;
  logic [ID_W-1:0] idf_wdata, idf_head;
  logic [MCW-1:0]  idf_count;
  logic            nf_pop, nf_empty, nf_full;
  logic [NORM_W-1:0] nf_head;
  logic [MCW-1:0]  nf_count;

  sync_fifo #(.WIDTH(ID_W), .DEPTH(META_DEPTH)) u_id_fifo (
    .clk, .rst_n, .push(idf_push), .wdata(idf_wdata), .pop(idf_pop),
    .rdata(idf_head), .empty(idf_empty), .full(idf_full), .count(idf_count));

  sync_fifo #(.WIDTH(NORM_W), .DEPTH(META_DEPTH)) u_norm_fifo (
    .clk, .rst_n, .push(norm_rvalid), .wdata(norm_rdata), .pop(nf_pop),
    .rdata(nf_head), .empty(nf_empty), .full(nf_full), .count(nf_count));

  // ---------------- fetch engine ----------------
  logic [ID_W:0]   f_doc_q;
  logic [2:0]      f_row_q;
  logic [BAW:0]    iptr_q, wptr_q, rptr_q;   // issued, written, read rows
  logic            buf_room, fetch_want;
  logic [ID_W-1:0] f_id;
  logic [ROW_AW-1:0] f_root;

  assign cm_rd_idx_a = KW'(f_doc_q);
  assign f_id        = stage2 ? cm_rd_id_a   : f_doc_q[ID_W-1:0];
  assign f_root      = stage2 ? cm_rd_root_a : {f_doc_q[ID_W-1:0], 3'b000};
  assign buf_room    = (iptr_q - rptr_q) < (BAW+1)'(BUF_DEPTH);
  assign fetch_want  = run && (f_doc_q < (ID_W+1)'(nd_q));
  assign dram_req_valid = fetch_want && buf_room && ((f_row_q != 3'd0) || !idf_full);
  assign dram_req_addr  = f_root + ROW_AW'(f_row_q);
  assign idf_push       = dram_req_valid && dram_req_ready && (f_row_q == 3'd0);
  assign idf_wdata      = f_id;
  assign ev_buf_stall   = fetch_want && !buf_room;

  assign buf_we    = dram_rvalid;
  assign buf_waddr = wptr_q[BAW-1:0];

  // ---------------- norm engine ----------------
  logic [ID_W:0]  n_doc_q;
  logic [MCW:0]   n_out_q;                  // norms requested, not yet used
  assign cm_rd_idx_b    = KW'(n_doc_q);
  assign norm_req_id    = stage2 ? cm_rd_id_b : n_doc_q[ID_W-1:0];
  assign norm_req_valid = run && (mode == SIM_COSINE) && (n_doc_q < (ID_W+1)'(nd_q))
                          && (n_out_q < (MCW+1)'(META_DEPTH));

  // ---------------- read engine ----------------
  logic [3:0] r_plane_q;
  logic       asm_full_q, pl_last_q;
  logic       op_valid_q;
  logic       pass_last_now;

  assign buf_re    = run && (wptr_q != rptr_q) && (r_plane_q < planes);
  assign buf_raddr = rptr_q[BAW-1:0];
  assign xfer      = asm_full_q && (!op_valid_q || pass_last_now);

  // ---------------- pass engine ----------------
  logic [1:0]        pass_q;
  logic              start_ok, pass_issue;
  logic [ID_W-1:0]   cur_id_q;
  logic [NORM_W-1:0] cur_norm_q;
  logic [$clog2(RES_DEPTH+1)-1:0] res_inflight_q;
  logic              res_room;

  assign res_room   = res_inflight_q < ($clog2(RES_DEPTH+1))'(RES_DEPTH);
  assign start_ok   = !idf_empty && ((mode == SIM_MIPS) || !nf_empty) && res_room;
  assign pass_issue = op_valid_q && ((pass_q != 2'd0) || start_ok);
  assign pass_last_now = pass_issue && ({1'b0, pass_q} == npass - 3'd1);
  assign idf_pop    = pass_issue && (pass_q == 2'd0);
  assign nf_pop     = idf_pop && (mode == SIM_COSINE);
  assign ev_res_stall = op_valid_q && (pass_q == 2'd0) && !res_room;

  assign pe_in_valid = pass_issue;
  // stage 2 pass order: hh, hl, lh, ll
  assign pe_q_hi = !stage2 || (pass_q < 2'd2);
  assign nib_hi  = !stage2 || !pass_q[0];
  always_comb begin
    pe_tag       = '0;
    pe_tag.last  = pass_last_now;
    pe_tag.shift = !stage2 ? 4'd0 :
                   (pass_q == 2'd0) ? 4'd8 :
                   (pass_q == 2'd3) ? 4'd0 : 4'd4;
    pe_tag.id    = (pass_q == 2'd0) ? idf_head : cur_id_q;
    pe_tag.dnorm = (pass_q == 2'd0) ? nf_head  : cur_norm_q;
  end

  // ---------------- completion ----------------
  logic [ID_W:0] done_cnt_q;
  logic          stage_complete;
  assign stage_complete = run && (done_cnt_q == (ID_W+1)'(nd_q));
  assign rr_clear       = (start && !busy) || (stage_complete && !stage2);
  assign ev_stage_switch = stage_complete && !stage2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q        <= S_IDLE;
      mode           <= SIM_COSINE;
      stage2         <= 1'b0;
      nd_q           <= '0;
      qw_q           <= '0;
      qd_q           <= '0;
      qd_valid_q     <= 1'b0;
      qd_word_q      <= '0;
      f_doc_q        <= '0;
      f_row_q        <= '0;
      iptr_q         <= '0;
      wptr_q         <= '0;
      rptr_q         <= '0;
      n_doc_q        <= '0;
      n_out_q        <= '0;
      r_plane_q      <= '0;
      asm_full_q     <= 1'b0;
      pl_last_q      <= 1'b0;
      plane_valid    <= 1'b0;
      plane_bit      <= '0;
      op_valid_q     <= 1'b0;
      pass_q         <= '0;
      cur_id_q       <= '0;
      cur_norm_q     <= '0;
      res_inflight_q <= '0;
      done_cnt_q     <= '0;
    end else begin
      // ---- state machine ----
      case (state_q)
        S_IDLE, S_DONE: if (start) begin
          mode    <= mode_in;
          nd_q    <= num_docs;
          stage2  <= 1'b0;
          qw_q    <= '0;
          state_q <= S_QLOAD;
        end
        S_QLOAD: if (qb_we) begin
          qw_q <= qw_q + 1'b1;
          if (sc_q_last) begin
            qd_q    <= '0;
            state_q <= S_QDIST;
          end
        end
        S_QDIST: begin
          if (qb_re) qd_q <= qd_q + 1'b1;
          if (qd_valid_q && qd_word_q == QAW'(QWORDS - 1)) state_q <= S_WAITN;
        end
        S_WAITN: if (mode == SIM_MIPS || q_norm_valid) begin
          f_doc_q    <= '0;
          f_row_q    <= '0;
          n_doc_q    <= '0;
          done_cnt_q <= '0;
          state_q    <= S_RUN;
        end
        S_RUN: if (stage_complete) begin
          f_doc_q    <= '0;
          f_row_q    <= '0;
          n_doc_q    <= '0;
          done_cnt_q <= '0;
          if (!stage2) begin
            stage2 <= 1'b1;
            nd_q   <= ID_W'(rr_count);
          end else begin
            state_q <= S_DONE;
          end
        end
        default: state_q <= S_IDLE;
      endcase

      qd_valid_q <= qb_re;
      qd_word_q  <= qd_q[QAW-1:0];

      if (run && !stage_complete) begin
        // ---- fetch ----
        if (dram_req_valid && dram_req_ready) begin
          if ({1'b0, f_row_q} == planes - 4'd1) begin
            f_row_q <= '0;
            f_doc_q <= f_doc_q + 1'b1;
          end else begin
            f_row_q <= f_row_q + 1'b1;
          end
        end
        // ---- norm ----
        if (norm_req_valid && norm_req_ready) n_doc_q <= n_doc_q + 1'b1;
        // ---- completion ----
        if (rr_doc_done) done_cnt_q <= done_cnt_q + 1'b1;
      end

      if (dram_req_valid && dram_req_ready) iptr_q <= iptr_q + 1'b1;
      if (dram_rvalid)                      wptr_q <= wptr_q + 1'b1;
      n_out_q <= n_out_q + (MCW+1)'(norm_req_valid && norm_req_ready) - (MCW+1)'(nf_pop);

      // ---- read ----
      plane_valid <= buf_re;
      plane_bit   <= 3'(4'd7 - r_plane_q);
      pl_last_q   <= buf_re && (r_plane_q == planes - 4'd1);
      if (buf_re) begin
        rptr_q    <= rptr_q + 1'b1;
        r_plane_q <= r_plane_q + 1'b1;
      end
      if (plane_valid && pl_last_q) asm_full_q <= 1'b1;
      if (xfer) begin
        asm_full_q <= 1'b0;
        r_plane_q  <= '0;
      end

      // ---- pass ----
      if (pass_issue) begin
        if (pass_q == 2'd0) begin
          cur_id_q   <= idf_head;
          cur_norm_q <= nf_head;
        end
        pass_q <= pass_last_now ? 2'd0 : pass_q + 1'b1;
      end
      if (xfer)               op_valid_q <= 1'b1;
      else if (pass_last_now) op_valid_q <= 1'b0;
      res_inflight_q <= res_inflight_q + ($clog2(RES_DEPTH+1))'(idf_pop)
                                       - ($clog2(RES_DEPTH+1))'(res_pop);
    end
  end

  // a document is never handed over while its last plane is still reading
  a_xfer_complete: assert property (@(posedge clk) disable iff (!rst_n)
                                    xfer |-> (r_plane_q == planes));
  // a request, once raised, waits unchanged for its ready
  a_row_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                     dram_req_valid && !dram_req_ready |=>
                                     dram_req_valid && $stable(dram_req_addr));
  a_norm_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                      norm_req_valid && !norm_req_ready |=>
                                      norm_req_valid && $stable(norm_req_id));
  // the SRAM ring never holds more than BUF_DEPTH rows
  a_buf_bound: assert property (@(posedge clk) disable iff (!rst_n)
                                (iptr_q - rptr_q) <= (BAW+1)'(BUF_DEPTH));

endmodule
