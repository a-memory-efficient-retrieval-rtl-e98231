// rag_retrieval_top: two-stage (MSB INT4 then INT8) retrieval accelerator
// for edge retrieval-augmented generation.
//
// Datapath, one lane per 128 embedding dimensions (LANES = 4):
//   DRAM row (512 bits, one bit-plane of one document)
//     -> sram_buffer[l] (128-bit slice of lane l)
//     -> plane_gather[l] (bit-planes back to INT8 entries, input register)
//     -> pe[l] (128 nibble products, two-stage carry-save sum, query stationary)
//   -> similarity_calculator (sum over lanes and passes, ||Q||.||D||)
//   -> result FIFO -> rerank (fraction comparison, insertion into the top-K)
//   -> similarity_buffer + chunk_ids_map (ranked scores and ids)
// The query is loaded once through query_buffer into all PEs; the
// controller runs stage 1 over every document (4 MSB rows each), then
// stage 2 over the K best candidates (all 8 rows each) and presents the
// final ranking on topk_* when done is high.
//
// Interfaces (all synchronous to clk, active-low asynchronous reset):
//   start/num_docs/mode   pulse start when idle or done; mode 0 cosine, 1 MIPS.
//   q_in_*                32 words of 16 INT8 query entries, valid/ready.
//   dram_req_*            row read: valid/ready with a row address; the data
//   dram_rvalid/rdata     returns in request order, any latency, no stall.
//                         Document d occupies rows 8d..8d+7; row 8d+r holds
//                         bit 7-r of all 512 entries (bit i = entry i).
//   norm_req_*            pre-computed document norm (16 x ||D||, 16-bit)
//   norm_rvalid/rdata     for document id, same protocol (cosine mode only).
//   topk_count/ids/roots/scores  final ranking, entry 0 best, valid while
//                         done is high (scores: INT8 dot product and norm
//                         product of each entry).
// The block structure follows the paper; the protocols, buffer depths and
// the result FIFO are this design's choices.
module rag_retrieval_top import rag_pkg::*; #(
  parameter int unsigned K          = TOPK,
  parameter int unsigned BUF_DEPTH  = 16,
  parameter int unsigned META_DEPTH = 8,
  parameter int unsigned RES_DEPTH  = 4,
  localparam int unsigned KW  = $clog2(K),
  localparam int unsigned CW  = $clog2(K + 1),
  localparam int unsigned BAW = $clog2(BUF_DEPTH),
  localparam int unsigned QAW = $clog2(QWORDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ID_W-1:0]   num_docs,
  input  sim_mode_e         mode,
  output logic              busy,
  output logic              done,
  input  logic              q_in_valid,
  output logic              q_in_ready,
  input  logic [QWORD_W-1:0] q_in_data,
  output logic              dram_req_valid,
  input  logic              dram_req_ready,
  output logic [ROW_AW-1:0] dram_req_addr,
  input  logic              dram_rvalid,
  input  logic [ROW_W-1:0]  dram_rdata,
  output logic              norm_req_valid,
  input  logic              norm_req_ready,
  output logic [ID_W-1:0]   norm_req_id,
  input  logic              norm_rvalid,
  input  logic [NORM_W-1:0] norm_rdata,
  output logic [CW-1:0]     topk_count,
  output logic [ID_W-1:0]   topk_ids    [K],
  output logic [ROW_AW-1:0] topk_roots  [K],
  output sim_entry_t        topk_scores [K]
);

  // controller <-> datapath
  sim_mode_e          mode_q;
  logic               stage2;
  logic               qb_we, qb_re, sc_q_clear, sc_q_valid, sc_q_last, q_norm_valid;
  logic [QAW-1:0]     qb_waddr, qb_raddr;
  logic [QWORD_W-1:0] qb_rdata;
  logic [LANES-1:0]   pe_q_we;
  logic [2:0]         pe_q_slot;
  logic [NORM_W-1:0]  q_norm;
  logic               buf_we, buf_re;
  logic [BAW-1:0]     buf_waddr, buf_raddr;
  logic               plane_valid, xfer, nib_hi;
  logic [2:0]         plane_bit;
  logic               pe_in_valid, pe_q_hi;
  pass_tag_t          pe_tag;
  logic               cm_wr_bank;
  logic [KW-1:0]      cm_rd_idx_a, cm_rd_idx_b;
  logic [ID_W-1:0]    cm_rd_id_a, cm_rd_id_b;
  logic [ROW_AW-1:0]  cm_rd_root_a;
  logic               rr_clear;
  logic               ev_stage_switch, ev_buf_stall, ev_res_stall;

  query_buffer #(.WORD_W(QWORD_W), .WORDS(QWORDS)) u_qbuf (
    .clk, .we(qb_we), .waddr(qb_waddr), .wdata(q_in_data),
    .re(qb_re), .raddr(qb_raddr), .rdata(qb_rdata));

  // ---------------- four lanes ----------------
  logic [LANES-1:0][LANE_DIM-1:0]      buf_rdata;
  logic [LANES-1:0][LANE_DIM-1:0][3:0] d_nib;
  logic [LANES-1:0]                    pe_out_valid;
  logic [LANES-1:0][MAC_W-1:0]         pe_mac;
  pass_tag_t                           pe_out_tag [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    sram_buffer #(.WIDTH(LANE_DIM), .DEPTH(BUF_DEPTH)) u_buf (
      .clk, .we(buf_we), .waddr(buf_waddr), .wdata(dram_rdata[l*LANE_DIM +: LANE_DIM]),
      .re(buf_re), .raddr(buf_raddr), .rdata(buf_rdata[l]));

    plane_gather #(.LANE_DIM(LANE_DIM)) u_gather (
      .clk, .plane_valid, .plane_bit, .plane_data(buf_rdata[l]),
      .xfer, .nib_hi, .d_nib(d_nib[l]));

    pe #(.LANE_DIM(LANE_DIM), .GROUP_DIM(32), .MAC_W(MAC_W), .TAG_W($bits(pass_tag_t))) u_pe (
      .clk, .rst_n, .q_we(pe_q_we[l]), .q_slot(pe_q_slot), .q_wdata(qb_rdata),
      .in_valid(pe_in_valid), .d_nib(d_nib[l]), .d_signed(nib_hi), .q_hi(pe_q_hi),
      .in_tag(pe_tag), .out_valid(pe_out_valid[l]), .mac(pe_mac[l]), .out_tag(pe_out_tag[l]));
  end

  // ---------------- similarity calculator ----------------
  logic        sc_res_valid;
  sim_result_t sc_res;

  similarity_calculator u_sc (
    .clk, .rst_n, .mode(mode_q),
    .q_clear(sc_q_clear), .q_valid(sc_q_valid), .q_last(sc_q_last), .q_data(q_in_data),
    .q_norm, .q_norm_valid,
    .pe_valid(pe_out_valid[0]), .pe_mac, .pe_tag(pe_out_tag[0]),
    .res_valid(sc_res_valid), .res(sc_res));

  // ---------------- result FIFO and rerank ----------------
  localparam int unsigned RCW = $clog2(RES_DEPTH + 1);
  logic        rf_empty, rf_full, rf_pop;
  logic [RCW-1:0] rf_count;
  sim_result_t rf_head;
  logic        rr_ready, rr_busy, ins_valid, ev_insert, ev_break, ev_discard;
  logic [KW-1:0] rd_idx, ins_idx;
  sim_entry_t  rd_entry;
  sim_result_t ins_res;

  sync_fifo #(.WIDTH($bits(sim_result_t)), .DEPTH(RES_DEPTH)) u_res_fifo (
    .clk, .rst_n, .push(sc_res_valid), .wdata(sc_res), .pop(rf_pop),
    .rdata(rf_head), .empty(rf_empty), .full(rf_full), .count(rf_count));

  assign rf_pop = !rf_empty && rr_ready;

  rerank #(.K(K)) u_rr (
    .clk, .rst_n, .clear(rr_clear), .in_valid(!rf_empty), .in_ready(rr_ready), .in_res(rf_head),
    .rd_idx, .rd_entry, .ins_valid, .ins_idx, .ins_res, .count(topk_count), .busy(rr_busy),
    .ev_insert, .ev_break, .ev_discard);

  similarity_buffer #(.K(K)) u_simbuf (
    .clk, .rd_idx, .rd_entry, .ins_valid, .ins_idx, .ins_entry(ins_res.s), .entries(topk_scores));

  chunk_ids_map #(.K(K)) u_cmap (
    .clk, .wr_bank(cm_wr_bank), .ins_valid, .ins_idx, .ins_id(ins_res.id),
    .rd_idx_a(cm_rd_idx_a), .rd_id_a(cm_rd_id_a), .rd_root_a(cm_rd_root_a),
    .rd_idx_b(cm_rd_idx_b), .rd_id_b(cm_rd_id_b),
    .final_ids(topk_ids), .final_roots(topk_roots));

  // ---------------- controller ----------------
  controller #(.K(K), .BUF_DEPTH(BUF_DEPTH), .META_DEPTH(META_DEPTH), .RES_DEPTH(RES_DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .num_docs, .mode_in(mode), .mode(mode_q), .busy, .done, .stage2,
    .q_in_valid, .q_in_ready, .qb_we, .qb_waddr, .sc_q_clear, .sc_q_valid, .sc_q_last,
    .q_norm_valid, .qb_re, .qb_raddr, .pe_q_we, .pe_q_slot,
    .dram_req_valid, .dram_req_ready, .dram_req_addr, .dram_rvalid,
    .norm_req_valid, .norm_req_ready, .norm_req_id, .norm_rvalid, .norm_rdata,
    .buf_we, .buf_waddr, .buf_re, .buf_raddr,
    .plane_valid, .plane_bit, .xfer, .nib_hi,
    .pe_in_valid, .pe_q_hi, .pe_tag,
    .cm_wr_bank, .cm_rd_idx_a, .cm_rd_id_a, .cm_rd_root_a, .cm_rd_idx_b, .cm_rd_id_b,
    .res_pop(rf_pop), .rr_doc_done(ev_insert || ev_discard), .rr_count(topk_count), .rr_clear,
    .ev_stage_switch, .ev_buf_stall, .ev_res_stall);

  // the result FIFO never overflows: the controller's credit covers it
  a_res_fifo: assert property (@(posedge clk) disable iff (!rst_n) sc_res_valid |-> !rf_full);
  // all lanes run in lock step
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) pe_out_valid == {LANES{pe_out_valid[0]}} );

endmodule
