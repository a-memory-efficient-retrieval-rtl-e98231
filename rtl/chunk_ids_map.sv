// chunk_ids_map: ranked document ids and their DRAM root rows.
//
// Two banks of K entries, one per retrieval stage. The rerank unit inserts
// into bank wr_bank at ins_idx (entries below move down one place, the last
// falls off), in step with the similarity buffer. Each entry keeps the
// document id and its root row address, id * 8, since every document
// occupies a block of 8 DRAM rows. Bank 0 ends stage 1 holding the top-K
// candidate set; during stage 2 the controller reads it through two
// combinational read ports (one for embedding rows, one for norms) while the
// rerank unit fills bank 1 with the final INT8 ranking, presented on
// final_ids/final_roots. Validity is tracked by the rerank unit's count.
// The two-bank arrangement is this design's choice; the paper says the map
// records the ids and root addresses of the top candidates and is used to
// reload them.
module chunk_ids_map import rag_pkg::*; #(
  parameter int unsigned K = 50,
  localparam int unsigned KW = $clog2(K)
) (
  input  logic              clk,
  input  logic              wr_bank,
  input  logic              ins_valid,
  input  logic [KW-1:0]     ins_idx,
  input  logic [ID_W-1:0]   ins_id,
  input  logic [KW-1:0]     rd_idx_a,
  output logic [ID_W-1:0]   rd_id_a,
  output logic [ROW_AW-1:0] rd_root_a,
  input  logic [KW-1:0]     rd_idx_b,
  output logic [ID_W-1:0]   rd_id_b,
  output logic [ID_W-1:0]   final_ids   [K],
  output logic [ROW_AW-1:0] final_roots [K]
);

  typedef struct packed {
    logic [ID_W-1:0]   id;
    logic [ROW_AW-1:0] root;
  } chunk_t;

  chunk_t bank_q [2][K];
  chunk_t ins_c;

  assign ins_c = '{id: ins_id, root: {ins_id, 3'b000}};

  always_ff @(posedge clk) begin
    if (ins_valid) begin
      for (int j = 0; j < K; j++) begin
        if (j == int'(ins_idx))     bank_q[wr_bank][j] <= ins_c;
        else if (j > int'(ins_idx)) bank_q[wr_bank][j] <= bank_q[wr_bank][j-1];
      end
    end
  end

  assign rd_id_a   = bank_q[0][rd_idx_a].id;
  assign rd_root_a = bank_q[0][rd_idx_a].root;
  assign rd_id_b   = bank_q[0][rd_idx_b].id;

  always_comb begin
    for (int j = 0; j < K; j++) begin
      final_ids[j]   = bank_q[1][j].id;
      final_roots[j] = bank_q[1][j].root;
    end
  end

endmodule
