// similarity_buffer: the ranked scores of the current top-K list.
//
// Entry 0 is the best document. Each entry holds the dot product sum Q.D and
// the norm product ||Q||.||D|| of one ranked document; its id sits at the
// same index of the chunk IDs map. The rerank unit reads one entry per cycle
// through rd_idx/rd_entry (combinational) and inserts with ins_valid: the new
// entry goes to ins_idx, entries ins_idx..K-2 move down one place and entry
// K-1 falls off. Which entries are valid is tracked by the rerank unit's
// count, so nothing here is reset. A register array is this design's choice;
// the paper only names the block.
module similarity_buffer import rag_pkg::*; #(
  parameter int unsigned K = 50,
  localparam int unsigned KW = $clog2(K)
) (
  input  logic       clk,
  input  logic [KW-1:0] rd_idx,
  output sim_entry_t rd_entry,
  input  logic       ins_valid,
  input  logic [KW-1:0] ins_idx,
  input  sim_entry_t ins_entry,
  output sim_entry_t entries [K]
);

  sim_entry_t mem_q [K];

  always_ff @(posedge clk) begin
    if (ins_valid) begin
      for (int j = 0; j < K; j++) begin
        if (j == int'(ins_idx))     mem_q[j] <= ins_entry;
        else if (j > int'(ins_idx)) mem_q[j] <= mem_q[j-1];
      end
    end
  end

  assign rd_entry = mem_q[rd_idx];
  assign entries  = mem_q;

endmodule
