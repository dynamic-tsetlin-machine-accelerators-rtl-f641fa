// clause_matrix: the x-by-y partial clause matrix (block 1 of the DTM).
// Each enabled cycle it takes one slice of X literals (already ORed with the
// remainder literal mask) and the X*Y TA states of one TA RAM row, and for
// each of the Y clauses ANDs (literal OR NOT action) over the X literals into
// its partial clause register p_cl. first=1 restarts p_cl from all ones, so
// after the a = ceil(2f/X) slices of a clause group p_cl holds the Y clause
// outputs, already ANDed with the clause buffer mask. Result appears on p_cl
// one cycle after the last slice.
// TA row layout: state of clause i, literal j at ta_row[i][j]; the action
// (1 = include) is the state's MSB.
// Follows the paper's Eq. 1 and CLAUSE algorithm exactly; the row layout and
// MSB-as-action are this design's choice (the paper says only that states
// above the midpoint include).
module clause_matrix #(
  parameter int unsigned X    = 32,
  parameter int unsigned Y    = 27,
  parameter int unsigned L_TA = 8
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             en,
  input  logic                             first,
  input  logic [X-1:0]                     lit_or_mask,
  input  logic [Y-1:0][X-1:0][L_TA-1:0]    ta_row,
  input  logic [Y-1:0]                     cl_buf_mask,
  output logic [Y-1:0]                     p_cl
);
  logic [Y-1:0] slice_out;

  always_comb begin
    for (int unsigned i = 0; i < Y; i++) begin
      logic acc;
      acc = cl_buf_mask[i];
      for (int unsigned j = 0; j < X; j++)
        acc = acc & (lit_or_mask[j] | ~ta_row[i][j][L_TA-1]);
      slice_out[i] = acc;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) p_cl <= '0;
    else if (en) p_cl <= (first ? {Y{1'b1}} : p_cl) & slice_out;
  end
endmodule
