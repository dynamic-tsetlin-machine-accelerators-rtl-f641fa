// weight_update_matrix: block 3 of the DTM, M lanes, combinational.
// For each of the M clauses of the current window (clause mask = 1), the
// clause is selected for feedback when p_update >= w_rand[j] * T. A selected
// clause gets, from the sign of its weight in the class being updated:
//   target class (y_c=1):  weight >= 0 -> Type I,  weight < 0 -> Type II
//   negated class (y_c=0): weight >= 0 -> Type II, weight < 0 -> Type I
// and, in CoTM mode, a selected clause whose output is 1 has that weight
// incremented (target) or decremented (negated), saturating at the W_BITS
// signed range. In Vanilla TM mode the "weight" is the clause polarity
// (+1 for even clause index, -1 for odd) and no weight changes.
// weights_in is the whole weight RAM row (N classes x M clauses); only row
// lane `lane` (class mod N) is examined and rewritten in weights_out.
// Follows the paper's clause-level feedback algorithm and figure. The paper's
// algorithm listing assigns 2'b01 to a target clause with negative weight;
// its feedback figure and the TA update algorithm (2'b01 = Type I) give the
// rule above, which this design follows. Saturation is this design's choice.
module weight_update_matrix #(
  parameter int unsigned M      = 8,
  parameter int unsigned N      = 4,
  parameter int unsigned W_BITS = 12,
  parameter int unsigned L_R    = 24,
  parameter int unsigned LP     = 42
) (
  input  dtm_pkg::tm_type_e                     tm_type,
  input  logic                                  y_c,
  input  logic [$clog2(N > 1 ? N : 2)-1:0]      lane,
  input  logic [LP-1:0]                         p_update,
  input  logic [15:0]                           threshold,
  input  logic [M-1:0][L_R-1:0]                 w_rand,
  input  logic [M-1:0]                          cl,
  input  logic [M-1:0]                          cl_mask,
  input  logic [N-1:0][M-1:0][W_BITS-1:0]       weights_in,
  output logic [N-1:0][M-1:0][W_BITS-1:0]       weights_out,
  output logic [M-1:0][1:0]                     feedback
);
  import dtm_pkg::*;
  localparam logic signed [W_BITS-1:0] WMAX = {1'b0, {(W_BITS-1){1'b1}}};
  localparam logic signed [W_BITS-1:0] WMIN = {1'b1, {(W_BITS-1){1'b0}}};

  always_comb begin
    weights_out = weights_in;
    for (int unsigned j = 0; j < M; j++) begin
      logic signed [W_BITS-1:0] w;
      logic                     nonneg, sel;
      logic [LP-1:0]            prod;
      w      = signed'(weights_in[lane][j]);
      nonneg = (tm_type == TM_VANILLA) ? (j % 2 == 0) : (w >= 0);
      prod   = LP'(w_rand[j]) * LP'(threshold);
      sel    = cl_mask[j] && (p_update >= prod);
      feedback[j] = FB_NONE;
      if (sel) begin
        if (y_c) feedback[j] = nonneg ? FB_TYPE1 : FB_TYPE2;
        else     feedback[j] = nonneg ? FB_TYPE2 : FB_TYPE1;
        if (tm_type == TM_COTM && cl[j]) begin
          if (y_c && w != WMAX)       weights_out[lane][j] = w + 1'b1;
          else if (!y_c && w != WMIN) weights_out[lane][j] = w - 1'b1;
        end
      end
    end
  end
endmodule
