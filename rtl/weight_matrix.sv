// weight_matrix: the m-by-n partial class sum matrix (block 2 of the DTM).
// Each enabled cycle it takes M clause outputs (ANDed with the clause mask)
// and one weight RAM row of N*M signed weights and adds, for each of the N
// classes, the weights of the clauses that are 1 into its partial class sum
// (multiplication by a 1-bit clause is an AND). first=1 starts the sums from
// 0. After p = ceil(c/M) cycles p_cs holds N class sums; it is registered,
// one cycle after the last window.
// In Vanilla TM mode the weights are not read: lane j weighs +1 when j is
// even (positive clause) and -1 when odd (negative clause); all N rows then
// compute the same class sum, row 0 is used.
// Follows the paper's Eq. 2-3, CSUM algorithm and clause mask. Own choice:
// class sums wrap at L_CSUM bits (the paper does not say how overflow is
// handled); M must be even so lane parity is clause parity.
module weight_matrix #(
  parameter int unsigned M      = 8,
  parameter int unsigned N      = 4,
  parameter int unsigned W_BITS = 12,
  parameter int unsigned L_CSUM = 16
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 en,
  input  logic                                 first,
  input  dtm_pkg::tm_type_e                    tm_type,
  input  logic [M-1:0]                         cl,
  input  logic [M-1:0]                         cl_mask,
  input  logic signed [N-1:0][M-1:0][W_BITS-1:0] weights,
  output logic signed [N-1:0][L_CSUM-1:0]      p_cs
);
  import dtm_pkg::*;
  logic signed [N-1:0][L_CSUM-1:0] slice_sum;

  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      logic signed [L_CSUM-1:0] acc;
      acc = '0;
      for (int unsigned j = 0; j < M; j++) begin
        logic signed [L_CSUM-1:0] w;
        if (tm_type == TM_VANILLA) w = (j % 2 == 0) ? L_CSUM'(1) : -L_CSUM'(1);
        else w = L_CSUM'(signed'(weights[i][j]));
        if (cl[j] && cl_mask[j]) acc = acc + w;
      end
      slice_sum[i] = acc;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) p_cs <= '0;
    else if (en)
      for (int unsigned i = 0; i < N; i++)
        p_cs[i] <= (first ? L_CSUM'(0) : p_cs[i]) + slice_sum[i];
  end

  initial assert (M % 2 == 0) else $error("M must be even");
endmodule
