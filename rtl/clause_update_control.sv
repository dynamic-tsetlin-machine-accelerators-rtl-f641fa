// clause_update_control: class-level feedback (the "Clause update control"
// of block 5). Two strobes:
//  gen_neg - latches the negated class, picked from the random c_rand as
//            RN = c_rand mod (h-1), neg = RN if RN < target else RN+1, so it
//            is uniform over the h-1 classes other than the target;
//  calc    - latches the clause update probability from the class sum of the
//            class being updated: clip it to [-T, T], then
//            P = (T - csum) * 2^(L_R-1) for the target class (y_c = 1) and
//            P = (T + csum) * 2^(L_R-1) for the negated class (y_c = 0).
// The weight update matrix selects a clause when P >= w_rand * T, with w_rand
// an L_R-bit random number: the integer form of rand <= (T -/+ csum)/(2T).
// Outputs are valid the cycle after the strobe.
// Follows the paper's class-level feedback algorithm, except the modulus:
// the algorithm prints mod (Class_num - 2), which would never pick the last
// class; this design uses mod (Class_num - 1), see the README.
module clause_update_control #(
  parameter int unsigned L_CSUM = 16,
  parameter int unsigned L_R    = 24,
  parameter int unsigned LP     = L_CSUM + 2 + L_R
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     gen_neg,
  input  logic                     calc,
  input  logic                     y_c,
  input  logic [7:0]               target,
  input  logic [7:0]               n_classes,
  input  logic [L_R-1:0]           c_rand,
  input  logic [15:0]              threshold,
  input  logic signed [L_CSUM-1:0] csum,
  output logic [7:0]               neg_class,
  output logic [LP-1:0]            p_update
);
  logic [7:0] rn;
  logic signed [L_CSUM+1:0] t_s, clip, diff;

  always_comb begin
    rn   = (n_classes > 8'd1) ? 8'(c_rand % L_R'(n_classes - 8'd1)) : 8'd0;
    t_s  = signed'({2'b00, threshold});
    clip = (L_CSUM+2)'(csum);
    if (clip > t_s) clip = t_s;
    if (clip < -t_s) clip = -t_s;
    diff = y_c ? (t_s - clip) : (t_s + clip);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      neg_class <= '0;
      p_update  <= '0;
    end else begin
      if (gen_neg) neg_class <= (rn < target) ? rn : rn + 8'd1;
      if (calc)    p_update  <= LP'(unsigned'(diff)) << (L_R - 1);
    end
  end
endmodule
