// ta_update_matrix: block 4 of the DTM, X*Y TA update blocks, combinational.
// It rewrites one TA RAM row (Y clauses x X literals) from the clause
// outputs cl, their feedback fb, the X literals of the slice, X*Y random
// numbers and the precomputed TA update probability p_ta = 2^L_R / s.
// For TA (i,j), only when cl_mask[i] and lit_valid[j]:
//  Type I  (fb 01): if cl=0 or literal=0: decrement (floor 0) when p_ta >= rand;
//                   if cl=1 and literal=1: increment (ceiling 2^L_TA-1) when
//                   p_ta < rand, or always when boost_tpf is set;
//  Type II (fb 10): if cl=1, literal=0 and the TA excludes (MSB 0): increment.
// Follows the paper's TA update algorithm and Type I/II figure. The algorithm
// listing tests "action == 1" for Type II while its bound 2^(L_TA-1) and the
// feedback figure imply an excluded TA; this design increments excluded TAs
// as the figure shows. The boost-true-positive switch is the mode the paper
// names in its background section.
module ta_update_matrix #(
  parameter int unsigned X    = 32,
  parameter int unsigned Y    = 27,
  parameter int unsigned L_TA = 8,
  parameter int unsigned L_R  = 24
) (
  input  logic [Y-1:0][X-1:0][L_TA-1:0] ta_in,
  input  logic [X-1:0]                  lit,
  input  logic [X-1:0]                  lit_valid,
  input  logic [Y-1:0]                  cl,
  input  logic [Y-1:0]                  cl_mask,
  input  logic [Y-1:0][1:0]             fb,
  input  logic [Y*X-1:0][L_R-1:0]       ta_rand,
  input  logic [31:0]                   p_ta,
  input  logic                          boost_tpf,
  output logic [Y-1:0][X-1:0][L_TA-1:0] ta_out
);
  import dtm_pkg::*;
  localparam logic [L_TA-1:0] TA_MAX = {L_TA{1'b1}};

  // next state of one TA
  function automatic logic [L_TA-1:0] ta_next(input logic [L_TA-1:0] t, input logic active,
                                              input logic [1:0] f, input logic c, input logic l,
                                              input logic hit, input logic boost);
    ta_next = t;
    if (active) begin
      if (f == FB_TYPE1) begin
        if (!c || !l) begin
          if (hit && t != '0) ta_next = t - 1'b1;
        end else begin
          if ((boost || !hit) && t != TA_MAX) ta_next = t + 1'b1;
        end
      end else if (f == FB_TYPE2) begin
        if (c && !l && !t[L_TA-1]) ta_next = t + 1'b1;
      end
    end
  endfunction

  // one update block per TA, each driving its own field of the row
  for (genvar i = 0; i < Y; i++) begin : g_clause
    for (genvar j = 0; j < X; j++) begin : g_lit
      assign ta_out[i][j] = ta_next(ta_in[i][j], cl_mask[i] && lit_valid[j], fb[i], cl[i], lit[j],
                                    p_ta >= 32'(ta_rand[i*X+j]), boost_tpf);
    end
  end
endmodule
