// feature_buffer: stores the Boolean features of one datapoint and serves
// them to the clause and TA update matrices as literals.
// Write side: AXIS_W features per stream word (word wr_idx holds features
// wr_idx*AXIS_W .. +AXIS_W-1, bit 0 first). Read side, combinational: for
// literal slice k it returns X literals, literal 2i = feature, literal 2i+1
// = its complement, for features k*X/2 .. k*X/2 + X/2 - 1.
// lit_mask marks remainder literals (global literal index >= 2*n_features)
// with 1; lit_or_mask = literal OR mask is what the clause matrix uses, and
// ~lit_mask (lit_valid) gates the TA update matrix.
// Follows the paper: W features per bus beat, x/2 features -> x literals,
// remainder literal mask and its inverted use. Own choices: registers (not
// BRAM) as storage, bit ordering, feature/complement interleaving.
module feature_buffer #(
  parameter int unsigned MAX_FEATURES = 784,
  parameter int unsigned X            = 32,
  parameter int unsigned AXIS_W       = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic [15:0]         wr_idx,
  input  logic [AXIS_W-1:0]   wr_data,
  input  logic [15:0]         n_features,
  input  logic [15:0]         rd_slice,
  output logic [X-1:0]        lit,
  output logic [X-1:0]        lit_mask,
  output logic [X-1:0]        lit_or_mask,
  output logic [X-1:0]        lit_valid
);
  localparam int unsigned HALF   = X / 2;
  localparam int unsigned NWORDS = (MAX_FEATURES + AXIS_W - 1) / AXIS_W;
  localparam int unsigned NSLICE = (2 * MAX_FEATURES + X - 1) / X;
  localparam int unsigned STORE  = (NWORDS * AXIS_W > NSLICE * HALF) ? NWORDS * AXIS_W : NSLICE * HALF;

  logic [STORE-1:0] feat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) feat <= '0;
    else if (wr_en && wr_idx < 16'(NWORDS)) feat[wr_idx*AXIS_W +: AXIS_W] <= wr_data;
  end

  logic [HALF-1:0] f_sel;
  always_comb begin
    f_sel = '0;
    if (rd_slice < 16'(NSLICE)) f_sel = feat[rd_slice*HALF +: HALF];
    for (int unsigned i = 0; i < HALF; i++) begin
      logic [31:0] g;
      g = 32'(rd_slice) * X + 2 * i;
      lit[2*i]        = f_sel[i];
      lit[2*i+1]      = ~f_sel[i];
      lit_mask[2*i]   = (g >= 32'(n_features) * 2);
      lit_mask[2*i+1] = (g + 1 >= 32'(n_features) * 2);
    end
  end

  assign lit_or_mask = lit | lit_mask;
  assign lit_valid   = ~lit_mask;

  initial assert (X % 2 == 0) else $error("X must be even");
endmodule
