// clause_buffer: holds the clause outputs of one class (up to MAX_CLAUSES).
// The clause matrix writes Y clauses at a time (group g -> clauses g*Y ..
// g*Y+Y-1, masked remainders arrive as 0). The weight matrix and the weight
// update matrix read M clauses at a time (window w -> clauses w*M .. w*M+M-1);
// the TA update matrix reads Y at a time (group g). Reads are combinational.
// Follows the paper: the clause buffer stores one class of clauses, in
// registers. Own choices: the flat bit-vector organisation and port shapes.
module clause_buffer #(
  parameter int unsigned Y           = 27,
  parameter int unsigned M           = 8,
  parameter int unsigned MAX_CLAUSES = 2048
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [15:0]   wr_group,
  input  logic [Y-1:0]  wr_data,
  input  logic [15:0]   rd_window,
  output logic [M-1:0]  rd_m,
  input  logic [15:0]   rd_group,
  output logic [Y-1:0]  rd_y
);
  localparam int unsigned NG  = (MAX_CLAUSES + Y - 1) / Y;
  localparam int unsigned NW  = (MAX_CLAUSES + M - 1) / M;
  localparam int unsigned LEN = ((NG * Y > NW * M) ? NG * Y : NW * M) + Y + M;

  logic [LEN-1:0] cl;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cl <= '0;
    else if (wr_en && wr_group < 16'(NG)) cl[wr_group*Y +: Y] <= wr_data;
  end

  always_comb begin
    rd_m = '0;
    rd_y = '0;
    if (rd_window < 16'(NW)) rd_m = cl[rd_window*M +: M];
    if (rd_group < 16'(NG))  rd_y = cl[rd_group*Y +: Y];
  end
endmodule
