// clause_feedback_buffer: 2-bit clause-level feedback of one class
// (00 none, 01 Type I, 10 Type II). Written M clauses at a time by the weight
// update matrix (window w), read Y at a time by the TA update matrix (group
// g), combinationally. any_fb is 1 when some clause of the read group that
// passes rd_mask has feedback: the controller skips groups without it.
// clear zeroes the buffer before a class update.
// Follows the paper: clause feedback buffer in registers and the group skip
// test of the optimised TA update. Own choice: organisation and clear port.
module clause_feedback_buffer #(
  parameter int unsigned Y           = 27,
  parameter int unsigned M           = 8,
  parameter int unsigned MAX_CLAUSES = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              wr_en,
  input  logic [15:0]       wr_window,
  input  logic [M-1:0][1:0] wr_data,
  input  logic [15:0]       rd_group,
  input  logic [Y-1:0]      rd_mask,
  output logic [Y-1:0][1:0] rd_data,
  output logic              any_fb
);
  localparam int unsigned NG  = (MAX_CLAUSES + Y - 1) / Y;
  localparam int unsigned NW  = (MAX_CLAUSES + M - 1) / M;
  localparam int unsigned LEN = ((NG * Y > NW * M) ? NG * Y : NW * M) + Y + M;

  logic [LEN-1:0][1:0] fb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fb <= '0;
    else if (clear) fb <= '0;
    else if (wr_en && wr_window < 16'(NW)) fb[wr_window*M +: M] <= wr_data;
  end

  always_comb begin
    rd_data = '0;
    if (rd_group < 16'(NG)) rd_data = fb[rd_group*Y +: Y];
    any_fb = 1'b0;
    for (int unsigned i = 0; i < Y; i++)
      if (rd_mask[i] && rd_data[i] != 2'b00) any_fb = 1'b1;
  end
endmodule
