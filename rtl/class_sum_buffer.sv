// class_sum_buffer: holds the class sums of all classes of a datapoint.
// Writes: N sums at once to classes wr_base .. wr_base+N-1, each lane gated
// by wr_lane_en (Vanilla TM writes one class per pass, CoTM N per group).
// Reads, combinational: rd_group returns classes rd_group*N .. +N-1 with the
// class mask applied - a class index >= n_classes reads as -2^(L_CSUM-1)
// (16'h8000 for L_CSUM = 16), so a remainder class can never win the argmax;
// rd_class returns one unmasked class sum for the clause update control.
// Follows the paper: class sum buffer and post-processing class mask with the
// minimum value. Own choice: register storage, reset to 0.
module class_sum_buffer #(
  parameter int unsigned N           = 4,
  parameter int unsigned MAX_CLASSES = 16,
  parameter int unsigned L_CSUM      = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          wr_en,
  input  logic [7:0]                    wr_base,
  input  logic [N-1:0]                  wr_lane_en,
  input  logic signed [N-1:0][L_CSUM-1:0] wr_data,
  input  logic [7:0]                    n_classes,
  input  logic [7:0]                    rd_group,
  output logic signed [N-1:0][L_CSUM-1:0] rd_masked,
  input  logic [7:0]                    rd_class,
  output logic signed [L_CSUM-1:0]      rd_sum
);
  localparam logic [L_CSUM-1:0] CS_MIN = {1'b1, {(L_CSUM-1){1'b0}}};
  localparam int unsigned DEPTH = ((MAX_CLASSES + N - 1) / N) * N;

  logic [L_CSUM-1:0] cs [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned k = 0; k < DEPTH; k++) cs[k] <= '0;
    end else if (wr_en) begin
      for (int unsigned i = 0; i < N; i++)
        if (wr_lane_en[i] && (32'(wr_base) + i) < DEPTH) cs[32'(wr_base) + i] <= wr_data[i];
    end
  end

  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      logic [31:0] idx;
      idx = 32'(rd_group) * N + i;
      if (idx < 32'(n_classes) && idx < DEPTH) rd_masked[i] = cs[idx];
      else rd_masked[i] = CS_MIN;
    end
    rd_sum = (32'(rd_class) < DEPTH) ? cs[32'(rd_class)] : '0;
  end
endmodule
