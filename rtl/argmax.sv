// argmax: block 5 of the DTM. A comparison tree picks the largest of N
// class sums (and its index base+lane); the result is compared with the
// cached maximum of the earlier groups and the larger kept. first=1 drops the
// cache. max_val/max_idx are registered, valid one cycle after the last group.
// Ties keep the lower class index (the earlier group, the lower lane).
// Follows the paper: comparison tree over n class sums, cached maximum and
// index compared with the next group. Own choice: tie rule.
module argmax #(
  parameter int unsigned N      = 4,
  parameter int unsigned L_CSUM = 16
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            en,
  input  logic                            first,
  input  logic [7:0]                      base,
  input  logic signed [N-1:0][L_CSUM-1:0] csum,
  output logic signed [L_CSUM-1:0]        max_val,
  output logic [7:0]                      max_idx
);
  localparam int unsigned LEAVES = 1 << $clog2(N > 1 ? N : 2);
  localparam int unsigned LEVELS = $clog2(LEAVES);

  logic signed [L_CSUM-1:0] val [LEVELS+1][LEAVES];
  logic        [7:0]        idx [LEVELS+1][LEAVES];

  always_comb begin
    for (int unsigned i = 0; i < LEAVES; i++) begin
      val[0][i] = (i < N) ? signed'(csum[i]) : {1'b1, {(L_CSUM-1){1'b0}}};
      idx[0][i] = base + 8'(i);
    end
    for (int unsigned l = 1; l <= LEVELS; l++)
      for (int unsigned i = 0; i < LEAVES; i++) begin
        val[l][i] = '0;
        idx[l][i] = '0;
        if (i < (LEAVES >> l)) begin
          if (val[l-1][2*i+1] > val[l-1][2*i]) begin
            val[l][i] = val[l-1][2*i+1];
            idx[l][i] = idx[l-1][2*i+1];
          end else begin
            val[l][i] = val[l-1][2*i];
            idx[l][i] = idx[l-1][2*i];
          end
        end
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_val <= '0;
      max_idx <= '0;
    end else if (en) begin
      if (first || val[LEVELS][0] > max_val) begin
        max_val <= val[LEVELS][0];
        max_idx <= idx[LEVELS][0];
      end
    end
  end
endmodule
