// tb_feature_buffer: 37 features written as 16-bit words into a 40-feature
// buffer with an 8-literal read port. For every slice it checks literals
// (feature, complement interleaved), the remainder literal mask, its OR with
// the literals and the inverted mask, against values worked out here.
module tb_feature_buffer;
  localparam int MAXF = 40, X = 8, W = 16, NF = 37;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [15:0] wr_idx = 0, rd_slice = 0;
  logic [W-1:0] wr_data = 0;
  logic [X-1:0] lit, mask, lom, lv;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  feature_buffer #(.MAX_FEATURES(MAXF), .X(X), .AXIS_W(W)) dut (.clk, .rst_n, .wr_en, .wr_idx,
    .wr_data, .n_features(16'(NF)), .rd_slice, .lit, .lit_mask(mask), .lit_or_mask(lom), .lit_valid(lv));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [47:0] f;
    f = {$urandom, $urandom};
    @(negedge clk); rst_n = 1;
    for (int w = 0; w < 3; w++) begin
      wr_en = 1; wr_idx = 16'(w); wr_data = f[w*W +: W]; @(negedge clk);
    end
    wr_en = 0;
    for (int k = 0; k < (2*NF + X - 1) / X; k++) begin
      rd_slice = 16'(k); #1;
      for (int j = 0; j < X; j++) begin
        int g;
        bit el, em;
        g  = k * X + j;
        el = (j % 2 == 0) ? f[g/2] : !f[g/2];
        em = g >= 2 * NF;
        check(lit[j] == el, $sformatf("lit slice %0d bit %0d", k, j));
        check(mask[j] == em, $sformatf("mask slice %0d bit %0d", k, j));
        check(lom[j] == (el | em) && lv[j] == !em, "or/valid");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
