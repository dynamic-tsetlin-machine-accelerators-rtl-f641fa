// tb_clause_matrix: 8-literal x 5-clause matrix accumulating 3 slices per
// group, 20 random groups. Expected clause outputs are computed here as
// AND over all literals of (literal OR mask OR NOT include), ANDed with the
// clause buffer mask. Also checks the one-cycle latency after the last slice.
module tb_clause_matrix;
  localparam int X = 8, Y = 5, LT = 4, A = 3;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic [X-1:0] lom;
  logic [Y-1:0][X-1:0][LT-1:0] ta;
  logic [Y-1:0] cbm, p_cl;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  clause_matrix #(.X(X), .Y(Y), .L_TA(LT)) dut (.clk, .rst_n, .en, .first, .lit_or_mask(lom),
    .ta_row(ta), .cl_buf_mask(cbm), .p_cl);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [Y-1:0] expv;
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      expv = '1;
      cbm = Y'($urandom) | Y'(t % 2 ? 5'b11111 : 5'b00111);
      for (int k = 0; k < A; k++) begin
        lom = X'($urandom);
        for (int i = 0; i < Y; i++)
          for (int j = 0; j < X; j++) begin
            // sparse includes so that some clauses survive
            ta[i][j] = ($urandom_range(0, 9) < 2) ? LT'($urandom_range(8, 15)) : LT'($urandom_range(0, 7));
            if (ta[i][j] >= 8 && !lom[j]) expv[i] = 0;
          end
        en = 1; first = (k == 0);
        @(negedge clk);
      end
      en = 0;
      expv = expv & cbm;
      check(p_cl == expv, $sformatf("group %0d p_cl %b expected %b", t, p_cl, expv));
      @(negedge clk);
      check(p_cl == expv, "held while disabled");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
