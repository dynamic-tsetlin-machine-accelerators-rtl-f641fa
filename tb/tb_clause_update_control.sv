// tb_clause_update_control: negated class selection and update probability.
// Checks that the negated class is never the target, lies in range and that
// every other class is chosen; and that the probability equals
// (T - clip(csum)) * 2^(L_R-1) for the target class and (T + clip(csum)) *
// 2^(L_R-1) for the negated class, computed here.
module tb_clause_update_control;
  localparam int LC = 16, LR = 8, LP = LC + 2 + LR;
  logic clk = 0, rst_n = 0, gen_neg = 0, calc = 0, y_c = 0;
  logic [7:0] target = 0, h = 0, nc;
  logic [LR-1:0] cr = 0;
  logic [15:0] thr = 0;
  logic signed [LC-1:0] cs = 0;
  logic [LP-1:0] pu;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  clause_update_control #(.L_CSUM(LC), .L_R(LR)) dut (.clk, .rst_n, .gen_neg, .calc, .y_c, .target,
    .n_classes(h), .c_rand(cr), .threshold(thr), .csum(cs), .neg_class(nc), .p_update(pu));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit seen [16];
    @(negedge clk); rst_n = 1;
    h = 8'd6;
    for (int k = 0; k < 16; k++) seen[k] = 0;
    for (int t = 0; t < 300; t++) begin
      target = 8'($urandom_range(0, 5)); cr = LR'($urandom);
      gen_neg = 1; @(negedge clk); gen_neg = 0;
      check(nc != target && nc < h, $sformatf("neg %0d target %0d", nc, target));
      if (target == 0) seen[nc] = 1;
    end
    for (int k = 1; k < 6; k++) check(seen[k], $sformatf("class %0d chosen as negated", k));
    for (int t = 0; t < 200; t++) begin
      longint c, e, tt;
      thr = 16'($urandom_range(1, 500)); cs = LC'($urandom_range(0, 2000) - 1000);
      y_c = t[0];
      tt = longint'(thr); c = longint'(cs);
      if (c > tt) c = tt; if (c < -tt) c = -tt;
      e = (y_c ? (tt - c) : (tt + c)) << (LR - 1);
      calc = 1; @(negedge clk); calc = 0;
      check(longint'(pu) == e, $sformatf("p_update %0d expected %0d", pu, e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
