// tb_argmax: 3-lane argmax over 1 to 4 groups of random signed class sums
// (small range so that ties are frequent). Expected is the first index of
// the maximum. Checks the result one cycle after the last group.
module tb_argmax;
  localparam int N = 3, LC = 16;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic [7:0] base = 0, mi;
  logic signed [N-1:0][LC-1:0] cs;
  logic signed [LC-1:0] mv;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  argmax #(.N(N), .L_CSUM(LC)) dut (.clk, .rst_n, .en, .first, .base, .csum(cs), .max_val(mv), .max_idx(mi));

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
    int bv, bi, ng;
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      ng = $urandom_range(1, 4);
      bv = -100000; bi = 0;
      for (int g = 0; g < ng; g++) begin
        for (int i = 0; i < N; i++) begin
          int v;
          v = (t % 3 == 0) ? $urandom_range(0, 4) - 2 : $urandom_range(0, 2000) - 1000;
          cs[i] = LC'(v);
          if (v > bv) begin bv = v; bi = g * N + i; end
        end
        en = 1; first = (g == 0); base = 8'(g * N); @(negedge clk);
      end
      en = 0;
      check(int'(mv) == bv && int'(mi) == bi, $sformatf("t%0d max %0d@%0d expected %0d@%0d", t, mv, mi, bv, bi));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
