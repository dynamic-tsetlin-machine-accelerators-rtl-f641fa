// tb_weight_matrix: 4-clause x 2-class weight matrix. Random clause outputs,
// masks and 8-bit signed weights over 3 windows are accumulated; expected
// partial class sums are computed here for CoTM (stored weights) and for the
// vanilla mode (+1 for even clauses, -1 for odd clauses).
module tb_weight_matrix;
  import dtm_pkg::*;
  localparam int M = 4, N = 2, WB = 8, LC = 16, P = 3;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  tm_type_e tm;
  logic [M-1:0] cl, cm;
  logic signed [N-1:0][M-1:0][WB-1:0] w;
  logic signed [N-1:0][LC-1:0] p_cs;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  weight_matrix #(.M(M), .N(N), .W_BITS(WB), .L_CSUM(LC)) dut (.clk, .rst_n, .en, .first,
    .tm_type(tm), .cl, .cl_mask(cm), .weights(w), .p_cs);

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
    int e [N];
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      tm = (t % 2) ? TM_VANILLA : TM_COTM;
      for (int i = 0; i < N; i++) e[i] = 0;
      for (int k = 0; k < P; k++) begin
        cl = M'($urandom); cm = (k == P - 1) ? M'(4'b0011) : '1;
        for (int i = 0; i < N; i++)
          for (int j = 0; j < M; j++) begin
            w[i][j] = WB'($urandom);
            if (cl[j] && cm[j]) e[i] += (tm == TM_VANILLA) ? ((j % 2) ? -1 : 1) : int'(signed'(w[i][j]));
          end
        en = 1; first = (k == 0); @(negedge clk);
      end
      en = 0;
      for (int i = 0; i < N; i++)
        check(int'(signed'(p_cs[i])) == e[i], $sformatf("t%0d class %0d sum %0d expected %0d", t, i, p_cs[i], e[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
