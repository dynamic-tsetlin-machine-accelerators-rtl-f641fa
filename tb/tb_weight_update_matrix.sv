// tb_weight_update_matrix: 4-clause x 2-class weight update with 8-bit
// weights and 8-bit random numbers. A reference written here decides the
// clause selection (P >= rand * T), the Type I / Type II feedback from the
// clause's weight sign and the class role, and the CoTM weight change
// (+1 target, -1 negated, only for clauses that output 1, saturating).
module tb_weight_update_matrix;
  import dtm_pkg::*;
  localparam int M = 4, N = 2, WB = 8, LR = 8, LP = 16 + 2 + LR;
  tm_type_e tm;
  logic y_c;
  logic [0:0] lane;
  logic [LP-1:0] pu;
  logic [15:0] thr;
  logic [M-1:0][LR-1:0] wr;
  logic [M-1:0] cl, cm;
  logic [N-1:0][M-1:0][WB-1:0] wi, wo;
  logic [M-1:0][1:0] fb;
  logic clk = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  weight_update_matrix #(.M(M), .N(N), .W_BITS(WB), .L_R(LR), .LP(LP)) dut (.tm_type(tm), .y_c, .lane,
    .p_update(pu), .threshold(thr), .w_rand(wr), .cl, .cl_mask(cm), .weights_in(wi), .weights_out(wo), .feedback(fb));

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
    int n_sel = 0, n_sat = 0;
    for (int t = 0; t < 600; t++) begin
      tm = (t % 3 == 0) ? TM_VANILLA : TM_COTM;
      y_c = $urandom_range(0, 1); lane = 1'($urandom);
      thr = 16'($urandom_range(1, 20));
      pu = LP'($urandom_range(0, 2 * thr)) << (LR - 1);
      cl = M'($urandom); cm = M'($urandom) | 4'b0101;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < M; j++)
          wi[i][j] = (t % 7 == 0) ? ((j % 2) ? 8'h7F : 8'h80) : WB'($urandom_range(0, 20) - 10);
      for (int j = 0; j < M; j++) wr[j] = LR'($urandom);
      #1;
      for (int j = 0; j < M; j++) begin
        int w, ew;
        bit sel, pos;
        logic [1:0] efb;
        w   = int'(signed'(wi[lane][j]));
        sel = cm[j] && (longint'(pu) >= longint'(wr[j]) * longint'(thr));
        pos = (tm == TM_VANILLA) ? (j % 2 == 0) : (w >= 0);
        efb = !sel ? 2'b00 : ((y_c == pos) ? 2'b01 : 2'b10);
        ew  = w;
        if (sel && tm == TM_COTM && cl[j]) ew = y_c ? ((w < 127) ? w + 1 : w) : ((w > -128) ? w - 1 : w);
        if (sel) n_sel++;
        if (sel && cl[j] && ew == w && tm == TM_COTM) n_sat++;
        check(fb[j] == efb, $sformatf("t%0d fb[%0d] %b expected %b", t, j, fb[j], efb));
        check(int'(signed'(wo[lane][j])) == ew, $sformatf("t%0d w[%0d] %0d expected %0d", t, j, signed'(wo[lane][j]), ew));
        check(wo[!lane][j] == wi[!lane][j], "other lane untouched");
      end
      @(negedge clk);
    end
    check(n_sel > 100 && n_sat > 0, $sformatf("coverage sel=%0d sat=%0d", n_sel, n_sat));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
