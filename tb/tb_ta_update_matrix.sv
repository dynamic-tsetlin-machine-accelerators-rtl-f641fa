// tb_ta_update_matrix: 8-literal x 5-clause TA update with 4-bit automata and
// 8-bit random numbers, random feedback, literals, clause outputs, masks and
// both boost settings. The reference here is the Type I / Type II table:
// Type I, clause 0 or literal 0: decrement with probability 1/s;
// Type I, clause 1 and literal 1: increment with probability (s-1)/s (always
// with boost); Type II, clause 1, literal 0, exclude: increment.
module tb_ta_update_matrix;
  import dtm_pkg::*;
  localparam int X = 8, Y = 5, LT = 4, LR = 8;
  logic [Y-1:0][X-1:0][LT-1:0] ti, to;
  logic [X-1:0] lit, lv;
  logic [Y-1:0] cl, cm;
  logic [Y-1:0][1:0] fb;
  logic [Y*X-1:0][LR-1:0] tr;
  logic [31:0] pta;
  logic boost;
  logic clk = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ta_update_matrix #(.X(X), .Y(Y), .L_TA(LT), .L_R(LR)) dut (.ta_in(ti), .lit, .lit_valid(lv), .cl,
    .cl_mask(cm), .fb, .ta_rand(tr), .p_ta(pta), .boost_tpf(boost), .ta_out(to));

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
    int n_inc = 0, n_dec = 0, n_t2 = 0;
    for (int t = 0; t < 300; t++) begin
      pta = 32'(256 / $urandom_range(2, 10));
      boost = t[0];
      lit = X'($urandom); lv = (t % 4 == 0) ? 8'h3F : 8'hFF;
      cl = Y'($urandom); cm = (t % 5 == 0) ? 5'b00111 : 5'b11111;
      for (int i = 0; i < Y; i++) begin
        fb[i] = 2'($urandom_range(0, 2));
        for (int j = 0; j < X; j++) begin
          ti[i][j] = (t % 6 == 0) ? ((j % 2) ? 4'hF : 4'h0) : LT'($urandom);
          tr[i*X+j] = LR'($urandom);
        end
      end
      #1;
      for (int i = 0; i < Y; i++)
        for (int j = 0; j < X; j++) begin
          int e, v;
          bit hit;
          v = ti[i][j]; e = v;
          hit = pta >= tr[i*X+j];
          if (cm[i] && lv[j]) begin
            if (fb[i] == 2'b01) begin
              if (cl[i] && lit[j]) begin
                if ((boost || !hit) && v < 15) e = v + 1;
              end else if (hit && v > 0) e = v - 1;
            end else if (fb[i] == 2'b10) begin
              if (cl[i] && !lit[j] && v < 8) begin e = v + 1; n_t2++; end
            end
          end
          if (e > v) n_inc++;
          if (e < v) n_dec++;
          check(int'(to[i][j]) == e, $sformatf("t%0d ta[%0d][%0d] %0d expected %0d", t, i, j, to[i][j], e));
        end
      @(negedge clk);
    end
    check(n_inc > 100 && n_dec > 100 && n_t2 > 20, $sformatf("coverage inc=%0d dec=%0d t2=%0d", n_inc, n_dec, n_t2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
