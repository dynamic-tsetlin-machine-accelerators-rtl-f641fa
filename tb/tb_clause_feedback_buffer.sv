// tb_clause_feedback_buffer: 4-clause window writes of 2-bit feedback into a
// 32-clause buffer, read back as 5-clause groups. Checks contents, the
// "any feedback in this group" flag under the clause mask, and clear.
module tb_clause_feedback_buffer;
  localparam int Y = 5, M = 4, MAXC = 32, NG = 7, NW = 8;
  logic clk = 0, rst_n = 0, clear = 0, wr_en = 0;
  logic [15:0] wr_window = 0, rd_group = 0;
  logic [M-1:0][1:0] wd = '0;
  logic [Y-1:0] rmask = '1;
  logic [Y-1:0][1:0] rd;
  logic any;
  logic [NG*Y-1:0][1:0] model;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  clause_feedback_buffer #(.Y(Y), .M(M), .MAX_CLAUSES(MAXC)) dut (.clk, .rst_n, .clear, .wr_en,
    .wr_window, .wr_data(wd), .rd_group, .rd_mask(rmask), .rd_data(rd), .any_fb(any));

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
    int n_any = 0, n_none = 0;
    @(negedge clk); rst_n = 1;
    for (int r = 0; r < 10; r++) begin
      clear = 1; @(negedge clk); clear = 0;
      model = '0;
      for (int w = 0; w < NW; w++) begin
        for (int j = 0; j < M; j++) begin
          wd[j] = ($urandom_range(0, 9) < 2) ? 2'($urandom_range(1, 2)) : 2'b00;
          model[w*M+j] = wd[j];
        end
        wr_en = 1; wr_window = 16'(w); @(negedge clk);
      end
      wr_en = 0;
      for (int g = 0; g < NG; g++) begin
        bit ea;
        rd_group = 16'(g); rmask = (r % 2) ? Y'($urandom) : '1; #1;
        ea = 0;
        for (int i = 0; i < Y; i++) begin
          check(rd[i] == model[g*Y+i], $sformatf("r%0d group %0d clause %0d", r, g, i));
          if (rmask[i] && model[g*Y+i] != 0) ea = 1;
        end
        check(any == ea, $sformatf("any flag group %0d", g));
        if (ea) n_any++; else n_none++;
      end
      @(negedge clk);
    end
    clear = 1; @(negedge clk); clear = 0; rd_group = 0; rmask = '1; #1;
    check(rd == '0 && !any, "clear empties buffer");
    check(n_any > 0 && n_none > 0, "both flag values seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
