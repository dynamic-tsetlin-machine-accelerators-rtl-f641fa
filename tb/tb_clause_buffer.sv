// tb_clause_buffer: 5-clause groups written into a 32-clause buffer and read
// back as 4-clause windows and as whole groups. A bit-level copy is kept here.
module tb_clause_buffer;
  localparam int Y = 5, M = 4, MAXC = 32, NG = 7, NW = 8;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [15:0] wr_group = 0, rd_window = 0, rd_group = 0;
  logic [Y-1:0] wr_data = 0, rd_y;
  logic [M-1:0] rd_m;
  logic [NG*Y-1:0] ref_bits = '0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  clause_buffer #(.Y(Y), .M(M), .MAX_CLAUSES(MAXC)) dut (.clk, .rst_n, .wr_en, .wr_group,
    .wr_data, .rd_window, .rd_m, .rd_group, .rd_y);

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
    @(negedge clk); rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      for (int g = 0; g < NG; g++) begin
        wr_en = 1; wr_group = 16'(g); wr_data = Y'($urandom);
        ref_bits[g*Y +: Y] = wr_data;
        @(negedge clk);
      end
      wr_en = 0;
      for (int w = 0; w < NW; w++) begin
        rd_window = 16'(w); #1;
        check(rd_m == ref_bits[w*M +: M], $sformatf("window %0d", w));
      end
      for (int g = 0; g < NG; g++) begin
        rd_group = 16'(g); #1;
        check(rd_y == ref_bits[g*Y +: Y], $sformatf("group %0d", g));
      end
    end
    // write disabled must not change contents
    wr_group = 0; wr_data = ~ref_bits[0 +: Y]; @(negedge clk);
    rd_group = 0; #1;
    check(rd_y == ref_bits[0 +: Y], "no write without enable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
