// tb_class_sum_buffer: 2-lane writes into a 5-class buffer with 3 valid
// classes. Checks per-class read back, lane enables, and that reads of
// classes at or beyond the class count return the most negative value.
module tb_class_sum_buffer;
  localparam int N = 2, MAXH = 5, LC = 16, H = 3;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [7:0] wr_base = 0, rd_group = 0, rd_class = 0;
  logic [N-1:0] lane_en = 0;
  logic signed [N-1:0][LC-1:0] wd = '0, rm;
  logic signed [LC-1:0] rs;
  logic signed [LC-1:0] model [6];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  class_sum_buffer #(.N(N), .MAX_CLASSES(MAXH), .L_CSUM(LC)) dut (.clk, .rst_n, .wr_en, .wr_base,
    .wr_lane_en(lane_en), .wr_data(wd), .n_classes(8'(H)), .rd_group, .rd_masked(rm), .rd_class, .rd_sum(rs));

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
    @(negedge clk); rst_n = 1;
    for (int k = 0; k < 6; k++) model[k] = '0;
    for (int t = 0; t < 30; t++) begin
      @(negedge clk);
      wr_base = 8'(2 * $urandom_range(0, 2));
      lane_en = N'($urandom);
      for (int i = 0; i < N; i++) begin
        wd[i] = LC'($urandom);
        if (lane_en[i] && wr_base + i < MAXH) model[wr_base + i] = wd[i];
      end
      wr_en = 1; @(negedge clk); wr_en = 0;
      for (int c = 0; c < MAXH; c++) begin
        rd_class = 8'(c); #1;
        check(rs == model[c], $sformatf("class %0d", c));
      end
      for (int g = 0; g < 3; g++) begin
        rd_group = 8'(g); #1;
        for (int i = 0; i < N; i++) begin
          int c;
          c = g * N + i;
          check(rm[i] == ((c < H) ? model[c] : 16'sh8000), $sformatf("masked group %0d lane %0d", g, i));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
