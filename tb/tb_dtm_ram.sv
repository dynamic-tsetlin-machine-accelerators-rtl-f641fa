// tb_dtm_ram: 24-bit x 64 simple dual-port RAM. Fills the memory, then runs
// random reads and writes checking the one-cycle read latency, read-before-
// write on an address collision, and that rdata holds while re is low.
module tb_dtm_ram;
  localparam int W = 24, D = 64;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] wa = 0, ra = 0;
  logic [W-1:0] wd = 0, rd;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dtm_ram #(.WIDTH(W), .DEPTH(D)) dut (.clk, .we, .waddr(wa), .wdata(wd), .re, .raddr(ra), .rdata(rd));

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
    logic [W-1:0] exp_rd, held;
    @(negedge clk);
    for (int a = 0; a < D; a++) begin
      we = 1; wa = 6'(a); wd = W'($urandom); model[a] = wd; @(negedge clk);
    end
    we = 0;
    for (int t = 0; t < 500; t++) begin
      we = $urandom_range(0, 1); re = 1;
      wa = 6'($urandom); ra = (t % 5 == 0) ? wa : 6'($urandom); wd = W'($urandom);
      exp_rd = model[ra];
      @(negedge clk);
      if (we) model[wa] = wd;
      check(rd == exp_rd, $sformatf("t%0d read %0d", t, ra));
    end
    held = rd; re = 0; we = 0; ra = ra + 1'b1;
    repeat (3) @(negedge clk);
    check(rd == held, "rdata holds when re is low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
