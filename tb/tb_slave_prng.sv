// tb_slave_prng: 8-bit slave LFSR. Checks the seed request after reset, the
// step sequence against the polynomial x^8+x^6+x^5+x^4+1 computed here, that
// the seed request comes after exactly 255 steps (one full period, with the
// state back at the seed), that idle freezes the generator, and that a zero
// seed is replaced.
module tb_slave_prng;
  localparam int L = 8;
  logic clk = 0, rst_n = 0, idle = 0, ack = 0;
  logic [L-1:0] seed = '0, r;
  logic req;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  slave_prng #(.L(L)) dut (.clk, .rst_n, .idle, .req, .ack, .seed, .rand_o(r));

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
    logic [L-1:0] model;
    int steps;
    @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(req == 1'b1, "request after reset");
    seed = 8'h5A; ack = 1; @(negedge clk); ack = 0;
    check(r == 8'h5A && req == 0, "seed loaded");
    model = 8'h5A; steps = 0;
    while (!req && steps < 400) begin
      @(negedge clk);
      model = {model[6:0], model[7] ^ model[5] ^ model[4] ^ model[3]};
      steps++;
      check(r == model, $sformatf("step %0d value %h expected %h", steps, r, model));
    end
    check(steps == 255, $sformatf("period %0d", steps));
    check(r == 8'h5A, "state back at seed after one period");
    // keeps running while waiting for a new seed
    @(negedge clk);
    model = {model[6:0], model[7] ^ model[5] ^ model[4] ^ model[3]};
    check(r == model && req, "runs while waiting");
    idle = 1; repeat (3) @(negedge clk);
    check(r == model, "idle freezes");
    idle = 0;
    seed = 8'h00; ack = 1; @(negedge clk); ack = 0;
    check(r == 8'h01 && !req, "zero seed replaced by 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
