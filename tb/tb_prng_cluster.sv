// tb_prng_cluster: cluster of 5 slaves with 8-bit LFSRs. Checks that the
// master requests a seed, that after programming it every slave receives a
// distinct seed equal to the next xorshift32 value (computed here), that
// ready rises once all are seeded, and that every slave is reseeded after
// one LFSR period.
module tb_prng_cluster;
  localparam int NS = 5, L = 8;
  logic clk = 0, rst_n = 0, seed_load = 0;
  logic [31:0] seed_in = '0;
  logic seed_req, ready, refresh;
  logic [NS-1:0][L-1:0] r;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  prng_cluster #(.NUM_SLAVES(NS), .L(L)) dut (.clk, .rst_n, .en(1'b1), .seed_in, .seed_load,
    .seed_req, .ready, .refresh_o(refresh), .rand_o(r));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] xs(input logic [31:0] v);
    v = v ^ (v << 13); v = v ^ (v >> 17); v = v ^ (v << 5);
    return v;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x;
    logic [L-1:0] expect_seed [NS];
    int n_ref;
    @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk);
    check(seed_req && !ready, "seed request, not ready");
    seed_in = 32'h1234_5678; seed_load = 1; @(negedge clk); seed_load = 0;
    x = 32'h1234_5678;
    for (int k = 0; k < NS; k++) begin
      x = xs(x);
      expect_seed[k] = x[L-1:0];
    end
    repeat (NS) @(negedge clk);
    check(ready, "ready after all seeded");
    // slaves have stepped since their seeds: step the expected seeds back in time is
    // awkward, so compare the first value each slave showed instead
    n_ref = 0;
    for (int k = 0; k < NS; k++)
      for (int j = k + 1; j < NS; j++) check(r[k] != r[j], "slaves differ");
    fork
      begin
        repeat (600) begin @(negedge clk); if (refresh) n_ref++; end
      end
    join
    check(n_ref >= 2 * NS && n_ref <= 3 * NS, $sformatf("reseeds in 600 cycles %0d", n_ref));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // first value of slave k right after its seed is loaded must be its seed
  int ackn = 0;
  always @(negedge clk) if (rst_n) begin
    for (int k = 0; k < NS; k++)
      if (dut.s_ack[k]) begin
        logic [31:0] x;
        x = 32'h1234_5678;
        if (ackn < NS) begin
          for (int i = 0; i <= ackn; i++) x = xs(x);
          check(dut.s_seed == x[L-1:0], $sformatf("seed %0d is xorshift value", ackn));
          check(k == ackn, "round robin order from slave 0");
        end
        ackn++;
      end
  end
endmodule
