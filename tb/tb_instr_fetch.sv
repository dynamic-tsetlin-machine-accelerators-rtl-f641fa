// tb_instr_fetch: drives the instruction stream with random tvalid gaps and
// a simple controller model (busy for a fixed number of cycles after each
// start). Checks every configuration field, the specificity-derived update
// probability 2^24/s, the seed word, the feature word indices and data,
// dp_start after the last feature word, and that tready stays low from the
// start of a job until the controller has finished it (stream stall).
module tb_instr_fetch;
  import dtm_pkg::*;
  localparam int AW = 32, LR = 24, BUSY = 7;
  logic clk = 0, rst_n = 0;
  logic [AW-1:0] td = 0;
  logic tv = 0, tr, busy;
  cfg_t cfg;
  logic [31:0] seed;
  logic seed_load, init_start, dp_start, dp_train, feat_we;
  logic [7:0] dp_target;
  logic [15:0] feat_idx;
  logic [AW-1:0] feat_data;
  int checks = 0, failures = 0;
  int stall_cycles = 0, feat_words = 0, starts = 0, inits = 0;
  logic [AW-1:0] feats [4];
  always #5 clk = ~clk;

  instr_fetch #(.AXIS_W(AW), .L_R(LR)) dut (.clk, .rst_n, .s_tdata(td), .s_tvalid(tv), .s_tready(tr),
    .ctrl_busy(busy), .cfg, .seed, .seed_load, .init_start, .dp_start, .dp_train, .dp_target,
    .feat_we, .feat_idx, .feat_data);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input logic [31:0] w);
    repeat ($urandom_range(0, 2)) @(negedge clk);
    td = w; tv = 1;
    while (!tr) @(negedge clk);
    @(negedge clk); tv = 0;
  endtask

  // controller model: busy for BUSY cycles after a start
  int busy_cnt = 0, since_start = -1;
  always @(posedge clk) if (rst_n) begin
    if (dp_start || init_start) begin busy_cnt <= BUSY; since_start <= 0; end
    else if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;
    if (since_start >= 0) since_start <= since_start + 1;
    if (feat_we) begin
      check(feat_data == feats[feat_idx], $sformatf("feature word %0d", feat_idx));
      feat_words++;
    end
    if ((dp_start || init_start) && tr) check(0, "tready high on the cycle a job starts");
    if (dp_start) starts++;
    if (init_start) inits++;
    // no word may be accepted while a job is pending or running
    if (since_start >= 0 && since_start < BUSY && tr) check(0, "tready high during job");
    if (tv && !tr) stall_cycles++;
  end
  assign busy = busy_cnt > 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk); rst_n = 1;
    for (int k = 0; k < 4; k++) feats[k] = $urandom;
    send({4'(OP_FEATURES), 12'h0, 16'd100});
    send({4'(OP_CLAUSES), 12'h0, 16'd54});
    send({4'(OP_CLASSES), 18'h0, 2'(TM_VANILLA), 8'd10});
    send({4'(OP_THRESHOLD), 12'h0, 16'd25});
    send({4'(OP_SPEC), 12'h0, 16'd10});
    send({4'(OP_FLAGS), 27'h0, 1'b1});
    @(negedge clk);
    check(cfg.n_features == 100 && cfg.n_clauses == 54 && cfg.n_classes == 10, "sizes");
    check(cfg.tm_type == TM_VANILLA && cfg.threshold == 25 && cfg.boost_tpf, "type, T, boost");
    check(cfg.p_ta == (32'd1 << 24) / 10, $sformatf("p_ta %0d", cfg.p_ta));
    send({4'(OP_SEED), 28'h0ABCDEF});
    @(negedge clk);
    check(seed == 32'h0ABCDEF, "seed value");
    send({4'(OP_INIT), 28'h0});
    repeat (BUSY + 3) @(negedge clk);
    check(inits == 1, "init started");
    send({4'(OP_DATA), 12'h0, 8'd7, 7'h0, 1'b1});
    for (int k = 0; k < 4; k++) send(feats[k]);
    send({4'(OP_NOP), 28'h0});   // must wait until the job is over
    check(starts == 1 && dp_train && dp_target == 7, "datapoint job started");
    check(feat_words == 4, $sformatf("feature words %0d", feat_words));
    check(stall_cycles >= BUSY, $sformatf("stream stalled %0d cycles", stall_cycles));
    send({4'(OP_SPEC), 12'h0, 16'd1});
    @(negedge clk);
    check(cfg.p_ta == (32'd1 << 24) - 1, "s = 1 gives probability 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
