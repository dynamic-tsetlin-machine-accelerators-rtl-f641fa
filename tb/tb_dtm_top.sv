// tb_dtm_top: end-to-end test of the DTM accelerator at reduced sizes
// (8 literals x 5 clauses clause matrix, 4 x 2 weight matrix, 8-bit LFSRs so
// that seed refresh happens within the run).
// It programs a CoTM model (6 features, 7 clauses, 3 classes, so that the
// literal, clause buffer, clause and class masks all have remainders),
// initialises it, trains it on a small learnable data set, then switches to
// Vanilla TM (6 features, 6 clauses per class) and does the same.
// Every inference result is compared with a reference model that evaluates
// the clauses and class sums directly from the TA RAM and weight RAM
// contents. Training results are checked for a correct target and a negated
// class different from the target; every TA state may move by at most one
// per training round. Accuracy after training must beat chance.
// Mechanisms counted (each must occur): input stream stall, output stream
// back-pressure, seed refresh, skipped clause groups, CoTM and Vanilla runs,
// weight writes, TA writes.
// Cycle counts: the clause matrix must take a*b cycles and the weight matrix
// p*q cycles for a CoTM inference (the paper's iteration counts).
module tb_dtm_top;
  import dtm_pkg::*;

  localparam int X = 8, Y = 5, M = 4, N = 2, L_TA = 4, W_BITS = 8, L_LFSR = 8;
  localparam int MAXF = 16, MAXC = 32, MAXH = 4, TA_DEPTH = 256, W_DEPTH = 64;
  localparam int NF = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] s_tdata;  logic s_tvalid = 0, s_tready;
  logic [31:0] m_tdata;  logic m_tvalid, m_tready = 0;
  logic seed_req, busy;

  dtm_top #(.X(X), .Y(Y), .M(M), .N(N), .L_TA(L_TA), .W_BITS(W_BITS), .L_LFSR(L_LFSR),
            .AXIS_W(32), .MAX_FEATURES(MAXF), .MAX_CLAUSES(MAXC), .MAX_CLASSES(MAXH),
            .TA_DEPTH(TA_DEPTH), .W_DEPTH(W_DEPTH)) u_dut (
    .clk, .rst_n, .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .seed_req, .busy
  );

  int checks = 0, failures = 0;
  int n_stall = 0, n_backpressure = 0, n_reseed = 0, n_skip = 0, n_wwrite = 0, n_tawrite = 0;
  int n_cotm = 0, n_vanilla = 0, n_cm_cycles = 0, n_wm_cycles = 0;
  int cyc = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (s_tvalid && !s_tready) n_stall++;
    if (m_tvalid && !m_tready) n_backpressure++;
    if (u_dut.u_prng.refresh_o && !u_dut.seed_req && u_dut.u_prng.ready) n_reseed++;
    if (u_dut.u_ctrl.skip_group) n_skip++;
    if (u_dut.w_we && !u_dut.w_wsel_init) n_wwrite++;
    if (u_dut.ta_we && !u_dut.ta_wsel_init) n_tawrite++;
    if (u_dut.cm_en) n_cm_cycles++;
    if (u_dut.wm_en) n_wm_cycles++;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [31:0] w);
    s_tdata  <= w;
    s_tvalid <= 1'b1;
    @(posedge clk);
    while (!s_tready) @(posedge clk);
    s_tvalid <= 1'b0;
  endtask

  task automatic recv(output logic [31:0] w);
    int d;
    d = $urandom_range(0, 3);
    while (!m_tvalid) @(posedge clk);
    repeat (d) @(posedge clk);
    m_tready <= 1'b1;
    @(posedge clk);
    w = m_tdata;
    m_tready <= 1'b0;
  endtask

  // ---------------- reference model over the RAM contents
  int cf_tm, cf_f, cf_c, cf_h;

  function automatic int ta_state(int row, int i, int j);
    logic [X*Y*L_TA-1:0] r;
    r = u_dut.u_ta_ram.mem[row];
    return int'(r[(i*X+j)*L_TA +: L_TA]);
  endfunction

  function automatic int weight(int cls, int cl);
    logic [N*M*W_BITS-1:0] r;
    int p;
    p = (cf_c + M - 1) / M;
    r = u_dut.u_w_ram.mem[(cls / N) * p + cl / M];
    return int'(signed'(r[((cls % N) * M + cl % M)*W_BITS +: W_BITS]));
  endfunction

  function automatic bit clause_out(int gbase, int cl, logic [MAXF-1:0] feat);
    int a, g, i;
    bit out;
    a = (2*cf_f + X - 1) / X;
    g = cl / Y; i = cl % Y;
    out = 1;
    for (int l = 0; l < 2*cf_f; l++) begin
      bit litv, inc;
      litv = (l % 2 == 0) ? feat[l/2] : !feat[l/2];
      inc  = ta_state((gbase + g) * a + l / X, i, l % X) >= (1 << (L_TA-1));
      if (inc && !litv) out = 0;
    end
    return out;
  endfunction

  function automatic int class_sum(int cls, logic [MAXF-1:0] feat);
    int s, b;
    s = 0;
    b = (cf_c + Y - 1) / Y;
    for (int cl = 0; cl < cf_c; cl++) begin
      if (cf_tm == 2) begin
        if (clause_out(0, cl, feat)) s += weight(cls, cl);
      end else begin
        if (clause_out(cls * b, cl, feat)) s += (cl % 2 == 0) ? 1 : -1;
      end
    end
    return s;
  endfunction

  function automatic int ref_class(logic [MAXF-1:0] feat, output int best);
    int bi;
    best = -100000; bi = 0;
    for (int k = 0; k < cf_h; k++) begin
      int s;
      s = class_sum(k, feat);
      if (s > best) begin best = s; bi = k; end
    end
    return bi;
  endfunction

  // ---------------- data set: class k sets feature k, clears the others of 0..2
  function automatic logic [MAXF-1:0] sample(int k);
    logic [MAXF-1:0] f;
    f = '0;
    f[k] = 1'b1;
    for (int j = 3; j < NF; j++) f[j] = 1'($urandom_range(0, 1));
    return f;
  endfunction

  task automatic program_model(int tm, int c, int h, int t, int s);
    cf_tm = tm; cf_f = NF; cf_c = c; cf_h = h;
    send({OP_FEATURES, 12'd0, 16'(NF)});
    send({OP_CLAUSES, 12'd0, 16'(c)});
    send({OP_CLASSES, 18'd0, 2'(tm), 8'(h)});
    send({OP_THRESHOLD, 12'd0, 16'(t)});
    send({OP_SPEC, 12'd0, 16'(s)});
    send({OP_FLAGS, 28'd0});
    send({OP_INIT, 28'd0});
    while (!busy) @(posedge clk);
    while (busy) @(posedge clk);
  endtask

  task automatic infer(logic [MAXF-1:0] f, input int label, inout int correct);
    logic [31:0] r;
    int exp_cls, exp_sum;
    send({OP_DATA, 28'd0});
    send(32'(f));
    // a word sent while the job runs has to wait (stream stall)
    fork send({OP_NOP, 28'd0}); join_none
    recv(r);
    @(posedge clk);
    while (s_tvalid) @(posedge clk);
    exp_cls = ref_class(f, exp_sum);
    check(r[31] == 1'b0, "inference word flag");
    check(int'(r[7:0]) == exp_cls, $sformatf("class %0d expected %0d", r[7:0], exp_cls));
    check(int'(signed'(r[23:8])) == exp_sum, $sformatf("class sum %0d expected %0d", signed'(r[23:8]), exp_sum));
    if (int'(r[7:0]) == label) correct++;
  endtask

  task automatic train(logic [MAXF-1:0] f, input int label);
    logic [31:0] r;
    int prev_ta [TA_DEPTH][X*Y];
    int rows;
    @(posedge clk);
    while (busy) @(posedge clk);
    rows = ((2*cf_f + X - 1) / X) * ((cf_c + Y - 1) / Y) * (cf_tm == 2 ? 1 : cf_h);
    for (int rr = 0; rr < rows; rr++)
      for (int e = 0; e < X*Y; e++) prev_ta[rr][e] = ta_state(rr, e / X, e % X);
    send({OP_DATA, 12'd0, 8'(label), 7'd0, 1'b1});
    send(32'(f));
    recv(r);
    check(r[31] == 1'b1 && int'(r[7:0]) == label, "training word target");
    check(int'(r[15:8]) != label && int'(r[15:8]) < cf_h, "negated class range");
    for (int rr = 0; rr < rows; rr++)
      for (int e = 0; e < X*Y; e++) begin
        int d;
        d = ta_state(rr, e / X, e % X) - prev_ta[rr][e];
        if (d > 2 || d < -2) check(0, $sformatf("TA state moved more than once per round row %0d e %0d d %0d tm %0d", rr, e, d, cf_tm));
      end
  endtask

  task automatic run_mode(int tm, int c, int h, int epochs);
    int correct;
    int a, b, p, q;
    program_model(tm, c, h, 4, 3);
    for (int e = 0; e < epochs; e++)
      for (int k = 0; k < h; k++) train(sample(k), k);
    a = (2*NF + X - 1) / X; b = (c + Y - 1) / Y; p = (c + M - 1) / M; q = (h + N - 1) / N;
    correct = 0;
    for (int k = 0; k < 3 * h; k++) begin
      int cm0, wm0;
      cm0 = n_cm_cycles; wm0 = n_wm_cycles;
      infer(sample(k % h), k % h, correct);
      if (tm == 2) begin
        check(n_cm_cycles - cm0 == a * b, "clause matrix cycles = a*b");
        check(n_wm_cycles - wm0 == p * q, "weight matrix cycles = p*q");
      end else begin
        check(n_cm_cycles - cm0 == a * b * h, "clause matrix cycles = a*b*h");
        check(n_wm_cycles - wm0 == p * h, "weight matrix cycles = p*h");
      end
    end
    $display("mode %0d: %0d of %0d correct after %0d epochs", tm, correct, 3*h, epochs);
    check(correct * 2 > 3 * h, "accuracy above chance after training");
    if (tm == 2) n_cotm++; else n_vanilla++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    check(seed_req == 1'b1, "seed requested after reset");
    send({OP_SEED, 28'h0ACE123});
    run_mode(2, 7, 3, 30);
    run_mode(1, 6, 3, 30);
    $display("stall=%0d backpressure=%0d reseed=%0d skip=%0d wwrite=%0d tawrite=%0d",
             n_stall, n_backpressure, n_reseed, n_skip, n_wwrite, n_tawrite);
    check(n_stall > 0, "input stream stalled");
    check(n_backpressure > 0, "output back-pressure");
    check(n_reseed > 0, "slave seed refresh");
    check(n_skip > 0, "clause groups skipped");
    check(n_wwrite > 0, "weights written back");
    check(n_tawrite > 0, "TA rows written back");
    check(n_cotm > 0 && n_vanilla > 0, "both TM types run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
