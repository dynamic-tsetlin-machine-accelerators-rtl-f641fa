// tb_dtm_full: the accelerator at its default (DTM-L) sizes - 32 x 27 clause
// matrix, 8 x 4 weight matrix, 24-bit LFSRs, 8-bit TAs, 12-bit weights -
// with an MNIST-shaped CoTM model: 784 Boolean features, 54 clauses,
// 10 classes (a = 49 slices, b = 2 clause groups, p = 7 windows, q = 3 class
// groups). It initialises the model, checks the initial TA states and
// weights, runs three inferences compared with a reference model computed
// here from the TA and weight RAM contents (class and class sum), checks the
// clause matrix and weight matrix cycle counts (a*b and p*q), then runs two
// training steps and checks the result word and that no TA state moved by
// more than one step, and that an inference afterwards still matches the
// reference model.
module tb_dtm_full;
  import dtm_pkg::*;

  localparam int X = 32, Y = 27, M = 8, N = 4, L_TA = 8, W_BITS = 12;
  localparam int NF = 784, NC = 54, NH = 10, NWORDS = (NF + 31) / 32;
  localparam int A = (2 * NF + X - 1) / X, B = (NC + Y - 1) / Y;
  localparam int P = (NC + M - 1) / M, Q = (NH + N - 1) / N;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] s_tdata = '0;  logic s_tvalid = 0, s_tready;
  logic [31:0] m_tdata;       logic m_tvalid, m_tready = 0;
  logic seed_req, busy;

  dtm_top u_dut (
    .clk, .rst_n, .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready), .seed_req, .busy
  );

  int checks = 0, failures = 0;
  int n_cm_cycles = 0, n_wm_cycles = 0, n_tawrite = 0, n_wwrite = 0;
  int prev_ta [A*B][X*Y];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (u_dut.cm_en) n_cm_cycles++;
    if (u_dut.wm_en) n_wm_cycles++;
    if (u_dut.ta_we && !u_dut.ta_wsel_init) n_tawrite++;
    if (u_dut.w_we && !u_dut.w_wsel_init) n_wwrite++;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stream driver: signals change on the falling edge, a word moves on the
  // rising edge where tvalid and tready are both high
  task automatic send(input logic [31:0] w);
    @(negedge clk);
    s_tdata  = w;
    s_tvalid = 1'b1;
    while (!s_tready) @(negedge clk);
    @(negedge clk);
    s_tvalid = 1'b0;
  endtask

  task automatic recv(output logic [31:0] w);
    @(negedge clk);
    while (!m_tvalid) @(negedge clk);
    w = m_tdata;
    m_tready = 1'b1;
    @(negedge clk);
    m_tready = 1'b0;
  endtask

  function automatic int ta_state(int row, int i, int j);
    logic [X*Y*L_TA-1:0] r;
    r = u_dut.u_ta_ram.mem[row];
    return int'(r[(i*X+j)*L_TA +: L_TA]);
  endfunction

  function automatic int weight(int cls, int cl);
    logic [N*M*W_BITS-1:0] r;
    r = u_dut.u_w_ram.mem[(cls / N) * P + cl / M];
    return int'(signed'(r[((cls % N) * M + cl % M)*W_BITS +: W_BITS]));
  endfunction

  function automatic bit clause_out(int cl, logic [NF-1:0] feat);
    bit out;
    out = 1;
    for (int l = 0; l < 2*NF; l++) begin
      bit litv, inc;
      litv = (l % 2 == 0) ? feat[l/2] : !feat[l/2];
      inc  = ta_state((cl / Y) * A + l / X, cl % Y, l % X) >= (1 << (L_TA-1));
      if (inc && !litv) out = 0;
    end
    return out;
  endfunction

  function automatic int ref_class(logic [NF-1:0] feat, output int best);
    bit co [NC];
    int bi;
    for (int cl = 0; cl < NC; cl++) co[cl] = clause_out(cl, feat);
    best = -100000; bi = 0;
    for (int k = 0; k < NH; k++) begin
      int s;
      s = 0;
      for (int cl = 0; cl < NC; cl++) if (co[cl]) s += weight(k, cl);
      if (s > best) begin best = s; bi = k; end
    end
    return bi;
  endfunction

  // sparse random image: few set pixels, so that some clauses fire
  function automatic logic [NF-1:0] image();
    logic [NF-1:0] f;
    for (int i = 0; i < NF; i++) f[i] = ($urandom_range(0, 99) < 3);
    return f;
  endfunction

  task automatic send_point(logic [NF-1:0] f, bit tr, int label);
    send({OP_DATA, 12'd0, 8'(label), 7'd0, tr});
    for (int w = 0; w < NWORDS; w++) send(f[w*32 +: 32]);
  endtask

  task automatic infer(logic [NF-1:0] f);
    logic [31:0] r;
    int exp_cls, exp_sum, cm0, wm0;
    cm0 = n_cm_cycles; wm0 = n_wm_cycles;
    send_point(f, 1'b0, 0);
    recv(r);
    exp_cls = ref_class(f, exp_sum);
    check(r[31] == 1'b0, "inference word flag");
    check(int'(r[7:0]) == exp_cls, $sformatf("class %0d expected %0d", r[7:0], exp_cls));
    check(int'(signed'(r[23:8])) == exp_sum, $sformatf("class sum %0d expected %0d", signed'(r[23:8]), exp_sum));
    check(n_cm_cycles - cm0 == A * B, $sformatf("clause matrix cycles %0d = a*b", n_cm_cycles - cm0));
    check(n_wm_cycles - wm0 == P * Q, $sformatf("weight matrix cycles %0d = p*q", n_wm_cycles - wm0));
  endtask

  task automatic train(logic [NF-1:0] f, int label);
    logic [31:0] r;
    int moved;
    while (busy) @(posedge clk);
    for (int rr = 0; rr < A*B; rr++)
      for (int e = 0; e < X*Y; e++) prev_ta[rr][e] = ta_state(rr, e / X, e % X);
    send_point(f, 1'b1, label);
    recv(r);
    @(posedge clk);
    while (busy) @(posedge clk);
    check(r[31] == 1'b1 && int'(r[7:0]) == label, "training word target");
    check(int'(r[15:8]) != label && int'(r[15:8]) < NH, "negated class range");
    moved = 0;
    for (int rr = 0; rr < A*B; rr++)
      for (int e = 0; e < X*Y; e++) begin
        int d;
        d = ta_state(rr, e / X, e % X) - prev_ta[rr][e];
        if (d != 0) moved++;
        if (d > 2 || d < -2) check(0, $sformatf("TA row %0d entry %0d moved by %0d", rr, e, d));
      end
    $display("training step: %0d TA states changed", moved);
    check(moved > 0, "training changed TA states");
  endtask

  initial begin
    int n_inc, n_pos;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    check(seed_req == 1'b1, "seed requested after reset");
    send({OP_SEED, 28'h5EED123});
    send({OP_FEATURES, 12'd0, 16'(NF)});
    send({OP_CLAUSES, 12'd0, 16'(NC)});
    send({OP_CLASSES, 18'd0, 2'(TM_COTM), 8'(NH)});
    send({OP_THRESHOLD, 12'd0, 16'd50});
    send({OP_SPEC, 12'd0, 16'd10});
    send({OP_FLAGS, 28'd1});
    send({OP_INIT, 28'd0});
    while (!busy) @(posedge clk);
    while (busy) @(posedge clk);
    // initial states: just below or just above the include boundary, weights +-1
    n_inc = 0; n_pos = 0;
    for (int rr = 0; rr < A*B; rr++)
      for (int e = 0; e < X*Y; e++) begin
        int t;
        t = ta_state(rr, e / X, e % X);
        if (t != 127 && t != 128) check(0, $sformatf("initial TA state %0d", t));
        if (t == 128) n_inc++;
      end
    check(n_inc > A*B*X*Y/4 && n_inc < 3*A*B*X*Y/4, $sformatf("about half start included (%0d)", n_inc));
    for (int k = 0; k < NH; k++)
      for (int cl = 0; cl < NC; cl++) begin
        int w;
        w = weight(k, cl);
        check(w == 1 || w == -1, "initial weight +-1");
        if (w == 1) n_pos++;
      end
    check(n_pos > 0 && n_pos < NH*NC, "both weight signs present");
    for (int t = 0; t < 3; t++) infer(image());
    train(image(), 3);
    train(image(), 7);
    check(n_tawrite > 0 && n_wwrite > 0, "TA and weight rows written back");
    infer(image());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
