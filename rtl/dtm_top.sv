// dtm_top: Dynamic Tsetlin Machine (DTM) training and inference accelerator.
// One hardware configuration runs Vanilla TMs and Coalesced TMs (CoTM) of any
// feature, clause and class count up to the build-time maxima, chosen at run
// time over the input stream. Clauses are evaluated X literals x Y clauses
// per cycle from TA RAM rows (clause matrix), class sums M clauses x N classes
// per cycle from weight RAM rows (weight matrix), and training applies
// clause-level feedback M clauses per cycle (weight update matrix) and
// TA-level feedback to X x Y automata per cycle (TA update matrix), skipping
// clause groups that received no feedback. A master/slave LFSR cluster
// supplies X*Y + M + 1 random numbers per cycle.
//
// Interface: AXI4-Stream slave s_axis_* (programming words and datapoints,
// format in dtm_pkg / instr_fetch), AXI4-Stream master m_axis_* (one result
// word per datapoint: inference {0, 7'b0, class sum[15:0], class[7:0]},
// training {1, 15'b0, negated class, target class}). seed_req is high until
// the host has programmed the master PRNG seed. busy is high while a job runs.
//
// Defaults are the paper's large configuration (32 literals x 27 clauses,
// 8 clauses x 4 classes, 24-bit LFSRs, 12-bit weights, 16-bit class sums).
// TA state width, stream width and memory depths are this design's choice.
module dtm_top #(
  parameter int unsigned X            = 32,
  parameter int unsigned Y            = 27,
  parameter int unsigned M            = 8,
  parameter int unsigned N            = 4,
  parameter int unsigned L_TA         = 8,
  parameter int unsigned W_BITS       = 12,
  parameter int unsigned L_LFSR       = 24,
  parameter int unsigned AXIS_W       = 32,
  parameter int unsigned MAX_FEATURES = 784,
  parameter int unsigned MAX_CLAUSES  = 2048,
  parameter int unsigned MAX_CLASSES  = 16,
  parameter int unsigned TA_DEPTH     = 4096,
  parameter int unsigned W_DEPTH      = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [AXIS_W-1:0] s_axis_tdata,
  input  logic              s_axis_tvalid,
  output logic              s_axis_tready,
  output logic [31:0]       m_axis_tdata,
  output logic              m_axis_tvalid,
  input  logic              m_axis_tready,
  output logic              seed_req,
  output logic              busy
);
  import dtm_pkg::*;

  localparam int unsigned L_CSUM = 16;
  localparam int unsigned TA_W   = X * Y * L_TA;
  localparam int unsigned WR_W   = N * M * W_BITS;
  localparam int unsigned TA_AW  = $clog2(TA_DEPTH);
  localparam int unsigned W_AW   = $clog2(W_DEPTH);
  localparam int unsigned NSL    = X * Y + M + 1;
  localparam int unsigned LP     = L_CSUM + 2 + L_LFSR;
  localparam int unsigned LW     = $clog2(N > 1 ? N : 2);

  // ---------------- stream decoder
  cfg_t        cfg;
  logic [31:0] seed;
  logic        seed_load, init_start, dp_start, dp_train;
  logic [7:0]  dp_target;
  logic        feat_we;
  logic [15:0] feat_idx;
  logic [AXIS_W-1:0] feat_data;

  instr_fetch #(.AXIS_W(AXIS_W), .L_R(L_LFSR)) u_if (
    .clk, .rst_n, .s_tdata(s_axis_tdata), .s_tvalid(s_axis_tvalid), .s_tready(s_axis_tready),
    .ctrl_busy(busy), .cfg, .seed, .seed_load, .init_start, .dp_start, .dp_train, .dp_target,
    .feat_we, .feat_idx, .feat_data
  );

  // ---------------- PRNG cluster
  logic                         prng_ready;
  logic [NSL-1:0][L_LFSR-1:0]   rnd;
  prng_cluster #(.NUM_SLAVES(NSL), .L(L_LFSR)) u_prng (
    .clk, .rst_n, .en(1'b1), .seed_in(seed), .seed_load, .seed_req,
    .ready(prng_ready), .refresh_o(), .rand_o(rnd)
  );

  logic [X*Y-1:0][L_LFSR-1:0] ta_rand;
  logic [M-1:0][L_LFSR-1:0]   w_rand;
  logic [L_LFSR-1:0]          c_rand;
  always_comb begin
    for (int unsigned k = 0; k < X * Y; k++) ta_rand[k] = rnd[k];
    for (int unsigned k = 0; k < M; k++)     w_rand[k]  = rnd[X * Y + k];
    c_rand = rnd[NSL-1];
  end

  // ---------------- controller
  logic              ta_re, ta_we, ta_wsel_init, w_re, w_we, w_wsel_init;
  logic [TA_AW-1:0]  ta_raddr, ta_waddr;
  logic [W_AW-1:0]   w_raddr, w_waddr;
  logic [15:0]       lit_slice, cb_wgroup, cb_rwindow, cb_rgroup, fbb_wwindow, fbb_rgroup;
  logic              cm_en, cm_first, cb_we, wm_en, wm_first, csb_we;
  logic [Y-1:0]      cl_buf_mask, fbb_rmask;
  logic [M-1:0]      cl_mask;
  logic [7:0]        csb_base, csb_rgroup, csb_rclass, am_base, am_max_idx, upd_target, neg_class;
  logic [N-1:0]      csb_lane_en;
  logic              am_en, am_first, cuc_gen_neg, cuc_calc, y_c, fbb_clear, fbb_we, fbb_any;
  logic              fb_hold_load;
  logic [LW-1:0]     wu_lane;
  logic signed [L_CSUM-1:0] am_max_val;

  dtm_controller #(.X(X), .Y(Y), .M(M), .N(N), .TA_AW(TA_AW), .W_AW(W_AW)) u_ctrl (
    .clk, .rst_n, .cfg, .init_start, .dp_start, .dp_train, .dp_target, .prng_ready, .busy,
    .ta_re, .ta_raddr, .ta_we, .ta_waddr, .ta_wsel_init,
    .w_re, .w_raddr, .w_we, .w_waddr, .w_wsel_init,
    .lit_slice, .cm_en, .cm_first, .cl_buf_mask, .cb_we, .cb_wgroup, .cb_rwindow, .cb_rgroup,
    .wm_en, .wm_first, .cl_mask, .csb_we, .csb_base, .csb_lane_en, .csb_rgroup, .csb_rclass,
    .am_en, .am_first, .am_base, .am_max_val, .am_max_idx,
    .cuc_gen_neg, .cuc_calc, .y_c, .upd_target, .neg_class, .wu_lane,
    .fbb_clear, .fbb_we, .fbb_wwindow, .fbb_rgroup, .fbb_rmask, .fbb_any,
    .fb_hold_load,
    .res_valid(m_axis_tvalid), .res_data(m_axis_tdata), .res_ready(m_axis_tready)
  );

  // ---------------- feature buffer
  logic [X-1:0] lit, lit_mask, lit_or_mask, lit_valid;
  feature_buffer #(.MAX_FEATURES(MAX_FEATURES), .X(X), .AXIS_W(AXIS_W)) u_feat (
    .clk, .rst_n, .wr_en(feat_we), .wr_idx(feat_idx), .wr_data(feat_data),
    .n_features(cfg.n_features), .rd_slice(lit_slice),
    .lit, .lit_mask, .lit_or_mask, .lit_valid
  );

  // ---------------- TA RAM, clause matrix, clause buffer
  logic [TA_W-1:0]                 ta_rdata, ta_wdata;
  logic [Y-1:0][X-1:0][L_TA-1:0]   ta_row, ta_new, ta_init;
  logic [Y-1:0]                    p_cl, cb_y;
  logic [M-1:0]                    cb_m;

  always_comb begin
    for (int unsigned i = 0; i < Y; i++)
      for (int unsigned j = 0; j < X; j++)
        ta_init[i][j] = {1'b0, {(L_TA-1){1'b1}}} + L_TA'(ta_rand[i*X+j][0]);
  end
  assign ta_row   = ta_rdata;
  assign ta_wdata = ta_wsel_init ? ta_init : ta_new;

  dtm_ram #(.WIDTH(TA_W), .DEPTH(TA_DEPTH)) u_ta_ram (
    .clk, .we(ta_we), .waddr(ta_waddr), .wdata(ta_wdata), .re(ta_re), .raddr(ta_raddr), .rdata(ta_rdata)
  );

  clause_matrix #(.X(X), .Y(Y), .L_TA(L_TA)) u_cm (
    .clk, .rst_n, .en(cm_en), .first(cm_first), .lit_or_mask, .ta_row, .cl_buf_mask, .p_cl
  );

  clause_buffer #(.Y(Y), .M(M), .MAX_CLAUSES(MAX_CLAUSES)) u_cb (
    .clk, .rst_n, .wr_en(cb_we), .wr_group(cb_wgroup), .wr_data(p_cl),
    .rd_window(cb_rwindow), .rd_m(cb_m), .rd_group(cb_rgroup), .rd_y(cb_y)
  );

  // ---------------- weight RAM, weight matrix, class sums, argmax
  logic [WR_W-1:0]                       w_rdata, w_wdata;
  logic [N-1:0][M-1:0][W_BITS-1:0]       w_row, w_new, w_init;
  logic signed [N-1:0][L_CSUM-1:0]       p_cs, csb_masked;
  logic signed [L_CSUM-1:0]              csb_sum;

  always_comb begin
    for (int unsigned i = 0; i < N; i++)
      for (int unsigned j = 0; j < M; j++)
        w_init[i][j] = ta_rand[i*M+j][1] ? W_BITS'(1) : {W_BITS{1'b1}};
  end
  assign w_row   = w_rdata;
  assign w_wdata = w_wsel_init ? w_init : w_new;

  dtm_ram #(.WIDTH(WR_W), .DEPTH(W_DEPTH)) u_w_ram (
    .clk, .we(w_we), .waddr(w_waddr), .wdata(w_wdata), .re(w_re), .raddr(w_raddr), .rdata(w_rdata)
  );

  weight_matrix #(.M(M), .N(N), .W_BITS(W_BITS), .L_CSUM(L_CSUM)) u_wm (
    .clk, .rst_n, .en(wm_en), .first(wm_first), .tm_type(cfg.tm_type),
    .cl(cb_m), .cl_mask, .weights(w_row), .p_cs
  );

  class_sum_buffer #(.N(N), .MAX_CLASSES(MAX_CLASSES), .L_CSUM(L_CSUM)) u_csb (
    .clk, .rst_n, .wr_en(csb_we), .wr_base(csb_base), .wr_lane_en(csb_lane_en), .wr_data(p_cs),
    .n_classes(cfg.n_classes), .rd_group(csb_rgroup), .rd_masked(csb_masked),
    .rd_class(csb_rclass), .rd_sum(csb_sum)
  );

  argmax #(.N(N), .L_CSUM(L_CSUM)) u_am (
    .clk, .rst_n, .en(am_en), .first(am_first), .base(am_base), .csum(csb_masked),
    .max_val(am_max_val), .max_idx(am_max_idx)
  );

  // ---------------- training: clause update control, weight update, feedback
  logic [LP-1:0]      p_update;
  logic [M-1:0][1:0]  wu_fb;
  logic [Y-1:0][1:0]  fbb_rd, fb_hold;

  clause_update_control #(.L_CSUM(L_CSUM), .L_R(L_LFSR), .LP(LP)) u_cuc (
    .clk, .rst_n, .gen_neg(cuc_gen_neg), .calc(cuc_calc), .y_c, .target(upd_target),
    .n_classes(cfg.n_classes), .c_rand, .threshold(cfg.threshold), .csum(csb_sum),
    .neg_class, .p_update
  );

  weight_update_matrix #(.M(M), .N(N), .W_BITS(W_BITS), .L_R(L_LFSR), .LP(LP)) u_wu (
    .tm_type(cfg.tm_type), .y_c, .lane(wu_lane), .p_update, .threshold(cfg.threshold),
    .w_rand, .cl(cb_m), .cl_mask, .weights_in(w_row), .weights_out(w_new), .feedback(wu_fb)
  );

  clause_feedback_buffer #(.Y(Y), .M(M), .MAX_CLAUSES(MAX_CLAUSES)) u_fbb (
    .clk, .rst_n, .clear(fbb_clear), .wr_en(fbb_we), .wr_window(fbb_wwindow), .wr_data(wu_fb),
    .rd_group(fbb_rgroup), .rd_mask(fbb_rmask), .rd_data(fbb_rd), .any_fb(fbb_any)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fb_hold <= '0;
    else if (fb_hold_load) fb_hold <= fbb_rd;
  end

  ta_update_matrix #(.X(X), .Y(Y), .L_TA(L_TA), .L_R(L_LFSR)) u_tau (
    .ta_in(ta_row), .lit, .lit_valid, .cl(cb_y), .cl_mask(cl_buf_mask), .fb(fb_hold),
    .ta_rand, .p_ta(cfg.p_ta), .boost_tpf(cfg.boost_tpf), .ta_out(ta_new)
  );

  initial assert (X * Y >= N * M) else $error("weight init draws on the TA random lanes");
endmodule
