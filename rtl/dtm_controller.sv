// dtm_controller: process flow of the DTM accelerator (the state graph of
// the paper's control flow figure) together with the literal, clause and
// class counters and the TA / weight RAM read-write control.
//
// Derived sizes: a = ceil(2f/X) literal slices per clause group, b = ceil(c/Y)
// clause groups per class, p = ceil(c/M) clause windows per class sum, q =
// ceil(h/N) class groups. TA RAM row of slice k of clause group g is
// (gb + g)*a + k with gb = 0 for CoTM and class*b for Vanilla TM; the weight
// RAM row of window w of class group Q is Q*p + w.
//
// Phases (one RAM row per cycle; RAM data arrive one cycle after the address,
// so every phase drives a two-stage pipeline d1/d2 and drains it before the
// next phase starts):
//  INIT  write every used TA row (states 2^(L_TA-1)-1 or 2^(L_TA-1), at
//        random) and, for CoTM, every weight row (+1 or -1 at random);
//  CL    a*b cycles: clause matrix over the slices of each group, clause buffer
//        written once per group;
//  CS    p cycles per class group: weight matrix; inference does all q groups
//        (CoTM) or one class per pass (Vanilla), training only the class
//        being updated;
//  AM    q cycles: argmax over the masked class sum groups, then OUT;
//  PROB  clause update probability of the class being updated;
//  WU    p cycles: weight update matrix, clause feedback buffer written,
//        weight rows written back (CoTM);
//  TA    for every clause group with feedback a cycles of TA update (read,
//        update, write back); a group without feedback costs one cycle
//        (the clause-level feedback skip);
//  NEG   negated class drawn, second round CL-CS-PROB-WU-TA for it;
//  OUT   one result word on the output stream, waits for tready.
// Vanilla inference runs CL-CS once per class; CoTM computes the shared
// clause pool once. Training recomputes the clauses before each round, as
// the paper's update timing shows.
//
// Follows the paper: phase order, counters, mask generation, skip of groups
// without feedback, two-round target/negated update. Own choices: phases do
// not overlap (the paper pipelines the clause and weight matrices across
// groups and loads the next features during compute), the TA/weight
// initialisation values, the result word format.
module dtm_controller #(
  parameter int unsigned X           = 32,
  parameter int unsigned Y           = 27,
  parameter int unsigned M           = 8,
  parameter int unsigned N           = 4,
  parameter int unsigned TA_AW       = 12,
  parameter int unsigned W_AW        = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  dtm_pkg::cfg_t        cfg,
  input  logic                 init_start,
  input  logic                 dp_start,
  input  logic                 dp_train,
  input  logic [7:0]           dp_target,
  input  logic                 prng_ready,
  output logic                 busy,
  // TA RAM
  output logic                 ta_re,
  output logic [TA_AW-1:0]     ta_raddr,
  output logic                 ta_we,
  output logic [TA_AW-1:0]     ta_waddr,
  output logic                 ta_wsel_init,
  // weight RAM
  output logic                 w_re,
  output logic [W_AW-1:0]      w_raddr,
  output logic                 w_we,
  output logic [W_AW-1:0]      w_waddr,
  output logic                 w_wsel_init,
  // feature buffer / clause matrix / clause buffer
  output logic [15:0]          lit_slice,
  output logic                 cm_en,
  output logic                 cm_first,
  output logic [Y-1:0]         cl_buf_mask,
  output logic                 cb_we,
  output logic [15:0]          cb_wgroup,
  output logic [15:0]          cb_rwindow,
  output logic [15:0]          cb_rgroup,
  // weight matrix / class sums / argmax
  output logic                 wm_en,
  output logic                 wm_first,
  output logic [M-1:0]         cl_mask,
  output logic                 csb_we,
  output logic [7:0]           csb_base,
  output logic [N-1:0]         csb_lane_en,
  output logic [7:0]           csb_rgroup,
  output logic [7:0]           csb_rclass,
  output logic                 am_en,
  output logic                 am_first,
  output logic [7:0]           am_base,
  input  logic signed [15:0]   am_max_val,
  input  logic [7:0]           am_max_idx,
  // clause update control / weight update / feedback buffer / TA update
  output logic                 cuc_gen_neg,
  output logic                 cuc_calc,
  output logic                 y_c,
  output logic [7:0]           upd_target,
  input  logic [7:0]           neg_class,
  output logic [$clog2(N > 1 ? N : 2)-1:0] wu_lane,
  output logic                 fbb_clear,
  output logic                 fbb_we,
  output logic [15:0]          fbb_wwindow,
  output logic [15:0]          fbb_rgroup,
  output logic [Y-1:0]         fbb_rmask,
  input  logic                 fbb_any,
  output logic                 fb_hold_load,
  // result stream
  output logic                 res_valid,
  output logic [31:0]          res_data,
  input  logic                 res_ready
);
  import dtm_pkg::*;

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_CL, S_CS, S_AM, S_PROB, S_WU, S_TA, S_NEG, S_NEG2, S_OUT
  } state_e;

  state_e state;

  // ---------------- derived sizes
  logic [15:0] a_n, b_n, p_n, q_n;
  logic        cotm;
  always_comb begin
    a_n  = 16'((32'(cfg.n_features) * 2 + X - 1) / X);
    b_n  = 16'((32'(cfg.n_clauses) + Y - 1) / Y);
    p_n  = 16'((32'(cfg.n_clauses) + M - 1) / M);
    q_n  = 16'((32'(cfg.n_classes) + N - 1) / N);
    cotm = (cfg.tm_type == TM_COTM);
  end

  // ---------------- job registers
  logic       train, round;
  logic [7:0] target, cur_cls;

  // ---------------- counters of the issue stage
  logic [15:0] cnt_k, cnt_g, cnt_w, cnt_q;
  logic [31:0] row, row2;
  logic        issued;

  // ---------------- pipeline
  logic        d1_v, d1_first, d1_last;
  logic [15:0] d1_k, d1_g, d1_w, d1_q;
  logic [31:0] d1_row;
  logic        d2_v;
  logic [15:0] d2_g, d2_q;

  logic [31:0] ta_base;   // first TA row of the class being processed
  logic [15:0] cls_q;     // class group of cur_cls
  always_comb begin
    ta_base = cotm ? 32'd0 : 32'(cur_cls) * 32'(b_n) * 32'(a_n);
    cls_q   = 16'(cur_cls / N);
  end

  function automatic logic [Y-1:0] gmask(input logic [15:0] g, input logic [15:0] c);
    for (int unsigned i = 0; i < Y; i++) gmask[i] = (32'(g) * Y + i) < 32'(c);
  endfunction
  function automatic logic [M-1:0] wmask(input logic [15:0] w, input logic [15:0] c);
    for (int unsigned j = 0; j < M; j++) wmask[j] = (32'(w) * M + j) < 32'(c);
  endfunction

  wire pipe_empty = !d1_v && !d2_v;

  // issue-stage combinational outputs
  logic issue_v;      // a row is issued this cycle (d1 gets valid)
  logic issue_first, issue_last;
  logic skip_group;

  always_comb begin
    ta_re = 1'b0; ta_raddr = '0;
    w_re  = 1'b0; w_raddr  = '0;
    issue_v = 1'b0; issue_first = 1'b0; issue_last = 1'b0;
    skip_group = 1'b0;
    csb_rgroup = '0; am_en = 1'b0; am_first = 1'b0; am_base = '0;
    cuc_gen_neg = 1'b0; cuc_calc = 1'b0; fbb_clear = 1'b0;
    fbb_rgroup = cnt_g; fbb_rmask = gmask(cnt_g, cfg.n_clauses);
    fb_hold_load = 1'b0;
    unique case (state)
      S_CL: if (!issued) begin
        ta_re = 1'b1; ta_raddr = TA_AW'(row);
        issue_v = 1'b1; issue_first = (cnt_k == 0); issue_last = (cnt_k == a_n - 1);
      end
      S_CS, S_WU: if (!issued) begin
        w_re = cotm; w_raddr = W_AW'(row);
        issue_v = 1'b1; issue_first = (cnt_w == 0); issue_last = (cnt_w == p_n - 1);
      end
      S_AM: if (!issued) begin
        csb_rgroup = 8'(cnt_q); am_en = 1'b1; am_first = (cnt_q == 0); am_base = 8'(cnt_q * N);
      end
      S_PROB: begin cuc_calc = 1'b1; fbb_clear = 1'b1; end
      S_TA: if (!issued) begin
        if (cnt_k == 0 && !fbb_any) skip_group = 1'b1;
        else begin
          ta_re = 1'b1; ta_raddr = TA_AW'(row);
          issue_v = 1'b1; issue_first = (cnt_k == 0); issue_last = (cnt_k == a_n - 1);
          fb_hold_load = (cnt_k == 0);
        end
      end
      S_NEG: cuc_gen_neg = 1'b1;
      default: ;
    endcase
  end

  // d1 / d2 stage outputs
  always_comb begin
    lit_slice   = d1_k;
    cm_en       = d1_v && (state == S_CL);
    cm_first    = d1_first;
    cl_buf_mask = gmask(d1_g, cfg.n_clauses);
    cb_rgroup   = d1_g;
    cb_rwindow  = d1_w;
    cl_mask     = wmask(d1_w, cfg.n_clauses);
    wm_en       = d1_v && (state == S_CS);
    wm_first    = d1_first;
    cb_we       = d2_v && (state == S_CL);
    cb_wgroup   = d2_g;
    csb_we      = d2_v && (state == S_CS);
    csb_base    = cotm ? 8'(d2_q * N) : cur_cls;
    csb_lane_en = cotm ? {N{1'b1}} : N'(1);
    csb_rclass  = cur_cls;
    fbb_we      = d1_v && (state == S_WU);
    fbb_wwindow = d1_w;
    w_we        = 1'b0;
    w_waddr     = W_AW'(d1_row);
    w_wsel_init = 1'b0;
    ta_we       = 1'b0;
    ta_waddr    = TA_AW'(d1_row);
    ta_wsel_init = 1'b0;
    if (state == S_WU && d1_v && cotm) w_we = 1'b1;
    if (state == S_TA && d1_v) ta_we = 1'b1;
    if (state == S_INIT && prng_ready) begin
      ta_wsel_init = 1'b1; w_wsel_init = 1'b1;
      ta_waddr = TA_AW'(row);  ta_we = (row  < 32'(a_n) * 32'(b_n) * (cotm ? 32'd1 : 32'(cfg.n_classes)));
      w_waddr  = W_AW'(row2);  w_we  = cotm && (row2 < 32'(p_n) * 32'(q_n));
    end
    y_c        = (round == 1'b0);
    upd_target = target;
    wu_lane    = $bits(wu_lane)'(cur_cls % N);
    busy       = (state != S_IDLE);
    res_valid  = (state == S_OUT);
    res_data   = train ? {1'b1, 15'd0, neg_class, target}
                       : {1'b0, 7'd0, am_max_val, am_max_idx};
  end

  // ---------------- sequential part
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      train <= 1'b0; round <= 1'b0; target <= '0; cur_cls <= '0;
      cnt_k <= '0; cnt_g <= '0; cnt_w <= '0; cnt_q <= '0;
      row <= '0; row2 <= '0; issued <= 1'b0;
      d1_v <= 1'b0; d1_first <= 1'b0; d1_last <= 1'b0;
      d1_k <= '0; d1_g <= '0; d1_w <= '0; d1_q <= '0; d1_row <= '0;
      d2_v <= 1'b0; d2_g <= '0; d2_q <= '0;
    end else begin
      // pipeline
      d1_v     <= issue_v;
      d1_first <= issue_first;
      d1_last  <= issue_last;
      d1_k     <= cnt_k;
      d1_g     <= cnt_g;
      d1_w     <= cnt_w;
      d1_q     <= cnt_q;
      d1_row   <= row;
      d2_v     <= d1_v && d1_last;
      d2_g     <= d1_g;
      d2_q     <= d1_q;

      unique case (state)
        S_IDLE: begin
          issued <= 1'b0;
          cnt_k <= '0; cnt_g <= '0; cnt_w <= '0; cnt_q <= '0;
          row <= '0; row2 <= '0;
          if (init_start) state <= S_INIT;
          else if (dp_start) begin
            train   <= dp_train;
            target  <= dp_target;
            round   <= 1'b0;
            cur_cls <= dp_train ? dp_target : 8'd0;
            row     <= (dp_train && !cotm) ? 32'(dp_target) * 32'(b_n) * 32'(a_n) : 32'd0;
            state   <= S_CL;
          end
        end

        S_INIT: if (prng_ready) begin
          row  <= row + 1;
          row2 <= row2 + 1;
          if (row >= 32'(a_n) * 32'(b_n) * (cotm ? 32'd1 : 32'(cfg.n_classes)) &&
              (!cotm || row2 >= 32'(p_n) * 32'(q_n)))
            state <= S_IDLE;
        end

        S_CL: begin
          if (!issued) begin
            row <= row + 1;
            if (cnt_k == a_n - 1) begin
              cnt_k <= '0;
              if (cnt_g == b_n - 1) issued <= 1'b1;
              else cnt_g <= cnt_g + 1'b1;
            end else cnt_k <= cnt_k + 1'b1;
          end else if (pipe_empty) begin
            issued <= 1'b0;
            cnt_w  <= '0;
            cnt_q  <= (train || !cotm) ? cls_q : '0;
            row    <= cotm ? ((train ? 32'(cls_q) : 32'd0) * 32'(p_n)) : 32'd0;
            state  <= S_CS;
          end
        end

        S_CS: begin
          if (!issued) begin
            row <= row + 1;
            if (cnt_w == p_n - 1) begin
              cnt_w <= '0;
              if (train || !cotm || cnt_q == q_n - 1) issued <= 1'b1;
              else cnt_q <= cnt_q + 1'b1;
            end else cnt_w <= cnt_w + 1'b1;
          end else if (pipe_empty) begin
            issued <= 1'b0;
            cnt_k <= '0; cnt_g <= '0; cnt_q <= '0;
            if (train) state <= S_PROB;
            else if (!cotm && cur_cls != cfg.n_classes - 1) begin
              cur_cls <= cur_cls + 1'b1;
              row     <= 32'(cur_cls + 1'b1) * 32'(b_n) * 32'(a_n);
              state   <= S_CL;
            end else state <= S_AM;
          end
        end

        S_AM: begin
          if (!issued) begin
            if (cnt_q == q_n - 1) issued <= 1'b1;
            else cnt_q <= cnt_q + 1'b1;
          end else state <= S_OUT;
        end

        S_PROB: begin
          cnt_w <= '0;
          row   <= 32'(cls_q) * 32'(p_n);
          state <= S_WU;
        end

        S_WU: begin
          if (!issued) begin
            row <= row + 1;
            if (cnt_w == p_n - 1) issued <= 1'b1;
            else cnt_w <= cnt_w + 1'b1;
          end else if (pipe_empty) begin
            issued <= 1'b0;
            cnt_k <= '0; cnt_g <= '0;
            row   <= ta_base;
            state <= S_TA;
          end
        end

        S_TA: begin
          if (!issued) begin
            if (skip_group) begin
              row <= row + 32'(a_n);
              if (cnt_g == b_n - 1) issued <= 1'b1;
              else cnt_g <= cnt_g + 1'b1;
            end else begin
              row <= row + 1;
              if (cnt_k == a_n - 1) begin
                cnt_k <= '0;
                if (cnt_g == b_n - 1) issued <= 1'b1;
                else cnt_g <= cnt_g + 1'b1;
              end else cnt_k <= cnt_k + 1'b1;
            end
          end else if (pipe_empty) begin
            issued <= 1'b0;
            cnt_k <= '0; cnt_g <= '0;
            if (round == 1'b0 && cfg.n_classes > 8'd1) state <= S_NEG;
            else state <= S_OUT;
          end
        end

        S_NEG: state <= S_NEG2;

        S_NEG2: begin
          round   <= 1'b1;
          cur_cls <= neg_class;
          row     <= cotm ? 32'd0 : 32'(neg_class) * 32'(b_n) * 32'(a_n);
          state   <= S_CL;
        end

        S_OUT: if (res_ready) state <= S_IDLE;

        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
