// instr_fetch: AXI4-Stream slave that decodes the programming and data
// stream of the accelerator. Every word carries an opcode in [31:28]
// (dtm_pkg::opcode_e); configuration words update the cfg record, OP_SEED
// programs the master PRNG, OP_INIT starts the TA/weight initialisation, and
// OP_DATA carries the execution mode ([0] 1 = train) and target class
// ([15:8]) followed by ceil(f/AXIS_W) raw feature words that go straight to
// the feature buffer. After the last feature word (or OP_INIT) it pulses
// start for one cycle and holds tready low until the controller has taken the
// job and returned to idle (ctrl_busy low again) - the stream stalls while
// the accelerator works.
// For OP_SPEC the decoder derives the TA update probability 2^L_R / s
// (saturated to 2^L_R - 1 for s = 1, so that 1/s = 1 still always fires).
// Follows the paper: model size, hyperparameters and seeds arrive over
// AXI-Stream, mode and target class ride in the feature stream, the
// accelerator computes 1/s. The word format is this design's own.
module instr_fetch #(
  parameter int unsigned AXIS_W = 32,
  parameter int unsigned L_R    = 24
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [AXIS_W-1:0]  s_tdata,
  input  logic               s_tvalid,
  output logic               s_tready,
  input  logic               ctrl_busy,
  output dtm_pkg::cfg_t      cfg,
  output logic [31:0]        seed,
  output logic               seed_load,
  output logic               init_start,
  output logic               dp_start,
  output logic               dp_train,
  output logic [7:0]         dp_target,
  output logic               feat_we,
  output logic [15:0]        feat_idx,
  output logic [AXIS_W-1:0]  feat_data
);
  import dtm_pkg::*;

  logic        hold, in_data;
  logic [15:0] words_left;
  logic        fire;
  opcode_e     op;

  assign s_tready = !hold && !ctrl_busy;
  assign fire     = s_tvalid && s_tready;
  assign op       = opcode_e'(s_tdata[31:28]);

  localparam logic [31:0] P_ONE = 32'(1) << L_R;

  function automatic logic [15:0] nwords(input logic [15:0] f);
    return 16'((32'(f) + AXIS_W - 1) / AXIS_W);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg        <= '{tm_type: TM_COTM, n_features: 16'd1, n_clauses: 16'd1,
                      n_classes: 8'd2, threshold: 16'd1, p_ta: 32'd0, boost_tpf: 1'b0};
      seed       <= '0;
      seed_load  <= 1'b0;
      init_start <= 1'b0;
      dp_start   <= 1'b0;
      dp_train   <= 1'b0;
      dp_target  <= '0;
      feat_we    <= 1'b0;
      feat_idx   <= '0;
      feat_data  <= '0;
      hold       <= 1'b0;
      in_data    <= 1'b0;
      words_left <= '0;
    end else begin
      seed_load  <= 1'b0;
      init_start <= 1'b0;
      dp_start   <= 1'b0;
      feat_we    <= 1'b0;
      if (hold && ctrl_busy) hold <= 1'b0;
      if (fire) begin
        if (in_data) begin
          feat_we   <= 1'b1;
          feat_data <= s_tdata;
          feat_idx  <= nwords(cfg.n_features) - words_left;
          words_left <= words_left - 1'b1;
          if (words_left == 16'd1) begin
            in_data  <= 1'b0;
            dp_start <= 1'b1;
            hold     <= 1'b1;
          end
        end else begin
          unique case (op)
            OP_FEATURES:  cfg.n_features <= s_tdata[15:0];
            OP_CLAUSES:   cfg.n_clauses  <= s_tdata[15:0];
            OP_CLASSES: begin
              cfg.n_classes <= s_tdata[7:0];
              cfg.tm_type   <= tm_type_e'(s_tdata[9:8]);
            end
            OP_THRESHOLD: cfg.threshold <= s_tdata[15:0];
            OP_SPEC: begin
              if (s_tdata[15:0] <= 16'd1) cfg.p_ta <= P_ONE - 1;
              else cfg.p_ta <= P_ONE / 32'(s_tdata[15:0]);
            end
            OP_SEED: begin
              seed      <= {4'h0, s_tdata[27:0]};
              seed_load <= 1'b1;
            end
            OP_FLAGS: cfg.boost_tpf <= s_tdata[0];
            OP_INIT: begin
              init_start <= 1'b1;
              hold       <= 1'b1;
            end
            OP_DATA: begin
              dp_train   <= s_tdata[0];
              dp_target  <= s_tdata[15:8];
              words_left <= nwords(cfg.n_features);
              in_data    <= (cfg.n_features != 0);
            end
            default: ;
          endcase
        end
      end
    end
  end
endmodule
