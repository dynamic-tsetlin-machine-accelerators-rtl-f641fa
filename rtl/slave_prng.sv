// slave_prng: one slave of the PRNG cluster. An L-bit maximal-length
// Fibonacci LFSR whose whole state is the L-bit random number presented on
// rand_o every cycle. After one full period (2^L - 1 steps) it raises req and
// keeps running until the arbiter answers with ack and a fresh seed, which it
// loads in that cycle ("seed refresh"). Out of reset it has no seed, so req is
// high at once and rand_o is held until the first seed arrives.
// idle=1 freezes the LFSR (no step, no period count).
// Follows the paper: LFSR slave, seed refresh after a full LFSR period,
// port names req/seed/ack/idle of the cluster figure. Own choices: the tap
// table, stepping one bit per cycle, a zero seed mapped to 1, the meaning of idle.
module slave_prng #(
  parameter int unsigned L = 24
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         idle,
  output logic         req,
  input  logic         ack,
  input  logic [L-1:0] seed,
  output logic [L-1:0] rand_o
);
  import dtm_pkg::*;

  localparam logic [L-1:0] TAPS = L'(lfsr_taps(L));
  localparam logic [L-1:0] PERIOD = {L{1'b1}};  // 2^L - 1 steps

  logic [L-1:0] state, count;
  logic         seeded;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= L'(1);
      count  <= '0;
      seeded <= 1'b0;
      req    <= 1'b1;
    end else if (ack) begin
      state  <= (seed == '0) ? L'(1) : seed;
      count  <= '0;
      seeded <= 1'b1;
      req    <= 1'b0;
    end else if (seeded && !idle) begin
      state <= {state[L-2:0], ^(state & TAPS)};
      if (count == PERIOD - 1'b1) begin
        count <= '0;
        req   <= 1'b1;
      end else begin
        count <= count + 1'b1;
      end
    end
  end

  assign rand_o = state;
endmodule
