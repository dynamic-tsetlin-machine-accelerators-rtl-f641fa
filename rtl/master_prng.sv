// master_prng: seed source of the PRNG cluster. A 32-bit xorshift generator
// (x ^= x<<13; x ^= x>>17; x ^= x<<5) whose low V bits are offered as a
// seed on seed_o with req_o held high. When the arbiter hands the seed to a
// slave it pulses ack_in and the generator advances one step, so every slave
// gets a different seed. The host programs the master seed through
// seed_in/seed_load (a zero seed is replaced by 1).
// seed_req is high while no master seed has been programmed.
// Follows the paper: master/slave cluster, xorshift-based reseeding, seed
// supplied by the processor, port names of the cluster figure. Own choices:
// the xorshift32 constants and the one-seed-per-cycle handshake.
module master_prng #(
  parameter int unsigned V = 24
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [31:0]  seed_in,
  input  logic         seed_load,
  output logic         seed_req,
  output logic         req_o,
  output logic [V-1:0] seed_o,
  input  logic         ack_in
);
  logic [31:0] x;

  function automatic logic [31:0] xorshift32(input logic [31:0] v);
    logic [31:0] t;
    t = v ^ (v << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x        <= 32'h2545_F491;
      seed_req <= 1'b1;
    end else if (seed_load) begin
      x        <= (seed_in == '0) ? 32'd1 : seed_in;
      seed_req <= 1'b0;
    end else if (ack_in) begin
      x <= xorshift32(x);
    end
  end

  assign req_o  = 1'b1;
  assign seed_o = V'(xorshift32(x));
endmodule
