// prng_arbiter: hands the master PRNG's seed to one requesting slave per
// cycle. Round-robin among the slaves' req lines: the granted slave gets
// ack and the seed on its own seed lane, and ack_o tells the master to
// advance. idle is forwarded to every slave from the cluster's enable.
// Follows the paper: an arbiter between master and slaves with req/seed/ack/
// idle ports. Own choices: round-robin order, one grant per cycle.
module prng_arbiter #(
  parameter int unsigned NS = 4,
  parameter int unsigned V  = 24
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req_in,
  input  logic [V-1:0]    seed_in,
  output logic            ack_o,
  input  logic [NS-1:0]   slave_req,
  output logic [NS-1:0]   slave_ack,
  output logic [V-1:0]    slave_seed,
  input  logic            en,
  output logic            slave_idle
);
  localparam int unsigned IW = (NS > 1) ? $clog2(NS) : 1;
  logic [IW-1:0] ptr, grant_idx;
  logic          found;

  always_comb begin
    found     = 1'b0;
    grant_idx = ptr;
    for (int unsigned k = 0; k < NS; k++) begin
      int unsigned idx;
      idx = (int'(ptr) + k) % NS;
      if (!found && slave_req[idx]) begin
        found     = 1'b1;
        grant_idx = IW'(idx);
      end
    end
  end

  always_comb begin
    slave_ack = '0;
    if (found && req_in) slave_ack[grant_idx] = 1'b1;
  end

  assign ack_o      = found && req_in;
  assign slave_seed = seed_in;
  assign slave_idle = !en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (ack_o) ptr <= (grant_idx == IW'(NS - 1)) ? '0 : grant_idx + 1'b1;
  end
endmodule
