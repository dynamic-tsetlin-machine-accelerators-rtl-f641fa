// prng_cluster: master/slave pseudo random number generator cluster.
// NUM_SLAVES L-bit LFSR slaves deliver NUM_SLAVES independent L-bit random
// numbers per cycle on rand_o (slave k on rand_o[k]). Each slave asks for a
// new seed after one LFSR period; a round-robin arbiter passes seeds from a
// xorshift master, one slave per cycle. After reset every slave requests a
// seed, so the cluster is fully seeded NUM_SLAVES cycles after the host
// programs the master seed (ready goes high then).
// refresh_o pulses once per seed handed out, for counting reseeds.
// Follows the paper's PRNG cluster figure; see the three sub-blocks for the
// choices this design makes.
module prng_cluster #(
  parameter int unsigned NUM_SLAVES = 873,
  parameter int unsigned L          = 24
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       en,
  input  logic [31:0]                seed_in,
  input  logic                       seed_load,
  output logic                       seed_req,
  output logic                       ready,
  output logic                       refresh_o,
  output logic [NUM_SLAVES-1:0][L-1:0] rand_o
);
  logic            m_req, m_ack, idle;
  logic [L-1:0]    m_seed, s_seed;
  logic [NUM_SLAVES-1:0] s_req, s_ack;

  master_prng #(.V(L)) u_master (
    .clk, .rst_n, .seed_in, .seed_load, .seed_req,
    .req_o(m_req), .seed_o(m_seed), .ack_in(m_ack)
  );

  prng_arbiter #(.NS(NUM_SLAVES), .V(L)) u_arb (
    .clk, .rst_n, .req_in(m_req && !seed_req), .seed_in(m_seed), .ack_o(m_ack),
    .slave_req(s_req), .slave_ack(s_ack), .slave_seed(s_seed), .en, .slave_idle(idle)
  );

  for (genvar k = 0; k < NUM_SLAVES; k++) begin : g_slave
    slave_prng #(.L(L)) u_slave (
      .clk, .rst_n, .idle, .req(s_req[k]), .ack(s_ack[k]), .seed(s_seed),
      .rand_o(rand_o[k])
    );
  end

  logic seeded_all;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) seeded_all <= 1'b0;
    else if (!seed_req && m_ack && (s_req & ~s_ack) == '0) seeded_all <= 1'b1;
  end
  assign ready     = seeded_all;
  assign refresh_o = m_ack;
endmodule
