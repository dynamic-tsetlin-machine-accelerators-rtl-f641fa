// dtm_ram: simple dual-port RAM used for the TA RAM (one clause computation
// slice of X*Y TA states per row) and the weight RAM (N*M weights per row).
// One write port and one read port; the read is synchronous, rdata is valid
// the cycle after re. A read of the row being written returns the old data.
// Written as an array so synthesis maps it to block or ultra RAM. Contents
// are not reset; the controller's initialisation pass writes every row used.
// Follows the paper: TA states and weights live in on-chip RAM, one row per
// slice. Own choice: port arrangement and read latency of one cycle.
module dtm_ram #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
