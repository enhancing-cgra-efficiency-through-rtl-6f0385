// plaid_config_mem: configuration memory of one PCU.
//
// DEPTH entries of CFG_W bits (16 x 120 in the published design). The host
// writes one entry per cycle through we/waddr/wdata. The fabric reads the
// entry at raddr, the current modulo context, combinationally, so the
// configuration selected by the context counter applies in the same cycle.
// Building it as a flip-flop array with an asynchronous read port is this
// implementation's choice.
module plaid_config_mem #(
  parameter int unsigned DEPTH = plaid_pkg::CFG_DEPTH,
  parameter int unsigned WIDTH = plaid_pkg::CFG_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  assign rdata = mem[raddr];

endmodule
