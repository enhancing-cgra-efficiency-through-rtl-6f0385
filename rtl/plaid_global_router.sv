// plaid_global_router: the 7x9 global router of a PCU.
//
// Inputs (select value): 0..3 the N,S,E,W input registers, 4..5 the two
// outputs of the local router, 6 the ALSU result, 7 selects zero.
// Outputs: 0..3 the N,S,E,W links to the neighbouring PCUs, 4..7 the four
// paths to the local router, 8 the ALSU operand. One 3-bit select per output.
//
// Timing. Every N/S/E/W input is captured in a register at the clock edge
// (loaded each cycle unless its dir_hold bit is set), so one hop between
// PCUs takes one cycle. Each global-to-local path has a register as well;
// g2l_reg[k] chooses the registered value (one cycle later) or the direct
// one (same cycle). The published PCU draws these registers and the 7x9
// size; the load/hold reading of the input multiplexers is this
// implementation's choice.
//
// No combinational loop can be configured: the direct global-to-local paths
// cannot select the two local-router inputs (they read zero instead), so a
// value going local -> global -> local always passes a register, and every
// link between PCUs ends in a register. This is the hardware side of the
// loop rule in the published design.
module plaid_global_router
  import plaid_pkg::*;
#(
  parameter int unsigned W = plaid_pkg::DW
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic [3:0][W-1:0]             dir_in,
  input  logic [N_L2G-1:0][W-1:0]       l2g,
  input  logic [W-1:0]                  alsu_res,
  input  logic [G_N_OUT-1:0][SEL_W-1:0] sel,
  input  logic [3:0]                    dir_hold,
  input  logic [N_G2L-1:0]              g2l_reg,
  output logic [3:0][W-1:0]             dir_out,
  output logic [N_G2L-1:0][W-1:0]       g2l,
  output logic [W-1:0]                  alsu_opnd
);

  logic [3:0][W-1:0]       dir_q;
  logic [N_G2L-1:0][W-1:0] g2l_q;
  logic [N_G2L-1:0][W-1:0] g2l_full;    // any source, feeds the registers
  logic [N_G2L-1:0][W-1:0] g2l_direct;  // no local-router source
  logic [7:0][W-1:0]       src;

  assign src = {{W{1'b0}}, alsu_res, l2g, dir_q};

  always_comb begin
    for (int o = 0; o < 4; o++)
      dir_out[o] = src[sel[o]];
    for (int k = 0; k < N_G2L; k++) begin
      g2l_full[k] = src[sel[GO_G2L0 + k]];
      if (sel[GO_G2L0 + k] < SEL_W'(GI_L2G0))
        g2l_direct[k] = dir_q[sel[GO_G2L0 + k][1:0]];
      else if (sel[GO_G2L0 + k] == SEL_W'(GI_ALSU))
        g2l_direct[k] = alsu_res;
      else
        g2l_direct[k] = '0;
      g2l[k] = g2l_reg[k] ? g2l_q[k] : g2l_direct[k];
    end
    alsu_opnd = src[sel[GO_ALSU]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dir_q <= '0;
      g2l_q <= '0;
    end else if (clear) begin
      dir_q <= '0;
      g2l_q <= '0;
    end else begin
      for (int d = 0; d < 4; d++)
        if (!dir_hold[d]) dir_q[d] <= dir_in[d];
      g2l_q <= g2l_full;
    end
  end

endmodule
