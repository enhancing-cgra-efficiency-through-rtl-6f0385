// plaid_pcu: Plaid Collective Unit (PCU), one tile of the Plaid CGRA.
//
// A PCU executes one three-node motif per cycle, or up to three standalone
// nodes, plus one memory or helper node on its ALSU:
//   - plaid_config_mem  : 16 x 120-bit configuration, read at context ctx
//   - plaid_motif_unit  : three 16-bit ALUs with result registers and
//                         ALU0->ALU1, ALU1->ALU2 bypass paths
//   - plaid_local_router: 8x8 crossbar feeding the six ALU operands and two
//                         values towards the global router
//   - plaid_global_router: 7x9 router on the N/S/E/W mesh links, four paths
//                         into the local router (optionally registered) and
//                         the ALSU operand
//   - plaid_alsu        : load/store to this PCU's data memory bank
// The whole datapath is reconfigured every cycle from the entry at ctx (see
// plaid_pkg for the entry layout). Internal data dependencies of a motif are
// routed by the local router; dependencies between motifs use the global
// router and the mesh. Timing: ALU and ALSU results and all N/S/E/W inputs
// are registered, the routers are combinational. The structure follows the
// published PCU; field layouts and encodings are this implementation's.
// MOTIF selects the general local router (default) or a hard-wired motif
// (see plaid_local_router).
module plaid_pcu
  import plaid_pkg::*;
#(
  parameter int unsigned W         = plaid_pkg::DW,
  parameter int unsigned DEPTH     = plaid_pkg::CFG_DEPTH,
  parameter int unsigned MEM_AW    = 11,
  parameter int unsigned MOTIF     = plaid_pkg::MOTIF_ROUTER,
  localparam int unsigned CAW      = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration load
  input  logic              cfg_we,
  input  logic [CAW-1:0]    cfg_waddr,
  input  logic [CFG_W-1:0]  cfg_wdata,
  // run control
  input  logic [CAW-1:0]    ctx,
  input  logic              running,
  input  logic              clear,
  // mesh links, index plaid_pkg::dir_e
  input  logic [3:0][W-1:0] dir_in,
  output logic [3:0][W-1:0] dir_out,
  // data memory bank port
  output logic              mem_en,
  output logic              mem_we,
  output logic [MEM_AW-1:0] mem_addr,
  output logic [W-1:0]      mem_wdata,
  input  logic [W-1:0]      mem_rdata
);

  logic [CFG_W-1:0]        cfg_raw;
  pcu_cfg_t                cfg;
  logic [NALU-1:0][3:0]    alu_op;
  logic [NALU-1:0][W-1:0]  alu_imm;
  logic [NALU-1:0][W-1:0]  alu_a, alu_b, alu_res;
  logic [N_G2L-1:0][W-1:0] g2l;
  logic [N_L2G-1:0][W-1:0] l2g;
  logic [W-1:0]            alsu_opnd, alsu_res;
  logic [3:0]              alsu_op;
  logic                    alsu_en, alsu_we;

  plaid_config_mem #(.DEPTH(DEPTH), .WIDTH(CFG_W)) u_cfg (
    .clk  (clk),
    .we   (cfg_we),
    .waddr(cfg_waddr),
    .wdata(cfg_wdata),
    .raddr(ctx),
    .rdata(cfg_raw)
  );

  // While the fabric is idle every unit executes NOP and nothing moves.
  assign cfg = running ? pcu_cfg_t'(cfg_raw) : pcu_cfg_t'('0);

  always_comb begin
    for (int i = 0; i < NALU; i++) begin
      alu_op[i]  = cfg.alu[i].op;
      alu_imm[i] = W'($signed(cfg.alu[i].imm));
    end
  end

  plaid_motif_unit #(.W(W), .N(NALU)) u_mcu (
    .clk   (clk),
    .rst_n (rst_n),
    .clear (clear),
    .op    (alu_op),
    .bypass(cfg.bypass),
    .opnd_a(alu_a),
    .opnd_b(alu_b),
    .result(alu_res)
  );

  plaid_local_router #(.W(W), .MOTIF(MOTIF)) u_lrt (
    .alu_res(alu_res),
    .g2l    (g2l),
    .imm    (alu_imm),
    .sel    (cfg.lsel),
    .alu_a  (alu_a),
    .alu_b  (alu_b),
    .l2g    (l2g)
  );

  plaid_global_router #(.W(W)) u_grt (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (clear),
    .dir_in   (dir_in),
    .l2g      (l2g),
    .alsu_res (alsu_res),
    .sel      (cfg.gsel),
    .dir_hold (running ? cfg.dir_hold : 4'hF),
    .g2l_reg  (cfg.g2l_reg),
    .dir_out  (dir_out),
    .g2l      (g2l),
    .alsu_opnd(alsu_opnd)
  );

  assign alsu_op = cfg.alsu.op;

  // The reserved bits of the configuration entry have no function.
  logic unused_reserved;
  assign unused_reserved = ^cfg.reserved;

  plaid_alsu #(.W(W), .AW(MEM_AW)) u_alsu (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (clear),
    .op       (alsu_op),
    .imm      (cfg.alsu.imm),
    .opnd     (alsu_opnd),
    .result   (alsu_res),
    .mem_en   (alsu_en),
    .mem_we   (alsu_we),
    .mem_addr (mem_addr),
    .mem_wdata(mem_wdata),
    .mem_rdata(mem_rdata)
  );

  assign mem_en = alsu_en;
  assign mem_we = alsu_we;

endmodule
