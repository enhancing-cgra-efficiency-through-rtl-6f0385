// plaid_pkg: types and constants shared by the Plaid CGRA blocks.
//
// Plaid groups three 16-bit ALUs, a local router, a global router and an
// Arithmetic-Load-Store Unit (ALSU) into one Plaid Collective Unit (PCU).
// Every PCU is driven each cycle by one 120-bit configuration entry. The
// entry width (120), the 4-bit opcode and 8-bit constant per ALU, the 8x8
// local router and the 7x9 global router follow the published design. The
// placement of fields inside the 120 bits, the opcode encodings and the
// router port numbering below are this implementation's own choices.
// MOTIF_* name the local datapath of a PCU: the general local router or
// one of the three motifs hard-wired in its place (the published
// domain-specialized variant; the wiring itself is in plaid_local_router).
//
// Configuration entry layout (MSB first, 120 bits):
//   [119:109] reserved (11)
//   [108:105] dir_hold  : N,S,E,W input register keeps its value (4)
//   [104:101] g2l_reg   : global-to-local path k taken from its register (4)
//   [100: 99] bypass    : bit0 ALU0->ALU1 operand A, bit1 ALU1->ALU2 (2)
//   [ 98: 87] alsu      : op (4) + const (8)
//   [ 86: 60] gsel      : 9 global-router outputs x 3-bit source select
//   [ 59: 36] lsel      : 8 local-router outputs x 3-bit source select
//   [ 35:  0] alu       : 3 ALUs x (op 4 + const 8)
package plaid_pkg;

  localparam int unsigned DW        = 16;   // datapath width
  localparam int unsigned NALU      = 3;    // ALUs per PCU (three-node motif)
  localparam int unsigned CFG_W     = 120;  // bits per configuration entry
  localparam int unsigned CFG_DEPTH = 16;   // entries per PCU
  localparam int unsigned CTX_W     = 4;    // log2(CFG_DEPTH)
  localparam int unsigned L_N_IN    = 8;    // local router inputs
  localparam int unsigned L_N_OUT   = 8;    // local router outputs
  localparam int unsigned G_N_IN    = 7;    // global router inputs
  localparam int unsigned G_N_OUT   = 9;    // global router outputs
  localparam int unsigned N_G2L     = 4;    // global-to-local paths
  localparam int unsigned N_L2G     = 2;    // local-to-global paths
  localparam int unsigned SEL_W     = 3;

  // Directions of the mesh links, also the first four global router ports.
  typedef enum logic [1:0] {DIR_N = 2'd0, DIR_S = 2'd1, DIR_E = 2'd2, DIR_W = 2'd3} dir_e;

  // ALU opcodes: 15 operations plus NOP (result register holds).
  typedef enum logic [3:0] {
    ALU_NOP  = 4'd0,
    ALU_ADD  = 4'd1,
    ALU_SUB  = 4'd2,
    ALU_MUL  = 4'd3,
    ALU_SHL  = 4'd4,
    ALU_SRL  = 4'd5,
    ALU_SRA  = 4'd6,
    ALU_AND  = 4'd7,
    ALU_OR   = 4'd8,
    ALU_XOR  = 4'd9,
    ALU_NAND = 4'd10,
    ALU_NOR  = 4'd11,
    ALU_XNOR = 4'd12,
    ALU_EQ   = 4'd13,
    ALU_LT   = 4'd14,
    ALU_PASS = 4'd15
  } alu_op_e;

  // ALSU opcodes.
  typedef enum logic [3:0] {
    ALSU_NOP  = 4'd0,   // hold result
    ALSU_ADD  = 4'd1,   // opnd + const
    ALSU_SUB  = 4'd2,   // opnd - const
    ALSU_MUL  = 4'd3,   // opnd * const
    ALSU_AND  = 4'd4,
    ALSU_OR   = 4'd5,
    ALSU_XOR  = 4'd6,
    ALSU_SHL  = 4'd7,   // opnd << const[3:0]
    ALSU_SRL  = 4'd8,   // opnd >> const[3:0]
    ALSU_LD   = 4'd9,   // result <= mem[opnd + const]
    ALSU_SETA = 4'd10,  // areg <= opnd
    ALSU_ST   = 4'd11,  // mem[areg + const] <= opnd
    ALSU_PSEL = 4'd12,  // result <= (areg != 0) ? opnd : result
    ALSU_EQ   = 4'd13,  // result <= (opnd == areg)
    ALSU_LT   = 4'd14,  // result <= (opnd <  areg), signed
    ALSU_PASS = 4'd15   // result <= opnd
  } alsu_op_e;

  // Local router ports.
  localparam int unsigned LI_ALU0 = 0;   // inputs 0..2: ALU results
  localparam int unsigned LI_G2L0 = 3;   // inputs 3..6: from global router
  localparam int unsigned LI_IMM  = 7;   // input 7: constant of the destination ALU
  localparam int unsigned LO_L2G0 = 6;   // outputs 0..5: ALU i operand A = 2i, B = 2i+1

  // Local datapath of a PCU: the reconfigurable local router of the general
  // design, or one of the three motifs hard-wired in its place (the
  // domain-specialized variant).
  localparam int unsigned MOTIF_ROUTER  = 0;
  localparam int unsigned MOTIF_FANIN   = 1;   // ALU0 -> ALU2 <- ALU1
  localparam int unsigned MOTIF_UNICAST = 2;   // ALU0 -> ALU1 -> ALU2
  localparam int unsigned MOTIF_FANOUT  = 3;   // ALU1 <- ALU0 -> ALU2

  // Global router ports.
  localparam int unsigned GI_L2G0 = 4;   // inputs 0..3: N,S,E,W registers
  localparam int unsigned GI_ALSU = 6;   // inputs 4,5: local router; 6: ALSU result
  localparam int unsigned GI_ZERO = 7;   // select 7: zero
  localparam int unsigned GO_G2L0 = 4;   // outputs 0..3: N,S,E,W; 4..7: to local
  localparam int unsigned GO_ALSU = 8;   // output 8: ALSU operand

  typedef struct packed {
    logic [3:0] op;
    logic [7:0] imm;
  } fu_cfg_t;

  typedef struct packed {
    logic [10:0]                      reserved;
    logic [3:0]                       dir_hold;
    logic [N_G2L-1:0]                 g2l_reg;
    logic [NALU-2:0]                  bypass;
    fu_cfg_t                          alsu;
    logic [G_N_OUT-1:0][SEL_W-1:0]    gsel;
    logic [L_N_OUT-1:0][SEL_W-1:0]    lsel;
    fu_cfg_t [NALU-1:0]               alu;
  } pcu_cfg_t;

endpackage
