// plaid_alsu: Arithmetic-Load-Store Unit of a PCU.
//
// The ALSU executes the memory nodes of a dataflow graph over its own
// datapath to a data memory bank, and can also run simple arithmetic,
// compares and predicated selects for nodes that are hard to route. That
// role comes from the published design; the instruction set below is this
// implementation's own. The ALSU has one routed operand (opnd, from the
// global router), an 8-bit constant imm (sign-extended) and an internal
// address register areg:
//   LD   : request mem[opnd + imm]; result takes the data next cycle
//   SETA : areg <= opnd
//   ST   : mem[areg + imm] <= opnd
//   PSEL : result <= (areg != 0) ? opnd : result   (predicated select)
//   EQ/LT: result <= opnd ==/< areg (signed)
//   ADD SUB MUL AND OR XOR SHL SRL PASS with opnd and imm
// All results are registered (one cycle latency, the same as an ALU). The
// bank port is synchronous: mem_en/mem_we/mem_addr/mem_wdata in the cycle of
// the request, mem_rdata in the next cycle.
module plaid_alsu
  import plaid_pkg::*;
#(
  parameter int unsigned W  = plaid_pkg::DW,
  parameter int unsigned AW = 11
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic [3:0]    op,
  input  logic [7:0]    imm,
  input  logic [W-1:0]  opnd,
  output logic [W-1:0]  result,
  output logic          mem_en,
  output logic          mem_we,
  output logic [AW-1:0] mem_addr,
  output logic [W-1:0]  mem_wdata,
  input  logic [W-1:0]  mem_rdata
);

  logic [W-1:0] imm_x;
  logic [W-1:0] areg;
  logic [W-1:0] res_q;
  logic         ld_q;      // a load was issued last cycle
  logic [W-1:0] nxt;
  logic         upd;

  assign imm_x = W'($signed(imm));

  always_comb begin
    mem_en    = 1'b0;
    mem_we    = 1'b0;
    mem_addr  = AW'(opnd + imm_x);
    mem_wdata = opnd;
    upd       = 1'b1;
    nxt       = result;
    unique case (alsu_op_e'(op))
      ALSU_ADD:  nxt = opnd + imm_x;
      ALSU_SUB:  nxt = opnd - imm_x;
      ALSU_MUL:  nxt = W'(opnd * imm_x);
      ALSU_AND:  nxt = opnd & imm_x;
      ALSU_OR:   nxt = opnd | imm_x;
      ALSU_XOR:  nxt = opnd ^ imm_x;
      ALSU_SHL:  nxt = opnd << imm[3:0];
      ALSU_SRL:  nxt = opnd >> imm[3:0];
      ALSU_LD: begin
        mem_en = 1'b1;
        upd    = 1'b0;
      end
      ALSU_ST: begin
        mem_en   = 1'b1;
        mem_we   = 1'b1;
        mem_addr = AW'(areg + imm_x);
        upd      = 1'b0;
      end
      ALSU_PSEL: nxt = (areg != '0) ? opnd : result;
      ALSU_EQ:   nxt = W'(opnd == areg);
      ALSU_LT:   nxt = W'($signed(opnd) < $signed(areg));
      ALSU_PASS: nxt = opnd;
      default:   upd = 1'b0;  // NOP, SETA
    endcase
  end

  // The result seen by the router is the load data in the cycle after a
  // load, and the result register otherwise.
  assign result = ld_q ? mem_rdata : res_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_q <= '0;
      areg  <= '0;
      ld_q  <= 1'b0;
    end else if (clear) begin
      res_q <= '0;
      areg  <= '0;
      ld_q  <= 1'b0;
    end else begin
      ld_q <= (alsu_op_e'(op) == ALSU_LD);
      if (ld_q) res_q <= mem_rdata;   // keep load data once it arrives
      if (upd)  res_q <= nxt;
      if (alsu_op_e'(op) == ALSU_SETA) areg <= opnd;
    end
  end

endmodule
