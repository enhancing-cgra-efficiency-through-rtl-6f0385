// plaid_alu: one 16-bit ALU of the Plaid motif compute unit.
//
// Combinational. It performs one of 15 operations on operands a and b,
// selected by a 4-bit opcode; opcode 0 is NOP and drives valid low so the
// result register in front of it keeps its value. The published design gives
// the width (16 bits), the 4-bit opcode field and the operation count (15:
// add, multiply, shift and bit-wise operations). The exact operation list and
// encoding (see plaid_pkg::alu_op_e) are this implementation's choice:
// MUL keeps the low 16 bits, shifts use b[3:0], LT compares signed, EQ/LT
// return 1 or 0, PASS forwards a.
module plaid_alu
  import plaid_pkg::*;
#(
  parameter int unsigned W = plaid_pkg::DW
) (
  input  logic [3:0]   op,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] y,
  output logic         valid
);

  logic [3:0] sh;
  assign sh = b[3:0];

  always_comb begin
    valid = 1'b1;
    unique case (alu_op_e'(op))
      ALU_ADD:  y = a + b;
      ALU_SUB:  y = a - b;
      ALU_MUL:  y = W'(a * b);
      ALU_SHL:  y = a << sh;
      ALU_SRL:  y = a >> sh;
      ALU_SRA:  y = W'($signed(a) >>> sh);
      ALU_AND:  y = a & b;
      ALU_OR:   y = a | b;
      ALU_XOR:  y = a ^ b;
      ALU_NAND: y = ~(a & b);
      ALU_NOR:  y = ~(a | b);
      ALU_XNOR: y = ~(a ^ b);
      ALU_EQ:   y = W'(a == b);
      ALU_LT:   y = W'($signed(a) < $signed(b));
      ALU_PASS: y = a;
      default: begin  // ALU_NOP
        y     = '0;
        valid = 1'b0;
      end
    endcase
  end

endmodule
