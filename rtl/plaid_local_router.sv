// plaid_local_router: the 8x8 local router of a PCU.
//
// Combinational crossbar, one 3-bit select per output. Inputs: 0..2 the
// three ALU result registers, 3..6 the four paths from the global router,
// 7 a constant. Outputs: 2i and 2i+1 are operands A and B of ALU i (i=0..2),
// 6 and 7 go to the global router. The 8x8 size comes from the published
// PCU; the port split and the constant input (the destination ALU's own
// sign-extended 8-bit constant; zero on the two outputs to the global
// router) are this implementation's reading of it.
//
// With MOTIF other than MOTIF_ROUTER the crossbar is replaced by the fixed
// wiring of one motif, as in the published domain-specialized variant. The
// wiring per output (ALU result i = "alu i", global path k = "g2l k"):
//            A0    B0    A1    B1    A2    B2    L2G0  L2G1
//   FANIN    g2l0  g2l1  g2l2  g2l3  alu0  alu1  alu2  alu0
//   UNICAST  g2l0  g2l1  alu0  g2l2  alu1  g2l3  alu2  alu1
//   FANOUT   g2l0  g2l1  alu0  g2l2  alu0  g2l3  alu1  alu2
// An operand wired to a global path takes the ALU's constant instead when
// its select is 7; all other select values are ignored. Which ALU sits
// where in each motif, and the constant option, are this implementation's
// choices.
module plaid_local_router
  import plaid_pkg::*;
#(
  parameter int unsigned W     = plaid_pkg::DW,
  parameter int unsigned MOTIF = plaid_pkg::MOTIF_ROUTER
) (
  input  logic [NALU-1:0][W-1:0]        alu_res,
  input  logic [N_G2L-1:0][W-1:0]       g2l,
  input  logic [NALU-1:0][W-1:0]        imm,
  input  logic [L_N_OUT-1:0][SEL_W-1:0] sel,
  output logic [NALU-1:0][W-1:0]        alu_a,
  output logic [NALU-1:0][W-1:0]        alu_b,
  output logic [N_L2G-1:0][W-1:0]       l2g
);

  logic [L_N_IN-2:0][W-1:0] shared_in;   // inputs 0..6
  logic [L_N_OUT-1:0][W-1:0] out;

  assign shared_in = {g2l, alu_res};

  // Fixed source of output o in a hard-wired motif (table above).
  function automatic int unsigned hw_src(input int unsigned o);
    int unsigned s;
    unique case (MOTIF)
      MOTIF_FANIN:   s = (o < 4) ? LI_G2L0 + o : (o == 5) ? 1 : (o == 6) ? 2 : 0;
      MOTIF_UNICAST: begin
        case (o)
          0, 1:    s = LI_G2L0 + o;
          3:       s = LI_G2L0 + 2;
          5:       s = LI_G2L0 + 3;
          2:       s = 0;
          6:       s = 2;
          default: s = 1;        // A2, L2G1
        endcase
      end
      default: begin             // MOTIF_FANOUT
        case (o)
          0, 1:    s = LI_G2L0 + o;
          3:       s = LI_G2L0 + 2;
          5:       s = LI_G2L0 + 3;
          6:       s = 1;
          7:       s = 2;
          default: s = 0;        // A1, A2
        endcase
      end
    endcase
    return s;
  endfunction

  always_comb begin
    for (int o = 0; o < L_N_OUT; o++) begin
      if (MOTIF == MOTIF_ROUTER) begin
        if (sel[o] == SEL_W'(LI_IMM))
          out[o] = (o < 2 * NALU) ? imm[o / 2] : '0;
        else
          out[o] = shared_in[sel[o]];
      end else begin
        if (o < 2 * NALU && hw_src(o) >= LI_G2L0 && sel[o] == SEL_W'(LI_IMM))
          out[o] = imm[o / 2];
        else
          out[o] = shared_in[hw_src(o)];
      end
    end
    for (int i = 0; i < NALU; i++) begin
      alu_a[i] = out[2 * i];
      alu_b[i] = out[2 * i + 1];
    end
    for (int k = 0; k < N_L2G; k++)
      l2g[k] = out[LO_L2G0 + k];
  end

endmodule
