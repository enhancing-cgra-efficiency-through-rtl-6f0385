// tb_plaid_local_router: self-checking test of plaid_local_router.
// Random inputs and selects; every output is compared against the input the
// select names (ALU results 0..2, global paths 3..6, constant 7: the
// destination ALU's constant, zero for the two outputs to the global router).
// Three more instances are built with the hard-wired fan-in, unicast and
// fan-out motifs; their outputs are compared against the fixed wiring table
// (an operand fed from a global path takes the constant when its select is
// 7), with the same random inputs.
module tb_plaid_local_router;
  import plaid_pkg::*;

  logic [2:0][15:0] alu_res, imm, alu_a, alu_b;
  logic [3:0][15:0] g2l;
  logic [7:0][2:0]  sel;
  logic [1:0][15:0] l2g;
  logic [7:0][15:0] outs;
  logic [15:0]      expv;
  logic [2:0][2:0][15:0] hw_a, hw_b;
  logic [2:0][1:0][15:0] hw_l2g;
  logic [7:0][15:0] hw_outs;
  // Wiring of the hard-wired motifs: 0..2 ALU result, 3..6 global path.
  localparam int HW [3][8] = '{'{3, 4, 5, 6, 0, 1, 2, 0},
                               '{3, 4, 0, 5, 1, 6, 2, 1},
                               '{3, 4, 0, 5, 0, 6, 1, 2}};
  logic [6:0][15:0] srcs;
  int checks = 0, failures = 0;

  plaid_local_router dut (.alu_res(alu_res), .g2l(g2l), .imm(imm), .sel(sel),
                          .alu_a(alu_a), .alu_b(alu_b), .l2g(l2g));

  for (genvar m = 0; m < 3; m++) begin : g_hw
    plaid_local_router #(.MOTIF(m + 1)) dut_hw (
      .alu_res(alu_res), .g2l(g2l), .imm(imm), .sel(sel),
      .alu_a(hw_a[m]), .alu_b(hw_b[m]), .l2g(hw_l2g[m]));
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < 3; i++) begin alu_res[i] = 16'($urandom); imm[i] = 16'($urandom); end
      for (int k = 0; k < 4; k++) g2l[k] = 16'($urandom);
      for (int o = 0; o < 8; o++) sel[o] = 3'($urandom);
      #1;
      outs = {l2g[1], l2g[0], alu_b[2], alu_a[2], alu_b[1], alu_a[1], alu_b[0], alu_a[0]};
      for (int o = 0; o < 8; o++) begin
        if (sel[o] < 3)       expv = alu_res[sel[o]];
        else if (sel[o] < 7)  expv = g2l[sel[o] - 3];
        else                  expv = (o < 6) ? imm[o / 2] : 16'd0;
        checks++;
        if (outs[o] !== expv) begin
          failures++;
          $display("FAIL out%0d sel=%0d got %h exp %h", o, sel[o], outs[o], expv);
        end
      end
      srcs = {g2l, alu_res};
      for (int m = 0; m < 3; m++) begin
        hw_outs = {hw_l2g[m][1], hw_l2g[m][0], hw_b[m][2], hw_a[m][2],
                   hw_b[m][1], hw_a[m][1], hw_b[m][0], hw_a[m][0]};
        for (int o = 0; o < 8; o++) begin
          if (o < 6 && HW[m][o] >= 3 && sel[o] == 3'd7) expv = imm[o / 2];
          else expv = srcs[HW[m][o]];
          checks++;
          if (hw_outs[o] !== expv) begin
            failures++;
            $display("FAIL motif %0d out%0d sel=%0d got %h exp %h", m + 1, o, sel[o], hw_outs[o], expv);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
