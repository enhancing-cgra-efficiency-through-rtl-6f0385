// tb_plaid_global_router: self-checking test of plaid_global_router.
// A cycle-level reference model keeps the N/S/E/W input registers (with
// hold) and the global-to-local registers. Each cycle random inputs and
// selects are applied and all nine outputs are checked before the edge,
// including the rule that a direct global-to-local path cannot take a
// value from the local router (it reads zero), while the registered path can.
module tb_plaid_global_router;
  import plaid_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0;
  logic [3:0][15:0] dir_in, dir_out, g2l;
  logic [1:0][15:0] l2g;
  logic [15:0]      alsu_res, alsu_opnd;
  logic [8:0][2:0]  sel;
  logic [3:0]       dir_hold, g2l_reg;
  logic [3:0][15:0] m_dir, m_g2l;
  logic [7:0][15:0] src;
  logic [15:0]      e;
  int checks = 0, failures = 0, blocked = 0, regd_local = 0;

  plaid_global_router dut (.clk(clk), .rst_n(rst_n), .clear(clear), .dir_in(dir_in), .l2g(l2g),
    .alsu_res(alsu_res), .sel(sel), .dir_hold(dir_hold), .g2l_reg(g2l_reg),
    .dir_out(dir_out), .g2l(g2l), .alsu_opnd(alsu_opnd));

  always #5 clk = ~clk;

  task automatic chk(input string what, input logic [15:0] got, input logic [15:0] expv);
    checks++;
    if (got !== expv) begin failures++; $display("FAIL %s got %h exp %h", what, got, expv); end
  endtask

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dir_in = '0; l2g = '0; alsu_res = '0; sel = '1; dir_hold = '0; g2l_reg = '0;
    m_dir = '0; m_g2l = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int d = 0; d < 4; d++) dir_in[d] = 16'($urandom);
      l2g[0] = 16'($urandom); l2g[1] = 16'($urandom); alsu_res = 16'($urandom);
      for (int o = 0; o < 9; o++) sel[o] = 3'($urandom);
      dir_hold = 4'($urandom); g2l_reg = 4'($urandom);
      #1;
      src = {16'd0, alsu_res, l2g[1], l2g[0], m_dir[3], m_dir[2], m_dir[1], m_dir[0]};
      for (int o = 0; o < 4; o++) chk($sformatf("dir_out%0d", o), dir_out[o], src[sel[o]]);
      chk("alsu_opnd", alsu_opnd, src[sel[8]]);
      for (int k = 0; k < 4; k++) begin
        if (g2l_reg[k]) begin
          e = m_g2l[k];
        end else if (sel[4+k] == 4 || sel[4+k] == 5) begin
          e = 16'd0;
          blocked++;
        end else begin
          e = src[sel[4+k]];
        end
        if (sel[4+k] == 4 || sel[4+k] == 5) regd_local++;
        chk($sformatf("g2l%0d", k), g2l[k], e);
      end
      // advance the model to the next edge
      for (int k = 0; k < 4; k++) m_g2l[k] = src[sel[4+k]];
      for (int d = 0; d < 4; d++) if (!dir_hold[d]) m_dir[d] = dir_in[d];
    end
    checks++;
    if (blocked == 0 || regd_local == 0) begin failures++; $display("FAIL loop rule not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
