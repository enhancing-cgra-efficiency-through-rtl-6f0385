// tb_plaid_pcu: self-checking test of one PCU running a fan-in motif.
//
// The testbench acts as controller (ctx, running) with II = 2 and as the
// data memory bank. Per iteration k it drives x_k on the W link, y_k on the
// N link and an address a_k on the S link (captured by the input registers).
//   ctx0: ALU0 = x*y, ALU1 = x + 5            (operands via the global router)
//   ctx1: ALU2 = ALU1 (bypass) + ALU0 (local router); ALSU: areg <= a_k
//   ctx0: result -> local router -> global router -> E link and ALSU store
//         mem[a_k] <= x*y + x + 5
// It checks the E link each ctx0, the stored words, and that a direct
// global-to-local path cannot read the local router's outputs.
module tb_plaid_pcu;
  import plaid_pkg::*;

  localparam int N = 40;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [3:0] cfg_waddr = '0, ctx = '0;
  logic [119:0] cfg_wdata = '0;
  logic running = 0, clear = 0;
  logic [3:0][15:0] dir_in, dir_out;
  logic mem_en, mem_we;
  logic [10:0] mem_addr;
  logic [15:0] mem_wdata, mem_rdata;
  logic [15:0] mem [2048];
  logic [15:0] xs [N], ys [N], exp_r [N];
  logic [10:0] as [N];
  int checks = 0, failures = 0;

  plaid_pcu dut (.clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_waddr(cfg_waddr), .cfg_wdata(cfg_wdata),
    .ctx(ctx), .running(running), .clear(clear), .dir_in(dir_in), .dir_out(dir_out),
    .mem_en(mem_en), .mem_we(mem_we), .mem_addr(mem_addr), .mem_wdata(mem_wdata), .mem_rdata(mem_rdata));

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (mem_en) begin
    if (mem_we) mem[mem_addr] <= mem_wdata;
    else        mem_rdata     <= mem[mem_addr];
  end

  task automatic write_cfg(input int a, input pcu_cfg_t c);
    @(negedge clk);
    cfg_we = 1; cfg_waddr = 4'(a); cfg_wdata = c;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pcu_cfg_t c0, c1;
    for (int i = 0; i < 2048; i++) mem[i] = '0;
    mem_rdata = '0;
    dir_in = '0;
    for (int k = 0; k < N; k++) begin
      xs[k] = 16'($urandom); ys[k] = 16'($urandom); as[k] = 11'(k * 3 + 1);
      exp_r[k] = 16'(xs[k] * ys[k]) + xs[k] + 16'd5;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;

    c0 = '0; c1 = '0;
    c0.gsel = '1; c1.gsel = '1;                  // all global outputs: zero
    c0.lsel = '1; c1.lsel = '1;
    // ctx0: g2l0 = W, g2l1 = N (direct); ALU0 = g2l0 * g2l1; ALU1 = g2l0 + 5
    c0.gsel[GO_G2L0 + 0] = 3'(DIR_W);
    c0.gsel[GO_G2L0 + 1] = 3'(DIR_N);
    c0.alu[0].op = ALU_MUL;  c0.lsel[0] = 3'd3; c0.lsel[1] = 3'd4;
    c0.alu[1].op = ALU_ADD;  c0.lsel[2] = 3'd3; c0.lsel[3] = 3'd7; c0.alu[1].imm = 8'd5;
    // ctx0: previous result (ALU2) -> l2g0 -> E link and ALSU store
    c0.lsel[LO_L2G0] = 3'd2;
    c0.gsel[DIR_E]   = 3'(GI_L2G0);
    c0.gsel[GO_ALSU] = 3'(GI_L2G0);
    c0.alsu.op = ALSU_ST; c0.alsu.imm = 8'd0;
    // ctx1: ALU2 = ALU1 (bypass) + ALU0 (local router); ALSU areg <= S
    c1.alu[2].op = ALU_ADD; c1.bypass = 2'b10; c1.lsel[5] = 3'd0;
    c1.gsel[GO_ALSU] = 3'(DIR_S);
    c1.alsu.op = ALSU_SETA;
    // loop rule: a direct g2l path asking for l2g0 must read zero
    c1.lsel[LO_L2G0] = 3'd1;
    c1.gsel[GO_G2L0 + 2] = 3'(GI_L2G0);
    c1.lsel[LO_L2G0 + 1] = 3'd5;                 // l2g1 = g2l2
    c1.gsel[DIR_N] = 3'(GI_L2G0 + 1);            // -> N link
    write_cfg(0, c0);
    write_cfg(1, c1);

    @(negedge clk); clear = 1; @(negedge clk); clear = 0; running = 1;
    // iteration k: ctx0 at cycle 2k, ctx1 at cycle 2k+1. Inputs for
    // iteration k are driven in the ctx1 cycle before it.
    dir_in[DIR_W] = xs[0]; dir_in[DIR_N] = ys[0]; dir_in[DIR_S] = 16'(as[0]);
    ctx = 4'd1; // a preceding ctx1 so iteration 0 sees its inputs; nothing stored
    for (int k = 0; k <= N; k++) begin
      @(negedge clk);
      ctx = 4'd0;
      if (k < N) begin
        dir_in[DIR_W] = xs[k]; dir_in[DIR_N] = ys[k]; dir_in[DIR_S] = 16'(as[k]);
      end
      #1;
      if (k >= 1) begin
        checks++;
        if (dir_out[DIR_E] !== exp_r[k-1]) begin
          failures++; $display("FAIL E link k=%0d got %h exp %h", k-1, dir_out[DIR_E], exp_r[k-1]);
        end
      end
      @(negedge clk);
      ctx = 4'd1;
      if (k + 1 < N) begin
        dir_in[DIR_W] = xs[k+1]; dir_in[DIR_N] = ys[k+1]; dir_in[DIR_S] = 16'(as[k+1]);
      end
      #1;
      checks++;
      if (dir_out[DIR_N] !== 16'd0) begin failures++; $display("FAIL loop rule: %h", dir_out[DIR_N]); end
    end
    @(negedge clk); running = 0;
    @(negedge clk);
    for (int k = 0; k < N; k++) begin
      checks++;
      if (mem[as[k]] !== exp_r[k]) begin
        failures++; $display("FAIL mem k=%0d got %h exp %h", k, mem[as[k]], exp_r[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
