// tb_plaid_alsu: self-checking test of plaid_alsu.
// The testbench holds its own 2048-word memory with a synchronous read port
// (data one cycle after the request). It checks stores (address register +
// constant), loads (operand + constant, result one cycle later and kept
// afterwards), arithmetic with the sign-extended constant, compares against
// the address register, predicated select and clear.
module tb_plaid_alsu;
  import plaid_pkg::*;

  logic        clk = 0, rst_n = 0, clear = 0;
  logic [3:0]  op;
  logic [7:0]  imm;
  logic [15:0] opnd, result, wdata, rdata;
  logic        en, we;
  logic [10:0] addr;
  logic [15:0] mem [2048];
  logic [15:0] shadow [2048];
  int checks = 0, failures = 0;

  plaid_alsu dut (.clk(clk), .rst_n(rst_n), .clear(clear), .op(op), .imm(imm), .opnd(opnd),
    .result(result), .mem_en(en), .mem_we(we), .mem_addr(addr), .mem_wdata(wdata), .mem_rdata(rdata));

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (en) begin
    if (we) mem[addr] <= wdata;
    else    rdata     <= mem[addr];
  end

  task automatic issue(input alsu_op_e o, input logic [7:0] c, input logic [15:0] x);
    @(negedge clk);
    op = o; imm = c; opnd = x;
    @(negedge clk);
    op = ALSU_NOP;
  endtask

  task automatic chk(input string what, input logic [15:0 ] expv);
    checks++;
    if (result !== expv) begin failures++; $display("FAIL %s got %h exp %h", what, result, expv); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] base, v;
    logic [7:0]  c;
    for (int i = 0; i < 2048; i++) begin mem[i] = '0; shadow[i] = '0; end
    rdata = '0; op = ALSU_NOP; imm = '0; opnd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // stores through the address register, then loads back
    for (int n = 0; n < 300; n++) begin
      base = 16'($urandom % 1900) + 16'd100;
      c    = 8'($urandom);
      v    = 16'($urandom);
      issue(ALSU_SETA, 8'd0, base);
      issue(ALSU_ST, c, v);
      shadow[11'(base + 16'($signed(c)))] = v;
    end
    for (int n = 0; n < 300; n++) begin
      base = 16'($urandom % 1900) + 16'd100;
      c    = 8'($urandom);
      issue(ALSU_LD, c, base);
      chk("load", shadow[11'(base + 16'($signed(c)))]);
      @(negedge clk);
      chk("load kept", shadow[11'(base + 16'($signed(c)))]);
    end
    // arithmetic with the constant
    for (int n = 0; n < 200; n++) begin
      v = 16'($urandom); c = 8'($urandom);
      issue(ALSU_ADD, c, v); chk("add", v + 16'($signed(c)));
      issue(ALSU_SUB, c, v); chk("sub", v - 16'($signed(c)));
      issue(ALSU_MUL, c, v); chk("mul", 16'(v * 16'($signed(c))));
      issue(ALSU_XOR, c, v); chk("xor", v ^ 16'($signed(c)));
      issue(ALSU_SHL, c, v); chk("shl", v << c[3:0]);
      issue(ALSU_SRL, c, v); chk("srl", v >> c[3:0]);
      issue(ALSU_PASS, c, v); chk("pass", v);
    end
    // compares and predicated select
    issue(ALSU_SETA, 0, 16'd50);
    issue(ALSU_LT, 0, 16'd49); chk("lt true", 16'd1);
    issue(ALSU_LT, 0, 16'd50); chk("lt false", 16'd0);
    issue(ALSU_EQ, 0, 16'd50); chk("eq", 16'd1);
    issue(ALSU_PASS, 0, 16'h1111);
    issue(ALSU_PSEL, 0, 16'h2222); chk("psel taken", 16'h2222);
    issue(ALSU_SETA, 0, 16'd0);
    issue(ALSU_PSEL, 0, 16'h3333); chk("psel not taken", 16'h2222);
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    chk("clear", 16'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
