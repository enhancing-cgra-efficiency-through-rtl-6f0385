// tb_plaid_ml: the domain-specialized (machine-learning) variant of the 2x2
// Plaid CGRA, in which every PCU's local router is replaced by a hard-wired
// motif: PCU 0 and 1 fan-in, PCU 2 unicast, PCU 3 fan-out (the mix the
// published variant uses; the wiring inside each motif is this
// implementation's, see plaid_local_router). Built with
// PCU_MOTIF = 8'b11_10_01_01, all other parameters at their defaults.
//
// Two streams enter on the north edge, one word per cycle (II = 1):
//   PCU 0 fan-in : u = x*5 + (x >>> 1)           x from edge_n_in[0]
//   PCU 2 unicast: v = ((u ^ 90) + 3) << 1       u over PCU 0's S link
//   PCU 3 fan-out: a = v + 7; p = a*3 -> edge_e_out[1]; q = a - 9 -> edge_s_out[1]
//   PCU 1 fan-in : y = (z & 15) | (z << 4)      z from edge_n_in[1] -> edge_e_out[0]
// Each edge input is registered on entry, each ALU adds one cycle and each
// link hop one more, so p and q appear 10 cycles after x and y 3 cycles
// after z. The bench drives a new random word every cycle and checks every
// output word of the run against a reference model with those latencies.
module tb_plaid_ml;
  import plaid_pkg::*;

  localparam int RUN  = 80;
  localparam int NCYC = 400;
  localparam int LAT_X = 10;
  localparam int LAT_Z = 3;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [1:0] cfg_pcu = '0;
  logic [3:0] cfg_addr = '0;
  logic [119:0] cfg_data = '0;
  logic start = 0;
  logic [4:0] ii = '0;
  logic [31:0] run_cycles = '0;
  logic busy, done;
  logic host_mem_en = 0, host_mem_we = 0;
  logic [1:0] host_mem_bank = '0;
  logic [10:0] host_mem_addr = '0;
  logic [15:0] host_mem_wdata = '0, host_mem_rdata;
  logic [1:0][15:0] edge_n_in, edge_n_out, edge_s_in, edge_s_out;
  logic [1:0][15:0] edge_e_in, edge_e_out, edge_w_in, edge_w_out;

  logic [15:0] xs [NCYC];
  logic [15:0] zs [NCYC];
  bit          run_at [NCYC];
  int cyc = 0;
  int checks = 0, failures = 0;
  int n_p = 0, n_q = 0, n_y = 0;

  plaid_top #(.PCU_MOTIF(8'b11_10_01_01)) dut (.*);

  always #5 clk = ~clk;
  assign edge_s_in = '0;
  assign edge_e_in = '0;
  assign edge_w_in = '0;

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic write_cfg(input int p, input int a, input pcu_cfg_t c);
    @(negedge clk);
    cfg_we = 1; cfg_pcu = 2'(p); cfg_addr = 4'(a); cfg_data = c;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // Global selects 7 give zero. In a hard-wired motif a local select of 7
  // puts the constant on an operand, so the local selects start at 0 (the
  // wired path) and are set to 7 only for constant operands.
  function automatic pcu_cfg_t nop_cfg();
    pcu_cfg_t c;
    c = '0; c.gsel = '1;
    return c;
  endfunction

  function automatic logic [15:0] f_u(input logic [15:0] x);
    return 16'(x * 16'd5) + 16'($signed(x) >>> 1);
  endfunction
  function automatic logic [15:0] f_a(input logic [15:0] x);
    logic [15:0] v;
    v = 16'(((f_u(x) ^ 16'd90) + 16'd3) << 1);
    return v + 16'd7;
  endfunction

  // Inputs change at the falling edge; the cycle index counts rising edges.
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    if (cyc < NCYC) begin
      edge_n_in[0] <= xs[cyc];
      edge_n_in[1] <= zs[cyc];
      run_at[cyc]  <= dut.running;
    end
  end

  // Outputs depend only on registers, so they are checked just before the
  // rising edge that ends cycle cyc.
  always @(negedge clk) begin
    logic [15:0] a;
    if (cyc >= LAT_X && cyc < NCYC && dut.running && run_at[cyc - LAT_X]) begin
      a = f_a(xs[cyc - LAT_X]);
      chk($sformatf("cycle %0d p got %h exp %h", cyc, edge_e_out[1], 16'(a * 16'd3)),
          edge_e_out[1] == 16'(a * 16'd3));
      chk($sformatf("cycle %0d q got %h exp %h", cyc, edge_s_out[1], 16'(a - 16'd9)),
          edge_s_out[1] == 16'(a - 16'd9));
      n_p++; n_q++;
    end
    if (cyc >= LAT_Z && cyc < NCYC && dut.running && run_at[cyc - LAT_Z]) begin
      a = (zs[cyc - LAT_Z] & 16'd15) | 16'(zs[cyc - LAT_Z] << 4);
      chk($sformatf("cycle %0d y got %h exp %h", cyc, edge_e_out[0], a), edge_e_out[0] == a);
      n_y++;
    end
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pcu_cfg_t c;
    for (int i = 0; i < NCYC; i++) begin
      xs[i] = 16'($urandom);
      zs[i] = 16'($urandom);
      run_at[i] = 1'b0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // PCU 0, fan-in: ALU0 = x * 5, ALU1 = x >>> 1, ALU2 = ALU0 + ALU1
    c = nop_cfg();
    c.gsel[GO_G2L0 + 0] = 3'(DIR_N);
    c.gsel[GO_G2L0 + 2] = 3'(DIR_N);
    c.alu[0].op = ALU_MUL; c.lsel[1] = 3'(LI_IMM); c.alu[0].imm = 8'd5;
    c.alu[1].op = ALU_SRA; c.lsel[3] = 3'(LI_IMM); c.alu[1].imm = 8'd1;
    c.alu[2].op = ALU_ADD;
    c.gsel[DIR_S] = 3'(GI_L2G0);
    write_cfg(0, 0, c);
    // PCU 1, fan-in: ALU0 = z & 15, ALU1 = z << 4, ALU2 = ALU0 | ALU1
    c = nop_cfg();
    c.gsel[GO_G2L0 + 0] = 3'(DIR_N);
    c.gsel[GO_G2L0 + 2] = 3'(DIR_N);
    c.alu[0].op = ALU_AND; c.lsel[1] = 3'(LI_IMM); c.alu[0].imm = 8'd15;
    c.alu[1].op = ALU_SHL; c.lsel[3] = 3'(LI_IMM); c.alu[1].imm = 8'd4;
    c.alu[2].op = ALU_OR;
    c.gsel[DIR_E] = 3'(GI_L2G0);
    write_cfg(1, 0, c);
    // PCU 2, unicast: ALU0 = u ^ 90, ALU1 = ALU0 + 3, ALU2 = ALU1 << 1
    c = nop_cfg();
    c.gsel[GO_G2L0 + 0] = 3'(DIR_N);
    c.alu[0].op = ALU_XOR; c.lsel[1] = 3'(LI_IMM); c.alu[0].imm = 8'd90;
    c.alu[1].op = ALU_ADD; c.lsel[3] = 3'(LI_IMM); c.alu[1].imm = 8'd3;
    c.alu[2].op = ALU_SHL; c.lsel[5] = 3'(LI_IMM); c.alu[2].imm = 8'd1;
    c.gsel[DIR_E] = 3'(GI_L2G0);
    write_cfg(2, 0, c);
    // PCU 3, fan-out: ALU0 = v + 7, ALU1 = ALU0 * 3, ALU2 = ALU0 - 9
    c = nop_cfg();
    c.gsel[GO_G2L0 + 0] = 3'(DIR_W);
    c.alu[0].op = ALU_ADD; c.lsel[1] = 3'(LI_IMM); c.alu[0].imm = 8'd7;
    c.alu[1].op = ALU_MUL; c.lsel[3] = 3'(LI_IMM); c.alu[1].imm = 8'd3;
    c.alu[2].op = ALU_SUB; c.lsel[5] = 3'(LI_IMM); c.alu[2].imm = 8'd9;
    c.gsel[DIR_E] = 3'(GI_L2G0);
    c.gsel[DIR_S] = 3'(GI_L2G0 + 1);
    write_cfg(3, 0, c);

    @(negedge clk);
    ii = 5'd1; run_cycles = 32'(RUN); start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);

    chk($sformatf("p/q words checked %0d exp %0d", n_p, RUN - LAT_X), n_p == RUN - LAT_X);
    chk($sformatf("y words checked %0d exp %0d", n_y, RUN - LAT_Z), n_y == RUN - LAT_Z);
    $display("ML variant: fan-in, unicast, fan-out PCUs; %0d p, %0d q, %0d y words", n_p, n_q, n_y);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
