// tb_plaid_fc: fully-connected layer (matrix-vector product) on the Plaid
// CGRA at its default 2x2 size, mapped by hand with II = 1.
//
//   out[j] = sum_{i<K} W[j][i] * x[i]      (16-bit wrap-around arithmetic)
//
// The host writes x[] to bank 0 (with a zero pad word at address 2047, the
// element the pipeline fills with before its first real load), then for
// every output neuron j copies row W[j] to bank 1, sets the store address
// and runs the fabric for K + 6 cycles. One multiply-accumulate retires per
// cycle once the pipeline is full.
//   PCU 0: ALU0 loop counter; ALSU LD x[i-1]; x goes through a registered
//          global-to-local path; ALU1 = x * w (w from the E link);
//          ALU2 = ALU2 + ALU1 (bypass path) is the accumulator; the
//          accumulator leaves on the S link. The counter leaves on E.
//   PCU 1: ALSU LD w[i] with the address from the W link, result on W.
//   PCU 2: ALSU ST bank2[j] <= N link every cycle; the last store carries
//          the complete sum.
module tb_plaid_fc;
  import plaid_pkg::*;

  localparam int K = 64;   // inputs
  localparam int M = 8;    // output neurons
  localparam int RUN = K + 6;

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

  logic [15:0] x [K];
  logic [15:0] w [M][K];
  logic [15:0] expv [M];
  int checks = 0, failures = 0;

  plaid_top dut (.*);

  always #5 clk = ~clk;
  assign edge_n_in = '0;
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

  task automatic host_write(input int bank, input int a, input logic [15:0] v);
    @(negedge clk);
    host_mem_en = 1; host_mem_we = 1; host_mem_bank = 2'(bank); host_mem_addr = 11'(a); host_mem_wdata = v;
    @(negedge clk);
    host_mem_en = 0; host_mem_we = 0;
  endtask

  task automatic host_read(input int bank, input int a, output logic [15:0] v);
    @(negedge clk);
    host_mem_en = 1; host_mem_we = 0; host_mem_bank = 2'(bank); host_mem_addr = 11'(a);
    @(negedge clk);
    host_mem_en = 0;
    v = host_mem_rdata;
  endtask

  function automatic pcu_cfg_t nop_cfg();
    pcu_cfg_t c;
    c = '0; c.gsel = '1; c.lsel = '1;
    return c;
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pcu_cfg_t c;
    logic [15:0] v;
    int t0, cycles;
    for (int i = 0; i < K; i++) x[i] = 16'($urandom);
    for (int j = 0; j < M; j++) begin
      expv[j] = '0;
      for (int i = 0; i < K; i++) begin
        w[j][i] = 16'($urandom);
        expv[j] = expv[j] + 16'(w[j][i] * x[i]);
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int p = 0; p < 4; p++) write_cfg(p, 0, nop_cfg());
    // PCU 0
    c = nop_cfg();
    c.alu[0].op = ALU_ADD; c.lsel[0] = 3'd0; c.lsel[1] = 3'(LI_IMM); c.alu[0].imm = 8'd1;
    c.lsel[LO_L2G0] = 3'd0;
    c.gsel[GO_ALSU] = 3'(GI_L2G0); c.alsu.op = ALSU_LD; c.alsu.imm = 8'hFF;
    c.gsel[DIR_E] = 3'(GI_L2G0);
    c.gsel[GO_G2L0 + 0] = 3'(GI_ALSU); c.g2l_reg[0] = 1'b1;
    c.gsel[GO_G2L0 + 1] = 3'(DIR_E);
    c.alu[1].op = ALU_MUL; c.lsel[2] = 3'd3; c.lsel[3] = 3'd4;
    c.alu[2].op = ALU_ADD; c.bypass = 2'b10; c.lsel[5] = 3'd2;
    c.lsel[LO_L2G0 + 1] = 3'd2;
    c.gsel[DIR_S] = 3'(GI_L2G0 + 1);
    write_cfg(0, 0, c);
    // PCU 1
    c = nop_cfg();
    c.gsel[GO_ALSU] = 3'(DIR_W); c.alsu.op = ALSU_LD; c.alsu.imm = 8'd0;
    c.gsel[DIR_W] = 3'(GI_ALSU);
    write_cfg(1, 0, c);

    for (int i = 0; i < K; i++) host_write(0, i, x[i]);
    host_write(0, 2047, 16'd0);

    for (int j = 0; j < M; j++) begin
      for (int i = 0; i < K; i++) host_write(1, i, w[j][i]);
      // PCU 2: store to bank 2, address j
      c = nop_cfg();
      c.gsel[GO_ALSU] = 3'(DIR_N); c.alsu.op = ALSU_ST; c.alsu.imm = 8'(j);
      write_cfg(2, 0, c);
      @(negedge clk);
      ii = 5'd1; run_cycles = 32'(RUN); start = 1;
      @(negedge clk);
      start = 0;
      t0 = $time;
      while (!done) @(negedge clk);
      cycles = int'(($time - t0) / 10);
      chk($sformatf("neuron %0d took %0d cycles, expected %0d", j, cycles, RUN + 1), cycles == RUN + 1);
    end
    for (int j = 0; j < M; j++) begin
      host_read(2, j, v);
      chk($sformatf("out[%0d] got %h exp %h", j, v, expv[j]), v == expv[j]);
    end
    $display("fc %0dx%0d: %0d MACs in %0d fabric cycles per neuron", M, K, K, RUN);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
