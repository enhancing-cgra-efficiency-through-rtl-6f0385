// tb_plaid_jacobi: a 1-D Jacobi stencil, the integer form of one of the
// published evaluation kernels (jacobi), on the default 2x2 Plaid array,
// mapped by hand with II = 2:
//
//   B[i] = A[i-1] + A[i] + A[i+1]      for i = 1 .. N-2   (no 1/3 scaling)
//
// Each A element is loaded once; the two older elements are kept on chip.
// Run cycle 0 is ctx0; iteration k has ctx1 at cycle 2k+1 and ctx0 at 2k+2.
// PCU 0:
//   ctx1: ALU0 counter += 1; ALSU LD A[counter] (A[k], ready in ctx0);
//         global-to-local path 1 captures the ALSU result (A[k-1]) in its
//         register; ALU1 (the sum) -> E link
//   ctx0: ALU1 = A[k] + ALU2           = A[k] + A[k-1] + A[k-2]
//         ALU2 = A[k] + path 1 register = A[k] + A[k-1]
//         (A[k] comes over the direct path 0 from the ALSU, so one value
//         feeds two ALUs: a fan-out from the load); counter -> E link
// PCU 1:
//   ctx1: ALSU SETA from the W link (counter = k+1)
//   ctx0: ALSU ST bank1[areg - 2] = W link (the sum centred on k-1)
// The E link is shared in time between the store address and the data.
// The bench checks every B[i] and the run length, and that the two sums of
// the first iterations, which read the cleared registers, land outside the
// checked range.
module tb_plaid_jacobi;
  import plaid_pkg::*;

  localparam int N   = 150;
  localparam int II  = 2;
  localparam int RUN = 2 * N + 4;

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

  logic [15:0] a [N];
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

  task automatic write_cfg(input int p, input int ad, input pcu_cfg_t c);
    @(negedge clk);
    cfg_we = 1; cfg_pcu = 2'(p); cfg_addr = 4'(ad); cfg_data = c;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic host_write(input int bank, input int ad, input logic [15:0] v);
    @(negedge clk);
    host_mem_en = 1; host_mem_we = 1; host_mem_bank = 2'(bank); host_mem_addr = 11'(ad); host_mem_wdata = v;
    @(negedge clk);
    host_mem_en = 0; host_mem_we = 0;
  endtask

  task automatic host_read(input int bank, input int ad, output logic [15:0] v);
    @(negedge clk);
    host_mem_en = 1; host_mem_we = 0; host_mem_bank = 2'(bank); host_mem_addr = 11'(ad);
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
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pcu_cfg_t c;
    logic [15:0] v, e;
    time t0;
    int cycles;
    for (int i = 0; i < N; i++) a[i] = 16'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int p = 0; p < 4; p++)
      for (int ad = 0; ad < II; ad++) write_cfg(p, ad, nop_cfg());

    // PCU 0 ctx0: the two adds, counter -> E
    c = nop_cfg();
    c.gsel[GO_G2L0 + 0] = 3'(GI_ALSU);
    c.g2l_reg[1] = 1'b1;
    c.alu[1].op = ALU_ADD; c.lsel[2] = 3'(LI_G2L0 + 0); c.lsel[3] = 3'(LI_ALU0 + 2);
    c.alu[2].op = ALU_ADD; c.lsel[4] = 3'(LI_G2L0 + 0); c.lsel[5] = 3'(LI_G2L0 + 1);
    c.lsel[LO_L2G0] = 3'(LI_ALU0);
    c.gsel[DIR_E] = 3'(GI_L2G0);
    write_cfg(0, 0, c);
    // PCU 0 ctx1: counter, load, capture A[k-1], sum -> E
    c = nop_cfg();
    c.alu[0].op = ALU_ADD; c.lsel[0] = 3'(LI_ALU0); c.lsel[1] = 3'(LI_IMM); c.alu[0].imm = 8'd1;
    c.lsel[LO_L2G0] = 3'(LI_ALU0);
    c.gsel[GO_ALSU] = 3'(GI_L2G0); c.alsu.op = ALSU_LD; c.alsu.imm = 8'd0;
    c.gsel[GO_G2L0 + 1] = 3'(GI_ALSU);
    c.lsel[LO_L2G0 + 1] = 3'(LI_ALU0 + 1);
    c.gsel[DIR_E] = 3'(GI_L2G0 + 1);
    write_cfg(0, 1, c);
    // PCU 1: ctx0 store, ctx1 address
    c = nop_cfg();
    c.gsel[GO_ALSU] = 3'(DIR_W); c.alsu.op = ALSU_ST; c.alsu.imm = 8'hFE;
    write_cfg(1, 0, c);
    c = nop_cfg();
    c.gsel[GO_ALSU] = 3'(DIR_W); c.alsu.op = ALSU_SETA;
    write_cfg(1, 1, c);

    for (int i = 0; i < N; i++) host_write(0, i, a[i]);
    // Marker words: the partial sums of iterations 0 and 1 go to 2047 and 0.
    host_write(1, N - 1, 16'hDEAD);

    @(negedge clk);
    ii = 5'(II); run_cycles = 32'(RUN); start = 1;
    @(negedge clk);
    start = 0;
    t0 = $time;
    while (!done) @(negedge clk);
    cycles = int'(($time - t0) / 10);
    chk($sformatf("run took %0d cycles, expected %0d", cycles, RUN + 1), cycles == RUN + 1);

    for (int i = 1; i <= N - 2; i++) begin
      host_read(1, i, v);
      e = a[i - 1] + a[i] + a[i + 1];
      chk($sformatf("B[%0d] got %h exp %h", i, v, e), v == e);
    end
    host_read(1, 0, v);
    chk($sformatf("B[0] holds the partial sum %h, got %h", a[0] + a[1], v), v == a[0] + a[1]);
    host_read(1, 2047, v);
    chk($sformatf("bank1[2047] holds A[0] %h, got %h", a[0], v), v == a[0]);
    host_read(1, N - 1, v);
    chk($sformatf("B[N-1] untouched, got %h", v), v == 16'hDEAD);
    $display("jacobi-1d: %0d outputs, %0d run cycles at II = %0d", N - 2, RUN, II);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
