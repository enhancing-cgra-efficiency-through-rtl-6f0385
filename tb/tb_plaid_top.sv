// tb_plaid_top: end-to-end test of the Plaid CGRA at its default size
// (2x2 PCUs, 16-entry configuration memories, four 2048-word banks).
//
// Kernel, mapped by hand with II = 2:   for k in 0..N-1:
//     y[k] = (x[k] * b) ^ (x[k] << 2)
// x[] is in bank 0, b arrives on the north edge link of PCU 0, y[] is
// stored in bank 1, and every y is also echoed on the east edge link of PCU 1.
//
// PCU 0 (row 0, col 0), iteration k (ctx1 = cycle 2k+1, ctx0 = cycle 2k+2):
//   ctx1: ALU0 = ALU0 + 1 (loop counter k, through the local router)
//         ALSU LD x[k] with address = counter (local -> global router)
//         counter -> E link (store address for PCU 1)
//   ctx0: ALU1 = x * b (x from the ALSU, b from the N input register)
//         ALU2 = x << 2                                  } fan-in motif
//   ctx1: ALU2 = ALU1 (bypass path) ^ ALU2 (local router) }
//   ctx0: y -> E link
// PCU 1 (row 0, col 1):
//   ctx0: ALSU areg <= W link (address), ALU0 = PASS g2l0 (registered path)
//   ctx1: ALSU ST mem[areg - 1] <= W link (y); g2l0 register <= W link;
//         ALU0 result -> E edge link
// b is driven on PCU 0's north edge only in ctx0 cycles; the N input
// register is held in ctx1, so b survives the garbage driven in ctx1.
//
// The testbench checks every stored word, every echoed word, the total
// cycle count (2N + 6 run cycles + 1 clear cycle) and the store rate (one
// store every II = 2 cycles), and counts each mechanism: modulo context
// wrap, local routing ALU->ALU, bypass path, inter-PCU hop, registered
// global-to-local path, input register hold, load, store, edge output.
module tb_plaid_top;
  import plaid_pkg::*;

  localparam int N  = 200;
  localparam int II = 2;
  localparam int RUN = 2 * N + 6;

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

  logic [15:0] xs [N], ys [N];
  logic [15:0] b;
  int checks = 0, failures = 0;

  plaid_top dut (.*);

  always #5 clk = ~clk;

  // b on PCU 0's north edge in ctx0 cycles only, noise otherwise
  logic [15:0] noise;
  always_ff @(posedge clk) noise <= 16'($urandom);
  always_comb begin
    edge_n_in    = '0;
    edge_n_in[0] = (dut.running && dut.ctx == 4'd0) ? b : noise;
    edge_n_in[1] = noise;
    edge_s_in    = {noise, noise};
    edge_e_in    = {noise, noise};
    edge_w_in    = {noise, noise};
  end

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

  // ---- mechanism counters, probed inside the array ----
  int n_wrap, n_local, n_bypass, n_hop, n_g2lreg, n_hold, n_load, n_store, n_echo;
  int busy_cycles, last_store_cycle, store_gap_bad, cyc;
  int echo_idx;
  pcu_cfg_t pc [4];
  always_comb begin
    pc[0] = dut.g_row[0].g_col[0].u_pcu.cfg;
    pc[1] = dut.g_row[0].g_col[1].u_pcu.cfg;
    pc[2] = dut.g_row[1].g_col[0].u_pcu.cfg;
    pc[3] = dut.g_row[1].g_col[1].u_pcu.cfg;
  end

  always @(posedge clk) if (rst_n) begin
    if (busy) busy_cycles++;
    if (dut.running) begin
      cyc++;
      if (dut.ctx == 4'(II - 1)) n_wrap++;
      for (int p = 0; p < 4; p++) begin
        for (int o = 0; o < 6; o++)
          if (pc[p].alu[o/2].op != 4'd0 && pc[p].lsel[o] < 3'd3) n_local++;
        if (pc[p].bypass != '0) n_bypass++;
        if (pc[p].g2l_reg != '0) n_g2lreg++;
        if (pc[p].dir_hold != '0) n_hold++;
      end
      if (pc[0].gsel[DIR_E] != 3'd7) n_hop++;
      for (int p = 0; p < 4; p++) begin
        if (dut.a_en[p] && !dut.a_we[p]) n_load++;
      end
      if (dut.a_en[1] && dut.a_we[1]) begin
        n_store++;
        if (dut.a_addr[1] < 11'(N)) begin
          if (last_store_cycle >= 0 && cyc - last_store_cycle != II) store_gap_bad++;
          last_store_cycle = cyc;
        end
      end
      // echo of y on PCU 1's east edge during ctx1 cycles, from cycle 2k+7
      if (dut.ctx == 4'd1 && cyc >= 8 && echo_idx < N) begin
        n_echo++;
        chk($sformatf("echo %0d got %h exp %h", echo_idx, edge_e_out[0], ys[echo_idx]),
            edge_e_out[0] == ys[echo_idx]);
        echo_idx++;
      end
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pcu_cfg_t c;
    logic [15:0] v;
    int t0;
    n_wrap = 0; n_local = 0; n_bypass = 0; n_hop = 0; n_g2lreg = 0; n_hold = 0;
    n_load = 0; n_store = 0; n_echo = 0; busy_cycles = 0; last_store_cycle = -1;
    store_gap_bad = 0; cyc = 0; echo_idx = 0;
    b = 16'($urandom) | 16'd1;
    for (int k = 0; k < N; k++) begin
      xs[k] = 16'($urandom);
      ys[k] = 16'(xs[k] * b) ^ (xs[k] << 2);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- configuration ----
    // every entry of every PCU starts as all-NOP, global selects = zero
    for (int p = 0; p < 4; p++)
      for (int a = 0; a < 16; a++) begin
        c = '0; c.gsel = '1; c.lsel = '1;
        write_cfg(p, a, c);
      end
    // PCU 0, ctx1
    c = '0; c.gsel = '1; c.lsel = '1;
    c.alu[0].op = ALU_ADD; c.lsel[0] = 3'd0; c.lsel[1] = 3'(LI_IMM); c.alu[0].imm = 8'd1;
    c.lsel[LO_L2G0] = 3'd0;
    c.gsel[GO_ALSU] = 3'(GI_L2G0); c.alsu.op = ALSU_LD; c.alsu.imm = 8'd0;
    c.gsel[DIR_E] = 3'(GI_L2G0);
    c.alu[2].op = ALU_XOR; c.bypass = 2'b10; c.lsel[5] = 3'd2;
    c.dir_hold[DIR_N] = 1'b1;
    write_cfg(0, 1, c);
    // PCU 0, ctx0
    c = '0; c.gsel = '1; c.lsel = '1;
    c.gsel[GO_G2L0 + 0] = 3'(GI_ALSU);
    c.gsel[GO_G2L0 + 1] = 3'(DIR_N);
    c.alu[1].op = ALU_MUL; c.lsel[2] = 3'd3; c.lsel[3] = 3'd4;
    c.alu[2].op = ALU_SHL; c.lsel[4] = 3'd3; c.lsel[5] = 3'(LI_IMM); c.alu[2].imm = 8'd2;
    c.lsel[LO_L2G0 + 1] = 3'd2;
    c.gsel[DIR_E] = 3'(GI_L2G0 + 1);
    write_cfg(0, 0, c);
    // PCU 1, ctx0
    c = '0; c.gsel = '1; c.lsel = '1;
    c.gsel[GO_ALSU] = 3'(DIR_W); c.alsu.op = ALSU_SETA;
    c.g2l_reg[0] = 1'b1; c.alu[0].op = ALU_PASS; c.lsel[0] = 3'd3;
    write_cfg(1, 0, c);
    // PCU 1, ctx1
    c = '0; c.gsel = '1; c.lsel = '1;
    c.gsel[GO_ALSU] = 3'(DIR_W); c.alsu.op = ALSU_ST; c.alsu.imm = 8'hFF;
    c.gsel[GO_G2L0 + 0] = 3'(DIR_W);
    c.lsel[LO_L2G0] = 3'd0; c.gsel[DIR_E] = 3'(GI_L2G0);
    write_cfg(1, 1, c);

    // ---- data ----
    for (int k = 0; k < N; k++) host_write(0, k, xs[k]);
    for (int k = 0; k < N; k++) host_write(1, k, 16'hDEAD);

    // ---- run ----
    @(negedge clk);
    ii = 5'(II); run_cycles = 32'(RUN); start = 1;
    @(negedge clk);
    start = 0;
    t0 = busy_cycles;
    chk("busy after start", busy);
    while (!done) @(negedge clk);
    chk($sformatf("busy cycles %0d exp %0d", busy_cycles - t0, RUN + 1), busy_cycles - t0 == RUN + 1);
    chk("idle after done", !busy);

    // ---- results ----
    for (int k = 0; k < N; k++) begin
      host_read(1, k, v);
      chk($sformatf("y[%0d] got %h exp %h", k, v, ys[k]), v == ys[k]);
    end
    host_read(0, 5, v);
    chk("x intact", v == xs[5]);

    $display("mechanisms: wrap=%0d local=%0d bypass=%0d hop=%0d g2l_reg=%0d hold=%0d load=%0d store=%0d echo=%0d",
             n_wrap, n_local, n_bypass, n_hop, n_g2lreg, n_hold, n_load, n_store, n_echo);
    chk("modulo wrap happened", n_wrap > 0);
    chk("local routing happened", n_local > 0);
    chk("bypass happened", n_bypass > 0);
    chk("inter-PCU hop happened", n_hop > 0);
    chk("registered g2l path happened", n_g2lreg > 0);
    chk("input hold happened", n_hold > 0);
    chk("load happened", n_load >= N);
    chk("store happened", n_store >= N);
    chk("edge echo happened", n_echo == N);
    chk("store every II cycles", store_gap_bad == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
