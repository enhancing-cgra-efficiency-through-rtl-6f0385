// tb_plaid_maxpool: ReLU followed by 1-D max pooling on the Plaid CGRA at its
// default 2x2 size, mapped by hand with II = 3. It exercises the ALSU's
// predicated select, which the published design gives the ALSU but which
// the other array-level tests do not use.
//
//   out[j] = max(0, x[j*P], ..., x[j*P+P-1])      (signed 16-bit)
//
// The running maximum m lives in PCU 0's ALSU result register (cleared to 0
// at the start of each run, which supplies the ReLU). Per iteration k, which
// handles x[k-1]:
//   PCU 1 ctx0: ALU0 counter += 1
//         ctx1: ALSU LD bank1[counter-1]; x leaves on the W link (all ctx)
//   PCU 0 ctx0: ALU0 p = (m < x), m from the ALSU over a direct
//               global-to-local path, x from the E link register
//         ctx1: ALSU SETA p (predicate into the address register)
//         ctx2: ALSU PSEL x: m <= p ? x : m
//         all : m leaves on the S link
//   PCU 2 all : ALSU ST bank2[j] <= N link; the last store is the result
// The recurrence m -> compare -> predicate -> select is three cycles, which
// sets II = 3. For each window the host copies the P samples to bank 1,
// followed by two pad words 0x8000 (the most negative value, never
// selected) that the last iteration's loads read, and runs 3*(P+2) cycles.
// The bench checks every output and the run length, and counts, from the
// ALSU itself, how many predicated selects were taken and how many kept m.
// The mapping and the kernel are this bench's own choice.
module tb_plaid_maxpool;
  import plaid_pkg::*;

  localparam int P   = 20;           // window length
  localparam int M   = 8;            // windows
  localparam int II  = 3;
  localparam int RUN = II * (P + 2);

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

  logic [15:0] x [M][P];
  logic [15:0] expv [M];
  int checks = 0, failures = 0;
  int exp_taken = 0;
  int psel_taken = 0, psel_kept = 0;

  plaid_top dut (.*);

  always #5 clk = ~clk;
  assign edge_n_in = '0;
  assign edge_s_in = '0;
  assign edge_e_in = '0;
  assign edge_w_in = '0;

  // Predicated selects executed by PCU 0's ALSU, read from the design.
  always @(posedge clk) begin
    if (dut.running && dut.g_row[0].g_col[0].u_pcu.cfg.alsu.op == 4'(ALSU_PSEL)) begin
      if (dut.g_row[0].g_col[0].u_pcu.u_alsu.areg != '0) psel_taken++;
      else psel_kept++;
    end
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
    logic [15:0] v, m;
    time t0;
    int cycles;
    // Windows 2 and 5 hold only negative samples, so their output is 0.
    for (int j = 0; j < M; j++) begin
      m = '0;
      for (int i = 0; i < P; i++) begin
        x[j][i] = 16'($urandom);
        if (j == 2 || j == 5) x[j][i][15] = 1'b1;
        if ($signed(m) < $signed(x[j][i])) begin
          m = x[j][i];
          exp_taken++;
        end
      end
      expv[j] = m;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int p = 0; p < 4; p++)
      for (int a = 0; a < II; a++) write_cfg(p, a, nop_cfg());

    // PCU 0: compare, predicate, select
    for (int a = 0; a < II; a++) begin
      c = nop_cfg();
      c.gsel[DIR_S] = 3'(GI_ALSU);
      if (a == 0) begin
        c.gsel[GO_G2L0 + 0] = 3'(GI_ALSU);
        c.gsel[GO_G2L0 + 1] = 3'(DIR_E);
        c.alu[0].op = ALU_LT; c.lsel[0] = 3'(LI_G2L0 + 0); c.lsel[1] = 3'(LI_G2L0 + 1);
      end else if (a == 1) begin
        c.lsel[LO_L2G0] = 3'(LI_ALU0);
        c.gsel[GO_ALSU] = 3'(GI_L2G0); c.alsu.op = ALSU_SETA;
      end else begin
        c.gsel[GO_ALSU] = 3'(DIR_E); c.alsu.op = ALSU_PSEL;
      end
      write_cfg(0, a, c);
    end
    // PCU 1: counter and loads
    for (int a = 0; a < II; a++) begin
      c = nop_cfg();
      c.gsel[DIR_W] = 3'(GI_ALSU);
      if (a == 0) begin
        c.alu[0].op = ALU_ADD; c.lsel[0] = 3'(LI_ALU0); c.lsel[1] = 3'(LI_IMM); c.alu[0].imm = 8'd1;
      end else if (a == 1) begin
        c.lsel[LO_L2G0] = 3'(LI_ALU0);
        c.gsel[GO_ALSU] = 3'(GI_L2G0); c.alsu.op = ALSU_LD; c.alsu.imm = 8'hFF;
      end
      write_cfg(1, a, c);
    end

    for (int j = 0; j < M; j++) begin
      for (int i = 0; i < P; i++) host_write(1, i, x[j][i]);
      host_write(1, P, 16'h8000);
      host_write(1, P + 1, 16'h8000);
      // PCU 2: store the running maximum to bank 2, address j
      for (int a = 0; a < II; a++) begin
        c = nop_cfg();
        c.gsel[GO_ALSU] = 3'(DIR_N); c.alsu.op = ALSU_ST; c.alsu.imm = 8'(j);
        write_cfg(2, a, c);
      end
      @(negedge clk);
      ii = 5'(II); run_cycles = 32'(RUN); start = 1;
      @(negedge clk);
      start = 0;
      t0 = $time;
      while (!done) @(negedge clk);
      cycles = int'(($time - t0) / 10);
      chk($sformatf("window %0d took %0d cycles, expected %0d", j, cycles, RUN + 1), cycles == RUN + 1);
    end
    for (int j = 0; j < M; j++) begin
      host_read(2, j, v);
      chk($sformatf("out[%0d] got %h exp %h", j, v, expv[j]), v == expv[j]);
    end
    // P+2 selects per window; the pads and the leading empty iteration are
    // never taken.
    chk($sformatf("predicated selects taken %0d exp %0d", psel_taken, exp_taken),
        psel_taken == exp_taken);
    chk($sformatf("predicated selects total %0d exp %0d", psel_taken + psel_kept, M * (P + 2)),
        psel_taken + psel_kept == M * (P + 2));
    chk("both select outcomes seen", psel_taken > 0 && psel_kept > 0);
    $display("maxpool %0d windows of %0d: selects taken %0d, kept %0d",
             M, P, psel_taken, psel_kept);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
