// tb_plaid_3x3: smoke test of the scaled 3x3 Plaid array (ROWS = COLS = 3,
// nine PCUs with one bank each; all other parameters at their defaults).
// The 3x3 size is one the published design evaluates; how banks attach at
// that size is not described, so the one-bank-per-PCU pairing used here is
// this implementation's choice.
//
// A stream runs once around the whole mesh at II = 1:
//   PCU 0: ALU0 counter; ALSU LD bank0[counter-1]; A[i] leaves on E
//   then along the snake 0 -> 1 -> 2 -> 5 -> 4 -> 3 -> 6 -> 7 -> 8, every PCU
//   k adds its index k with ALU0 and passes the sum to the next PCU, using
//   E, S and W links; PCU 8 drives it out on edge_s_out[2].
// A[i] reaches PCU 0's ALSU result in run cycle i + 2. Each of the eight
// hops then adds two cycles (link register and ALU), so edge_s_out[2] shows
// A[i] + 36 in run cycle i + 18. Every such word of the run is checked. The
// bench also writes and reads back one word in each of the nine banks
// through the host port.
module tb_plaid_3x3;
  import plaid_pkg::*;

  localparam int R = 3, C = 3, NP = R * C;
  localparam int N   = 100;
  localparam int LAT = 18;
  localparam int RUN = N + LAT;
  localparam int SUM = 36;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [3:0] cfg_pcu = '0;
  logic [3:0] cfg_addr = '0;
  logic [119:0] cfg_data = '0;
  logic start = 0;
  logic [4:0] ii = '0;
  logic [31:0] run_cycles = '0;
  logic busy, done;
  logic host_mem_en = 0, host_mem_we = 0;
  logic [3:0] host_mem_bank = '0;
  logic [10:0] host_mem_addr = '0;
  logic [15:0] host_mem_wdata = '0, host_mem_rdata;
  logic [C-1:0][15:0] edge_n_in, edge_n_out, edge_s_in, edge_s_out;
  logic [R-1:0][15:0] edge_e_in, edge_e_out, edge_w_in, edge_w_out;

  logic [15:0] a [N];
  int checks = 0, failures = 0;
  int t = -1;          // run cycle, 0 = first cycle with running high
  int n_out = 0;

  plaid_top #(.ROWS(R), .COLS(C)) dut (.*);

  always #5 clk = ~clk;
  assign edge_n_in = '0;
  assign edge_s_in = '0;
  assign edge_e_in = '0;
  assign edge_w_in = '0;

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic write_cfg(input int p, input pcu_cfg_t c);
    @(negedge clk);
    cfg_we = 1; cfg_pcu = 4'(p); cfg_addr = '0; cfg_data = c;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic host_write(input int bank, input int ad, input logic [15:0] v);
    @(negedge clk);
    host_mem_en = 1; host_mem_we = 1; host_mem_bank = 4'(bank); host_mem_addr = 11'(ad); host_mem_wdata = v;
    @(negedge clk);
    host_mem_en = 0; host_mem_we = 0;
  endtask

  task automatic host_read(input int bank, input int ad, output logic [15:0] v);
    @(negedge clk);
    host_mem_en = 1; host_mem_we = 0; host_mem_bank = 4'(bank); host_mem_addr = 11'(ad);
    @(negedge clk);
    host_mem_en = 0;
    v = host_mem_rdata;
  endtask

  function automatic pcu_cfg_t nop_cfg();
    pcu_cfg_t c;
    c = '0; c.gsel = '1; c.lsel = '1;
    return c;
  endfunction

  // One hop of the snake: take the input from direction din, add k, send
  // the sum towards dout.
  function automatic pcu_cfg_t hop_cfg(input int k, input dir_e din, input dir_e dout);
    pcu_cfg_t c;
    c = nop_cfg();
    c.gsel[GO_G2L0] = 3'(din);
    c.alu[0].op = ALU_ADD; c.lsel[0] = 3'(LI_G2L0); c.lsel[1] = 3'(LI_IMM); c.alu[0].imm = 8'(k);
    c.lsel[LO_L2G0] = 3'(LI_ALU0);
    c.gsel[dout] = 3'(GI_L2G0);
    return c;
  endfunction

  always @(negedge clk) begin
    if (dut.running) begin
      t <= t + 1;
      if (t + 1 >= LAT && t + 1 - LAT < N) begin
        chk($sformatf("run cycle %0d got %h exp %h", t + 1, edge_s_out[2], a[t + 1 - LAT] + 16'(SUM)),
            edge_s_out[2] == a[t + 1 - LAT] + 16'(SUM));
        n_out++;
      end
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pcu_cfg_t c;
    logic [15:0] v;
    for (int i = 0; i < N; i++) a[i] = 16'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;

    c = nop_cfg();
    c.alu[0].op = ALU_ADD; c.lsel[0] = 3'(LI_ALU0); c.lsel[1] = 3'(LI_IMM); c.alu[0].imm = 8'd1;
    c.lsel[LO_L2G0] = 3'(LI_ALU0);
    c.gsel[GO_ALSU] = 3'(GI_L2G0); c.alsu.op = ALSU_LD; c.alsu.imm = 8'hFF;
    c.gsel[DIR_E] = 3'(GI_ALSU);
    write_cfg(0, c);
    write_cfg(1, hop_cfg(1, DIR_W, DIR_E));
    write_cfg(2, hop_cfg(2, DIR_W, DIR_S));
    write_cfg(5, hop_cfg(5, DIR_N, DIR_W));
    write_cfg(4, hop_cfg(4, DIR_E, DIR_W));
    write_cfg(3, hop_cfg(3, DIR_E, DIR_S));
    write_cfg(6, hop_cfg(6, DIR_N, DIR_E));
    write_cfg(7, hop_cfg(7, DIR_W, DIR_E));
    write_cfg(8, hop_cfg(8, DIR_W, DIR_S));

    for (int i = 0; i < N; i++) host_write(0, i, a[i]);
    for (int b = 1; b < NP; b++) host_write(b, 5, 16'(16'hB000 + b));

    @(negedge clk);
    ii = 5'd1; run_cycles = 32'(RUN); start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);

    chk($sformatf("words checked %0d exp %0d", n_out, N), n_out == N);
    chk($sformatf("run cycles %0d exp %0d", t + 1, RUN), t + 1 == RUN);
    for (int b = 1; b < NP; b++) begin
      host_read(b, 5, v);
      chk($sformatf("bank %0d word %h", b, v), v == 16'(16'hB000 + b));
    end
    for (int i = 0; i < N; i += 17) begin
      host_read(0, i, v);
      chk($sformatf("bank 0 [%0d] %h", i, v), v == a[i]);
    end
    $display("3x3: %0d words through 9 PCUs and 8 hops", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
