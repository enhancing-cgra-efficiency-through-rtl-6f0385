// tb_plaid_config_mem: self-checking test of plaid_config_mem.
// Writes random 120-bit entries to all 16 addresses, then reads every
// address (asynchronous read) in random order and rewrites some entries.
module tb_plaid_config_mem;
  logic clk = 0, we = 0;
  logic [3:0] waddr = '0, raddr = '0;
  logic [119:0] wdata = '0, rdata;
  logic [119:0] model [16];
  int checks = 0, failures = 0;

  plaid_config_mem dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .raddr(raddr), .rdata(rdata));

  always #5 clk = ~clk;

  function automatic logic [119:0] rnd120();
    return {32'($urandom), 32'($urandom), 32'($urandom), 24'($urandom)};
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int round = 0; round < 20; round++) begin
      for (int a = 0; a < 16; a++) begin
        if (round == 0 || ($urandom % 3) == 0) begin
          @(negedge clk);
          we = 1; waddr = 4'(a); wdata = rnd120(); model[a] = wdata;
          @(negedge clk);
          we = 0;
        end
      end
      for (int n = 0; n < 32; n++) begin
        raddr = 4'($urandom);
        #1;
        checks++;
        if (rdata !== model[raddr]) begin failures++; $display("FAIL addr %0d", raddr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
