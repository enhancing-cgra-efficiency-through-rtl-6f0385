// tb_plaid_spm_bank: self-checking test of plaid_spm_bank at its full
// 2048 x 16 size: fills the bank, reads it back (data one cycle after the
// request, held while idle) and mixes random reads and writes.
module tb_plaid_spm_bank;
  logic clk = 0, en = 0, we = 0;
  logic [10:0] addr = '0;
  logic [15:0] wdata = '0, rdata;
  logic [15:0] model [2048];
  int checks = 0, failures = 0;

  plaid_spm_bank dut (.clk(clk), .en(en), .we(we), .addr(addr), .wdata(wdata), .rdata(rdata));

  always #5 clk = ~clk;

  task automatic rd(input int a);
    @(negedge clk); en = 1; we = 0; addr = 11'(a);
    @(negedge clk); en = 0;
    checks++;
    if (rdata !== model[a]) begin failures++; $display("FAIL rd %0d got %h exp %h", a, rdata, model[a]); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 2048; a++) begin
      @(negedge clk); en = 1; we = 1; addr = 11'(a); wdata = 16'(a * 37 + 5); model[a] = wdata;
    end
    @(negedge clk); en = 0; we = 0;
    for (int a = 0; a < 2048; a += 7) rd(a);
    rd(2047);
    @(negedge clk);
    checks++;
    if (rdata !== model[2047]) begin failures++; $display("FAIL hold"); end
    for (int n = 0; n < 2000; n++) begin
      if ($urandom % 2) begin
        @(negedge clk); en = 1; we = 1; addr = 11'($urandom); wdata = 16'($urandom); model[addr] = wdata;
        @(negedge clk); en = 0; we = 0;
      end else begin
        rd(int'($urandom % 2048));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
