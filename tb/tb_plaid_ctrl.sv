// tb_plaid_ctrl: self-checking test of plaid_ctrl.
// For several II values and run lengths it checks: one clear cycle after
// start, exactly run_cycles cycles with running high, the context sequence
// 0..II-1 repeating, done raised at the end and held until the next start.
module tb_plaid_ctrl;
  logic clk = 0, rst_n = 0, start = 0;
  logic [4:0] ii = '0;
  logic [31:0] run_cycles = '0;
  logic [3:0] ctx;
  logic running, clear, done;
  int checks = 0, failures = 0;

  plaid_ctrl dut (.clk(clk), .rst_n(rst_n), .start(start), .ii(ii), .run_cycles(run_cycles),
                  .ctx(ctx), .running(running), .clear(clear), .done(done));

  always #5 clk = ~clk;

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (ii=%0d run=%0d)", what, ii, run_cycles); end
  endtask

  task automatic run(input int iiv, input int len);
    int cyc, expctx;
    @(negedge clk);
    ii = 5'(iiv); run_cycles = 32'(len); start = 1;
    @(negedge clk);
    start = 0;
    chk("clear after start", clear == 1'b1 && running == 1'b0 && done == 1'b0);
    @(negedge clk);
    cyc = 0; expctx = 0;
    while (running) begin
      chk("ctx sequence", ctx == 4'(expctx));
      expctx = (expctx + 1 == iiv) ? 0 : expctx + 1;
      cyc++;
      @(negedge clk);
    end
    chk($sformatf("cycle count %0d", cyc), cyc == len);
    chk("done", done == 1'b1);
    repeat (3) @(negedge clk);
    chk("done held", done == 1'b1 && running == 1'b0);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk("idle after reset", !running && !done && !clear);
    run(1, 5);
    run(2, 9);
    run(3, 30);
    run(16, 40);
    run(7, 1);
    for (int n = 0; n < 20; n++) run(int'($urandom % 16) + 1, int'($urandom % 60) + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
