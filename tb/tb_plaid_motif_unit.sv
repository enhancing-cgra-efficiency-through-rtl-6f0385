// tb_plaid_motif_unit: self-checking test of plaid_motif_unit.
// Each cycle it applies random opcodes, operands and bypass bits, predicts
// the three result registers from a reference model (bypass takes the left
// neighbour's previous result, NOP holds), and checks them after the edge.
// It also checks that clear zeroes the results and that a three-node fan-in
// motif (n1 on ALU0, n3 on ALU1 via bypass) gives its value one cycle later.
module tb_plaid_motif_unit;
  import plaid_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0;
  logic [2:0][3:0]  op;
  logic [1:0]       bypass;
  logic [2:0][15:0] opa, opb, result;
  logic [2:0][15:0] model;
  int checks = 0, failures = 0;

  plaid_motif_unit dut (.clk(clk), .rst_n(rst_n), .clear(clear), .op(op), .bypass(bypass),
                        .opnd_a(opa), .opnd_b(opb), .result(result));

  always #5 clk = ~clk;

  function automatic logic [15:0] alu_ref(input logic [3:0] o, input logic [15:0] x, input logic [15:0] z, input logic [15:0] old);
    case (o)
      4'd1: return x + z;
      4'd2: return x - z;
      4'd3: return 16'(x * z);
      4'd7: return x & z;
      4'd9: return x ^ z;
      4'd15: return x;
      default: return old;  // only these opcodes are driven here; 0 = NOP
    endcase
  endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] ops [6] = '{4'd0, 4'd1, 4'd2, 4'd3, 4'd9, 4'd15};
    logic [15:0] ain;
    op = '0; bypass = '0; opa = '0; opb = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (result !== '0) begin failures++; $display("FAIL reset"); end
    model = '0;
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < 3; i++) begin
        op[i]  = ops[$urandom % 6];
        opa[i] = 16'($urandom);
        opb[i] = 16'($urandom);
      end
      bypass = 2'($urandom);
      for (int i = 2; i >= 0; i--) begin
        ain = (i > 0 && bypass[i-1]) ? model[i-1] : opa[i];
        model[i] = alu_ref(op[i], ain, opb[i], model[i]);
      end
      @(negedge clk);
      for (int i = 0; i < 3; i++) begin
        checks++;
        if (result[i] !== model[i]) begin
          failures++;
          $display("FAIL n=%0d alu%0d got %h exp %h", n, i, result[i], model[i]);
        end
      end
    end
    // fan-in motif: n1 = a*b on ALU0 at cycle c, n3 = n1 + x on ALU1 at c+1
    op = '{4'd0, 4'd0, 4'd3}; opa[0] = 16'd7; opb[0] = 16'd6; bypass = 2'b00;
    @(negedge clk);
    op = '{4'd0, 4'd1, 4'd0}; opa[1] = 16'hDEAD; opb[1] = 16'd100; bypass = 2'b01;
    @(negedge clk);
    checks++;
    if (result[1] !== 16'd142) begin failures++; $display("FAIL motif %0d", result[1]); end
    clear = 1; op = '0;
    @(negedge clk);
    clear = 0;
    checks++;
    if (result !== '0) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
