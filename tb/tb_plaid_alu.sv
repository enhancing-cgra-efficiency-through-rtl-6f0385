// tb_plaid_alu: self-checking test of plaid_alu.
// Drives every opcode with directed corner values and random operands and
// compares against a reference written with plain integer arithmetic.
module tb_plaid_alu;
  import plaid_pkg::*;

  logic [3:0]  op;
  logic [15:0] a, b, y;
  logic        valid;
  int checks = 0, failures = 0;

  plaid_alu dut (.op(op), .a(a), .b(b), .y(y), .valid(valid));

  function automatic logic [15:0] ref_y(input int o, input logic [15:0] x, input logic [15:0] z);
    int sx, sz;
    sx = int'($signed(x));
    sz = int'($signed(z));
    case (o)
      1:  return 16'((int'(x) + int'(z)) % 65536);
      2:  return 16'((int'(x) - int'(z) + 65536) % 65536);
      3:  return 16'((longint'(x) * longint'(z)) % 65536);
      4:  return 16'((int'(x) * (1 << z[3:0])) % 65536);
      5:  return 16'(int'(x) / (1 << z[3:0]));
      6:  return 16'((sx >>> z[3:0]));
      7:  return x & z;
      8:  return x | z;
      9:  return x ^ z;
      10: return ~(x & z);
      11: return ~(x | z);
      12: return ~(x ^ z);
      13: return (x == z) ? 16'd1 : 16'd0;
      14: return (sx < sz) ? 16'd1 : 16'd0;
      15: return x;
      default: return 16'd0;
    endcase
  endfunction

  task automatic check(input int o, input logic [15:0] x, input logic [15:0] z);
    op = 4'(o); a = x; b = z;
    #1;
    checks++;
    if (o == 0) begin
      if (valid !== 1'b0) begin failures++; $display("FAIL NOP valid=%b", valid); end
    end else if (valid !== 1'b1 || y !== ref_y(o, x, z)) begin
      failures++;
      $display("FAIL op=%0d a=%h b=%h y=%h exp=%h", o, x, z, y, ref_y(o, x, z));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < 16; o++) begin
      check(o, 16'h0000, 16'h0000);
      check(o, 16'hFFFF, 16'h0001);
      check(o, 16'h8000, 16'h000F);
      check(o, 16'h7FFF, 16'h8000);
      check(o, 16'h1234, 16'h1234);
      for (int n = 0; n < 200; n++) check(o, 16'($urandom), 16'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
