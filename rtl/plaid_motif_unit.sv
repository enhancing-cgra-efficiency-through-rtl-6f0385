// plaid_motif_unit: the motif compute unit of a PCU, three ALUs with
// registered results and left-to-right bypass paths.
//
// Each ALU takes operands A and B from the local router (opnd_a/opnd_b) and
// writes its result register at the clock edge, so a node that consumes a
// result runs one cycle later, as in the published schedule templates
// ((n1,c), (n2,c+1), ...). The published design adds bypass paths between
// neighbouring ALUs so that a motif executed left to right need not go
// through the local router. Here bypass[i] makes ALU i+1 take operand A
// directly from ALU i's result register instead of from the router. A NOP
// keeps the result register; clear zeroes all results (used at run start).
// Both of these are this implementation's choices.
module plaid_motif_unit
  import plaid_pkg::*;
#(
  parameter int unsigned W = plaid_pkg::DW,
  parameter int unsigned N = plaid_pkg::NALU
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic [N-1:0][3:0]   op,
  input  logic [N-2:0]        bypass,
  input  logic [N-1:0][W-1:0] opnd_a,
  input  logic [N-1:0][W-1:0] opnd_b,
  output logic [N-1:0][W-1:0] result
);

  logic [N-1:0][W-1:0] a_eff;
  logic [N-1:0][W-1:0] y;
  logic [N-1:0]        valid;

  always_comb begin
    a_eff[0] = opnd_a[0];
    for (int i = 1; i < N; i++)
      a_eff[i] = bypass[i-1] ? result[i-1] : opnd_a[i];
  end

  for (genvar i = 0; i < N; i++) begin : g_alu
    plaid_alu #(.W(W)) u_alu (
      .op   (op[i]),
      .a    (a_eff[i]),
      .b    (opnd_b[i]),
      .y    (y[i]),
      .valid(valid[i])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)        result[i] <= '0;
      else if (clear)    result[i] <= '0;
      else if (valid[i]) result[i] <= y[i];
    end
  end

endmodule
