// plaid_spm_bank: one scratchpad data memory bank.
//
// 2048 words of 16 bits (4 KB), one port, synchronous: a read issued with
// en=1, we=0 returns mem[addr] on rdata after the next clock edge and rdata
// holds until the next read; a write with en=1, we=1 stores wdata. The bank
// size follows the published design (four 4 KB banks); the word width, the
// single port and the read timing are this implementation's choices. A chip
// would use an SRAM macro here.
module plaid_spm_bank #(
  parameter int unsigned W     = plaid_pkg::DW,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  wdata,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
