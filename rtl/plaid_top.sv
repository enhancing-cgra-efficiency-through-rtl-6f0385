// plaid_top: the Plaid CGRA, a ROWS x COLS mesh of PCUs with one scratchpad
// bank per PCU, a run controller and host access ports.
//
// PCU (r,c) has index k = r*COLS + c. Its N output drives the S input of
// (r-1,c), its E output the W input of (r,c+1), and so on; links that leave
// the array are brought out as edge_* ports (edge_*_in drive the boundary
// inputs). Every PCU's ALSU owns bank k. In the 2x2 array of the published
// design every PCU sits on the array edge next to the data memory, and the
// four 4 KB banks match the four PCUs; assigning bank k to PCU k is this
// implementation's choice. PCU_MOTIF can replace the local router of any
// PCU by a hard-wired motif, as in the published domain-specialized
// variant.
//
// Host protocol: (1) write configuration entries with cfg_we, cfg_pcu,
// cfg_addr, cfg_data; (2) while idle, write input data with host_mem_en/_we
// into bank host_mem_bank (reads return host_mem_rdata one cycle later);
// (3) pulse start with ii and run_cycles; busy is high until done rises;
// (4) read results back through the host memory port. The fabric owns the
// banks while busy, the host otherwise.
module plaid_top
  import plaid_pkg::*;
#(
  parameter int unsigned ROWS      = 2,
  parameter int unsigned COLS      = 2,
  parameter int unsigned W         = plaid_pkg::DW,
  parameter int unsigned NCFG      = plaid_pkg::CFG_DEPTH,
  parameter int unsigned SPM_DEPTH = 2048,
  // Local datapath of PCU k in bits [2k+1:2k]: plaid_pkg::MOTIF_*. All zero
  // is the general design; 8'b11_10_01_01 is the machine-learning variant
  // (PCU 0,1 fan-in, PCU 2 unicast, PCU 3 fan-out).
  parameter bit [2*ROWS*COLS-1:0] PCU_MOTIF = '0,
  localparam int unsigned NPCU     = ROWS * COLS,
  localparam int unsigned PW       = (NPCU > 1) ? $clog2(NPCU) : 1,
  localparam int unsigned CAW      = $clog2(NCFG),
  localparam int unsigned MAW      = $clog2(SPM_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration load
  input  logic                 cfg_we,
  input  logic [PW-1:0]        cfg_pcu,
  input  logic [CAW-1:0]       cfg_addr,
  input  logic [CFG_W-1:0]     cfg_data,
  // run control
  input  logic                 start,
  input  logic [CAW:0]         ii,
  input  logic [31:0]          run_cycles,
  output logic                 busy,
  output logic                 done,
  // host access to the data memory banks
  input  logic                 host_mem_en,
  input  logic                 host_mem_we,
  input  logic [PW-1:0]        host_mem_bank,
  input  logic [MAW-1:0]       host_mem_addr,
  input  logic [W-1:0]         host_mem_wdata,
  output logic [W-1:0]         host_mem_rdata,
  // mesh links at the array boundary
  input  logic [COLS-1:0][W-1:0] edge_n_in,
  output logic [COLS-1:0][W-1:0] edge_n_out,
  input  logic [COLS-1:0][W-1:0] edge_s_in,
  output logic [COLS-1:0][W-1:0] edge_s_out,
  input  logic [ROWS-1:0][W-1:0] edge_e_in,
  output logic [ROWS-1:0][W-1:0] edge_e_out,
  input  logic [ROWS-1:0][W-1:0] edge_w_in,
  output logic [ROWS-1:0][W-1:0] edge_w_out
);

  logic [CAW-1:0] ctx;
  logic           running, clear;

  plaid_ctrl #(.CTX_W(CAW), .CNT_W(32)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .ii        (ii),
    .run_cycles(run_cycles),
    .ctx       (ctx),
    .running   (running),
    .clear     (clear),
    .done      (done)
  );

  assign busy = running | clear;

  logic [NPCU-1:0][3:0][W-1:0] dir_in, dir_out;
  logic [NPCU-1:0]             a_en, a_we;
  logic [NPCU-1:0][MAW-1:0]    a_addr;
  logic [NPCU-1:0][W-1:0]      a_wdata, b_rdata;
  logic [PW-1:0]               host_bank_q;

  // Mesh wiring: each input comes from the facing output of the neighbour,
  // or from the edge ports at the array boundary.
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        dir_in[r*COLS+c][DIR_N] = (r > 0) ? dir_out[(r-1)*COLS+c][DIR_S] : edge_n_in[c];
        dir_in[r*COLS+c][DIR_S] = (r < ROWS-1) ? dir_out[(r+1)*COLS+c][DIR_N] : edge_s_in[c];
        dir_in[r*COLS+c][DIR_E] = (c < COLS-1) ? dir_out[r*COLS+c+1][DIR_W] : edge_e_in[r];
        dir_in[r*COLS+c][DIR_W] = (c > 0) ? dir_out[r*COLS+c-1][DIR_E] : edge_w_in[r];
      end
    end
    for (int c = 0; c < COLS; c++) begin
      edge_n_out[c] = dir_out[c][DIR_N];
      edge_s_out[c] = dir_out[(ROWS-1)*COLS+c][DIR_S];
    end
    for (int r = 0; r < ROWS; r++) begin
      edge_e_out[r] = dir_out[r*COLS+COLS-1][DIR_E];
      edge_w_out[r] = dir_out[r*COLS][DIR_W];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned K = r * COLS + c;

      plaid_pcu #(.W(W), .DEPTH(NCFG), .MEM_AW(MAW),
                  .MOTIF(int'(PCU_MOTIF[2*K +: 2]))) u_pcu (
        .clk      (clk),
        .rst_n    (rst_n),
        .cfg_we   (cfg_we && (cfg_pcu == PW'(K))),
        .cfg_waddr(cfg_addr),
        .cfg_wdata(cfg_data),
        .ctx      (ctx),
        .running  (running),
        .clear    (clear),
        .dir_in   (dir_in[K]),
        .dir_out  (dir_out[K]),
        .mem_en   (a_en[K]),
        .mem_we   (a_we[K]),
        .mem_addr (a_addr[K]),
        .mem_wdata(a_wdata[K]),
        .mem_rdata(b_rdata[K])
      );

      // Bank K: the fabric while busy, the host otherwise.
      logic          host_sel;
      assign host_sel = !busy && host_mem_en && (host_mem_bank == PW'(K));

      plaid_spm_bank #(.W(W), .DEPTH(SPM_DEPTH)) u_bank (
        .clk  (clk),
        .en   (busy ? a_en[K] : host_sel),
        .we   (busy ? a_we[K] : host_mem_we),
        .addr (busy ? a_addr[K] : host_mem_addr),
        .wdata(busy ? a_wdata[K] : host_mem_wdata),
        .rdata(b_rdata[K])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)           host_bank_q <= '0;
    else if (host_mem_en) host_bank_q <= host_mem_bank;

  assign host_mem_rdata = b_rdata[host_bank_q];

endmodule
