// plaid_ctrl: run controller of the Plaid fabric.
//
// Plaid is statically scheduled: the compiler fixes the initiation interval
// II and the number of cycles a kernel takes. The host loads the
// configuration and the data, then pulses start with ii (1..16) and
// run_cycles. The controller then
//   - asserts clear for one cycle, zeroing the datapath registers,
//   - runs for run_cycles cycles, stepping the context index ctx through
//     0, 1, ..., ii-1, 0, ... (the configuration memory is read modulo II),
//   - drops running and raises done, which stays high until the next start.
// Reading the configuration in a modulo way follows the published design;
// the start/run_cycles/done handshake and the clear at start are this
// implementation's choices. start is ignored while running.
module plaid_ctrl #(
  parameter int unsigned CTX_W = plaid_pkg::CTX_W,
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [CTX_W:0]   ii,
  input  logic [CNT_W-1:0] run_cycles,
  output logic [CTX_W-1:0] ctx,
  output logic             running,
  output logic             clear,
  output logic             done
);

  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_RUN} state_e;

  state_e           state;
  logic [CNT_W-1:0] remaining;
  logic [CTX_W:0]   ii_q;

  assign running = (state == S_RUN);
  assign clear   = (state == S_CLEAR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      remaining <= '0;
      ii_q      <= 1;
      ctx       <= '0;
      done      <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state     <= S_CLEAR;
          remaining <= run_cycles;
          ii_q      <= (ii == '0) ? (CTX_W+1)'(1) : ii;
          ctx       <= '0;
          done      <= 1'b0;
        end
        S_CLEAR: begin
          if (remaining == '0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_RUN;
          end
        end
        S_RUN: begin
          ctx       <= ((CTX_W+1)'(ctx) + 1'b1 >= ii_q) ? '0 : ctx + 1'b1;
          remaining <= remaining - 1'b1;
          if (remaining == CNT_W'(1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) running |-> (CTX_W+1)'(ctx) < ii_q)
    else $error("context index beyond II");

endmodule
