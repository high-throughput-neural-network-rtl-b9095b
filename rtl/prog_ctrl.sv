// prog_ctrl: programming control circuit of one memristor core.
//
// Memristor weights are trained off chip and written by an off-chip system
// with a feedback loop: apply a pulse, read the device back, repeat until it
// reaches its target. Only the hooks for that loop are on chip: this control
// circuit, the row-select transistors of the 1T1M crossbar and one ADC. The
// controller accepts one command at a time (valid/ready):
//   PG_SET / PG_RESET  drive the selected device with one write pulse of
//                      PULSE_CYC cycles, then answer with rsp_valid.
//   PG_READ            turn on the row switch of the selected row, let the
//                      column settle for one cycle, start the ADC, hold the
//                      row switch until the ADC is done, then answer with the
//                      code on rsp_code.
// Commands are only accepted while `enable` (the core's programming mode) is
// high, so programming never overlaps normal evaluation.
// The command set, handshake, pulse length and settle time are this design's
// choices; the paper says only that pulses and reads alternate.
module prog_ctrl
  import nn_pkg::*;
#(
  parameter int PULSE_CYC = 1,
  parameter int ADC_BITS  = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                enable,
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  pg_cmd_t             cmd,
  output logic                rsp_valid,
  output logic [ADC_BITS-1:0] rsp_code,
  // to the crossbar
  output logic [7:0]          pg_row,
  output logic [7:0]          pg_col,
  output logic                pg_neg,
  output logic                pg_set,
  output logic                pg_reset,
  output logic                pg_read,
  // to the ADC
  output logic                adc_start,
  input  logic                adc_done,
  input  logic [ADC_BITS-1:0] adc_code
);
  typedef enum logic [2:0] {S_IDLE, S_PULSE, S_SETTLE, S_CONV, S_RESP} state_e;
  state_e  state;
  pg_cmd_t cur;
  int      cnt;

  assign cmd_ready = enable && state == S_IDLE;
  assign pg_row    = cur.row;
  assign pg_col    = cur.col;
  assign pg_neg    = cur.neg;
  assign pg_set    = state == S_PULSE && cur.op == PG_SET;
  assign pg_reset  = state == S_PULSE && cur.op == PG_RESET;
  assign pg_read   = state == S_SETTLE || state == S_CONV;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur       <= '0;
      cnt       <= 0;
      rsp_valid <= 1'b0;
      rsp_code  <= '0;
      adc_start <= 1'b0;
    end else begin
      rsp_valid <= 1'b0;
      adc_start <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid && cmd_ready) begin
          cur <= cmd;
          if (cmd.op == PG_READ) begin
            state <= S_SETTLE;
          end else if (cmd.op == PG_SET || cmd.op == PG_RESET) begin
            state <= S_PULSE;
            cnt   <= PULSE_CYC - 1;
          end else begin
            state <= S_RESP;   // unknown op: acknowledge, do nothing
          end
        end
        S_PULSE: if (cnt == 0) state <= S_RESP; else cnt <= cnt - 1;
        S_SETTLE: begin
          adc_start <= 1'b1;
          state     <= S_CONV;
        end
        S_CONV: if (adc_done) begin
          rsp_code <= adc_code;
          state    <= S_RESP;
        end
        S_RESP: begin
          rsp_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
