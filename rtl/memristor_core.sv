// memristor_core: one memristor-crossbar neural core of the mesh.
//
// The core evaluates a whole layer of up to N_OUT threshold neurons with up
// to N_IN inputs each in one analog step of its crossbar. Around the crossbar
// sit an input buffer, an output buffer and a small FSM control unit that
// talks to the core's routing switch, as in the paper's core diagram.
//
// Input: values arrive one flit per cycle from the switch (net_in). In a
// hidden-layer core (HAS_DAC = 0) each flit carries eight binary neuron
// outputs of an earlier layer, bit k for input row 8*n+k of flit n; a row
// bit drives +1 V (1) or -1 V (0). In a first-layer core (HAS_DAC = 1) each
// flit is one 8-bit sensor value and drives row n through a DAC. Rows not
// received in a pattern are driven at 0 V and do not count.
// Packing eight binary outputs per byte is this design's reading of the
// paper's timing figure for this core: 128 inputs in 16 bytes plus two cycles
// of crossbar evaluation make the stated 90 ns at 200 MHz (18 cycles).
//
// Control: after cfg num_in flits the buffered rows are copied into the row
// drivers, which frees the input buffer for the next pattern, and the
// crossbar is evaluated (2 cycles). Its outputs go to the output buffer, which
// sends num_out bytes (eight neuron outputs each, neuron 8*k+b in bit b of
// byte k). A byte is offered with valid on net_out and leaves when the
// switch's schedule takes it (net_grant). Sending pattern n overlaps
// receiving pattern n+1. A result that finds the output buffer still busy
// waits in a holding register; if a further result arrives while one waits,
// it is dropped and the sticky `overrun` bit is set.
//
// Configuration (cfg_we/cfg_addr/cfg_wdata): CFG_NUM_IN, CFG_NUM_OUT, and
// CFG_MODE (1 = programming mode: network input ignored, prog_ctrl enabled).
// Programming commands (pg_*) go to prog_ctrl, which pulses and reads single
// devices of the crossbar through the core's ADC.
module memristor_core
  import nn_pkg::*;
#(
  parameter int N_IN    = 128,
  parameter int N_OUT   = 64,
  parameter bit HAS_DAC = 1'b0,
  parameter int CB_LAT  = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  flit_t       net_in,
  output flit_t       net_out,
  input  logic        net_grant,
  input  logic        cfg_we,
  input  logic [19:0] cfg_addr,
  input  logic [15:0] cfg_wdata,
  input  logic        pg_cmd_valid,
  output logic        pg_cmd_ready,
  input  pg_cmd_t     pg_cmd,
  output logic        pg_rsp_valid,
  output logic [7:0]  pg_rsp_code,
  output logic        eval_pulse,   // one cycle per crossbar evaluation
  output logic        overrun
);
  localparam int NB   = N_OUT / 8;               // output bytes per pattern
  localparam int RPF  = HAS_DAC ? 1 : 8;         // rows per input flit
  localparam int NFL  = N_IN / RPF;              // max input flits per pattern

  // ---------------- configuration ----------------
  logic [15:0] num_in, num_out;
  logic        prog_mode;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num_in    <= 16'(NFL);
      num_out   <= 16'(NB);
      prog_mode <= 1'b0;
    end else if (cfg_we) begin
      unique case (cfg_addr)
        CFG_NUM_IN:  num_in    <= cfg_wdata;
        CFG_NUM_OUT: num_out   <= cfg_wdata;
        CFG_MODE:    prog_mode <= cfg_wdata[0];
        default: ;
      endcase
    end
  end

  // ---------------- input buffer and row drivers ----------------
  logic [7:0]  ibuf      [N_IN];   // row values (bit 0 only in binary cores)
  logic [N_IN-1:0] ipres;          // row received in this pattern
  logic [7:0]  drv       [N_IN];
  logic [N_IN-1:0] dpres;
  logic [15:0] rx_cnt;
  logic        cb_eval;

  wire rx     = net_in.valid && !prog_mode;
  wire rx_end = rx && (rx_cnt == num_in - 1);

  // Input buffer contents including the flit arriving this cycle.
  logic [7:0]      ibuf_n  [N_IN];
  logic [N_IN-1:0] ipres_n;
  always_comb begin
    for (int i = 0; i < N_IN; i++) ibuf_n[i] = ibuf[i];
    ipres_n = ipres;
    if (rx) begin
      for (int k = 0; k < RPF; k++) begin
        if (int'(rx_cnt) * RPF + k < N_IN) begin
          ibuf_n[int'(rx_cnt) * RPF + k]  = HAS_DAC ? net_in.data : {7'd0, net_in.data[k]};
          ipres_n[int'(rx_cnt) * RPF + k] = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_cnt  <= '0;
      ipres   <= '0;
      dpres   <= '0;
      cb_eval <= 1'b0;
      for (int i = 0; i < N_IN; i++) begin
        ibuf[i] <= '0;
        drv[i]  <= '0;
      end
    end else begin
      cb_eval <= 1'b0;
      if (rx_end) begin
        for (int i = 0; i < N_IN; i++) drv[i] <= ibuf_n[i];
        dpres   <= ipres_n;
        ipres   <= '0;
        rx_cnt  <= '0;
        cb_eval <= 1'b1;
      end else begin
        for (int i = 0; i < N_IN; i++) ibuf[i] <= ibuf_n[i];
        ipres <= ipres_n;
        if (rx) rx_cnt <= rx_cnt + 1'b1;
      end
    end
  end

  logic signed [9:0] row_v [N_IN];
  for (genvar i = 0; i < N_IN; i++) begin : g_row
    if (HAS_DAC) begin : g_dac
      logic signed [9:0] v;
      dac #(.BITS(8)) u_dac (.code(drv[i]), .v(v));
      assign row_v[i] = dpres[i] ? v : 10'sd0;
    end else begin : g_bin
      assign row_v[i] = !dpres[i] ? 10'sd0 : (drv[i][0] ? 10'sd255 : -10'sd255);
    end
  end

  // ---------------- crossbar and programming hooks ----------------
  logic [N_OUT-1:0] y;
  logic             y_valid;
  logic [7:0]       pg_row, pg_col;
  logic             pg_neg, pg_set, pg_reset, pg_read;
  logic [15:0]      col_v;
  logic             adc_start, adc_done;
  logic [7:0]       adc_code;

  memristor_crossbar #(.N_IN(N_IN), .N_OUT(N_OUT), .LAT(CB_LAT)) u_xbar (
    .clk, .rst_n, .row_v, .eval(cb_eval), .y, .y_valid,
    .pg_row, .pg_col, .pg_neg, .pg_set, .pg_reset, .pg_read, .col_v
  );

  prog_adc #(.BITS(8)) u_adc (
    .clk, .rst_n, .start(adc_start), .vin(col_v), .done(adc_done), .code(adc_code)
  );

  prog_ctrl u_prog (
    .clk, .rst_n, .enable(prog_mode),
    .cmd_valid(pg_cmd_valid), .cmd_ready(pg_cmd_ready), .cmd(pg_cmd),
    .rsp_valid(pg_rsp_valid), .rsp_code(pg_rsp_code),
    .pg_row, .pg_col, .pg_neg, .pg_set, .pg_reset, .pg_read,
    .adc_start, .adc_done, .adc_code
  );

  assign eval_pulse = cb_eval;

  // ---------------- output buffer and sender ----------------
  logic [N_OUT-1:0] obuf, hold;
  logic             tx_busy, hold_v;
  logic [15:0]      tx_cnt;

  wire tx_last = tx_busy && net_grant && (tx_cnt == num_out - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      obuf    <= '0;
      hold    <= '0;
      hold_v  <= 1'b0;
      tx_busy <= 1'b0;
      tx_cnt  <= '0;
      overrun <= 1'b0;
    end else begin
      if (tx_busy && net_grant) begin
        tx_cnt <= tx_cnt + 1'b1;
        if (tx_last) tx_busy <= 1'b0;
      end
      if (y_valid) begin
        if (!tx_busy || tx_last) begin
          if (hold_v) begin
            obuf <= hold;
            hold <= y;
          end else begin
            obuf <= y;
          end
          tx_busy <= 1'b1;
          tx_cnt  <= '0;
        end else if (!hold_v) begin
          hold   <= y;
          hold_v <= 1'b1;
        end else begin
          overrun <= 1'b1;
        end
      end else if (hold_v && (!tx_busy || tx_last)) begin
        obuf    <= hold;
        hold_v  <= 1'b0;
        tx_busy <= 1'b1;
        tx_cnt  <= '0;
      end
    end
  end

  always_comb begin
    net_out.valid = tx_busy;
    net_out.data  = '0;
    for (int k = 0; k < NB; k++)
      if (tx_cnt == 16'(k)) net_out.data = obuf[8*k +: 8];
  end

  // The control unit keeps the counters inside the configured sizes.
  a_tx_range: assert property (@(posedge clk) disable iff (!rst_n)
                               tx_busy |-> tx_cnt < num_out);
endmodule
