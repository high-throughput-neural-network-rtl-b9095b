// digital_core: SRAM-based digital neural core.
//
// The core holds N_OUT neurons with up to N_IN inputs each. Inputs of a
// pattern are processed one per cycle: input i (value x_i) selects row i of
// the weight SRAM, and all N_OUT multiply-accumulate units add W[i][j] * x_i
// to their accumulators at once. When the last input of the pattern has been
// added, each dot product is scaled (arithmetic right shift by cfg shift),
// saturated to a signed byte and stored in the output buffer. The output
// buffer is then sent to the router one neuron per cycle through the core's
// single activation lookup table. Sending pattern n overlaps the computation
// of pattern n+1, which is why one table per core is enough.
//
// Data formats: inputs and outputs are unsigned 8-bit values, weights are
// signed 8-bit; accumulators are ACC_W bits. The LUT is addressed by the
// two's-complement byte of the scaled dot product.
//
// Input buffer: each arriving value is queued together with its input index i
// (counted in arrival order, as the static schedule fixes the order). The
// queue lets inputs keep arriving while the accumulators wait for the output
// buffer: if the output buffer is still sending when a pattern finishes, the
// result stays in the accumulators and the MAC array stalls. An input
// arriving at a full queue is dropped and sets the sticky `overflow` bit.
//
// Timing: one input per cycle; the last input of a pattern reaches the
// output buffer 3 cycles after it arrives, so a 256-input pattern takes 256
// cycles plus 3 (the paper gives 1.28 us at 200 MHz = 256 cycles). Output
// bytes leave on net_out when the switch's schedule grants them.
//
// Configuration: CFG_NUM_IN, CFG_NUM_OUT, CFG_SHIFT, LUT entries at
// CFG_LUT + a, weights at CFG_WEIGHT | row << 7 | col. Sizes (256 x 128,
// 8-bit weights and values, 256-byte LUT) follow the paper; the scaling,
// saturation, queue depth and handshake are this design's choices.
module digital_core
  import nn_pkg::*;
#(
  parameter int N_IN       = 256,
  parameter int N_OUT      = 128,
  parameter int ACC_W      = 26,
  parameter int IBUF_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  flit_t       net_in,
  output flit_t       net_out,
  input  logic        net_grant,
  input  logic        cfg_we,
  input  logic [19:0] cfg_addr,
  input  logic [15:0] cfg_wdata,
  output logic        done_pulse,   // one cycle per finished pattern
  output logic        stall,        // MAC array waiting for the output buffer
  output logic        overflow
);
  localparam int IW = $clog2(N_IN);
  localparam int OW = $clog2(N_OUT);

  // ---------------- configuration ----------------
  logic [15:0] num_in, num_out;
  logic [4:0]  shift;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      num_in  <= 16'(N_IN);
      num_out <= 16'(N_OUT);
      shift   <= '0;
    end else if (cfg_we) begin
      unique case (cfg_addr)
        CFG_NUM_IN:  num_in  <= cfg_wdata;
        CFG_NUM_OUT: num_out <= cfg_wdata;
        CFG_SHIFT:   shift   <= cfg_wdata[4:0];
        default: ;
      endcase
    end
  end

  wire lut_we = cfg_we && cfg_addr[19:8] == CFG_LUT[19:8];
  wire w_we   = cfg_we && cfg_addr[19];

  // ---------------- input buffer: (i, x_i) pairs ----------------
  logic [IW-1:0] rx_i;
  logic          q_empty, q_full, q_pop;
  logic [IW+7:0] q_head;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_i     <= '0;
      overflow <= 1'b0;
    end else if (net_in.valid) begin
      if (q_full) overflow <= 1'b1;
      else rx_i <= (32'(rx_i) == int'(num_in) - 1) ? '0 : rx_i + 1'b1;
    end
  end

  sync_fifo #(.W(IW + 8), .DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk, .rst_n,
    .push(net_in.valid), .wr_data({rx_i, net_in.data}),
    .pop(q_pop), .rd_data(q_head),
    .empty(q_empty), .full(q_full), .count()
  );

  // ---------------- weight SRAM and MAC array ----------------
  logic [N_OUT*8-1:0] wrow;
  logic               va;        // wrow/xa/ia hold a valid input
  logic [7:0]         xa;
  logic [IW-1:0]      ia;
  logic               xfer_pend; // accumulators hold a finished pattern
  logic signed [ACC_W-1:0] acc   [N_OUT];
  logic signed [ACC_W-1:0] acc_n [N_OUT];

  wire mac_fire = va && !xfer_pend;
  assign q_pop  = !q_empty && (!va || mac_fire);
  assign stall  = va && xfer_pend;

  weight_sram #(.ROWS(N_IN), .COLS(N_OUT), .W(8)) u_w (
    .clk, .re(q_pop), .rd_row(q_head[IW+7:8]), .rd_data(wrow),
    .we(w_we), .wr_row(cfg_addr[IW+6:7]), .wr_col(cfg_addr[OW-1:0]),
    .wr_data(cfg_wdata[7:0])
  );

  always_comb begin
    for (int j = 0; j < N_OUT; j++)
      acc_n[j] = (ia == '0 ? ACC_W'(0) : acc[j])
               + ACC_W'($signed(wrow[8*j +: 8]) * $signed({1'b0, xa}));
  end

  // ---------------- output buffer ----------------
  logic [7:0]  obuf [N_OUT];
  logic        tx_busy;
  logic [15:0] tx_cnt;
  wire  last_in = mac_fire && (32'(ia) == int'(num_in) - 1);
  wire  tx_last = tx_busy && net_grant && (tx_cnt == num_out - 1);

  function automatic logic [7:0] scale_sat(logic signed [ACC_W-1:0] a, logic [4:0] sh);
    logic signed [ACC_W-1:0] s;
    s = a >>> sh;
    if (s > 127)       return 8'h7F;
    else if (s < -128) return 8'h80;
    else               return s[7:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      va         <= 1'b0;
      xa         <= '0;
      ia         <= '0;
      xfer_pend  <= 1'b0;
      tx_busy    <= 1'b0;
      tx_cnt     <= '0;
      done_pulse <= 1'b0;
      for (int j = 0; j < N_OUT; j++) begin
        acc[j]  <= '0;
        obuf[j] <= '0;
      end
    end else begin
      done_pulse <= 1'b0;
      if (q_pop) begin
        va <= 1'b1;
        xa <= q_head[7:0];
        ia <= q_head[IW+7:8];
      end else if (mac_fire) begin
        va <= 1'b0;
      end

      if (tx_busy && net_grant) begin
        tx_cnt <= tx_cnt + 1'b1;
        if (tx_last) tx_busy <= 1'b0;
      end

      if (mac_fire) begin
        for (int j = 0; j < N_OUT; j++) acc[j] <= acc_n[j];
        if (last_in) begin
          if (!tx_busy || tx_last) begin
            for (int j = 0; j < N_OUT; j++) obuf[j] <= scale_sat(acc_n[j], shift);
            tx_busy    <= 1'b1;
            tx_cnt     <= '0;
            done_pulse <= 1'b1;
          end else begin
            xfer_pend <= 1'b1;
          end
        end
      end else if (xfer_pend && (!tx_busy || tx_last)) begin
        for (int j = 0; j < N_OUT; j++) obuf[j] <= scale_sat(acc[j], shift);
        xfer_pend  <= 1'b0;
        tx_busy    <= 1'b1;
        tx_cnt     <= '0;
        done_pulse <= 1'b1;
      end
    end
  end

  // ---------------- activation LUT and sender ----------------
  logic [7:0] lut_out;
  activation_lut #(.AW(8), .W(8)) u_lut (
    .clk, .we(lut_we), .wr_addr(cfg_addr[7:0]), .wr_data(cfg_wdata[7:0]),
    .rd_addr(obuf[tx_cnt[OW-1:0]]), .rd_data(lut_out)
  );

  assign net_out.valid = tx_busy;
  assign net_out.data  = lut_out;

  a_tx_range: assert property (@(posedge clk) disable iff (!rst_n)
                               tx_busy |-> tx_cnt < num_out);
endmodule
