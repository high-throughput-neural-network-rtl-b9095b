// nn_top: streaming multicore neural processor.
//
// ROWS x COLS tiles form a 2-D mesh. Each tile is a neural core (memristor
// crossbar core by default, SRAM digital core with CORE_KIND = CORE_DIGITAL)
// and its routing switch. Sensor data from the stacked sensor chip enters
// through the IO interface on the west edge (one lane per mesh row) and
// results leave on the east edge into the output buffer that the host
// processor reads. Memristor cores with and without input DACs are spread
// evenly: tile t = r*COLS + c has DACs when t % DAC_EVERY == 0.
//
// The network is statically scheduled: a global slot counter runs from 0 to
// tdm_len-1 and repeats; every switch looks up its crosspoint setting for the
// current slot. Each hop costs one clock. Cores and the IO interface offer
// data with a valid bit and advance when their switch's schedule takes it.
//
// Host-side ports (all plain signals):
//   rt_*   write one route entry (tile, slot, output port, route).
//   cfg_*  write a core register, LUT entry or weight of one tile.
//   pg_*   memristor programming commands to the core of tile pg_tile, and
//          their answers.
//   sensor_* / proc_*   data in and results out.
//   core_event pulses when a core evaluates a pattern; core_stall,
//   core_err (overrun or input overflow), io_overflow, ob_overflow report
//   the buffers.
// Mesh size, slot count and DAC placement are this design's choices; the
// paper fixes the core sizes, the 8-bit links and the static switch.
module nn_top
  import nn_pkg::*;
#(
  parameter int         ROWS      = 8,
  parameter int         COLS      = 9,
  parameter core_kind_e CORE_KIND = CORE_MEMRISTOR,
  parameter int         SLOTS     = 256,
  parameter int         DAC_EVERY = 2,
  parameter int         IO_DEPTH  = 16,
  parameter int         OB_DEPTH  = 64,
  localparam int        NT        = ROWS * COLS,
  localparam int        TW        = (NT > 1) ? $clog2(NT) : 1,
  localparam int        SW        = $clog2(SLOTS),
  localparam int        RW        = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // TDM schedule
  input  logic [SW:0]       tdm_len,
  input  logic              rt_we,
  input  logic [TW-1:0]     rt_tile,
  input  logic [SW-1:0]     rt_slot,
  input  logic [2:0]        rt_port,
  input  route_t            rt_route,
  // core configuration
  input  logic              cfg_we,
  input  logic [TW-1:0]     cfg_tile,
  input  logic [19:0]       cfg_addr,
  input  logic [15:0]       cfg_wdata,
  // memristor programming (off-chip programmer)
  input  logic [TW-1:0]     pg_tile,
  input  logic              pg_cmd_valid,
  output logic              pg_cmd_ready,
  input  pg_cmd_t           pg_cmd,
  output logic              pg_rsp_valid,
  output logic [7:0]        pg_rsp_code,
  // sensor input (through the IO interface)
  input  logic [ROWS-1:0]   sensor_valid,
  input  logic [FLIT_W-1:0] sensor_data [ROWS],
  // host processor read port (output buffer)
  input  logic [RW-1:0]     proc_rd_row,
  input  logic              proc_rd_en,
  output logic [FLIT_W-1:0] proc_rd_data,
  output logic              proc_rd_valid,
  output logic [ROWS-1:0]   proc_empty,
  // status
  output logic [NT-1:0]     core_event,
  output logic [NT-1:0]     core_stall,
  output logic [NT-1:0]     core_err,
  output logic [ROWS-1:0]   io_overflow,
  output logic [ROWS-1:0]   ob_overflow
);
  // ---------------- global slot counter ----------------
  logic [SW-1:0] slot;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                slot <= '0;
    else if ({1'b0, slot} >= tdm_len - 1'b1)   slot <= '0;
    else                                       slot <= slot + 1'b1;
  end

  // ---------------- mesh ----------------
  flit_t sw_in  [NT][NPORTS];
  flit_t sw_out [NT][NPORTS];
  logic [NPORTS-1:0] sw_grant [NT];

  flit_t io_flit [ROWS];
  logic [ROWS-1:0] io_grant;
  flit_t east_flit [ROWS];

  logic [NT-1:0] rdy_v, rsp_v;
  logic [7:0]    rsp_c [NT];

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      localparam int T = r * COLS + c;

      // neighbour links
      if (r > 0) begin : g_n_link
        assign sw_in[T][P_N] = sw_out[T-COLS][P_S];
      end else begin : g_n_edge
        assign sw_in[T][P_N] = '0;
      end
      if (r < ROWS - 1) begin : g_s_link
        assign sw_in[T][P_S] = sw_out[T+COLS][P_N];
      end else begin : g_s_edge
        assign sw_in[T][P_S] = '0;
      end
      if (c < COLS - 1) begin : g_e_link
        assign sw_in[T][P_E] = sw_out[T+1][P_W];
      end else begin : g_e_edge
        assign sw_in[T][P_E] = '0;
      end
      if (c > 0) begin : g_w_link
        assign sw_in[T][P_W] = sw_out[T-1][P_E];
      end else begin : g_west
        assign sw_in[T][P_W] = io_flit[r];
        assign io_grant[r]   = sw_grant[T][P_W];
      end
      if (c == COLS - 1) begin : g_east
        assign east_flit[r] = sw_out[T][P_E];
      end

      routing_switch #(.SLOTS(SLOTS)) u_sw (
        .clk, .rst_n, .slot,
        .in(sw_in[T]), .out(sw_out[T]), .grant(sw_grant[T]),
        .cfg_we(rt_we && rt_tile == TW'(T)), .cfg_slot(rt_slot),
        .cfg_port(rt_port), .cfg_route(rt_route)
      );

      wire cfg_sel = cfg_we && cfg_tile == TW'(T);
      wire pg_sel  = pg_tile == TW'(T);

      if (CORE_KIND == CORE_MEMRISTOR) begin : g_mem
        memristor_core #(.HAS_DAC(T % DAC_EVERY == 0)) u_core (
          .clk, .rst_n,
          .net_in(sw_out[T][P_L]), .net_out(sw_in[T][P_L]), .net_grant(sw_grant[T][P_L]),
          .cfg_we(cfg_sel), .cfg_addr, .cfg_wdata,
          .pg_cmd_valid(pg_cmd_valid && pg_sel), .pg_cmd_ready(rdy_v[T]), .pg_cmd,
          .pg_rsp_valid(rsp_v[T]), .pg_rsp_code(rsp_c[T]),
          .eval_pulse(core_event[T]), .overrun(core_err[T])
        );
        assign core_stall[T] = 1'b0;
      end else begin : g_dig
        digital_core u_core (
          .clk, .rst_n,
          .net_in(sw_out[T][P_L]), .net_out(sw_in[T][P_L]), .net_grant(sw_grant[T][P_L]),
          .cfg_we(cfg_sel), .cfg_addr, .cfg_wdata,
          .done_pulse(core_event[T]), .stall(core_stall[T]), .overflow(core_err[T])
        );
        assign rdy_v[T] = 1'b0;
        assign rsp_v[T] = 1'b0;
        assign rsp_c[T] = '0;
      end
    end
  end

  // programming answers of the selected tile
  always_comb begin
    pg_cmd_ready = 1'b0;
    pg_rsp_valid = 1'b0;
    pg_rsp_code  = '0;
    for (int t = 0; t < NT; t++)
      if (pg_tile == TW'(t)) begin
        pg_cmd_ready = rdy_v[t];
        pg_rsp_valid = rsp_v[t];
        pg_rsp_code  = rsp_c[t];
      end
  end

  // ---------------- edges ----------------
  io_interface #(.ROWS(ROWS), .DEPTH(IO_DEPTH)) u_io (
    .clk, .rst_n, .sensor_valid, .sensor_data,
    .mesh_in(io_flit), .mesh_grant(io_grant), .overflow(io_overflow)
  );

  sys_out_buffer #(.ROWS(ROWS), .DEPTH(OB_DEPTH)) u_ob (
    .clk, .rst_n, .mesh_out(east_flit),
    .rd_row(proc_rd_row), .rd_en(proc_rd_en), .rd_data(proc_rd_data),
    .rd_valid(proc_rd_valid), .empty(proc_empty), .overflow(ob_overflow)
  );
endmodule
