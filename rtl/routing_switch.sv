// routing_switch: SRAM-configured static routing switch of one mesh tile.
//
// The switch connects five 8-bit ports: the four mesh neighbours (N, E, S, W)
// and its own neural core (L). Like the paper's switch it is a crossbar whose
// crosspoints are set by SRAM cells, so any input can reach any output,
// several outputs can take the same input (broadcast), and the core's output
// can be sent straight back into the core (recurrent or multi-layer use of one
// core). The network is statically time multiplexed: the SRAM holds one
// crosspoint setting per time slot, and the global slot number selects the
// setting in use.
//
// Interface: in[p]/out[p] are flits (valid + 8-bit data) per port. grant[p] is
// high when some output takes input p in the current slot; a source (core or
// IO interface) uses it to advance to its next value. The schedule is written
// through cfg_we/cfg_slot/cfg_port/cfg_route.
//
// Timing: outputs are registered, one clock per hop. The paper's switch uses
// pass transistors (no register); the register is this design's choice, which
// keeps the mesh free of combinational paths between tiles. The number of
// slots (SLOTS) is also this design's choice; the paper gives none.
module routing_switch
  import nn_pkg::*;
#(
  parameter int SLOTS = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(SLOTS)-1:0] slot,
  input  flit_t                    in    [NPORTS],
  output flit_t                    out   [NPORTS],
  output logic  [NPORTS-1:0]       grant,
  input  logic                     cfg_we,
  input  logic [$clog2(SLOTS)-1:0] cfg_slot,
  input  logic [2:0]               cfg_port,
  input  route_t                   cfg_route
);

  // Crosspoint SRAM: one route entry per slot and output port.
  route_t tbl [SLOTS][NPORTS];

  always_ff @(posedge clk) begin
    if (cfg_we && cfg_port < 3'(NPORTS))
      tbl[cfg_slot][cfg_port] <= cfg_route;
  end

  route_t cur [NPORTS];
  always_comb begin
    for (int p = 0; p < NPORTS; p++) cur[p] = tbl[slot][p];
  end

  always_comb begin
    grant = '0;
    for (int p = 0; p < NPORTS; p++)
      if (cur[p].en && 32'(cur[p].src) < NPORTS) grant[cur[p].src] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPORTS; p++) out[p] <= '0;
    end else begin
      for (int p = 0; p < NPORTS; p++)
        out[p] <= (cur[p].en && 32'(cur[p].src) < NPORTS) ? in[cur[p].src] : '0;
    end
  end

endmodule
