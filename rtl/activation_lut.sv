// activation_lut: activation-function lookup table of the digital core.
//
// One table per core, 2^AW entries of W bits (256 bytes for 8-bit values).
// Neuron outputs leave the core one per cycle, so a single table serves all
// neurons: the 8-bit scaled dot product addresses the table and the entry is
// the neuron output f(DP). The read is combinational (rd_addr to rd_data in
// the same cycle); the table is written, one entry per clock, when the
// network is loaded, so any function (sigmoid, threshold, ...) can be used.
module activation_lut #(
  parameter int AW = 8,
  parameter int W  = 8
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);
  logic [W-1:0] tbl [1 << AW];

  always_ff @(posedge clk) begin
    if (we) tbl[wr_addr] <= wr_data;
  end
  assign rd_data = tbl[rd_addr];
endmodule
