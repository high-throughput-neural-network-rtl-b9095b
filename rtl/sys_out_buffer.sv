// sys_out_buffer: buffer between the neural mesh and the host processor.
//
// Results leave the mesh on the east links of the last column of routers.
// Each valid flit arriving on the east link of row r is queued in the FIFO of
// that row. The host processor (or a DMA into its memory) selects a row with
// rd_row and pops one byte per rd_en; rd_valid marks the cycle after a pop
// in which rd_data holds the byte. A flit arriving at a full FIFO is dropped
// and sets the sticky overflow bit of that row.
//
// The paper only says the processor reads outputs from an on-chip buffer next
// to the neural system; the per-row FIFOs, their depth and the read port are
// this design's choices.
module sys_out_buffer
  import nn_pkg::*;
#(
  parameter int ROWS  = 8,
  parameter int DEPTH = 64,
  localparam int RW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  flit_t                   mesh_out [ROWS],
  input  logic [RW-1:0]           rd_row,
  input  logic                    rd_en,
  output logic [FLIT_W-1:0]       rd_data,
  output logic                    rd_valid,
  output logic [ROWS-1:0]         empty,
  output logic [ROWS-1:0]         overflow
);
  logic [FLIT_W-1:0] head [ROWS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic full;
    sync_fifo #(.W(FLIT_W), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .push(mesh_out[r].valid), .wr_data(mesh_out[r].data),
      .pop(rd_en && 32'(rd_row) == r), .rd_data(head[r]),
      .empty(empty[r]), .full, .count()
    );
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                         overflow[r] <= 1'b0;
      else if (mesh_out[r].valid && full) overflow[r] <= 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      rd_data  <= '0;
    end else begin
      rd_valid <= rd_en && 32'(rd_row) < ROWS && !empty[rd_row];
      rd_data  <= head[rd_row];
    end
  end
endmodule
