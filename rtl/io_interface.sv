// io_interface: entry point of sensor data into the neural mesh.
//
// The sensor chip is stacked on the processing chip and sends 8-bit pixels
// down through-silicon vias. The paper places an IO interface along the west
// side of the mesh but does not describe its insides. Here it is one FIFO per
// mesh row: a pixel from the sensor lane of row r is queued, and the head of
// the queue is offered as a valid flit on the west input of the first router
// of row r. The router's static schedule decides when that input is taken;
// its grant pops the queue. A push into a full queue is dropped and sets the
// sticky overflow bit of that row.
//
// Timing: a pixel pushed in cycle t is offered from cycle t+1.
// FIFO depth is this design's choice.
module io_interface
  import nn_pkg::*;
#(
  parameter int ROWS  = 8,
  parameter int DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ROWS-1:0]   sensor_valid,
  input  logic [FLIT_W-1:0] sensor_data [ROWS],
  output flit_t             mesh_in     [ROWS],
  input  logic [ROWS-1:0]   mesh_grant,
  output logic [ROWS-1:0]   overflow
);
  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic              empty, full;
    logic [FLIT_W-1:0] head;

    sync_fifo #(.W(FLIT_W), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .push(sensor_valid[r]), .wr_data(sensor_data[r]),
      .pop(mesh_grant[r]), .rd_data(head),
      .empty, .full, .count()
    );

    assign mesh_in[r].valid = !empty;
    assign mesh_in[r].data  = head;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                      overflow[r] <= 1'b0;
      else if (sensor_valid[r] && full) overflow[r] <= 1'b1;
    end
  end
endmodule
