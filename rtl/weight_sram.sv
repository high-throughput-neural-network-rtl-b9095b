// weight_sram: synaptic weight memory of the digital neural core.
//
// ROWS x COLS bytes; row i holds the weights W[i][j] that connect
// pre-synaptic input i to each of the COLS neurons of the core. A read
// decodes one row and returns all of its weights at once (the row decoder and
// SRAM array of the paper's digital core), so that every neuron receives its
// weight for the current input in the same cycle. The read is registered:
// with re high at a clock edge, rd_data shows row rd_row from the next cycle
// and holds until the next read. Writes (used when loading a trained
// network) store one byte at (wr_row, wr_col). Size follows the paper's
// chosen core: 256 x 128 bytes.
module weight_sram #(
  parameter int ROWS = 256,
  parameter int COLS = 128,
  parameter int W    = 8
) (
  input  logic                    clk,
  input  logic                    re,
  input  logic [$clog2(ROWS)-1:0] rd_row,
  output logic [COLS*W-1:0]       rd_data,
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  input  logic [$clog2(COLS)-1:0] wr_col,
  input  logic [W-1:0]            wr_data
);
  logic [COLS*W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[wr_row][wr_col*W +: W] <= wr_data;
    if (re) rd_data <= mem[rd_row];
  end
endmodule
