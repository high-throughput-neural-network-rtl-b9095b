// memristor_crossbar: BEHAVIOURAL MODEL (not synthesizable hardware) of the
// analog 1T1M memristor crossbar of one neural core, with its inverter-pair
// threshold neurons and the row-select transistors used for programming.
//
// Each input i drives a pair of rows with opposite voltages (A and not-A).
// Each synapse is two memristors in a column: sigma+ on the true row and
// sigma- on the inverted row, so the weight is positive when sigma+ > sigma-.
// A column settles to DP_j = sum_i v_i (g+ - g-) / sum_i (g+ + g-); the pair
// of inverters then outputs +1 V when DP_j > 0 and -1 V otherwise. Because the
// denominator is positive, the model evaluates only the sign of the
// numerator. Row N_IN is the bias pair (beta), always driven at +1 V.
//
// Representation (this model's choices): row voltages are signed codes in
// units of 1/255 V (+255 = +1 V); a device conductance is an integer level
// 1..2^G_BITS-1 inside the programmable range; a neuron output is a bit
// (1 = +1 V, 0 = -1 V).
//
// Timing: the paper's SPICE results give 10 ns per evaluation, two cycles of
// the 200 MHz clock. Rows are sampled in the cycle `eval` is high; y and
// y_valid appear LAT cycles later and y holds until the next result. The
// valid pipeline is cleared by the asynchronous reset rst_n.
//
// Programming (Fig. 9 of the source): with the read switch of row pg_row on,
// the selected device and the column sense resistor (conductance G_SENSE)
// form a divider from V_R; col_v gives the divider output as a 16-bit fraction
// of V_R. Each cycle pg_set (pg_reset) is high applies one write pulse that
// raises (lowers) the selected device's conductance by a step that differs
// from device to device, modelling the device variation that makes a
// read-verify loop necessary. Devices start at the lowest level.
module memristor_crossbar #(
  parameter int N_IN    = 128,
  parameter int N_OUT   = 64,
  parameter int G_BITS  = 8,
  parameter int G_SENSE = 64,
  parameter int LAT     = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic signed [9:0] row_v [N_IN],
  input  logic              eval,
  output logic [N_OUT-1:0]  y,
  output logic              y_valid,
  input  logic [7:0]        pg_row,
  input  logic [7:0]        pg_col,
  input  logic              pg_neg,
  input  logic              pg_set,
  input  logic              pg_reset,
  input  logic              pg_read,
  output logic [15:0]       col_v
);
  localparam int GMAX = (1 << G_BITS) - 1;

  // Conductance levels: [row][col][0 = true line, 1 = inverted line].
  int g [N_IN+1][N_OUT][2];

  initial begin
    for (int i = 0; i <= N_IN; i++)
      for (int j = 0; j < N_OUT; j++) begin
        g[i][j][0] = 1;
        g[i][j][1] = 1;
      end
  end

  function automatic int step_of(int r, int c, int n);
    return 1 + ((r * 7 + c * 13 + n * 5) % 3);
  endfunction

  // Write pulses.
  always @(posedge clk) begin
    if ((pg_set || pg_reset) && int'(pg_row) <= N_IN && int'(pg_col) < N_OUT) begin
      automatic int r   = int'(pg_row);
      automatic int c   = int'(pg_col);
      automatic int n   = int'(pg_neg);
      automatic int cur = g[r][c][n];
      automatic int st  = step_of(r, c, n);
      if (pg_set) g[r][c][n] <= (cur + st > GMAX) ? GMAX : cur + st;
      else        g[r][c][n] <= (cur - st < 1)    ? 1    : cur - st;
    end
  end

  // Single-device read through the sense resistor divider.
  always_comb begin
    col_v = '0;
    if (pg_read && int'(pg_row) <= N_IN && int'(pg_col) < N_OUT) begin
      automatic longint gd = longint'(g[int'(pg_row)][int'(pg_col)][int'(pg_neg)]);
      col_v = 16'((gd * 65535) / (gd + longint'(G_SENSE)));
    end
  end

  // Analog evaluation and threshold, modelled as a LAT-cycle delay.
  logic [N_OUT-1:0] pipe  [LAT];
  logic [LAT-1:0]   vpipe;

  always @(posedge clk) begin
    if (eval) begin
      for (int j = 0; j < N_OUT; j++) begin
        longint num;
        num = 255 * longint'(g[N_IN][j][0]) - 255 * longint'(g[N_IN][j][1]);
        for (int i = 0; i < N_IN; i++)
          num += longint'(row_v[i]) * (longint'(g[i][j][0]) - longint'(g[i][j][1]));
        pipe[0][j] <= (num > 0);
      end
    end
    for (int k = 1; k < LAT; k++) pipe[k] <= pipe[k-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else begin
      vpipe[0] <= eval;
      for (int k = 1; k < LAT; k++) vpipe[k] <= vpipe[k-1];
    end
  end

  assign y       = pipe[LAT-1];
  assign y_valid = vpipe[LAT-1];
endmodule
