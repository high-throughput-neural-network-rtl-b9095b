// tb_memristor_crossbar: programs devices with write pulses, reads them back
// through the sense divider, then evaluates random input vectors and checks
// each neuron's threshold output against the sign of sum v_i (g+ - g-)
// computed by the testbench from its own record of the programmed levels.
// Also checks the two-cycle evaluation latency and that reset clears the
// result-valid pipeline.
module tb_memristor_crossbar;
  localparam int NI = 8, NO = 4, GS = 64;
  logic clk = 0, rst_n = 0;
  logic signed [9:0] row_v [NI];
  logic eval, y_valid;
  logic [NO-1:0] y;
  logic [7:0] pg_row, pg_col;
  logic pg_neg, pg_set, pg_reset, pg_read;
  logic [15:0] col_v;
  int checks = 0, failures = 0;
  int g [NI+1][NO][2];

  memristor_crossbar #(.N_IN(NI), .N_OUT(NO), .G_SENSE(GS), .LAT(2)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int step_of(int r, int c, int n);
    return 1 + ((r * 7 + c * 13 + n * 5) % 3);
  endfunction

  initial begin
    eval = 0; pg_set = 0; pg_reset = 0; pg_read = 0; pg_row = 0; pg_col = 0; pg_neg = 0;
    for (int i = 0; i < NI; i++) row_v[i] = 0;
    for (int i = 0; i <= NI; i++) for (int j = 0; j < NO; j++) begin g[i][j][0] = 1; g[i][j][1] = 1; end
    repeat (3) @(negedge clk);
    checks++; if (y_valid) begin failures++; $display("y_valid during reset"); end
    rst_n = 1;
    repeat (3) @(negedge clk);
    checks++; if (y_valid) begin failures++; $display("y_valid without eval"); end
    // random number of SET pulses on every device, then some RESETs
    for (int i = 0; i <= NI; i++) for (int j = 0; j < NO; j++) for (int n = 0; n < 2; n++) begin
      int np, nr;
      np = $urandom % 40; nr = $urandom % 10;
      pg_row = 8'(i); pg_col = 8'(j); pg_neg = n[0];
      pg_set = 1;
      repeat (np) begin @(negedge clk); g[i][j][n] = (g[i][j][n] + step_of(i,j,n) > 255) ? 255 : g[i][j][n] + step_of(i,j,n); end
      pg_set = 0; pg_reset = 1;
      repeat (nr) begin @(negedge clk); g[i][j][n] = (g[i][j][n] - step_of(i,j,n) < 1) ? 1 : g[i][j][n] - step_of(i,j,n); end
      pg_reset = 0;
      pg_read = 1; #1;
      checks++;
      if (int'(col_v) != (g[i][j][n] * 65535) / (g[i][j][n] + GS)) begin
        failures++; $display("read %0d,%0d,%0d: %0d", i, j, n, col_v);
      end
      pg_read = 0;
    end
    // evaluations
    for (int t = 0; t < 200; t++) begin
      logic [NO-1:0] expy;
      for (int i = 0; i < NI; i++) row_v[i] = 10'(int'($urandom % 511) - 255);
      for (int j = 0; j < NO; j++) begin
        longint num;
        num = 255 * longint'(g[NI][j][0] - g[NI][j][1]);
        for (int i = 0; i < NI; i++) num += longint'(row_v[i]) * (g[i][j][0] - g[i][j][1]);
        expy[j] = num > 0;
      end
      eval = 1; @(negedge clk); eval = 0;
      for (int i = 0; i < NI; i++) row_v[i] = 0;   // inputs may change after sampling
      checks++; if (y_valid) failures++;
      @(negedge clk);
      checks++; if (!y_valid) begin failures++; $display("latency"); end
      checks++; if (y != expy) begin failures++; $display("y %b exp %b", y, expy); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
