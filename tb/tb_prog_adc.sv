// tb_prog_adc: converts random and corner voltages; checks the rounded code
// and that done arrives exactly CONV_CYC cycles after start.
module tb_prog_adc;
  localparam int CONV = 4;
  logic clk = 0, rst_n = 0, start, done;
  logic [15:0] vin;
  logic [7:0] code;
  int checks = 0, failures = 0;
  prog_adc #(.BITS(8), .CONV_CYC(CONV)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    start = 0; vin = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      int v, lat, expc;
      v = (n == 0) ? 0 : (n == 1) ? 65535 : (n == 2) ? 32767 : int'($urandom % 65536);
      expc = (v * 255 + 32767) / 65535;
      @(negedge clk); vin = 16'(v); start = 1;
      @(negedge clk); start = 0; vin = 16'($urandom);  // input may change after sampling
      lat = 1;
      while (!done && lat < 20) begin @(negedge clk); lat++; end
      checks++;
      if (lat != CONV) begin failures++; $display("latency %0d", lat); end
      checks++;
      if (int'(code) != expc) begin failures++; $display("v=%0d code=%0d exp=%0d", v, code, expc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
