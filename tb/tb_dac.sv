// tb_dac: every 8-bit code must map to 2*code-255 (code 0 = -1 V,
// code 255 = +1 V, in units of 1/255 V), and the mapping must be monotonic.
module tb_dac;
  logic [7:0] code;
  logic signed [9:0] v;
  int checks = 0, failures = 0;
  dac #(.BITS(8)) dut (.code, .v);
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int prev = -1000;
    for (int c = 0; c < 256; c++) begin
      code = 8'(c); #1;
      checks++;
      if (int'(v) != 2 * c - 255) begin failures++; $display("code %0d -> %0d", c, v); end
      checks++;
      if (int'(v) <= prev) failures++;
      prev = int'(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
