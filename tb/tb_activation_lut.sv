// tb_activation_lut: loads a sigmoid-like table (computed here) and a
// random table, and checks every address reads back combinationally.
module tb_activation_lut;
  logic clk = 0, we;
  logic [7:0] wr_addr, wr_data, rd_addr, rd_data;
  logic [7:0] m [256];
  int checks = 0, failures = 0;
  activation_lut #(.AW(8), .W(8)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    we = 0; wr_addr = 0; wr_data = 0; rd_addr = 0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int a = 0; a < 256; a++) begin
        real x;
        x = real'(int'(signed'(8'(a)))) / 32.0;
        @(negedge clk); we = 1; wr_addr = 8'(a);
        wr_data = pass == 0 ? 8'(int'(255.0 / (1.0 + $exp(-x)))) : 8'($urandom);
        m[a] = wr_data;
      end
      @(negedge clk); we = 0;
      for (int a = 0; a < 256; a++) begin
        rd_addr = 8'(a); #1;
        checks++;
        if (rd_data !== m[a]) begin failures++; $display("addr %0d", a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
