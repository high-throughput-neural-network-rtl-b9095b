// tb_weight_sram: random byte writes into a reduced array, then row reads
// compared with the testbench's copy; checks the one-cycle registered read
// and that the output holds while re is low.
module tb_weight_sram;
  localparam int ROWS = 16, COLS = 8;
  logic clk = 0, re, we;
  logic [3:0] rd_row, wr_row;
  logic [2:0] wr_col;
  logic [63:0] rd_data;
  logic [7:0] wr_data;
  logic [7:0] m [ROWS][COLS];
  int checks = 0, failures = 0;
  weight_sram #(.ROWS(ROWS), .COLS(COLS), .W(8)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    re = 0; we = 0; rd_row = 0; wr_row = 0; wr_col = 0; wr_data = 0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      @(negedge clk); we = 1; wr_row = 4'(r); wr_col = 3'(c); wr_data = 8'($urandom); m[r][c] = wr_data;
    end
    for (int n = 0; n < 300; n++) begin
      logic [63:0] held;
      @(negedge clk);
      we = $urandom % 2; wr_row = 4'($urandom); wr_col = 3'($urandom); wr_data = 8'($urandom);
      re = 0;
      @(negedge clk);
      if (we) m[wr_row][wr_col] = wr_data;
      we = 0; re = 1; rd_row = 4'($urandom);
      @(negedge clk);
      re = 0;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (rd_data[8*c +: 8] !== m[rd_row][c]) begin failures++; if (failures < 4) $display("row %0d col %0d %h %h", rd_row, c, rd_data, m[rd_row][c]); end
      end
      held = rd_data;
      rd_row = ~rd_row;
      @(negedge clk);
      checks++;
      if (rd_data !== held) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
