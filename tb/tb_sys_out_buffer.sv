// tb_sys_out_buffer: flits arriving on the east links are read back by row
// in arrival order through the processor port; overflow is flagged when a
// row's queue is full.
module tb_sys_out_buffer;
  import nn_pkg::*;
  localparam int ROWS = 2, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  flit_t mesh_out [ROWS];
  logic [0:0] rd_row;
  logic rd_en, rd_valid;
  logic [FLIT_W-1:0] rd_data;
  logic [ROWS-1:0] empty, overflow;
  int checks = 0, failures = 0;
  byte unsigned q [ROWS][$];

  sys_out_buffer #(.ROWS(ROWS), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    byte unsigned exp_b;
    bit exp_v;
    rd_row = 0; rd_en = 0;
    for (int r = 0; r < ROWS; r++) mesh_out[r] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 500; cyc++) begin
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin
        mesh_out[r].valid = ($urandom % 2) && q[r].size() < DEPTH;
        mesh_out[r].data  = 8'($urandom);
      end
      rd_row = 1'($urandom);
      rd_en  = $urandom % 2;
      exp_v  = rd_en && q[rd_row].size() != 0;
      exp_b  = (q[rd_row].size() != 0) ? q[rd_row][0] : 0;
      @(posedge clk);
      if (exp_v) void'(q[rd_row].pop_front());
      for (int r = 0; r < ROWS; r++) if (mesh_out[r].valid) q[r].push_back(mesh_out[r].data);
      #1;
      chk(rd_valid == exp_v, "rd_valid");
      if (exp_v) chk(rd_data == exp_b, "rd_data order");
    end
    @(negedge clk); rd_en = 0; mesh_out[1].valid = 1; mesh_out[0].valid = 0;
    repeat (DEPTH + 1) @(posedge clk);
    #1 chk(overflow == 2'b10, "overflow on row 1 only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
