// tb_io_interface: checks that sensor pixels of each row come out on that
// row's mesh link in order, are held until the router grants them, and that
// a push into a full queue sets the overflow bit.
module tb_io_interface;
  import nn_pkg::*;
  localparam int ROWS = 2, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic [ROWS-1:0] sensor_valid, mesh_grant, overflow;
  logic [FLIT_W-1:0] sensor_data [ROWS];
  flit_t mesh_in [ROWS];
  int checks = 0, failures = 0;
  byte unsigned q [ROWS][$];

  io_interface #(.ROWS(ROWS), .DEPTH(DEPTH)) dut (.*);
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
    sensor_valid = '0; mesh_grant = '0;
    for (int r = 0; r < ROWS; r++) sensor_data[r] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 600; cyc++) begin
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) begin
        // check the offered head against the model
        chk(mesh_in[r].valid == (q[r].size() != 0), "valid");
        if (q[r].size() != 0) chk(mesh_in[r].data == q[r][0], "data order");
        sensor_valid[r] = ($urandom % 3 == 0) && q[r].size() < DEPTH;
        sensor_data[r]  = 8'($urandom);
        mesh_grant[r]   = $urandom % 2;
      end
      @(posedge clk);
      for (int r = 0; r < ROWS; r++) begin
        if (mesh_grant[r] && q[r].size() != 0) void'(q[r].pop_front());
        if (sensor_valid[r]) q[r].push_back(sensor_data[r]);
      end
    end
    // overflow: fill row 0 with no grants
    @(negedge clk); mesh_grant = '0; sensor_valid = 2'b01;
    repeat (DEPTH + 1) @(posedge clk);
    #1 chk(overflow[0] == 1'b1, "overflow set");
    chk(overflow[1] == 1'b0, "no overflow on row 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
