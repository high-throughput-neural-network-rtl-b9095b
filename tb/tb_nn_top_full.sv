// tb_nn_top_full: one complete operation of the processor at its default
// size (8 x 9 mesh of 128 x 64 memristor cores, 256-slot switches).
// A two-layer network runs across tiles 0 and 1 of row 0: tile 0 (DAC core)
// takes a 128-pixel pattern and computes 64 neurons; its 8 output bytes go
// to tile 1 (hidden-layer core, 64 binary inputs), whose 64 outputs travel
// east across tiles 2..8 into the output buffer, where the host reads them.
// Weights (+/-1, three to five per neuron) are written with the pulse /
// read-verify loop. Results are compared with a model of the network.
module tb_nn_top_full;
  import nn_pkg::*;
  localparam int F = 256, ROWS = 8, COLS = 9, NT = ROWS * COLS;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic [8:0] tdm_len = 9'(F);
  logic rt_we; logic [6:0] rt_tile; logic [7:0] rt_slot; logic [2:0] rt_port; route_t rt_route;
  logic cfg_we; logic [6:0] cfg_tile; logic [19:0] cfg_addr; logic [15:0] cfg_wdata;
  logic [6:0] pg_tile; logic pg_cmd_valid, pg_cmd_ready, pg_rsp_valid; pg_cmd_t pg_cmd; logic [7:0] pg_rsp_code;
  logic [ROWS-1:0] sensor_valid; logic [7:0] sensor_data [ROWS];
  logic [2:0] proc_rd_row; logic proc_rd_en, proc_rd_valid; logic [7:0] proc_rd_data; logic [ROWS-1:0] proc_empty;
  logic [NT-1:0] core_event, core_stall, core_err; logic [ROWS-1:0] io_overflow, ob_overflow;

  nn_top dut (.*);

  task automatic route(input int t, input int s, input port_e outp, input port_e src);
    @(negedge clk); rt_we = 1; rt_tile = 7'(t); rt_slot = 8'(s); rt_port = 3'(outp);
    rt_route.en = 1; rt_route.src = src;
    @(negedge clk); rt_we = 0;
  endtask
  task automatic ccfg(input int t, input logic [19:0] a, input int d);
    @(negedge clk); cfg_we = 1; cfg_tile = 7'(t); cfg_addr = a; cfg_wdata = 16'(d);
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic pg(input int t, input pg_op_e op, input int r, input int c, input bit n, output int code);
    pg_tile = 7'(t); pg_cmd.op = op; pg_cmd.row = 8'(r); pg_cmd.col = 8'(c); pg_cmd.neg = n;
    pg_cmd_valid = 1;
    @(posedge clk);
    while (!pg_cmd_ready) @(posedge clk);
    #1 pg_cmd_valid = 0;
    while (!pg_rsp_valid) @(posedge clk);
    code = int'(pg_rsp_code);
    @(negedge clk);
  endtask
  task automatic program_dev(input int t, input int r, input int c, input bit n);
    int code, guard;
    guard = 0;
    pg(t, PG_READ, r, c, n, code);
    while (code < 156 && guard < 200) begin
      pg(t, PG_SET, r, c, n, code);
      pg(t, PG_READ, r, c, n, code);
      guard++;
    end
    chk(code >= 156, "device programmed");
  endtask

  int w0 [129][64];   // row 128 = bias
  int w1 [129][64];
  logic [7:0] expq[$];
  int got = 0;

  always @(negedge clk) begin
    proc_rd_en = 0;
    if (rst_n) begin
      if (proc_rd_valid) begin
        chk(expq.size() != 0 && proc_rd_data == expq[0], $sformatf("result byte %0d: %h exp %h", got, proc_rd_data, expq.size() ? expq[0] : 8'h00));
        if (expq.size()) void'(expq.pop_front());
        got++;
      end
      if (!proc_empty[0]) begin proc_rd_row = 0; proc_rd_en = 1; end
    end
  end

  localparam int NPAT = 2;

  initial begin
    logic [127:0] px [NPAT];
    rt_we = 0; rt_tile = 0; rt_slot = 0; rt_port = 0; rt_route = '0;
    cfg_we = 0; cfg_tile = 0; cfg_addr = 0; cfg_wdata = 0;
    pg_tile = 0; pg_cmd_valid = 0; pg_cmd = '0;
    sensor_valid = '0; for (int r = 0; r < ROWS; r++) sensor_data[r] = 0;
    proc_rd_row = 0; proc_rd_en = 0;

    // clear the schedule of every switch (reset held low)
    for (int t = 0; t < NT; t++) for (int s = 0; s < F; s++) for (int p = 0; p < NPORTS; p++) begin
      @(negedge clk); rt_we = 1; rt_tile = 7'(t); rt_slot = 8'(s); rt_port = 3'(p); rt_route = '0;
    end
    @(negedge clk); rt_we = 0;
    for (int s = 0; s < 128; s++) route(0, s, P_L, P_W);
    for (int s = 140; s < 148; s++) route(0, s, P_E, P_L);
    for (int s = 141; s < 149; s++) route(1, s, P_L, P_W);
    for (int s = 160; s < 168; s++) route(1, s, P_E, P_L);
    for (int c = 2; c < COLS; c++) for (int s = 160; s < 168; s++) route(c, s + c - 1, P_E, P_W);
    @(negedge clk); rst_n = 1;

    ccfg(0, CFG_NUM_IN, 128); ccfg(0, CFG_NUM_OUT, 8);
    ccfg(1, CFG_NUM_IN, 8);   ccfg(1, CFG_NUM_OUT, 8);

    for (int i = 0; i < 129; i++) for (int j = 0; j < 64; j++) begin w0[i][j] = 0; w1[i][j] = 0; end
    for (int j = 0; j < 64; j++) begin
      int n;
      n = 0;
      while (n < 3) begin int r; r = int'($urandom % 128); if (w0[r][j] == 0) begin w0[r][j] = ($urandom % 2) ? 1 : -1; n++; end end
      w1[128][j] = ($urandom % 2) ? 1 : -1; n = 1;
      while (n < 5) begin int r; r = int'($urandom % 64); if (w1[r][j] == 0) begin w1[r][j] = ($urandom % 2) ? 1 : -1; n++; end end
    end
    ccfg(0, CFG_MODE, 1); ccfg(1, CFG_MODE, 1);
    for (int i = 0; i < 129; i++) for (int j = 0; j < 64; j++) begin
      if (w0[i][j] != 0) program_dev(0, i, j, w0[i][j] < 0);
      if (w1[i][j] != 0) program_dev(1, i, j, w1[i][j] < 0);
    end
    ccfg(0, CFG_MODE, 0); ccfg(1, CFG_MODE, 0);

    // model
    for (int k = 0; k < NPAT; k++) begin
      logic [63:0] h, o;
      for (int i = 0; i < 128; i++) px[k][i] = 1'($urandom);
      for (int j = 0; j < 64; j++) begin
        int s;
        s = 0;
        for (int i = 0; i < 128; i++) s += w0[i][j] * (px[k][i] ? 1 : -1);
        h[j] = s > 0;
      end
      for (int j = 0; j < 64; j++) begin
        int s;
        s = w1[128][j];
        for (int i = 0; i < 64; i++) s += w1[i][j] * (h[i] ? 1 : -1);
        o[j] = s > 0;
      end
      for (int b = 0; b < 8; b++) expq.push_back(o[8*b +: 8]);
    end

    // stream: pixel i of a frame is pushed two slots before it is taken
    while (dut.slot != 8'(F - 2)) @(negedge clk);
    for (int k = 0; k < NPAT; k++) begin
      for (int i = 0; i < 128; i++) begin
        sensor_valid[0] = 1'b1; sensor_data[0] = px[k][i] ? 8'd255 : 8'd0;
        @(negedge clk);
      end
      sensor_valid = '0;
      while (dut.slot != 8'(F - 2)) @(negedge clk);
    end
    repeat (2 * F) @(negedge clk);
    chk(got == 8 * NPAT && expq.size() == 0, $sformatf("received %0d result bytes", got));
    chk(core_err == '0 && io_overflow == '0 && ob_overflow == '0, "no buffer errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
