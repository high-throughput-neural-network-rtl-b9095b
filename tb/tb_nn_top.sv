// tb_nn_top: end-to-end test of the multicore neural processor.
//
// Instance M (2 x 3 mesh of memristor cores, 16-slot TDM frame):
//  * Row 0 runs a two-layer network over two tiles. Tile 0 (first-layer core
//    with DACs) receives 8 pixels per frame from the IO interface and
//    computes 16 threshold neurons; its two output bytes travel east to
//    tile 1 (hidden-layer core), which computes 8 neurons; that byte crosses
//    tile 2 and lands in the output buffer read by the host.
//  * Row 1 runs two pipelined layers on one core (tile 3): its first output
//    byte is routed by its own switch straight back into it, as the second
//    input byte of the next pattern; its second output byte leaves east.
//  * All weights are written by an off-chip programmer model using the
//    pulse / ADC read-verify loop in programming mode, then the cores are
//    switched to run mode.
//  Every output byte is compared with a model of the network (sign of the
//  weighted sums). Weights are +/-1 with an odd number of non-zero terms
//  and pixels are 0 or 255, so no neuron sits on its threshold.
//
// Instance D (1 x 2 mesh of SRAM digital cores): 8 pixels per frame into
// tile 0, four 8-bit neuron outputs through the activation LUT, out east.
//
// Mechanisms counted (each must occur): TDM frame wrap, IO injections,
// DAC-core and binary-core evaluations, multi-hop transfers between cores,
// loopback into the same core, programming commands, mode switches,
// output-buffer reads, digital-core patterns.
module tb_nn_top;
  import nn_pkg::*;
  localparam int F = 16;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // ================= instance M =================
  localparam int R = 2, C = 3, NT = R * C;
  logic [4:0] tdm_len = 5'(F);
  logic rt_we; logic [2:0] rt_tile; logic [3:0] rt_slot; logic [2:0] rt_port; route_t rt_route;
  logic cfg_we; logic [2:0] cfg_tile; logic [19:0] cfg_addr; logic [15:0] cfg_wdata;
  logic [2:0] pg_tile; logic pg_cmd_valid, pg_cmd_ready, pg_rsp_valid; pg_cmd_t pg_cmd; logic [7:0] pg_rsp_code;
  logic [R-1:0] sensor_valid; logic [7:0] sensor_data [R];
  logic [0:0] proc_rd_row; logic proc_rd_en, proc_rd_valid; logic [7:0] proc_rd_data; logic [R-1:0] proc_empty;
  logic [NT-1:0] core_event, core_stall, core_err; logic [R-1:0] io_overflow, ob_overflow;

  nn_top #(.ROWS(R), .COLS(C), .SLOTS(F), .CORE_KIND(CORE_MEMRISTOR)) dut (.*);

  // ================= instance D =================
  logic d_rst_n = 0;
  logic d_rt_we; logic [0:0] d_rt_tile; logic [3:0] d_rt_slot; logic [2:0] d_rt_port; route_t d_rt_route;
  logic d_cfg_we; logic [0:0] d_cfg_tile; logic [19:0] d_cfg_addr; logic [15:0] d_cfg_wdata;
  logic d_pg_ready, d_pg_rsp_valid; logic [7:0] d_pg_code;
  logic [0:0] d_sensor_valid; logic [7:0] d_sensor_data [1];
  logic d_rd_en, d_rd_valid; logic [7:0] d_rd_data; logic [0:0] d_empty;
  logic [1:0] d_event, d_stall, d_err; logic [0:0] d_io_ovf, d_ob_ovf;

  nn_top #(.ROWS(1), .COLS(2), .SLOTS(F), .CORE_KIND(CORE_DIGITAL)) dut_d (
    .clk, .rst_n(d_rst_n), .tdm_len,
    .rt_we(d_rt_we), .rt_tile(d_rt_tile), .rt_slot(d_rt_slot), .rt_port(d_rt_port), .rt_route(d_rt_route),
    .cfg_we(d_cfg_we), .cfg_tile(d_cfg_tile), .cfg_addr(d_cfg_addr), .cfg_wdata(d_cfg_wdata),
    .pg_tile(1'b0), .pg_cmd_valid(1'b0), .pg_cmd_ready(d_pg_ready), .pg_cmd('0),
    .pg_rsp_valid(d_pg_rsp_valid), .pg_rsp_code(d_pg_code),
    .sensor_valid(d_sensor_valid), .sensor_data(d_sensor_data),
    .proc_rd_row(1'b0), .proc_rd_en(d_rd_en), .proc_rd_data(d_rd_data), .proc_rd_valid(d_rd_valid),
    .proc_empty(d_empty), .core_event(d_event), .core_stall(d_stall), .core_err(d_err),
    .io_overflow(d_io_ovf), .ob_overflow(d_ob_ovf));

  // ---------------- mechanism counters ----------------
  int n_frames = 0, n_inject = 0, n_eval_dac = 0, n_eval_bin = 0, n_hop = 0, n_loop = 0;
  int n_pg = 0, n_mode = 0, n_read = 0, n_dig = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.slot == 4'(F - 1)) n_frames++;
    if (dut.io_grant[0] && dut.io_flit[0].valid) n_inject++;
    if (core_event[0]) n_eval_dac++;
    if (core_event[1] || core_event[3]) n_eval_bin++;
    if (dut.sw_out[0][P_E].valid) n_hop++;
    if (dut.sw_grant[3][P_L] && dut.sw_in[3][P_L].valid && dut.g_r[1].g_c[0].u_sw.cur[P_L].en
        && dut.g_r[1].g_c[0].u_sw.cur[P_L].src == P_L) n_loop++;
    if (pg_cmd_valid && pg_cmd_ready) n_pg++;
    if (proc_rd_valid) n_read++;
    if (d_event[0]) n_dig++;
  end

  // ---------------- host tasks ----------------
  task automatic route(input int t, input int s, input port_e outp, input port_e src);
    @(negedge clk); rt_we = 1; rt_tile = 3'(t); rt_slot = 4'(s); rt_port = 3'(outp);
    rt_route.en = 1; rt_route.src = src;
    @(negedge clk); rt_we = 0;
  endtask
  task automatic droute(input int t, input int s, input port_e outp, input port_e src);
    @(negedge clk); d_rt_we = 1; d_rt_tile = 1'(t); d_rt_slot = 4'(s); d_rt_port = 3'(outp);
    d_rt_route.en = 1; d_rt_route.src = src;
    @(negedge clk); d_rt_we = 0;
  endtask
  task automatic ccfg(input int t, input logic [19:0] a, input int d);
    @(negedge clk); cfg_we = 1; cfg_tile = 3'(t); cfg_addr = a; cfg_wdata = 16'(d);
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic dcfg(input logic [19:0] a, input int d);
    @(negedge clk); d_cfg_we = 1; d_cfg_tile = 1'b0; d_cfg_addr = a; d_cfg_wdata = 16'(d);
    @(negedge clk); d_cfg_we = 0;
  endtask
  task automatic pg(input int t, input pg_op_e op, input int r, input int c, input bit n, output int code);
    pg_tile = 3'(t); pg_cmd.op = op; pg_cmd.row = 8'(r); pg_cmd.col = 8'(c); pg_cmd.neg = n;
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

  // ---------------- network weights (+1/-1/0), last row = bias ----------------
  int w0 [9][16];    // tile 0: 8 pixels -> 16
  int w1 [17][8];    // tile 1: 16 -> 8
  int w3 [17][16];   // tile 3: cols 0..7 from rows 0..7, cols 8..15 from rows 8..15

  // choose k (odd) non-zero entries among candidate rows for a column
  task automatic pick(ref int w [17][16], input int col, input int lo, input int hi, input int k, input bit bias);
    int n;
    n = 0;
    if (bias) begin w[16][col] = ($urandom % 2) ? 1 : -1; n = 1; end
    while (n < k) begin
      int r;
      r = lo + int'($urandom % (hi - lo + 1));
      if (w[r][col] == 0) begin w[r][col] = ($urandom % 2) ? 1 : -1; n++; end
    end
  endtask

  function automatic int sgn_sum(int s);
    return s > 0 ? 1 : 0;
  endfunction

  // ---------------- expected output streams ----------------
  logic [7:0] exp0[$], exp1[$], expd[$];
  logic [7:0] l1_prev;   // tile 3 layer-1 result of previous pattern

  function automatic logic [15:0] tile0_eval(logic [7:0] px);
    logic [15:0] y;
    for (int j = 0; j < 16; j++) begin
      int s;
      s = 0;
      for (int i = 0; i < 8; i++) s += w0[i][j] * (px[i] ? 1 : -1);  // pixel 255 -> +1 V, 0 -> -1 V
      y[j] = s > 0;
    end
    return y;
  endfunction
  function automatic logic [7:0] tile1_eval(logic [15:0] x);
    logic [7:0] y;
    for (int j = 0; j < 8; j++) begin
      int s;
      s = w1[16][j];
      for (int i = 0; i < 16; i++) s += w1[i][j] * (x[i] ? 1 : -1);
      y[j] = s > 0;
    end
    return y;
  endfunction
  function automatic logic [15:0] tile3_eval(logic [7:0] sx, logic [7:0] fb, bit fb_present);
    logic [15:0] y;
    for (int j = 0; j < 16; j++) begin
      int s;
      s = w3[16][j];
      for (int i = 0; i < 8; i++) s += w3[i][j] * (sx[i] ? 1 : -1);
      if (fb_present) for (int i = 0; i < 8; i++) s += w3[8 + i][j] * (fb[i] ? 1 : -1);
      y[j] = s > 0;
    end
    return y;
  endfunction

  // digital core model
  logic signed [7:0] dw [8][4];
  logic [7:0] dlut [256];
  localparam int DSHIFT = 4;

  // host reads both output buffers continuously and checks the order
  int got0 = 0, got1 = 0, gotd = 0;
  logic rd_pend_row;
  always @(negedge clk) begin
    proc_rd_en = 0; d_rd_en = 0;
    if (rst_n) begin
      if (proc_rd_valid) begin
        if (rd_pend_row == 0) begin
          chk(exp0.size() != 0 && proc_rd_data == exp0[0], $sformatf("row 0 result %0d: %h exp %h", got0, proc_rd_data, exp0.size() ? exp0[0] : 8'hxx));
          if (exp0.size()) void'(exp0.pop_front());
          got0++;
        end else begin
          chk(exp1.size() != 0 && proc_rd_data == exp1[0], $sformatf("row 1 result %0d: %h exp %h", got1, proc_rd_data, exp1.size() ? exp1[0] : 8'hxx));
          if (exp1.size()) void'(exp1.pop_front());
          got1++;
        end
      end
      if (!proc_empty[0]) begin proc_rd_row = 0; proc_rd_en = 1; rd_pend_row = 0; end
      else if (!proc_empty[1]) begin proc_rd_row = 1; proc_rd_en = 1; rd_pend_row = 1; end
    end
    if (d_rst_n) begin
      if (d_rd_valid) begin
        chk(expd.size() != 0 && d_rd_data == expd[0], $sformatf("digital result %0d: %h exp %h", gotd, d_rd_data, expd.size() ? expd[0] : 8'hxx));
        if (expd.size()) void'(expd.pop_front());
        gotd++;
      end
      if (!d_empty[0]) d_rd_en = 1;
    end
  end

  int NPAT = 10;

  initial begin
    int code;
    rt_we = 0; rt_tile = 0; rt_slot = 0; rt_port = 0; rt_route = '0;
    cfg_we = 0; cfg_tile = 0; cfg_addr = 0; cfg_wdata = 0;
    pg_tile = 0; pg_cmd_valid = 0; pg_cmd = '0;
    sensor_valid = '0; sensor_data[0] = 0; sensor_data[1] = 0;
    proc_rd_row = 0; proc_rd_en = 0;
    d_rt_we = 0; d_rt_tile = 0; d_rt_slot = 0; d_rt_port = 0; d_rt_route = '0;
    d_cfg_we = 0; d_cfg_tile = 0; d_cfg_addr = 0; d_cfg_wdata = 0;
    d_sensor_valid = '0; d_sensor_data[0] = 0; d_rd_en = 0;

    // ---- clear every schedule entry (reset held low) ----
    for (int t = 0; t < NT; t++) for (int s = 0; s < F; s++) for (int p = 0; p < NPORTS; p++) begin
      @(negedge clk); rt_we = 1; rt_tile = 3'(t); rt_slot = 4'(s); rt_port = 3'(p); rt_route = '0;
    end
    for (int t = 0; t < 2; t++) for (int s = 0; s < F; s++) for (int p = 0; p < NPORTS; p++) begin
      @(negedge clk); d_rt_we = 1; d_rt_tile = 1'(t); d_rt_slot = 4'(s); d_rt_port = 3'(p); d_rt_route = '0;
    end
    @(negedge clk); rt_we = 0; d_rt_we = 0;

    // ---- static schedule of instance M ----
    for (int s = 0; s < 8; s++) route(0, s, P_L, P_W);   // pixels into tile 0
    route(0, 8, P_E, P_L); route(0, 9, P_E, P_L);        // tile 0 -> east
    route(1, 9, P_L, P_W); route(1, 10, P_L, P_W);       // into tile 1
    route(1, 4, P_E, P_L);                               // tile 1 -> east
    route(2, 5, P_E, P_W);                               // through tile 2 to the buffer
    route(3, 0, P_L, P_W);                               // sensor byte into tile 3
    route(3, 2, P_L, P_L);                               // loopback: layer 1 -> layer 2
    route(3, 3, P_E, P_L);                               // layer 2 result -> east
    route(4, 4, P_E, P_W);
    route(5, 5, P_E, P_W);
    // ---- schedule of instance D ----
    for (int s = 0; s < 8; s++) droute(0, s, P_L, P_W);
    for (int s = 10; s < 14; s++) droute(0, s, P_E, P_L);
    for (int s = 11; s < 15; s++) droute(1, s, P_E, P_W);

    @(negedge clk); rst_n = 1; d_rst_n = 1;

    // ---- core registers ----
    ccfg(0, CFG_NUM_IN, 8);  ccfg(0, CFG_NUM_OUT, 2);
    ccfg(1, CFG_NUM_IN, 2);  ccfg(1, CFG_NUM_OUT, 1);
    ccfg(3, CFG_NUM_IN, 1);  ccfg(3, CFG_NUM_OUT, 2);   // first pattern has no feedback yet
    dcfg(CFG_NUM_IN, 8); dcfg(CFG_NUM_OUT, 4); dcfg(CFG_SHIFT, DSHIFT);
    for (int a = 0; a < 256; a++) begin dlut[a] = 8'($urandom); dcfg(CFG_LUT | 20'(a), int'(dlut[a])); end
    for (int i = 0; i < 8; i++) for (int j = 0; j < 4; j++) begin
      dw[i][j] = 8'($urandom); dcfg(CFG_WEIGHT | 20'(i << 7) | 20'(j), int'(dw[i][j]) & 255);
    end

    // ---- weights ----
    for (int i = 0; i < 17; i++) for (int j = 0; j < 16; j++) begin w3[i][j] = 0; if (i < 9) w0[i][j] = 0; if (j < 8) w1[i][j] = 0; end
    begin
      int tmp [17][16];
      for (int j = 0; j < 16; j++) begin
        for (int i = 0; i < 17; i++) tmp[i][j] = 0;
        pick(tmp, j, 0, 7, 3 + 2 * int'($urandom % 2), 1'b0);
        for (int i = 0; i < 8; i++) w0[i][j] = tmp[i][j];
      end
      for (int j = 0; j < 8; j++) begin
        for (int i = 0; i < 17; i++) tmp[i][j] = 0;
        pick(tmp, j, 0, 15, 5, 1'b1);
        for (int i = 0; i < 17; i++) w1[i][j] = tmp[i][j];
      end
      for (int j = 0; j < 16; j++) for (int i = 0; i < 17; i++) tmp[i][j] = 0;
      for (int j = 0; j < 8; j++)  pick(tmp, j, 0, 7, 3, 1'b1);
      for (int j = 8; j < 16; j++) pick(tmp, j, 8, 15, 3, 1'b1);
      w3 = tmp;
    end
    for (int t = 0; t < 4; t++) if (t != 2) begin ccfg(t, CFG_MODE, 1); n_mode++; end
    for (int i = 0; i < 9; i++) for (int j = 0; j < 16; j++)
      if (w0[i][j] != 0) program_dev(0, i == 8 ? 128 : i, j, w0[i][j] < 0);
    for (int i = 0; i < 17; i++) for (int j = 0; j < 8; j++)
      if (w1[i][j] != 0) program_dev(1, i == 16 ? 128 : i, j, w1[i][j] < 0);
    for (int i = 0; i < 17; i++) for (int j = 0; j < 16; j++)
      if (w3[i][j] != 0) program_dev(3, i == 16 ? 128 : i, j, w3[i][j] < 0);
    for (int t = 0; t < 4; t++) if (t != 2) begin ccfg(t, CFG_MODE, 0); n_mode++; end

    // ---- stream patterns: push the data for the next frame at slot 8 ----
    while (dut.slot != 4'd8) @(negedge clk);
    for (int k = 0; k < NPAT; k++) begin
      logic [7:0] px, sx;
      logic [15:0] l1, y3;
      logic [7:0] dx [8];
      px = 8'($urandom); sx = 8'($urandom);
      for (int i = 0; i < 8; i++) begin
        sensor_valid = 2'b01 | (i == 0 ? 2'b10 : 2'b00);
        sensor_data[0] = px[i] ? 8'd255 : 8'd0;
        sensor_data[1] = sx;
        dx[i] = 8'($urandom);
        d_sensor_valid = 1'b1; d_sensor_data[0] = dx[i];
        @(negedge clk);
      end
      sensor_valid = '0; d_sensor_valid = '0;
      // model
      l1 = tile0_eval(px);
      exp0.push_back(tile1_eval(l1));
      y3 = tile3_eval(sx, l1_prev, k > 0);
      exp1.push_back(y3[15:8]);
      l1_prev = y3[7:0];
      for (int j = 0; j < 4; j++) begin
        longint s;
        s = 0;
        for (int i = 0; i < 8; i++) s += longint'(dw[i][j]) * longint'(dx[i]);
        s = s >>> DSHIFT;
        if (s > 127) s = 127;
        if (s < -128) s = -128;
        expd.push_back(dlut[8'(s)]);
      end
      if (k == 0) begin
        // after the first evaluation of tile 3, feedback is part of each pattern
        while (!core_event[3]) @(negedge clk);
        ccfg(3, CFG_NUM_IN, 2);
      end
      while (dut.slot != 4'd8) @(negedge clk);
    end
    repeat (5 * F) @(negedge clk);

    chk(exp0.size() == 0 && got0 == NPAT, $sformatf("row 0 results %0d of %0d", got0, NPAT));
    chk(exp1.size() == 0 && got1 == NPAT, $sformatf("row 1 results %0d of %0d", got1, NPAT));
    chk(expd.size() == 0 && gotd == 4 * NPAT, $sformatf("digital results %0d", gotd));
    chk(core_err == '0 && io_overflow == '0 && ob_overflow == '0, "no buffer errors (M)");
    chk(d_err == '0 && d_io_ovf == '0 && d_ob_ovf == '0, "no buffer errors (D)");
    $display("mechanisms: frames=%0d injections=%0d dac_evals=%0d bin_evals=%0d hops=%0d loopbacks=%0d prog_cmds=%0d mode_switches=%0d reads=%0d digital_patterns=%0d",
             n_frames, n_inject, n_eval_dac, n_eval_bin, n_hop, n_loop, n_pg, n_mode, n_read, n_dig);
    chk(n_frames > 0, "TDM frame wrap");
    chk(n_inject > 0, "IO injection");
    chk(n_eval_dac > 0, "DAC core evaluation");
    chk(n_eval_bin > 0, "binary core evaluation");
    chk(n_hop > 0, "core-to-core transfer");
    chk(n_loop > 0, "loopback into the same core");
    chk(n_pg > 0, "programming commands");
    chk(n_mode > 0, "mode switch");
    chk(n_read > 0, "host reads");
    chk(n_dig > 0, "digital core patterns");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
