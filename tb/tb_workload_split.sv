// tb_workload_split: the layer-splitting pattern that the large image
// workloads (digit, object and character recognition) use, run on a
// 2 x 2 mesh of full-size 128 x 64 memristor cores.
//
// Each neuron of the first layer sees 192 pixels, more than one core has
// inputs. The neuron is therefore split: pixels 0..95 enter row 0 and go to
// tile 0, pixels 96..191 enter row 1 and go to tile 2 (both first-layer
// cores with DACs). Each of these computes 16 partial neurons over its half
// of the image. A combining core (tile 1) takes the two partial results,
// 2 bytes from tile 0 straight from the west and 2 bytes from tile 2 over a
// turn (tile 2 east -> tile 3 north -> tile 1 south), and computes 8 output
// neurons, whose byte leaves east into the output buffer.
//
// All weights are +/-1, written with the pulse / read-verify loop; every
// neuron has an odd number of non-zero terms, so none sits on its threshold.
// Results are compared with a model of the split network. The test counts
// partial-neuron evaluations in both halves, combining evaluations and bytes
// that took the turn at tile 3; each must happen.
//
// The workloads differ from this test in their sizes only (more slices per
// neuron, more column groups, more layers): splitting, merging two streams
// into one core and turning corners are the mechanisms they need.
module tb_workload_split;
  import nn_pkg::*;
  localparam int F = 128, R = 2, C = 2, NT = R * C;
  localparam int HALF = 96, NSUB = 16, NOUT = 8, NPAT = 3;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  logic [7:0] tdm_len = 8'(F);
  logic rt_we; logic [1:0] rt_tile; logic [6:0] rt_slot; logic [2:0] rt_port; route_t rt_route;
  logic cfg_we; logic [1:0] cfg_tile; logic [19:0] cfg_addr; logic [15:0] cfg_wdata;
  logic [1:0] pg_tile; logic pg_cmd_valid, pg_cmd_ready, pg_rsp_valid; pg_cmd_t pg_cmd; logic [7:0] pg_rsp_code;
  logic [R-1:0] sensor_valid; logic [7:0] sensor_data [R];
  logic [0:0] proc_rd_row; logic proc_rd_en, proc_rd_valid; logic [7:0] proc_rd_data; logic [R-1:0] proc_empty;
  logic [NT-1:0] core_event, core_stall, core_err; logic [R-1:0] io_overflow, ob_overflow;

  nn_top #(.ROWS(R), .COLS(C), .SLOTS(F), .CORE_KIND(CORE_MEMRISTOR)) dut (.*);

  // ---------------- mechanism counters ----------------
  int n_part_a = 0, n_part_b = 0, n_comb = 0, n_turn = 0;
  always @(posedge clk) if (rst_n) begin
    if (core_event[0]) n_part_a++;
    if (core_event[2]) n_part_b++;
    if (core_event[1]) n_comb++;
    if (dut.sw_out[3][P_N].valid) n_turn++;
  end

  // ---------------- host tasks ----------------
  task automatic route(input int t, input int s, input port_e outp, input port_e src);
    @(negedge clk); rt_we = 1; rt_tile = 2'(t); rt_slot = 7'(s); rt_port = 3'(outp);
    rt_route.en = 1; rt_route.src = src;
    @(negedge clk); rt_we = 0;
  endtask
  task automatic ccfg(input int t, input logic [19:0] a, input int d);
    @(negedge clk); cfg_we = 1; cfg_tile = 2'(t); cfg_addr = a; cfg_wdata = 16'(d);
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic pg(input int t, input pg_op_e op, input int r, input int c, input bit n, output int code);
    pg_tile = 2'(t); pg_cmd.op = op; pg_cmd.row = 8'(r); pg_cmd.col = 8'(c); pg_cmd.neg = n;
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

  // ---------------- network ----------------
  int wa [129][64];   // tile 0: pixels 0..95 -> 16 partial neurons
  int wb [129][64];   // tile 2: pixels 96..191 -> 16 partial neurons
  int wc [129][64];   // tile 1: 32 partial results -> 8 neurons, row 128 = bias

  task automatic pick(input int t, input int col, input int lo, input int hi, input int k, input bit bias);
    int n;
    n = 0;
    if (bias) begin wc[128][col] = ($urandom % 2) ? 1 : -1; n = 1; end
    while (n < k) begin
      int r, v;
      r = lo + int'($urandom % (hi - lo + 1));
      v = ($urandom % 2) ? 1 : -1;
      case (t)
        0: if (wa[r][col] == 0) begin wa[r][col] = v; n++; end
        2: if (wb[r][col] == 0) begin wb[r][col] = v; n++; end
        default: if (wc[r][col] == 0) begin wc[r][col] = v; n++; end
      endcase
    end
  endtask

  logic [7:0] expq[$];
  int got = 0;

  always @(negedge clk) begin
    proc_rd_en = 0;
    if (rst_n) begin
      if (proc_rd_valid) begin
        chk(expq.size() != 0 && proc_rd_data == expq[0],
            $sformatf("result %0d: %h exp %h", got, proc_rd_data, expq.size() ? expq[0] : 8'h00));
        if (expq.size()) void'(expq.pop_front());
        got++;
      end
      if (!proc_empty[0]) begin proc_rd_row = 0; proc_rd_en = 1; end
    end
  end

  initial begin
    logic [2*HALF-1:0] px [NPAT];
    rt_we = 0; rt_tile = 0; rt_slot = 0; rt_port = 0; rt_route = '0;
    cfg_we = 0; cfg_tile = 0; cfg_addr = 0; cfg_wdata = 0;
    pg_tile = 0; pg_cmd_valid = 0; pg_cmd = '0;
    sensor_valid = '0; for (int r = 0; r < R; r++) sensor_data[r] = 0;
    proc_rd_row = 0; proc_rd_en = 0;

    for (int t = 0; t < NT; t++) for (int s = 0; s < F; s++) for (int p = 0; p < NPORTS; p++) begin
      @(negedge clk); rt_we = 1; rt_tile = 2'(t); rt_slot = 7'(s); rt_port = 3'(p); rt_route = '0;
    end
    @(negedge clk); rt_we = 0;
    // pixels: both rows in parallel, slots 0..95
    for (int s = 0; s < HALF; s++) begin route(0, s, P_L, P_W); route(2, s, P_L, P_W); end
    // tile 0 partial results -> tile 1 (one hop)
    for (int s = 108; s < 110; s++) route(0, s, P_E, P_L);
    for (int s = 109; s < 111; s++) route(1, s, P_L, P_W);
    // tile 2 partial results -> tile 3 -> tile 1 (two hops and a turn)
    for (int s = 110; s < 112; s++) route(2, s, P_E, P_L);
    for (int s = 111; s < 113; s++) route(3, s, P_N, P_W);
    for (int s = 112; s < 114; s++) route(1, s, P_L, P_S);
    // combined result -> output buffer
    route(1, 124, P_E, P_L);
    @(negedge clk); rst_n = 1;

    ccfg(0, CFG_NUM_IN, HALF); ccfg(0, CFG_NUM_OUT, 2);
    ccfg(2, CFG_NUM_IN, HALF); ccfg(2, CFG_NUM_OUT, 2);
    ccfg(1, CFG_NUM_IN, 4);    ccfg(1, CFG_NUM_OUT, 1);

    for (int i = 0; i < 129; i++) for (int j = 0; j < 64; j++) begin wa[i][j] = 0; wb[i][j] = 0; wc[i][j] = 0; end
    for (int j = 0; j < NSUB; j++) begin
      pick(0, j, 0, HALF - 1, 3, 0);
      pick(2, j, 0, HALF - 1, 3, 0);
    end
    // combining neuron j: partial neurons of both halves (rows 0..15 from
    // tile 0, rows 16..31 from tile 2), at least one from each
    for (int j = 0; j < NOUT; j++) begin
      pick(1, j, 0, NSUB - 1, 3, 1);
      pick(1, j, NSUB, 2 * NSUB - 1, 4, 0);
    end

    for (int t = 0; t < 3; t++) ccfg(t, CFG_MODE, 1);
    for (int i = 0; i < 129; i++) for (int j = 0; j < 64; j++) begin
      if (wa[i][j] != 0) program_dev(0, i, j, wa[i][j] < 0);
      if (wb[i][j] != 0) program_dev(2, i, j, wb[i][j] < 0);
      if (wc[i][j] != 0) program_dev(1, i, j, wc[i][j] < 0);
    end
    for (int t = 0; t < 3; t++) ccfg(t, CFG_MODE, 0);

    for (int k = 0; k < NPAT; k++) begin
      logic [2*NSUB-1:0] part;
      logic [7:0] o;
      for (int i = 0; i < 2 * HALF; i++) px[k][i] = 1'($urandom);
      for (int j = 0; j < NSUB; j++) begin
        int sa, sb;
        sa = 0; sb = 0;
        for (int i = 0; i < HALF; i++) begin
          sa += wa[i][j] * (px[k][i] ? 1 : -1);
          sb += wb[i][j] * (px[k][HALF + i] ? 1 : -1);
        end
        part[j] = sa > 0;
        part[NSUB + j] = sb > 0;
      end
      for (int j = 0; j < NOUT; j++) begin
        int s;
        s = wc[128][j];
        for (int i = 0; i < 2 * NSUB; i++) s += wc[i][j] * (part[i] ? 1 : -1);
        o[j] = s > 0;
      end
      expq.push_back(o);
    end

    // stream: pixel i of a frame is pushed two slots before it is taken
    while (dut.slot != 7'(F - 2)) @(negedge clk);
    for (int k = 0; k < NPAT; k++) begin
      for (int i = 0; i < HALF; i++) begin
        sensor_valid = 2'b11;
        sensor_data[0] = px[k][i] ? 8'd255 : 8'd0;
        sensor_data[1] = px[k][HALF + i] ? 8'd255 : 8'd0;
        @(negedge clk);
      end
      sensor_valid = '0;
      while (dut.slot != 7'(F - 2)) @(negedge clk);
    end
    repeat (2 * F) @(negedge clk);
    chk(got == NPAT && expq.size() == 0, $sformatf("received %0d results", got));
    chk(core_err == '0 && io_overflow == '0 && ob_overflow == '0, "no buffer errors");
    $display("mechanisms: partial_a=%0d partial_b=%0d combine=%0d turn_bytes=%0d",
             n_part_a, n_part_b, n_comb, n_turn);
    chk(n_part_a == NPAT, "partial evaluations in tile 0");
    chk(n_part_b == NPAT, "partial evaluations in tile 2");
    chk(n_comb == NPAT, "combining evaluations in tile 1");
    chk(n_turn == 2 * NPAT, "bytes turned north at tile 3");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
