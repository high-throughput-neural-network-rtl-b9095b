// tb_memristor_core: end-to-end test of the memristor core.
//  * An off-chip programmer model writes +/-1 weights into a hidden-layer
//    core (16 binary inputs, 16 neurons) and a first-layer core with DACs
//    (8 byte inputs, 8 neurons) by the pulse/read-verify loop: read the device
//    through the ADC, give one SET pulse, repeat until it reaches its target.
//  * Random patterns are streamed in; the transmitted bytes are compared
//    with sign(sum s_i v_i) worked out by the testbench. Neurons whose sum is
//    too close to zero for the device-to-device spread are not checked.
//  * The switch grant is random, so results sometimes wait in the holding
//    register (counted) and the overrun flag is provoked at the end.
//  * A core at the default size (128 inputs, 64 neurons) checks the paper's
//    timing: 16 input bytes, then the crossbar result 18 cycles after the
//    first byte, the first output byte one cycle later.
module tb_memristor_core;
  import nn_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, skipped = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // ---------------- DUTs ----------------
  flit_t a_in, a_out, b_in, b_out, c_in, c_out;
  logic a_gnt, b_gnt, c_gnt;
  logic cfg_we; logic [19:0] cfg_addr; logic [15:0] cfg_wdata;
  logic a_cfg, b_cfg, c_cfg;
  logic a_pv, b_pv, a_pr, b_pr, a_rv, b_rv, c_pr, c_rv;
  pg_cmd_t pcmd;
  logic [7:0] a_code, b_code, c_code;
  logic a_ev, b_ev, c_ev, a_ovr, b_ovr, c_ovr;

  memristor_core #(.N_IN(16), .N_OUT(16), .HAS_DAC(1'b0)) dut_a (
    .clk, .rst_n, .net_in(a_in), .net_out(a_out), .net_grant(a_gnt),
    .cfg_we(cfg_we && a_cfg), .cfg_addr, .cfg_wdata,
    .pg_cmd_valid(a_pv), .pg_cmd_ready(a_pr), .pg_cmd(pcmd), .pg_rsp_valid(a_rv), .pg_rsp_code(a_code),
    .eval_pulse(a_ev), .overrun(a_ovr));
  memristor_core #(.N_IN(8), .N_OUT(8), .HAS_DAC(1'b1)) dut_b (
    .clk, .rst_n, .net_in(b_in), .net_out(b_out), .net_grant(b_gnt),
    .cfg_we(cfg_we && b_cfg), .cfg_addr, .cfg_wdata,
    .pg_cmd_valid(b_pv), .pg_cmd_ready(b_pr), .pg_cmd(pcmd), .pg_rsp_valid(b_rv), .pg_rsp_code(b_code),
    .eval_pulse(b_ev), .overrun(b_ovr));
  memristor_core dut_c (
    .clk, .rst_n, .net_in(c_in), .net_out(c_out), .net_grant(c_gnt),
    .cfg_we(cfg_we && c_cfg), .cfg_addr, .cfg_wdata,
    .pg_cmd_valid(1'b0), .pg_cmd_ready(c_pr), .pg_cmd(pcmd), .pg_rsp_valid(c_rv), .pg_rsp_code(c_code),
    .eval_pulse(c_ev), .overrun(c_ovr));

  task automatic cfg(input bit to_a, input bit to_b, input logic [19:0] a, input int d);
    @(negedge clk); cfg_we = 1; a_cfg = to_a; b_cfg = to_b; c_cfg = 0; cfg_addr = a; cfg_wdata = 16'(d);
    @(negedge clk); cfg_we = 0;
  endtask

  // Off-chip programmer: one command, wait for the answer.
  task automatic pg(input bit on_b, input pg_op_e op, input int r, input int c, input bit n, output int code);
    pcmd.op = op; pcmd.row = 8'(r); pcmd.col = 8'(c); pcmd.neg = n;
    if (on_b) b_pv = 1; else a_pv = 1;
    @(posedge clk);
    while (!(on_b ? b_pr : a_pr)) @(posedge clk);
    #1; a_pv = 0; b_pv = 0;
    while (!(on_b ? b_rv : a_rv)) @(posedge clk);
    code = on_b ? int'(b_code) : int'(a_code);
    @(negedge clk);
  endtask

  task automatic program_dev(input bit on_b, input int r, input int c, input bit n);
    int code, guard;
    guard = 0;
    pg(on_b, PG_READ, r, c, n, code);
    while (code < 156 && guard < 200) begin
      pg(on_b, PG_SET, r, c, n, code);
      pg(on_b, PG_READ, r, c, n, code);
      guard++;
    end
    chk(code >= 156, "device reached target");
  endtask

  int sa [17][16];  // signs of core A (row 16 = bias), 0 = zero weight
  int sb [9][8];

  // expected output queues (byte + mask of checkable bits)
  logic [15:0] qa_val[$], qa_msk[$];
  logic [7:0]  qb_val[$], qb_msk[$];
  int holds = 0, ev_a = 0;

  // Check transmitted bytes.
  int a_byte = 0, b_byte = 0, a_seen = 0, b_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if (a_out.valid && a_gnt && qa_val.size() != 0) begin
      logic [7:0] ev, em;
      ev = qa_val[0][8*a_byte +: 8]; em = qa_msk[0][8*a_byte +: 8];
      chk((a_out.data & em) == (ev & em), $sformatf("core A byte %0d: %h exp %h mask %h", a_byte, a_out.data, ev, em));
      a_seen++;
      if (a_byte == 1) begin a_byte = 0; void'(qa_val.pop_front()); void'(qa_msk.pop_front()); end
      else a_byte++;
    end
    if (b_out.valid && b_gnt && qb_val.size() != 0) begin
      chk((b_out.data & qb_msk[0]) == (qb_val[0] & qb_msk[0]), $sformatf("core B: %h exp %h mask %h", b_out.data, qb_val[0], qb_msk[0]));
      b_seen++;
      void'(qb_val.pop_front()); void'(qb_msk.pop_front());
    end
    if (a_ev) ev_a++;
    if (dut_a.y_valid && dut_a.tx_busy && !(dut_a.tx_last)) holds++;
  end

  initial begin
    int code;
    a_in = '0; b_in = '0; c_in = '0; a_gnt = 0; b_gnt = 0; c_gnt = 0;
    cfg_we = 0; a_cfg = 0; b_cfg = 0; c_cfg = 0; cfg_addr = 0; cfg_wdata = 0;
    a_pv = 0; b_pv = 0; pcmd = '0;
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- timing at default size ----
    @(negedge clk);
    begin
      int t0, tev, tout, cyc;
      cyc = 0; tev = -1; tout = -1; t0 = 0;
      for (int f = 0; f < 16; f++) begin
        c_in.valid = 1; c_in.data = 8'($urandom);
        @(negedge clk); cyc++;
      end
      c_in = '0;
      while (tout < 0 && cyc < 60) begin
        if (dut_c.y_valid && tev < 0) tev = cyc;
        if (c_out.valid) tout = cyc;
        @(negedge clk); cyc++;
      end
      chk(tev == 18, $sformatf("default core: crossbar result at cycle %0d, expected 18 (90 ns)", tev));
      chk(tout == 19, $sformatf("default core: first output byte at cycle %0d", tout));
      // all weights are zero at start: every neuron is off
      chk(c_out.data == 8'h00, "default core output with zero weights");
      c_gnt = 1; repeat (8) @(negedge clk); c_gnt = 0;
      chk(!c_out.valid, "default core sent 8 bytes");
    end

    // ---- programming mode ----
    cfg(1, 1, CFG_MODE, 1);
    for (int i = 0; i <= 16; i++) for (int j = 0; j < 16; j++) begin
      sa[i][j] = (i == 16) ? ((j % 4 == 0) ? 1 : 0) : int'($urandom % 3) - 1;
      if (sa[i][j] > 0) program_dev(0, i, j, 0);
      if (sa[i][j] < 0) program_dev(0, i, j, 1);
    end
    for (int i = 0; i <= 8; i++) for (int j = 0; j < 8; j++) begin
      sb[i][j] = (i == 8) ? 0 : int'($urandom % 3) - 1;
      if (sb[i][j] > 0) program_dev(1, i, j, 0);
      if (sb[i][j] < 0) program_dev(1, i, j, 1);
    end
    // input is ignored in programming mode
    @(negedge clk); a_in.valid = 1; a_in.data = 8'hFF; @(negedge clk); a_in = '0;
    cfg(1, 1, CFG_MODE, 0);
    chk(dut_a.rx_cnt == 0, "no input taken in programming mode");

    // ---- streaming ----
    for (int p = 0; p < 120; p++) begin
      logic [15:0] xa; logic [7:0] xb [8];
      logic [15:0] ea, ma; logic [7:0] eb, mb;
      int nrows;
      xa = 16'($urandom);
      nrows = (p % 5 == 4) ? 8 : 16;   // some patterns use only one flit
      for (int j = 0; j < 16; j++) begin
        int s, sabs;
        s = sa[16][j]; sabs = (sa[16][j] != 0);
        for (int i = 0; i < nrows; i++) begin s += sa[i][j] * (xa[i] ? 1 : -1); sabs += (sa[i][j] != 0); end
        ea[j] = s > 0;
        ma[j] = (s * 100 > sabs * 1 + 1) || (s * 100 < -(sabs * 1 + 1)) || (sabs == 0);
        if (!ma[j]) skipped++;
      end
      for (int i = 0; i < 8; i++) xb[i] = 8'($urandom);
      for (int j = 0; j < 8; j++) begin
        int s, sabs;
        s = 0; sabs = 0;
        for (int i = 0; i < 8; i++) begin
          s += sb[i][j] * (2 * int'(xb[i]) - 255);
          sabs += (sb[i][j] != 0) ? (2 * int'(xb[i]) - 255 < 0 ? 255 - 2 * int'(xb[i]) : 2 * int'(xb[i]) - 255) : 0;
        end
        eb[j] = s > 0;
        mb[j] = (s * 100 > sabs + 1) || (s * 100 < -(sabs + 1)) || (sabs == 0);
        if (!mb[j]) skipped++;
      end
      if (p % 5 == 4) cfg(1, 0, CFG_NUM_IN, 1); else if (p % 5 == 0) cfg(1, 0, CFG_NUM_IN, 2);
      qa_val.push_back(ea); qa_msk.push_back(ma);
      qb_val.push_back(eb); qb_msk.push_back(mb);
      for (int f = 0; f < 8; f++) begin
        @(negedge clk);
        a_gnt = $urandom % 3 != 0; b_gnt = $urandom % 3 != 0;
        a_in.valid = (f < nrows / 8); a_in.data = xa[8*f +: 8];
        b_in.valid = 1; b_in.data = xb[f];
      end
      @(negedge clk); a_in = '0; b_in = '0;
      repeat ($urandom % 3) @(negedge clk);
    end
    a_gnt = 1; b_gnt = 1;
    repeat (40) @(negedge clk);
    chk(qa_val.size() == 0 && qb_val.size() == 0, "all results sent");
    chk(!a_ovr && !b_ovr, "no overrun in normal streaming");
    chk(ev_a == 120, $sformatf("core A evaluations %0d", ev_a));

    // ---- holding register, then overrun: no grants, three results ----
    a_gnt = 0; holds = 0;
    cfg(1, 0, CFG_NUM_IN, 1);
    for (int k = 0; k < 3; k++) begin
      @(negedge clk); a_in.valid = 1; a_in.data = 8'($urandom);
      @(negedge clk); a_in = '0; repeat (4) @(negedge clk);
      if (k == 1) begin
        chk(holds == 1 && dut_a.hold_v, "second result waits in the holding register");
        chk(!a_ovr, "no overrun while one result waits");
      end
    end
    chk(a_ovr, "overrun flagged");
    $display("outputs checked A=%0d B=%0d, neurons skipped (too close to threshold) %0d, holds %0d",
             a_seen, b_seen, skipped, holds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
