// tb_digital_core: checks the SRAM digital core against a dot-product model.
//  * Reduced core (16 inputs, 8 neurons): random signed weights, a random
//    activation table and a scaling shift are loaded through the
//    configuration port; patterns stream in one input per cycle and every
//    output byte is compared with LUT[sat8(sum_i W[i][j] x_i >>> shift)].
//  * With the switch withholding grants, a finished pattern must wait in the
//    accumulators (stall) while later inputs queue, and nothing is lost.
//  * Overfilling the input queue sets the overflow flag.
//  * A default-size core (256 inputs, 128 neurons) takes 256 inputs, one per
//    cycle (the paper's 1.28 us at 200 MHz), and its first output byte
//    appears 258 cycles after the first input.
module tb_digital_core;
  import nn_pkg::*;
  localparam int NI = 16, NO = 8;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  flit_t a_in, a_out, c_in, c_out;
  logic a_gnt, c_gnt, cfg_we, a_done, a_stall, a_ovf, c_done, c_stall, c_ovf;
  logic [19:0] cfg_addr; logic [15:0] cfg_wdata;

  digital_core #(.N_IN(NI), .N_OUT(NO), .IBUF_DEPTH(4)) dut_a (
    .clk, .rst_n, .net_in(a_in), .net_out(a_out), .net_grant(a_gnt),
    .cfg_we, .cfg_addr, .cfg_wdata, .done_pulse(a_done), .stall(a_stall), .overflow(a_ovf));
  digital_core dut_c (
    .clk, .rst_n, .net_in(c_in), .net_out(c_out), .net_grant(c_gnt),
    .cfg_we(1'b0), .cfg_addr, .cfg_wdata, .done_pulse(c_done), .stall(c_stall), .overflow(c_ovf));

  logic signed [7:0] w [NI][NO];
  logic [7:0] lut [256];
  int shift;
  logic [7:0] expq[$];
  int stalls = 0, seen = 0;

  function automatic logic [7:0] expect_out(int j, logic [7:0] x [NI]);
    longint s;
    s = 0;
    for (int i = 0; i < NI; i++) s += longint'(w[i][j]) * longint'(x[i]);
    s = s >>> shift;
    if (s > 127) s = 127;
    if (s < -128) s = -128;
    return lut[8'(s)];
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (a_out.valid && a_gnt) begin
      chk(expq.size() != 0, "unexpected output");
      if (expq.size() != 0) begin
        chk(a_out.data == expq[0], $sformatf("output %0d: %h exp %h", seen, a_out.data, expq[0]));
        void'(expq.pop_front());
      end
      seen++;
    end
    if (a_stall) stalls++;
  end

  task automatic wcfg(input logic [19:0] a, input int d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = 16'(d);
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic feed(input logic [7:0] x [NI], input int gap_pct);
    for (int j = 0; j < NO; j++) expq.push_back(expect_out(j, x));
    for (int i = 0; i < NI; i++) begin
      a_in.valid = 1; a_in.data = x[i];
      @(negedge clk);
      a_in = '0;
      while ($urandom % 100 < gap_pct) @(negedge clk);
    end
    a_in = '0;
  endtask

  initial begin
    logic [7:0] x [NI];
    a_in = '0; c_in = '0; a_gnt = 0; c_gnt = 0; cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- default-size timing ----
    @(negedge clk);
    begin
      int cyc, tout;
      cyc = 0; tout = -1;
      for (int i = 0; i < 256; i++) begin c_in.valid = 1; c_in.data = 8'($urandom); @(negedge clk); cyc++; end
      c_in = '0;
      while (tout < 0 && cyc < 300) begin if (c_out.valid) tout = cyc; @(negedge clk); cyc++; end
      chk(tout == 258, $sformatf("default core first output at cycle %0d, expected 258", tout));
      chk(!c_stall && !c_ovf, "default core no stall/overflow");
    end

    // ---- load reduced core ----
    shift = 3;
    wcfg(CFG_SHIFT, shift);
    for (int a = 0; a < 256; a++) begin lut[a] = 8'($urandom); wcfg(CFG_LUT | 20'(a), int'(lut[a])); end
    for (int i = 0; i < NI; i++) for (int j = 0; j < NO; j++) begin
      w[i][j] = 8'($urandom);
      wcfg(CFG_WEIGHT | 20'(i << 7) | 20'(j), int'(w[i][j]) & 255);
    end

    // ---- streaming, all grants ----
    a_gnt = 1;
    for (int p = 0; p < 40; p++) begin
      for (int i = 0; i < NI; i++) x[i] = (p < 3) ? 8'hFF : 8'($urandom);
      feed(x, (p % 2) ? 30 : 0);
    end
    repeat (20) @(negedge clk);
    chk(expq.size() == 0, "all streamed outputs sent");
    chk(stalls == 0, "no stall while the router takes every output");

    // ---- stall: grants withheld ----
    a_gnt = 0;
    for (int i = 0; i < NI; i++) x[i] = 8'($urandom);
    feed(x, 0);                      // result -> output buffer, not sent
    for (int i = 0; i < NI; i++) x[i] = 8'($urandom);
    feed(x, 0);                      // result waits in the accumulators
    for (int i = 0; i < NI; i++) x[i] = 8'($urandom);
    for (int j = 0; j < NO; j++) expq.push_back(expect_out(j, x));
    for (int i = 0; i < 5; i++) begin a_in.valid = 1; a_in.data = x[i]; @(negedge clk); end
    a_in = '0;
    chk(a_stall, "MAC array stalls while the output buffer is busy");
    chk(!a_ovf, "five queued inputs fit");
    a_gnt = 1;
    repeat (2 * NO) @(negedge clk);   // let both waiting results drain
    for (int i = 5; i < NI; i++) begin a_in.valid = 1; a_in.data = x[i]; @(negedge clk); end
    a_in = '0;
    repeat (60) @(negedge clk);
    chk(expq.size() == 0, "stalled results all sent");
    chk(stalls > 0, "stall seen");
    chk(!a_ovf, "no overflow");

    // ---- overflow ----
    a_gnt = 0;
    for (int k = 0; k < 3 * NI + 8; k++) begin a_in.valid = 1; a_in.data = 8'($urandom); @(negedge clk); end
    a_in = '0;
    chk(a_ovf, "overflow flagged");
    $display("outputs checked %0d, stall cycles %0d", seen, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
