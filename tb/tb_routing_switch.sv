// tb_routing_switch: self-checking test of the static TDM routing switch.
// Loads a random schedule (including broadcast and core loopback entries),
// drives random flits on all five inputs while the slot counter runs, and
// compares every registered output and every grant with a reference built
// from the testbench's own copy of the schedule.
module tb_routing_switch;
  import nn_pkg::*;
  localparam int SLOTS = 8;

  logic clk = 0, rst_n = 0;
  logic [$clog2(SLOTS)-1:0] slot, cfg_slot;
  flit_t in [NPORTS], out [NPORTS];
  logic [NPORTS-1:0] grant;
  logic cfg_we;
  logic [2:0] cfg_port;
  route_t cfg_route;
  int checks = 0, failures = 0;
  route_t model [SLOTS][NPORTS];

  routing_switch #(.SLOTS(SLOTS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    flit_t exp_out [NPORTS];
    logic [NPORTS-1:0] exp_g;
    int loopbacks = 0;
    cfg_we = 0; slot = 0; cfg_slot = 0; cfg_port = 0; cfg_route = '0;
    for (int p = 0; p < NPORTS; p++) in[p] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < SLOTS; s++)
      for (int p = 0; p < NPORTS; p++) begin
        route_t rt;
        rt.en  = ($urandom % 4) != 0;
        rt.src = port_e'($urandom % NPORTS);
        if (s == 0 && p == P_L) begin rt.en = 1; rt.src = P_L; end   // loopback
        if (s == 1) begin rt.en = 1; rt.src = P_W; end               // broadcast
        model[s][p] = rt;
        @(negedge clk);
        cfg_we = 1; cfg_slot = s[$clog2(SLOTS)-1:0]; cfg_port = p[2:0]; cfg_route = rt;
        @(posedge clk); #1 cfg_we = 0;
      end
    for (int cyc = 0; cyc < 400; cyc++) begin
      @(negedge clk);
      slot = cyc[$clog2(SLOTS)-1:0];
      for (int p = 0; p < NPORTS; p++) begin
        in[p].valid = $urandom % 2;
        in[p].data  = 8'($urandom);
      end
      #1;
      exp_g = '0;
      for (int p = 0; p < NPORTS; p++) begin
        exp_out[p] = model[slot][p].en ? in[model[slot][p].src] : '0;
        if (model[slot][p].en) exp_g[model[slot][p].src] = 1'b1;
      end
      if (model[slot][P_L].en && model[slot][P_L].src == P_L) loopbacks++;
      checks++;
      if (grant !== exp_g) begin
        failures++;
        $display("grant mismatch slot %0d: %b exp %b", slot, grant, exp_g);
      end
      @(posedge clk); #1;
      for (int p = 0; p < NPORTS; p++) begin
        checks++;
        if (out[p] !== exp_out[p]) begin
          failures++;
          if (failures < 10) $display("out[%0d] slot %0d: %h exp %h", p, slot, out[p], exp_out[p]);
        end
      end
    end
    if (loopbacks == 0) failures++;
    $display("loopback slots seen: %0d", loopbacks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
