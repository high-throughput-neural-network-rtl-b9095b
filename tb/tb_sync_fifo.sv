// tb_sync_fifo: random push/pop traffic on a 5-deep FIFO (a depth that is
// not a power of two, so the pointer wrap is exercised) compared against a
// queue model. Checks head data, empty, full and count every cycle, and that
// a push into a full FIFO and a pop from an empty one change nothing.
module tb_sync_fifo;
  localparam int W = 8, DEPTH = 5;
  logic clk = 0, rst_n = 0;
  logic push, pop, empty, full;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  byte unsigned model [$];

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    push = 0; pop = 0; wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // Phases: mostly-push, mostly-pop and balanced traffic, so the FIFO
      // spends time both full and empty.
      case ((t / 200) % 3)
        0: begin push = ($urandom % 4) != 0; pop = ($urandom % 4) == 0; end
        1: begin push = ($urandom % 4) == 0; pop = ($urandom % 4) != 0; end
        default: begin push = $urandom % 2; pop = $urandom % 2; end
      endcase
      wr_data = W'($urandom);
      chk(empty == (model.size() == 0), $sformatf("t=%0d empty", t));
      chk(full == (model.size() == DEPTH), $sformatf("t=%0d full", t));
      chk(count == model.size(), $sformatf("t=%0d count %0d vs %0d", t, count, model.size()));
      if (model.size() != 0)
        chk(rd_data == model[0], $sformatf("t=%0d head %0h vs %0h", t, rd_data, model[0]));
      @(posedge clk);
      // Pop and push in one cycle on a full FIFO: the pop frees a place only
      // after this edge, so the push is dropped.
      begin
        bit was_full, was_empty;
        was_full  = (model.size() == DEPTH);
        was_empty = (model.size() == 0);
        if (pop && !was_empty) void'(model.pop_front());
        if (push && !was_full) model.push_back(wr_data);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
