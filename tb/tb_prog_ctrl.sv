// tb_prog_ctrl: issues random SET, RESET and READ commands. For pulses it
// counts the cycles pg_set / pg_reset are high on the addressed device; for
// reads it plays the ADC (answers adc_start after a random delay) and checks
// that the row switch stays on through the conversion and that the answer
// carries the ADC code. Commands must be refused outside programming mode.
module tb_prog_ctrl;
  import nn_pkg::*;
  localparam int PULSE = 3;
  logic clk = 0, rst_n = 0, enable, cmd_valid, cmd_ready, rsp_valid;
  pg_cmd_t cmd;
  logic [7:0] rsp_code, pg_row, pg_col, adc_code;
  logic pg_neg, pg_set, pg_reset, pg_read, adc_start, adc_done;
  int checks = 0, failures = 0;

  prog_ctrl #(.PULSE_CYC(PULSE)) dut (.*);
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

  // ADC stand-in
  int adc_wait = -1;
  logic [7:0] adc_next;
  always @(posedge clk) begin
    adc_done <= 1'b0;
    if (adc_start) begin adc_wait <= 2 + ($urandom % 4); adc_next <= 8'($urandom); end
    else if (adc_wait > 0) adc_wait <= adc_wait - 1;
    else if (adc_wait == 0) begin adc_done <= 1'b1; adc_code <= adc_next; adc_wait <= -1; end
  end

  initial begin
    enable = 0; cmd_valid = 0; cmd = '0; adc_code = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    cmd_valid = 1; cmd.op = PG_SET;
    repeat (3) begin @(negedge clk); chk(!cmd_ready && !pg_set, "no command outside programming mode"); end
    cmd_valid = 0; enable = 1;
    for (int n = 0; n < 150; n++) begin
      int k, set_cyc, rst_cyc, rd_cyc, starts, other;
      pg_cmd_t c;
      c.op  = pg_op_e'($urandom % 3);
      c.row = 8'($urandom); c.col = 8'($urandom); c.neg = 1'($urandom);
      @(negedge clk); cmd = c; cmd_valid = 1;
      while (!cmd_ready) @(negedge clk);
      @(negedge clk); cmd_valid = 0; cmd = '0;
      set_cyc = 0; rst_cyc = 0; rd_cyc = 0; starts = 0; other = 0; k = 0;
      while (!rsp_valid && k < 50) begin
        if (pg_set) set_cyc++;
        if (pg_reset) rst_cyc++;
        if (pg_read) rd_cyc++;
        if (adc_start) starts++;
        if ((pg_set || pg_reset || pg_read) && (pg_row != c.row || pg_col != c.col || pg_neg != c.neg)) other++;
        if (adc_done) chk(pg_read, "row switch on while ADC converts");
        @(negedge clk); k++;
      end
      chk(rsp_valid, "response");
      chk(other == 0, "addressed device");
      case (c.op)
        PG_SET:   chk(set_cyc == PULSE && rst_cyc == 0 && rd_cyc == 0, "set pulse length");
        PG_RESET: chk(rst_cyc == PULSE && set_cyc == 0 && rd_cyc == 0, "reset pulse length");
        PG_READ: begin
          chk(starts == 1 && set_cyc == 0 && rst_cyc == 0 && rd_cyc >= 2, "read sequence");
          chk(rsp_code == adc_next, "read code");
        end
        default: ;
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
