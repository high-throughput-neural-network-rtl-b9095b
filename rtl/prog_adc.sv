// prog_adc: BEHAVIOURAL MODEL of the single analog-to-digital converter each
// memristor core holds for programming.
//
// While one device is read, its column voltage (a divider between V_R, the
// device and the column sense resistor) is digitised here so that the
// off-chip programmer can compare it with the target. `start` samples vin (a
// 16-bit fraction of V_R); CONV_CYC cycles later (CONV_CYC >= 2) `done` pulses for one cycle
// and `code` holds the BITS-bit result, rounded to nearest. Resolution and
// conversion time are not given in the source and are this model's choices.
module prog_adc #(
  parameter int BITS     = 8,
  parameter int CONV_CYC = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [15:0]     vin,
  output logic            done,
  output logic [BITS-1:0] code
);
  logic [15:0] sample;
  int          cnt;
  logic        busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      code   <= '0;
      cnt    <= 0;
      sample <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy   <= 1'b1;
        sample <= vin;
        cnt    <= CONV_CYC - 2;
      end else if (busy) begin
        if (cnt == 0) begin
          busy <= 1'b0;
          done <= 1'b1;
          code <= BITS'((int'(sample) * ((1 << BITS) - 1) + 32767) / 65535);
        end else begin
          cnt <= cnt - 1;
        end
      end
    end
  end
endmodule
