// dac: BEHAVIOURAL MODEL of the 8-bit digital-to-analog converter that drives
// one input row pair of a first-layer memristor core.
//
// First-layer cores receive 8-bit sensor values and must turn them into row
// voltages. The model maps code 0 to -1 V and code 255 to +1 V linearly, so
// the output, in units of 1/255 V, is 2*code - 255 (odd values -255..+255).
// The converter is combinational here; its settling is taken to fit inside
// the crossbar's two-cycle evaluation. The paper names the converters and
// their place (one per input row) but gives neither transfer function nor
// timing: the linear bipolar mapping is this model's choice.
module dac #(
  parameter int BITS = 8
) (
  input  logic [BITS-1:0]   code,
  output logic signed [9:0] v
);
  localparam int FS = (1 << BITS) - 1;
  assign v = 10'(signed'(2 * int'(code) - FS) * 255 / FS);
endmodule
