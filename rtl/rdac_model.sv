// rdac_model: behavioural model (not synthesizable logic) of the 8-bit
// resistive DAC that biases the V1 native regulator during self-checking.
//
// The DAC is analog. This model turns the 8-bit code into a voltage, in
// integer microvolts, on a straight line: v_uv = BASE_UV + code * LSB_UV.
// The paper gives the 8-bit width and a 130 uV fine step after 4-bit PWM
// dithering, so one DAC step is 16 x 130 uV = 2080 uV. BASE_UV is this
// model's own choice; it puts the locked point (about 615 mV) mid-range.
// Timing: combinational, with a 1 ps delay standing for the ladder.
module rdac_model #(
  parameter int unsigned CODE_BITS = 8,
  parameter int          BASE_UV   = 350000,
  parameter int          LSB_UV    = 2080
) (
  input  logic [CODE_BITS-1:0] code,
  output int                   v_uv
);
  assign #1 v_uv = BASE_UV + int'(code) * LSB_UV;
endmodule
