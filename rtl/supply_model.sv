// supply_model: behavioural model (not synthesizable logic) of the two
// native-transistor regulators that supply the PUF array, the switch SW that
// ties V1 to V2, and the smoothing capacitors C1/C2.
//
// In normal operation (sw=1) both regulators take the external bias and V1 is
// shorted to V2, so the first and second inverter stages see one supply.
// During self-checking (sw=0) the V1 regulator is biased by the DAC and V1 is
// isolated; V1 then follows the DAC voltage through a first-order low-pass
// filter that stands for C1, which is also what averages the PWM-dithered DAC
// code. The filter time constant is 2**FILTER_SHIFT clock cycles (an
// assumption: the paper gives no capacitor values). V2 stays at V2_UV, the
// 615 mV both supplies settle to in the paper's measured waveform.
// Voltages are integer microvolts. V1 is updated at each rising clk edge.
module supply_model #(
  parameter int          V2_UV        = 615000,
  parameter int unsigned FILTER_SHIFT = 8
) (
  input  logic clk,
  input  logic sw,        // 1: V1 shorted to V2 (normal), 0: V1 from DAC (checking)
  input  int   vdac_uv,   // DAC output voltage
  output int   v1_uv,
  output int   v2_uv
);
  // V1 held with FILTER_SHIFT extra fractional bits so small steps settle fully
  longint acc;  // starts at V2 once sw=1 has been seen for one clock

  always @(posedge clk) begin
    if (sw) acc <= longint'(V2_UV) <<< FILTER_SHIFT;
    else    acc <= acc + longint'(vdac_uv) - (acc >>> FILTER_SHIFT);
  end

  assign v1_uv = int'(acc >>> FILTER_SHIFT);
  assign v2_uv = V2_UV;
endmodule
