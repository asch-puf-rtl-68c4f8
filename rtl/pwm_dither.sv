// pwm_dither: 4-bit pulse-width-modulation dither that gives the 8-bit DAC a
// 12-bit effective resolution.
//
// The 12-bit setting is {coarse[7:0], fine[3:0]}. A free-running 4-bit phase
// counter steps once per clock; in each 16-clock period the DAC gets
// coarse+1 for `fine` clocks and coarse for the other 16-fine clocks, so the
// capacitor-filtered V1 averages to coarse + fine/16 DAC steps. The paper
// gives the 4-bit PWM and the 12-bit result; the phase order (the +1 clocks
// first in each period) and saturation at code 255 are this design's choices.
// Timing: dac_code is registered, one clock after value and phase.
module pwm_dither #(
  parameter int unsigned DAC_BITS = 8,
  parameter int unsigned PWM_BITS = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [DAC_BITS+PWM_BITS-1:0] value,
  output logic [DAC_BITS-1:0]          dac_code
);
  logic [PWM_BITS-1:0] phase;
  logic [DAC_BITS-1:0] coarse;
  logic [PWM_BITS-1:0] fine;
  logic                up;

  assign coarse = value[DAC_BITS+PWM_BITS-1:PWM_BITS];
  assign fine   = value[PWM_BITS-1:0];
  assign up     = (phase < fine) && (coarse != '1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase    <= '0;
      dac_code <= '0;
    end else begin
      phase    <= phase + 1'b1;
      dac_code <= coarse + DAC_BITS'(up);
    end
  end
endmodule
