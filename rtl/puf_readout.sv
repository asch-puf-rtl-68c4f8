// puf_readout: column readout register of the PUF array, one flip-flop per
// bit line, so a whole row of N_COLS bits is read in parallel.
//
// In the chip each column has a sense amplifier, an SR latch and a DFF that
// samples the PUF value on every rising edge of its clock; a switch SW chooses
// that clock between the normal read clock CLK and the self-checking clock
// CLK_T from the controller. Here the sense amplifier is part of the array
// model, and the clock choice is made as a sample enable on the single system
// clock: with check=1 the register samples when clk_t=1, otherwise when
// rd=1 (this design's choice, to keep one clock domain).
// Timing: out takes bl at the rising clk edge where the selected enable is 1.
module puf_readout #(
  parameter int unsigned N_COLS = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              check,  // SW: 1 = self-checking, sample on clk_t
  input  logic              clk_t,  // self-checking evaluation strobe
  input  logic              rd,     // normal read strobe
  input  logic [N_COLS-1:0] bl,
  output logic [N_COLS-1:0] out
);
  logic sample;
  assign sample = check ? clk_t : rd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      out <= '0;
    else if (sample) out <= bl;
  end
endmodule
