// az_comparator_model: behavioural model (not synthesizable logic) of the
// auto-zeroing comparator and its output latch that compare V1 with V2.
//
// Each strobe is one comparator activation: at the rising clk edge with
// strobe=1 the latch takes (V1 + noise > V2), so comp=1 means V1 is above V2.
// The comparator has been auto-zeroed, so no offset is modelled; a uniform
// input noise of +/-NOISE_UV (an assumption, from a xorshift generator) is what the controller's 5-vote
// majority is there to reject. The latch holds comp between strobes.
module az_comparator_model #(
  parameter int NOISE_UV = 60
) (
  input  logic clk,
  input  logic strobe,
  input  int   v1_uv,
  input  int   v2_uv,
  output logic comp
);
  // xorshift32 noise source
  logic [31:0] rng;

  initial begin
    comp = 1'b0;
    rng  = 32'h2545_F491;
  end

  always @(posedge clk) begin
    if (strobe) begin
      logic [31:0] x;
      int          noise;
      x = rng ^ (rng << 13);
      x = x ^ (x >> 17);
      x = x ^ (x << 5);
      rng   <= x;
      noise = int'(x % 32'(2 * NOISE_UV + 1)) - NOISE_UV;
      comp  <= (v1_uv + noise > v2_uv);
    end
  end
endmodule
