// puf_array_model: behavioural model (not synthesizable logic) of the PUF
// array: N_ROWS x N_COLS sub-threshold inverter-chain cells with their word
// lines, bit lines, Heal switches and column sense amplifiers.
//
// Each cell is a 4-stage inverter chain whose first stage runs from V1 and the
// rest from V2. Its value is set by the mismatch between the switching
// voltages of stage 1 and stage 2; closing the Heal switch shorts stages 1 and
// 2 and turns the cell into an almost independent 3-stage cell with a
// mismatch of its own. The model gives every cell, in both configurations, a
// fixed mismatch m in [-SPREAD_UV, +SPREAD_UV] drawn from a hash of
// (SEED, row, column, heal), and evaluates
//     bit = (m + drift + (V1 - V2) + noise) > 0   (drift: see below)
// so lowering or raising V1 against V2 tilts every cell the same way, which is
// how the design emulates voltage/temperature drift. The noise is uniform in
// +/-NOISE_UV, drawn afresh at every evaluation from a xorshift generator. The hash, the spread and
// the noise are this model's choices; the paper gives the cell, the Heal
// switch, the 128x32 size and the whole-row parallel readout.
// Drift: drift_uv (0 after start-up) stands for a change of temperature or
// supply after the map was made. Each cell's mismatch then moves by
// drift_uv * k / 1024, with a per-cell sensitivity k in [-1024, 1024] drawn
// from a second hash, so cells drift by different amounts and in both
// directions, as Vth shifts do. A testbench sets it by hierarchical assignment;
// nothing in the design drives it. How far and how unevenly real cells drift
// is not given by the paper; this linear spread is the model's choice.
// Timing: when en=1 the selected row is evaluated at every rising clk edge and
// appears on bl (the sense-amplifier output) after that edge.
module puf_array_model #(
  parameter int unsigned N_ROWS    = 32,
  parameter int unsigned N_COLS    = 128,
  parameter int unsigned SEED      = 32'h1234_5678,
  parameter int          SPREAD_UV = 40000,
  parameter int          NOISE_UV  = 300
) (
  input  logic                      clk,
  input  logic                      en,    // word line enable
  input  logic [$clog2(N_ROWS)-1:0] row,   // word line select
  input  logic                      heal,  // close the Heal switch of every cell
  input  int                        v1_uv,
  input  int                        v2_uv,
  output logic [N_COLS-1:0]         bl
);
  // Fixed mismatch of one cell, in microvolts.
  function automatic int mismatch_uv(input int unsigned r, input int unsigned c,
                                     input logic h);
    logic [31:0] x;
    x = ((r * N_COLS + c) * 2 + 32'(h)) ^ SEED;
    x = x * 32'h9E37_79B1;
    x = x ^ (x >> 16);
    x = x * 32'h85EB_CA6B;
    x = x ^ (x >> 13);
    return int'(x % 32'(2 * SPREAD_UV + 1)) - SPREAD_UV;
  endfunction

  // Drift sensitivity of one cell, in 1/1024 of drift_uv.
  function automatic int sens_q10(input int unsigned r, input int unsigned c,
                                  input logic h);
    logic [31:0] x;
    x = ((r * N_COLS + c) * 2 + 32'(h)) ^ SEED ^ 32'h5BD1_E995;
    x = x * 32'hC2B2_AE35;
    x = x ^ (x >> 15);
    x = x * 32'h27D4_EB2F;
    x = x ^ (x >> 16);
    return int'(x % 32'd2049) - 1024;
  endfunction

  int drift_uv;

  // xorshift32 noise source, stepped once per cell evaluation
  logic [31:0] rng;

  initial begin
    bl       = '0;
    rng      = SEED ^ 32'h6A09_E667;
    drift_uv = 0;
  end

  always @(posedge clk) begin
    if (en) begin
      logic [31:0] x;
      x = rng;
      for (int c = 0; c < N_COLS; c++) begin
        int noise;
        x = x ^ (x << 13);
        x = x ^ (x >> 17);
        x = x ^ (x << 5);
        noise = int'(x % 32'(2 * NOISE_UV + 1)) - NOISE_UV;
        bl[c] <= (mismatch_uv(32'(row), c, heal)
                  + (drift_uv * sens_q10(32'(row), c, heal)) / 1024
                  + (v1_uv - v2_uv) + noise) > 0;
      end
      rng <= x;
    end
  end
endmodule
