// asch_puf_top: the whole ASCH-PUF, a 4096-bit (32 x 128) inverter-chain PUF
// with automatic self-checking and healing. It joins the synthesizable digital
// core (asch_puf_core) with behavioural models of the analog parts: the PUF
// array with its sense amplifiers, the 8-bit resistive DAC, the native
// regulators with the V1/V2 switch and smoothing capacitors, and the
// auto-zeroing comparator. Only the core is logic for synthesis; the models
// stand in for the analog macros so the whole chip can be simulated.
//
// Ports are those of the core minus the analog side: the mode (S-ASCH or
// D-ASCH), the skew, the stabilization flow, key generation, raw row reads and
// the NVM / server map port. The fast clock, which the chip takes from an
// on-chip VCO, is an input here. The model parameters (cell mismatch spread,
// noise, seed) are passed through so a testbench can pick a chip instance.
// Timing is that of the core: in D-ASCH mode the flow starts by itself on the
// first clock after reset, and a full flow (two checking rounds of at most 88
// steps each) takes about 357,000 clocks at the default settle time.
// Which blocks exist and how they connect follows the paper's description
// of the system; the voltage levels and noise of the models are this design's.
// Lint note: rst_n is the asynchronous reset of every flop in the core; tools
// that see it also sampled on the clock are seeing the core's assertions.
module asch_puf_top
  import asch_pkg::*;
#(
  parameter int unsigned N_ROWS        = asch_pkg::PUF_ROWS,
  parameter int unsigned N_COLS        = asch_pkg::PUF_COLS,
  parameter int unsigned N_EVAL        = asch_pkg::N_EVAL_SESSION,
  parameter int unsigned SETTLE_CYCLES = 2048,
  parameter int unsigned KEY_BITS      = 128,
  parameter int unsigned SEED          = 32'h1234_5678,
  parameter int          SPREAD_UV     = 40000,
  parameter int          CELL_NOISE_UV = 300,
  parameter int          COMP_NOISE_UV = 60
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  asch_mode_e                mode,
  input  logic [LOCK_BITS-1:0]      skew,
  input  logic                      asch_start,
  output logic                      asch_busy,
  output logic                      asch_done,
  output logic [LOCK_BITS-1:0]      locked_value,
  output logic [15:0]               step_count,
  output logic [7:0]                coarse_steps,
  output logic [7:0]                fine_steps,
  output logic [$clog2(N_ROWS*N_COLS):0] n_masked,
  output logic [$clog2(N_ROWS*N_COLS):0] n_healed,
  input  logic                      key_start,
  output logic                      key_busy,
  output logic [KEY_BITS-1:0]       key,
  output logic                      key_valid,
  output logic                      key_err,
  input  logic                      raw_rd,
  input  logic [$clog2(N_ROWS)-1:0] raw_row,
  input  logic                      raw_heal,
  output logic                      raw_valid,
  output logic [N_COLS-1:0]         raw_data,
  output logic                      map_wr_en,
  output logic                      map_wr_final,
  output logic [$clog2(N_ROWS)-1:0] map_wr_addr,
  output map_row_t                  map_wr_data,
  output logic                      nvm_rd_en,
  output logic [$clog2(N_ROWS)-1:0] nvm_rd_addr,
  input  map_row_t                  nvm_rd_data
);
  logic                      sw, comp_strobe, comp, wl_en, heal;
  logic [DAC_BITS-1:0]       dac_code;
  logic [$clog2(N_ROWS)-1:0] wl_row;
  logic [N_COLS-1:0]         bl;
  int                        vdac_uv, v1_uv, v2_uv;

  asch_puf_core #(
    .N_ROWS(N_ROWS), .N_COLS(N_COLS), .N_EVAL(N_EVAL),
    .SETTLE_CYCLES(SETTLE_CYCLES), .KEY_BITS(KEY_BITS)
  ) u_core (
    .clk, .rst_n, .mode, .skew,
    .asch_start, .asch_busy, .asch_done, .locked_value, .step_count,
    .coarse_steps, .fine_steps, .n_masked, .n_healed,
    .key_start, .key_busy, .key, .key_valid, .key_err,
    .raw_rd, .raw_row, .raw_heal, .raw_valid, .raw_data,
    .map_wr_en, .map_wr_final, .map_wr_addr, .map_wr_data,
    .nvm_rd_en, .nvm_rd_addr, .nvm_rd_data,
    .sw, .dac_code, .comp_strobe, .comp, .wl_en, .wl_row, .heal, .bl
  );

  rdac_model u_dac (.code(dac_code), .v_uv(vdac_uv));

  supply_model u_supply (.clk, .sw, .vdac_uv, .v1_uv, .v2_uv);

  az_comparator_model #(.NOISE_UV(COMP_NOISE_UV)) u_comp (
    .clk, .strobe(comp_strobe), .v1_uv, .v2_uv, .comp
  );

  puf_array_model #(
    .N_ROWS(N_ROWS), .N_COLS(N_COLS), .SEED(SEED),
    .SPREAD_UV(SPREAD_UV), .NOISE_UV(CELL_NOISE_UV)
  ) u_array (
    .clk, .en(wl_en), .row(wl_row), .heal, .v1_uv, .v2_uv, .bl
  );
endmodule
