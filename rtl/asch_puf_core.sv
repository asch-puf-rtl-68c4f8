// asch_puf_core: the synthesizable digital part of the ASCH-PUF chip. It wraps
// the self-checking controller, the PWM dither of the DAC code, the column
// readout, one validity detector per column, the check/heal sequencer, the
// SRAM heal/mask LUT and the key stabilization module, and connects them to
// the analog array, DAC, regulators and comparator through plain ports.
//
// Two operations are started from outside:
//  - asch_start runs the stabilization flow (check original cells, check
//    healed cells, write the heal/mask map). In dynamic mode (mode=D-ASCH) the
//    map goes to the on-chip SRAM LUT; in static mode (S-ASCH, at enrollment)
//    it goes to an external NVM through map_wr_*. The final map writes are
//    always visible on map_wr_* (map_wr_final=1), since D-ASCH reports the map
//    to the server at every power-up.
//  - key_start builds a stable key from the array and the map (read from the
//    LUT in D-ASCH, from the NVM through nvm_rd_* in S-ASCH).
// In dynamic mode the flow also starts by itself on the first clock after
// reset, since D-ASCH remakes the map at every power-up; asch_start pulses
// during that run are ignored, as during any other run.
// A host can also read any row raw, original or healed (raw_rd), which is how
// the server collects both values of every cell at enrollment.
// The array is shared: while the flow runs, the controller owns it (SW open,
// readout clocked by CLK_T); otherwise a small read port serves the stabilizer
// first, then the raw host read. The read port holds the row for RD_WAIT
// clocks, samples the readout once and returns the row one clock later.
// The arbitration, the read-port timing and the 1-clock NVM read latency are
// this design's choices; the paper does not describe them.
// Lint note: rst_n is the asynchronous reset of every flop; tools that see it
// also sampled on the clock are seeing the assertions' disable iff clause.
module asch_puf_core
  import asch_pkg::*;
#(
  parameter int unsigned N_ROWS        = asch_pkg::PUF_ROWS,
  parameter int unsigned N_COLS        = asch_pkg::PUF_COLS,
  parameter int unsigned N_EVAL        = asch_pkg::N_EVAL_SESSION,
  parameter int unsigned SETTLE_CYCLES = 2048,
  parameter int unsigned KEY_BITS      = 128,
  parameter int unsigned RD_WAIT       = 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  asch_mode_e                mode,
  input  logic [LOCK_BITS-1:0]      skew,
  // stabilization flow
  input  logic                      asch_start,
  output logic                      asch_busy,
  output logic                      asch_done,
  output logic [LOCK_BITS-1:0]      locked_value,
  output logic [15:0]               step_count,
  output logic [7:0]                coarse_steps,
  output logic [7:0]                fine_steps,
  output logic [$clog2(N_ROWS*N_COLS):0] n_masked,
  output logic [$clog2(N_ROWS*N_COLS):0] n_healed,
  // key generation
  input  logic                      key_start,
  output logic                      key_busy,
  output logic [KEY_BITS-1:0]       key,
  output logic                      key_valid,
  output logic                      key_err,
  // raw row read
  input  logic                      raw_rd,
  input  logic [$clog2(N_ROWS)-1:0] raw_row,
  input  logic                      raw_heal,
  output logic                      raw_valid,
  output logic [N_COLS-1:0]         raw_data,
  // map to NVM (S-ASCH) / server report (both modes)
  output logic                      map_wr_en,
  output logic                      map_wr_final,
  output logic [$clog2(N_ROWS)-1:0] map_wr_addr,
  output map_row_t                  map_wr_data,
  output logic                      nvm_rd_en,
  output logic [$clog2(N_ROWS)-1:0] nvm_rd_addr,
  input  map_row_t                  nvm_rd_data,
  // analog side
  output logic                      sw,
  output logic [DAC_BITS-1:0]       dac_code,
  output logic                      comp_strobe,
  input  logic                      comp,
  output logic                      wl_en,
  output logic [$clog2(N_ROWS)-1:0] wl_row,
  output logic                      heal,
  input  logic [N_COLS-1:0]         bl
);
  localparam int unsigned RW = $clog2(N_ROWS);

  // ---------------- self-checking controller ----------------
  logic              sc_start, sc_busy, sc_done, sc_row_done;
  logic              sc_wl_en, clk_t, valid_r;
  logic [RW-1:0]     sc_wl_row, sc_row;
  logic [N_COLS-1:0] sc_dark, valid, out;
  logic [LOCK_BITS-1:0] v1_value;

  sc_controller #(
    .N_ROWS(N_ROWS), .N_COLS(N_COLS), .N_EVAL(N_EVAL), .SETTLE_CYCLES(SETTLE_CYCLES)
  ) u_ctrl (
    .clk, .rst_n, .start(sc_start), .skew,
    .sw, .v1_value, .comp_strobe, .comp,
    .wl_en(sc_wl_en), .wl_row(sc_wl_row), .clk_t, .valid_r, .valid,
    .busy(sc_busy), .done(sc_done), .row_done(sc_row_done), .row_addr(sc_row),
    .dark(sc_dark), .locked_value, .coarse_steps, .fine_steps, .step_count
  );

  pwm_dither u_pwm (.clk, .rst_n, .value(v1_value), .dac_code);

  // ---------------- readout and validity detectors ----------------
  logic rd_sample;

  puf_readout #(.N_COLS(N_COLS)) u_readout (
    .clk, .rst_n, .check(sc_busy), .clk_t, .rd(rd_sample), .bl, .out
  );

  for (genvar c = 0; c < N_COLS; c++) begin : g_valid
    validity_detector u_vd (.clk, .rst_n, .valid_r, .out(out[c]), .valid(valid[c]));
  end

  // ---------------- sequencer and map store ----------------
  logic          seq_busy, seq_heal, seq_map_re;
  logic [RW-1:0] seq_map_raddr;
  logic          stab_map_re;
  logic [RW-1:0] stab_map_raddr;
  map_row_t      map_rdata, lut_rdata;
  logic          key_go;

  assign key_go = key_start && !seq_busy;

  // power-up run in dynamic mode: pwr_up is 1 only on the first clock after reset
  logic pwr_up, seq_go;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) pwr_up <= 1'b1;
    else        pwr_up <= 1'b0;
  assign seq_go = (asch_start || (pwr_up && mode == MODE_D_ASCH)) && !key_busy;

  asch_sequencer #(.N_ROWS(N_ROWS), .N_COLS(N_COLS)) u_seq (
    .clk, .rst_n, .start(seq_go), .busy(seq_busy), .done(asch_done),
    .heal(seq_heal), .sc_start, .sc_done, .sc_row_done, .sc_row, .sc_dark,
    .map_we(map_wr_en), .map_final(map_wr_final), .map_waddr(map_wr_addr),
    .map_wdata(map_wr_data), .map_re(seq_map_re), .map_raddr(seq_map_raddr),
    .map_rdata, .n_masked, .n_healed
  );
  assign asch_busy = seq_busy;

  logic          map_re;
  logic [RW-1:0] map_raddr;
  assign map_re    = seq_busy ? seq_map_re : stab_map_re;
  assign map_raddr = seq_busy ? seq_map_raddr : stab_map_raddr;

  map_lut #(.DEPTH(N_ROWS)) u_lut (
    .clk, .we(map_wr_en && mode == MODE_D_ASCH), .waddr(map_wr_addr), .wdata(map_wr_data),
    .re(map_re && mode == MODE_D_ASCH), .raddr(map_raddr), .rdata(lut_rdata)
  );

  assign nvm_rd_en   = map_re && mode == MODE_S_ASCH;
  assign nvm_rd_addr = map_raddr;
  assign map_rdata   = (mode == MODE_D_ASCH) ? lut_rdata : nvm_rd_data;

  // ---------------- key stabilization ----------------
  logic              st_rd_req, st_rd_heal, st_rd_valid;
  logic [RW-1:0]     st_rd_row;

  key_stabilizer #(.N_ROWS(N_ROWS), .N_COLS(N_COLS), .KEY_BITS(KEY_BITS)) u_stab (
    .clk, .rst_n, .start(key_go), .busy(key_busy),
    .map_re(stab_map_re), .map_raddr(stab_map_raddr), .map_rdata,
    .rd_req(st_rd_req), .rd_row(st_rd_row), .rd_heal(st_rd_heal),
    .rd_valid(st_rd_valid), .rd_data(out),
    .key, .key_valid, .key_err
  );

  // ---------------- array read port (normal mode) ----------------
  typedef enum logic [1:0] {P_IDLE, P_WAIT, P_SAMPLE, P_VALID} port_e;
  port_e         pstate;
  logic [7:0]    pcnt;
  logic          p_raw;          // current access is the host's
  logic          raw_pend;
  logic [RW-1:0] raw_row_q, p_row;
  logic          raw_heal_q, p_heal;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pstate     <= P_IDLE;
      pcnt       <= '0;
      p_raw      <= 1'b0;
      p_row      <= '0;
      p_heal     <= 1'b0;
      raw_pend   <= 1'b0;
      raw_row_q  <= '0;
      raw_heal_q <= 1'b0;
    end else begin
      if (raw_rd) begin
        raw_pend   <= 1'b1;
        raw_row_q  <= raw_row;
        raw_heal_q <= raw_heal;
      end
      unique case (pstate)
        P_IDLE: if (!seq_busy) begin
          if (st_rd_req) begin
            pstate <= P_WAIT;
            p_raw  <= 1'b0;
            p_row  <= st_rd_row;
            p_heal <= st_rd_heal;
            pcnt   <= '0;
          end else if (raw_pend) begin
            pstate   <= P_WAIT;
            p_raw    <= 1'b1;
            p_row    <= raw_row_q;
            p_heal   <= raw_heal_q;
            pcnt     <= '0;
            raw_pend <= raw_rd;
          end
        end
        P_WAIT: begin
          pcnt <= pcnt + 1'b1;
          if (pcnt == 8'(RD_WAIT - 1)) pstate <= P_SAMPLE;
        end
        P_SAMPLE: pstate <= P_VALID;
        P_VALID:  pstate <= P_IDLE;
        default:  pstate <= P_IDLE;
      endcase
    end
  end

  assign rd_sample   = (pstate == P_SAMPLE);
  assign st_rd_valid = (pstate == P_VALID) && !p_raw;
  assign raw_valid   = (pstate == P_VALID) && p_raw;
  assign raw_data    = out;

  // ---------------- array control mux ----------------
  assign wl_en  = seq_busy ? sc_wl_en  : (pstate != P_IDLE);
  assign wl_row = seq_busy ? sc_wl_row : p_row;
  assign heal   = seq_busy ? seq_heal  : p_heal;

  // The controller never runs outside the sequencer, and only one of the
  // sequencer and the stabilizer is active at a time.
  a_ctrl_in_seq: assert property (@(posedge clk) disable iff (!rst_n) sc_busy |-> seq_busy);
  a_exclusive:   assert property (@(posedge clk) disable iff (!rst_n) !(seq_busy && key_busy));
endmodule
