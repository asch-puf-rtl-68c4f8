// tb_drift_ber: key bit errors under drift after stabilization, for the whole
// ASCH-PUF at its default size (32 x 128 cells, 8 mV skew, 128-bit key).
//
// The point of the self-checking is that cells which survive a +/-skew tilt
// keep their value when temperature or supply later moves them by less than
// the skew. This testbench shows that with the array model's drift term
// (each cell moves by drift x k, k a per-cell factor in [-1, 1]):
//  1. Power-up in dynamic mode with an 8.06 mV skew: the flow runs by itself.
//     The "server" then collects every cell, original and healed, with raw
//     reads at no drift, takes the reported map, and builds the golden key.
//     The first key must equal it.
//  2. For drifts of +/-3.5 mV and +/-7 mV:
//     - raw reads count how many of the 4096 raw bits flipped (they must,
//       at 7 mV, or the test would prove nothing);
//     - static use: a key made in S-ASCH mode with the map from step 1,
//       served from an NVM in this testbench, must equal the golden key
//       (0 bit errors);
//     - dynamic use: the flow is run again under the drift, the new map is
//       reported, and the key must equal the one the server builds from its
//       enrollment values and that new map (0 bit errors).
//  3. A 16 mV drift, twice the skew: the static key's error count must lie
//     between the counts worked out here from the mismatch and drift
//     formulas (cells that must flip and cells that may flip, given noise).
// Raw flips and key errors are printed per drift. A watchdog ends the run if
// a flow hangs.
module tb_drift_ber;
  import asch_pkg::*;
  localparam int ROWS = 32, COLS = 128, KEY = 128;
  localparam int SPREAD = 40000, MARGIN = 900;
  localparam int unsigned SEED = 32'h1234_5678;
  localparam int N_DRIFT = 4;
  localparam int DRIFTS [N_DRIFT] = '{3500, -3500, 7000, -7000};
  localparam int BIG_DRIFT = 16000;

  logic clk = 0, rst_n = 0;
  asch_mode_e mode = MODE_D_ASCH;
  logic [11:0] skew = 12'd62, locked_value;
  logic asch_start = 0, asch_busy, asch_done;
  logic [15:0] step_count;
  logic [7:0] coarse_steps, fine_steps;
  logic [12:0] n_masked, n_healed;
  logic key_start = 0, key_busy, key_valid, key_err;
  logic [KEY-1:0] key;
  logic raw_rd = 0, raw_heal = 0, raw_valid;
  logic [4:0] raw_row = 0;
  logic [COLS-1:0] raw_data;
  logic map_wr_en, map_wr_final, nvm_rd_en;
  logic [4:0] map_wr_addr, nvm_rd_addr;
  map_row_t map_wr_data, nvm_rd_data;

  asch_puf_top dut (.*);

  always #5 clk = ~clk;

  // NVM holding the map made at enrollment, read in static mode
  map_row_t nvm [ROWS];
  always_ff @(posedge clk) if (nvm_rd_en) nvm_rd_data <= nvm[nvm_rd_addr];

  // map as reported by the chip (final writes)
  map_row_t rep_map [ROWS];
  always @(posedge clk) if (map_wr_en && map_wr_final) rep_map[map_wr_addr] <= map_wr_data;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cell mismatch and drift factor (x1024), same formulas as the array model
  function automatic int m_uv(int unsigned r, int unsigned c, bit h);
    logic [31:0] x;
    x = ((r * COLS + c) * 2 + h) ^ SEED;
    x = x * 32'h9E37_79B1;
    x = x ^ (x >> 16);
    x = x * 32'h85EB_CA6B;
    x = x ^ (x >> 13);
    return int'(x % (2 * SPREAD + 1)) - SPREAD;
  endfunction
  function automatic int k_q10(int unsigned r, int unsigned c, bit h);
    logic [31:0] x;
    x = ((r * COLS + c) * 2 + h) ^ SEED ^ 32'h5BD1_E995;
    x = x * 32'hC2B2_AE35;
    x = x ^ (x >> 15);
    x = x * 32'h27D4_EB2F;
    x = x ^ (x >> 16);
    return int'(x % 2049) - 1024;
  endfunction

  // enrollment values collected by the server
  logic [COLS-1:0] enr_o [ROWS], enr_h [ROWS];

  task automatic raw_read(input int r, input bit h, output logic [COLS-1:0] d);
    @(negedge clk) begin raw_rd = 1; raw_row = 5'(r); raw_heal = h; end
    @(negedge clk) raw_rd = 0;
    wait (raw_valid);
    d = raw_data;
    @(negedge clk);
  endtask

  task automatic make_key(output logic [KEY-1:0] k);
    @(negedge clk) key_start = 1;
    @(negedge clk) key_start = 0;
    wait (key_valid || key_err);
    check(key_valid && !key_err, "key completed");
    k = key;
    @(negedge clk);
  endtask

  task automatic run_flow();
    @(negedge clk) asch_start = 1;
    @(negedge clk) asch_start = 0;
    wait (asch_done);
    repeat (2) @(negedge clk);
  endtask

  // the key the server builds from enrollment values and a reported map
  function automatic logic [KEY-1:0] server_key();
    logic [KEY-1:0] k;
    int n;
    k = '0;
    n = 0;
    for (int r = 0; r < ROWS && n < KEY; r++)
      for (int c = 0; c < COLS && n < KEY; c++)
        if (!rep_map[r].mask[c]) begin
          k[n] = rep_map[r].heal[c] ? enr_h[r][c] : enr_o[r][c];
          n++;
        end
    return k;
  endfunction

  function automatic int popcount(input logic [KEY-1:0] v);
    int n;
    n = 0;
    for (int i = 0; i < KEY; i++) n += v[i];
    return n;
  endfunction

  initial begin
    logic [KEY-1:0] golden, k;
    map_row_t map0 [ROWS];
    int must_e, may_e, n;
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (4) @(negedge clk);

    // 1. power-up run, enrollment, golden key
    check(asch_busy, "flow started at power-up");
    wait (asch_done);
    repeat (2) @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      raw_read(r, 1'b0, enr_o[r]);
      raw_read(r, 1'b1, enr_h[r]);
    end
    map0 = rep_map;
    nvm  = rep_map;
    golden = server_key();
    make_key(k);
    check(k == golden, "key at no drift equals the server's golden key");
    $display("no drift: healed %0d, masked %0d", n_healed, n_masked);

    // 2. drifts within the skew
    for (int i = 0; i < N_DRIFT; i++) begin
      int flips, err_s, err_d;
      dut.u_array.drift_uv = DRIFTS[i];
      flips = 0;
      for (int r = 0; r < ROWS; r++) begin
        logic [COLS-1:0] d;
        raw_read(r, 1'b0, d);
        for (int c = 0; c < COLS; c++) flips += (d[c] != enr_o[r][c]);
      end
      if (DRIFTS[i] == 7000 || DRIFTS[i] == -7000)
        check(flips > 0, $sformatf("drift %0d uV flips raw bits", DRIFTS[i]));
      // static use: enrollment map from the NVM
      mode = MODE_S_ASCH;
      make_key(k);
      mode = MODE_D_ASCH;
      err_s = popcount(k ^ golden);
      check(err_s == 0, $sformatf("drift %0d uV, fixed map: %0d key bit errors", DRIFTS[i], err_s));
      // dynamic use: new map made under the drift
      run_flow();
      make_key(k);
      err_d = popcount(k ^ server_key());
      check(err_d == 0, $sformatf("drift %0d uV, new map: %0d key bit errors", DRIFTS[i], err_d));
      $display("drift %0d uV: raw flips %0d of %0d (%0.2f%%), key errors fixed map %0d, new map %0d (healed %0d, masked %0d)",
               DRIFTS[i], flips, ROWS * COLS, 100.0 * flips / (ROWS * COLS), err_s, err_d, n_healed, n_masked);
    end

    // 3. drift of twice the skew, static use
    dut.u_array.drift_uv = BIG_DRIFT;
    mode = MODE_S_ASCH;
    make_key(k);
    must_e = 0; may_e = 0; n = 0;
    for (int r = 0; r < ROWS && n < KEY; r++)
      for (int c = 0; c < COLS && n < KEY; c++)
        if (!map0[r].mask[c]) begin
          int m0, m1;
          bit h;
          h  = map0[r].heal[c];
          m0 = m_uv(r, c, h);
          m1 = m0 + (BIG_DRIFT * k_q10(r, c, h)) / 1024;
          if ((m0 > MARGIN && m1 < -MARGIN) || (m0 < -MARGIN && m1 > MARGIN)) must_e++;
          if ((m0 > -MARGIN && m1 < MARGIN) || (m0 < MARGIN && m1 > -MARGIN)) may_e++;
          n++;
        end
    n = popcount(k ^ golden);
    check(n >= must_e && n <= may_e,
          $sformatf("drift %0d uV: %0d key errors, expected %0d..%0d", BIG_DRIFT, n, must_e, may_e));
    $display("drift %0d uV (twice the skew): key errors %0d with the fixed map", BIG_DRIFT, n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
