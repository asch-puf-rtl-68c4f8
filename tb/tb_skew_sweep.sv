// tb_skew_sweep: masking ratio against voltage skew for the whole ASCH-PUF at
// its default size (32 x 128 cells, 64 evaluations per session).
//
// The skew sets how much drift the stabilized key must survive: a larger skew
// flags more cells as dark, so more are healed and more are masked. This
// testbench runs the complete check-heal-check flow in dynamic mode at four
// skews, 15, 31, 62 and 92 steps of 130 uV (about 2, 4, 8 and 12 mV), and for
// each one prints the masking ratio with healing and the ratio that masking
// alone would give (every cell dark in the first round).
// The first run is the one the design starts by itself at reset release in
// dynamic mode; the start pulse sent for it is ignored while that run is busy.
// Checks, per skew, with bounds worked out from the array model's mismatch
// formula (recomputed here): the number of first-round dark cells and the
// number of masked cells both lie between the count of cells that must be
// dark and the count of cells that may be dark, given the cell noise; healing
// leaves fewer cells masked than masking alone would. Across skews both
// ratios must grow with the skew. A watchdog ends the run if a flow hangs.
module tb_skew_sweep;
  import asch_pkg::*;
  localparam int ROWS = 32, COLS = 128, KEY = 128;
  localparam int SPREAD = 40000, MARGIN = 900;
  localparam int unsigned SEED = 32'h1234_5678;
  localparam int N_SKEW = 4;
  localparam int SKEWS [N_SKEW] = '{15, 31, 62, 92};

  logic clk = 0, rst_n = 0;
  asch_mode_e mode = MODE_D_ASCH;
  logic [11:0] skew, locked_value;
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

  // the NVM port is not used in dynamic mode
  always_ff @(posedge clk) nvm_rd_data <= '0;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // cell mismatch, same formula as the array model
  function automatic int m_uv(int unsigned r, int unsigned c, bit h);
    logic [31:0] x;
    x = ((r * COLS + c) * 2 + h) ^ SEED;
    x = x * 32'h9E37_79B1;
    x = x ^ (x >> 16);
    x = x * 32'h85EB_CA6B;
    x = x ^ (x >> 13);
    return int'(x % (2 * SPREAD + 1)) - SPREAD;
  endfunction

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int asc_only [N_SKEW], asch [N_SKEW];

  initial begin
    skew = 12'(SKEWS[0]);
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    for (int i = 0; i < N_SKEW; i++) begin
      int off_uv, lo_uv, hi_uv, must_d, may_d, must_m, may_m;
      skew = 12'(SKEWS[i]);
      @(negedge clk) asch_start = 1;
      @(negedge clk) asch_start = 0;
      wait (asch_done);
      repeat (2) @(negedge clk);
      off_uv = 350000 + int'(locked_value) * 130 - 615000;
      lo_uv  = off_uv - SKEWS[i] * 130;
      hi_uv  = off_uv + SKEWS[i] * 130;
      must_d = 0; may_d = 0; must_m = 0; may_m = 0;
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          int mo, mh;
          bit od_must, od_may, hd_must, hd_may;
          mo = m_uv(r, c, 0); mh = m_uv(r, c, 1);
          od_must = (mo + lo_uv < -MARGIN) && (mo + hi_uv > MARGIN);
          od_may  = (mo + lo_uv <  MARGIN) && (mo + hi_uv > -MARGIN);
          hd_must = (mh + lo_uv < -MARGIN) && (mh + hi_uv > MARGIN);
          hd_may  = (mh + lo_uv <  MARGIN) && (mh + hi_uv > -MARGIN);
          must_d += od_must;
          may_d  += od_may;
          must_m += od_must && hd_must;
          may_m  += od_may && hd_may;
        end
      asc_only[i] = int'(n_masked) + int'(n_healed);
      asch[i]     = int'(n_masked);
      check(asc_only[i] >= must_d && asc_only[i] <= may_d,
            $sformatf("skew %0d: %0d dark cells, expected %0d..%0d", SKEWS[i], asc_only[i], must_d, may_d));
      check(asch[i] >= must_m && asch[i] <= may_m,
            $sformatf("skew %0d: %0d masked cells, expected %0d..%0d", SKEWS[i], asch[i], must_m, may_m));
      check(asch[i] < asc_only[i], $sformatf("skew %0d: healing reduces masking", SKEWS[i]));
      check(step_count <= 88, "at most 88 steps per round");
      $display("skew %0d x 130 uV = %0d uV: masking alone %0.2f%%, with healing %0.2f%% (healed %0d, masked %0d)",
               SKEWS[i], SKEWS[i] * 130, 100.0 * asc_only[i] / (ROWS * COLS),
               100.0 * asch[i] / (ROWS * COLS), n_healed, n_masked);
    end
    for (int i = 1; i < N_SKEW; i++) begin
      check(asc_only[i] > asc_only[i-1], $sformatf("masking alone grows from skew %0d to %0d", SKEWS[i-1], SKEWS[i]));
      check(asch[i] >= asch[i-1], $sformatf("masking with healing grows from skew %0d to %0d", SKEWS[i-1], SKEWS[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
