// tb_asch_puf_top: end-to-end run of the whole ASCH-PUF at its default size
// (32 x 128 cells, 64 evaluations per skew session, 128-bit key).
//
// Sequence: dynamic mode (D-ASCH) stabilization with an 8 mV skew, started
// by the design itself on the first clock after reset (power-up run), two key
// generations, raw reads of one row, then static mode (S-ASCH) stabilization
// into an NVM kept by this testbench and a key generated from that NVM.
// What is checked, with the expected values worked out here from the array
// model's mismatch formula (recomputed independently below):
//  - V1 locks within one 130 uV fine step of V2; 8 coarse steps, 1..16 fine
//    steps, 8 + fine + 64 steps per checking round (at most 88);
//  - the cycle count of the flow lies between the best and worst case built
//    from the step count;
//  - every cell whose mismatch lies clearly inside the skew window is dark and
//    every cell clearly outside is not; the map's heal and mask bits follow
//    the dark results of the original and healed cells;
//  - the masked and healed counts match the map;
//  - the key equals the one built from the map and the cells' values, and is
//    the same when generated twice;
//  - raw reads return the cells' values.
// Each mechanism (coarse lock, fine lock, skew sessions, dark detection,
// healing, masking, key with masked and healed cells, raw read, both modes,
// power-up run)
// is counted and must occur at least once.
module tb_asch_puf_top;
  import asch_pkg::*;
  localparam int ROWS = 32, COLS = 128, KEY = 128;
  localparam int SPREAD = 40000, MARGIN = 900;
  localparam int unsigned SEED = 32'h1234_5678;
  localparam int SKEW = 62;                  // x 130 uV = 8.06 mV
  localparam int SETTLE = 2048, COMP_GAP = 4, EVAL_GAP = 4;

  logic clk = 0, rst_n = 0;
  asch_mode_e mode;
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

  // ---------------- NVM (S-ASCH) and captured map ----------------
  map_row_t nvm [ROWS];
  map_row_t final_map [ROWS];
  int nvm_reads = 0;
  always @(posedge clk) begin
    if (map_wr_en && mode == MODE_S_ASCH) nvm[map_wr_addr] <= map_wr_data;
    if (map_wr_en && map_wr_final) final_map[map_wr_addr] <= map_wr_data;
    if (rst_n && nvm_rd_en) begin
      nvm_rd_data <= nvm[nvm_rd_addr];
      nvm_reads   <= nvm_reads + 1;
    end
  end

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

  // mechanism counters
  int n_coarse = 0, n_fine = 0, n_skew = 0, n_dark = 0, n_heal_map = 0, n_mask_map = 0;
  int n_key_mask = 0, n_key_heal = 0, n_raw = 0, n_mode_d = 0, n_mode_s = 0, n_pwr_up = 0;

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one stabilization run, with its checks
  // auto = 1: the flow was started by the design at reset release (time t0)
  task automatic stabilize(input asch_mode_e md, input bit auto, input int t_rst);
    int t0, cyc, lo_uv, hi_uv, off_uv, exp_masked, exp_healed, sure_d, sure_s;
    int best, worst;
    mode = md;
    if (auto) begin
      t0 = t_rst;
      check(asch_busy, "flow running after reset in dynamic mode");
      if (asch_busy) n_pwr_up++;
    end else begin
      @(negedge clk) asch_start = 1;
      t0 = $time;
      @(negedge clk) asch_start = 0;
    end
    wait (asch_done);
    cyc = ($time - t0) / 10;
    repeat (2) @(negedge clk);
    // locking
    check(locked_value >= 2037 && locked_value <= 2039,
          $sformatf("locked value %0d (ideal 2038.5)", locked_value));
    check(coarse_steps == 8, "8 coarse steps");
    check(fine_steps >= 1 && fine_steps <= 16, $sformatf("fine steps %0d", fine_steps));
    check(int'(step_count) == 8 + int'(fine_steps) + 2 * ROWS, $sformatf("steps %0d", step_count));
    check(step_count <= 88, "at most 88 steps per round");
    n_coarse += coarse_steps; n_fine += fine_steps; n_skew += 2 * ROWS;
    // cycle count: two rounds, each (8+fine) locking steps of SETTLE+5*COMP_GAP
    // and 64 skew steps of SETTLE+64*EVAL_GAP, plus a few clocks per row
    best  = 2 * ((8 + 1)  * (SETTLE + 5 * COMP_GAP) + 2 * ROWS * (SETTLE + 64 * EVAL_GAP));
    worst = 2 * ((8 + 16) * (SETTLE + 5 * COMP_GAP) + 2 * ROWS * (SETTLE + 64 * EVAL_GAP) + 3 * ROWS) + 20;
    check(cyc >= best && cyc <= worst, $sformatf("flow took %0d clocks (%0d..%0d)", cyc, best, worst));
    // dark detection against the mismatch
    off_uv = 350000 + int'(locked_value) * 130 - 615000;
    lo_uv = off_uv - SKEW * 130;
    hi_uv = off_uv + SKEW * 130;
    exp_masked = 0; exp_healed = 0; sure_d = 0; sure_s = 0;
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        int mo, mh;
        bit od, os, hd, hs;
        mo = m_uv(r, c, 0); mh = m_uv(r, c, 1);
        od = (mo + lo_uv < -MARGIN) && (mo + hi_uv > MARGIN);
        os = (mo + lo_uv > MARGIN) || (mo + hi_uv < -MARGIN);
        hd = (mh + lo_uv < -MARGIN) && (mh + hi_uv > MARGIN);
        hs = (mh + lo_uv > MARGIN) || (mh + hi_uv < -MARGIN);
        if (os) begin
          sure_s++;
          if (final_map[r].heal[c] || final_map[r].mask[c]) begin
            failures++; $display("FAIL stable cell %0d/%0d marked (m=%0d)", r, c, mo);
          end
        end
        if (od) begin
          sure_d++;
          if (hd && !final_map[r].mask[c]) begin
            failures++; $display("FAIL dark-in-both cell %0d/%0d not masked", r, c);
          end
          if (hs && !(final_map[r].heal[c] && !final_map[r].mask[c])) begin
            failures++; $display("FAIL healable cell %0d/%0d not healed", r, c);
          end
        end
        if (final_map[r].heal[c] && final_map[r].mask[c]) begin
          failures++; $display("FAIL cell %0d/%0d both healed and masked", r, c);
        end
        exp_masked += final_map[r].mask[c];
        exp_healed += final_map[r].heal[c];
      end
    end
    checks += 3;
    check(int'(n_masked) == exp_masked, "masked count");
    check(int'(n_healed) == exp_healed, "healed count");
    n_dark += sure_d; n_heal_map += exp_healed; n_mask_map += exp_masked;
    $display("%s: locked %0d, fine %0d, %0d clocks, healed %0d, masked %0d (%0.1f%% of cells)",
             md == MODE_D_ASCH ? "D-ASCH" : "S-ASCH", locked_value, fine_steps, cyc,
             exp_healed, exp_masked, 100.0 * exp_masked / (ROWS * COLS));
  endtask

  // one key generation, checked against the map and the cell values
  task automatic gen_key(output logic [KEY-1:0] k);
    logic [KEY-1:0] exp_k;
    int n;
    n = 0;
    for (int r = 0; r < ROWS && n < KEY; r++)
      for (int c = 0; c < COLS && n < KEY; c++) begin
        if (final_map[r].mask[c]) n_key_mask++;
        else begin
          exp_k[n] = final_map[r].heal[c] ? (m_uv(r, c, 1) > 0) : (m_uv(r, c, 0) > 0);
          if (final_map[r].heal[c]) n_key_heal++;
          n++;
        end
      end
    @(negedge clk) key_start = 1;
    @(negedge clk) key_start = 0;
    wait (key_valid || key_err);
    @(negedge clk);
    check(key_valid && !key_err, "key generated");
    check(key == exp_k, "key value");
    k = key;
  endtask

  initial begin
    logic [KEY-1:0] k1, k2, k3;
    int t_rst;
    mode = MODE_D_ASCH;
    skew = 12'(SKEW);
    nvm_rd_data = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    t_rst = $time;
    repeat (4) @(negedge clk);

    // dynamic mode: map in the on-chip LUT, run started at power-up
    stabilize(MODE_D_ASCH, 1'b1, t_rst);
    n_mode_d++;
    gen_key(k1);
    gen_key(k2);
    check(k1 == k2, "same key twice");

    // raw reads of row 5, original and healed
    for (int h = 0; h < 2; h++) begin
      @(negedge clk) begin raw_rd = 1; raw_row = 5; raw_heal = h[0]; end
      @(negedge clk) raw_rd = 0;
      wait (raw_valid);
      @(negedge clk);
      n_raw++;
      for (int c = 0; c < COLS; c++) begin
        int m;
        m = m_uv(5, c, h[0]);
        if (m > 600 || m < -600) check(raw_data[c] == (m > 0), $sformatf("raw bit %0d", c));
      end
    end

    // static mode: map in the NVM
    stabilize(MODE_S_ASCH, 1'b0, 0);
    n_mode_s++;
    gen_key(k3);
    check(nvm_reads > 0, "key read from NVM");

    check(n_coarse > 0, "coarse locking happened");
    check(n_fine > 0, "fine locking happened");
    check(n_skew > 0, "skew sessions happened");
    check(n_dark > 0, "dark cells found");
    check(n_heal_map > 0, "cells healed");
    check(n_mask_map > 0, "cells masked");
    check(n_key_mask > 0, "key skipped masked cells");
    check(n_key_heal > 0, "key used healed cells");
    check(n_raw > 0, "raw reads");
    check(n_mode_d > 0 && n_mode_s > 0, "both modes");
    check(n_pwr_up > 0, "power-up run");
    $display("mechanisms: coarse %0d fine %0d skew %0d dark %0d heal %0d mask %0d key-skip %0d key-heal %0d raw %0d D %0d S %0d power-up %0d",
             n_coarse, n_fine, n_skew, n_dark, n_heal_map, n_mask_map, n_key_mask, n_key_heal,
             n_raw, n_mode_d, n_mode_s, n_pwr_up);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
