// tb_asch_puf_core: the digital core with the analog behavioural models around
// it, at reduced size (4 rows, 512-clock settling), in static mode (S-ASCH):
// the map must be written to the NVM port (kept here), the key must be built
// from the map read back through the NVM port, and a raw read requested while
// the key is being generated must be served in between, with the right data.
// Expected values come from the array model's mismatch formula, recomputed
// here.
module tb_asch_puf_core;
  import asch_pkg::*;
  localparam int ROWS = 4, COLS = 128, KEY = 128, SETTLE = 512;
  localparam int SPREAD = 40000, MARGIN = 900, SKEW = 62;
  localparam int unsigned SEED = 32'h1234_5678;

  logic clk = 0, rst_n = 0;
  asch_mode_e mode;
  logic [11:0] skew, locked_value;
  logic asch_start = 0, asch_busy, asch_done;
  logic [15:0] step_count;
  logic [7:0] coarse_steps, fine_steps;
  logic [9:0] n_masked, n_healed;
  logic key_start = 0, key_busy, key_valid, key_err;
  logic [KEY-1:0] key;
  logic raw_rd = 0, raw_heal = 0, raw_valid;
  logic [1:0] raw_row = 0;
  logic [COLS-1:0] raw_data;
  logic map_wr_en, map_wr_final, nvm_rd_en;
  logic [1:0] map_wr_addr, nvm_rd_addr, wl_row;
  map_row_t map_wr_data, nvm_rd_data;
  logic sw, comp_strobe, comp, wl_en, heal;
  logic [7:0] dac_code;
  logic [COLS-1:0] bl;
  int vdac_uv, v1_uv, v2_uv;

  asch_puf_core #(.N_ROWS(ROWS), .SETTLE_CYCLES(SETTLE)) dut (.*);
  rdac_model u_dac (.code(dac_code), .v_uv(vdac_uv));
  supply_model u_supply (.clk, .sw, .vdac_uv, .v1_uv, .v2_uv);
  az_comparator_model u_comp (.clk, .strobe(comp_strobe), .v1_uv, .v2_uv, .comp);
  puf_array_model #(.N_ROWS(ROWS)) u_array (.clk, .en(wl_en), .row(wl_row), .heal, .v1_uv, .v2_uv, .bl);

  always #5 clk = ~clk;

  map_row_t nvm [ROWS];
  int nvm_writes = 0, nvm_reads = 0;
  always @(posedge clk) begin
    if (rst_n && map_wr_en) begin
      nvm[map_wr_addr] <= map_wr_data;
      nvm_writes <= nvm_writes + 1;
    end
    if (rst_n && nvm_rd_en) begin
      nvm_rd_data <= nvm[nvm_rd_addr];
      nvm_reads <= nvm_reads + 1;
    end
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

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
    repeat (400_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [KEY-1:0] exp_k;
    int n, off_uv, lo_uv, hi_uv;
    mode = MODE_S_ASCH;
    skew = 12'(SKEW);
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk) asch_start = 1;
    @(negedge clk) asch_start = 0;
    repeat (3) @(negedge clk);
    check(asch_busy && !sw, "flow running with SW open");
    wait (asch_done);
    repeat (2) @(negedge clk);
    check(!asch_busy && sw, "flow finished with SW closed");
    check(nvm_writes == 2 * ROWS, $sformatf("%0d NVM writes (candidates + final)", nvm_writes));
    check(int'(step_count) == 8 + int'(fine_steps) + 2 * ROWS, "step count");
    off_uv = 350000 + int'(locked_value) * 130 - 615000;
    lo_uv = off_uv - SKEW * 130;
    hi_uv = off_uv + SKEW * 130;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int mo, mh;
        mo = m_uv(r, c, 0); mh = m_uv(r, c, 1);
        if ((mo + lo_uv > MARGIN) || (mo + hi_uv < -MARGIN))
          check(!nvm[r].heal[c] && !nvm[r].mask[c], "stable cell left alone");
        if ((mo + lo_uv < -MARGIN) && (mo + hi_uv > MARGIN) &&
            (mh + lo_uv < -MARGIN) && (mh + hi_uv > MARGIN))
          check(nvm[r].mask[c], "dark-in-both cell masked");
      end
    // key from NVM, with a raw read queued behind it
    n = 0;
    for (int r = 0; r < ROWS && n < KEY; r++)
      for (int c = 0; c < COLS && n < KEY; c++)
        if (!nvm[r].mask[c]) begin
          exp_k[n] = nvm[r].heal[c] ? (m_uv(r, c, 1) > 0) : (m_uv(r, c, 0) > 0);
          n++;
        end
    @(negedge clk) key_start = 1;
    @(negedge clk) begin key_start = 0; raw_rd = 1; raw_row = 2; raw_heal = 1; end
    @(negedge clk) raw_rd = 0;
    wait (raw_valid);
    @(negedge clk);
    for (int c = 0; c < COLS; c++) begin
      int m;
      m = m_uv(2, c, 1);
      if (m > 600 || m < -600) check(raw_data[c] == (m > 0), "raw healed bit");
    end
    wait (key_valid || key_err);
    @(negedge clk);
    check(key == exp_k && key_valid && !key_err, "key from NVM map");
    check(nvm_reads > 0, "NVM read for the key");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
