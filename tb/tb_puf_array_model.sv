// tb_puf_array_model: with noise off, every cell must read the sign of its
// mismatch (recomputed here from the same hash formula), the healed cells must
// give a different pattern, a large V1-V2 tilt must force all ones or all
// zeros, and bl must only change while en=1. With a drift of +/-10 mV set,
// every cell must read the sign of its mismatch plus drift x its own factor
// (both recomputed here), and some cells must differ from the no-drift read.
module tb_puf_array_model;
  localparam int ROWS = 32, COLS = 128, SPREAD = 40000;
  localparam int unsigned SEED = 32'h1234_5678;
  logic            clk = 0, en = 0, heal = 0;
  logic [4:0]      row;
  int              v1_uv = 615000, v2_uv = 615000;
  logic [COLS-1:0] bl;
  int              checks = 0, failures = 0;

  puf_array_model #(.NOISE_UV(0)) dut (.clk, .en, .row, .heal, .v1_uv, .v2_uv, .bl);

  always #5 clk = ~clk;

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

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [COLS-1:0] orig, hv, held;
    int ones = 0;
    en = 1;
    for (int r = 0; r < ROWS; r++) begin
      row = 5'(r); heal = 0;
      @(posedge clk); #1 orig = bl;
      heal = 1;
      @(posedge clk); #1 hv = bl;
      for (int c = 0; c < COLS; c++) begin
        checks += 2;
        if (orig[c] != (m_uv(r, c, 0) > 0)) failures++;
        if (hv[c]   != (m_uv(r, c, 1) > 0)) failures++;
        ones += orig[c];
      end
      checks++;
      if (orig == hv) failures++;
    end
    checks++;
    if (ones < 1700 || ones > 2400) begin
      failures++;
      $display("FAIL bias: %0d ones of 4096", ones);
    end
    v1_uv = 615000 + 50000; row = 3; heal = 0;
    @(posedge clk); #1 checks++; if (bl != '1) failures++;
    v1_uv = 615000 - 50000;
    @(posedge clk); #1 checks++; if (bl != '0) failures++;
    // drift
    v1_uv = 615000;
    for (int d = -10000; d <= 10000; d += 20000) begin
      int moved;
      moved = 0;
      dut.drift_uv = d;
      for (int r = 0; r < ROWS; r++)
        for (int h = 0; h < 2; h++) begin
          row = 5'(r); heal = h[0];
          @(posedge clk); #1;
          for (int c = 0; c < COLS; c++) begin
            int m;
            m = m_uv(r, c, h[0]);
            checks++;
            if (bl[c] != (m + (d * k_q10(r, c, h[0])) / 1024 > 0)) failures++;
            moved += (bl[c] != (m > 0));
          end
        end
      checks++;
      if (moved == 0) begin failures++; $display("FAIL drift %0d moves no cell", d); end
    end
    dut.drift_uv = 0;
    en = 0; v1_uv = 615000 + 50000; held = bl;
    repeat (3) @(posedge clk);
    #1 checks++; if (bl != held) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
