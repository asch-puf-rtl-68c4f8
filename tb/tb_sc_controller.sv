// tb_sc_controller: the controller runs against an ideal comparator
// (comp = V1 setting above a target T, in 12-bit steps) that is wrong on one
// of every seven activations; the wrong vote falls on every one of the five
// vote positions in turn, so only a correct 5-vote majority locks right.
// Expected: locked value = T, 8 coarse steps, (T mod 16)+1 fine steps,
// 8 + fine + 2 x rows steps in all; per row 64 evaluations at T-skew then 64
// at T+skew, the validity reset released after the first evaluation and held
// off until the row ends, and dark = ~valid for every row. Valid patterns are
// made up per row here. Three targets cover 1, 16 and an in-between number
// of fine steps; one run uses a skew larger than T to check the clamp.
module tb_sc_controller;
  localparam int ROWS = 4, COLS = 128, SETTLE = 16, EVAL_GAP = 4;
  logic clk = 0, rst_n = 0, start = 0;
  logic [11:0] skew, v1_value, locked_value;
  logic sw, comp_strobe, comp, wl_en, clk_t, valid_r, busy, done, row_done;
  logic [1:0] wl_row, row_addr;
  logic [COLS-1:0] valid, dark;
  logic [7:0] coarse_steps, fine_steps;
  logic [15:0] step_count;
  int checks = 0, failures = 0;
  int target, n_strobe;

  sc_controller #(.N_ROWS(ROWS), .SETTLE_CYCLES(SETTLE)) dut (
    .clk, .rst_n, .start, .skew, .sw, .v1_value, .comp_strobe, .comp,
    .wl_en, .wl_row, .clk_t, .valid_r, .valid, .busy, .done, .row_done,
    .row_addr, .dark, .locked_value, .coarse_steps, .fine_steps, .step_count
  );

  always #5 clk = ~clk;

  // comparator with one wrong answer in seven, so the wrong vote moves through all five vote positions
  always @(posedge clk) begin
    if (comp_strobe) begin
      n_strobe <= n_strobe + 1;
      comp <= (int'(v1_value) > target) ^ (n_strobe % 7 == 3);
    end
  end

  function automatic logic [COLS-1:0] pattern(int r);
    return {4{32'(r * 32'h9E37_79B1 + 7)}};
  endfunction
  assign valid = pattern(int'(wl_row));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (target %0d)", what, target);
    end
  endtask

  // per-row observation of the skew sessions
  int n_eval_lo, n_eval_hi, n_rowdone, vr_low_evals;
  int exp_lo, exp_hi;
  always @(posedge clk) begin
    if (clk_t) begin
      if (v1_value == 12'(exp_lo)) n_eval_lo <= n_eval_lo + 1;
      else if (v1_value == 12'(exp_hi)) n_eval_hi <= n_eval_hi + 1;
      if (!valid_r) vr_low_evals <= vr_low_evals + 1;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int t, input int s);
    int exp_fine;
    target = t;
    exp_lo = (s > t) ? 0 : t - s;
    exp_hi = (t + s > 4095) ? 4095 : t + s;
    skew = 12'(s);
    exp_fine = (t % 16) + 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    check(busy && !sw, "busy with SW open");
    for (int r = 0; r < ROWS; r++) begin
      n_eval_lo = 0; n_eval_hi = 0; vr_low_evals = 0;
      @(posedge row_done);
      @(negedge clk);
      check(int'(locked_value) == t, $sformatf("locked %0d", locked_value));
      check(int'(row_addr) == r, "row order");
      check(dark == ~pattern(r), "dark = ~valid");
      check(n_eval_lo == 64, $sformatf("row %0d: %0d evals at -skew", r, n_eval_lo));
      check(n_eval_hi == 64, $sformatf("row %0d: %0d evals at +skew", r, n_eval_hi));
      check(vr_low_evals == 127, $sformatf("validity armed for %0d evals", vr_low_evals));
    end
    wait (done);
    @(negedge clk);
    check(coarse_steps == 8, "8 coarse steps");
    check(int'(fine_steps) == exp_fine, $sformatf("fine steps %0d", fine_steps));
    check(int'(step_count) == 8 + exp_fine + 2 * ROWS, $sformatf("steps %0d", step_count));
    check(!busy && sw, "idle with SW closed");
  endtask

  initial begin
    n_strobe = 0;
    skew = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(12'h7A5, 61);
    run(12'h40F, 8);
    run(12'h100, 300);
    run(12'h020, 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
