// tb_validity_detector: changes while valid_r=1 are ignored; after release a
// steady input keeps valid=1; a single rise or a single fall drops valid to 0
// until the next reset. Also a random sequence against a reference.
module tb_validity_detector;
  logic clk = 0, rst_n = 0, valid_r = 1, out = 0, valid;
  int checks = 0, failures = 0;

  validity_detector dut (.clk, .rst_n, .valid_r, .out, .valid);

  always #5 clk = ~clk;

  task automatic expect_valid(input bit v, input string what);
    checks++;
    if (valid !== v) begin
      failures++;
      $display("FAIL %s: valid=%0b", what, valid);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit prev, seen;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // toggling during reset
    repeat (6) begin @(negedge clk) out = ~out; end
    @(negedge clk) expect_valid(1, "in reset");
    valid_r = 0;
    repeat (10) @(negedge clk);
    expect_valid(1, "steady");
    out = ~out;                     // one transition
    repeat (2) @(negedge clk);
    expect_valid(0, "after one transition");
    out = ~out;
    repeat (5) @(negedge clk);
    expect_valid(0, "stays dark");
    valid_r = 1;
    repeat (2) @(negedge clk);
    expect_valid(1, "re-armed");
    // fall only
    out = 1;
    repeat (2) @(negedge clk);
    valid_r = 0;
    repeat (3) @(negedge clk);
    expect_valid(1, "high steady");
    out = 0;
    repeat (2) @(negedge clk);
    expect_valid(0, "fall detected");
    // random windows against a reference
    for (int w = 0; w < 200; w++) begin
      valid_r = 1;
      out = $urandom_range(1);
      repeat (2) @(negedge clk);
      valid_r = 0;
      prev = out; seen = 0;
      for (int i = 0; i < 8; i++) begin
        if ($urandom_range(15) == 0) out = ~out;
        if (out != prev) seen = 1;
        prev = out;
        @(negedge clk);
      end
      @(negedge clk);
      expect_valid(!seen, "random window");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
