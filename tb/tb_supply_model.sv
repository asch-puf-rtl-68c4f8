// tb_supply_model: with SW closed V1 must equal V2 (615 mV); with SW open V1
// must move toward the DAC voltage gradually (filtered), settle on it to
// within 50 uV after 12 filter time constants, and resolve one 130 uV step.
// The step response is also compared, clock by clock, with the exponential
// v(n) = vdac + (v0 - vdac) * (1 - 1/256)^n worked out here. Finally the DAC
// input is dithered between two codes 2080 uV apart, high for 7 of every 16
// clocks: V1 must average to the low code plus 7/16 of a code (910 uV) and
// its ripple must stay under one 130 uV fine step.
module tb_supply_model;
  logic clk = 0, sw;
  int   vdac_uv, v1_uv, v2_uv;
  int   checks = 0, failures = 0;

  supply_model dut (.clk, .sw, .vdac_uv, .v1_uv, .v2_uv);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: v1=%0d v2=%0d", what, v1_uv, v2_uv);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sw = 1; vdac_uv = 400000;
    repeat (5) @(posedge clk);
    #1 check(v1_uv == 615000 && v2_uv == 615000, "shorted");
    sw = 0; vdac_uv = 500000;
    repeat (10) @(posedge clk);
    #1 check(v1_uv < 615000 && v1_uv > 600000, "filtered, not a jump");
    repeat (3072) @(posedge clk);
    #1 check(v1_uv > 500000 - 50 && v1_uv < 500000 + 50, "settled low");
    check(v2_uv == 615000, "V2 unaffected");
    vdac_uv = 500130;  // one fine step
    repeat (3072) @(posedge clk);
    #1 check(v1_uv > 500130 - 20 && v1_uv < 500130 + 20, "fine step resolved");
    // clock-by-clock step response from the settled value
    begin
      real v0, expv;
      v0 = real'(v1_uv);
      vdac_uv = 560000;
      for (int n = 1; n <= 1024; n++) begin
        @(posedge clk); #1;
        expv = 560000.0 + (v0 - 560000.0) * ((1.0 - 1.0 / 256.0) ** n);
        check(real'(v1_uv) > expv - 3.0 && real'(v1_uv) < expv + 3.0,
              $sformatf("step response at clock %0d (expected %0.1f)", n, expv));
      end
    end
    // 4-bit PWM dither averaged by the filter
    begin
      longint sum;
      int vmin, vmax;
      for (int p = 0; p < 300; p++)
        for (int ph = 0; ph < 16; ph++) begin
          vdac_uv = (ph < 7) ? 502080 : 500000;
          @(posedge clk);
        end
      sum = 0; vmin = 1 << 30; vmax = 0;
      for (int p = 0; p < 16; p++)
        for (int ph = 0; ph < 16; ph++) begin
          vdac_uv = (ph < 7) ? 502080 : 500000;
          @(posedge clk); #1;
          sum += longint'(v1_uv);
          if (v1_uv < vmin) vmin = v1_uv;
          if (v1_uv > vmax) vmax = v1_uv;
        end
      check(sum / 256 > 500910 - 10 && sum / 256 < 500910 + 10,
            $sformatf("dithered average %0d, expected 500910", sum / 256));
      check(vmax - vmin < 130, $sformatf("ripple %0d uV under one fine step", vmax - vmin));
    end
    sw = 1;
    repeat (2) @(posedge clk);
    #1 check(v1_uv == 615000, "shorted again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
