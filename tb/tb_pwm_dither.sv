// tb_pwm_dither: over any 16 consecutive clocks the DAC code must be coarse+1
// exactly `fine` times and coarse otherwise (so its average is value/16 DAC
// steps), and it must saturate at 255.
module tb_pwm_dither;
  logic clk = 0, rst_n = 0;
  logic [11:0] value;
  logic [7:0]  dac_code;
  int checks = 0, failures = 0;

  pwm_dither dut (.clk, .rst_n, .value, .dac_code);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    value = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int sum, n_up, n_base;
      value = (t < 256) ? 12'($urandom) : 12'(12'hFF0 + t[3:0]);
      repeat (3) @(negedge clk);            // let the register follow
      sum = 0; n_up = 0; n_base = 0;
      for (int i = 0; i < 16; i++) begin
        sum += dac_code;
        if (dac_code == value[11:4] + 1) n_up++;
        else if (dac_code == value[11:4]) n_base++;
        @(negedge clk);
      end
      checks++;
      if (value[11:4] == 8'hFF) begin
        if (n_base != 16) begin failures++; $display("FAIL saturation %h", value); end
      end else if (n_up != value[3:0] || n_base != 16 - value[3:0] || sum != value) begin
        failures++;
        $display("FAIL value %h: up=%0d base=%0d sum=%0d", value, n_up, n_base, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
