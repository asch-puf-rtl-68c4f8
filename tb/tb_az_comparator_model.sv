// tb_az_comparator_model: comp follows V1 > V2 at each strobe when the
// difference is well above the noise, and holds between strobes.
module tb_az_comparator_model;
  logic clk = 0, strobe = 0, comp;
  int   v1_uv, v2_uv;
  int   checks = 0, failures = 0;

  az_comparator_model dut (.clk, .strobe, .v1_uv, .v2_uv, .comp);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    v2_uv = 615000;
    for (int i = 0; i < 200; i++) begin
      bit exp_above;
      exp_above = i[0];
      v1_uv = exp_above ? 615000 + 100 + i : 615000 - 100 - i;
      @(negedge clk) strobe = 1;
      @(negedge clk) strobe = 0;
      checks++;
      if (comp !== exp_above) begin
        failures++;
        $display("FAIL i=%0d comp=%0b", i, comp);
      end
      // no strobe: the latch must hold even if the inputs swap
      v1_uv = exp_above ? 600000 : 630000;
      @(negedge clk);
      checks++;
      if (comp !== exp_above) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
