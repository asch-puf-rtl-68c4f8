// tb_rdac_model: checks the DAC model's transfer line, code 0 to 255, against
// 350 mV + code x 2.08 mV computed here.
module tb_rdac_model;
  logic [7:0] code;
  int         v_uv;
  int         checks = 0, failures = 0;

  rdac_model dut (.code, .v_uv);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 256; c++) begin
      code = 8'(c);
      #10;
      checks++;
      if (v_uv != 350000 + c * 2080) begin
        failures++;
        $display("code %0d: got %0d uV", c, v_uv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
