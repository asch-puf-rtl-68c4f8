// tb_puf_readout: in normal mode the register must take bl only on rd, in
// check mode only on clk_t; between strobes it holds.
module tb_puf_readout;
  logic clk = 0, rst_n = 0, check = 0, clk_t = 0, rd = 0;
  logic [127:0] bl, out, exp_out;
  int checks = 0, failures = 0;

  puf_readout dut (.clk, .rst_n, .check, .clk_t, .rd, .bl, .out);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    exp_out = '0;
    bl = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      check = ($urandom_range(3) == 0);
      clk_t = $urandom_range(1);
      rd    = $urandom_range(1);
      bl    = {$urandom, $urandom, $urandom, $urandom};
      if (check ? clk_t : rd) exp_out = bl;
      @(posedge clk); #1;
      checks++;
      if (out !== exp_out) begin
        failures++;
        $display("FAIL cycle %0d check=%0b clk_t=%0b rd=%0b", i, check, clk_t, rd);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
