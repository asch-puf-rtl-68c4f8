// tb_map_lut: random writes and reads against a reference array, read data
// one clock after re.
module tb_map_lut;
  import asch_pkg::*;
  logic clk = 0, we = 0, re = 0;
  logic [4:0] waddr, raddr;
  map_row_t wdata, rdata, ref_mem [32];
  int checks = 0, failures = 0;

  map_lut dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  function automatic map_row_t rnd();
    return {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 32; a++) begin
      @(negedge clk);
      we = 1; waddr = 5'(a); wdata = rnd(); ref_mem[a] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 500; i++) begin
      map_row_t exp_d;
      @(negedge clk);
      we = $urandom_range(1); waddr = 5'($urandom); wdata = rnd();
      re = 1; raddr = 5'($urandom);
      exp_d = ref_mem[raddr];              // read-before-write on the same edge
      if (we) ref_mem[waddr] = wdata;
      @(negedge clk);
      we = 0; re = 0;
      checks++;
      if (rdata !== exp_d) begin
        failures++;
        $display("FAIL read %0d", raddr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
