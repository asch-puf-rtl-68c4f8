// tb_asch_sequencer: a stand-in controller reports made-up dark rows, D1 in
// the first run (heal must be 0) and D2 in the second (heal must be 1). The
// final map must be mask = D1 & D2, heal = D1 & ~D2 for every row, written
// with map_final, and the masked/healed counts must match.
module tb_asch_sequencer;
  import asch_pkg::*;
  localparam int ROWS = 32, COLS = 128;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, heal, sc_start, sc_done = 0, sc_row_done = 0;
  logic [4:0] sc_row;
  logic [COLS-1:0] sc_dark;
  logic map_we, map_final, map_re;
  logic [4:0] map_waddr, map_raddr;
  map_row_t map_wdata, map_rdata, mem [ROWS];
  logic [12:0] n_masked, n_healed;
  logic [COLS-1:0] d1 [ROWS], d2 [ROWS];
  int checks = 0, failures = 0, n_final = 0, runs = 0;

  asch_sequencer dut (.clk, .rst_n, .start, .busy, .done, .heal, .sc_start, .sc_done,
    .sc_row_done, .sc_row, .sc_dark, .map_we, .map_final, .map_waddr, .map_wdata,
    .map_re, .map_raddr, .map_rdata, .n_masked, .n_healed);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (map_we) mem[map_waddr] <= map_wdata;
    if (map_re) map_rdata <= mem[map_raddr];
    if (rst_n && map_we && map_final) n_final <= n_final + 1;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // stand-in self-checking controller
  initial begin
    forever begin
      @(posedge clk);
      if (sc_start) begin
        bit h;
        h = heal;
        check(h == (runs == 1), "heal level in this round");
        runs++;
        for (int r = 0; r < ROWS; r++) begin
          repeat (20) @(negedge clk);
          sc_row_done = 1; sc_row = 5'(r); sc_dark = h ? d2[r] : d1[r];
          @(negedge clk) sc_row_done = 0;
        end
        repeat (3) @(negedge clk);
        sc_done = 1;
        @(negedge clk) sc_done = 0;
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int em, eh;
    for (int r = 0; r < ROWS; r++) begin
      d1[r] = {$urandom, $urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom, $urandom};
      d2[r] = {$urandom, $urandom, $urandom, $urandom};
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (done);
    repeat (2) @(negedge clk);
    em = 0; eh = 0;
    for (int r = 0; r < ROWS; r++) begin
      check(mem[r].mask == (d1[r] & d2[r]), $sformatf("mask row %0d", r));
      check(mem[r].heal == (d1[r] & ~d2[r]), $sformatf("heal row %0d", r));
      em += $countones(d1[r] & d2[r]);
      eh += $countones(d1[r] & ~d2[r]);
    end
    check(int'(n_masked) == em, "masked count");
    check(int'(n_healed) == eh, "healed count");
    check(n_final == ROWS, $sformatf("%0d final writes for %0d rows", n_final, ROWS));
    check(runs == 2, "two checking rounds");
    check(!busy, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
