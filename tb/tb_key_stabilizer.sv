// tb_key_stabilizer: made-up maps and made-up original/healed rows; every
// key bit must equal the one built here (rows and columns in order, masked
// cells skipped, healed cells taken from the healed read). The array port
// answers after a random delay. The first map places the 5-cell example
// (cell 2 masked, cell 3 healed) at the start of row 0; twelve random maps
// follow, masking from 1 in 16 to 15 in 16 of the cells (the densest need
// many rows or run out); then a map with every cell masked must end in
// key_err, and one with only the last row usable must take its key from it.
module tb_key_stabilizer;
  import asch_pkg::*;
  localparam int ROWS = 32, COLS = 128, KEY = 128;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, map_re, rd_req, rd_heal, rd_valid = 0, key_valid, key_err;
  logic [4:0] map_raddr, rd_row;
  map_row_t map_rdata, map [ROWS];
  logic [COLS-1:0] rd_data, orig [ROWS], hv [ROWS];
  logic [KEY-1:0] key;
  int checks = 0, failures = 0;

  key_stabilizer dut (.clk, .rst_n, .start, .busy, .map_re, .map_raddr, .map_rdata,
    .rd_req, .rd_row, .rd_heal, .rd_valid, .rd_data, .key, .key_valid, .key_err);

  always #5 clk = ~clk;

  always @(posedge clk) if (map_re) map_rdata <= map[map_raddr];

  // array read port: answer after 1..4 clocks
  initial begin
    forever begin
      @(negedge clk);
      if (rd_req) begin
        repeat ($urandom_range(3)) @(negedge clk);
        rd_data = rd_heal ? hv[rd_row] : orig[rd_row];
        rd_valid = 1;
        @(negedge clk) rd_valid = 0;
      end
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // build a map and row values; density sets how many cells are masked:
  // 0 = 1 in 16, 1 = 1 in 4, 2 = 3 in 4, 3 = 15 in 16
  task automatic make_data(input int density);
    for (int r = 0; r < ROWS; r++) begin
      logic [COLS-1:0] a, b;
      orig[r] = {$urandom, $urandom, $urandom, $urandom};
      hv[r]   = {$urandom, $urandom, $urandom, $urandom};
      a = {$urandom, $urandom, $urandom, $urandom};
      b = {$urandom, $urandom, $urandom, $urandom};
      case (density)
        0: map[r].mask = a & b & {$urandom, $urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom, $urandom};
        1: map[r].mask = a & b;
        2: map[r].mask = a | b;
        default: map[r].mask = a | b | {$urandom, $urandom, $urandom, $urandom} | {$urandom, $urandom, $urandom, $urandom};
      endcase
      map[r].heal = {$urandom, $urandom, $urandom, $urandom} & ~map[r].mask;
    end
  endtask

  // run the module once and compare every key bit with the expected key
  task automatic run_and_check(input string what);
    logic [KEY-1:0] exp_key;
    int n;
    n = 0;
    for (int r = 0; r < ROWS && n < KEY; r++)
      for (int c = 0; c < COLS && n < KEY; c++)
        if (!map[r].mask[c]) begin
          exp_key[n] = map[r].heal[c] ? hv[r][c] : orig[r][c];
          n++;
        end
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (key_valid || key_err);
    @(negedge clk);
    if (n == KEY) begin
      check(key_valid && !key_err, {what, ": key completed"});
      for (int i = 0; i < KEY; i++)
        check(key[i] == exp_key[i], $sformatf("%s: key bit %0d", what, i));
    end else begin
      check(key_err && !key_valid, $sformatf("%s: only %0d usable cells, error expected", what, n));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // the 5-cell example on columns 0..4 of row 0: cell 2 masked, cell 3 healed
    make_data(1);
    map[0].mask[4:0] = 5'b00010;
    map[0].heal[4:0] = 5'b00100;
    run_and_check("example map");
    check(key[2:0] == {orig[0][3], hv[0][2], orig[0][0]}, "example {PUF1, PUF3heal, PUF4}");
    // random maps from sparse to dense masking; the densest needs many rows
    for (int t = 0; t < 12; t++) begin
      make_data(t % 4);
      run_and_check($sformatf("random map %0d (density %0d)", t, t % 4));
    end
    // all masked: must run out of cells
    for (int r = 0; r < ROWS; r++) map[r].mask = '1;
    run_and_check("every cell masked");
    // all masked but the last row's last 128 cells: the key comes from row 31
    for (int r = 0; r < ROWS; r++) begin map[r].mask = '1; map[r].heal = '0; end
    map[ROWS-1].mask = '0;
    map[ROWS-1].heal = {$urandom, $urandom, $urandom, $urandom};
    run_and_check("only the last row usable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
