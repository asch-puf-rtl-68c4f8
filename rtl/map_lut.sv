// map_lut: SRAM look-up table that holds the heal/mask map in dynamic mode
// (D-ASCH), in place of the non-volatile memory the static mode needs.
//
// One word per array row, each word a map_row_t: a heal bit and a mask bit for
// every column (2 x 128 = 256 bits, 32 words, 8 kbit in all). The paper names
// an SRAM LUT with this content; the word organisation is this design's
// choice. It is written as a plain array so a memory compiler or the synthesis
// tool can map it to SRAM.
// Timing: one write port and one read port; a write takes effect at the clock
// edge, a read returns data one clock after re=1 (synchronous read).
module map_lut
  import asch_pkg::*;
#(
  parameter int unsigned DEPTH = asch_pkg::PUF_ROWS
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  map_row_t                 wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output map_row_t                 rdata
);
  map_row_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  a_waddr: assert property (@(posedge clk) we |-> int'(waddr) < DEPTH);
  a_raddr: assert property (@(posedge clk) re |-> int'(raddr) < DEPTH);
endmodule
