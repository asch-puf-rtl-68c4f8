// key_stabilizer: output stabilization module. It turns the array plus its
// heal/mask map into a fixed-length stable key.
//
// Rows are visited in order from row 0. For each row the module reads the
// row's map entry, then the row's original values (heal=0) and its healed
// values (heal=1) through the array read port, and walks the columns one per
// clock from column 0: a masked column is skipped, a healed column gives its
// healed value, any other column its original value. Kept bits fill the key
// from key[0] upward until KEY_BITS bits are collected; key_valid then rises.
// If the array runs out of usable cells first, key_err rises instead.
// Example (5 cells, cell 2 masked, cell 3 healed): the key is
// {PUF1, PUF3_heal, PUF4} in the order visited.
// The paper gives the function (sequential readout of stable cells driven by
// the map, healed cells read healed); reading every row twice, the bit order
// and the 128-bit default key length (the paper's example key size) are this
// design's choices.
// Interface: start (pulse, ignored while busy). The array read port is a
// request/valid pair: rd_req is held until rd_valid returns the row in
// rd_data. The map store answers map_re with map_rdata one clock later.
// Timing: per row, 1 map read + 2 array reads + N_COLS scan clocks.
// Lint note: rst_n is the asynchronous reset of every flop; tools that see it
// also sampled on the clock are seeing the assertions' disable iff clause.
module key_stabilizer
  import asch_pkg::*;
#(
  parameter int unsigned N_ROWS   = asch_pkg::PUF_ROWS,
  parameter int unsigned N_COLS   = asch_pkg::PUF_COLS,
  parameter int unsigned KEY_BITS = 128
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      busy,
  // map store
  output logic                      map_re,
  output logic [$clog2(N_ROWS)-1:0] map_raddr,
  input  map_row_t                  map_rdata,
  // array read port
  output logic                      rd_req,
  output logic [$clog2(N_ROWS)-1:0] rd_row,
  output logic                      rd_heal,
  input  logic                      rd_valid,
  input  logic [N_COLS-1:0]         rd_data,
  // key
  output logic [KEY_BITS-1:0]       key,
  output logic                      key_valid,
  output logic                      key_err
);
  typedef enum logic [2:0] {K_IDLE, K_MAP, K_MAP_WAIT, K_RD_ORIG, K_RD_HEAL, K_SCAN} state_e;
  localparam int unsigned RW = $clog2(N_ROWS);
  localparam int unsigned CW = $clog2(N_COLS);
  localparam int unsigned KW = $clog2(KEY_BITS + 1);
  localparam int unsigned KIW = (KEY_BITS > 1) ? $clog2(KEY_BITS) : 1;

  state_e            state;
  logic [RW-1:0]     row;
  logic [CW-1:0]     col;
  logic [KW-1:0]     n;
  map_row_t          map_q;
  logic [N_COLS-1:0] orig_q, heal_q;

  // key bit count after the current scan column
  logic [KW-1:0] n_next;
  assign n_next = map_q.mask[col] ? n : n + 1'b1;

  assign busy      = (state != K_IDLE);
  assign map_re    = (state == K_MAP);
  assign map_raddr = row;
  assign rd_req    = (state == K_RD_ORIG || state == K_RD_HEAL);
  assign rd_row    = row;
  assign rd_heal   = (state == K_RD_HEAL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= K_IDLE;
      row       <= '0;
      col       <= '0;
      n         <= '0;
      map_q     <= '0;
      orig_q    <= '0;
      heal_q    <= '0;
      key       <= '0;
      key_valid <= 1'b0;
      key_err   <= 1'b0;
    end else begin
      unique case (state)
        K_IDLE: if (start) begin
          state     <= K_MAP;
          row       <= '0;
          n         <= '0;
          key       <= '0;
          key_valid <= 1'b0;
          key_err   <= 1'b0;
        end
        K_MAP:      state <= K_MAP_WAIT;
        K_MAP_WAIT: begin
          map_q <= map_rdata;
          state <= K_RD_ORIG;
        end
        K_RD_ORIG: if (rd_valid) begin
          orig_q <= rd_data;
          state  <= K_RD_HEAL;
        end
        K_RD_HEAL: if (rd_valid) begin
          heal_q <= rd_data;
          col    <= '0;
          state  <= K_SCAN;
        end
        K_SCAN: begin
          if (!map_q.mask[col])
            key[KIW'(n)] <= map_q.heal[col] ? heal_q[col] : orig_q[col];
          n   <= n_next;
          col <= col + 1'b1;
          if (n_next == KW'(KEY_BITS)) begin
            state     <= K_IDLE;
            key_valid <= 1'b1;
          end else if (col == CW'(N_COLS - 1)) begin
            if (row == RW'(N_ROWS - 1)) begin
              state   <= K_IDLE;
              key_err <= 1'b1;
            end else begin
              row   <= row + 1'b1;
              state <= K_MAP;
            end
          end
        end
        default: state <= K_IDLE;
      endcase
    end
  end

  a_key_index: assert property (@(posedge clk) disable iff (!rst_n)
    (state == K_SCAN) |-> int'(n) < KEY_BITS);
endmodule
