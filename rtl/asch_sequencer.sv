// asch_sequencer: the stabilization flow common to both modes (S-ASCH at
// enrollment, D-ASCH at every power-up): check, heal, check again, and build
// the heal/mask map.
//
// Round 1 runs the self-checking controller on the original 4-stage cells
// (heal=0). For each row it reports, the dark columns are written to the map
// as heal candidates (heal=dark, mask=0). Round 2 closes every Heal switch
// (heal=1) and runs the controller again. For each row it reports, the
// sequencer reads the row's candidates back and writes the final entry:
//     mask = candidate & dark_healed   (unstable in both configurations)
//     heal = candidate & ~dark_healed  (stable once healed)
// Cells that were stable in round 1 are used as they are, whatever round 2
// says about them. The paper gives this flow and its outcome per cell; healing
// every cell at once in round 2, and keeping the candidates in the map store
// between rounds, are this design's choices. The map store is the SRAM LUT in
// D-ASCH and the NVM in S-ASCH; final=1 marks the writes of round 2, which are
// also the map reported to the server. The total number of masked and healed
// cells is counted.
// Timing: map reads have one clock of latency. The controller's rows are
// thousands of clocks apart, so a read-modify-write never overlaps another.
// Only the heal half of map_rdata is read back (it holds the round-1
// candidates); the mask half of a candidate entry is always 0.
// Lint note: rst_n is the asynchronous reset of every flop; tools that see it
// also sampled on the clock are seeing the assertions' disable iff clause.
module asch_sequencer
  import asch_pkg::*;
#(
  parameter int unsigned N_ROWS = asch_pkg::PUF_ROWS,
  parameter int unsigned N_COLS = asch_pkg::PUF_COLS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  output logic                      heal,        // to every cell's Heal switch
  // self-checking controller
  output logic                      sc_start,
  input  logic                      sc_done,
  input  logic                      sc_row_done,
  input  logic [$clog2(N_ROWS)-1:0] sc_row,
  input  logic [N_COLS-1:0]         sc_dark,
  // map store
  output logic                      map_we,
  output logic                      map_final,
  output logic [$clog2(N_ROWS)-1:0] map_waddr,
  output map_row_t                  map_wdata,
  output logic                      map_re,
  output logic [$clog2(N_ROWS)-1:0] map_raddr,
  input  map_row_t                  map_rdata,
  // statistics
  output logic [$clog2(N_ROWS*N_COLS):0] n_masked,
  output logic [$clog2(N_ROWS*N_COLS):0] n_healed
);
  typedef enum logic [2:0] {Q_IDLE, Q_START1, Q_ROUND1, Q_START2, Q_ROUND2, Q_RMW} state_e;
  localparam int unsigned CW = $clog2(N_ROWS*N_COLS) + 1;

  state_e                      state;
  logic [N_COLS-1:0]           dark2;
  logic [$clog2(N_ROWS)-1:0]   row_q;

  function automatic logic [CW-1:0] popcount(input logic [N_COLS-1:0] v);
    logic [CW-1:0] n;
    n = '0;
    for (int i = 0; i < N_COLS; i++) n += CW'(v[i]);
    return n;
  endfunction

  // merge of the candidates (round 1) with the healed check (round 2)
  logic [N_COLS-1:0] rmw_mask, rmw_heal;
  assign rmw_mask = map_rdata.heal & dark2;
  assign rmw_heal = map_rdata.heal & ~dark2;

  assign busy      = (state != Q_IDLE);
  assign heal      = (state == Q_START2 || state == Q_ROUND2 || state == Q_RMW);
  assign sc_start  = (state == Q_START1 || state == Q_START2);
  assign map_re    = (state == Q_ROUND2) && sc_row_done;
  assign map_raddr = sc_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= Q_IDLE;
      done      <= 1'b0;
      map_we    <= 1'b0;
      map_final <= 1'b0;
      map_waddr <= '0;
      map_wdata <= '0;
      dark2     <= '0;
      row_q     <= '0;
      n_masked  <= '0;
      n_healed  <= '0;
    end else begin
      done      <= 1'b0;
      map_we    <= 1'b0;
      map_final <= 1'b0;
      unique case (state)
        Q_IDLE: if (start) begin
          state    <= Q_START1;
          n_masked <= '0;
          n_healed <= '0;
        end
        Q_START1: state <= Q_ROUND1;
        Q_ROUND1: begin
          if (sc_row_done) begin
            map_we         <= 1'b1;
            map_waddr      <= sc_row;
            map_wdata.heal <= sc_dark;
            map_wdata.mask <= '0;
          end
          if (sc_done) state <= Q_START2;
        end
        Q_START2: state <= Q_ROUND2;
        Q_ROUND2: begin
          if (sc_row_done) begin
            dark2 <= sc_dark;
            row_q <= sc_row;
            state <= Q_RMW;
          end
        end
        Q_RMW: begin
          map_we         <= 1'b1;
          map_final      <= 1'b1;
          map_waddr      <= row_q;
          map_wdata.heal <= rmw_heal;
          map_wdata.mask <= rmw_mask;
          n_masked       <= n_masked + popcount(rmw_mask);
          n_healed       <= n_healed + popcount(rmw_heal);
          if (row_q == ($clog2(N_ROWS))'(N_ROWS - 1)) begin
            state <= Q_IDLE;
            done  <= 1'b1;
          end else begin
            state <= Q_ROUND2;
          end
        end
        default: state <= Q_IDLE;
      endcase
    end
  end

  // A row report never arrives while the previous one is still being merged.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    (state == Q_RMW) |-> !sc_row_done);
endmodule
