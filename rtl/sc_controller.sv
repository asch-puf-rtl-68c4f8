// sc_controller: self-checking controller of the ASCH-PUF. It finds the dark
// (potentially unstable) cells of the whole array in one run.
//
// A run has two parts.
//  1. Locking, once per run. With SW open, V1 comes from a regulator biased by
//     the DAC and no longer equals V2 (load imbalance). The controller brings
//     V1 back onto V2: an 8-step binary search on the 8-bit DAC code (coarse),
//     then a linear search over the 4-bit PWM dither (fine) that takes 1 to 16
//     steps. Each step sets the 12-bit V1 value, waits SETTLE_CYCLES clocks
//     for V1 to settle, then strobes the comparator N_VOTES (5) times and
//     takes the majority (comp=1: V1 above V2). Coarse keeps a trial bit when
//     V1 is not above V2. Fine tries base+1, base+2, ... (base = coarse code
//     x 16) and stops at the first k where V1 is above V2, locking at
//     base+k-1; if it never flips, it locks at base+16.
//  2. Skew and detect, once per row. With the row selected, V1 is set to
//     locked-skew and, after settling, the row is evaluated N_EVAL (64) times
//     with the CLK_T strobe; then V1 is set to locked+skew and the row is
//     evaluated 64 times more. The validity detectors are held in reset
//     (VALID_R=1) until the first evaluation has been captured and are then
//     left running across both sessions, so any column that flips once is
//     reported dark. At the end of the row dark = ~valid is output with
//     row_done.
// Each setting of V1 is one self-checking step, so a run takes 8 + (1..16) +
// 2 x N_ROWS steps (at most 88 for 32 rows), as in the paper. The step count
// is output for checking. The sequence, the 8/4-bit split, the 5 votes, the
// 64 evaluations, the two skew directions (negative first) and the step count
// follow the paper. The settle time, the strobe spacing (COMP_GAP, EVAL_GAP),
// the comparator polarity and saturation of locked+/-skew at the ends of the
// 12-bit range are this design's choices.
// Interface: start (pulse, ignored while busy) begins a run; skew is sampled
// then, in 12-bit V1 steps. busy is high and sw low for the whole run; done
// pulses for one clock at its end.
// Lint note: rst_n is the asynchronous reset of every flop; tools that see it
// also sampled on the clock are seeing the assertions' disable iff clause.
module sc_controller
  import asch_pkg::*;
#(
  parameter int unsigned N_ROWS        = asch_pkg::PUF_ROWS,
  parameter int unsigned N_COLS        = asch_pkg::PUF_COLS,
  parameter int unsigned N_EVAL        = asch_pkg::N_EVAL_SESSION,
  parameter int unsigned SETTLE_CYCLES = 2048,
  parameter int unsigned COMP_GAP      = 4,
  parameter int unsigned EVAL_GAP      = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [LOCK_BITS-1:0]      skew,
  // analog side
  output logic                      sw,           // 1: V1 tied to V2
  output logic [LOCK_BITS-1:0]      v1_value,     // 12-bit V1 setting to the PWM/DAC
  output logic                      comp_strobe,  // comparator activation
  input  logic                      comp,         // latched: V1 above V2
  output logic                      wl_en,
  output logic [$clog2(N_ROWS)-1:0] wl_row,
  output logic                      clk_t,        // evaluation strobe to the readout
  output logic                      valid_r,      // validity detector reset
  input  logic [N_COLS-1:0]         valid,
  // results
  output logic                      busy,
  output logic                      done,
  output logic                      row_done,
  output logic [$clog2(N_ROWS)-1:0] row_addr,
  output logic [N_COLS-1:0]         dark,
  output logic [LOCK_BITS-1:0]      locked_value,
  output logic [7:0]                coarse_steps,
  output logic [7:0]                fine_steps,
  output logic [15:0]               step_count
);
  typedef enum logic [1:0] {PH_COARSE, PH_FINE, PH_SKEW_LO, PH_SKEW_HI} phase_e;
  typedef enum logic [2:0] {S_IDLE, S_SETTLE, S_VOTE, S_EVAL, S_ROW_END} state_e;

  localparam int unsigned RW = $clog2(N_ROWS);
  localparam int unsigned FINE_STEPS = 1 << PWM_BITS;
  localparam logic [LOCK_BITS:0] V_MAX = (1 << LOCK_BITS) - 1;

  phase_e                 phase;
  state_e                 state;
  logic [DAC_BITS-1:0]    code;
  logic [2:0]             bit_idx;
  logic [PWM_BITS:0]      k;
  logic [LOCK_BITS-1:0]   skew_q;
  logic [15:0]            cnt;
  logic [2:0]             vote_idx;
  logic [N_VOTES-2:0]     votes;
  logic [$clog2(N_EVAL)-1:0] eval_idx;
  logic [7:0]             gap;
  logic [RW-1:0]          row;

  // 12-bit clamp of a 13-bit sum
  function automatic logic [LOCK_BITS-1:0] clamp_hi(input logic [LOCK_BITS:0] v);
    return (v > V_MAX) ? LOCK_BITS'(V_MAX) : v[LOCK_BITS-1:0];
  endfunction
  function automatic logic [LOCK_BITS-1:0] skew_lo(input logic [LOCK_BITS-1:0] l,
                                                   input logic [LOCK_BITS-1:0] s);
    return (s > l) ? '0 : l - s;
  endfunction

  logic [N_VOTES-1:0] all_votes;
  logic               above;
  logic [LOCK_BITS:0] base;
  assign all_votes = {votes[N_VOTES-2:0], comp};
  assign above     = majority(all_votes);
  assign base      = {1'b0, code, {PWM_BITS{1'b0}}};

  // coarse: keep the trial bit unless V1 ended up above V2
  logic [DAC_BITS-1:0]  code_next;
  logic [LOCK_BITS-1:0] lock_next;
  assign code_next = above ? code : (code | (DAC_BITS'(1) << bit_idx));
  // fine: lock one step below the first setting that put V1 above V2
  assign lock_next = above ? clamp_hi(base + 13'(k) - 1'b1) : clamp_hi(base + 13'(k));

  assign busy        = (state != S_IDLE);
  assign sw          = !busy;
  assign comp_strobe = (state == S_VOTE) && (gap == 0);
  assign clk_t       = (state == S_EVAL) && (gap == 0);
  assign wl_en       = busy && (phase == PH_SKEW_LO || phase == PH_SKEW_HI);
  assign wl_row      = row;
  assign valid_r     = !((phase == PH_SKEW_LO && state == S_EVAL && eval_idx != 0) ||
                         (phase == PH_SKEW_HI && busy));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase        <= PH_COARSE;
      state        <= S_IDLE;
      code         <= '0;
      bit_idx      <= '0;
      k            <= '0;
      skew_q       <= '0;
      cnt          <= '0;
      vote_idx     <= '0;
      votes        <= '0;
      eval_idx     <= '0;
      gap          <= '0;
      row          <= '0;
      v1_value     <= '0;
      locked_value <= '0;
      done         <= 1'b0;
      row_done     <= 1'b0;
      row_addr     <= '0;
      dark         <= '0;
      coarse_steps <= '0;
      fine_steps   <= '0;
      step_count   <= '0;
    end else begin
      done     <= 1'b0;
      row_done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          phase        <= PH_COARSE;
          state        <= S_SETTLE;
          cnt          <= '0;
          code         <= '0;
          bit_idx      <= 3'(DAC_BITS - 1);
          skew_q       <= skew;
          row          <= '0;
          v1_value     <= LOCK_BITS'(1) << (LOCK_BITS - 1);  // first trial: MSB set
          coarse_steps <= 8'd1;
          fine_steps   <= '0;
          step_count   <= 16'd1;
        end

        S_SETTLE: begin
          cnt <= cnt + 1'b1;
          if (cnt == 16'(SETTLE_CYCLES - 1)) begin
            cnt      <= '0;
            gap      <= '0;
            vote_idx <= '0;
            eval_idx <= '0;
            state    <= (phase == PH_COARSE || phase == PH_FINE) ? S_VOTE : S_EVAL;
          end
        end

        S_VOTE: begin
          gap <= gap + 1'b1;
          if (gap == 8'(COMP_GAP - 1)) begin
            gap      <= '0;
            votes    <= all_votes[N_VOTES-2:0];
            vote_idx <= vote_idx + 1'b1;
            if (vote_idx == 3'(N_VOTES - 1)) begin
              state <= S_SETTLE;
              if (phase == PH_COARSE) begin
                code <= code_next;
                if (bit_idx == 0) begin
                  phase      <= PH_FINE;
                  k          <= 1;
                  v1_value   <= clamp_hi({1'b0, code_next, {PWM_BITS{1'b0}}} + 1'b1);
                  fine_steps <= 8'd1;
                end else begin
                  bit_idx      <= bit_idx - 1'b1;
                  v1_value     <= {code_next | (DAC_BITS'(1) << (bit_idx - 1'b1)), {PWM_BITS{1'b0}}};
                  coarse_steps <= coarse_steps + 1'b1;
                end
                step_count <= step_count + 1'b1;
              end else begin  // PH_FINE
                if (above || k == (PWM_BITS+1)'(FINE_STEPS)) begin
                  locked_value <= lock_next;
                  phase        <= PH_SKEW_LO;
                  row          <= '0;
                  v1_value     <= skew_lo(lock_next, skew_q);
                end else begin
                  k          <= k + 1'b1;
                  v1_value   <= clamp_hi(base + 13'(k) + 1'b1);
                  fine_steps <= fine_steps + 1'b1;
                end
                step_count <= step_count + 1'b1;
              end
            end
          end
        end

        S_EVAL: begin
          gap <= gap + 1'b1;
          if (gap == 8'(EVAL_GAP - 1)) begin
            gap      <= '0;
            eval_idx <= eval_idx + 1'b1;
            if (eval_idx == ($clog2(N_EVAL))'(N_EVAL - 1)) begin
              if (phase == PH_SKEW_LO) begin
                phase      <= PH_SKEW_HI;
                state      <= S_SETTLE;
                v1_value   <= clamp_hi({1'b0, locked_value} + {1'b0, skew_q});
                step_count <= step_count + 1'b1;
              end else begin
                state <= S_ROW_END;
              end
            end
          end
        end

        S_ROW_END: begin
          row_done <= 1'b1;
          row_addr <= row;
          dark     <= ~valid;
          if (row == RW'(N_ROWS - 1)) begin
            state    <= S_IDLE;
            phase    <= PH_COARSE;
            v1_value <= locked_value;
            done     <= 1'b1;
          end else begin
            row        <= row + 1'b1;
            phase      <= PH_SKEW_LO;
            state      <= S_SETTLE;
            v1_value   <= skew_lo(locked_value, skew_q);
            step_count <= step_count + 1'b1;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // The comparator is only used during locking, the array only during skew.
  a_comp_in_lock: assert property (@(posedge clk) disable iff (!rst_n)
    comp_strobe |-> (phase == PH_COARSE || phase == PH_FINE));
  a_eval_in_skew: assert property (@(posedge clk) disable iff (!rst_n)
    clk_t |-> wl_en && !sw);
  // Fine search never exceeds 2**PWM_BITS steps.
  a_fine_bound: assert property (@(posedge clk) disable iff (!rst_n)
    fine_steps <= 8'(FINE_STEPS));
endmodule
