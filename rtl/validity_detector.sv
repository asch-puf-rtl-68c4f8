// validity_detector: run-time stability check of one PUF column.
//
// In the chip, two reset-able flip-flops with their D inputs tied high are
// clocked by OUT and by inverted OUT, so either one sets on a rising or a
// falling transition of the column output; VALID is the NOR of the two. While
// VALID_R (the reset) is high both are cleared. Released during an evaluation
// window, VALID stays 1 if OUT never changed and falls to 0 for good at the
// first change: the cell is unstable (dark).
// This version is synchronous: since OUT itself only changes at clock edges,
// a rise and a fall of OUT are seen by comparing it with its value one clock
// earlier. The two flags keep the chip's structure (rising and falling).
// Timing: a change of out at edge E is reflected in valid after edge E+1.
// While valid_r=1 the previous-value register follows out, so the value that
// out holds when valid_r falls is the reference.
module validity_detector (
  input  logic clk,
  input  logic rst_n,
  input  logic valid_r,  // 1: clear (reset), 0: evaluate
  input  logic out,      // column output from the readout register
  output logic valid     // 0: a transition was seen since valid_r fell
);
  logic out_q, rose, fell;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_q <= 1'b0;
      rose  <= 1'b0;
      fell  <= 1'b0;
    end else begin
      out_q <= out;
      if (valid_r) begin
        rose <= 1'b0;
        fell <= 1'b0;
      end else begin
        if (out && !out_q) rose <= 1'b1;
        if (!out && out_q) fell <= 1'b1;
      end
    end
  end

  assign valid = ~(rose | fell);
endmodule
