// Behavioural model of the sample-hold circuits of one IPU (128 in the
// paper's configuration, one per bitline). This is an analog part.
//
// On hold the current bitline values are captured and kept until the next
// hold, so the ADC can convert iteration k while the crossbar already
// computes iteration k+1. Timing: q changes on the clock edge where hold is
// 1. The held values start at zero.
module sample_hold #(
  parameter int COLS = 128,
  parameter int BL_W = 11
) (
  input  logic                   clk,
  input  logic                   hold,
  input  logic signed [BL_W-1:0] d [COLS],
  output logic signed [BL_W-1:0] q [COLS]
);

  initial for (int c = 0; c < COLS; c++) q[c] = '0;

  always_ff @(posedge clk) begin
    if (hold) q <= d;
  end

endmodule
