// Evaluation logic: the early-termination test of one output channel.
//
// After an iteration, Accu is the accumulated result so far and Max / Min are
// the offline estimates of the largest and smallest sum of the partial
// results still to come. Following the paper:
//   ReLU bypass:            Accu + Max <= 0            (output will be clamped to 0)
//   adaptive approximation: |Max| <= |Accu| * T  and  |Min| <= |Accu| * T
// built from one adder, one multiplier and comparators. T is an unsigned
// fraction thr / 2^T_W (T_W = 8, so T = 0.5 is 128 and T = 0.8 is 205); the
// format is this design's choice. Purely combinational.
module eval_logic #(
  parameter int ACC_W = 48,
  parameter int T_W   = 8
) (
  input  logic signed [ACC_W-1:0] accu,
  input  logic signed [ACC_W-1:0] max_est,
  input  logic signed [ACC_W-1:0] min_est,
  input  logic [T_W-1:0]          thr,
  input  logic                    relu_en,
  input  logic                    approx_en,
  output logic                    term_relu,
  output logic                    term_approx
);

  logic signed [ACC_W:0]   relu_sum;
  logic [ACC_W:0]          abs_accu, abs_max, abs_min;
  logic [ACC_W+T_W:0]      bound, max_scaled, min_scaled;

  function automatic logic [ACC_W:0] mag(input logic signed [ACC_W-1:0] v);
    logic signed [ACC_W:0] w;
    w = (ACC_W+1)'(v);
    return (w < 0) ? (ACC_W+1)'(-w) : (ACC_W+1)'(w);
  endfunction

  always_comb begin
    relu_sum    = (ACC_W+1)'(accu) + (ACC_W+1)'(max_est);
    abs_accu    = mag(accu);
    abs_max     = mag(max_est);
    abs_min     = mag(min_est);
    bound       = (ACC_W+T_W+1)'(abs_accu) * (ACC_W+T_W+1)'(thr);
    max_scaled  = (ACC_W+T_W+1)'(abs_max) << T_W;
    min_scaled  = (ACC_W+T_W+1)'(abs_min) << T_W;
    term_relu   = relu_en && (relu_sum <= 0);
    term_approx = approx_en && (max_scaled <= bound) && (min_scaled <= bound);
  end

endmodule
