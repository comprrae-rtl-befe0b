// Testbench of eval_logic: the worked example of the paper's Fig. 2 (inner
// product of activations [4,12,10] and weights [4,-8,-5], 4-bit inputs)
// followed by random cases checked against an independent integer model.
module tb_eval_logic;
  localparam int ACC_W = 48;
  logic signed [ACC_W-1:0] accu, max_est, min_est;
  logic [7:0] thr;
  logic relu_en, approx_en, term_relu, term_approx;
  int checks = 0, failures = 0;

  eval_logic #(.ACC_W(ACC_W), .T_W(8)) dut (.*);

  task automatic expect_eq(input logic exp_r, input logic exp_a, input string what);
    #1;
    checks++;
    if (term_relu !== exp_r || term_approx !== exp_a) begin
      failures++;
      $display("FAIL %s: relu %0b/%0b approx %0b/%0b", what, term_relu, exp_r, term_approx, exp_a);
    end
  endtask

  initial begin
    // Fig. 2: Accu = -104,-120,-130 ; Max = 119,51,17 ; Min = -109,-47,-15
    relu_en = 1; approx_en = 0; thr = 8'd128;
    accu = -104; max_est = 119; min_est = -109; expect_eq(0, 0, "fig2 relu it0");
    accu = -120; max_est = 51;  min_est = -47;  expect_eq(1, 0, "fig2 relu it1");
    relu_en = 0; approx_en = 1;                 // T = 0.5
    accu = -104; max_est = 119; min_est = -109; expect_eq(0, 0, "fig2 approx it0");
    accu = -120; max_est = 51;  min_est = -47;  expect_eq(0, 1, "fig2 approx it1");
    accu = -130; max_est = 17;  min_est = -15;  expect_eq(0, 1, "fig2 approx it2");
    // boundary: equality terminates
    relu_en = 1; approx_en = 1; thr = 8'd64;    // T = 0.25
    accu = 400; max_est = 100; min_est = -100;  expect_eq(0, 1, "equal bound");
    accu = 400; max_est = 101; min_est = -100;  expect_eq(0, 0, "above bound");
    accu = -5;  max_est = 5;   min_est = -50;   expect_eq(1, 0, "relu sum zero");
    // random cases against a reference
    for (int n = 0; n < 2000; n++) begin
      longint a, mx, mn, lim;
      logic er, ea;
      a  = longint'($urandom_range(0, 2000000)) - 1000000;
      mx = longint'($urandom_range(0, 400000)) - 100000;
      mn = longint'($urandom_range(0, 400000)) - 300000;
      thr = 8'($urandom);
      relu_en = 1'($urandom); approx_en = 1'($urandom);
      accu = ACC_W'(a); max_est = ACC_W'(mx); min_est = ACC_W'(mn);
      lim = (a < 0 ? -a : a) * longint'(thr);
      er = relu_en && (a + mx <= 0);
      ea = approx_en && ((mx < 0 ? -mx : mx) * 256 <= lim) && ((mn < 0 ? -mn : mn) * 256 <= lim);
      expect_eq(er, ea, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
