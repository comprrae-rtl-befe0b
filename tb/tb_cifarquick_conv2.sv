// Workload-shaped test on the full-size tile: a CifarQuick CONV2 kernel,
// 5 x 5 x 32 = 800 rows (7 IPUs of one IMA, num_ima = 1), followed by ReLU,
// 16 of its 32 output channels per MAC. Weights and inputs are random with
// the statistics described in tile_env, not the trained network's.
module tb_cifarquick_conv2;
  tile_env #(.NI(8), .NP(8), .KROWS(800), .RELU(1)) env ();
  // outer watchdog, behind the environment's own
  initial begin
    repeat (1000000) @(posedge env.clk);
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures + 1);
    $finish;
  end
endmodule
