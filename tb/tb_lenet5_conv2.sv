// Workload-shaped test on the full-size tile: a LeNet-5 CONV2 kernel,
// 5 x 5 x 20 = 500 rows (4 IPUs of one IMA, num_ima = 1). Its layer has no
// ReLU, so only the adaptive approximation ends channels early. Weights and
// inputs are random with the statistics described in tile_env.
module tb_lenet5_conv2;
  tile_env #(.NI(8), .NP(8), .KROWS(500), .RELU(0)) env ();
  // outer watchdog, behind the environment's own
  initial begin
    repeat (1000000) @(posedge env.clk);
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures + 1);
    $finish;
  end
endmodule
