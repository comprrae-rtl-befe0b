// End-to-end testbench of the tile at its default size (8 IMAs x 8 IPUs,
// 128 x 128 crossbars, 16-bit data); see tile_env for what is run and checked.
module tb_comprrae_tile_full;
  tile_env #(.NI(8), .NP(8)) env ();
  // outer watchdog, behind the environment's own
  initial begin
    repeat (1000000) @(posedge env.clk);
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures + 1);
    $finish;
  end
endmodule
