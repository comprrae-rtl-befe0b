// End-to-end testbench of the tile at reduced size (2 IMAs of 2 IPUs, all
// other sizes at their defaults); see tile_env for what is run and checked.
module tb_comprrae_tile;
  tile_env #(.NI(2), .NP(2)) env ();
  // outer watchdog, behind the environment's own
  initial begin
    repeat (1000000) @(posedge env.clk);
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures + 1);
    $finish;
  end
endmodule
