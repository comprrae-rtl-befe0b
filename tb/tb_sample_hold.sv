// Testbench of the sample_hold model: values are captured on hold and kept
// while the inputs change.
module tb_sample_hold;
  localparam int COLS = 128;
  logic clk = 0, hold = 0;
  logic signed [10:0] d [COLS];
  logic signed [10:0] q [COLS];
  logic signed [10:0] e [COLS];
  int checks = 0, failures = 0;

  sample_hold dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int n = 0; n < 20; n++) begin
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin d[c] = 11'($urandom); e[c] = d[c]; end
      hold = 1;
      @(negedge clk);
      hold = 0;
      for (int c = 0; c < COLS; c++) d[c] = 11'($urandom);
      repeat (2) @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (q[c] !== e[c]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
