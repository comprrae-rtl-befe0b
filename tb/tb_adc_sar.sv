// Testbench of the adc_sar model: one conversion per cycle with one cycle
// latency, selection of the addressed bitline, and saturation at the 8-bit
// range with the sat flag.
module tb_adc_sar;
  localparam int COLS = 128;
  logic clk = 0, en = 0, sat;
  logic [6:0] sel = 0;
  logic signed [10:0] ain [COLS];
  logic signed [7:0] dout;
  int checks = 0, failures = 0;
  int exp_v, exp_s;

  adc_sar dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int c = 0; c < COLS; c++) ain[c] = 11'(int'($urandom_range(0, 768)) - 384);
    ain[3] = 127; ain[4] = 128; ain[5] = -128; ain[6] = -129;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      en = 1;
      sel = (n < 4) ? 7'(3 + n) : 7'($urandom);
      exp_v = int'(ain[sel]);
      exp_s = 0;
      if (exp_v > 127)  begin exp_v = 127;  exp_s = 1; end
      if (exp_v < -128) begin exp_v = -128; exp_s = 1; end
      @(negedge clk);
      en = 0;
      checks++;
      if (int'(dout) != exp_v || int'(sat) != exp_s) begin
        failures++;
        $display("FAIL sel %0d in %0d: %0d/%0b", sel, ain[sel], dout, sat);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
