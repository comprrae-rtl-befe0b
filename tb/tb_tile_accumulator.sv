// Testbench of tile_accumulator: random bursts of 1..8 beats for random
// channels and iterations, in unsigned and two's complement mode, against a
// model Accu[ch] += (+/-) (sum of beats) * 2^(15 - iteration); also checks
// clear and the one-cycle update output.
module tb_tile_accumulator;
  localparam int N_CH = 16, ACC_W = 48;
  logic clk = 0, rst_n = 0, clear = 0, signed_in = 0;
  logic [3:0] sign_iter = 0;  // the sign is applied in iteration 0 here
  logic in_valid = 0, in_first = 0, in_last = 0;
  logic [7:0] in_tag = 0;
  logic signed [29:0] in_val = 0;
  logic upd_valid;
  logic [3:0] upd_ch, upd_iter;
  logic signed [ACC_W-1:0] upd_accu;
  logic signed [ACC_W-1:0] accu [N_CH];
  longint model [N_CH];
  int checks = 0, failures = 0;

  tile_accumulator dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int mode = 0; mode < 2; mode++) begin
      signed_in = 1'(mode);
      clear = 1;
      @(negedge clk); clear = 0;
      foreach (model[c]) model[c] = 0;
      for (int n = 0; n < 300; n++) begin
        automatic int c = $urandom_range(0, N_CH - 1);
        automatic int it = $urandom_range(0, 15);
        automatic int nb = $urandom_range(1, 8);
        automatic longint s = 0;
        for (int b = 0; b < nb; b++) begin
          in_valid = 1; in_first = (b == 0); in_last = (b == nb - 1);
          in_tag = {4'(it), 4'(c)};
          in_val = 30'(int'($urandom_range(0, 1 << 26)) - (1 << 25));
          s += longint'(in_val);
          @(negedge clk);
        end
        in_valid = 0;
        if (mode == 1 && it == 0) model[c] -= s * (longint'(1) << (15 - it));
        else                      model[c] += s * (longint'(1) << (15 - it));
        checks++;
        if (!upd_valid || upd_ch != 4'(c) || upd_iter != 4'(it) || longint'(upd_accu) != model[c]) begin
          failures++;
          $display("FAIL upd ch %0d it %0d: %0d vs %0d", c, it, upd_accu, model[c]);
        end
        if ($urandom_range(0, 1)) @(negedge clk);
      end
      for (int c = 0; c < N_CH; c++) begin
        checks++;
        if (longint'(accu[c]) != model[c]) begin failures++; $display("FAIL accu %0d", c); end
      end
    end
    clear = 1;
    @(negedge clk); clear = 0;
    for (int c = 0; c < N_CH; c++) begin
      checks++;
      if (accu[c] != 0) begin failures++; $display("FAIL clear %0d", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
