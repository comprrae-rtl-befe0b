// Testbench of one IPU: random weights (16 channels x 128 rows, 16-bit,
// split over the positive/negative arrays and 8 two-bit slices) and random
// input bit vectors. Every channel is converted in 8 cycles and its partial
// result is compared with sum_j sat8(sum_r bit_r * slice_j(w_rc)) * 4^j, the
// result expected two cycles after the last slice.
module tb_ipu;
  localparam int ROWS = 128, CH = 16;
  logic clk = 0, rst_n = 0;
  logic prog_en = 0, wl_load = 0, xbar_compute = 0, sh_hold = 0, adc_en = 0;
  logic [6:0] prog_row = 0;
  logic [255:0] prog_pos = 0, prog_neg = 0;
  logic [ROWS-1:0] wl_in = 0;
  logic [3:0] adc_ch = 0;
  logic [2:0] adc_slice = 0;
  logic [7:0] adc_tag = 0, out_tag;
  logic out_valid, adc_sat;
  logic signed [23:0] out_partial;
  int w [ROWS][CH];
  int checks = 0, failures = 0, sats = 0;

  ipu dut (.*);
  always #5 clk = ~clk;

  function automatic int ref_partial(input logic [ROWS-1:0] bits, input int c);
    int p = 0;
    for (int j = 0; j < 8; j++) begin
      int s = 0;
      for (int r = 0; r < ROWS; r++) if (bits[r]) begin
        int m = (w[r][c] < 0) ? -w[r][c] : w[r][c];
        int cv = (m >> (2 * j)) & 3;
        s += (w[r][c] < 0) ? -cv : cv;
      end
      if (s > 127) s = 127;
      if (s < -128) s = -128;
      p += s * (1 << (2 * j));
    end
    return p;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      prog_en = 1; prog_row = 7'(r); prog_pos = '0; prog_neg = '0;
      for (int c = 0; c < CH; c++) begin
        // channels 0..13 random; 14 large positive (saturates); 15 zero
        w[r][c] = int'($urandom_range(0, 65535)) - 32768;
        if (c < 14 && $urandom_range(0, 2) != 0) w[r][c] = w[r][c] / 64;
        if (c == 14) w[r][c] = 32767;
        if (c == 15) w[r][c] = 0;
        for (int j = 0; j < 8; j++) begin
          automatic int m = (w[r][c] < 0) ? -w[r][c] : w[r][c];
          if (w[r][c] >= 0) prog_pos[(c*8+j)*2 +: 2] = 2'((m >> (2*j)) & 3);
          else              prog_neg[(c*8+j)*2 +: 2] = 2'((m >> (2*j)) & 3);
        end
      end
    end
    @(negedge clk); prog_en = 0;
    for (int n = 0; n < 6; n++) begin
      logic [ROWS-1:0] bits;
      for (int k = 0; k < ROWS / 32; k++) bits[k*32 +: 32] = (n % 2) ? $urandom : ($urandom & $urandom);
      wl_in = bits; wl_load = 1;
      @(negedge clk); wl_load = 0; xbar_compute = 1;
      @(negedge clk); xbar_compute = 0; sh_hold = 1;
      @(negedge clk); sh_hold = 0;
      for (int c = 0; c < CH; c++) begin
        for (int j = 0; j < 8; j++) begin
          adc_en = 1; adc_ch = 4'(c); adc_slice = 3'(j); adc_tag = 8'(n * 16 + c);
          @(negedge clk);
          if (adc_sat) sats++;
        end
        adc_en = 0;
        @(negedge clk);
        if (adc_sat) sats++;
        checks++;
        if (!out_valid || out_tag != 8'(n * 16 + c) || int'(out_partial) != ref_partial(bits, c)) begin
          failures++;
          $display("FAIL n %0d ch %0d: %0d vs %0d (valid %0b)", n, c, out_partial, ref_partial(bits, c), out_valid);
        end
      end
    end
    checks++;
    if (sats == 0) begin failures++; $display("FAIL no saturation seen"); end
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
