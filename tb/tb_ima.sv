// Testbench of one IMA (8 IPUs): random weights and random bit planes are
// written through the programming and input-bus ports; for several bit
// positions the bit plane is fetched from the local input buffer, the
// crossbars are sampled and all 16 channels converted. Each channel's sum over
// the 8 IPUs is read back from the local output buffer and compared with an
// independent model (per-bitline 8-bit saturation, shift-add, IPU sum).
module tb_ima;
  localparam int ROWS = 128, CH = 16, NP = 8;
  logic clk = 0, rst_n = 0;
  logic prog_en = 0, ib_we = 0, wl_fetch = 0, sh_hold = 0, adc_en = 0, ob_re = 0;
  logic [2:0] prog_ipu = 0, adc_slice = 0;
  logic [6:0] prog_row = 0;
  logic [255:0] prog_pos = 0, prog_neg = 0, ib_wdata = 0;
  logic [5:0] ib_waddr = 0;
  logic [3:0] wl_bit = 0, adc_ch = 0, ob_raddr = 0;
  logic [7:0] adc_tag = 0, part_tag;
  logic part_valid;
  logic [127:0] ob_rdata;
  logic [NP-1:0] adc_sat;
  int w [NP][ROWS][CH];
  logic [255:0] ibuf [64];
  int checks = 0, failures = 0;

  ima dut (.*);
  always #5 clk = ~clk;

  function automatic int ref_sum(input int b, input int c);
    int tot = 0;
    for (int i = 0; i < NP; i++) begin
      logic [ROWS-1:0] bits = ibuf[b*4 + i/2][(i%2)*ROWS +: ROWS];
      for (int j = 0; j < 8; j++) begin
        int s = 0;
        for (int r = 0; r < ROWS; r++) if (bits[r]) begin
          int m = (w[i][r][c] < 0) ? -w[i][r][c] : w[i][r][c];
          int cv = (m >> (2 * j)) & 3;
          s += (w[i][r][c] < 0) ? -cv : cv;
        end
        if (s > 127) s = 127;
        if (s < -128) s = -128;
        tot += s * (1 << (2 * j));
      end
    end
    return tot;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NP; i++)
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        prog_en = 1; prog_ipu = 3'(i); prog_row = 7'(r); prog_pos = '0; prog_neg = '0;
        for (int c = 0; c < CH; c++) begin
          automatic int m;
          w[i][r][c] = (int'($urandom_range(0, 65535)) - 32768) / (1 << $urandom_range(0, 8));
          m = (w[i][r][c] < 0) ? -w[i][r][c] : w[i][r][c];
          for (int j = 0; j < 8; j++)
            if (w[i][r][c] >= 0) prog_pos[(c*8+j)*2 +: 2] = 2'((m >> (2*j)) & 3);
            else                 prog_neg[(c*8+j)*2 +: 2] = 2'((m >> (2*j)) & 3);
        end
      end
    @(negedge clk); prog_en = 0;
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      ib_we = 1; ib_waddr = 6'(a);
      for (int k = 0; k < 8; k++) ib_wdata[k*32 +: 32] = $urandom & $urandom;
      ibuf[a] = ib_wdata;
    end
    @(negedge clk); ib_we = 0;
    foreach (ibuf[a]) ;
    for (int b = 15; b >= 12; b--) begin
      wl_fetch = 1; wl_bit = 4'(b);
      @(negedge clk); wl_fetch = 0;
      repeat (5) @(negedge clk);
      sh_hold = 1;
      @(negedge clk); sh_hold = 0;
      for (int c = 0; c < CH; c++) begin
        for (int j = 0; j < 8; j++) begin
          adc_en = 1; adc_ch = 4'(c); adc_slice = 3'(j); adc_tag = {4'(b), 4'(c)};
          @(negedge clk);
        end
        adc_en = 0;
        @(negedge clk);
        @(negedge clk);
        checks++;
        if (!part_valid || part_tag != {4'(b), 4'(c)}) begin failures++; $display("FAIL part_valid b %0d c %0d", b, c); end
        ob_re = 1; ob_raddr = 4'(c);
        @(negedge clk); ob_re = 0;
        checks++;
        if ($signed(ob_rdata) != 128'(signed'(ref_sum(b, c)))) begin
          failures++;
          $display("FAIL b %0d ch %0d: %0d vs %0d", b, c, $signed(ob_rdata), ref_sum(b, c));
        end
      end
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
