// End-to-end test environment of comprrae_tile, shared by the reduced and
// the full-size testbench. NI IMAs with NP IPUs each are used; when they are
// the design defaults the tile is instantiated without a parameter list.
//
// The environment programs random 16-bit kernels (channels 0-5 mostly
// negative, 6-11 mostly positive, 12-15 mixed), builds the estimation LUT
// from the kernels with the paper's statistics-based bound (Eq. 3, with fixed
// per-bit probabilities of a 1 input bit), writes the inputs as bit planes
// and runs five MAC operations. KROWS limits the kernel to its first rows, the
// IMAs it occupies (filled IPU by IPU) being the only ones used:
//   A: ReLU layer (if RELU), ReLU bypass and approximation (T = 0.8), pooling window start
//   B: same layer, other inputs, merged into A's output by max pooling
//   C: two's complement inputs (first-layer case), approximation only (T = 0.5)
//   D: no bypass at all: every channel runs all 16 iterations
//   E: 8-bit activations (act8): only iterations 8-15, ReLU (if RELU) and T = 0.8
// An independent model recomputes every result bit-serially (per-bitline ADC
// saturation included) and the output memory is compared word by word. It
// also checks that each conversion costs exactly 8 cycles (the same fixed
// overhead for every MAC) and counts how often each mechanism occurred.
module tile_env #(
  parameter int NI = 2,
  parameter int NP = 2,
  parameter int KROWS = NI * NP * 128,  // kernel rows used (rows beyond hold zero weights)
  parameter bit RELU = 1                // the layer is followed by ReLU (MACs A and B)
) ();
  import comprrae_pkg::*;
  localparam int ROWS = 128, CH = 16;
  localparam int WPB = (NP + 1) / 2;
  localparam int IBW = WPB * ACT_BITS;
  localparam int NMAC = 5;

  logic clk = 0, rst_n = 0;
  logic imem_we = 0, lut_we = 0, prog_en = 0, omem_re = 0, start = 0;
  logic [10:0] imem_waddr = 0;
  logic [255:0] imem_wdata = 0;
  logic [7:0] lut_waddr = 0;
  logic [159:0] lut_wdata = 0;
  logic [2:0] prog_ima = 0, prog_ipu = 0;
  logic [6:0] prog_row = 0;
  logic [255:0] prog_pos = 0, prog_neg = 0;
  logic [5:0] omem_raddr = 0;
  logic [127:0] omem_rdata;
  cfg_t cfg;
  logic busy, done;
  logic [3:0] cur_iter;
  stats_t stats;

  if (NI == N_IMA && NP == N_IPU) begin : g_full
    comprrae_tile dut (.*);
  end else begin : g_reduced
    comprrae_tile #(.N_IMA_P(NI), .N_IPU_P(NP)) dut (.*);
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // loop bounds kept in variables so that the simulator does not unroll the
  // nested model loops into one huge block of code
  int n_ch = CH, n_ima = (KROWS + NP * ROWS - 1) / (NP * ROWS), n_ipu = NP, n_it = ACT_BITS, n_cell = 8, n_wpb = WPB, n_mac = NMAC;
  int w [NI][NP][ROWS][CH];
  int act [NI][NP][ROWS];
  longint lmax [CH][16], lmin [CH][16];
  int omodel [64][8];

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  function automatic int pmax(input int b, input bit sgn);
    if (sgn) return 60;
    return (b < 10) ? 60 : (b < 12) ? 5 : 0;
  endfunction
  function automatic int pmin(input int b, input bit sgn);
    return (b < 10) ? 15 : 0;
  endfunction

  // LUT per Eq. (3): max = (sum w+ * P+1,max + sum w- * P+1,min) * 2^b, summed over the
  // bits still to come; min likewise with the probabilities swapped.
  task automatic build_lut(input bit sgn);
    for (int c = 0; c < n_ch; c++) begin
      longint sp = 0, sn = 0;
      for (int m = 0; m < n_ima; m++) for (int i = 0; i < n_ipu; i++) for (int r = 0; r < ROWS; r++)
        if (w[m][i][r][c] > 0) sp += w[m][i][r][c]; else sn += w[m][i][r][c];
      for (int k = 0; k < n_it - 1; k++) begin
        longint mx = 0, mn = 0;
        for (int b = 0; b < 15 - k; b++) begin
          mx += ((longint'(pmax(b, sgn)) * sp + longint'(pmin(b, sgn)) * sn) << b) / 100;
          mn += ((longint'(pmin(b, sgn)) * sp + longint'(pmax(b, sgn)) * sn) << b) / 100;
        end
        lmax[c][k] = mx; lmin[c][k] = mn;
      end
    end
    for (int c = 0; c < n_ch; c++) for (int k = 0; k < n_it; k++) begin
      @(negedge clk);
      lut_we = 1; lut_waddr = 8'(c * 16 + k);
      lut_wdata = (k < 15) ? {80'(lmin[c][k]), 80'(lmax[c][k])} : '0;
    end
    @(negedge clk); lut_we = 0;
  endtask

  function automatic int cellv(input int wv, input int j);
    int m = (wv < 0) ? -wv : wv;
    int cv = (m >> (2 * j)) & 3;
    return (wv < 0) ? -cv : cv;
  endfunction

  // reference model of one MAC; returns per channel the final Accu and the end reason
  task automatic ref_mac(input cfg_t cf, output longint acc_o [CH], output int why [CH]);
    for (int c = 0; c < n_ch; c++) begin
      longint acc = 0;
      why[c] = 0;
      for (int k = (cf.act8 ? 8 : 0); k < n_it; k++) begin
        int b = 15 - k;
        longint p = 0;
        for (int m = 0; m < n_ima; m++) for (int i = 0; i < n_ipu; i++)
          for (int j = 0; j < n_cell; j++) begin
            int s = 0;
            for (int r = 0; r < ROWS; r++)
              if ((act[m][i][r] >> b) & 1) s += cellv(w[m][i][r][c], j);
            if (s > 127) s = 127;
            if (s < -128) s = -128;
            p += longint'(s) << (2 * j);
          end
        if (cf.signed_in && k == (cf.act8 ? 8 : 0)) acc -= p << b; else acc += p << b;
        if (k < 15) begin
          longint lim = ((acc < 0) ? -acc : acc) * longint'(cf.thr);
          longint amx = (lmax[c][k] < 0) ? -lmax[c][k] : lmax[c][k];
          longint amn = (lmin[c][k] < 0) ? -lmin[c][k] : lmin[c][k];
          if (cf.relu_en && acc + lmax[c][k] <= 0) begin why[c] = 1; break; end
          if (cf.approx_en && amx * 256 <= lim && amn * 256 <= lim) begin why[c] = 2; break; end
        end
      end
      acc_o[c] = acc;
    end
  endtask

  int n_relu = 0, n_approx = 0, n_complete = 0, n_short_iter = 0, n_early_end = 0,
      n_pool = 0, n_signed = 0, n_discard = 0, n_act8 = 0;
  int overhead [NMAC];

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // kernels
    for (int m = 0; m < n_ima; m++) for (int i = 0; i < n_ipu; i++) for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      prog_en = 1; prog_ima = 3'(m); prog_ipu = 3'(i); prog_row = 7'(r);
      prog_pos = '0; prog_neg = '0;
      for (int c = 0; c < n_ch; c++) begin
        automatic int mag = $urandom_range(0, 4095);
        automatic int sgn = (c < 6) ? ($urandom_range(0, 9) < 8 ? -1 : 1) :
                            (c < 12) ? ($urandom_range(0, 9) < 8 ? 1 : -1) :
                            ($urandom_range(0, 1) ? 1 : -1);
        w[m][i][r][c] = ((m * NP + i) * ROWS + r < KROWS) ? sgn * mag : 0;
        for (int j = 0; j < n_cell; j++) begin
          automatic int cv = cellv(w[m][i][r][c], j);
          if (cv > 0) prog_pos[(c*8+j)*2 +: 2] = 2'(cv);
          if (cv < 0) prog_neg[(c*8+j)*2 +: 2] = 2'(-cv);
        end
      end
    end
    @(negedge clk); prog_en = 0;

    for (int mac = 0; mac < n_mac; mac++) begin
      automatic cfg_t cf = '0;
      automatic longint racc [CH];
      automatic int why [CH];
      automatic int base = (mac % 4) * n_ima * IBW;
      cf.num_ima = 4'(n_ima);
      cf.in_base = 11'(base);
      cf.out_shift = 6'd12;
      case (mac)
        0: begin cf.relu_en = RELU; cf.approx_en = 1; cf.thr = 8'd205; cf.out_addr = 6'd0; cf.pool_first = 1; end
        1: begin cf.relu_en = RELU; cf.approx_en = 1; cf.thr = 8'd205; cf.out_addr = 6'd0; cf.pool_first = 0; end
        2: begin cf.signed_in = 1; cf.approx_en = 1; cf.thr = 8'd128; cf.out_addr = 6'd2; cf.pool_first = 1; end
        3: begin cf.out_addr = 6'd4; cf.pool_first = 1; end
        default: begin cf.act8 = 1; cf.relu_en = RELU; cf.approx_en = 1; cf.thr = 8'd205; cf.out_addr = 6'd6; cf.pool_first = 1; end
      endcase
      if (mac == 0 || mac == 2 || mac == 4) build_lut(cf.signed_in);
      // inputs: unsigned post-ReLU values 0..1023 (35 % zero) or signed -512..511
      for (int m = 0; m < n_ima; m++) for (int i = 0; i < n_ipu; i++) for (int r = 0; r < ROWS; r++) begin
        if ((m * NP + i) * ROWS + r >= KROWS) act[m][i][r] = 0;
        else if (cf.signed_in) act[m][i][r] = (int'($urandom_range(0, 1023)) - 512) & 16'hffff;
        else if (cf.act8) act[m][i][r] = ($urandom_range(0, 99) < 35) ? 0 : $urandom_range(1, 255);
        else act[m][i][r] = ($urandom_range(0, 99) < 35) ? 0 : $urandom_range(1, 1023);
      end
      for (int m = 0; m < n_ima; m++) for (int b = 0; b < n_it; b++) for (int g = 0; g < n_wpb; g++) begin
        @(negedge clk);
        imem_we = 1; imem_waddr = 11'(base + m * IBW + b * WPB + g); imem_wdata = '0;
        for (int p = 0; p < 2; p++)
          if (g * 2 + p < NP)
            for (int r = 0; r < ROWS; r++) imem_wdata[p*ROWS + r] = 1'((act[m][g*2+p][r] >> b) & 1);
      end
      @(negedge clk); imem_we = 0;
      ref_mac(cf, racc, why);
      cfg = cf;
      start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      // model of post-processing and pooling
      for (int c = 0; c < n_ch; c++) begin
        automatic longint v = racc[c] >>> cf.out_shift;
        automatic int a = int'(cf.out_addr) + c / 8;
        if (why[c] == 1 || (cf.relu_en && v < 0)) v = 0;
        if (v > 32767) v = 32767;
        if (v < -32768) v = -32768;
        if (!cf.pool_first && omodel[a][c % 8] > int'(v)) n_pool++;
        if (cf.pool_first || int'(v) > omodel[a][c % 8]) omodel[a][c % 8] = int'(v);
        if (why[c] == 1) n_relu++;
        if (why[c] == 2) n_approx++;
        if (why[c] == 0) n_complete++;
      end
      // the tile's own counters must agree with the model
      begin
        automatic int er = 0, ea = 0, ec = 0;
        for (int c = 0; c < n_ch; c++) begin
          if (why[c] == 1) er++;
          if (why[c] == 2) ea++;
          if (why[c] == 0) ec++;
        end
        chk(int'(stats.relu_bypass) == er && int'(stats.approx_bypass) == ea && int'(stats.completed) == ec,
            $sformatf("mac %0d counters %0d/%0d/%0d vs %0d/%0d/%0d", mac, stats.relu_bypass,
                      stats.approx_bypass, stats.completed, er, ea, ec));
      end
      if (int'(stats.conversions) < 256) n_short_iter++;
      if (int'(cur_iter) < 15) n_early_end++;
      if (cf.signed_in) n_signed++;
      n_discard += int'(stats.discarded);
      overhead[mac] = int'(stats.cycles) - n_ima * IBW - 8 * int'(stats.conversions);
      if (mac == 3) chk(int'(stats.conversions) == 256, "no-bypass MAC converts 16 x 16 channel-iterations");
      if (mac == 4) chk(int'(stats.conversions) <= 128, "8-bit MAC converts at most 16 x 8 channel-iterations");
      if (cf.act8) n_act8++;
      $display("mac %0d: cycles %0d conversions %0d relu %0d approx %0d complete %0d discarded %0d last iteration %0d",
               mac, stats.cycles, stats.conversions, stats.relu_bypass, stats.approx_bypass,
               stats.completed, stats.discarded, cur_iter);
      // compare the output memory
      for (int a = int'(cf.out_addr); a < int'(cf.out_addr) + 2; a++) begin
        @(negedge clk); omem_re = 1; omem_raddr = 6'(a);
        @(negedge clk); omem_re = 0;
        for (int k = 0; k < n_cell; k++)
          chk(int'($signed(omem_rdata[k*16 +: 16])) == omodel[a][k],
              $sformatf("mac %0d word %0d ch %0d: %0d vs %0d", mac, a, k,
                        $signed(omem_rdata[k*16 +: 16]), omodel[a][k]));
      end
    end
    for (int mac = 1; mac < n_mac; mac++)
      chk(overhead[mac] == overhead[0], $sformatf("8 cycles per conversion: overhead %0d vs %0d", overhead[mac], overhead[0]));
    $display("mechanisms: relu_bypass %0d approx_bypass %0d complete %0d shortened_iterations %0d early_end %0d pool_merge %0d signed_mac %0d act8_mac %0d discarded %0d",
             n_relu, n_approx, n_complete, n_short_iter, n_early_end, n_pool, n_signed, n_act8, n_discard);
    if (RELU) chk(n_relu > 0, "ReLU bypass happened");
    chk(n_approx > 0, "approximation bypass happened");
    chk(n_complete > 0, "a channel ran all iterations");
    chk(n_short_iter > 0, "an iteration was shortened");
    chk(n_early_end > 0, "a MAC ended before the last iteration");
    chk(n_pool > 0, "a pooling merge kept an earlier value");
    chk(n_signed > 0, "a two's complement MAC ran");
    chk(n_act8 > 0, "an 8-bit MAC ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
