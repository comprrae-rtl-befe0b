// Testbench of tile_ctrl with behavioural stand-ins for the datapath: the
// IMAs answer a channel's last conversion slice with part_valid three cycles
// later, the bus returns reads one cycle later, the accumulator answers the
// last beat with upd_valid one cycle later, and the "evaluation" ends each
// channel at a chosen iteration (ReLU bypass, approximation or never).
// Checked: the load phase (words, destinations), the bit-plane fetch order,
// that each channel is converted in every iteration up to its end and not
// beyond the next one, the 128-cycle first iteration, shorter later
// iterations, the event counters and done.
module tb_tile_ctrl;
  import comprrae_pkg::*;
  localparam int NI = 3;
  logic clk = 0, rst_n = 0, start = 0;
  cfg_t cfg_in, cfg;
  logic busy, done;
  logic [3:0] cur_iter;
  stats_t stats;
  logic imem_re, bin_valid, wl_fetch, sh_hold;
  logic [10:0] imem_raddr;
  logic [2:0] bin_dest, adc_slice, bout_src;
  logic [5:0] bin_addr;
  logic [3:0] wl_bit, adc_ch, bout_addr, upd_ch = 0, upd_iter = 0;
  logic [7:0] adc_en, adc_tag, part_tag, acc_tag, lut_raddr, sat_count = 0;
  logic part_valid, bout_req, acc_clear, acc_valid, acc_first, acc_last, bout_rvalid = 0;
  logic lut_re, upd_valid = 0, term_relu, term_approx, dpu_start, dpu_done = 0, pool_merged = 0;
  logic [15:0] relu_zero;
  int checks = 0, failures = 0;

  tile_ctrl dut (.*);
  always #5 clk = ~clk;

  int endit [16];
  int kind [16];          // 0 complete, 1 relu, 2 approx
  bit conv [16][16];
  int loads, fetches, fetch_bits [$];
  int first_conv_time [16];
  int cyc = 0;
  logic [2:0] pv_d;
  logic [7:0] pt_d [3];
  logic [2:0] dd;

  always @(posedge clk) cyc <= cyc + 1;

  // datapath stand-ins
  always @(posedge clk) begin
    pv_d  <= {pv_d[1:0], adc_en[0] && adc_slice == 3'd7};
    pt_d[0] <= adc_tag; pt_d[1] <= pt_d[0]; pt_d[2] <= pt_d[1];
    bout_rvalid <= bout_req;
    upd_valid <= acc_valid && acc_last;
    upd_ch    <= acc_tag[3:0];
    upd_iter  <= acc_tag[7:4];
    dd <= {dd[1:0], dpu_start};
    dpu_done <= dd[2];
    if (imem_re) loads++;
    if (bin_valid && (int'(bin_dest) != int'(bin_addr_q / 64))) begin failures++; end
    if (wl_fetch) begin fetches++; fetch_bits.push_back(int'(wl_bit)); end
    if (adc_en[0] && adc_slice == 3'd0) begin
      conv[adc_ch][adc_tag[7:4]] = 1;
      if (first_conv_time[adc_tag[7:4]] < 0) first_conv_time[adc_tag[7:4]] = cyc;
    end
    if (adc_en[NI] || adc_en[7]) failures++;   // unused IMAs stay off
  end
  int bin_addr_q = 0;
  always @(posedge clk) if (bin_valid) bin_addr_q <= bin_addr_q + 1;
  assign part_valid = pv_d[2];
  assign part_tag   = pt_d[2];
  assign term_relu   = upd_valid && kind[upd_ch] == 1 && int'(upd_iter) == endit[upd_ch];
  assign term_approx = upd_valid && kind[upd_ch] == 2 && int'(upd_iter) == endit[upd_ch];

  initial begin
    automatic int nrelu = 0, napprox = 0, ncomp = 0;
    pv_d = 0; dd = 0;
    foreach (first_conv_time[k]) first_conv_time[k] = -1;
    for (int c = 0; c < 16; c++) begin
      kind[c] = (c < 6) ? 1 : (c < 12) ? 2 : 0;
      endit[c] = (kind[c] == 0) ? 15 : $urandom_range(1, 13);
      if (c == 3) endit[c] = 0;
      if (kind[c] == 1) nrelu++; else if (kind[c] == 2) napprox++; else ncomp++;
    end
    cfg_in = '0;
    cfg_in.num_ima = 4'(NI);
    cfg_in.in_base = 11'd0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (loads != NI * 64) begin failures++; $display("FAIL loads %0d", loads); end
    checks++;
    if (fetch_bits.size() == 0 || fetch_bits[0] != 15) begin failures++; $display("FAIL fetch order"); end
    for (int i = 1; i < fetch_bits.size(); i++) begin
      checks++;
      if (fetch_bits[i] != fetch_bits[i-1] - 1) begin failures++; $display("FAIL fetch %0d", i); end
    end
    for (int c = 0; c < 16; c++)
      for (int k = 0; k < 16; k++) begin
        checks++;
        if (k <= endit[c] && !conv[c][k]) begin failures++; $display("FAIL ch %0d it %0d not converted", c, k); end
        if (k > endit[c] + 1 && conv[c][k]) begin failures++; $display("FAIL ch %0d it %0d converted after end", c, k); end
      end
    checks++;
    if (first_conv_time[1] - first_conv_time[0] != 128) begin
      failures++; $display("FAIL first iteration %0d cycles", first_conv_time[1] - first_conv_time[0]);
    end
    checks++;
    if (first_conv_time[15] - first_conv_time[14] >= 128 || first_conv_time[15] - first_conv_time[14] < 8) begin
      failures++; $display("FAIL late iteration %0d cycles", first_conv_time[15] - first_conv_time[14]);
    end
    checks++;
    if (int'(stats.relu_bypass) != nrelu || int'(stats.approx_bypass) != napprox || int'(stats.completed) != ncomp) begin
      failures++; $display("FAIL stats %0d %0d %0d", stats.relu_bypass, stats.approx_bypass, stats.completed);
    end
    checks++;
    if (relu_zero != 16'h003f) begin failures++; $display("FAIL relu_zero %h", relu_zero); end
    checks++;
    if (busy) begin failures++; $display("FAIL still busy"); end
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
