// Testbench of dpu_post with a 64 x 128-bit memory: random MAC results are
// written (pool_first) and then merged (max pooling) at random addresses;
// checks ReLU, forced zero of ReLU-bypassed channels, shift and 16-bit
// saturation against a model, and the start-to-done cycle count (2 words x
// (read + write) = 4 cycles, done the cycle after the last write).
module tb_dpu_post;
  localparam int N_CH = 16, ACC_W = 48;
  logic clk = 0, rst_n = 0, start = 0, relu_en = 0, pool_first = 0;
  logic signed [ACC_W-1:0] accu [N_CH];
  logic [N_CH-1:0] relu_zero = 0;
  logic [5:0] out_shift = 0, out_addr = 0;
  logic mem_re, mem_we, done, merged;
  logic [5:0] mem_raddr, mem_waddr;
  logic [127:0] mem_rdata, mem_wdata;
  int model [64][8];
  int checks = 0, failures = 0, merges = 0;

  dpu_post dut (.*);
  sram_1r1w #(.DEPTH(64), .WIDTH(128)) u_mem (.clk, .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata),
    .re(mem_re), .raddr(mem_raddr), .rdata(mem_rdata));
  always #5 clk = ~clk;

  // reads the memory through a hierarchical reference
  function automatic int mem_val(input int a, input int k);
    return int'($signed(u_mem.mem[a][k*16 +: 16]));
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      automatic int cyc = 0;
      automatic bit first = (n % 3 == 0);
      out_addr = first ? 6'($urandom_range(0, 31) * 2) : out_addr;
      pool_first = first; relu_en = 1'($urandom); out_shift = 6'($urandom_range(0, 20));
      for (int c = 0; c < N_CH; c++) begin
        accu[c] = ACC_W'(longint'($urandom) * longint'($urandom_range(0, 3000)) - longint'(1) << 40) >>> $urandom_range(0, 30);
        relu_zero[c] = ($urandom_range(0, 7) == 0);
      end
      for (int c = 0; c < N_CH; c++) begin
        automatic longint v = longint'(accu[c] >>> out_shift);
        automatic int a = int'(out_addr) + c / 8;
        if (relu_zero[c] || (relu_en && v < 0)) v = 0;
        if (v > 32767) v = 32767;
        if (v < -32768) v = -32768;
        if (first || int'(v) > model[a][c % 8]) model[a][c % 8] = int'(v);
      end
      start = 1;
      @(negedge clk); start = 0;
      while (!done) begin @(negedge clk); cyc++; if (merged) merges++; end
      if (merged) merges++;
      checks++;
      if (cyc != 4) begin failures++; $display("FAIL cycles %0d", cyc); end
      for (int c = 0; c < N_CH; c++) begin
        checks++;
        if (mem_val(int'(out_addr) + c / 8, c % 8) != model[int'(out_addr) + c / 8][c % 8]) begin
          failures++;
          $display("FAIL n %0d ch %0d: %0d vs %0d", n, c, mem_val(int'(out_addr) + c / 8, c % 8),
                   model[int'(out_addr) + c / 8][c % 8]);
        end
      end
    end
    checks++;
    if (merges == 0) begin failures++; $display("FAIL no merge"); end
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
