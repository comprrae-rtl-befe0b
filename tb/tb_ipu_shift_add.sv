// Testbench of ipu_shift_add: random 8-code groups (with idle gaps) against
// sum_j code_j * 4^j, tag forwarding, and the one-cycle output latency.
module tb_ipu_shift_add;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [2:0] in_slice = 0;
  logic [7:0] in_tag = 0, out_tag;
  logic signed [7:0] in_data = 0;
  logic signed [23:0] out_partial;
  int checks = 0, failures = 0;
  int exp_q[$];
  int tag_q[$];

  ipu_shift_add dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (out_valid) begin
    checks++;
    if (exp_q.size() == 0 || out_partial !== 24'(exp_q[0]) || out_tag !== 8'(tag_q[0])) begin
      failures++;
      $display("FAIL partial %0d tag %0d", out_partial, out_tag);
    end
    if (exp_q.size() != 0) begin void'(exp_q.pop_front()); void'(tag_q.pop_front()); end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 300; g++) begin
      automatic int e = 0;
      automatic int t = $urandom_range(0, 255);
      for (int j = 0; j < 8; j++) begin
        @(negedge clk);
        in_valid = 1; in_slice = 3'(j); in_tag = 8'(t);
        in_data = 8'($urandom);
        if (g < 4) in_data = (g[0]) ? 8'sd127 : -8'sd128;   // extremes
        e += int'(in_data) * (1 << (2 * j));
      end
      exp_q.push_back(e); tag_q.push_back(t);
      @(negedge clk); in_valid = 0;
      // the result must appear exactly now (one cycle after the last slice)
      checks++;
      if (!out_valid) begin failures++; $display("FAIL latency"); end
      if ($urandom_range(0, 1)) repeat ($urandom_range(1, 3)) @(negedge clk);
    end
    repeat (3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
