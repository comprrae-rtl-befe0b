// Testbench of shared_bus: input-path writes reach only the addressed IMA,
// output-path reads return the addressed IMA's word one cycle later.
module tb_shared_bus;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_req = 0, out_rvalid;
  logic [2:0] in_dest = 0, out_src = 0;
  logic [5:0] in_addr = 0, ib_waddr;
  logic [3:0] out_addr = 0, ob_raddr;
  logic [255:0] in_data = 0, ib_wdata;
  logic [N-1:0] ib_we, ob_re;
  logic [127:0] ob_rdata [N];
  logic [127:0] out_rdata;
  logic [127:0] mem [N][16];
  int checks = 0, failures = 0;

  shared_bus dut (.*);
  always #5 clk = ~clk;

  // IMA-side buffers with one-cycle read
  always @(posedge clk) for (int m = 0; m < N; m++) if (ob_re[m]) ob_rdata[m] <= mem[m][ob_raddr];

  initial begin
    for (int m = 0; m < N; m++) for (int a = 0; a < 16; a++) mem[m][a] = {$urandom, $urandom, $urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int d, s, a;
      logic [127:0] e;
      @(negedge clk);
      d = $urandom_range(0, N - 1); s = $urandom_range(0, N - 1); a = $urandom_range(0, 15);
      in_valid = 1; in_dest = 3'(d); in_addr = 6'($urandom); in_data = {8{$urandom}};
      out_req = 1; out_src = 3'(s); out_addr = 4'(a); e = mem[s][a];
      #1;
      checks++;
      if (ib_we != N'(1 << d) || ib_waddr != in_addr || ib_wdata != in_data || ob_re != N'(1 << s)) begin
        failures++; $display("FAIL decode");
      end
      @(negedge clk);
      in_valid = 0; out_req = 0;
      #1;
      checks++;
      if (!out_rvalid || out_rdata != e) begin failures++; $display("FAIL read ima %0d addr %0d", s, a); end
      checks++;
      if (ib_we != '0 || ob_re != '0) begin failures++; $display("FAIL idle"); end
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
