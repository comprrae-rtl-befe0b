// Testbench of sram_1r1w: random writes and reads against a shadow array,
// one-cycle read latency, read-during-write returns the old word, and rdata
// holds while re is low.
module tb_sram_1r1w;
  localparam int DEPTH = 64, WIDTH = 256;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [WIDTH-1:0] wdata = 0, rdata, exp_q;
  logic [WIDTH-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  sram_1r1w #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [WIDTH-1:0] rnd();
    logic [WIDTH-1:0] v;
    for (int i = 0; i < WIDTH / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 6'(a); wdata = rnd(); shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      re = 1; raddr = 6'($urandom); exp_q = shadow[raddr];
      we = 1'($urandom); waddr = 6'($urandom); wdata = rnd();
      if ($urandom_range(0, 3) == 0) waddr = raddr;   // collision: old data expected
      @(posedge clk); #1;
      if (we) shadow[waddr] = wdata;
      checks++;
      if (rdata !== exp_q) begin
        failures++; $display("FAIL read %0d", raddr);
      end
    end
    @(negedge clk); re = 0; we = 0; exp_q = rdata;
    repeat (3) @(posedge clk);
    #1 checks++;
    if (rdata !== exp_q) begin failures++; $display("FAIL hold"); end
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
