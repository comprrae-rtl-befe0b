// Testbench of the rram_xbar_pair model: random cell contents and wordline
// vectors against an independent dot product per bitline, and the
// one-cycle compute latency with the result held until the next compute.
module tb_rram_xbar_pair;
  localparam int ROWS = 128, COLS = 128;
  logic clk = 0, prog_en = 0, compute = 0;
  logic [6:0] prog_row = 0;
  logic [255:0] prog_pos = 0, prog_neg = 0;
  logic [ROWS-1:0] wl_bits = 0;
  logic signed [10:0] bl_diff [COLS];
  logic [1:0] cp [ROWS][COLS];
  logic [1:0] cn [ROWS][COLS];
  int checks = 0, failures = 0;

  rram_xbar_pair dut (.*);
  always #5 clk = ~clk;

  task automatic check_all(input string what);
    for (int c = 0; c < COLS; c++) begin
      int e = 0;
      for (int r = 0; r < ROWS; r++) if (wl_bits[r]) e += int'(cp[r][c]) - int'(cn[r][c]);
      checks++;
      if (int'(bl_diff[c]) != e) begin
        failures++;
        if (failures < 10) $display("FAIL %s col %0d: %0d vs %0d", what, c, bl_diff[c], e);
      end
    end
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      prog_en = 1; prog_row = 7'(r);
      for (int c = 0; c < COLS; c++) begin
        cp[r][c] = 2'($urandom); cn[r][c] = 2'($urandom);
        if (r == 0) begin cp[r][c] = 2'd3; cn[r][c] = 2'd0; end
        prog_pos[2*c +: 2] = cp[r][c]; prog_neg[2*c +: 2] = cn[r][c];
      end
    end
    @(negedge clk); prog_en = 0;
    for (int n = 0; n < 12; n++) begin
      for (int w = 0; w < ROWS / 32; w++) wl_bits[w*32 +: 32] = $urandom;
      if (n == 0) wl_bits = '1;
      if (n == 1) wl_bits = '0;
      compute = 1;
      @(negedge clk); compute = 0;
      check_all("compute");
      // held while compute is low and the inputs change
      wl_bits = ~wl_bits;
      @(negedge clk);
      wl_bits = ~wl_bits;
      check_all("hold");
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
