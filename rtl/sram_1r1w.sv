// Generic synchronous two-port memory: one write port and one read port.
//
// Used for every buffer and memory of the tile: the centralized input memory
// (eDRAM in the paper, 64 KB x 256 bit), the output memory (1 KB x 128 bit),
// the estimation LUT (5 KB x 160 bit) and, in each IMA, the local input
// buffer (2 KB x 256 bit) and local output buffer (256 B x 128 bit). The
// paper gives only sizes and bus widths; depth = size / width. Timing: a write
// takes effect at the clock edge; rdata holds the word read at the last edge
// with re = 1 (one-cycle read, the old value when reading and writing the
// same address in one cycle). Contents are not reset.
module sram_1r1w #(
  parameter int DEPTH = 64,
  parameter int WIDTH = 256,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
