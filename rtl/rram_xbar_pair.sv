// Behavioural model of the differential RRAM crossbar pair of one IPU,
// including its 1-bit wordline DACs. This is an analog part; the model is
// not meant for synthesis.
//
// Two ROWS x COLS arrays of CELL_BITS-bit cells hold the magnitudes of the
// positive and of the negative weights. A wordline carries a unit voltage
// when its DAC input bit is 1, so the current of a bitline is the sum of the
// conductances of the cells whose row bit is 1. The model returns, per
// bitline, the positive-array sum minus the negative-array sum as an exact
// integer (no noise, no IR drop, no nonlinearity).
//
// Interface and timing: prog_en writes one whole row of both arrays in one
// cycle (this model's choice; the paper does not describe programming).
// compute evaluates the arrays for wl_bits; bl_diff is valid from the next
// cycle and stays until the next compute. The cells start at zero.
// The 128 x 128 evaluation is written as plain nested loops over the arrays;
// a synthesis tool is not expected to map it, as the real part is analog.
module rram_xbar_pair #(
  parameter int ROWS      = 128,
  parameter int COLS      = 128,
  parameter int CELL_BITS = 2,
  parameter int BL_W      = 11
) (
  input  logic                        clk,
  input  logic                        prog_en,
  input  logic [$clog2(ROWS)-1:0]     prog_row,
  input  logic [COLS*CELL_BITS-1:0]   prog_pos,
  input  logic [COLS*CELL_BITS-1:0]   prog_neg,
  input  logic [ROWS-1:0]             wl_bits,
  input  logic                        compute,
  output logic signed [BL_W-1:0]      bl_diff [COLS]
);

  logic [COLS*CELL_BITS-1:0] gpos [ROWS];
  logic [COLS*CELL_BITS-1:0] gneg [ROWS];

  initial begin
    for (int r = 0; r < ROWS; r++) begin
      gpos[r] = '0;
      gneg[r] = '0;
    end
    for (int c = 0; c < COLS; c++) bl_diff[c] = '0;
  end

  always_ff @(posedge clk) begin
    if (prog_en) begin
      gpos[prog_row] <= prog_pos;
      gneg[prog_row] <= prog_neg;
    end
  end

  always_ff @(posedge clk) begin
    if (compute) begin
      foreach (bl_diff[c]) begin
        automatic int acc = 0;
        foreach (gpos[r]) begin
          if (wl_bits[r])
            acc += int'(gpos[r][c*CELL_BITS +: CELL_BITS]) - int'(gneg[r][c*CELL_BITS +: CELL_BITS]);
        end
        bl_diff[c] <= BL_W'(acc);
      end
    end
  end

endmodule
