// Shift-add unit of an IPU.
//
// A 16-bit weight is stored as eight 2-bit slices on eight neighbouring
// bitlines, so the ADC delivers eight codes per output channel and input bit.
// This unit forms the channel's local partial result
//   partial = sum_j code_j * 2^(CELL_BITS*j),  j = 0 (least significant) .. CELLS-1.
// Codes arrive one per cycle in slice order 0..CELLS-1 with a tag (iteration
// and channel) that travels with the result. Slice 0 restarts the sum; one
// cycle after slice CELLS-1 the result is presented with out_valid for one
// cycle. The paper draws shift-add as its own 6.25 ns stage after the ADC
// stage; here the additions overlap the conversions, which only shortens the
// latency.
module ipu_shift_add #(
  parameter int ADC_BITS  = 8,
  parameter int CELL_BITS = 2,
  parameter int CELLS     = 8,
  parameter int TAG_W     = 8,
  parameter int PART_W    = 24
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [$clog2(CELLS)-1:0]   in_slice,
  input  logic [TAG_W-1:0]           in_tag,
  input  logic signed [ADC_BITS-1:0] in_data,
  output logic                       out_valid,
  output logic [TAG_W-1:0]           out_tag,
  output logic signed [PART_W-1:0]   out_partial
);

  logic signed [PART_W-1:0] acc;
  logic signed [PART_W-1:0] term;
  logic signed [PART_W-1:0] sum;

  always_comb begin
    term = PART_W'(in_data) <<< (CELL_BITS * int'(in_slice));
    sum  = (in_slice == '0) ? term : acc + term;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc         <= '0;
      out_valid   <= 1'b0;
      out_tag     <= '0;
      out_partial <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        acc <= sum;
        if (int'(in_slice) == CELLS - 1) begin
          out_valid   <= 1'b1;
          out_tag     <= in_tag;
          out_partial <= sum;
        end
      end
    end
  end

endmodule
