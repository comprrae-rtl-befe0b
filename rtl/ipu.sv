// In-situ processing unit (IPU).
//
// One IPU holds the 1-bit DAC input register of its 128 wordlines, the
// differential crossbar pair, the sample-hold bank, one time-shared ADC and
// the shift-add unit, as in the paper. Column c*CELLS+j stores 2-bit slice j
// of the weights of output channel c (16 channels x 8 slices = 128 columns);
// that column order is this design's choice.
//
// Operation for one input bit: wl_load loads the bit of each wordline into
// the DAC register, xbar_compute evaluates the crossbars (result valid the
// next cycle), sh_hold captures the bitlines. After that, for each channel to
// be converted the controller asserts adc_en for CELLS consecutive cycles with
// adc_ch fixed and adc_slice = 0..CELLS-1. The partial result of that channel
// leaves on out_valid/out_tag/out_partial two cycles after its last slice.
// adc_sat flags a conversion that clipped.
module ipu #(
  parameter int ROWS      = 128,
  parameter int COLS      = 128,
  parameter int CELL_BITS = 2,
  parameter int CELLS     = 8,
  parameter int BL_W      = 11,
  parameter int ADC_BITS  = 8,
  parameter int TAG_W     = 8,
  parameter int PART_W    = 24,
  localparam int CH       = COLS / CELLS,
  localparam int CH_W     = $clog2(CH)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // crossbar programming
  input  logic                       prog_en,
  input  logic [$clog2(ROWS)-1:0]    prog_row,
  input  logic [COLS*CELL_BITS-1:0]  prog_pos,
  input  logic [COLS*CELL_BITS-1:0]  prog_neg,
  // input bit and crossbar control
  input  logic                       wl_load,
  input  logic [ROWS-1:0]            wl_in,
  input  logic                       xbar_compute,
  input  logic                       sh_hold,
  // conversion request
  input  logic                       adc_en,
  input  logic [CH_W-1:0]            adc_ch,
  input  logic [$clog2(CELLS)-1:0]   adc_slice,
  input  logic [TAG_W-1:0]           adc_tag,
  // partial result
  output logic                       out_valid,
  output logic [TAG_W-1:0]           out_tag,
  output logic signed [PART_W-1:0]   out_partial,
  output logic                       adc_sat
);

  logic [ROWS-1:0]                dac_bits;
  logic signed [BL_W-1:0]         bl_now  [COLS];
  logic signed [BL_W-1:0]         bl_held [COLS];
  logic signed [ADC_BITS-1:0]     adc_code;
  logic                           code_valid;
  logic [$clog2(CELLS)-1:0]       code_slice;
  logic [TAG_W-1:0]               code_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dac_bits <= '0;
    else if (wl_load) dac_bits <= wl_in;
  end

  rram_xbar_pair #(.ROWS(ROWS), .COLS(COLS), .CELL_BITS(CELL_BITS), .BL_W(BL_W)) u_xbar (
    .clk, .prog_en, .prog_row, .prog_pos, .prog_neg,
    .wl_bits(dac_bits), .compute(xbar_compute), .bl_diff(bl_now));

  sample_hold #(.COLS(COLS), .BL_W(BL_W)) u_sh (
    .clk, .hold(sh_hold), .d(bl_now), .q(bl_held));

  adc_sar #(.COLS(COLS), .IN_W(BL_W), .ADC_BITS(ADC_BITS)) u_adc (
    .clk, .en(adc_en), .sel({adc_ch, adc_slice}), .ain(bl_held),
    .dout(adc_code), .sat(adc_sat));

  // The ADC takes one cycle; the slice index and tag follow it.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code_valid <= 1'b0;
      code_slice <= '0;
      code_tag   <= '0;
    end else begin
      code_valid <= adc_en;
      code_slice <= adc_slice;
      code_tag   <= adc_tag;
    end
  end

  ipu_shift_add #(.ADC_BITS(ADC_BITS), .CELL_BITS(CELL_BITS), .CELLS(CELLS),
                  .TAG_W(TAG_W), .PART_W(PART_W)) u_sa (
    .clk, .rst_n, .in_valid(code_valid), .in_slice(code_slice), .in_tag(code_tag),
    .in_data(adc_code), .out_valid, .out_tag, .out_partial);

endmodule
