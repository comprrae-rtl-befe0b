// Behavioural model of the 8-bit SAR ADC of one IPU, time-shared by the
// bitlines through an input multiplexer. This is an analog part.
//
// Each cycle with en = 1 converts the held bitline selected by sel; the
// signed code appears on dout one cycle later (one conversion per cycle,
// i.e. 8 conversions in 6.25 ns at 1.28 GHz as in the paper). The code is
// two's complement in bitline cell units and saturates at the ADC_BITS
// range, with sat marking a clipped conversion; the paper gives the
// resolution but not how out-of-range values are treated, so clipping is
// this model's choice.
module adc_sar #(
  parameter int COLS     = 128,
  parameter int IN_W     = 11,
  parameter int ADC_BITS = 8
) (
  input  logic                       clk,
  input  logic                       en,
  input  logic [$clog2(COLS)-1:0]    sel,
  input  logic signed [IN_W-1:0]     ain [COLS],
  output logic signed [ADC_BITS-1:0] dout,
  output logic                       sat
);

  localparam int MAXC = (1 << (ADC_BITS - 1)) - 1;
  localparam int MINC = -(1 << (ADC_BITS - 1));

  always_ff @(posedge clk) begin
    if (en) begin
      automatic int v = int'(ain[sel]);
      if (v > MAXC) begin
        dout <= ADC_BITS'(MAXC);
        sat  <= 1'b1;
      end else if (v < MINC) begin
        dout <= ADC_BITS'(MINC);
        sat  <= 1'b1;
      end else begin
        dout <= ADC_BITS'(v);
        sat  <= 1'b0;
      end
    end else begin
      sat <= 1'b0;
    end
  end

endmodule
