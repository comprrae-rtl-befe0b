// Tile accumulator: aggregation of the IMAs' local partial results and
// update of the intermediate accumulated result (Accu) of each channel.
//
// The partial results of one channel and iteration arrive over the shared
// bus as a burst of beats, one per IMA (in_first on the first, in_last on
// the last). Their sum is the channel's partial result for input bit
// b = ACT_BITS-1-iteration; on the last beat Accu[ch] += sum * 2^b. For two's
// complement inputs (signed_in) the most significant bit weighs -2^b, so the
// iteration sign_iter that applies it (0, or 8 for 8-bit activations)
// subtracts instead. The updated Accu is presented for one
// cycle on upd_* (registered) for the evaluation logic. clear zeroes all Accu.
// accu[] gives the current Accu of every channel for post-processing.
module tile_accumulator #(
  parameter int N_CH     = 16,
  parameter int ACT_BITS = 16,
  parameter int IN_W     = 30,
  parameter int ACC_W    = 48,
  localparam int CH_W    = $clog2(N_CH),
  localparam int IT_W    = $clog2(ACT_BITS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    signed_in,
  input  logic [$clog2(ACT_BITS)-1:0] sign_iter,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  logic [IT_W+CH_W-1:0]    in_tag,      // {iteration, channel}
  input  logic signed [IN_W-1:0]  in_val,
  output logic                    upd_valid,
  output logic [CH_W-1:0]         upd_ch,
  output logic [IT_W-1:0]         upd_iter,
  output logic signed [ACC_W-1:0] upd_accu,
  output logic signed [ACC_W-1:0] accu [N_CH]
);

  logic signed [IN_W+3:0]   sum_q;
  logic signed [IN_W+3:0]   total;
  logic signed [ACC_W-1:0]  shifted;
  logic signed [ACC_W-1:0]  accu_new;
  logic [CH_W-1:0]          ch;
  logic [IT_W-1:0]          it;

  always_comb begin
    ch       = in_tag[CH_W-1:0];
    it       = in_tag[IT_W+CH_W-1:CH_W];
    total    = (in_first ? '0 : sum_q) + (IN_W+4)'(in_val);
    shifted  = ACC_W'(total) <<< (ACT_BITS - 1 - int'(it));
    accu_new = (signed_in && it == sign_iter) ? accu[ch] - shifted : accu[ch] + shifted;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_q     <= '0;
      upd_valid <= 1'b0;
      upd_ch    <= '0;
      upd_iter  <= '0;
      upd_accu  <= '0;
      for (int c = 0; c < N_CH; c++) accu[c] <= '0;
    end else begin
      upd_valid <= 1'b0;
      if (clear) begin
        for (int c = 0; c < N_CH; c++) accu[c] <= '0;
      end else if (in_valid) begin
        sum_q <= total;
        if (in_last) begin
          accu[ch]  <= accu_new;
          upd_valid <= 1'b1;
          upd_ch    <= ch;
          upd_iter  <= it;
          upd_accu  <= accu_new;
        end
      end
    end
  end

endmodule
