// Digital post-processing of a finished MAC: ReLU, rescaling and max pooling
// into the centralized output memory.
//
// The paper names ReLU and pooling among the tile's digital processing units
// without describing them; this unit is the simplest form of both. Each
// channel result is Accu >>> out_shift saturated to OUT_W bits; it is 0 for a
// channel ended by the ReLU bypass and clamped at 0 when relu_en is set.
// Max pooling is a running element-wise maximum in the output memory: the MACs
// of one pooling window write the same address, the first with pool_first = 1
// (overwrite), the others merge with the stored word.
//
// Timing: start begins; for each of the N_CH/CPW output words the unit reads
// the stored word (one cycle), then writes the merged word (one cycle). done
// is a one-cycle pulse in the cycle after the last write. Word w of a MAC goes to
// out_addr + w, channel c at bits [(c mod CPW)*OUT_W +: OUT_W].
module dpu_post #(
  parameter int N_CH  = 16,
  parameter int ACC_W = 48,
  parameter int OUT_W = 16,
  parameter int MEM_W = 128,
  parameter int MA_W  = 6,
  localparam int CPW  = MEM_W / OUT_W,
  localparam int NW   = N_CH / CPW
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic signed [ACC_W-1:0] accu [N_CH],
  input  logic [N_CH-1:0]         relu_zero,
  input  logic                    relu_en,
  input  logic [5:0]              out_shift,
  input  logic [MA_W-1:0]         out_addr,
  input  logic                    pool_first,
  output logic                    mem_re,
  output logic [MA_W-1:0]         mem_raddr,
  input  logic [MEM_W-1:0]        mem_rdata,
  output logic                    mem_we,
  output logic [MA_W-1:0]         mem_waddr,
  output logic [MEM_W-1:0]        mem_wdata,
  output logic                    done,
  output logic                    merged    // a pooling merge changed at least one value
);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_WRITE} state_e;
  state_e state;
  logic [$clog2(NW+1)-1:0] w;

  localparam logic signed [ACC_W-1:0] OMAX = ACC_W'((1 << (OUT_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] OMIN = -ACC_W'(1 << (OUT_W - 1));

  logic [MEM_W-1:0] new_word;
  logic             any_merge;

  always_comb begin
    new_word  = '0;
    any_merge = 1'b0;
    for (int k = 0; k < CPW; k++) begin
      automatic int c = int'(w) * CPW + k;
      automatic logic signed [ACC_W-1:0] v = accu[c] >>> out_shift;
      automatic logic signed [OUT_W-1:0] q, old;
      if (relu_zero[c] || (relu_en && v < 0)) v = '0;
      if (v > OMAX) v = OMAX;
      if (v < OMIN) v = OMIN;
      q   = OUT_W'(v);
      old = mem_rdata[k*OUT_W +: OUT_W];
      if (!pool_first && old > q) begin
        q = old;
        any_merge = 1'b1;
      end
      new_word[k*OUT_W +: OUT_W] = q;
    end
  end

  assign mem_re    = (state == S_READ);
  assign mem_raddr = out_addr + MA_W'(w);
  assign mem_we    = (state == S_WRITE);
  assign mem_waddr = out_addr + MA_W'(w);
  assign mem_wdata = new_word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      w      <= '0;
      done   <= 1'b0;
      merged <= 1'b0;
    end else begin
      done   <= 1'b0;
      merged <= 1'b0;
      case (state)
        S_IDLE:  if (start) begin
                   w     <= '0;
                   state <= S_READ;
                 end
        S_READ:  state <= S_WRITE;
        S_WRITE: begin
                   merged <= any_merge;
                   if (int'(w) == NW - 1) begin
                     done  <= 1'b1;
                     state <= S_IDLE;
                   end else begin
                     w     <= w + 1'b1;
                     state <= S_READ;
                   end
                 end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
