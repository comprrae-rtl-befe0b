// In-situ multiply-accumulate module (IMA).
//
// N_IPU IPUs share a local input buffer and a local output buffer, as in the
// paper. All IPUs of an IMA hold the same 16 output channels on different
// kernel rows (a kernel fills the IPUs of one IMA before it spreads to more
// IMAs), so they run in lockstep and their partial results for a channel are
// summed by the adder tree of the IMA before they leave over the shared bus.
//
// Local input buffer layout (this design's choice): word b*WPB + w holds input
// bit b of the wordlines of IPUs w*IPW .. w*IPW+IPW-1, IPU i's 128 bits at
// [ (i mod IPW)*ROWS +: ROWS ]. With 8 IPUs, 128 rows and a 256-bit word a bit
// plane is WPB = 4 words and the buffer holds all 16 bit planes (2 KB).
//
// Timing: wl_fetch (with wl_bit) reads the bit plane in WPB cycles, loads the
// DAC registers as the words arrive and evaluates the crossbars in the cycle
// after the last word, WPB+2 cycles after wl_fetch in total; a sample-hold
// may follow one cycle later. The channel sum is written into the local output
// buffer at address channel two cycles after the IPUs' last conversion slice
// and part_valid/part_tag announce it for one cycle; ob_* read it back.
module ima #(
  parameter int N_IPU      = 8,
  parameter int ROWS       = 128,
  parameter int COLS       = 128,
  parameter int CELL_BITS  = 2,
  parameter int CELLS      = 8,
  parameter int BL_W       = 11,
  parameter int ADC_BITS   = 8,
  parameter int ACT_BITS   = 16,
  parameter int TAG_W      = 8,
  parameter int PART_W     = 24,
  parameter int IBUF_W     = 256,
  parameter int OBUF_W     = 128,
  localparam int CH        = COLS / CELLS,
  localparam int CH_W      = $clog2(CH),
  localparam int IPW       = IBUF_W / ROWS,              // IPUs per buffer word
  localparam int WPB       = (N_IPU + IPW - 1) / IPW,    // words per bit plane
  localparam int IBUF_D    = WPB * ACT_BITS,
  localparam int IBA_W     = $clog2(IBUF_D),
  localparam int SUM_W     = PART_W + $clog2(N_IPU)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // crossbar programming
  input  logic                       prog_en,
  input  logic [$clog2(N_IPU)-1:0]   prog_ipu,
  input  logic [$clog2(ROWS)-1:0]    prog_row,
  input  logic [COLS*CELL_BITS-1:0]  prog_pos,
  input  logic [COLS*CELL_BITS-1:0]  prog_neg,
  // input path of the shared bus
  input  logic                       ib_we,
  input  logic [IBA_W-1:0]           ib_waddr,
  input  logic [IBUF_W-1:0]          ib_wdata,
  // iteration control (broadcast by the tile controller)
  input  logic                       wl_fetch,
  input  logic [$clog2(ACT_BITS)-1:0] wl_bit,
  input  logic                       sh_hold,
  input  logic                       adc_en,
  input  logic [CH_W-1:0]            adc_ch,
  input  logic [$clog2(CELLS)-1:0]   adc_slice,
  input  logic [TAG_W-1:0]           adc_tag,
  // aggregated partial results
  output logic                       part_valid,
  output logic [TAG_W-1:0]           part_tag,
  input  logic                       ob_re,
  input  logic [CH_W-1:0]            ob_raddr,
  output logic [OBUF_W-1:0]          ob_rdata,
  output logic [N_IPU-1:0]           adc_sat
);

  // ---------------- bit-plane fetch from the local input buffer ----------
  logic                     ib_re;
  logic [IBA_W-1:0]         ib_raddr;
  logic [IBUF_W-1:0]        ib_rdata;
  logic                     fetching;
  logic [$clog2(WPB+1)-1:0] fcnt;
  logic [$clog2(ACT_BITS)-1:0] fbit;
  logic                     rd_v;
  logic [$clog2(WPB+1)-1:0] rd_w;
  logic                     xbar_compute;

  sram_1r1w #(.DEPTH(IBUF_D), .WIDTH(IBUF_W)) u_ibuf (
    .clk, .we(ib_we), .waddr(ib_waddr), .wdata(ib_wdata),
    .re(ib_re), .raddr(ib_raddr), .rdata(ib_rdata));

  always_comb begin
    ib_re    = 1'b0;
    ib_raddr = '0;
    if (wl_fetch) begin
      ib_re    = 1'b1;
      ib_raddr = IBA_W'(int'(wl_bit) * WPB);
    end else if (fetching) begin
      ib_re    = 1'b1;
      ib_raddr = IBA_W'(int'(fbit) * WPB + int'(fcnt));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fetching     <= 1'b0;
      fcnt         <= '0;
      fbit         <= '0;
      rd_v         <= 1'b0;
      rd_w         <= '0;
      xbar_compute <= 1'b0;
    end else begin
      rd_v         <= ib_re;
      rd_w         <= wl_fetch ? '0 : fcnt;
      xbar_compute <= rd_v && (int'(rd_w) == WPB - 1);
      if (wl_fetch) begin
        fetching <= (WPB > 1);
        fcnt     <= 1;
        fbit     <= wl_bit;
      end else if (fetching) begin
        fcnt <= fcnt + 1'b1;
        if (int'(fcnt) == WPB - 1) fetching <= 1'b0;
      end
    end
  end

  // ---------------- IPUs ------------------------------------------------
  logic                     p_valid [N_IPU];
  logic [TAG_W-1:0]         p_tag   [N_IPU];
  logic signed [PART_W-1:0] p_part  [N_IPU];

  for (genvar i = 0; i < N_IPU; i++) begin : g_ipu
    logic wl_load_i;
    assign wl_load_i = rd_v && (int'(rd_w) == i / IPW);
    ipu #(.ROWS(ROWS), .COLS(COLS), .CELL_BITS(CELL_BITS), .CELLS(CELLS), .BL_W(BL_W),
          .ADC_BITS(ADC_BITS), .TAG_W(TAG_W), .PART_W(PART_W)) u_ipu (
      .clk, .rst_n,
      .prog_en(prog_en && (int'(prog_ipu) == i)), .prog_row, .prog_pos, .prog_neg,
      .wl_load(wl_load_i), .wl_in(ib_rdata[(i % IPW)*ROWS +: ROWS]),
      .xbar_compute, .sh_hold,
      .adc_en, .adc_ch, .adc_slice, .adc_tag,
      .out_valid(p_valid[i]), .out_tag(p_tag[i]), .out_partial(p_part[i]),
      .adc_sat(adc_sat[i]));
  end

  // ---------------- aggregation into the local output buffer ------------
  logic signed [SUM_W-1:0] ima_sum;
  always_comb begin
    ima_sum = '0;
    for (int i = 0; i < N_IPU; i++) ima_sum += SUM_W'(p_part[i]);
  end

  sram_1r1w #(.DEPTH(CH), .WIDTH(OBUF_W)) u_obuf (
    .clk, .we(p_valid[0]), .waddr(p_tag[0][CH_W-1:0]), .wdata(OBUF_W'(ima_sum)),
    .re(ob_re), .raddr(ob_raddr), .rdata(ob_rdata));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      part_valid <= 1'b0;
      part_tag   <= '0;
    end else begin
      part_valid <= p_valid[0];
      part_tag   <= p_tag[0];
    end
  end

`ifndef SYNTHESIS
  // All IPUs of an IMA are driven by the same commands and must agree.
  for (genvar i = 1; i < N_IPU; i++) begin : g_chk
    a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) p_valid[i] == p_valid[0]);
  end
`endif

endmodule
