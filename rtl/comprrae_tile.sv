// CompRRAE tile: the top of this design.
//
// A tile holds a centralized input memory, the estimation LUT, an output
// memory, N_IMA IMAs (each N_IPU IPUs with 128x128 differential RRAM
// crossbars) on a shared bus, and the digital units: the tile accumulator,
// the evaluation logic, post-processing (ReLU, rescaling, pooling) and the
// controller. One MAC operation computes up to 16 output channels (the
// channels mapped onto the IPUs) for one output position: the input bits are
// applied MSB first, and after each iteration the evaluation logic compares
// Accu with the LUT's Max/Min estimates and may end a channel early, which
// removes its conversions from the following iterations.
//
// Host side (stands in for the tile-to-tile network, which is not built):
//   imem_*  : write the centralized input memory (256-bit words)
//   lut_*   : write the LUT; word {channel, iteration} holds Max in [79:0]
//             and Min in [159:80], two's complement, for the iterations
//             still to come after that iteration; only the low ACC_W bits
//             are used
//   prog_*  : program one crossbar row of IPU prog_ipu in IMA prog_ima
//   omem_*  : read the output memory while the tile is idle
//   cfg, start, busy, done, cur_iter, stats
// Weight mapping: weight w of channel c on kernel row r is stored in the
// positive array if w > 0 and in the negative array as |w| otherwise, on
// columns c*8+j, slice j holding bits [2j+1:2j] of |w|.
module comprrae_tile
  import comprrae_pkg::*;
#(
  parameter int N_IMA_P = N_IMA,
  parameter int N_IPU_P = N_IPU
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // centralized input memory write
  input  logic                       imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_waddr,
  input  logic [IN_BUS_W-1:0]        imem_wdata,
  // estimation LUT write
  input  logic                       lut_we,
  input  logic [$clog2(LUT_DEPTH)-1:0] lut_waddr,
  input  logic [LUT_W-1:0]           lut_wdata,
  // crossbar programming
  input  logic                       prog_en,
  input  logic [2:0]                 prog_ima,
  input  logic [2:0]                 prog_ipu,
  input  logic [$clog2(XBAR_ROWS)-1:0] prog_row,
  input  logic [XBAR_COLS*CELL_BITS-1:0] prog_pos,
  input  logic [XBAR_COLS*CELL_BITS-1:0] prog_neg,
  // output memory read
  input  logic                       omem_re,
  input  logic [$clog2(OMEM_DEPTH)-1:0] omem_raddr,
  output logic [OUT_BUS_W-1:0]       omem_rdata,
  // operation
  input  cfg_t                       cfg,
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  output logic [IT_W-1:0]            cur_iter,
  output stats_t                     stats
);

  localparam int IPW   = IN_BUS_W / XBAR_ROWS;
  localparam int WPB   = (N_IPU_P + IPW - 1) / IPW;
  localparam int IBW   = WPB * ACT_BITS;
  localparam int IBA_W = $clog2(IBW);
  localparam int SUM_W = PART_W + $clog2(N_IPU_P);
  localparam int BUS_VAL_W = SUM_W + 3;             // sum over up to 8 IMAs
  localparam int IMEM_AW = $clog2(IMEM_DEPTH);
  localparam int OMEM_AW = $clog2(OMEM_DEPTH);

  cfg_t                  cfg_q;
  logic                  imem_re;
  logic [IMEM_AW-1:0]    imem_raddr;
  logic [IN_BUS_W-1:0]   imem_rdata;
  logic                  bin_valid;
  logic [2:0]            bin_dest;
  logic [IBA_W-1:0]      bin_addr;
  logic [N_IMA_P-1:0]    ib_we;
  logic [IBA_W-1:0]      ib_waddr;
  logic [IN_BUS_W-1:0]   ib_wdata;
  logic                  wl_fetch, sh_hold;
  logic [IT_W-1:0]       wl_bit;
  logic [N_IMA_P-1:0]    adc_en;
  logic [CH_W-1:0]       adc_ch;
  logic [2:0]            adc_slice;
  logic [TAG_W-1:0]      adc_tag;
  logic                  part_valid [N_IMA_P];
  logic [TAG_W-1:0]      part_tag   [N_IMA_P];
  logic [N_IPU_P-1:0]    sat        [N_IMA_P];
  logic [7:0]            sat_count;
  logic                  bout_req, bout_rvalid;
  logic [2:0]            bout_src;
  logic [CH_W-1:0]       bout_addr;
  logic [N_IMA_P-1:0]    ob_re;
  logic [CH_W-1:0]       ob_raddr;
  logic [OUT_BUS_W-1:0]  ob_rdata [N_IMA_P];
  logic [OUT_BUS_W-1:0]  bout_rdata;
  logic                  acc_clear, acc_valid, acc_first, acc_last;
  logic [TAG_W-1:0]      acc_tag;
  logic                  upd_valid;
  logic [CH_W-1:0]       upd_ch;
  logic [IT_W-1:0]       upd_iter;
  logic signed [ACC_W-1:0] upd_accu;
  logic signed [ACC_W-1:0] accu [CH_PER_IPU];
  logic                  lut_re;
  logic [TAG_W-1:0]      lut_raddr;
  logic [LUT_W-1:0]      lut_rdata;
  logic                  term_relu, term_approx;
  logic                  dpu_start, dpu_done, dpu_merged;
  logic [CH_PER_IPU-1:0] relu_zero;
  logic                  dm_re, dm_we;
  logic [OMEM_AW-1:0]    dm_raddr, dm_waddr;
  logic [OUT_BUS_W-1:0]  dm_wdata;

  // ---------------- centralized memories --------------------------------
  sram_1r1w #(.DEPTH(IMEM_DEPTH), .WIDTH(IN_BUS_W)) u_input_memory (
    .clk, .we(imem_we), .waddr(imem_waddr), .wdata(imem_wdata),
    .re(imem_re), .raddr(imem_raddr), .rdata(imem_rdata));

  sram_1r1w #(.DEPTH(LUT_DEPTH), .WIDTH(LUT_W)) u_estimation_lut (
    .clk, .we(lut_we), .waddr(lut_waddr), .wdata(lut_wdata),
    .re(lut_re), .raddr(lut_raddr), .rdata(lut_rdata));

  sram_1r1w #(.DEPTH(OMEM_DEPTH), .WIDTH(OUT_BUS_W)) u_output_memory (
    .clk, .we(dm_we), .waddr(dm_waddr), .wdata(dm_wdata),
    .re(busy ? dm_re : omem_re), .raddr(busy ? dm_raddr : omem_raddr), .rdata(omem_rdata));

  // ---------------- shared bus and IMAs ---------------------------------
  shared_bus #(.N_IMA(N_IMA_P), .IN_W(IN_BUS_W), .OUT_W(OUT_BUS_W), .IBA_W(IBA_W), .OBA_W(CH_W)) u_bus (
    .clk, .rst_n,
    .in_valid(bin_valid), .in_dest(bin_dest[$clog2(N_IMA_P > 1 ? N_IMA_P : 2)-1:0]),
    .in_addr(bin_addr), .in_data(imem_rdata),
    .ib_we, .ib_waddr, .ib_wdata,
    .out_req(bout_req), .out_src(bout_src[$clog2(N_IMA_P > 1 ? N_IMA_P : 2)-1:0]), .out_addr(bout_addr),
    .ob_re, .ob_raddr, .ob_rdata, .out_rvalid(bout_rvalid), .out_rdata(bout_rdata));

  for (genvar m = 0; m < N_IMA_P; m++) begin : g_ima
    ima #(.N_IPU(N_IPU_P), .ROWS(XBAR_ROWS), .COLS(XBAR_COLS), .CELL_BITS(CELL_BITS),
          .CELLS(CELLS_PER_W), .BL_W(BL_W), .ADC_BITS(ADC_BITS), .ACT_BITS(ACT_BITS),
          .TAG_W(TAG_W), .PART_W(PART_W), .IBUF_W(IN_BUS_W), .OBUF_W(OUT_BUS_W)) u_ima (
      .clk, .rst_n,
      .prog_en(prog_en && (int'(prog_ima) == m)), .prog_ipu(prog_ipu[$clog2(N_IPU_P)-1:0]),
      .prog_row, .prog_pos, .prog_neg,
      .ib_we(ib_we[m]), .ib_waddr, .ib_wdata,
      .wl_fetch, .wl_bit, .sh_hold,
      .adc_en(adc_en[m]), .adc_ch, .adc_slice, .adc_tag,
      .part_valid(part_valid[m]), .part_tag(part_tag[m]),
      .ob_re(ob_re[m]), .ob_raddr, .ob_rdata(ob_rdata[m]),
      .adc_sat(sat[m]));
  end

  always_comb begin
    sat_count = '0;
    for (int m = 0; m < N_IMA_P; m++)
      for (int i = 0; i < N_IPU_P; i++)
        sat_count += 8'(sat[m][i] && adc_en[m]);
  end

  // ---------------- accumulation and evaluation -------------------------
  tile_accumulator #(.N_CH(CH_PER_IPU), .ACT_BITS(ACT_BITS), .IN_W(BUS_VAL_W), .ACC_W(ACC_W)) u_acc (
    .clk, .rst_n, .clear(acc_clear), .signed_in(cfg_q.signed_in),
    .sign_iter(cfg_q.act8 ? IT_W'(ACT_BITS / 2) : '0),
    .in_valid(acc_valid), .in_first(acc_first), .in_last(acc_last), .in_tag(acc_tag),
    .in_val(bout_rdata[BUS_VAL_W-1:0]),
    .upd_valid, .upd_ch, .upd_iter, .upd_accu, .accu);

  eval_logic #(.ACC_W(ACC_W), .T_W(T_W)) u_eval (
    .accu(upd_accu),
    .max_est(lut_rdata[ACC_W-1:0]),
    .min_est(lut_rdata[LUT_W/2 +: ACC_W]),
    .thr(cfg_q.thr), .relu_en(cfg_q.relu_en), .approx_en(cfg_q.approx_en),
    .term_relu, .term_approx);

  // ---------------- post-processing -------------------------------------
  dpu_post #(.N_CH(CH_PER_IPU), .ACC_W(ACC_W), .OUT_W(OUT_ACT_W), .MEM_W(OUT_BUS_W), .MA_W(OMEM_AW)) u_dpu (
    .clk, .rst_n, .start(dpu_start), .accu, .relu_zero,
    .relu_en(cfg_q.relu_en), .out_shift(cfg_q.out_shift), .out_addr(cfg_q.out_addr),
    .pool_first(cfg_q.pool_first),
    .mem_re(dm_re), .mem_raddr(dm_raddr), .mem_rdata(omem_rdata),
    .mem_we(dm_we), .mem_waddr(dm_waddr), .mem_wdata(dm_wdata),
    .done(dpu_done), .merged(dpu_merged));

  // ---------------- controller ------------------------------------------
  stats_t stats_c;

  tile_ctrl #(.N_IMA(N_IMA_P), .N_CH(CH_PER_IPU), .ACT_BITS(ACT_BITS), .CELLS(CELLS_PER_W),
              .IBW(IBW), .WPB(WPB), .IMA_W(3), .IMEM_AW(IMEM_AW)) u_ctrl (
    .clk, .rst_n, .start, .cfg_in(cfg), .cfg(cfg_q), .busy, .done, .cur_iter, .stats(stats_c),
    .imem_re, .imem_raddr, .bin_valid, .bin_dest, .bin_addr,
    .wl_fetch, .wl_bit, .sh_hold, .adc_en, .adc_ch, .adc_slice, .adc_tag,
    .part_valid(part_valid[0]), .part_tag(part_tag[0]), .sat_count,
    .bout_req, .bout_src, .bout_addr, .acc_clear, .acc_valid, .acc_first, .acc_last, .acc_tag,
    .bout_rvalid,
    .lut_re, .lut_raddr, .upd_valid, .upd_ch, .upd_iter, .term_relu, .term_approx,
    .dpu_start, .relu_zero, .dpu_done, .pool_merged(dpu_merged));

  assign stats = stats_c;

endmodule
