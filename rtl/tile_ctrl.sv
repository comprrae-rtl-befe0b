// Tile controller: runs one MAC operation of the tile from input load to the
// output memory write.
//
// 1. Load: the input words of the MAC (IBW words per used IMA, starting at
//    cfg.in_base) are read from the centralized input memory and sent over
//    the input path of the shared bus to the IMAs' local input buffers.
// 2. Iterations: the input bits are applied MSB first, one iteration per bit
//    (ACT_BITS iterations; with cfg.act8 only the low 8 bits, iterations 8-15). In an iteration the ADCs convert only the channels
//    that are still active, CELLS cycles per channel, so an iteration lasts
//    CELLS x (active channels) cycles: 16 x 8 cycles = 16 x 6.25 ns at
//    1.28 GHz when nothing is bypassed, shorter later, as in the paper's
//    pipeline. The next bit plane is fetched at the start of an iteration and
//    the sample-hold is loaded in its last conversion cycle, so iterations
//    follow without gaps; the first needs PREP cycles of crossbar fill.
// 3. Transfer and evaluation: when an IMA announces a channel's partial
//    result and the channel is still active, the result of every used IMA is
//    fetched over the output path (one beat per IMA) into the tile
//    accumulator; with the last beat the LUT entry {channel, iteration} is read. The
//    evaluation result ends the channel (ReLU bypass or approximation); after
//    the last iteration a channel ends as completed. A result that arrives
//    for a channel already ended is dropped without a bus transfer.
// 4. Drain and post-processing: when no channel is active or the last
//    iteration is converted, the pipeline drains and dpu_post writes the
//    results; done pulses for one cycle.
// The order of these phases and the counters are this design's choices; the
// paper gives the pipeline stages and the per-channel conversion time.
module tile_ctrl #(
  parameter int N_IMA    = 8,
  parameter int N_CH     = 16,
  parameter int ACT_BITS = 16,
  parameter int CELLS    = 8,
  parameter int IBW      = 64,     // local input buffer words per IMA
  parameter int WPB      = 4,      // words per bit plane
  parameter int IMA_W    = 3,
  parameter int IMEM_AW  = 11,
  localparam int CH_W    = $clog2(N_CH),
  localparam int IT_W    = $clog2(ACT_BITS),
  localparam int IBA_W   = $clog2(IBW),
  localparam int PREP    = WPB + 2,
  localparam int DRAIN   = CELLS + N_IMA + 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  comprrae_pkg::cfg_t     cfg_in,
  output comprrae_pkg::cfg_t     cfg,        // configuration latched at start
  output logic                   busy,
  output logic                   done,
  output logic [IT_W-1:0]        cur_iter,
  output comprrae_pkg::stats_t   stats,
  // centralized input memory read and bus input path
  output logic                   imem_re,
  output logic [IMEM_AW-1:0]     imem_raddr,
  output logic                   bin_valid,
  output logic [IMA_W-1:0]       bin_dest,
  output logic [IBA_W-1:0]       bin_addr,
  // iteration control to the IMAs
  output logic                   wl_fetch,
  output logic [IT_W-1:0]        wl_bit,
  output logic                   sh_hold,
  output logic [N_IMA-1:0]       adc_en,
  output logic [CH_W-1:0]        adc_ch,
  output logic [$clog2(CELLS)-1:0] adc_slice,
  output logic [IT_W+CH_W-1:0]   adc_tag,
  input  logic                   part_valid,
  input  logic [IT_W+CH_W-1:0]   part_tag,
  input  logic [7:0]             sat_count,
  // bus output path and accumulator
  output logic                   bout_req,
  output logic [IMA_W-1:0]       bout_src,
  output logic [CH_W-1:0]        bout_addr,
  output logic                   acc_clear,
  output logic                   acc_valid,
  output logic                   acc_first,
  output logic                   acc_last,
  output logic [IT_W+CH_W-1:0]   acc_tag,
  input  logic                   bout_rvalid,
  // LUT read and evaluation
  output logic                   lut_re,
  output logic [IT_W+CH_W-1:0]   lut_raddr,
  input  logic                   upd_valid,
  input  logic [CH_W-1:0]        upd_ch,
  input  logic [IT_W-1:0]        upd_iter,
  input  logic                   term_relu,
  input  logic                   term_approx,
  // post-processing
  output logic                   dpu_start,
  output logic [N_CH-1:0]        relu_zero,
  input  logic                   dpu_done,
  input  logic                   pool_merged
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_LOADEND, S_PREP, S_ITER, S_DRAIN, S_POST} state_e;
  state_e state;

  logic [N_CH-1:0]          active;
  logic [15:0]              cnt;
  logic [IMEM_AW-1:0]       lcnt;
  logic                     ld_v;
  logic [IMEM_AW-1:0]       ld_idx;
  logic [CH_W-1:0]          ch;
  logic [$clog2(CELLS)-1:0] slice;
  logic [IT_W-1:0]          k;
  logic                     first_cyc;
  logic [N_CH-1:0]          end_mask;   // channels ended by the evaluation this cycle

  // bus output transfer
  logic                     xbusy;
  logic [IMA_W:0]           xcnt;
  logic [IT_W+CH_W-1:0]     xtag;
  logic                     x_start;
  logic [IMA_W:0]           nima;

  // next active channel above ch, and first active channel
  logic                     nxt_found, fst_found;
  logic [CH_W-1:0]          nxt_ch, fst_ch;
  logic [N_CH-1:0]          live;

  assign nima = (cfg.num_ima == '0) ? (IMA_W+1)'(1) :
                (int'(cfg.num_ima) > N_IMA) ? (IMA_W+1)'(N_IMA) : (IMA_W+1)'(cfg.num_ima);
  assign live = active & ~end_mask;

  always_comb begin
    nxt_found = 1'b0;
    nxt_ch    = '0;
    fst_found = 1'b0;
    fst_ch    = '0;
    for (int c = N_CH - 1; c >= 0; c--) begin
      if (live[c] && c > int'(ch)) begin
        nxt_found = 1'b1;
        nxt_ch    = CH_W'(c);
      end
      if (live[c]) begin
        fst_found = 1'b1;
        fst_ch    = CH_W'(c);
      end
    end
  end

  // evaluation results
  always_comb begin
    end_mask = '0;
    if (upd_valid && active[upd_ch] &&
        (int'(upd_iter) == ACT_BITS - 1 || term_relu || term_approx))
      end_mask[upd_ch] = 1'b1;
  end

  // -------------------------------------------------------------------
  assign busy     = (state != S_IDLE);
  assign cur_iter = k;

  // 8-bit activations apply only bits 7..0: the MAC starts at iteration 8
  logic [IT_W-1:0] kstart;
  assign kstart = cfg.act8 ? IT_W'(ACT_BITS / 2) : '0;

  always_comb begin
    imem_re    = (state == S_LOAD);
    imem_raddr = cfg.in_base + lcnt;
    bin_valid  = ld_v;
    bin_dest   = IMA_W'(ld_idx / IBW);
    bin_addr   = IBA_W'(ld_idx % IBW);
    wl_fetch   = 1'b0;
    wl_bit     = '0;
    sh_hold    = 1'b0;
    adc_en     = '0;
    adc_ch     = ch;
    adc_slice  = slice;
    adc_tag    = {k, ch};
    if (state == S_PREP && cnt == 0) begin
      wl_fetch = 1'b1;
      wl_bit   = IT_W'(ACT_BITS - 1) - kstart;
    end
    if (state == S_PREP && int'(cnt) == PREP) sh_hold = 1'b1;
    if (state == S_ITER) begin
      for (int m = 0; m < N_IMA; m++) adc_en[m] = (m < int'(nima));
      if (first_cyc && int'(k) < ACT_BITS - 1) begin
        wl_fetch = 1'b1;
        wl_bit   = IT_W'(ACT_BITS - 2 - int'(k));
      end
      if (int'(slice) == CELLS - 1 && !nxt_found && int'(k) < ACT_BITS - 1) sh_hold = 1'b1;
    end
  end

  // bus output transfer of a channel's partial results, one beat per IMA
  assign x_start   = part_valid && active[part_tag[CH_W-1:0]] && !end_mask[part_tag[CH_W-1:0]];
  assign bout_req  = x_start || xbusy;
  assign bout_src  = x_start ? '0 : IMA_W'(xcnt);
  assign bout_addr = x_start ? part_tag[CH_W-1:0] : xtag[CH_W-1:0];
  // the LUT is read with the last beat, so its word is still held when the
  // accumulator presents the channel's update (a transfer may start while
  // the previous channel's update is still on its way)
  assign lut_re    = bout_req && (x_start ? (nima == 1) : (xcnt == nima - 1));
  assign lut_raddr = x_start ? {part_tag[CH_W-1:0], part_tag[IT_W+CH_W-1:CH_W]}
                             : {xtag[CH_W-1:0], xtag[IT_W+CH_W-1:CH_W]};

  logic                 b_first, b_last;
  logic [IT_W+CH_W-1:0] b_tag;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xbusy   <= 1'b0;
      xcnt    <= '0;
      xtag    <= '0;
      b_first <= 1'b0;
      b_last  <= 1'b0;
      b_tag   <= '0;
    end else begin
      if (x_start) begin
        xbusy <= (nima > 1);
        xcnt  <= 1;
        xtag  <= part_tag;
      end else if (xbusy) begin
        xcnt <= xcnt + 1'b1;
        if (xcnt == nima - 1) xbusy <= 1'b0;
      end
      if (bout_req) begin
        b_first <= x_start;
        b_last  <= x_start ? (nima == 1) : (xcnt == nima - 1);
        b_tag   <= x_start ? part_tag : xtag;
      end
    end
  end

  // beats reach the accumulator with the bus read latency; a channel that
  // has ended meanwhile is not accumulated
  assign acc_valid = bout_rvalid && active[b_tag[CH_W-1:0]] && !end_mask[b_tag[CH_W-1:0]];
  assign acc_first = b_first;
  assign acc_last  = b_last;
  assign acc_tag   = b_tag;

  // -------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cfg       <= '0;
      active    <= '0;
      relu_zero <= '0;
      cnt       <= '0;
      lcnt      <= '0;
      ld_v      <= 1'b0;
      ld_idx    <= '0;
      ch        <= '0;
      slice     <= '0;
      k         <= '0;
      first_cyc <= 1'b0;
      done      <= 1'b0;
      dpu_start <= 1'b0;
      acc_clear <= 1'b0;
      stats     <= '0;
    end else begin
      done      <= 1'b0;
      dpu_start <= 1'b0;
      acc_clear <= 1'b0;
      ld_v      <= imem_re;
      ld_idx    <= lcnt;
      if (busy) stats.cycles <= stats.cycles + 1'b1;
      stats.adc_sat <= stats.adc_sat + 16'(sat_count);
      if (part_valid && !x_start && busy) stats.discarded <= stats.discarded + 1'b1;
      if (pool_merged) stats.pool_merges <= stats.pool_merges + 1'b1;

      // channel ends
      if (|end_mask) begin
        active <= active & ~end_mask;
        if (int'(upd_iter) == ACT_BITS - 1) stats.completed <= stats.completed + 1'b1;
        else if (term_relu) begin
          stats.relu_bypass <= stats.relu_bypass + 1'b1;
          relu_zero[upd_ch] <= 1'b1;
        end else stats.approx_bypass <= stats.approx_bypass + 1'b1;
      end

      case (state)
        S_IDLE: if (start) begin
          cfg       <= cfg_in;
          active    <= '1;
          relu_zero <= '0;
          lcnt      <= '0;
          k         <= '0;
          acc_clear <= 1'b1;
          stats     <= '0;
          state     <= S_LOAD;
        end
        S_LOAD: begin
          lcnt <= lcnt + 1'b1;
          if (int'(lcnt) == int'(nima) * IBW - 1) state <= S_LOADEND;
        end
        S_LOADEND: begin
          cnt   <= '0;
          state <= S_PREP;
        end
        S_PREP: begin
          cnt <= cnt + 1'b1;
          if (int'(cnt) == PREP) begin
            ch        <= '0;
            slice     <= '0;
            k         <= kstart;
            first_cyc <= 1'b1;
            state     <= S_ITER;
          end
        end
        S_ITER: begin
          first_cyc <= 1'b0;
          if (slice == '0) stats.conversions <= stats.conversions + 1'b1;
          if (int'(slice) == CELLS - 1) begin
            slice <= '0;
            if (nxt_found) begin
              ch <= nxt_ch;
            end else if (int'(k) == ACT_BITS - 1 || !fst_found) begin
              cnt   <= '0;
              state <= S_DRAIN;
            end else begin
              k         <= k + 1'b1;
              ch        <= fst_ch;
              first_cyc <= 1'b1;
            end
          end else begin
            slice <= slice + 1'b1;
          end
        end
        S_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (int'(cnt) == DRAIN) begin
            dpu_start <= 1'b1;
            state     <= S_POST;
          end
        end
        S_POST: if (dpu_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) !(part_valid && xbusy));

endmodule
