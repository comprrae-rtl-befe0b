// Shared constants and types of the CompRRAE tile.
//
// CompRRAE is an RRAM-crossbar CNN accelerator that feeds input activations
// into the crossbars one bit per iteration, MSB first, and stops the
// multiply-accumulate of an output channel early when a look-up table of
// offline estimates shows that the remaining iterations cannot change the
// result enough (ReLU bypass) or are negligible (adaptive approximation).
// The numbers below are the paper's main configuration (16-bit weights and
// activations, 128x128 crossbars of 2-bit cells, 16 channels per IPU,
// 8 IPUs per IMA, 8-bit ADC, 5 KB / 160-bit LUT). The accumulator width, the
// threshold format and the number of IMAs per tile are this design's choice.
package comprrae_pkg;

  localparam int ACT_BITS    = 16;                       // activation bits = iterations
  localparam int W_BITS      = 16;                       // weight bits
  localparam int XBAR_ROWS   = 128;
  localparam int XBAR_COLS   = 128;
  localparam int CELL_BITS   = 2;
  localparam int CELLS_PER_W = W_BITS / CELL_BITS;       // 8 bitlines per weight
  localparam int CH_PER_IPU  = XBAR_COLS / CELLS_PER_W;  // 16 output channels
  localparam int N_IPU       = 8;
  localparam int N_IMA       = 8;
  localparam int ADC_BITS    = 8;
  localparam int BL_W        = 11;                       // signed bitline difference
  localparam int PART_W      = 24;                       // IPU partial result
  localparam int ACC_W       = 48;                       // tile accumulator (Accu)
  localparam int T_W         = 8;                        // threshold T, unsigned Q0.8
  localparam int IN_BUS_W    = 256;
  localparam int OUT_BUS_W   = 128;
  localparam int LUT_W       = 160;                      // {Min, Max}, 80 bits each
  localparam int LUT_DEPTH   = 256;                      // 16 channels x 16 iterations
  localparam int OUT_ACT_W   = 16;
  localparam int IBUF_DEPTH  = 64;                       // 2 KB / 256 bit
  localparam int OBUF_DEPTH  = 16;                       // 256 B / 128 bit
  localparam int IMEM_DEPTH  = 2048;                     // 64 KB / 256 bit
  localparam int OMEM_DEPTH  = 64;                       // 1 KB / 128 bit
  localparam int CH_W        = $clog2(CH_PER_IPU);
  localparam int IT_W        = $clog2(ACT_BITS);
  localparam int TAG_W       = IT_W + CH_W;              // {iteration, channel}

  // Layer configuration applied to one MAC operation.
  typedef struct packed {
    logic [3:0]            num_ima;    // IMAs used by the kernel, 1..N_IMA
    logic                  relu_en;    // ReLU follows the layer: enable ReLU bypass
    logic                  approx_en;  // enable adaptive approximation
    logic                  signed_in;  // inputs are two's complement (e.g. first layer)
    logic [T_W-1:0]        thr;        // approximation threshold T = thr / 256
    logic [5:0]            out_shift;  // Accu >>> out_shift gives the 16-bit output
    logic [10:0]           in_base;    // first input memory word of this MAC
    logic [5:0]            out_addr;   // output memory word of channels 0..7 (+1: 8..15)
    logic                  pool_first; // first MAC of a pooling window: overwrite
    logic                  act8;       // 8-bit activations: only bits 7..0 are applied
  } cfg_t;

  // Event counters of the last MAC.
  typedef struct packed {
    logic [15:0] cycles;        // start to done
    logic [7:0]  relu_bypass;   // channels ended by the ReLU bypass
    logic [7:0]  approx_bypass; // channels ended by the approximation
    logic [7:0]  completed;     // channels that ran all iterations
    logic [9:0]  conversions;   // channel-iterations converted by the ADCs
    logic [9:0]  discarded;     // converted after the channel had ended
    logic [15:0] adc_sat;       // saturated ADC conversions (all IPUs)
    logic [7:0]  pool_merges;   // output words changed by a pooling merge
  } stats_t;

endpackage
