// csnn_pkg: constants, types and default weight formulas shared by the
// convolutional spiking neural network (CSNN) for radioisotope identification.
//
// Network shape (from the published architecture): 1024 energy channels in,
// a 1-D convolution of 4 filters x 5 taps (stride 1, 1020 positions per
// filter), average pooling of size 16 / stride 16 (64 pool neurons per filter,
// 256 in all) and a fully-connected output layer of 8 neurons, one per isotope.
// Weights are 8-bit signed integers.
//
// The trained weights themselves are not published. The functions
// conv_w_default() and fc_w_default() give a deterministic stand-in set that
// makes the network separate eight channel regions: every filter is a
// positive smoothing kernel and output class c is excited by pool windows
// 8c..8c+7 and mildly inhibited by all others. Real weights are loaded by
// giving the ROMs a hex file instead.
package csnn_pkg;

  // ---------------------------------------------------------------- shape
  localparam int unsigned N_IN      = 1024;           // energy channels
  localparam int unsigned AER_IN_W  = $clog2(N_IN);   // 10
  localparam int unsigned N_FILT    = 4;
  localparam int unsigned K         = 5;              // filter size
  localparam int unsigned N_CONV    = N_IN - K + 1;   // 1020 positions per filter
  localparam int unsigned POS_W     = $clog2(N_CONV); // 10
  localparam int unsigned FILT_W    = $clog2(N_FILT); // 2
  localparam int unsigned CONV_AW   = FILT_W + POS_W; // 12: {filter, position}
  localparam int unsigned POOL      = 16;             // pool size and stride
  localparam int unsigned N_POOL    = (N_CONV + POOL - 1) / POOL;  // 64 per filter
  localparam int unsigned N_POOL_FULL = N_CONV / POOL;             // 63 full windows
  localparam int unsigned POOL_AW   = FILT_W + $clog2(N_POOL);     // 8: {filter, window}
  localparam int unsigned N_OUT     = 8;              // isotope classes
  localparam int unsigned OUT_W     = $clog2(N_OUT);  // 3
  localparam int unsigned WW        = 8;              // weight width (signed)

  localparam int unsigned N_CONV_W  = N_FILT * K;                  // 20
  localparam int unsigned N_FC_ROWS = N_FILT * N_POOL_FULL;        // 252
  localparam int unsigned N_FC_W    = N_FC_ROWS * N_OUT;           // 2016

  // Largest number of pool spikes one input event can cause: per filter the
  // K touched conv neurons fall into at most two pool windows, and each
  // window fires at most once because K < POOL.
  localparam int unsigned MAX_POOL_SPIKES_PER_EVENT = 2 * N_FILT;  // 8

  typedef logic signed [WW-1:0] weight_t;

  // State of the time-division-multiplexed layer controllers.
  typedef enum logic [2:0] {
    ST_CLEAR,    // writing the initial voltage into every neuron after reset
    ST_IDLE,
    ST_LOAD,     // FIFO output valid, latch the event
    ST_READ,     // present neuron address, read voltage and weight
    ST_PROCESS   // ALU result written back, spike emitted if it fired
  } tdm_state_e;

  // Which built-in table a weight ROM holds.
  typedef enum logic {
    ROM_CONV = 1'b0,
    ROM_FC   = 1'b1
  } rom_kind_e;

  // Test vector opcodes on the serial link (bits 15:14 of a 16-bit vector).
  typedef enum logic [1:0] {
    TV_EVENT   = 2'b00,
    TV_COLLECT = 2'b01,
    TV_RESET   = 2'b10,
    TV_NOP     = 2'b11
  } tv_op_e;

  // --------------------------------------------------- default weights
  // Conv weight of filter f, tap n: 24 + 8f - 6|n-2|  (range 12..48).
  function automatic weight_t conv_w_default(int unsigned f, int unsigned n);
    int d;
    d = (n > 2) ? int'(n) - 2 : 2 - int'(n);
    return weight_t'(24 + 8 * int'(f) - 6 * d);
  endfunction

  // FC weight from pool row (filter f, window q) to class o:
  // +40 when q / 8 == o, else -4.
  function automatic weight_t fc_w_default(int unsigned f, int unsigned q, int unsigned o);
    if (f >= N_FILT) return weight_t'(0);
    return ((q >> 3) == o) ? weight_t'(40) : weight_t'(-4);
  endfunction

  // Default contents of ROM word a, for either ROM. The conv ROM is laid out
  // as a = f*K + n; the FC ROM as a = row*N_OUT + o with row = f*63 + q.
  function automatic weight_t rom_default(rom_kind_e kind, int unsigned a);
    if (kind == ROM_CONV)
      return conv_w_default(a / K, a % K);
    else
      return fc_w_default((a / N_OUT) / N_POOL_FULL, (a / N_OUT) % N_POOL_FULL, a % N_OUT);
  endfunction

endpackage
