// sp_pkg -- shared constants and types of the quantised SuperPoint streaming
// accelerator.
//
// The network is SuperPoint with every weight and every hidden activation
// held in 3 bits (the "INT3" variant, the one used for the hardware build).
// Activations are unsigned 3-bit codes produced by multi-threshold units,
// weights are signed 3-bit integers, the input is an 8-bit greyscale pixel.
// Accumulators are sized per layer by acc_bits() so that no dot product can
// overflow.
//
// Weights and thresholds are not fixed in the logic: a host loads them before
// the first frame through two write ports (wgt_wr_t, thr_wr_t) that all layers
// share and that select a layer by its layer_id_e number.
//
// The folding (PE output channels and SIMD input channels handled per clock) of
// every layer is this design's own choice: it is picked so that no layer needs
// more than ~5.53 M clocks for a 640x480 frame, which gives 54 frames/s at
// 300 MHz, the rate and clock reported for the larger (ZCU102) build.
package sp_pkg;

  // Number formats
  localparam int PIX_BITS = 8;   // greyscale input pixel
  localparam int W_BITS   = 3;   // signed weight
  localparam int A_BITS   = 3;   // activation code
  localparam int NUM_THR  = (1 << A_BITS) - 1;  // 7 thresholds per channel

  // Default frame size (Table IV resolution)
  localparam int IMG_W = 640;
  localparam int IMG_H = 480;

  // Host load ports
  localparam int WLD_BITS   = 96;  // widest weight row: SIMD 32 x 3 bits
  localparam int THR_BITS   = 32;  // threshold value as written by the host
  localparam int ROW_BITS   = 16;
  localparam int PEIDX_BITS = 8;
  localparam int CH_BITS    = 9;
  localparam int TIDX_BITS  = 3;

  typedef enum logic [3:0] {
    L_CONV1A = 4'd0,  L_CONV1B = 4'd1,
    L_CONV2A = 4'd2,  L_CONV2B = 4'd3,
    L_CONV3A = 4'd4,  L_CONV3B = 4'd5,
    L_CONV4A = 4'd6,  L_CONV4B = 4'd7,
    L_CONVPA = 4'd8,  L_CONVPB = 4'd9,
    L_CONVDA = 4'd10, L_CONVDB = 4'd11
  } layer_id_e;

  // One weight row: SIMD weights of one PE for one (nf, sf) fold step.
  // Element s sits in data[s*W_BITS +: W_BITS].
  typedef struct packed {
    logic                  we;
    logic [3:0]            layer;
    logic [ROW_BITS-1:0]   row;    // nf*SF + sf
    logic [PEIDX_BITS-1:0] pe;
    logic [WLD_BITS-1:0]   data;
  } wgt_wr_t;

  // One threshold t_idx of output channel ch.
  typedef struct packed {
    logic                        we;
    logic [3:0]                  layer;
    logic [CH_BITS-1:0]          ch;
    logic [TIDX_BITS-1:0]        idx;
    logic signed [THR_BITS-1:0]  data;
  } thr_wr_t;

  // Width of a signed accumulator that holds any sum of mw products of an
  // unsigned in_bits input and a signed w_bits weight.
  function automatic int acc_bits(int mw, int in_bits, int w_bits);
    longint mx;
    int n;
    mx = longint'(mw) * ((longint'(1) << in_bits) - 1) * (longint'(1) << (w_bits - 1));
    n = 1;
    while ((longint'(1) << n) <= mx) n++;
    return n + 1;
  endfunction

endpackage
