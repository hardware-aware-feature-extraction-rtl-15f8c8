// conv_layer -- one quantised convolution layer of the streaming network:
// sliding_window -> mvau -> threshold_unit.
//
// Input: a W x H image in raster order, CIN channels per pixel as CIN/SIMD
// words. Output: the W x H result, COUT channels per pixel as COUT/PE words of
// OUT_BITS codes. K = 3 gives a zero-padded 3x3 convolution; K = 1 (the last
// layer of each SuperPoint head) feeds pixels straight into the MVAU.
// Every convolution is followed by requantisation by thresholds, as the
// network was trained with requantisation after each layer. Weights and
// thresholds are loaded through the shared wgt/thr ports; a layer accepts
// only writes carrying its own LAYER number.
//
// Timing: a pixel costs (K*K*CIN/SIMD) * (COUT/PE) clocks in the MVAU, which
// sets the layer's throughput; latency is a few clocks beyond the rows the
// sliding window must collect.
module conv_layer
  import sp_pkg::*;
#(
  parameter int unsigned W        = IMG_W,
  parameter int unsigned H        = IMG_H,
  parameter int unsigned CIN      = 64,
  parameter int unsigned COUT     = 64,
  parameter int unsigned K        = 3,
  parameter int unsigned SIMD     = 32,
  parameter int unsigned PE       = 64,
  parameter int unsigned IN_BITS  = A_BITS,
  parameter int unsigned OUT_BITS = A_BITS,
  parameter int          OUT_BIAS = 0,
  parameter layer_id_e   LAYER    = L_CONV1B
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [SIMD*IN_BITS-1:0]  in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [PE*OUT_BITS-1:0]   out_data,
  input  wgt_wr_t                  wgt,
  input  thr_wr_t                  thr
);
  localparam int unsigned MW  = K * K * CIN;
  localparam int unsigned ACC = acc_bits(MW, IN_BITS, W_BITS);

  logic                    win_valid, win_ready;
  logic [SIMD*IN_BITS-1:0] win_data;
  logic                    acc_valid, acc_ready;
  logic [PE*ACC-1:0]       acc_data;

  if (K > 1) begin : g_swu
    sliding_window #(.W(W), .H(H), .C(CIN), .SIMD(SIMD), .K(K), .BITS(IN_BITS)) u_swu (
      .clk, .rst_n,
      .in_valid, .in_ready, .in_data,
      .out_valid(win_valid), .out_ready(win_ready), .out_data(win_data));
  end else begin : g_direct
    assign win_valid = in_valid;
    assign in_ready  = win_ready;
    assign win_data  = in_data;
  end

  mvau #(.MW(MW), .MH(COUT), .SIMD(SIMD), .PE(PE), .IN_BITS(IN_BITS), .WB(W_BITS), .ACC_BITS(ACC)) u_mvau (
    .clk, .rst_n,
    .in_valid(win_valid), .in_ready(win_ready), .in_data(win_data),
    .out_valid(acc_valid), .out_ready(acc_ready), .out_data(acc_data),
    .wgt_we(wgt.we && wgt.layer == LAYER), .wgt_row(wgt.row), .wgt_pe(wgt.pe), .wgt_data(wgt.data));

  threshold_unit #(.C(COUT), .PE(PE), .IN_BITS(ACC), .OUT_BITS(OUT_BITS), .OUT_BIAS(OUT_BIAS)) u_thr (
    .clk, .rst_n,
    .in_valid(acc_valid), .in_ready(acc_ready), .in_data(acc_data),
    .out_valid, .out_ready, .out_data,
    .thr_we(thr.we && thr.layer == LAYER), .thr_ch(thr.ch), .thr_idx(thr.idx), .thr_data(thr.data));

endmodule
