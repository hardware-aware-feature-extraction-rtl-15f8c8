// threshold_unit -- streaming multi-threshold activation and requantisation.
//
// Each conv layer's accumulator x is turned into a small integer code by
// comparing it with a per-channel list of thresholds t_0 .. t_{N-1}
// (N = 2^OUT_BITS - 1): the code is the smallest index i for which t_i > x,
// or N when no threshold exceeds x, plus a constant OUT_BIAS. With
// OUT_BIAS = 0 this is a quantised ReLU (codes 0..N); with OUT_BIAS = -2^(B-1)
// it gives a signed B-bit code, used for the two output layers that have no
// ReLU. Batch-norm and scale factors are folded into the thresholds, so no
// multiplier is needed. The comparison rule is the one the paper states; the
// signed variant for the output layers and the write port are this design's
// own choices.
//
// Interface: a valid/ready stream of PE accumulators per word; the words of
// one pixel cycle through the C/PE channel groups in order, so channel of lane
// p in group g is g*PE + p. Output: PE codes per word, same order.
// Thresholds live in a C x N table written through thr_we/thr_ch/thr_idx/
// thr_data (the host loads them before use; values are saturated to the
// table's width). Timing: one word per clock, one clock of latency
// (registered output).
module threshold_unit
  import sp_pkg::*;
#(
  parameter int unsigned C        = 64,
  parameter int unsigned PE       = 64,
  parameter int unsigned IN_BITS  = acc_bits(576, A_BITS, W_BITS),
  parameter int unsigned OUT_BITS = A_BITS,
  parameter int          OUT_BIAS = 0
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [PE*IN_BITS-1:0]      in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [PE*OUT_BITS-1:0]     out_data,
  input  logic                       thr_we,
  input  logic [CH_BITS-1:0]         thr_ch,
  input  logic [TIDX_BITS-1:0]       thr_idx,
  input  logic signed [THR_BITS-1:0] thr_data
);
  localparam int unsigned NT = (1 << OUT_BITS) - 1;
  localparam int unsigned NF = C / PE;
  localparam int unsigned TW = IN_BITS + 1;
  localparam int unsigned GW = (NF > 1) ? $clog2(NF) : 1;

  logic signed [TW-1:0] thr [C][NT];
  logic [GW-1:0]        grp;
  logic [PE*OUT_BITS-1:0] code;

  // Threshold table write, saturating the host value to TW bits.
  localparam logic signed [THR_BITS-1:0] TMAX = THR_BITS'((longint'(1) << (TW - 1)) - 1);
  localparam logic signed [THR_BITS-1:0] TMIN = -TMAX - 1;
  always_ff @(posedge clk) begin
    if (thr_we && (int'(thr_ch) < int'(C)) && (int'(thr_idx) < int'(NT))) begin
      if (thr_data > TMAX)      thr[thr_ch][thr_idx] <= TMAX[TW-1:0];
      else if (thr_data < TMIN) thr[thr_ch][thr_idx] <= TMIN[TW-1:0];
      else                      thr[thr_ch][thr_idx] <= thr_data[TW-1:0];
    end
  end

  // Smallest i with t_i > x, else NT.
  always_comb begin
    for (int p = 0; p < int'(PE); p++) begin
      logic signed [TW-1:0] x;
      int idx;
      int ch;
      x   = TW'($signed(in_data[p*IN_BITS +: IN_BITS]));
      ch  = int'(grp) * int'(PE) + p;
      idx = NT;
      for (int i = int'(NT) - 1; i >= 0; i--)
        if (thr[ch][i] > x) idx = i;
      code[p*OUT_BITS +: OUT_BITS] = OUT_BITS'(idx + OUT_BIAS);
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      grp       <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        out_valid <= 1'b1;
        out_data  <= code;
        grp       <= (int'(grp) == int'(NF) - 1) ? '0 : grp + 1'b1;
      end
    end
  end

  // Stream rule: a word offered is held until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  assert property (p_hold);

endmodule
