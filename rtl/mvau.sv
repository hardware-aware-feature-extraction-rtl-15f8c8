// mvau -- folded matrix-vector unit, the compute engine of one conv layer.
//
// For every output pixel it multiplies the layer's MH x MW weight matrix
// (MH output channels, MW = K*K*Cin window elements) with the pixel's window
// vector. The work is folded: each clock PE output channels each take SIMD
// products, so one pixel takes SF = MW/SIMD clocks per group of PE channels
// and NF = MH/PE groups, SF*NF clocks in all. The window vector arrives once
// per pixel (SF words, during the first channel group) and is kept in a small
// input buffer for the other NF-1 groups. Products are 3-bit signed weight
// times unsigned activation, summed in an adder tree per PE into an
// accumulator of ACC_BITS, wide enough never to overflow.
//
// Weights are kept on chip in one table per PE, row nf*SF+sf holding the SIMD
// weights that PE uses at fold step (nf, sf); weight s multiplies lane s of the
// input word. The host writes them through the wgt_* port before the first
// frame. The paper only says that a hardware kernel is chosen per network node
// and that the host sends the weights to the logic by DMA; the folding scheme,
// the on-chip weight table and the write port are this design's choices.
//
// Interface: valid/ready input stream of SIMD activations per word, output
// stream of PE accumulators per word (channel nf*PE+p in lane p), one output
// word every SF input-or-buffer steps. Timing: one fold step per clock, output
// registered one clock after the last step of a group.
module mvau
  import sp_pkg::*;
#(
  parameter int unsigned MW       = 576,
  parameter int unsigned MH       = 64,
  parameter int unsigned SIMD     = 32,
  parameter int unsigned PE       = 64,
  parameter int unsigned IN_BITS  = A_BITS,
  parameter int unsigned WB       = W_BITS,
  parameter int unsigned ACC_BITS = acc_bits(MW, IN_BITS, WB)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [SIMD*IN_BITS-1:0]   in_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [PE*ACC_BITS-1:0]    out_data,
  input  logic                      wgt_we,
  input  logic [ROW_BITS-1:0]       wgt_row,
  input  logic [PEIDX_BITS-1:0]     wgt_pe,
  input  logic [WLD_BITS-1:0]       wgt_data
);
  localparam int unsigned SF = MW / SIMD;
  localparam int unsigned NF = MH / PE;

  logic [SIMD*WB-1:0]      wmem [PE][SF*NF];
  logic [SIMD*IN_BITS-1:0] ibuf [SF];
  logic signed [ACC_BITS-1:0] acc [PE];
  logic signed [ACC_BITS-1:0] acc_nx [PE];
  int unsigned sf, nf;

  logic [SIMD*IN_BITS-1:0] x;
  logic have_in, last, out_free, fire;

  always_ff @(posedge clk) begin
    if (wgt_we && (int'(wgt_pe) < int'(PE)) && (int'(wgt_row) < int'(SF * NF)))
      wmem[wgt_pe][wgt_row] <= wgt_data[SIMD*WB-1:0];
  end

  always_comb begin
    x        = (nf == 0) ? in_data : ibuf[sf];
    have_in  = (nf == 0) ? in_valid : 1'b1;
    last     = (sf == SF - 1);
    out_free = !out_valid || out_ready;
    fire     = have_in && (!last || out_free);
    in_ready = (nf == 0) && (!last || out_free);
  end

  // PE dot products of SIMD lanes, added to the running sum.
  always_comb begin
    for (int p = 0; p < int'(PE); p++) begin
      logic [SIMD*WB-1:0] wrow;
      logic signed [ACC_BITS-1:0] dot;
      wrow = wmem[p][nf * SF + sf];
      dot  = '0;
      for (int s = 0; s < int'(SIMD); s++)
        dot += ACC_BITS'($signed(wrow[s*WB +: WB]) * $signed({1'b0, x[s*IN_BITS +: IN_BITS]}));
      acc_nx[p] = ((sf == 0) ? '0 : acc[p]) + dot;
    end
  end

  always_ff @(posedge clk) begin
    if (fire && nf == 0) ibuf[sf] <= in_data;
    if (fire && !last) for (int p = 0; p < int'(PE); p++) acc[p] <= acc_nx[p];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sf <= 0; nf <= 0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        if (last) begin
          sf <= 0;
          nf <= (nf == NF - 1) ? 0 : nf + 1;
          out_valid <= 1'b1;
          for (int p = 0; p < int'(PE); p++) out_data[p*ACC_BITS +: ACC_BITS] <= acc_nx[p];
        end else sf <= sf + 1;
      end
    end
  end

  property p_hold;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  assert property (p_hold);

endmodule
