// maxpool -- streaming 2x2, stride 2 max pooling of unsigned activations.
//
// Input: one W x H image in raster order, each pixel as C/N words of N
// channels (channel g*N+n in lane n of word g). Output: the (W/2) x (H/2)
// pooled image in the same format. W and H must be even.
//
// How it works: a buffer of W/2 x C/N words holds the running maximum of each
// pooling window. The first pixel of a window (even row, even column) loads
// it, the next two update it, and the last (odd row, odd column) produces the
// pooled word, so the buffer is re-used for every pair of rows. The paper gives
// the 2x2 window; the buffer scheme is this design's choice.
//
// Timing: one input word per clock; the input is stalled only when a pooled
// word is due and the output register is still full. Output registered,
// one clock of latency.
module maxpool
  import sp_pkg::*;
#(
  parameter int unsigned W    = IMG_W,
  parameter int unsigned H    = IMG_H,
  parameter int unsigned C    = 64,
  parameter int unsigned N    = 64,
  parameter int unsigned BITS = A_BITS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [N*BITS-1:0]   in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [N*BITS-1:0]   out_data
);
  localparam int unsigned CF = C / N;

  logic [N*BITS-1:0] mbuf [W/2][CF];
  int unsigned x, y, g;
  logic first, emit;
  logic [N*BITS-1:0] old, mx;

  always_comb begin
    first = (y[0] == 1'b0) && (x[0] == 1'b0);
    emit  = (y[0] == 1'b1) && (x[0] == 1'b1);
    old   = mbuf[x / 2][g];
    for (int n = 0; n < int'(N); n++)
      mx[n*BITS +: BITS] = (first || in_data[n*BITS +: BITS] > old[n*BITS +: BITS])
                           ? in_data[n*BITS +: BITS] : old[n*BITS +: BITS];
    in_ready = !emit || !out_valid || out_ready;
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready && !emit) mbuf[x / 2][g] <= mx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= 0; y <= 0; g <= 0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (emit) begin
          out_valid <= 1'b1;
          out_data  <= mx;
        end
        if (g == CF - 1) begin
          g <= 0;
          if (x == W - 1) begin
            x <= 0;
            y <= (y == H - 1) ? 0 : y + 1;
          end else x <= x + 1;
        end else g <= g + 1;
      end
    end
  end

  property p_hold;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  assert property (p_hold);

endmodule
