// sliding_window -- convolution window generator (im2col) for a KxK, stride 1,
// zero-padded ("same") convolution.
//
// Input: one image in raster order, each pixel carried as C/SIMD words of SIMD
// channels (channel g*SIMD+s in lane s of word g). Output: for every output
// pixel, in raster order, the K*K*C/SIMD words of its window in the order
// (ky, kx, channel group), ky outermost. Positions outside the image read as
// zero, which is the padding of 1 that keeps the SuperPoint feature maps at
// their input size.
//
// How it works: the input rows are written into a ring of K+1 line buffers.
// Output row oy may start once input row min(oy+P, H-1) is complete
// (P = (K-1)/2); input row r may be written once output row r-P-1 has been
// finished, so that the row it overwrites is no longer needed. Reading and
// writing run at the same time, one word per clock each, and the rows of the
// next frame flow into the ring while the last rows of the current frame are
// still being read, so back-to-back frames see no pipeline drain.
//
// The paper names these units (they generate the convolution contexts and sit
// in BRAM on the smaller board); the line-buffer ring, the padding inside the
// unit and the output order are this design's choices. Timing: the output
// word is read combinationally from the line buffers, so a window word is
// offered in the clock after the input row it needs is complete; sustained
// rate one output word per clock.
module sliding_window
  import sp_pkg::*;
#(
  parameter int unsigned W    = IMG_W,
  parameter int unsigned H    = IMG_H,
  parameter int unsigned C    = 64,
  parameter int unsigned SIMD = 32,
  parameter int unsigned K    = 3,
  parameter int unsigned BITS = A_BITS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [SIMD*BITS-1:0]   in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [SIMD*BITS-1:0]   out_data
);
  localparam int unsigned CF   = C / SIMD;
  localparam int unsigned P    = (K - 1) / 2;
  localparam int unsigned NROW = K + 1;
  localparam int unsigned RW   = W * CF;

  logic [SIMD*BITS-1:0] lbuf [NROW][RW];

  // Row counters run on across frames (wrow, orow: rows written / output rows
  // finished since reset, compared wrap-safe); wy and oy are the row numbers
  // inside the current frame, used for padding and frame ends.
  int unsigned wrow, wy, wx, wcf, wslot;
  int unsigned orow, oy, ox, ky, kx, rcf, oslot;

  logic wr_ok, rd_ok, pad;
  int   iy, ix, yold, need;
  int unsigned rslot, raddr, free_after;

  always_comb begin
    // The slot of row wrow last held row wrow-NROW (inner row yold of its
    // frame), which output rows up to (wrow-NROW) + min(P, H-1-yold) read.
    yold = ((int'(wy) - int'(NROW)) % int'(H) + int'(H)) % int'(H);
    free_after = wrow - NROW + unsigned'((int'(P) < int'(H) - 1 - yold) ? int'(P) : int'(H) - 1 - yold);
    wr_ok = (wrow < NROW) || ($signed(orow - free_after) > 0);
    // Output row oy needs input rows up to min(oy+P, H-1) of its frame.
    need  = (oy + P + 1 < H) ? int'(oy + P + 1) : int'(H);
    rd_ok = $signed(wrow - (orow - oy + unsigned'(need))) >= 0;
    iy    = int'(oy) + int'(ky) - int'(P);
    ix    = int'(ox) + int'(kx) - int'(P);
    pad   = (iy < 0) || (iy >= int'(H)) || (ix < 0) || (ix >= int'(W));
    rslot = (oslot + ky + NROW - P) % NROW;
    raddr = pad ? 0 : unsigned'(ix) * CF + rcf;
    out_data = pad ? '0 : lbuf[rslot][raddr];
  end

  assign in_ready  = wr_ok;
  assign out_valid = rd_ok;

  always_ff @(posedge clk) begin
    if (in_valid && wr_ok) lbuf[wslot][wx * CF + wcf] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wrow <= 0; wy <= 0; wx <= 0; wcf <= 0; wslot <= 0;
      orow <= 0; oy <= 0; ox <= 0; ky <= 0; kx <= 0; rcf <= 0; oslot <= 0;
    end else begin
      if (in_valid && wr_ok) begin
        if (wcf == CF - 1) begin
          wcf <= 0;
          if (wx == W - 1) begin
            wx    <= 0;
            wrow  <= wrow + 1;
            wy    <= (wy == H - 1) ? 0 : wy + 1;
            wslot <= (wslot == NROW - 1) ? 0 : wslot + 1;
          end else wx <= wx + 1;
        end else wcf <= wcf + 1;
      end
      if (rd_ok && out_ready) begin
        if (rcf == CF - 1) begin
          rcf <= 0;
          if (kx == K - 1) begin
            kx <= 0;
            if (ky == K - 1) begin
              ky <= 0;
              if (ox == W - 1) begin
                ox    <= 0;
                orow  <= orow + 1;
                oy    <= (oy == H - 1) ? 0 : oy + 1;
                oslot <= (oslot == NROW - 1) ? 0 : oslot + 1;
              end else ox <= ox + 1;
            end else ky <= ky + 1;
          end else kx <= kx + 1;
        end else rcf <= rcf + 1;
      end
    end
  end

endmodule
