// stream_dwc -- stream width converter that splits each wide word into
// IN_N/OUT_N narrower words.
//
// Used between layers whose folding differs: a layer that produces PE channels
// per word feeds a layer that consumes SIMD < PE channels per word. Lane order
// is kept, so channel numbering is unchanged: lanes 0..OUT_N-1 of the input
// word leave first. IN_N must be a multiple of OUT_N. Not described in the
// paper; the streaming flow needs it wherever two neighbouring layers are
// folded differently. Timing: one output word per clock, an input word is
// taken when the previous one has been fully sent.
module stream_dwc #(
  parameter int unsigned IN_N  = 64,
  parameter int unsigned OUT_N = 16,
  parameter int unsigned BITS  = 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [IN_N*BITS-1:0]  in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [OUT_N*BITS-1:0] out_data
);
  localparam int unsigned R = IN_N / OUT_N;

  logic [IN_N*BITS-1:0] hold;
  int unsigned          piece;

  assign out_data = hold[piece*OUT_N*BITS +: OUT_N*BITS];
  assign in_ready = !out_valid || (out_ready && piece == R - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold <= '0; piece <= 0; out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) begin
        if (piece == R - 1) begin
          out_valid <= 1'b0;
          piece     <= 0;
        end else piece <= piece + 1;
      end
      if (in_valid && in_ready) begin
        hold      <= in_data;
        piece     <= 0;
        out_valid <= 1'b1;
      end
    end
  end

endmodule
