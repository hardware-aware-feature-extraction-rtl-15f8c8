// stream_dup -- duplicates one stream into two, each with its own
// handshake, so the two SuperPoint decoder heads both receive every word of
// the shared encoder's output.
//
// Each output has a one-word register with its own valid flag. A new input
// word is taken when both registers are empty or being emptied in this clock,
// so neither head can miss a word and neither output's valid depends on the
// other head's ready. The paper states that the encoder output goes to both
// decoders; this register scheme is the design's own. Timing: one word per
// clock when both heads accept, one clock of latency.
module stream_dup #(
  parameter int unsigned DW = 48
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [DW-1:0] in_data,
  output logic          out0_valid,
  input  logic          out0_ready,
  output logic [DW-1:0] out0_data,
  output logic          out1_valid,
  input  logic          out1_ready,
  output logic [DW-1:0] out1_data
);
  logic [DW-1:0] word;

  assign in_ready  = (!out0_valid || out0_ready) && (!out1_valid || out1_ready);
  assign out0_data = word;
  assign out1_data = word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word <= '0; out0_valid <= 1'b0; out1_valid <= 1'b0;
    end else begin
      if (out0_valid && out0_ready) out0_valid <= 1'b0;
      if (out1_valid && out1_ready) out1_valid <= 1'b0;
      if (in_valid && in_ready) begin
        word       <= in_data;
        out0_valid <= 1'b1;
        out1_valid <= 1'b1;
      end
    end
  end

  property p_hold0;
    @(posedge clk) disable iff (!rst_n) out0_valid && !out0_ready |=> out0_valid && $stable(out0_data);
  endproperty
  assert property (p_hold0);

endmodule
