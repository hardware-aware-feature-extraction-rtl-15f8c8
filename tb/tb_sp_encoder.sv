// tb_sp_encoder -- runs two 16x16 greyscale frames through the eight-layer,
// three-pool encoder and compares every 3-bit element of the 128 x 2 x 2
// feature maps with the reference network computed layer by layer from the
// definitions. All twelve layers' parameter sets use the real channel counts
// and folding; only the image is small. Output stalls and input gaps are
// random.
module tb_sp_encoder;
  import sp_pkg::*;
  import sp_ref_pkg::*;
  localparam int W = 16, H = 16, NFR = 2;
  localparam int NIN = W * H, NOUT = (W / 8) * (H / 8) * (128 / 16);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [7:0] in_data;
  logic [16*3-1:0] out_data;
  wgt_wr_t wgt;
  thr_wr_t thr;

  sp_encoder #(.W(W), .H(H)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .wgt, .thr);

  arr_t res [NFR];
  int zero;
  int in_idx = 0, out_idx = 0, checks = 0, failures = 0, nonzero = 0;
  logic gate = 0, rdy = 0, started = 0;

  assign in_valid  = started && gate && in_idx < NFR * NIN;
  assign in_data   = 8'(pix(in_idx / NIN, (in_idx % NIN) / W, in_idx % W));
  assign out_ready = rdy;

  always @(posedge clk) begin
    gate <= ($urandom % 4) != 0;
    rdy  <= ($urandom % 3) != 0;
    if (in_valid && in_ready) in_idx <= in_idx + 1;
    if (out_valid && out_ready) begin
      logic [16*3-1:0] e;
      e = pack_word(res[out_idx / NOUT], 128, W / 8, H / 8, 16, 3, out_idx % NOUT)[16*3-1:0];
      for (int ln = 0; ln < 16; ln++) begin
        checks++;
        if (out_data[ln*3 +: 3] != 0) nonzero++;
        if (out_data[ln*3 +: 3] !== e[ln*3 +: 3]) failures++;
      end
      if (out_data !== e && failures < 10) $display("word %0d: got %h exp %h", out_idx, out_data, e);
      out_idx++;
    end
  end

  initial begin
    wgt = '0; thr = '0;
    // a run-time zero keeps the reference evaluation out of elaboration
    zero = $test$plusargs("tb_never_set") ? 1 : 0;
    for (int f = 0; f < NFR; f++) res[f] = encoder_ref(f + zero, W, H);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 8; l++) begin
      for (int n = 0; n < num_wgt(L_K[l] * L_K[l] * L_CIN[l], L_COUT[l], L_SIMD[l]); n++) begin
        @(negedge clk); wgt = wgt_word(l, n);
      end
      @(negedge clk); wgt = '0;
      for (int n = 0; n < L_COUT[l] * NUM_THR; n++) begin
        @(negedge clk); thr = thr_word(l, n);
      end
      @(negedge clk); thr = '0;
    end
    started = 1;
    wait (out_idx == NFR * NOUT);
    repeat (5) @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("extra output"); end
    checks++;
    if (nonzero < checks / 8) begin failures++; $display("too few nonzero outputs: %0d", nonzero); end
    $display("nonzero outputs %0d", nonzero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: out_idx=%0d in_idx=%0d", out_idx, in_idx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
