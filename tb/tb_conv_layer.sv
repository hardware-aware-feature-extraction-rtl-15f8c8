// tb_conv_layer -- checks one complete conv layer (window generator, MVAU,
// thresholds) on two 6x5 frames, 4 -> 8 channels, SIMD 2, PE 4. Weights and
// thresholds are loaded through the shared host ports, including writes
// addressed to another layer that must be ignored. Every output code is
// compared with a direct zero-padded 3x3 convolution followed by the
// threshold rule. Input gaps and output stalls are random.
module tb_conv_layer;
  import sp_pkg::*;
  import sp_ref_pkg::*;
  localparam int W = 6, H = 5, CI = 4, CO = 8, S = 2, PE = 4, NFR = 2;
  localparam layer_id_e L = L_CONV2A;
  localparam int MW = 9 * CI;
  localparam int NIN = W * H * (CI / S), NOUT = W * H * (CO / PE);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [S*3-1:0] in_data;
  logic [PE*3-1:0] out_data;
  wgt_wr_t wgt;
  thr_wr_t thr;

  conv_layer #(.W(W), .H(H), .CIN(CI), .COUT(CO), .K(3), .SIMD(S), .PE(PE), .LAYER(L)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .wgt, .thr);

  arr_t img [NFR];
  arr_t res [NFR];
  int in_idx = 0, out_idx = 0, checks = 0, failures = 0, nonzero = 0;
  logic gate = 0, rdy = 0, started = 0;

  assign in_valid  = started && gate && in_idx < NFR * NIN;
  assign in_data   = (in_idx < NFR * NIN) ? pack_word(img[in_idx / NIN], CI, W, H, S, 3, in_idx % NIN)[S*3-1:0] : '0;
  assign out_ready = rdy;

  always @(posedge clk) begin
    gate <= ($urandom % 4) != 0;
    rdy  <= ($urandom % 3) != 0;
    if (in_valid && in_ready) in_idx <= in_idx + 1;
    if (out_valid && out_ready) begin
      logic [PE*3-1:0] e;
      e = pack_word(res[out_idx / NOUT], CO, W, H, PE, 3, out_idx % NOUT)[PE*3-1:0];
      checks++;
      if (out_data != 0) nonzero++;
      if (out_data !== e) begin
        failures++;
        if (failures < 10) $display("word %0d: got %h exp %h", out_idx, out_data, e);
      end
      out_idx++;
    end
  end

  initial begin
    wgt = '0; thr = '0;
    for (int f = 0; f < NFR; f++) begin
      img[f] = new[CI * W * H];
      foreach (img[f][i]) img[f][i] = int'($urandom % 8);
      res[f] = conv_ref(L, img[f], CI, CO, 3, W, H, 3, 1'b0);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < num_wgt(MW, CO, S); n++) begin
      @(negedge clk); wgt = wgt_word_g(L, MW, CO, S, PE, n);
    end
    // writes for another layer must not land here
    for (int n = 0; n < 8; n++) begin
      @(negedge clk); wgt = wgt_word_g(L_CONV3A, MW, CO, S, PE, n); wgt.data = '1;
    end
    @(negedge clk); wgt = '0;
    for (int n = 0; n < CO * NUM_THR; n++) begin
      @(negedge clk); thr = thr_word_g(L, MW, 3, 1'b0, n);
    end
    @(negedge clk); thr = thr_word_g(L_CONV3A, MW, 3, 1'b0, 0); thr.data = 32'sh7fff;
    @(negedge clk); thr = '0; started = 1;
    wait (out_idx == NFR * NOUT);
    repeat (5) @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("extra output"); end
    checks++;
    if (nonzero < NOUT / 4) begin failures++; $display("too few nonzero outputs: %0d", nonzero); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog: out_idx=%0d", out_idx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
