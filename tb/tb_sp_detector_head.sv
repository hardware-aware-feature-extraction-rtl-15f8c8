// tb_sp_detector_head -- feeds two random 128-channel 3-bit feature maps of
// 4 x 3 cells (a 32 x 24 image) through the interest-point head and compares
// each of the 65 signed 3-bit logits per cell with a direct 3x3 convolution,
// ReLU thresholds, 1x1 convolution and signed thresholds. Input gaps and
// output stalls are random.
module tb_sp_detector_head;
  import sp_pkg::*;
  import sp_ref_pkg::*;
  localparam int W = 32, H = 24, NFR = 2;
  localparam int CW = W / 8, CH = H / 8;
  localparam int LA = 8, LB = 9, CO = 65, NO = 5;
  localparam int NIN = CW * CH * 16, NOUT = CW * CH * (CO / NO);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [8*3-1:0] in_data;
  logic [NO*3-1:0] out_data;
  wgt_wr_t wgt;
  thr_wr_t thr;

  sp_detector_head #(.W(W), .H(H)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .wgt, .thr);

  arr_t fm [NFR];
  arr_t res [NFR];
  int in_idx = 0, out_idx = 0, checks = 0, failures = 0;
  int hist [8];
  logic gate = 0, rdy = 0, started = 0;

  assign in_valid  = started && gate && in_idx < NFR * NIN;
  assign in_data   = (in_idx < NFR * NIN) ? pack_word(fm[in_idx / NIN], 128, CW, CH, 8, 3, in_idx % NIN)[8*3-1:0] : '0;
  assign out_ready = rdy;

  always @(posedge clk) begin
    gate <= ($urandom % 4) != 0;
    rdy  <= ($urandom % 3) != 0;
    if (in_valid && in_ready) in_idx <= in_idx + 1;
    if (out_valid && out_ready) begin
      logic [NO*3-1:0] e;
      e = pack_word(res[out_idx / NOUT], CO, CW, CH, NO, 3, out_idx % NOUT)[NO*3-1:0];
      for (int ln = 0; ln < NO; ln++) begin
        checks++;
        hist[out_data[ln*3 +: 3]]++;
        if (out_data[ln*3 +: 3] !== e[ln*3 +: 3]) failures++;
      end
      if (out_data !== e && failures < 10) $display("word %0d: got %h exp %h", out_idx, out_data, e);
      out_idx++;
    end
  end

  initial begin
    int used;
    wgt = '0; thr = '0;
    for (int f = 0; f < NFR; f++) begin
      fm[f] = new[128 * CW * CH];
      foreach (fm[f][i]) fm[f][i] = int'($urandom % 8);
      res[f] = layer_ref(LB, layer_ref(LA, fm[f], CW, CH), CW, CH);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = LA; l <= LB; l++) begin
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
    // the signed codes must spread over several values
    used = 0;
    foreach (hist[i]) if (hist[i] > 0) used++;
    checks++;
    if (used < 4) begin failures++; $display("only %0d distinct codes", used); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog: out_idx=%0d", out_idx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
