// tb_sliding_window -- checks the 3x3 window generator on two back-to-back
// 5x4 frames of 4 channels (2 per word): every output word must equal the
// zero-padded window element (ky, kx, channel group) of its output pixel,
// computed directly from the input image. Input gaps and output stalls are
// random; the test also counts clocks in which the writer had to wait for
// the reader (line-buffer ring full), which must happen.
module tb_sliding_window;
  localparam int W = 5, H = 4, C = 4, S = 2, K = 3, B = 3, NFR = 2;
  localparam int CF = C / S;
  localparam int NIN = NFR * W * H * CF;
  localparam int NOUT = NFR * W * H * K * K * CF;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [S*B-1:0] in_data, out_data;

  sliding_window #(.W(W), .H(H), .C(C), .SIMD(S), .K(K), .BITS(B)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data);

  int img [NFR][C][H][W];
  logic [S*B-1:0] inw [NIN];
  logic [S*B-1:0] exp_w [NOUT];
  int in_idx = 0, out_idx = 0;
  int checks = 0, failures = 0, full_waits = 0;
  logic gate = 0, rdy = 0, started = 0;

  assign in_valid = started && gate && in_idx < NIN;
  assign in_data  = inw[in_idx < NIN ? in_idx : 0];
  assign out_ready = rdy;

  always @(posedge clk) begin
    gate <= ($urandom % 5) != 0;
    rdy  <= ($urandom % 4) != 0;
    if (in_valid && !in_ready) full_waits++;
    if (in_valid && in_ready) in_idx <= in_idx + 1;
    if (out_valid && out_ready) begin
      checks++;
      if (out_data !== exp_w[out_idx]) begin
        failures++;
        if (failures < 10) $display("word %0d: got %h exp %h", out_idx, out_data, exp_w[out_idx]);
      end
      out_idx++;
    end
  end

  initial begin
    int n, iy, ix;
    for (int f = 0; f < NFR; f++)
      for (int c = 0; c < C; c++)
        for (int y = 0; y < H; y++)
          for (int x = 0; x < W; x++) img[f][c][y][x] = 1 + int'($urandom % 7);
    n = 0;
    for (int f = 0; f < NFR; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          for (int g = 0; g < CF; g++) begin
            for (int s = 0; s < S; s++) inw[n][s*B +: B] = B'(img[f][g*S+s][y][x]);
            n++;
          end
    n = 0;
    for (int f = 0; f < NFR; f++)
      for (int oy = 0; oy < H; oy++)
        for (int ox = 0; ox < W; ox++)
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++)
              for (int g = 0; g < CF; g++) begin
                iy = oy + ky - 1; ix = ox + kx - 1;
                for (int s = 0; s < S; s++)
                  exp_w[n][s*B +: B] = (iy < 0 || iy >= H || ix < 0 || ix >= W) ? '0 : B'(img[f][g*S+s][iy][ix]);
                n++;
              end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); started = 1;
    wait (out_idx == NOUT);
    repeat (5) @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("extra output"); end
    checks++;
    if (full_waits == 0) begin failures++; $display("writer never waited"); end
    $display("writer waits: %0d", full_waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: out_idx=%0d in_idx=%0d", out_idx, in_idx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
