// tb_maxpool -- checks 2x2 stride-2 max pooling on three back-to-back
// 6x4 frames of 4 channels (2 per word) against the maximum of each window
// computed directly, with random input gaps and output stalls. It also
// counts clocks in which a pooled word was due while the output register was
// still full (the input must stall then), which must happen.
module tb_maxpool;
  localparam int W = 6, H = 4, C = 4, N = 2, B = 3, NFR = 3;
  localparam int CF = C / N;
  localparam int NIN = NFR * W * H * CF;
  localparam int NOUT = NFR * (W / 2) * (H / 2) * CF;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [N*B-1:0] in_data, out_data;

  maxpool #(.W(W), .H(H), .C(C), .N(N), .BITS(B)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data);

  int img [NFR][C][H][W];
  logic [N*B-1:0] inw [NIN];
  logic [N*B-1:0] exp_w [NOUT];
  int in_idx = 0, out_idx = 0, checks = 0, failures = 0, stalls = 0;
  logic gate = 0, rdy = 0, started = 0;

  assign in_valid  = started && gate && in_idx < NIN;
  assign in_data   = inw[in_idx < NIN ? in_idx : 0];
  assign out_ready = rdy;

  always @(posedge clk) begin
    gate <= ($urandom % 5) != 0;
    rdy  <= ($urandom % 2) != 0;
    if (in_valid && !in_ready) stalls++;
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
    int n, m;
    for (int f = 0; f < NFR; f++) for (int c = 0; c < C; c++)
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) img[f][c][y][x] = int'($urandom % 8);
    n = 0;
    for (int f = 0; f < NFR; f++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      for (int g = 0; g < CF; g++) begin
        for (int s = 0; s < N; s++) inw[n][s*B +: B] = B'(img[f][g*N+s][y][x]);
        n++;
      end
    n = 0;
    for (int f = 0; f < NFR; f++) for (int y = 0; y < H / 2; y++) for (int x = 0; x < W / 2; x++)
      for (int g = 0; g < CF; g++) begin
        for (int s = 0; s < N; s++) begin
          m = 0;
          for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++)
            if (img[f][g*N+s][2*y+dy][2*x+dx] > m) m = img[f][g*N+s][2*y+dy][2*x+dx];
          exp_w[n][s*B +: B] = B'(m);
        end
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
    if (stalls == 0) begin failures++; $display("input never stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: out_idx=%0d", out_idx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
