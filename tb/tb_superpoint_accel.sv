// tb_superpoint_accel -- end-to-end test of the whole accelerator on four
// 32 x 24 frames. All twelve layers are loaded through the host ports, then
// the frames stream in back to back. Every interest-point logit and every
// coarse descriptor value of every cell is compared with the reference
// network. Until frame 1 has left, the input has random gaps and the two
// result streams stall independently, in random clocks and in long bursts
// that back the whole pipeline up; then everything is kept ready and the
// interval between the ends of frames 2 and 3 is measured:
// it is compared with the clocks the slowest layer needs
// (W*H*18 at the default folding) plus the line-buffer drain at frame ends.
// The test counts how often each flow-control mechanism acted: input stalled,
// each result stream back-pressured, the fan-out serving one head while the
// other was stalled, a line-buffer ring full, a pooled word waiting for the
// output register, and a new frame entering before the previous one has
// left. Each must happen at least once.
module tb_superpoint_accel;
  import sp_pkg::*;
  import sp_ref_pkg::*;
  localparam int W = 32, H = 24, NFR = 4;
  localparam int CW = W / 8, CH = H / 8;
  localparam int NIN = W * H;
  localparam int NS = CW * CH * 13, ND = CW * CH * 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pix_valid, pix_ready, semi_valid, semi_ready, desc_valid, desc_ready;
  logic [7:0] pix_data;
  logic [5*3-1:0] semi_data;
  logic [8*3-1:0] desc_data;
  wgt_wr_t wgt;
  thr_wr_t thr;

  superpoint_accel #(.W(W), .H(H)) dut (
    .clk, .rst_n, .pix_valid, .pix_ready, .pix_data,
    .semi_valid, .semi_ready, .semi_data, .desc_valid, .desc_ready, .desc_data, .wgt, .thr);

  arr_t semi_ref [NFR];
  arr_t desc_ref [NFR];
  int zero;
  int in_idx = 0, s_idx = 0, d_idx = 0, checks = 0, failures = 0, cyc = 0;
  int ev_in_stall = 0, ev_semi_bp = 0, ev_desc_bp = 0, ev_fanout = 0, ev_ring = 0, ev_pool = 0, ev_overlap = 0;
  int t_end [NFR];
  logic gate = 0, rs = 0, rd = 0, started = 0, fast = 0;

  assign pix_valid  = started && (gate || fast) && in_idx < NFR * NIN;
  assign pix_data   = 8'(pix(in_idx / NIN, (in_idx % NIN) / W, in_idx % W));
  assign semi_ready = rs || fast;
  assign desc_ready = rd || fast;

  always @(posedge clk) begin
    cyc++;
    gate <= ($urandom % 8) != 0;
    // random stalls plus long stall bursts that back up the whole pipeline
    rs   <= (($urandom % 3) != 0) && !(cyc % 3000 < 900);
    rd   <= (($urandom % 4) != 0) && !(cyc % 4000 > 2600);
    if (pix_valid && !pix_ready) ev_in_stall++;
    if (semi_valid && !semi_ready) ev_semi_bp++;
    if (desc_valid && !desc_ready) ev_desc_bp++;
    if ((dut.d0_v && dut.d0_r && dut.d1_v && !dut.d1_r) || (dut.d1_v && dut.d1_r && dut.d0_v && !dut.d0_r)) ev_fanout++;
    if (dut.u_enc.u_conv1b.g_swu.u_swu.in_valid && !dut.u_enc.u_conv1b.g_swu.u_swu.in_ready) ev_ring++;
    if (dut.u_enc.u_conv3a.g_swu.u_swu.in_valid && !dut.u_enc.u_conv3a.g_swu.u_swu.in_ready) ev_ring++;
    if (dut.u_det.u_convpa.g_swu.u_swu.in_valid && !dut.u_det.u_convpa.g_swu.u_swu.in_ready) ev_ring++;
    if (dut.u_enc.u_pool1.in_valid && !dut.u_enc.u_pool1.in_ready) ev_pool++;
    if (dut.u_enc.u_pool2.in_valid && !dut.u_enc.u_pool2.in_ready) ev_pool++;
    if (dut.u_enc.u_pool3.in_valid && !dut.u_enc.u_pool3.in_ready) ev_pool++;
    if (pix_valid && pix_ready && in_idx >= NIN && d_idx < (in_idx / NIN) * ND) ev_overlap++;
    if (pix_valid && pix_ready) in_idx <= in_idx + 1;
    if (semi_valid && semi_ready) begin
      logic [5*3-1:0] e;
      e = pack_word(semi_ref[s_idx / NS], 65, CW, CH, 5, 3, s_idx % NS)[5*3-1:0];
      checks++;
      if (semi_data !== e) begin
        failures++;
        if (failures < 10) $display("semi word %0d: got %h exp %h", s_idx, semi_data, e);
      end
      s_idx++;
    end
    if (desc_valid && desc_ready) begin
      logic [8*3-1:0] e;
      e = pack_word(desc_ref[d_idx / ND], 256, CW, CH, 8, 3, d_idx % ND)[8*3-1:0];
      checks++;
      if (desc_data !== e) begin
        failures++;
        if (failures < 10) $display("desc word %0d: got %h exp %h", d_idx, desc_data, e);
      end
      if (d_idx % ND == ND - 1) t_end[d_idx / ND] = cyc;
      d_idx++;
    end
  end

  task automatic expect_event(string name, int n);
    checks++;
    $display("%-28s %0d", name, n);
    if (n == 0) begin failures++; $display("  never happened: %s", name); end
  endtask

  initial begin
    arr_t enc;
    int ideal;
    wgt = '0; thr = '0;
    zero = $test$plusargs("tb_never_set") ? 1 : 0;
    for (int f = 0; f < NFR; f++) begin
      enc = encoder_ref(f + zero, W, H);
      semi_ref[f] = layer_ref(9, layer_ref(8, enc, CW, CH), CW, CH);
      desc_ref[f] = layer_ref(11, layer_ref(10, enc, CW, CH), CW, CH);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 12; l++) begin
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
    wait (s_idx >= 2 * NS && d_idx >= 2 * ND);
    @(negedge clk); fast = 1;
    wait (s_idx == NFR * NS && d_idx == NFR * ND);
    repeat (5) @(posedge clk);
    checks++;
    if (semi_valid || desc_valid) begin failures++; $display("extra output"); end
    // steady-state frame interval: slowest layer W*H*18 clocks plus the
    // end-of-frame drain of the line buffers (at most one output row per
    // windowed layer); reported, and bounded at 1.5x the slowest layer here.
    ideal = W * H * 18;
    $display("frame interval %0d clocks, slowest layer %0d", t_end[3] - t_end[2], ideal);
    checks++;
    if (t_end[3] - t_end[2] > ideal * 3 / 2) begin failures++; $display("frame interval too long"); end
    expect_event("input stalls", ev_in_stall);
    expect_event("interest-point back-pressure", ev_semi_bp);
    expect_event("descriptor back-pressure", ev_desc_bp);
    expect_event("fan-out skew", ev_fanout);
    expect_event("line-buffer ring full", ev_ring);
    expect_event("pool output full", ev_pool);
    expect_event("frame overlap", ev_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog: in=%0d semi=%0d desc=%0d", in_idx, s_idx, d_idx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
