// tb_mvau -- checks the folded matrix-vector unit (12 inputs, 6 outputs,
// SIMD 4, PE 3, so 3 x 2 fold steps per vector). Weights come from the
// reference package and are loaded through the write port; each output
// accumulator is compared with a dot product computed directly. The first
// 40 vectors run with random input gaps and output stalls; the last 40 run
// with both sides always ready, and the clocks they take must equal
// 40 x SF x NF, one fold step per clock.
module tb_mvau;
  import sp_pkg::*;
  import sp_ref_pkg::*;
  localparam int MW = 12, MH = 6, S = 4, PE = 3, IB = 3, L = 5;
  localparam int SF = MW / S, NF = MH / PE, NV = 80;
  localparam int ACC = acc_bits(MW, IB, W_BITS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [S*IB-1:0] in_data;
  logic [PE*ACC-1:0] out_data;
  wgt_wr_t wgt;

  mvau #(.MW(MW), .MH(MH), .SIMD(S), .PE(PE), .IN_BITS(IB)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data,
    .wgt_we(wgt.we), .wgt_row(wgt.row), .wgt_pe(wgt.pe), .wgt_data(wgt.data));

  int xv [NV][MW];
  int in_idx = 0, out_idx = 0, cyc = 0;
  int checks = 0, failures = 0;
  int t_first = -1, t_last = -1;
  logic gate = 0, rdy = 0, started = 0, fast = 0;

  assign in_valid = started && (gate || fast) && in_idx < NV * SF;
  always_comb begin
    int v, w;
    v = (in_idx < NV * SF) ? in_idx / SF : 0;
    w = in_idx % SF;
    for (int s = 0; s < S; s++) in_data[s*IB +: IB] = IB'(xv[v][w * S + s]);
  end
  assign out_ready = rdy || fast;

  always @(posedge clk) begin
    cyc++;
    gate <= ($urandom % 3) != 0;
    rdy  <= ($urandom % 3) != 0;
    if (in_valid && in_ready) in_idx <= in_idx + 1;
    if (out_valid && out_ready) begin
      int v, nf, e;
      v  = out_idx / NF;
      nf = out_idx % NF;
      for (int p = 0; p < PE; p++) begin
        e = 0;
        for (int k = 0; k < MW; k++) e += wval(L, nf * PE + p, k) * xv[v][k];
        checks++;
        if ($signed(out_data[p*ACC +: ACC]) != e) begin
          failures++;
          if (failures < 10) $display("vec %0d ch %0d: got %0d exp %0d", v, nf*PE+p, $signed(out_data[p*ACC +: ACC]), e);
        end
      end
      if (v == NV / 2 && nf == 0) t_first = cyc;
      if (v == NV - 1 && nf == NF - 1) t_last = cyc;
      out_idx++;
    end
  end

  initial begin
    wgt = '0;
    for (int v = 0; v < NV; v++) for (int k = 0; k < MW; k++) xv[v][k] = int'($urandom % 8);
    xv[0] = '{default: 7};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < num_wgt(MW, MH, S); n++) begin
      @(negedge clk); wgt = wgt_word_g(L, MW, MH, S, PE, n);
    end
    @(negedge clk); wgt = '0; started = 1;
    wait (out_idx == (NV / 2) * NF);
    @(negedge clk); fast = 1;
    wait (out_idx == NV * NF);
    // vectors NV/2+1 .. NV-1 complete one per SF*NF clocks
    checks++;
    if (t_last - t_first != (NV / 2 - 1) * SF * NF + (NF - 1) * SF) begin
      failures++;
      $display("rate: %0d clocks, expected %0d", t_last - t_first, (NV / 2 - 1) * SF * NF + (NF - 1) * SF);
    end
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
