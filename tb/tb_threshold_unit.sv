// tb_threshold_unit -- checks the multi-threshold unit against the rule
// "code = smallest i with t_i > x, else 7" (plus the output bias), for a
// ReLU-style instance (bias 0) and a signed instance (bias -4) fed the same
// stream. Thresholds are random, some tables deliberately unsorted, and a few
// host values lie outside the table width to exercise saturation. The input
// is stalled and the output back-pressured at random; every output word and
// the one-clock latency are checked.
module tb_threshold_unit;
  import sp_pkg::*;
  localparam int C = 8, PE = 4, IB = 10, NW = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, in_ready1, out_valid, out_valid1, out_ready;
  logic [PE*IB-1:0] in_data;
  logic [PE*3-1:0]  out_data, out_data1;
  logic thr_we; logic [CH_BITS-1:0] thr_ch; logic [TIDX_BITS-1:0] thr_idx; logic signed [THR_BITS-1:0] thr_data;

  threshold_unit #(.C(C), .PE(PE), .IN_BITS(IB), .OUT_BITS(3), .OUT_BIAS(0)) dut0 (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data,
    .thr_we, .thr_ch, .thr_idx, .thr_data);
  threshold_unit #(.C(C), .PE(PE), .IN_BITS(IB), .OUT_BITS(3), .OUT_BIAS(-4)) dut1 (
    .clk, .rst_n, .in_valid, .in_ready(in_ready1), .in_data, .out_valid(out_valid1), .out_ready,
    .out_data(out_data1), .thr_we, .thr_ch, .thr_idx, .thr_data);

  int thr [C][7];
  int xin [NW][PE];
  int checks = 0, failures = 0;
  int in_idx = 0, out_idx = 0;
  logic gate, rdy, loaded = 0;
  int cyc = 0, first_in_cyc = -1, first_out_cyc = -1;

  function automatic int sat(int v);
    if (v > 1023) return 1023;
    if (v < -1024) return -1024;
    return v;
  endfunction

  function automatic int ref_code(int ch, int x);
    int idx = 7;
    for (int i = 6; i >= 0; i--) if (sat(thr[ch][i]) > x) idx = i;
    return idx;
  endfunction

  assign in_valid = loaded && in_idx < NW && gate;
  always_comb for (int p = 0; p < PE; p++) in_data[p*IB +: IB] = IB'(xin[in_idx < NW ? in_idx : 0][p]);
  assign out_ready = rdy;

  always @(posedge clk) begin
    cyc++;
    gate <= ($urandom % 4) != 0;
    rdy  <= ($urandom % 3) != 0;
    if (in_valid && in_ready) begin
      if (first_in_cyc < 0) first_in_cyc = cyc;
      in_idx <= in_idx + 1;
    end
    if (out_valid && out_ready) begin
      if (first_out_cyc < 0) first_out_cyc = cyc;
      for (int p = 0; p < PE; p++) begin
        int ch, e0, e1;
        ch = (out_idx % (C / PE)) * PE + p;
        e0 = ref_code(ch, xin[out_idx][p]);
        e1 = e0 - 4;
        checks += 2;
        if (out_data[p*3 +: 3] !== 3'(e0)) begin
          failures++;
          $display("mismatch word %0d lane %0d: got %0d exp %0d", out_idx, p, out_data[p*3 +: 3], e0);
        end
        if ($signed(out_data1[p*3 +: 3]) !== 3'(e1) || !out_valid1) failures++;
      end
      out_idx++;
    end
    if (in_ready !== in_ready1) begin checks++; failures++; end
  end

  initial begin
    thr_we = 0; thr_ch = 0; thr_idx = 0; thr_data = 0;
    gate = 0; rdy = 0;
    for (int ch = 0; ch < C; ch++)
      for (int i = 0; i < 7; i++) begin
        if (ch == 3) thr[ch][i] = int'($urandom % 400) - 200;               // unsorted
        else if (ch == 5) thr[ch][i] = (i < 3) ? -5000 : 5000 + i;          // saturating
        else thr[ch][i] = -150 + i * 50 + int'($urandom % 20);
      end
    for (int n = 0; n < NW; n++)
      for (int p = 0; p < PE; p++) xin[n][p] = int'($urandom % 600) - 300;
    xin[0][1] = 511; xin[1][1] = -512;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ch = 0; ch < C; ch++)
      for (int i = 0; i < 7; i++) begin
        @(negedge clk);
        thr_we = 1; thr_ch = CH_BITS'(ch); thr_idx = TIDX_BITS'(i); thr_data = thr[ch][i];
      end
    @(negedge clk); thr_we = 0; loaded = 1;
    wait (out_idx == NW);
    // one clock of latency: the first word is offered the clock after it is taken
    checks++;
    if (first_out_cyc < first_in_cyc + 1) begin failures++; $display("latency wrong"); end
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
