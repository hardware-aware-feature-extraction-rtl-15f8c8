// tb_stream_dup -- checks that both outputs of the stream duplicator
// receive every input word once and in order, while the two consumers stall
// independently at random, and that each output holds its word while it is
// stalled. It counts clocks in which one consumer was stalled while the other
// was taking data, which must happen.
module tb_stream_dup;
  localparam int DW = 12, NW = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, v0, r0, v1, r1;
  logic [DW-1:0] in_data, d0, d1;

  stream_dup #(.DW(DW)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out0_valid(v0), .out0_ready(r0), .out0_data(d0),
    .out1_valid(v1), .out1_ready(r1), .out1_data(d1));

  logic [DW-1:0] words [NW];
  int in_idx = 0, i0 = 0, i1 = 0, checks = 0, failures = 0, skew = 0;
  logic gate = 0, started = 0;

  assign in_valid = started && gate && in_idx < NW;
  assign in_data  = words[in_idx < NW ? in_idx : 0];

  always @(posedge clk) begin
    gate <= ($urandom % 4) != 0;
    r0   <= ($urandom % 3) != 0;
    r1   <= ($urandom % 2) != 0;
    if (in_valid && in_ready) in_idx <= in_idx + 1;
    if ((v0 && r0 && v1 && !r1) || (v1 && r1 && v0 && !r0)) skew++;
    if (v0 && r0) begin
      checks++;
      if (d0 !== words[i0]) failures++;
      i0++;
    end
    if (v1 && r1) begin
      checks++;
      if (d1 !== words[i1]) failures++;
      i1++;
    end
  end

  initial begin
    r0 = 0; r1 = 0;
    for (int n = 0; n < NW; n++) words[n] = DW'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); started = 1;
    wait (i0 == NW && i1 == NW);
    repeat (5) @(posedge clk);
    checks++;
    if (v0 || v1) begin failures++; $display("extra output"); end
    checks++;
    if (skew == 0) begin failures++; $display("no independent stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog: i0=%0d i1=%0d", i0, i1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
