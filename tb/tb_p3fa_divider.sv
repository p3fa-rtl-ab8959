// tb_p3fa_divider -- self-checking test of the per-port modulo unit.
//
// Two dividers share one behavioural memory bank: one at the default sizes
// (Q = 32, W = 1, 16-bit keys, 128 words) and one shifting W = 4 bits per
// cycle. The bank is filled with random long integers of random length and
// both dividers are started with random keys; their remainders are compared
// with a reference computed word by word with 64-bit integer arithmetic, and
// the cycle count from start to done is checked against len*(Q/W+1)+1. Also
// checked: the three divisions of the 4-port example of the scheme
// (3003, 30107 and 55913 mod 23 give 13, 0 and 0), a long integer built as a
// product that includes the key (remainder 0), and a disabled divider.
module tb_p3fa_divider;
  import p3fa_pkg::*;

  localparam int unsigned Q = 32, KEY_W = 16, WORDS = 128;
  localparam int unsigned AW = 7, LW = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [31:0] mem [WORDS];

  logic             start, enable;
  logic [KEY_W-1:0] key;
  logic [LW-1:0]    len;

  logic             rd1, rd4, busy1, busy4, done1, done4;
  logic [AW-1:0]    a1, a4;
  logic [31:0]      d1, d4;
  logic [KEY_W-1:0] rem1, rem4;

  p3fa_divider #(.Q(Q), .KEY_W(KEY_W), .W(1), .WORDS(WORDS)) dut1 (
    .clk, .rst_n, .start, .enable, .key, .len,
    .mem_rd(rd1), .mem_addr(a1), .mem_rdata(d1),
    .busy(busy1), .done(done1), .remainder(rem1));
  p3fa_divider #(.Q(Q), .KEY_W(KEY_W), .W(4), .WORDS(WORDS)) dut4 (
    .clk, .rst_n, .start, .enable, .key, .len,
    .mem_rd(rd4), .mem_addr(a4), .mem_rdata(d4),
    .busy(busy4), .done(done4), .remainder(rem4));

  // synchronous read ports, output held between reads
  always_ff @(posedge clk) begin
    if (rd1) d1 <= mem[a1];
    if (rd4) d4 <= mem[a4];
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic longint unsigned ref_mod(input int n, input longint unsigned k);
    longint unsigned r = 0;
    for (int i = n - 1; i >= 0; i--) r = ((r << 32) | longint'(mem[i])) % k;
    return r;
  endfunction

  // Start both dividers, wait for both, check remainders and cycle counts.
  task automatic run(input int n, input logic [15:0] k, input logic en);
    int c1, c4, cyc;
    longint unsigned exp_r;
    bit got1, got4;
    exp_r = ref_mod(n, longint'(k));
    @(negedge clk);
    start = 1'b1; enable = en; key = k; len = LW'(n);
    @(negedge clk);
    start = 1'b0;
    cyc = 1; got1 = 0; got4 = 0; c1 = 0; c4 = 0;
    while (!(got1 && got4) && cyc < 10000) begin
      if (done1 && !got1) begin got1 = 1; c1 = cyc; end
      if (done4 && !got4) begin got4 = 1; c4 = cyc; end
      @(negedge clk);
      cyc++;
    end
    if (en && n > 0) begin
      check(rem1 == 16'(exp_r), $sformatf("W=1 len %0d key %0d: %0d vs %0d", n, k, rem1, exp_r));
      check(rem4 == 16'(exp_r), $sformatf("W=4 len %0d key %0d: %0d vs %0d", n, k, rem4, exp_r));
      check(c1 == n * (32 + 1) + 1, $sformatf("W=1 latency %0d for len %0d", c1, n));
      check(c4 == n * (8 + 1) + 1, $sformatf("W=4 latency %0d for len %0d", c4, n));
    end else begin
      check(c1 == 1 && c4 == 1, "disabled divider finishes at once");
    end
  endtask

  initial begin
    start = 1'b0; enable = 1'b0; key = '0; len = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // the 4-port example: M_CP(2..4) = 3003, 30107, 55913; key 23
    mem[0] = 32'd3003;  run(1, 16'd23, 1'b1);
    check(rem1 == 16'd13, "3003 mod 23 = 13");
    mem[0] = 32'd30107; run(1, 16'd23, 1'b1);
    check(rem1 == 16'd0, "30107 mod 23 = 0");
    mem[0] = 32'd55913; run(1, 16'd23, 1'b1);
    check(rem1 == 16'd0, "55913 mod 23 = 0");
    // random long integers
    for (int t = 0; t < 40; t++) begin
      automatic int n = $urandom_range(WORDS, 1);
      for (int i = 0; i < n; i++) mem[i] = $urandom;
      run(n, 16'($urandom_range(65535, 2)), 1'b1);
    end
    // a product containing the key: remainder must be zero
    begin
      logic [WORDS*32-1:0] big;
      logic [15:0] k;
      k = 16'd65521;
      big = 1;
      for (int i = 0; i < 100; i++) big = big * 16'($urandom_range(65535, 2));
      big = big * k;
      for (int i = 0; i < WORDS; i++) mem[i] = big[32*i +: 32];
      run(WORDS, k, 1'b1);
      check(rem1 == 0 && rem4 == 0, "key divides the product");
    end
    run(5, 16'd7, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
