// tb_p3fa_diversity_monitor -- self-checking test of the egress-diversity
// monitor (8 ports, 32 flows, 16-word banks).
//
// The testbench keeps a reference set of installed OPBs. It applies random
// insert events (random OPBs, from unicast to broadcast) and removes of
// installed flows, and after each event compares the flow count and the sum of
// OPB 1-bits, then sweeps the threshold Phi over 0..8 and compares the flag
// with sum > Phi * n. The bank length inputs are randomised and their sum is
// compared with the word count. The empty table must never be flagged.
// Mechanisms counted: insert, remove, flag high, flag low, empty table.
module tb_p3fa_diversity_monitor;
  localparam int unsigned P = 8, N = 32, WORDS = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic         ev_valid, ev_insert, high_diversity;
  logic [P-1:0] ev_opb;
  logic [3:0]   phi_threshold;
  logic [4:0]   len [P];
  logic [5:0]   n_flows;
  logic [8:0]   egress_sum;
  logic [7:0]   scalar_words;

  p3fa_diversity_monitor #(.PORTS(P), .N_FLOWS(N), .WORDS(WORDS)) dut (.*);

  logic [P-1:0] opbs [$];
  int checks = 0, failures = 0;
  int n_ins = 0, n_rem = 0, n_high = 0, n_low = 0, n_empty = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic event_(input bit ins, input logic [P-1:0] opb);
    @(negedge clk);
    ev_valid = 1; ev_insert = ins; ev_opb = opb;
    @(negedge clk);
    ev_valid = 0; ev_opb = $urandom;   // ignored while not valid
  endtask

  task automatic compare();
    int sum = 0, words = 0;
    foreach (opbs[i]) sum += $countones(opbs[i]);
    for (int s = 0; s < P; s++) begin
      len[s] = 5'($urandom_range(WORDS));
      words += int'(len[s]);
    end
    @(negedge clk);
    check(int'(n_flows) == opbs.size(), $sformatf("n %0d, expected %0d", n_flows, opbs.size()));
    check(int'(egress_sum) == sum, $sformatf("sum %0d, expected %0d", egress_sum, sum));
    check(int'(scalar_words) == words, $sformatf("words %0d, expected %0d", scalar_words, words));
    for (int phi = 0; phi <= P; phi++) begin
      automatic bit exp = opbs.size() > 0 && sum > phi * opbs.size();
      phi_threshold = 4'(phi);
      @(negedge clk);
      check(high_diversity == exp, $sformatf("flag %b: sum %0d n %0d Phi %0d", high_diversity,
                                             sum, opbs.size(), phi));
      if (exp) n_high++;
      else n_low++;
    end
    if (opbs.size() == 0) n_empty++;
  endtask

  initial begin
    ev_valid = 0; ev_insert = 0; ev_opb = '0; phi_threshold = '0;
    for (int s = 0; s < P; s++) len[s] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    compare();
    for (int t = 0; t < 400; t++) begin
      if (opbs.size() < N && (opbs.size() == 0 || $urandom_range(99) < 55)) begin
        automatic int r = $urandom_range(99);
        automatic logic [P-1:0] o = (r < 5) ? '1 : P'($urandom);
        if (o == '0) o[$urandom_range(P - 1)] = 1'b1;
        event_(1, o);
        opbs.push_back(o);
        n_ins++;
      end else begin
        automatic int i = $urandom_range(opbs.size() - 1);
        event_(0, opbs[i]);
        opbs.delete(i);
        n_rem++;
      end
      compare();
    end
    // drain to empty
    while (opbs.size() > 0) begin
      event_(0, opbs[0]);
      opbs.delete(0);
      n_rem++;
      compare();
    end
    check(n_ins > 0, "insert exercised");
    check(n_rem > 0, "remove exercised");
    check(n_high > 0, "high diversity exercised");
    check(n_low > 0, "low diversity exercised");
    check(n_empty > 1, "empty table exercised");
    $display("mechanisms: insert=%0d remove=%0d high=%0d low=%0d empty=%0d",
             n_ins, n_rem, n_high, n_low, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
