// tb_p3fa_workload -- forwarding latency against egress diversity at the
// default size (16 ports, 256 flows, 16-bit keys, 32-bit dividers).
//
// For each egress diversity phi in {1, 4, 8, 16} (one port, a quarter, half
// and all of the ports; 4 stands in for the threshold Phi, whose value at 16
// ports is not given as a number) the engine is reset and filled with 256
// flows that each leave through exactly phi distinct random ports, with
// distinct random 16-bit prime keys. Then packets of random flows enter on
// random ports. Every OPB is checked against set membership minus the ingress
// port, every latency against 4 + L*(Q/W+1) cycles (L the longest enabled
// sub-scalar in words, from a reference of 32-bit words with 64-bit
// arithmetic), and the diversity statistics against n = 256 and
// sum = 256*phi. The testbench prints, per phi, the average latency in cycles
// and the scalar words in use, and checks that both grow with phi: the more
// ports a flow uses, the more keys each sub-scalar holds and the longer the
// divisions run.
module tb_p3fa_workload;
  import p3fa_pkg::*;

  localparam int unsigned P = PORTS_DEF, N = N_FLOWS_DEF, KEY_W = KEY_W_DEF;
  localparam int unsigned Q = Q_DEF, W = W_DEF, WORDS = mcp_words(N, KEY_W, Q);
  localparam int unsigned PACKETS = 48;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic             in_valid, in_ready, out_valid, out_ready, out_drop, out_miss;
  logic [HDR_W-1:0] in_hdr;
  logic [3:0]       in_ingress, out_ingress;
  logic [P-1:0]     out_opb, cmd_opb, rsp_opb;
  logic [4:0]       out_n_egress;
  logic [31:0]      out_flow_id, cmd_flow_id;
  logic             cmd_valid, cmd_ready, rsp_valid, init_done;
  re_op_e           cmd_op;
  logic [KEY_W-1:0] cmd_key;
  re_status_e       rsp_status;
  logic [4:0]       phi_threshold;
  logic [8:0]       stat_n_flows;
  logic [12:0]      stat_egress_sum;
  logic             stat_high_diversity;
  logic [11:0]      stat_scalar_words;

  p3fa_top dut (.*);

  logic [31:0]  f_id  [N];
  logic [15:0]  f_key [N];
  logic [P-1:0] f_opb [N];
  int unsigned  mcp [P][WORDS + 1];

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic bit is_prime(input int v);
    if (v < 2) return 0;
    for (int d = 2; d * d <= v; d++) if (v % d == 0) return 0;
    return 1;
  endfunction

  function automatic bit key_used(input logic [15:0] k, input int upto);
    for (int i = 0; i < upto; i++) if (f_key[i] == k) return 1;
    return 0;
  endfunction

  function automatic int words_of(input int s);
    int n = 1;
    for (int w = 0; w <= WORDS; w++) if (mcp[s][w] != 0) n = w + 1;
    return n;
  endfunction

  function automatic void ref_mul(input int s, input int unsigned k);
    longint unsigned c = 0;
    for (int w = 0; w <= WORDS; w++) begin
      longint unsigned t = longint'(mcp[s][w]) * k + c;
      mcp[s][w] = t[31:0];
      c = t >> 32;
    end
  endfunction

  function automatic logic [P-1:0] opb_of_size(input int phi);
    logic [P-1:0] o = '0;
    while ($countones(o) < phi) o[$urandom_range(P - 1)] = 1'b1;
    return o;
  endfunction

  task automatic insert(input int i);
    @(negedge clk);
    cmd_valid = 1; cmd_op = RE_INSERT; cmd_flow_id = f_id[i]; cmd_key = f_key[i]; cmd_opb = f_opb[i];
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
    while (!rsp_valid) @(negedge clk);
    check(rsp_status == RE_OK, $sformatf("insert %0d: %s", i, rsp_status.name()));
    for (int s = 0; s < P; s++) if (f_opb[i][s]) ref_mul(s, f_key[i]);
  endtask

  task automatic packet(input int i, input logic [3:0] ing, output int lat);
    logic [P-1:0] exp_opb = f_opb[i] & ~(P'(1) << ing);
    int L = 0;
    for (int s = 0; s < P; s++) if (s != ing && words_of(s) > L) L = words_of(s);
    @(negedge clk);
    in_valid = 1; in_hdr = '0; in_hdr[31:0] = f_id[i]; in_ingress = ing;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!out_valid) begin
      @(negedge clk);
      lat++;
    end
    check(!out_miss && out_opb == exp_opb && out_drop == (exp_opb == '0),
          $sformatf("flow %0d from %0d: OPB %b, expected %b", i, ing, out_opb, exp_opb));
    check(lat == 4 + L * (Q / W + 1), $sformatf("latency %0d, expected %0d", lat, 4 + L * (Q / W + 1)));
    @(negedge clk);
  endtask

  int phis [4] = '{1, 4, 8, 16};
  real avg_lat [4];
  int  words [4];

  initial begin
    in_valid = 0; in_hdr = '0; in_ingress = '0; out_ready = 1; phi_threshold = 5'd4;
    cmd_valid = 0; cmd_op = RE_INSERT; cmd_flow_id = '0; cmd_key = '0; cmd_opb = '0;
    for (int ph = 0; ph < 4; ph++) begin
      automatic int phi = phis[ph];
      automatic longint total = 0;
      @(negedge clk);
      rst_n = 0;
      repeat (3) @(negedge clk);
      rst_n = 1;
      while (!init_done) @(negedge clk);
      for (int s = 0; s < P; s++) for (int w = 0; w <= WORDS; w++) mcp[s][w] = (w == 0);
      for (int i = 0; i < N; i++) begin
        automatic int v;
        do v = $urandom_range(65535, 2); while (!is_prime(v) || key_used(16'(v), i));
        f_id[i] = 32'h0A00_0000 + 32'(i * 4099 + ph);
        f_key[i] = 16'(v);
        f_opb[i] = opb_of_size(phi);
        insert(i);
      end
      @(negedge clk);
      check(int'(stat_n_flows) == N && int'(stat_egress_sum) == N * phi,
            $sformatf("phi %0d: statistics %0d flows, %0d egresses", phi, stat_n_flows, stat_egress_sum));
      check(stat_high_diversity == (phi > 4), $sformatf("phi %0d against Phi 4: flag %b", phi, stat_high_diversity));
      begin
        automatic int sw = 0;
        for (int s = 0; s < P; s++) sw += words_of(s);
        check(int'(stat_scalar_words) == sw, $sformatf("scalar words %0d, expected %0d", stat_scalar_words, sw));
      end
      for (int t = 0; t < PACKETS; t++) begin
        automatic int lat;
        packet($urandom_range(N - 1), 4'($urandom), lat);
        total += lat;
      end
      avg_lat[ph] = real'(total) / PACKETS;
      words[ph] = int'(stat_scalar_words);
      $display("phi=%0d: average latency %0.1f cycles, scalar memory %0d words of %0d bits",
               phi, avg_lat[ph], words[ph], Q);
      if (ph > 0) begin
        check(avg_lat[ph] > avg_lat[ph - 1], $sformatf("latency grows from phi %0d to %0d", phis[ph - 1], phi));
        check(words[ph] > words[ph - 1], $sformatf("memory grows from phi %0d to %0d", phis[ph - 1], phi));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
