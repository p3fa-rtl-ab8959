// tb_p3fa_top -- end-to-end test of the P3FA engine at its default sizes
// (16 ports, 256 flows, 16-bit keys, 32-bit dividers, 128-word banks).
//
// The testbench plays the routing engine and the switch fabric. It installs
// flows with distinct random 16-bit primes and mostly low egress diversity
// (unicast, 2-3 ports, a few broadcasts), fills the flow table, removes flows
// and sends packets from random ingress ports. Its reference is plain set
// membership: a packet of flow x from port i must leave through
// OPB(x) minus port i, be dropped when that is empty, and be reported as a
// miss when the flow is unknown. The reference also keeps each sub-scalar as a
// long integer (32-bit words, 64-bit arithmetic), only to know its length in words, so that the latency of each
// undisturbed packet can be checked: 4 + L*(Q/W+1) cycles from acceptance to
// the result, L the longest enabled sub-scalar.
//
// Mechanisms counted (each must happen at least once): insert, remove,
// unicast forward, multicast forward, broadcast forward, ingress divider
// disabled on a port of the OPB, drop of an empty OPB, miss of an unknown
// flow, table-full rejection, packet held off by a routing-engine command,
// result held by switch-fabric back-pressure, egress diversity phi above and
// below the threshold Phi. After every command the diversity statistics (flow
// count, sum of OPB 1-bits, scalar words in use, phi > Phi) are compared with
// the reference.
module tb_p3fa_top;
  import p3fa_pkg::*;

  localparam int unsigned P = PORTS_DEF, N = N_FLOWS_DEF, KEY_W = KEY_W_DEF;
  localparam int unsigned Q = Q_DEF, W = W_DEF, WORDS = mcp_words(N, KEY_W, Q);

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

  typedef struct { bit used; logic [31:0] id; logic [15:0] key; logic [P-1:0] opb; } flow_t;
  flow_t flows [N];
  // reference sub-scalars, little-endian 32-bit words, with 64-bit arithmetic
  int unsigned mcp [P][WORDS + 1];

  int checks = 0, failures = 0;
  int n_insert = 0, n_remove = 0, n_uni = 0, n_multi = 0, n_bcast = 0, n_ingress_off = 0;
  int n_drop = 0, n_miss = 0, n_full = 0, n_stall = 0, n_backpressure = 0, n_latency = 0;
  int n_phi_high = 0, n_phi_low = 0;

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

  function automatic bit key_used(input logic [15:0] k);
    for (int i = 0; i < N; i++) if (flows[i].used && flows[i].key == k) return 1;
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

  function automatic void ref_div(input int s, input int unsigned k);
    longint unsigned r = 0;
    for (int w = WORDS; w >= 0; w--) begin
      longint unsigned t = (r << 32) | longint'(mcp[s][w]);
      mcp[s][w] = 32'(t / k);
      r = t % k;
    end
  endfunction

  // Egress-diversity statistics after a command: flows, sum of OPB 1-bits,
  // scalar words in use, and the phi > Phi flag for a random Phi of 1..3.
  task automatic check_stats();
    int n = 0, sum = 0, words = 0, phi;
    @(negedge clk);
    for (int i = 0; i < N; i++) if (flows[i].used) begin
      n++;
      sum += $countones(flows[i].opb);
    end
    for (int s = 0; s < P; s++) words += words_of(s);
    check(int'(stat_n_flows) == n, $sformatf("flow count %0d, expected %0d", stat_n_flows, n));
    check(int'(stat_egress_sum) == sum, $sformatf("egress sum %0d, expected %0d", stat_egress_sum, sum));
    check(int'(stat_scalar_words) == words, $sformatf("scalar words %0d, expected %0d", stat_scalar_words, words));
    phi = $urandom_range(3, 1);
    phi_threshold = 5'(phi);
    @(negedge clk);
    check(stat_high_diversity == (n > 0 && sum > phi * n),
          $sformatf("phi flag %b: sum %0d, n %0d, Phi %0d", stat_high_diversity, sum, n, phi));
    if (stat_high_diversity) n_phi_high++;
    else n_phi_low++;
  endtask

  function automatic logic [HDR_W-1:0] make_hdr(input logic [31:0] dst);
    logic [HDR_W-1:0] h;
    for (int i = 0; i < HDR_W / 32; i++) h[32*i +: 32] = $urandom;
    h[HDR_W-1 -: 8] = 8'h45;
    h[31:0] = dst;     // bytes 16..19: destination address
    return h;
  endfunction

  task automatic command(input re_op_e op, input logic [31:0] id, input logic [15:0] k,
                         input logic [P-1:0] opb, output re_status_e st, output logic [P-1:0] ro);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_flow_id = id; cmd_key = k; cmd_opb = opb;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
    while (!rsp_valid) @(negedge clk);
    st = rsp_status; ro = rsp_opb;
  endtask

  task automatic insert_flow(input int slot, input logic [31:0] id, input logic [P-1:0] opb);
    int v;
    re_status_e st; logic [P-1:0] ro;
    do v = $urandom_range(65535, 2); while (!is_prime(v) || key_used(16'(v)));
    command(RE_INSERT, id, 16'(v), opb, st, ro);
    check(st == RE_OK, $sformatf("insert %h: %s", id, st.name()));
    if (st == RE_OK) begin
      flows[slot] = '{1, id, 16'(v), opb};
      n_insert++;
      for (int s = 0; s < P; s++) if (opb[s]) ref_mul(s, v);
    end
    check_stats();
  endtask

  task automatic remove_flow(input int slot);
    re_status_e st; logic [P-1:0] ro;
    command(RE_REMOVE, flows[slot].id, '0, '0, st, ro);
    check(st == RE_OK && ro == flows[slot].opb, $sformatf("remove %h: %s %b", flows[slot].id, st.name(), ro));
    flows[slot].used = 0;
    n_remove++;
    for (int s = 0; s < P; s++) if (flows[slot].opb[s]) ref_div(s, flows[slot].key);
    check_stats();
  endtask

  function automatic logic [P-1:0] random_opb();
    int r = $urandom_range(99);
    logic [P-1:0] o = '0;
    if (r < 3) return '1;                       // broadcast
    o[$urandom_range(P - 1)] = 1'b1;            // at least one egress
    if (r >= 50) o[$urandom_range(P - 1)] = 1'b1;
    if (r >= 80) o[$urandom_range(P - 1)] = 1'b1;
    return o;
  endfunction

  // Send one packet and check its result. mode 1: hold out_ready low a while;
  // mode 2: the packet is held off by a command, skip the latency check.
  task automatic packet(input logic [31:0] id, input logic [3:0] ing, input int mode);
    bit bp = (mode == 1);
    logic [P-1:0] exp_opb;
    bit known = 0;
    int lat, L;
    exp_opb = '0;
    for (int i = 0; i < N; i++) if (flows[i].used && flows[i].id == id) begin
      known = 1;
      exp_opb = flows[i].opb & ~(P'(1) << ing);
      if (flows[i].opb[ing]) n_ingress_off++;
    end
    L = 0;
    for (int s = 0; s < P; s++) if (s != ing && words_of(s) > L) L = words_of(s);
    @(negedge clk);
    in_valid = 1; in_hdr = make_hdr(id); in_ingress = ing; out_ready = !bp;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!out_valid) begin
      @(negedge clk);
      lat++;
    end
    if (bp) begin
      logic [P-1:0] held = out_opb;
      repeat (3) @(negedge clk);
      check(out_valid && out_opb == held, "result held under back-pressure");
      n_backpressure++;
      out_ready = 1;
    end
    check(out_flow_id == id && out_ingress == ing, "result identity");
    check(out_miss == !known, $sformatf("miss flag for %h", id));
    check(out_opb == exp_opb, $sformatf("OPB of %h from %0d: %b, expected %b", id, ing, out_opb, exp_opb));
    check(out_drop == (exp_opb == '0), "drop flag");
    check(int'(out_n_egress) == $countones(exp_opb), "egress count");
    if (known && mode == 0) begin
      check(lat == 4 + L * (Q / W + 1), $sformatf("latency %0d, expected %0d (L=%0d)", lat, 4 + L * (Q / W + 1), L));
      n_latency++;
    end
    if (!known) n_miss++;
    else if (exp_opb == '0) n_drop++;
    else if ($countones(exp_opb) == 1) n_uni++;
    else if ($countones(exp_opb) >= P - 1) n_bcast++;
    else n_multi++;
    @(negedge clk);
    out_ready = 1;
  endtask

  function automatic int random_used();
    int i;
    do i = $urandom_range(N - 1); while (!flows[i].used);
    return i;
  endfunction

  initial begin
    in_valid = 0; in_hdr = '0; in_ingress = '0; out_ready = 1;
    cmd_valid = 0; phi_threshold = 5'd2; cmd_op = RE_INSERT; cmd_flow_id = '0; cmd_key = '0; cmd_opb = '0;
    for (int i = 0; i < N; i++) flows[i].used = 0;
    for (int s = 0; s < P; s++) for (int w = 0; w <= WORDS; w++) mcp[s][w] = (w == 0);
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!init_done) @(negedge clk);
    // install most of the table
    for (int i = 0; i < N - 16; i++) insert_flow(i, 32'h0A00_0000 + 32'(i * 7919), random_opb());
    // one unicast flow whose only egress is port 5: dropped when it enters on 5
    insert_flow(N - 16, 32'hC0A8_0505, 16'h0020);
    // traffic
    for (int t = 0; t < 300; t++) begin
      automatic int i = random_used();
      packet(flows[i].id, 4'($urandom), ((t % 50) == 7) ? 1 : 0);
    end
    packet(32'hC0A8_0505, 4'd5, 0);
    packet(32'hDEAD_BEEF, 4'd1, 0);
    // fill the table and overfill it
    for (int i = N - 15; i < N; i++) insert_flow(i, 32'h0B00_0000 + 32'(i), random_opb());
    begin
      re_status_e st; logic [P-1:0] ro;
      command(RE_INSERT, 32'h0C00_0000, 16'd3, 16'h0001, st, ro);
      if (key_used(16'd3)) check(st == RE_KEY_IN_USE, "key 3 in use");
      else check(st == RE_TABLE_FULL, $sformatf("table full: %s", st.name()));
      if (st == RE_TABLE_FULL) n_full++;
      check_stats();
    end
    // a packet arriving while a routing-engine command runs waits in the parser
    begin
      automatic int j = random_used();
      automatic int k;
      do k = random_used(); while (k == j);
      fork
        remove_flow(j);
        begin
          repeat (3) @(negedge clk);
          fork
            packet(flows[k].id, 4'($urandom), 2);
            begin
              repeat (3) @(negedge clk);
              if (dut.ps_valid && dut.u_update.busy && !dut.u_hash.res_valid) n_stall++;
            end
          join
        end
      join
      packet(flows[j].id, 4'd0, 0);   // removed: miss
    end
    // churn: remove and reinsert, traffic in between
    for (int t = 0; t < 40; t++) begin
      automatic int i = random_used();
      remove_flow(i);
      insert_flow(i, $urandom, random_opb());
      repeat (3) begin
        automatic int k = random_used();
        packet(flows[k].id, 4'($urandom), 0);
      end
    end
    check(n_insert > 0, "insert exercised");
    check(n_remove > 0, "remove exercised");
    check(n_uni > 0, "unicast exercised");
    check(n_multi > 0, "multicast exercised");
    check(n_bcast > 0, "broadcast exercised");
    check(n_ingress_off > 0, "ingress divider disable exercised");
    check(n_drop > 0, "drop exercised");
    check(n_miss > 0, "miss exercised");
    check(n_full > 0, "table full exercised");
    check(n_stall > 0, "update stall exercised");
    check(n_backpressure > 0, "back-pressure exercised");
    check(n_phi_high > 0, "high egress diversity flagged");
    check(n_phi_low > 0, "low egress diversity flagged");
    $display("mechanisms: insert=%0d remove=%0d unicast=%0d multicast=%0d broadcast=%0d ingress_off=%0d drop=%0d miss=%0d table_full=%0d stall=%0d backpressure=%0d latency_checked=%0d phi_high=%0d phi_low=%0d",
             n_insert, n_remove, n_uni, n_multi, n_bcast, n_ingress_off, n_drop, n_miss, n_full,
             n_stall, n_backpressure, n_latency, n_phi_high, n_phi_low);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
