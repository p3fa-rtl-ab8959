// tb_p3fa_update -- self-checking test of the routing-engine Insert/Remove
// unit, together with the prime hash table and the memory unit it drives.
//
// Sizes: 4 ports, 8 flows, 16-bit keys, banks of 3 words of 32 bits.
// The testbench keeps its own list of installed flows and, after every
// command, recomputes each sub-scalar as the product of the keys of the flows
// routed through that port; the banks and length registers must match
// exactly. It replays the 4-port example of the scheme (213, 3003, 1309,
// 2431, then key 23 with OPB 4'b1100 gives 30107 and 55913), checks every
// error status (existing flow, key in use, key < 2, table full, bank overflow,
// unknown flow), then runs random inserts and removes of large primes.
module tb_p3fa_update;
  import p3fa_pkg::*;

  localparam int unsigned P = 4, N = 8, KEY_W = 16, Q = 32, WORDS = 3;
  localparam int unsigned PW = 2, IW = 3, AW = 2, LW = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             cmd_valid, cmd_ready, rsp_valid, allow, busy, init_done;
  re_op_e           cmd_op;
  logic [31:0]      cmd_flow_id;
  logic [KEY_W-1:0] cmd_key;
  logic [P-1:0]     cmd_opb, rsp_opb;
  re_status_e       rsp_status;

  logic [31:0]      ctl_flow_id, ft_wr_flow_id;
  logic             ctl_flow_hit, ctl_key_hit, free_valid, ft_wr_en, ft_wr_valid;
  logic [IW-1:0]    ctl_flow_idx, free_idx, ft_wr_idx;
  logic [KEY_W-1:0] ctl_flow_key, ctl_key, ft_wr_key;
  logic             m_rd_en, m_wr_en, len_wr_en;
  logic [PW-1:0]    m_rd_port, m_wr_port, len_wr_port;
  logic [AW-1:0]    m_rd_addr, m_wr_addr;
  logic [Q-1:0]     m_rd_data, m_wr_data;
  logic [LW-1:0]    len [P];
  logic [LW-1:0]    len_wr_data;

  // unused data-path ports of the hash and memory
  logic             res_valid, res_hit, lk_ready;
  logic [KEY_W-1:0] res_key;
  logic [31:0]      res_flow_id;
  logic [PW-1:0]    res_ingress;
  logic [AW-1:0]    d_addr [P];
  logic [Q-1:0]     d_data [P];

  p3fa_update #(.PORTS(P), .N_FLOWS(N), .KEY_W(KEY_W), .Q(Q), .WORDS(WORDS)) dut (.*);

  p3fa_prime_hash #(.PORTS(P), .N_FLOWS(N), .KEY_W(KEY_W)) u_hash (
    .clk, .rst_n,
    .lk_valid(1'b0), .lk_ready, .lk_flow_id(32'd0), .lk_ingress(2'd0),
    .res_valid, .res_ready(1'b1), .res_hit, .res_key, .res_flow_id, .res_ingress,
    .ctl_flow_id, .ctl_flow_hit, .ctl_flow_idx, .ctl_flow_key,
    .ctl_key, .ctl_key_hit, .free_valid, .free_idx,
    .wr_en(ft_wr_en), .wr_idx(ft_wr_idx), .wr_valid(ft_wr_valid),
    .wr_flow_id(ft_wr_flow_id), .wr_key(ft_wr_key));

  assign d_addr = '{default: '0};
  p3fa_memory_unit #(.PORTS(P), .Q(Q), .WORDS(WORDS)) u_mem (
    .clk, .rst_n,
    .rd_en('0), .rd_addr(d_addr), .rd_data(d_data),
    .upd_rd_en(m_rd_en), .upd_rd_port(m_rd_port), .upd_rd_addr(m_rd_addr),
    .upd_rd_data(m_rd_data),
    .wr_en(m_wr_en), .wr_port(m_wr_port), .wr_addr(m_wr_addr), .wr_data(m_wr_data),
    .len, .len_wr_en, .len_wr_port, .len_wr_data);

  // reference list of installed flows
  typedef struct { bit used; logic [31:0] id; logic [15:0] key; logic [P-1:0] opb; } flow_t;
  flow_t flows [N];

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [127:0] bank_value(input int s);
    logic [127:0] v = '0;
    case (s)
      0: for (int w = 0; w < WORDS; w++) if (w < len[s]) v[32*w +: 32] = u_mem.g_bank[0].bank[w];
      1: for (int w = 0; w < WORDS; w++) if (w < len[s]) v[32*w +: 32] = u_mem.g_bank[1].bank[w];
      2: for (int w = 0; w < WORDS; w++) if (w < len[s]) v[32*w +: 32] = u_mem.g_bank[2].bank[w];
      default: for (int w = 0; w < WORDS; w++) if (w < len[s]) v[32*w +: 32] = u_mem.g_bank[3].bank[w];
    endcase
    return v;
  endfunction

  function automatic logic [127:0] expected(input int s);
    logic [127:0] v = 1;
    for (int i = 0; i < N; i++) if (flows[i].used && flows[i].opb[s]) v = v * flows[i].key;
    return v;
  endfunction

  function automatic int words_of(input logic [127:0] v);
    int n = 1;
    for (int w = 0; w < 4; w++) if (v[32*w +: 32] != 0) n = w + 1;
    return n;
  endfunction

  task automatic check_scalars(input string tag);
    for (int s = 0; s < P; s++) begin
      logic [127:0] e = expected(s);
      check(bank_value(s) == e && int'(len[s]) == words_of(e),
            $sformatf("%s: M_CP(%0d) = %0d (len %0d), expected %0d", tag, s + 1,
                      bank_value(s), len[s], e));
    end
  endtask

  task automatic command(input re_op_e op, input logic [31:0] id, input logic [15:0] k,
                         input logic [P-1:0] opb, output re_status_e st,
                         output logic [P-1:0] ropb);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_flow_id = id; cmd_key = k; cmd_opb = opb;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0;
    while (!rsp_valid) @(negedge clk);
    st = rsp_status; ropb = rsp_opb;
  endtask

  function automatic bit is_prime(input int v);
    if (v < 2) return 0;
    for (int d = 2; d * d <= v; d++) if (v % d == 0) return 0;
    return 1;
  endfunction

  task automatic insert(input logic [31:0] id, input logic [15:0] k, input logic [P-1:0] opb,
                        input re_status_e exp_st);
    re_status_e st; logic [P-1:0] r;
    command(RE_INSERT, id, k, opb, st, r);
    check(st == exp_st, $sformatf("insert %h key %0d: status %s, expected %s", id, k, st.name(), exp_st.name()));
    if (st == RE_OK)
      for (int i = 0; i < N; i++) if (!flows[i].used) begin
        flows[i] = '{1, id, k, opb};
        break;
      end
    check_scalars("insert");
  endtask

  task automatic remove(input logic [31:0] id, input re_status_e exp_st);
    re_status_e st; logic [P-1:0] r, eo;
    eo = '0;
    for (int i = 0; i < N; i++) if (flows[i].used && flows[i].id == id) eo = flows[i].opb;
    command(RE_REMOVE, id, '0, '0, st, r);
    check(st == exp_st, $sformatf("remove %h: status %s", id, st.name()));
    if (st == RE_OK) begin
      check(r == eo, $sformatf("remove %h: ports %b, expected %b", id, r, eo));
      for (int i = 0; i < N; i++) if (flows[i].used && flows[i].id == id) flows[i].used = 0;
    end
    check_scalars("remove");
  endtask

  int n_ok = 0;

  initial begin
    cmd_valid = 0; cmd_op = RE_INSERT; cmd_flow_id = '0; cmd_key = '0; cmd_opb = '0;
    allow = 1;
    for (int i = 0; i < N; i++) flows[i].used = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (!init_done) @(negedge clk);
    check_scalars("after reset");
    // the worked example: OPBs written with port 4 on the left
    insert(32'h0A000003, 16'd3,  4'b0011, RE_OK);
    insert(32'h0A000047, 16'd71, 4'b0001, RE_OK);
    insert(32'h0A000007, 16'd7,  4'b0110, RE_OK);
    insert(32'h0A00000B, 16'd11, 4'b1110, RE_OK);
    insert(32'h0A00000D, 16'd13, 4'b1010, RE_OK);
    insert(32'h0A000011, 16'd17, 4'b1100, RE_OK);
    check(bank_value(0) == 213 && bank_value(1) == 3003 && bank_value(2) == 1309 &&
          bank_value(3) == 2431, "example scalars 213, 3003, 1309, 2431");
    insert(32'h0A000017, 16'd23, 4'b1100, RE_OK);
    check(bank_value(2) == 30107 && bank_value(3) == 55913, "example update to 30107, 55913");
    // errors
    insert(32'h0A000017, 16'd29, 4'b0001, RE_FLOW_EXIST);
    insert(32'h0B000000, 16'd23, 4'b0001, RE_KEY_IN_USE);
    insert(32'h0B000001, 16'd1,  4'b0001, RE_BAD_KEY);
    insert(32'h0B000002, 16'd29, 4'b0001, RE_OK);
    insert(32'h0B000003, 16'd31, 4'b0001, RE_TABLE_FULL);
    remove(32'h0A00000B, RE_OK);
    remove(32'h0C000000, RE_NOT_FOUND);
    // empty the table
    for (int i = 0; i < N; i++) if (flows[i].used) remove(flows[i].id, RE_OK);
    // fill port 1's bank with large primes until it overflows
    begin
      int v = 65521;
      int inserted = 0;
      bit ovf = 0;
      while (!ovf && inserted < N) begin
        re_status_e st; logic [P-1:0] r;
        while (!is_prime(v)) v--;
        if (len[0] == LW'(WORDS)) begin
          insert(32'hD0000000 + inserted, 16'(v), 4'b0001, RE_OVERFLOW);
          ovf = 1;
        end else begin
          insert(32'hD0000000 + inserted, 16'(v), 4'b0001, RE_OK);
          inserted++;
        end
        v--;
      end
      check(ovf, "bank overflow reached");
      for (int i = 0; i < N; i++) if (flows[i].used) remove(flows[i].id, RE_OK);
    end
    // random traffic with small OPBs
    for (int t = 0; t < 150; t++) begin
      automatic int i = $urandom_range(N - 1);
      if (flows[i].used) remove(flows[i].id, RE_OK);
      else begin
        int v;
        bit dup;
        logic [P-1:0] opb;
        do begin
          v = $urandom_range(500, 2);  // 7 keys below 2^9 never fill 2 words
          dup = 0;
          for (int j = 0; j < N; j++) if (flows[j].used && flows[j].key == 16'(v)) dup = 1;
        end while (!is_prime(v) || dup);
        opb = P'($urandom);
        insert($urandom, 16'(v), opb, RE_OK);
        n_ok++;
      end
    end
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
