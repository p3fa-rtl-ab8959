// tb_p3fa_prime_hash -- self-checking test of the flow-identifier-to-key table.
//
// A 16-entry table is filled through the write port with random identifiers
// and keys (kept in a reference list). Checks: lookups of known identifiers
// return hit and their key one cycle later, unknown identifiers miss, the same
// identifier always yields the same key, the control port finds identifiers
// and keys, the free-entry search reports the lowest free entry and none when
// the table is full, and an invalidated entry stops matching.
module tb_p3fa_prime_hash;
  localparam int unsigned P = 16, N = 16, KEY_W = 16, PW = 4, IW = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             lk_valid, lk_ready, res_valid, res_ready, res_hit;
  logic [31:0]      lk_flow_id, res_flow_id, ctl_flow_id, wr_flow_id;
  logic [PW-1:0]    lk_ingress, res_ingress;
  logic [KEY_W-1:0] res_key, ctl_flow_key, ctl_key, wr_key;
  logic             ctl_flow_hit, ctl_key_hit, free_valid, wr_en, wr_valid;
  logic [IW-1:0]    ctl_flow_idx, free_idx, wr_idx;

  p3fa_prime_hash #(.PORTS(P), .N_FLOWS(N), .KEY_W(KEY_W)) dut (.*);

  logic [31:0] ids  [N];
  logic [15:0] keys [N];

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic lookup(input logic [31:0] id, input logic [PW-1:0] ing,
                        input bit exp_hit, input logic [15:0] exp_key);
    lk_valid = 1; lk_flow_id = id; lk_ingress = ing; res_ready = 1;
    @(negedge clk);
    lk_valid = 0;
    check(res_valid && res_hit == exp_hit && res_flow_id == id && res_ingress == ing,
          $sformatf("lookup %h hit %0d", id, res_hit));
    if (exp_hit) check(res_key == exp_key, $sformatf("key of %h: %0d vs %0d", id, res_key, exp_key));
  endtask

  initial begin
    lk_valid = 0; lk_flow_id = '0; lk_ingress = '0; res_ready = 1;
    ctl_flow_id = '0; ctl_key = '0; wr_en = 0; wr_idx = '0; wr_valid = 0;
    wr_flow_id = '0; wr_key = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    #1 check(free_valid && free_idx == 0, "empty table: entry 0 free");
    for (int i = 0; i < N; i++) begin
      ids[i] = {8'(i), 24'($urandom)};
      keys[i] = 16'(1000 + 7 * i);
      wr_en = 1; wr_idx = free_idx; wr_valid = 1; wr_flow_id = ids[i]; wr_key = keys[i];
      check(free_valid && free_idx == IW'(i), "lowest free entry");
      @(negedge clk);
    end
    wr_en = 0;
    check(!free_valid, "full table has no free entry");
    for (int t = 0; t < 64; t++) begin
      automatic int i = $urandom_range(N - 1);
      lookup(ids[i], PW'($urandom), 1, keys[i]);
    end
    lookup(32'hFFFF_FFFF, 4'd2, 0, '0);
    // control port
    for (int i = 0; i < N; i++) begin
      ctl_flow_id = ids[i]; ctl_key = keys[i];
      #1;
      check(ctl_flow_hit && ctl_flow_idx == IW'(i) && ctl_flow_key == keys[i], "control lookup");
      check(ctl_key_hit, "key in use");
    end
    ctl_key = 16'd999; ctl_flow_id = 32'hFFFF_FFFF;
    #1 check(!ctl_key_hit && !ctl_flow_hit, "unused key and identifier");
    // invalidate entry 5
    @(negedge clk);
    wr_en = 1; wr_idx = 4'd5; wr_valid = 0;
    @(negedge clk);
    wr_en = 0;
    #1 check(free_valid && free_idx == 4'd5, "freed entry found");
    lookup(ids[5], 4'd0, 0, '0);
    lookup(ids[6], 4'd0, 1, keys[6]);
    // back-pressure: result held while not taken
    @(negedge clk);
    lk_valid = 1; lk_flow_id = ids[7]; res_ready = 0;
    @(negedge clk);
    lk_valid = 0;
    @(negedge clk);
    check(res_valid && res_key == keys[7] && !lk_ready, "held result under back-pressure");
    res_ready = 1;
    @(negedge clk);
    check(!res_valid, "result taken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
