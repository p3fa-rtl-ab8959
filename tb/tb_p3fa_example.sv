// tb_p3fa_example -- the 4-port worked example of the P3FA scheme, run end to
// end through the engine.
//
// Flows are installed so that the sub-scalars become M_CP(1..4) = 213, 3003,
// 1309, 2431 (keys 3, 71, 7, 11, 13, 17). A new flow with key 23 and OPB
// 4'b1100 (ports 4 and 3; port 4 is written on the left) then turns M_CP(3)
// and M_CP(4) into 30107 and 55913. A packet of that flow entering on port 1
// must leave through ports 3 and 4 (M_CP(2) mod 23 = 13 is not zero). Further
// packets check the ingress rule, a unicast drop and the effect of removing a
// flow. Port s of the example is index s-1 here. The egress diversity of the
// seven flows (14 OPB bits, phi = 2) is checked against Phi = 2 and Phi = 1.
module tb_p3fa_example;
  import p3fa_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic             in_valid, in_ready, out_valid, out_ready, out_drop, out_miss;
  logic [HDR_W-1:0] in_hdr;
  logic [1:0]       in_ingress, out_ingress;
  logic [3:0]       out_opb, cmd_opb, rsp_opb;
  logic [2:0]       out_n_egress;
  logic [31:0]      out_flow_id, cmd_flow_id;
  logic             cmd_valid, cmd_ready, rsp_valid, init_done;
  re_op_e           cmd_op;
  logic [15:0]      cmd_key;
  re_status_e       rsp_status;
  logic [2:0]       phi_threshold;
  logic [4:0]       stat_n_flows;
  logic [6:0]       stat_egress_sum;
  logic             stat_high_diversity;
  logic [5:0]       stat_scalar_words;

  p3fa_top #(.PORTS(4), .N_FLOWS(16)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic command(input re_op_e op, input logic [31:0] id, input logic [15:0] k,
                         input logic [3:0] opb, input logic [3:0] exp_ports);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_flow_id = id; cmd_key = k; cmd_opb = opb;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
    while (!rsp_valid) @(negedge clk);
    check(rsp_status == RE_OK && rsp_opb == exp_ports,
          $sformatf("command on %h: %s %b", id, rsp_status.name(), rsp_opb));
  endtask

  task automatic packet(input logic [31:0] id, input logic [1:0] ing,
                        input logic [3:0] exp_opb, input bit exp_miss);
    @(negedge clk);
    in_valid = 1; in_hdr = '0; in_hdr[31:0] = id; in_ingress = ing;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
    while (!out_valid) @(negedge clk);
    check(out_opb == exp_opb && out_drop == (exp_opb == 0) && out_miss == exp_miss,
          $sformatf("packet %h from port %0d: OPB %b drop %0d miss %0d", id, ing + 1,
                    out_opb, out_drop, out_miss));
    @(negedge clk);
  endtask

  function automatic logic [31:0] scalar(input int s);
    case (s)
      0: return dut.u_mem.g_bank[0].bank[0];
      1: return dut.u_mem.g_bank[1].bank[0];
      2: return dut.u_mem.g_bank[2].bank[0];
      default: return dut.u_mem.g_bank[3].bank[0];
    endcase
  endfunction

  initial begin
    in_valid = 0; in_hdr = '0; in_ingress = '0; out_ready = 1;
    cmd_valid = 0; phi_threshold = 3'd2; cmd_op = RE_INSERT; cmd_flow_id = '0; cmd_key = '0; cmd_opb = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!init_done) @(negedge clk);
    command(RE_INSERT, 32'h0A000003, 16'd3,  4'b0011, 4'b0011);
    command(RE_INSERT, 32'h0A000047, 16'd71, 4'b0001, 4'b0001);
    command(RE_INSERT, 32'h0A000007, 16'd7,  4'b0110, 4'b0110);
    command(RE_INSERT, 32'h0A00000B, 16'd11, 4'b1110, 4'b1110);
    command(RE_INSERT, 32'h0A00000D, 16'd13, 4'b1010, 4'b1010);
    command(RE_INSERT, 32'h0A000011, 16'd17, 4'b1100, 4'b1100);
    check(scalar(0) == 213 && scalar(1) == 3003 && scalar(2) == 1309 && scalar(3) == 2431,
          "M_CP = 213, 3003, 1309, 2431");
    command(RE_INSERT, 32'h0A000017, 16'd23, 4'b1100, 4'b1100);
    check(scalar(0) == 213 && scalar(1) == 3003 && scalar(2) == 30107 && scalar(3) == 55913,
          "M_CP = 213, 3003, 30107, 55913");
    // seven flows, 14 OPB bits: phi = 2, above Phi = 1 but not above Phi = 2
    @(negedge clk);
    check(stat_n_flows == 7 && stat_egress_sum == 14 && stat_scalar_words == 4,
          $sformatf("statistics %0d flows, %0d egresses, %0d words", stat_n_flows,
                    stat_egress_sum, stat_scalar_words));
    check(!stat_high_diversity, "phi = 2 is not above Phi = 2");
    phi_threshold = 3'd1;
    @(negedge clk);
    check(stat_high_diversity, "phi = 2 is above Phi = 1");
    packet(32'h0A000017, 2'd0, 4'b1100, 0);   // the example query
    packet(32'h0A000017, 2'd2, 4'b1000, 0);   // entering on port 3: port 3 disabled
    packet(32'h0A00000B, 2'd3, 4'b0110, 0);   // key 11 from port 4
    packet(32'h0A000047, 2'd0, 4'b0000, 0);   // unicast to its own ingress: dropped
    packet(32'h0A000099, 2'd1, 4'b0000, 1);   // unknown flow
    command(RE_REMOVE, 32'h0A000017, 16'd0, 4'b0000, 4'b1100);
    check(scalar(2) == 1309 && scalar(3) == 2431, "removing key 23 restores 1309, 2431");
    packet(32'h0A000017, 2'd0, 4'b0000, 1);
    packet(32'h0A000011, 2'd0, 4'b1100, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
