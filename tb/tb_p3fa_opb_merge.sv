// tb_p3fa_opb_merge -- self-checking test of the remainder inverters, the
// OPB merge and the drop test.
//
// Applies random remainders (often zero) and random enable vectors to a
// 16-port instance and checks every OPB bit, the egress count and the drop
// flag against a bit-by-bit reference. Also replays the 4-port example of the
// scheme: remainders 13, 0, 0 on ports 2..4 with port 1 as ingress give the
// OPB 4'b1100.
module tb_p3fa_opb_merge;
  localparam int unsigned P = 16;
  int checks = 0, failures = 0;

  logic [15:0] rem [P];
  logic [P-1:0] en, opb;
  logic drop;
  logic [4:0] n_eg;

  logic [15:0] rem4 [4];
  logic [3:0]  en4, opb4;
  logic        drop4;
  logic [2:0]  n4;

  p3fa_opb_merge #(.PORTS(P), .KEY_W(16)) dut (
    .remainder(rem), .div_enable(en), .opb, .drop, .n_egress(n_eg));
  p3fa_opb_merge #(.PORTS(4), .KEY_W(16)) dut4 (
    .remainder(rem4), .div_enable(en4), .opb(opb4), .drop(drop4), .n_egress(n4));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int t = 0; t < 500; t++) begin
      int cnt;
      logic [P-1:0] exp;
      cnt = 0;
      for (int s = 0; s < P; s++) begin
        rem[s] = ($urandom_range(3) == 0) ? 16'd0 : 16'($urandom_range(65535, 1));
        if (t % 50 == 0) rem[s] = 16'd1;  // force all-zero OPBs now and then
      end
      en = P'($urandom);
      #1;
      for (int s = 0; s < P; s++) begin
        exp[s] = en[s] && (rem[s] == 0);
        if (exp[s]) cnt++;
      end
      check(opb == exp, $sformatf("opb %h vs %h", opb, exp));
      check(drop == (cnt == 0), "drop flag");
      check(n_eg == 5'(cnt), "egress count");
    end
    rem4[0] = 16'd7; rem4[1] = 16'd13; rem4[2] = 16'd0; rem4[3] = 16'd0;
    en4 = 4'b1110;
    #1;
    check(opb4 == 4'b1100 && !drop4 && n4 == 3'd2, "4-port example");
    rem4[0] = 16'd0;
    #1;
    check(opb4 == 4'b1100, "ingress port masked even with remainder 0");
    rem4[2] = 16'd5; rem4[3] = 16'd1;
    #1;
    check(opb4 == 4'b0000 && drop4, "all-zero OPB dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
