// tb_p3fa_port_enable -- self-checking test of the rho-DEMUX / inverter array.
//
// For every ingress port of a 16-port and of a 5-port instance, checks that
// the demultiplexer output is the one-hot code of the port and that exactly
// the divider of the ingress port is disabled.
module tb_p3fa_port_enable;
  int checks = 0, failures = 0;

  logic [3:0]  ing16;
  logic [15:0] dm16, en16;
  logic [2:0]  ing5;
  logic [4:0]  dm5, en5;

  p3fa_port_enable #(.PORTS(16)) dut16 (.ingress(ing16), .demux_out(dm16), .div_enable(en16));
  p3fa_port_enable #(.PORTS(5))  dut5  (.ingress(ing5),  .demux_out(dm5),  .div_enable(en5));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    for (int p = 0; p < 16; p++) begin
      ing16 = 4'(p);
      #1;
      for (int s = 0; s < 16; s++) begin
        check(dm16[s] == (s == p), $sformatf("demux16 ingress %0d bit %0d", p, s));
        check(en16[s] == (s != p), $sformatf("enable16 ingress %0d bit %0d", p, s));
      end
    end
    for (int p = 0; p < 5; p++) begin
      ing5 = 3'(p);
      #1;
      check(en5 == (5'b11111 & ~(5'b1 << p)), $sformatf("enable5 ingress %0d", p));
      check($countones(dm5) == 1, "demux5 one-hot");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
