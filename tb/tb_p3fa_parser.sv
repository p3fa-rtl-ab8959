// tb_p3fa_parser -- self-checking test of the input-unit parser.
//
// Builds random IPv4 headers byte by byte, sends them with random ingress
// ports and random back-pressure, and checks that each flow identifier equals
// the destination address bytes 16..19, that results come out in order, that
// the first result appears exactly one cycle after its header is accepted,
// and that a stalled output holds its value.
module tb_p3fa_parser;
  import p3fa_pkg::*;

  localparam int unsigned PORTS = 16;
  localparam int unsigned PW    = 4;
  localparam int unsigned NPKT  = 200;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             in_valid, in_ready, out_valid, out_ready;
  logic [HDR_W-1:0] in_hdr;
  logic [PW-1:0]    in_ingress, out_ingress;
  logic [31:0]      out_flow_id;

  p3fa_parser #(.PORTS(PORTS)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] exp_id  [NPKT];
  logic [PW-1:0] exp_ing [NPKT];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Header of packet i: random bytes, destination address in bytes 16..19.
  function automatic logic [HDR_W-1:0] make_hdr(input logic [31:0] dst);
    logic [7:0] b [20];
    logic [HDR_W-1:0] h;
    for (int i = 0; i < 20; i++) b[i] = 8'($urandom);
    b[0] = 8'h45;
    b[16] = dst[31:24]; b[17] = dst[23:16]; b[18] = dst[15:8]; b[19] = dst[7:0];
    for (int i = 0; i < 20; i++) h[HDR_W-1-8*i -: 8] = b[i];
    return h;
  endfunction

  initial begin
    for (int i = 0; i < NPKT; i++) begin
      exp_id[i]  = $urandom;
      exp_ing[i] = PW'($urandom);
    end
    in_valid = 1'b0; in_hdr = '0; in_ingress = '0; out_ready = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    // latency: one header, sink ready
    out_ready <= 1'b1;
    in_valid <= 1'b1; in_hdr <= make_hdr(32'hC0A80001); in_ingress <= 4'd3;
    @(posedge clk);
    in_valid <= 1'b0;
    #1 check(out_valid && out_flow_id == 32'hC0A80001 && out_ingress == 4'd3,
             "result one cycle after the header");
    @(posedge clk);
    #1 check(!out_valid, "single result");
    // stream with random back-pressure
    fork
      begin
        for (int i = 0; i < NPKT; i++) begin
          in_valid <= 1'b1; in_hdr <= make_hdr(exp_id[i]); in_ingress <= exp_ing[i];
          do @(posedge clk); while (!in_ready);
          if ($urandom_range(3) == 0) begin
            in_valid <= 1'b0;
            @(posedge clk);
          end
        end
        in_valid <= 1'b0;
      end
      begin
        int n = 0;
        while (n < NPKT) begin
          logic [31:0] held;
          out_ready <= ($urandom_range(2) != 0);
          @(posedge clk);
          if (out_valid && out_ready) begin
            check(out_flow_id == exp_id[n] && out_ingress == exp_ing[n],
                  $sformatf("packet %0d identifier", n));
            n++;
          end else if (out_valid) begin
            held = out_flow_id;
            #1 check(out_valid && out_flow_id == held, "stalled output held");
          end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
