// tb_p3fa_memory_unit -- self-checking test of the sub-scalar memory unit.
//
// Uses 4 banks of 16 words. Writes random words through the single write port
// and checks, against a shadow copy kept in the testbench, that every bank's
// divider read port returns its own bank's word one cycle after the address,
// that all banks can be read in the same cycle, that the update read port
// takes over a bank and returns data on upd_rd_data, that a bank's output
// holds when not read, and that the length registers reset to 0 and take
// writes per bank.
module tb_p3fa_memory_unit;
  localparam int unsigned P = 4, Q = 32, WORDS = 16, PW = 2, AW = 4, LW = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [P-1:0]  rd_en;
  logic [AW-1:0] rd_addr [P];
  logic [Q-1:0]  rd_data [P];
  logic          upd_rd_en, wr_en, len_wr_en;
  logic [PW-1:0] upd_rd_port, wr_port, len_wr_port;
  logic [AW-1:0] upd_rd_addr, wr_addr;
  logic [Q-1:0]  upd_rd_data, wr_data;
  logic [LW-1:0] len [P];
  logic [LW-1:0] len_wr_data;

  p3fa_memory_unit #(.PORTS(P), .Q(Q), .WORDS(WORDS)) dut (.*);

  logic [Q-1:0] shadow [P][WORDS];

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    rd_en = '0; upd_rd_en = 0; wr_en = 0; len_wr_en = 0;
    upd_rd_port = '0; upd_rd_addr = '0; wr_port = '0; wr_addr = '0; wr_data = '0;
    len_wr_port = '0; len_wr_data = '0;
    for (int s = 0; s < P; s++) rd_addr[s] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < P; s++) check(len[s] == 0, "length reset to 0");
    // fill all banks
    for (int s = 0; s < P; s++)
      for (int w = 0; w < WORDS; w++) begin
        shadow[s][w] = $urandom;
        wr_en = 1; wr_port = PW'(s); wr_addr = AW'(w); wr_data = shadow[s][w];
        @(negedge clk);
      end
    wr_en = 0;
    // parallel random reads on all banks
    for (int t = 0; t < 100; t++) begin
      logic [AW-1:0] a [P];
      for (int s = 0; s < P; s++) begin
        a[s] = AW'($urandom); rd_addr[s] = a[s];
      end
      rd_en = '1;
      @(negedge clk);
      rd_en = '0;
      for (int s = 0; s < P; s++)
        check(rd_data[s] == shadow[s][a[s]], $sformatf("bank %0d word %0d", s, a[s]));
      // data holds while not read
      rd_addr[0] = a[0] + 1'b1;
      @(negedge clk);
      check(rd_data[0] == shadow[0][a[0]], "output held");
    end
    // update read port on each bank, dividers idle
    for (int t = 0; t < 50; t++) begin
      automatic int s = $urandom_range(P - 1);
      automatic int w = $urandom_range(WORDS - 1);
      upd_rd_en = 1; upd_rd_port = PW'(s); upd_rd_addr = AW'(w);
      @(negedge clk);
      upd_rd_en = 0;
      check(upd_rd_data == shadow[s][w], $sformatf("update read bank %0d word %0d", s, w));
    end
    // overwrite and read back through both ports
    wr_en = 1; wr_port = 2'd1; wr_addr = 4'd3; wr_data = 32'hDEADBEEF;
    @(negedge clk);
    wr_en = 0; rd_en = 4'b0010; rd_addr[1] = 4'd3;
    @(negedge clk);
    rd_en = '0;
    check(rd_data[1] == 32'hDEADBEEF, "read after write");
    // length registers
    for (int s = 0; s < P; s++) begin
      len_wr_en = 1; len_wr_port = PW'(s); len_wr_data = LW'(s + 3);
      @(negedge clk);
    end
    len_wr_en = 0;
    for (int s = 0; s < P; s++) check(len[s] == LW'(s + 3), "length write");
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
