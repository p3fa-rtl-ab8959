// p3fa_memory_unit -- storage of the P3FA scalar array M_CP(1..rho).
//
// Each port s owns one sub-scalar M_CP(s), the product of the prime keys of
// all flows forwarded through s. It is kept little-endian in its own bank of
// WORDS words of Q bits, next to a length register giving the number of
// significant words (the divider reads only those, so its latency follows the
// real bit-length of M_CP(s)). Each bank has one Q-bit data path to its own
// divider, so all rho dividers read in parallel. The routing-engine update
// path can take over the read port of one bank at a time and owns the single
// write port and the length registers.
//
// Interface: per bank a read enable and address from the divider, read data
// out; an update read port (enable, bank, address) that takes precedence on
// its bank, with its data on upd_rd_data; one write port; length registers
// with a write port. Reset clears the length registers only (0 = not yet
// initialised); the update path writes M_CP(s) = 1 after reset.
// Timing: reads are synchronous, data one cycle after the address; a bank's
// output holds its last read until the next read of that bank.
//
// From the paper: a memory unit holding the rho sub-scalars, reached through
// multiple Q-bit data paths. This design's choices: the bank layout, the
// length registers and the one-cycle read (the paper's evaluation assumes
// 10 ns per access).
// Lint may report rst_n as used both synchronously and asynchronously: the
// synchronous use is only the assertion's `disable iff`, the flops all reset
// asynchronously.
module p3fa_memory_unit
  import p3fa_pkg::*;
#(
  parameter int unsigned PORTS = PORTS_DEF,
  parameter int unsigned Q     = Q_DEF,
  parameter int unsigned WORDS = mcp_words(N_FLOWS_DEF, KEY_W_DEF, Q_DEF),
  localparam int unsigned PW = (PORTS > 1) ? $clog2(PORTS) : 1,
  localparam int unsigned AW = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned LW = $clog2(WORDS + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // divider data paths
  input  logic [PORTS-1:0] rd_en,
  input  logic [AW-1:0]    rd_addr [PORTS],
  output logic [Q-1:0]     rd_data [PORTS],
  // update read port
  input  logic             upd_rd_en,
  input  logic [PW-1:0]    upd_rd_port,
  input  logic [AW-1:0]    upd_rd_addr,
  output logic [Q-1:0]     upd_rd_data,
  // write port
  input  logic             wr_en,
  input  logic [PW-1:0]    wr_port,
  input  logic [AW-1:0]    wr_addr,
  input  logic [Q-1:0]     wr_data,
  // length registers
  output logic [LW-1:0]    len [PORTS],
  input  logic             len_wr_en,
  input  logic [PW-1:0]    len_wr_port,
  input  logic [LW-1:0]    len_wr_data
);

  logic [PW-1:0] upd_port_q;

  for (genvar s = 0; s < PORTS; s++) begin : g_bank
    logic [Q-1:0] bank [WORDS];
    logic         upd_sel;
    logic         ren;
    logic [AW-1:0] raddr;

    assign upd_sel = upd_rd_en && (upd_rd_port == PW'(s));
    assign ren     = upd_sel || rd_en[s];
    assign raddr   = upd_sel ? upd_rd_addr : rd_addr[s];

    always_ff @(posedge clk) begin
      if (wr_en && wr_port == PW'(s)) bank[wr_addr] <= wr_data;
      if (ren) rd_data[s] <= bank[raddr];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) len[s] <= '0;
      else if (len_wr_en && len_wr_port == PW'(s)) len[s] <= len_wr_data;
    end

    // The query path and the update path never share a bank in one cycle.
    a_one_reader: assert property (@(posedge clk) disable iff (!rst_n)
                                   !(upd_sel && rd_en[s]));
  end

  always_ff @(posedge clk) begin
    if (upd_rd_en) upd_port_q <= upd_rd_port;
  end

  assign upd_rd_data = rd_data[upd_port_q];

endmodule
