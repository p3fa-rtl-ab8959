// p3fa_diversity_monitor -- running egress-diversity and memory-use counters.
//
// The egress diversity of a forwarding table is phi = (sum over all flows of
// the number of ports in the flow's OPB) / n. P3FA pays off while phi stays
// below a threshold Phi, past which the sub-scalars grow too long. This block
// keeps phi up to date without a divider: it holds the numerator (egress_sum)
// and the denominator (n_flows) and compares egress_sum > Phi * n_flows to
// raise `high_diversity`. It updates from the routing engine's results: a
// successful insert adds the popcount of the flow's OPB and one flow, a
// successful remove subtracts the popcount of the ports the key was removed
// from and one flow. It also sums the sub-scalar length registers into the
// scalar memory in use (in Q-bit words), the P3FA side of the memory
// comparison behind the threshold.
//
// Interface: an update event (valid, insert/remove, OPB); the threshold Phi
// as an integer number of ports; the bank length registers. Outputs the two
// counters, the flag and the word count.
// Timing: counters update the cycle after the event; the flag and the word
// count are combinational from the registers.
//
// From the paper: the definition of phi (a count of OPB 1-bits over all
// entries divided by n) and of the threshold Phi. This design's choices:
// keeping the counts incrementally instead of periodically, the integer
// threshold and comparing without dividing.
module p3fa_diversity_monitor
  import p3fa_pkg::*;
#(
  parameter int unsigned PORTS   = PORTS_DEF,
  parameter int unsigned N_FLOWS = N_FLOWS_DEF,
  parameter int unsigned WORDS   = mcp_words(N_FLOWS_DEF, KEY_W_DEF, Q_DEF),
  localparam int unsigned NW = $clog2(N_FLOWS + 1),
  localparam int unsigned PC = $clog2(PORTS + 1),
  localparam int unsigned SW = $clog2(N_FLOWS * PORTS + 1),
  localparam int unsigned LW = $clog2(WORDS + 1),
  localparam int unsigned MW = $clog2(WORDS * PORTS + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ev_valid,
  input  logic             ev_insert,     // 1 = insert, 0 = remove
  input  logic [PORTS-1:0] ev_opb,
  input  logic [PC-1:0]    phi_threshold, // Phi, in ports
  input  logic [LW-1:0]    len [PORTS],
  output logic [NW-1:0]    n_flows,
  output logic [SW-1:0]    egress_sum,
  output logic             high_diversity,
  output logic [MW-1:0]    scalar_words
);

  logic [PC-1:0] ev_count;
  always_comb begin
    ev_count = '0;
    for (int s = 0; s < PORTS; s++) ev_count = ev_count + PC'(ev_opb[s]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_flows    <= '0;
      egress_sum <= '0;
    end else if (ev_valid) begin
      if (ev_insert) begin
        n_flows    <= n_flows + 1'b1;
        egress_sum <= egress_sum + SW'(ev_count);
      end else begin
        n_flows    <= n_flows - 1'b1;
        egress_sum <= egress_sum - SW'(ev_count);
      end
    end
  end

  // phi > Phi  <=>  egress_sum > Phi * n_flows  (n_flows > 0)
  logic [SW+PC-1:0] limit;
  assign limit          = (SW+PC)'(phi_threshold) * (SW+PC)'(n_flows);
  assign high_diversity = (n_flows != '0) && ((SW+PC)'(egress_sum) > limit);

  always_comb begin
    scalar_words = '0;
    for (int s = 0; s < PORTS; s++) scalar_words = scalar_words + MW'(len[s]);
  end

endmodule
