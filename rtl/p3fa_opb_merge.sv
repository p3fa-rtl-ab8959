// p3fa_opb_merge -- remainder inverters, OPB merge and drop decision.
//
// Each enabled divider leaves M_CP(s) mod k. A zero remainder means the key k
// is a factor of M_CP(s), i.e. the flow is forwarded through port s. The
// "inverter" of each remainder is a NOR over its bits (zero -> 1, non-zero ->
// 0); a disabled divider (the ingress port) always contributes 0. The rho bits
// form the output port bitmap (OPB). If the OPB is all zero (the "Z?" test)
// the packet has nowhere to go and is dropped, otherwise the OPB is handed to
// the switch fabric.
//
// Interface: per-port remainders and divider enables in; OPB, drop flag and
// the number of egress ports out. Timing: purely combinational.
//
// From the paper: OPB = ~(M_CP mod k) bit per port, the all-zero test and the
// drop. This design's choices: masking with the divider enables and the
// egress count output.
module p3fa_opb_merge
  import p3fa_pkg::*;
#(
  parameter int unsigned PORTS = PORTS_DEF,
  parameter int unsigned KEY_W = KEY_W_DEF,
  localparam int unsigned CW = $clog2(PORTS + 1)
) (
  input  logic [KEY_W-1:0] remainder [PORTS],
  input  logic [PORTS-1:0] div_enable,
  output logic [PORTS-1:0] opb,
  output logic             drop,
  output logic [CW-1:0]    n_egress
);

  always_comb begin
    n_egress = '0;
    for (int s = 0; s < PORTS; s++) begin
      opb[s]   = div_enable[s] & ~(|remainder[s]);
      n_egress = n_egress + CW'(opb[s]);
    end
  end

  assign drop = ~(|opb);

endmodule
