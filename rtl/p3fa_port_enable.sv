// p3fa_port_enable -- rho-DEMUX and inverter array of the P3FA.
//
// A packet must never be forwarded back out of the port it came in on, so the
// divider belonging to the ingress port is switched off for that packet. A
// rho-output demultiplexer routes a constant 1 to the output selected by the
// ingress port ID (a one-hot code), and an inverter array turns that into the
// divider enables: every divider enabled except the ingress port's.
//
// Interface: ingress port ID in (0-based: port s of the paper is index s-1);
// the one-hot demultiplexer output and the enable vector out.
// Timing: purely combinational.
//
// From the paper: the structure (demux fed with 1, selected by the ingress
// port ID, followed by inverters). This design's choice: 0-based port indices.
module p3fa_port_enable
  import p3fa_pkg::*;
#(
  parameter int unsigned PORTS = PORTS_DEF,
  localparam int unsigned PW = (PORTS > 1) ? $clog2(PORTS) : 1
) (
  input  logic [PW-1:0]    ingress,
  output logic [PORTS-1:0] demux_out,
  output logic [PORTS-1:0] div_enable
);

  // rho-DEMUX with its data input tied to 1.
  always_comb begin
    demux_out = '0;
    for (int s = 0; s < PORTS; s++)
      if (ingress == PW'(s)) demux_out[s] = 1'b1;
  end

  // Inverter array.
  assign div_enable = ~demux_out;

endmodule
