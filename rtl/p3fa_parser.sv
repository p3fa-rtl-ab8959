// p3fa_parser -- input unit of the P3FA forwarding engine.
//
// Takes the header of an arriving packet together with the port it arrived
// on, and extracts the flow identifier that the prime hash turns into a key.
// The flow identifier is the IPv4 destination address (bytes 16..19 of the
// header); the ingress port ID travels with it so that the divider of that
// port can be disabled later (a packet is never sent back where it came from).
//
// Interface: a valid/ready stream in, a valid/ready stream out. The header is
// 160 bits, byte 0 of the IPv4 header in bits [159:152].
// Timing: one register stage, so the flow identifier appears one cycle after
// the header is accepted; a new header can be taken every cycle.
//
// From the paper: the parser, the destination address as the identifier and
// the one-cycle parser latency. This design's choices: the header layout, the
// valid/ready handshake and the absence of any header validity check.
module p3fa_parser
  import p3fa_pkg::*;
#(
  parameter int unsigned PORTS     = PORTS_DEF,
  parameter int unsigned FLOW_ID_W = FLOW_ID_W_DEF,
  localparam int unsigned PW = (PORTS > 1) ? $clog2(PORTS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // packet header in
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [HDR_W-1:0]     in_hdr,
  input  logic [PW-1:0]        in_ingress,
  // flow identifier out
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [FLOW_ID_W-1:0] out_flow_id,
  output logic [PW-1:0]        out_ingress
);

  // Byte b of the header sits in bits [HDR_W-1-8b -: 8].
  localparam int unsigned DST_MSB = HDR_W - 1 - 8 * 16;

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_ready && in_valid) begin
      out_flow_id <= FLOW_ID_W'(in_hdr[DST_MSB -: 32]);
      out_ingress <= in_ingress;
    end
  end

endmodule
