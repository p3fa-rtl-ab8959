// p3fa_pkg -- constants and types shared by the P3FA (Per-Port Prime Filter
// Array) forwarding engine.
//
// The default sizes below are the smallest configuration the P3FA evaluation
// covers: a 16-port forwarding engine (rho = 16) holding 2^8 forwarding
// entries, with rho-bit prime keys and 32-bit dividers / memory data paths.
// The command encoding of the routing-engine update port is this design's own.
package p3fa_pkg;

  // Port density rho: number of logical interfaces (potential egresses).
  localparam int unsigned PORTS_DEF     = 16;
  // Membership capacity n: forwarding entries (flows) the engine can hold.
  localparam int unsigned N_FLOWS_DEF   = 256;
  // Width of a prime key: rho bits.
  localparam int unsigned KEY_W_DEF     = 16;
  // q: divider word width and memory data-path width.
  localparam int unsigned Q_DEF         = 32;
  // w: bits of the dividend the divider shifts in per clock cycle.
  localparam int unsigned W_DEF         = 1;
  // Flow identifier: an IPv4 destination address.
  localparam int unsigned FLOW_ID_W_DEF = 32;
  // Parsed header: the 20-byte IPv4 header without options.
  localparam int unsigned HDR_W         = 160;

  // Words of q bits needed for one sub-scalar M_CP(s) in the worst case,
  // where every one of the n flows is forwarded through port s.
  function automatic int unsigned mcp_words(int unsigned n_flows,
                                            int unsigned key_w,
                                            int unsigned q);
    return (n_flows * key_w + q - 1) / q;
  endfunction

  // Routing-engine commands.
  typedef enum logic [0:0] {
    RE_INSERT = 1'b0,   // add a flow: key into every M_CP(s) of its OPB
    RE_REMOVE = 1'b1    // delete a flow: key out of every M_CP(s) it divides
  } re_op_e;

  // Result codes of a routing-engine command.
  typedef enum logic [2:0] {
    RE_OK         = 3'd0,
    RE_FLOW_EXIST = 3'd1,  // insert: flow identifier already in the table
    RE_KEY_IN_USE = 3'd2,  // insert: key already assigned to another flow
    RE_TABLE_FULL = 3'd3,  // insert: no free entry
    RE_OVERFLOW   = 3'd4,  // insert: a sub-scalar would outgrow its bank
    RE_NOT_FOUND  = 3'd5,  // remove: flow identifier not in the table
    RE_BAD_KEY    = 3'd6   // insert: key below 2
  } re_status_e;

endpackage
