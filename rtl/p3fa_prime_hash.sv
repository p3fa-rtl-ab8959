// p3fa_prime_hash -- maps a flow identifier to its unique prime key.
//
// Every flow in the forwarding table owns one prime key; the same identifier
// always yields the same key. The mapping is kept in a fully associative flow
// table of N_FLOWS entries (valid bit, flow identifier, key). The data path
// looks an identifier up by comparing it with all entries in parallel and
// returns hit/miss and the key. The routing engine fills and empties the table
// through a write port and uses a combinational control port to find an
// identifier, to check whether a key is already taken and to find a free
// entry.
//
// Interface: lookup is a valid/ready stream (identifier and ingress port in;
// hit, key, identifier and ingress port out). Timing: one register stage, the
// result comes one cycle after the identifier is accepted.
//
// From the paper: the function (unique rho-bit prime key per flow, identical
// identifier -> identical key) and the one-cycle comparer. This design's
// choices: the associative table as the way to do it, keys chosen by the
// control plane and written in, and a lookup miss reported as hit = 0.
module p3fa_prime_hash
  import p3fa_pkg::*;
#(
  parameter int unsigned PORTS     = PORTS_DEF,
  parameter int unsigned N_FLOWS   = N_FLOWS_DEF,
  parameter int unsigned KEY_W     = KEY_W_DEF,
  parameter int unsigned FLOW_ID_W = FLOW_ID_W_DEF,
  localparam int unsigned PW = (PORTS > 1) ? $clog2(PORTS) : 1,
  localparam int unsigned IW = (N_FLOWS > 1) ? $clog2(N_FLOWS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // data-path lookup
  input  logic                 lk_valid,
  output logic                 lk_ready,
  input  logic [FLOW_ID_W-1:0] lk_flow_id,
  input  logic [PW-1:0]        lk_ingress,
  output logic                 res_valid,
  input  logic                 res_ready,
  output logic                 res_hit,
  output logic [KEY_W-1:0]     res_key,
  output logic [FLOW_ID_W-1:0] res_flow_id,
  output logic [PW-1:0]        res_ingress,
  // control port (combinational)
  input  logic [FLOW_ID_W-1:0] ctl_flow_id,
  output logic                 ctl_flow_hit,
  output logic [IW-1:0]        ctl_flow_idx,
  output logic [KEY_W-1:0]     ctl_flow_key,
  input  logic [KEY_W-1:0]     ctl_key,
  output logic                 ctl_key_hit,
  output logic                 free_valid,
  output logic [IW-1:0]        free_idx,
  // table write
  input  logic                 wr_en,
  input  logic [IW-1:0]        wr_idx,
  input  logic                 wr_valid,
  input  logic [FLOW_ID_W-1:0] wr_flow_id,
  input  logic [KEY_W-1:0]     wr_key
);

  logic [N_FLOWS-1:0]   ent_valid;
  logic [FLOW_ID_W-1:0] ent_flow [N_FLOWS];
  logic [KEY_W-1:0]     ent_key  [N_FLOWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ent_valid <= '0;
    else if (wr_en) ent_valid[wr_idx] <= wr_valid;
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      ent_flow[wr_idx] <= wr_flow_id;
      ent_key[wr_idx]  <= wr_key;
    end
  end

  // Parallel compare of one identifier against every entry.
  function automatic logic [IW:0] find_flow(input logic [FLOW_ID_W-1:0] id);
    logic [IW:0] r;
    r = '0;
    for (int i = N_FLOWS - 1; i >= 0; i--)
      if (ent_valid[i] && ent_flow[i] == id) r = {1'b1, IW'(i)};
    return r;
  endfunction

  logic [IW:0] lk_match, ctl_match;
  assign lk_match  = find_flow(lk_flow_id);
  assign ctl_match = find_flow(ctl_flow_id);

  assign ctl_flow_hit = ctl_match[IW];
  assign ctl_flow_idx = ctl_match[IW-1:0];
  assign ctl_flow_key = ent_key[ctl_match[IW-1:0]];

  always_comb begin
    ctl_key_hit = 1'b0;
    free_valid  = 1'b0;
    free_idx    = '0;
    for (int i = N_FLOWS - 1; i >= 0; i--) begin
      if (ent_valid[i] && ent_key[i] == ctl_key) ctl_key_hit = 1'b1;
      if (!ent_valid[i]) begin
        free_valid = 1'b1;
        free_idx   = IW'(i);
      end
    end
  end

  // Lookup register stage.
  assign lk_ready = !res_valid || res_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) res_valid <= 1'b0;
    else if (lk_ready) res_valid <= lk_valid;
  end

  always_ff @(posedge clk) begin
    if (lk_ready && lk_valid) begin
      res_hit     <= lk_match[IW];
      res_key     <= ent_key[lk_match[IW-1:0]];
      res_flow_id <= lk_flow_id;
      res_ingress <= lk_ingress;
    end
  end

endmodule
