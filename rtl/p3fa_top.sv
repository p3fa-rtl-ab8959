// p3fa_top -- Per-Port Prime Filter Array (P3FA) forwarding engine.
//
// Every flow known to the engine owns a distinct prime key k. Port s keeps one
// long integer M_CP(s), the product of the keys of all flows forwarded through
// s. A packet of flow x leaves through port s exactly when k_x divides M_CP(s),
// so the output port bitmap (OPB) of a packet is found by rho independent
// modulo operations, one per port, all running in parallel.
//
// Data path, in order: the parser takes the destination address of the packet
// as its flow identifier; the prime hash returns the flow's key (a miss drops
// the packet); the rho-DEMUX and inverter array enable every divider except
// the one of the ingress port; the dividers reduce their sub-scalars modulo
// the key, each over its own memory data path; the OPB merge turns zero
// remainders into 1 bits and drops the packet if the OPB is empty. The OPB
// goes to the switch fabric, which is outside this design.
//
// Control path: the routing-engine update unit executes Insert/Remove
// commands, changing the prime hash table and the sub-scalars. Updates and
// queries exclude each other: while a command is pending or running no new
// lookup starts and no query is launched; a command is taken only when the
// query path is empty. Packets wait (in_ready low) meanwhile.
//
// Interface: packet headers in (valid/ready, header + ingress port); results
// out (valid/ready: OPB, number of egress ports, drop, miss, flow identifier, ingress port); routing
// engine commands in and responses out; `init_done` after the post-reset
// initialisation of the sub-scalars; the egress-diversity statistics
// (flows, sum of OPB 1-bits, phi > Phi flag, scalar words in use).
// Timing: a packet whose flow hits takes 2 cycles through parser and prime
// hash, 1 cycle to launch the dividers, then the slowest enabled divider
// (len*(Q/W+1)+1 cycles for a sub-scalar of len words), and 1 cycle to
// present the result. Only one packet is in the dividers at a time.
//
// From the paper: the block structure and the query rule OPB = ~(M_CP mod k)
// with the ingress divider disabled, and the Insert rule for the scalars.
// This design's choices: the handshakes, the update/query exclusion, the miss
// handling and the one-packet-at-a-time sequencing.
// Lint may report rst_n as used both synchronously and asynchronously: the
// synchronous use is only the assertion's `disable iff`, the flops all reset
// asynchronously.
module p3fa_top
  import p3fa_pkg::*;
#(
  parameter int unsigned PORTS     = PORTS_DEF,
  parameter int unsigned N_FLOWS   = N_FLOWS_DEF,
  parameter int unsigned KEY_W     = KEY_W_DEF,
  parameter int unsigned Q         = Q_DEF,
  parameter int unsigned W         = W_DEF,
  parameter int unsigned FLOW_ID_W = FLOW_ID_W_DEF,
  parameter int unsigned WORDS     = mcp_words(N_FLOWS, KEY_W, Q),
  localparam int unsigned PW = (PORTS > 1) ? $clog2(PORTS) : 1,
  localparam int unsigned IW = (N_FLOWS > 1) ? $clog2(N_FLOWS) : 1,
  localparam int unsigned AW = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned LW = $clog2(WORDS + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // packets in
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [HDR_W-1:0]     in_hdr,
  input  logic [PW-1:0]        in_ingress,
  // forwarding decision out (to the switch fabric)
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [PORTS-1:0]     out_opb,
  output logic [$clog2(PORTS+1)-1:0] out_n_egress,
  output logic                 out_drop,
  output logic                 out_miss,
  output logic [FLOW_ID_W-1:0] out_flow_id,
  output logic [PW-1:0]        out_ingress,
  // routing engine commands
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  re_op_e               cmd_op,
  input  logic [FLOW_ID_W-1:0] cmd_flow_id,
  input  logic [KEY_W-1:0]     cmd_key,
  input  logic [PORTS-1:0]     cmd_opb,
  output logic                 rsp_valid,
  output re_status_e           rsp_status,
  output logic [PORTS-1:0]     rsp_opb,
  output logic                 init_done,
  // egress-diversity monitor
  input  logic [$clog2(PORTS+1)-1:0]         phi_threshold,
  output logic [$clog2(N_FLOWS+1)-1:0]       stat_n_flows,
  output logic [$clog2(N_FLOWS*PORTS+1)-1:0] stat_egress_sum,
  output logic                               stat_high_diversity,
  output logic [$clog2(WORDS*PORTS+1)-1:0]   stat_scalar_words
);

  // ---------------- input unit ----------------
  logic                 ps_valid, ps_ready;
  logic [FLOW_ID_W-1:0] ps_flow_id;
  logic [PW-1:0]        ps_ingress;

  p3fa_parser #(.PORTS(PORTS), .FLOW_ID_W(FLOW_ID_W)) u_parser (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_hdr, .in_ingress,
    .out_valid(ps_valid), .out_ready(ps_ready),
    .out_flow_id(ps_flow_id), .out_ingress(ps_ingress)
  );

  // ---------------- prime hash ----------------
  logic                 upd_busy;
  logic                 lk_valid, lk_ready;
  logic                 res_valid, res_ready, res_hit;
  logic [KEY_W-1:0]     res_key;
  logic [FLOW_ID_W-1:0] res_flow_id;
  logic [PW-1:0]        res_ingress;

  logic [FLOW_ID_W-1:0] ctl_flow_id;
  logic                 ctl_flow_hit;
  logic [IW-1:0]        ctl_flow_idx;
  logic [KEY_W-1:0]     ctl_flow_key;
  logic [KEY_W-1:0]     ctl_key;
  logic                 ctl_key_hit;
  logic                 free_valid;
  logic [IW-1:0]        free_idx;
  logic                 ft_wr_en, ft_wr_valid;
  logic [IW-1:0]        ft_wr_idx;
  logic [FLOW_ID_W-1:0] ft_wr_flow_id;
  logic [KEY_W-1:0]     ft_wr_key;

  // No lookup while a routing-engine command is pending or running.
  logic hold;
  assign hold     = upd_busy || cmd_valid || !init_done;
  assign lk_valid = ps_valid && !hold;
  assign ps_ready = lk_ready && !hold;

  p3fa_prime_hash #(.PORTS(PORTS), .N_FLOWS(N_FLOWS), .KEY_W(KEY_W),
                    .FLOW_ID_W(FLOW_ID_W)) u_hash (
    .clk, .rst_n,
    .lk_valid, .lk_ready, .lk_flow_id(ps_flow_id), .lk_ingress(ps_ingress),
    .res_valid, .res_ready, .res_hit, .res_key, .res_flow_id, .res_ingress,
    .ctl_flow_id, .ctl_flow_hit, .ctl_flow_idx, .ctl_flow_key,
    .ctl_key, .ctl_key_hit, .free_valid, .free_idx,
    .wr_en(ft_wr_en), .wr_idx(ft_wr_idx), .wr_valid(ft_wr_valid),
    .wr_flow_id(ft_wr_flow_id), .wr_key(ft_wr_key)
  );

  // ---------------- query sequencing ----------------
  typedef enum logic [1:0] {Q_IDLE, Q_WAIT, Q_OUT} qstate_e;
  qstate_e qstate;

  logic [PW-1:0]        q_ingress;
  logic [FLOW_ID_W-1:0] q_flow_id;
  logic [PORTS-1:0]     q_enable;
  logic [PORTS-1:0]     done_seen;
  logic                 div_start;

  assign res_ready = (qstate == Q_IDLE) && !upd_busy;
  assign div_start = res_valid && res_ready && res_hit;

  // ---------------- rho-DEMUX + inverter array ----------------
  logic [PORTS-1:0] demux_out, div_enable;

  p3fa_port_enable #(.PORTS(PORTS)) u_enable (
    .ingress(res_ingress), .demux_out, .div_enable
  );

  // ---------------- memory unit and dividers ----------------
  logic [PORTS-1:0] d_rd;
  logic [AW-1:0]    d_addr  [PORTS];
  logic [Q-1:0]     d_rdata [PORTS];
  logic [LW-1:0]    len     [PORTS];
  logic [PORTS-1:0] d_done;
  logic [KEY_W-1:0] d_rem   [PORTS];

  logic             m_rd_en, m_wr_en, len_wr_en;
  logic [PW-1:0]    m_rd_port, m_wr_port, len_wr_port;
  logic [AW-1:0]    m_rd_addr, m_wr_addr;
  logic [Q-1:0]     m_rd_data, m_wr_data;
  logic [LW-1:0]    len_wr_data;

  p3fa_memory_unit #(.PORTS(PORTS), .Q(Q), .WORDS(WORDS)) u_mem (
    .clk, .rst_n,
    .rd_en(d_rd), .rd_addr(d_addr), .rd_data(d_rdata),
    .upd_rd_en(m_rd_en), .upd_rd_port(m_rd_port), .upd_rd_addr(m_rd_addr),
    .upd_rd_data(m_rd_data),
    .wr_en(m_wr_en), .wr_port(m_wr_port), .wr_addr(m_wr_addr), .wr_data(m_wr_data),
    .len, .len_wr_en, .len_wr_port, .len_wr_data
  );

  for (genvar s = 0; s < PORTS; s++) begin : g_div
    logic busy_unused;
    p3fa_divider #(.Q(Q), .KEY_W(KEY_W), .W(W), .WORDS(WORDS)) u_div (
      .clk, .rst_n,
      .start(div_start), .enable(div_enable[s]), .key(res_key), .len(len[s]),
      .mem_rd(d_rd[s]), .mem_addr(d_addr[s]), .mem_rdata(d_rdata[s]),
      .busy(busy_unused), .done(d_done[s]), .remainder(d_rem[s])
    );
  end

  // ---------------- OPB merge and drop ----------------
  logic [PORTS-1:0]            m_opb;
  logic                        m_drop;
  logic [$clog2(PORTS+1)-1:0]  m_n_egress;

  p3fa_opb_merge #(.PORTS(PORTS), .KEY_W(KEY_W)) u_merge (
    .remainder(d_rem), .div_enable(q_enable), .opb(m_opb), .drop(m_drop),
    .n_egress(m_n_egress)
  );

  logic all_done;
  assign all_done = &(done_seen | d_done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      qstate      <= Q_IDLE;
      q_ingress   <= '0;
      q_flow_id   <= '0;
      q_enable    <= '0;
      done_seen   <= '0;
      out_valid   <= 1'b0;
      out_opb     <= '0;
      out_n_egress <= '0;
      out_drop    <= 1'b0;
      out_miss    <= 1'b0;
      out_flow_id <= '0;
      out_ingress <= '0;
    end else begin
      unique case (qstate)
        Q_IDLE: if (res_valid && res_ready) begin
          q_ingress <= res_ingress;
          q_flow_id <= res_flow_id;
          q_enable  <= div_enable;
          done_seen <= '0;
          if (res_hit) begin
            qstate <= Q_WAIT;
          end else begin
            // unknown flow: no key, nothing to divide by
            out_valid   <= 1'b1;
            out_opb     <= '0;
            out_n_egress <= '0;
            out_drop    <= 1'b1;
            out_miss    <= 1'b1;
            out_flow_id <= res_flow_id;
            out_ingress <= res_ingress;
            qstate      <= Q_OUT;
          end
        end
        Q_WAIT: begin
          done_seen <= done_seen | d_done;
          if (all_done) begin
            out_valid   <= 1'b1;
            out_opb     <= m_opb;
            out_n_egress <= m_n_egress;
            out_drop    <= m_drop;
            out_miss    <= 1'b0;
            out_flow_id <= q_flow_id;
            out_ingress <= q_ingress;
            qstate      <= Q_OUT;
          end
        end
        Q_OUT: if (out_ready) begin
          out_valid <= 1'b0;
          qstate    <= Q_IDLE;
        end
        default: qstate <= Q_IDLE;
      endcase
    end
  end

  // ---------------- routing-engine update ----------------
  logic upd_allow;
  assign upd_allow = (qstate == Q_IDLE) && !res_valid && init_done;

  p3fa_update #(.PORTS(PORTS), .N_FLOWS(N_FLOWS), .KEY_W(KEY_W), .Q(Q),
                .FLOW_ID_W(FLOW_ID_W), .WORDS(WORDS)) u_update (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_flow_id, .cmd_key, .cmd_opb,
    .rsp_valid, .rsp_status, .rsp_opb,
    .allow(upd_allow), .busy(upd_busy), .init_done,
    .ctl_flow_id, .ctl_flow_hit, .ctl_flow_idx, .ctl_flow_key,
    .ctl_key, .ctl_key_hit, .free_valid, .free_idx,
    .ft_wr_en, .ft_wr_idx, .ft_wr_valid, .ft_wr_flow_id, .ft_wr_key,
    .m_rd_en, .m_rd_port, .m_rd_addr, .m_rd_data,
    .m_wr_en, .m_wr_port, .m_wr_addr, .m_wr_data,
    .len, .len_wr_en, .len_wr_port, .len_wr_data
  );

  // ---------------- egress-diversity monitor ----------------
  re_op_e op_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      op_q <= RE_INSERT;
    else if (cmd_valid && cmd_ready) op_q <= cmd_op;
  end

  p3fa_diversity_monitor #(.PORTS(PORTS), .N_FLOWS(N_FLOWS), .WORDS(WORDS)) u_stat (
    .clk, .rst_n,
    .ev_valid(rsp_valid && rsp_status == RE_OK), .ev_insert(op_q == RE_INSERT),
    .ev_opb(rsp_opb), .phi_threshold, .len,
    .n_flows(stat_n_flows), .egress_sum(stat_egress_sum),
    .high_diversity(stat_high_diversity), .scalar_words(stat_scalar_words)
  );

  // A result is held until the switch fabric takes it.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_opb) && $stable(out_drop));

endmodule
