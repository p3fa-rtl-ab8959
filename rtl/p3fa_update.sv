// p3fa_update -- routing-engine side of the P3FA: Insert() and Remove().
//
// The control plane changes the forwarding table through two commands.
//
// Insert(flow, key, OPB): the flow gets the prime key (chosen by the control
// plane, at least 2 and not held by any other flow) and every sub-scalar of a
// port in its OPB is multiplied by that key: M_CP(s) <- k * M_CP(s). The
// product is formed word by word, least significant first, with a KEY_W-bit
// carry; a final non-zero carry becomes a new top word.
//
// Remove(flow): the flow's key is looked up and the flow table entry freed.
// Then, for every port, a first pass computes M_CP(s) mod k (1 bit per cycle,
// most significant word first, as in the divider); only if it is zero does a
// second pass divide the key out, writing each quotient word back in place
// and shrinking the length to the highest non-zero quotient word.
//
// After reset the unit first writes M_CP(s) = 1 (the empty product) into
// every bank and sets every length to 1; `init_done` rises when that is over.
//
// Interface: a valid/ready command port and a one-cycle response (status and
// the ports whose sub-scalar was changed). `allow` must be high for a command
// to be accepted: the top raises it only when no query is in flight, and the
// unit's `busy` holds the query path off until the response. The unit drives
// the control and write ports of the prime hash and the update ports of the
// memory unit.
// Timing: Insert takes 2 cycles per word of each touched sub-scalar plus a few
// cycles; Remove takes (Q+1) cycles per word per pass.
//
// From the paper: the effect of Insert (Eq. 3 and its 4-port example) and the
// existence of Insert()/Remove() in the routing engine. This design's choices:
// everything else -- the command set, the checks and status codes, the
// word-serial multiplier, the test-then-divide removal and the reset
// initialisation.
module p3fa_update
  import p3fa_pkg::*;
#(
  parameter int unsigned PORTS     = PORTS_DEF,
  parameter int unsigned N_FLOWS   = N_FLOWS_DEF,
  parameter int unsigned KEY_W     = KEY_W_DEF,
  parameter int unsigned Q         = Q_DEF,
  parameter int unsigned FLOW_ID_W = FLOW_ID_W_DEF,
  parameter int unsigned WORDS     = mcp_words(N_FLOWS_DEF, KEY_W_DEF, Q_DEF),
  localparam int unsigned PW = (PORTS > 1) ? $clog2(PORTS) : 1,
  localparam int unsigned IW = (N_FLOWS > 1) ? $clog2(N_FLOWS) : 1,
  localparam int unsigned AW = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned LW = $clog2(WORDS + 1),
  localparam int unsigned CW = $clog2(Q)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command / response
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  re_op_e               cmd_op,
  input  logic [FLOW_ID_W-1:0] cmd_flow_id,
  input  logic [KEY_W-1:0]     cmd_key,
  input  logic [PORTS-1:0]     cmd_opb,
  output logic                 rsp_valid,
  output re_status_e           rsp_status,
  output logic [PORTS-1:0]     rsp_opb,
  input  logic                 allow,
  output logic                 busy,
  output logic                 init_done,
  // prime hash control and write ports
  output logic [FLOW_ID_W-1:0] ctl_flow_id,
  input  logic                 ctl_flow_hit,
  input  logic [IW-1:0]        ctl_flow_idx,
  input  logic [KEY_W-1:0]     ctl_flow_key,
  output logic [KEY_W-1:0]     ctl_key,
  input  logic                 ctl_key_hit,
  input  logic                 free_valid,
  input  logic [IW-1:0]        free_idx,
  output logic                 ft_wr_en,
  output logic [IW-1:0]        ft_wr_idx,
  output logic                 ft_wr_valid,
  output logic [FLOW_ID_W-1:0] ft_wr_flow_id,
  output logic [KEY_W-1:0]     ft_wr_key,
  // memory unit update ports
  output logic                 m_rd_en,
  output logic [PW-1:0]        m_rd_port,
  output logic [AW-1:0]        m_rd_addr,
  input  logic [Q-1:0]         m_rd_data,
  output logic                 m_wr_en,
  output logic [PW-1:0]        m_wr_port,
  output logic [AW-1:0]        m_wr_addr,
  output logic [Q-1:0]         m_wr_data,
  input  logic [LW-1:0]        len [PORTS],
  output logic                 len_wr_en,
  output logic [PW-1:0]        len_wr_port,
  output logic [LW-1:0]        len_wr_data
);

  typedef enum logic [3:0] {
    U_INIT, U_IDLE, U_CHECK,
    U_MPORT, U_MREAD, U_MCALC,
    U_DPORT, U_DREAD, U_DSHIFT,
    U_RESP
  } state_e;

  state_e               state;
  re_op_e               op;
  logic [FLOW_ID_W-1:0] flow_id;
  logic [KEY_W-1:0]     key;
  logic [PORTS-1:0]     opb;      // insert: ports to multiply; remove: ports divided
  logic [PW:0]          port;     // one extra bit to count past the last port
  logic [AW:0]          widx;     // word index (one extra bit for the top word)
  logic [KEY_W-1:0]     carry;    // multiply carry
  logic [KEY_W-1:0]     r;        // division partial remainder
  logic [Q-1:0]         shreg;    // dividend word being shifted
  logic [Q-1:0]         qword;    // quotient word being formed
  logic [CW-1:0]        cnt;
  logic                 wpass;    // remove: 0 = test pass, 1 = divide pass
  logic                 nz_seen;  // remove: a non-zero quotient word was written
  logic [LW-1:0]        newlen;
  re_status_e           status;

  logic [PW-1:0] p;
  assign p = port[PW-1:0];

  // Insert may only go ahead if no touched sub-scalar is already full: one
  // multiplication by a key below 2^Q adds at most one word.
  logic any_full;
  always_comb begin
    any_full = 1'b0;
    for (int s = 0; s < PORTS; s++)
      if (opb[s] && len[s] == LW'(WORDS)) any_full = 1'b1;
  end

  // Multiply step: one word times the key plus the carry.
  logic [Q+KEY_W-1:0] prod;
  assign prod = (Q+KEY_W)'(m_rd_data) * (Q+KEY_W)'(key) + (Q+KEY_W)'(carry);

  // Restoring division step on one bit.
  logic [Q-1:0]     dcur;
  logic             dbit;
  logic [KEY_W:0]   dt;
  logic             dq;
  logic [KEY_W-1:0] r_next;
  assign dcur   = (cnt == '0) ? m_rd_data : shreg;
  assign dbit   = dcur[Q-1];
  assign dt     = {r, dbit};
  assign dq     = (dt >= {1'b0, key});
  assign r_next = dq ? KEY_W'(dt - {1'b0, key}) : dt[KEY_W-1:0];

  // The quotient word shifts left; its oldest bit leaves after Q steps.
  logic [Q-1:0] qword_next;
  assign qword_next = {qword[Q-2:0], dq};

  logic ctl_key_ok;
  assign ctl_key_ok = (key >= KEY_W'(2)) && !ctl_key_hit;

  assign ctl_flow_id = flow_id;
  assign ctl_key     = key;
  assign cmd_ready   = (state == U_IDLE) && allow;
  assign busy        = (state != U_IDLE);
  assign init_done   = (state != U_INIT);

  always_comb begin
    ft_wr_en      = 1'b0;
    ft_wr_idx     = free_idx;
    ft_wr_valid   = 1'b0;
    ft_wr_flow_id = flow_id;
    ft_wr_key     = key;
    m_rd_en       = 1'b0;
    m_rd_port     = p;
    m_rd_addr     = widx[AW-1:0];
    m_wr_en       = 1'b0;
    m_wr_port     = p;
    m_wr_addr     = widx[AW-1:0];
    m_wr_data     = prod[Q-1:0];
    len_wr_en     = 1'b0;
    len_wr_port   = p;
    len_wr_data   = LW'(widx);
    unique case (state)
      U_INIT: begin
        m_wr_en     = 1'b1;
        m_wr_addr   = '0;
        m_wr_data   = Q'(1);
        len_wr_en   = 1'b1;
        len_wr_data = LW'(1);
      end
      U_CHECK: begin
        if (op == RE_INSERT) begin
          ft_wr_en    = ctl_key_ok && !ctl_flow_hit && free_valid && !any_full;
          ft_wr_valid = 1'b1;
        end else begin
          ft_wr_en    = ctl_flow_hit;
          ft_wr_idx   = ctl_flow_idx;
          ft_wr_valid = 1'b0;
        end
      end
      U_MREAD: begin
        if (widx == (AW+1)'(len[p])) begin
          // past the top word: the carry becomes a new top word
          m_wr_en     = (carry != '0);
          m_wr_data   = Q'(carry);
          len_wr_en   = (carry != '0);
          len_wr_data = LW'(widx + 1'b1);
        end else begin
          m_rd_en = 1'b1;
        end
      end
      U_MCALC: m_wr_en = 1'b1;
      U_DREAD: m_rd_en = 1'b1;
      U_DSHIFT: begin
        m_wr_en   = wpass && (cnt == CW'(Q - 1));
        m_wr_data = qword_next;
        if (wpass && cnt == CW'(Q - 1) && widx == '0) begin
          len_wr_en   = 1'b1;
          len_wr_data = nz_seen ? newlen : LW'(1);
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= U_INIT;
      op         <= RE_INSERT;
      flow_id    <= '0;
      key        <= '0;
      opb        <= '0;
      port       <= '0;
      widx       <= '0;
      carry      <= '0;
      r          <= '0;
      shreg      <= '0;
      qword      <= '0;
      cnt        <= '0;
      wpass      <= 1'b0;
      nz_seen    <= 1'b0;
      newlen     <= '0;
      status     <= RE_OK;
      rsp_valid  <= 1'b0;
      rsp_status <= RE_OK;
      rsp_opb    <= '0;
    end else begin
      rsp_valid <= 1'b0;
      unique case (state)
        U_INIT: begin
          if (p == PW'(PORTS - 1)) begin
            port  <= '0;
            state <= U_IDLE;
          end else begin
            port <= port + 1'b1;
          end
        end
        U_IDLE: if (cmd_valid && allow) begin
          op      <= cmd_op;
          flow_id <= cmd_flow_id;
          key     <= cmd_key;
          opb     <= (cmd_op == RE_INSERT) ? cmd_opb : '0;
          state   <= U_CHECK;
        end
        U_CHECK: begin
          port <= '0;
          if (op == RE_INSERT) begin
            if (ctl_flow_hit)             begin status <= RE_FLOW_EXIST; state <= U_RESP; end
            else if (key < KEY_W'(2))     begin status <= RE_BAD_KEY;    state <= U_RESP; end
            else if (ctl_key_hit)         begin status <= RE_KEY_IN_USE; state <= U_RESP; end
            else if (!free_valid)         begin status <= RE_TABLE_FULL; state <= U_RESP; end
            else if (any_full)            begin status <= RE_OVERFLOW;   state <= U_RESP; end
            else                          begin status <= RE_OK;         state <= U_MPORT; end
          end else begin
            if (!ctl_flow_hit) begin
              status <= RE_NOT_FOUND;
              state  <= U_RESP;
            end else begin
              status <= RE_OK;
              key    <= ctl_flow_key;
              state  <= U_DPORT;
            end
          end
        end
        // ---- Insert: multiply the key into every sub-scalar of the OPB ----
        U_MPORT: begin
          if (port == (PW+1)'(PORTS)) state <= U_RESP;
          else if (opb[p]) begin
            widx  <= '0;
            carry <= '0;
            state <= U_MREAD;
          end else port <= port + 1'b1;
        end
        U_MREAD: begin
          if (widx == (AW+1)'(len[p])) begin
            port  <= port + 1'b1;
            state <= U_MPORT;
          end else state <= U_MCALC;
        end
        U_MCALC: begin
          carry <= prod[Q+KEY_W-1:Q];
          widx  <= widx + 1'b1;
          state <= U_MREAD;
        end
        // ---- Remove: test each sub-scalar, divide the key out if a factor ----
        U_DPORT: begin
          if (port == (PW+1)'(PORTS)) state <= U_RESP;
          else begin
            widx    <= (AW+1)'(len[p] - 1'b1);
            r       <= '0;
            cnt     <= '0;
            nz_seen <= 1'b0;
            newlen  <= LW'(1);
            state   <= U_DREAD;
          end
        end
        U_DREAD: begin
          cnt   <= '0;
          state <= U_DSHIFT;
        end
        U_DSHIFT: begin
          r     <= r_next;
          shreg <= dcur << 1;
          qword <= qword_next;
          if (cnt == CW'(Q - 1)) begin
            if (wpass && !nz_seen && qword_next != '0) begin
              nz_seen <= 1'b1;
              newlen  <= LW'(widx + 1'b1);
            end
            if (widx == '0) begin
              // end of a pass
              if (!wpass && r_next == '0) begin
                wpass <= 1'b1;
                widx  <= (AW+1)'(len[p] - 1'b1);
                r     <= '0;
                state <= U_DREAD;
              end else begin
                if (wpass) opb[p] <= 1'b1;
                wpass <= 1'b0;
                port  <= port + 1'b1;
                state <= U_DPORT;
              end
            end else begin
              widx  <= widx - 1'b1;
              state <= U_DREAD;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        U_RESP: begin
          rsp_valid  <= 1'b1;
          rsp_status <= status;
          rsp_opb    <= (status == RE_OK) ? opb : '0;
          state      <= U_IDLE;
        end
        default: state <= U_IDLE;
      endcase
    end
  end

  initial assert (KEY_W <= Q) else $error("key wider than a memory word");

endmodule
