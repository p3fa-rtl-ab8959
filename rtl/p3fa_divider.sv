// p3fa_divider -- per-port very-long-integer modulo unit.
//
// Computes R = M_CP(s) mod k, where the sub-scalar M_CP(s) is a long integer
// of `len` words of Q bits held in this port's memory bank and k is the prime
// key of the packet's flow. The dividend is consumed most significant word
// first: each word is fetched over the Q-bit data path, then shifted in W bits
// per cycle through a restoring step r = 2r + bit; if (r >= k) r -= k. The
// partial remainder is always below k, so one compare/subtract per bit is
// enough and the remainder register is KEY_W + 1 bits wide.
//
// Interface: `start` (one cycle) with `enable`, `key` and `len`; a synchronous
// memory read port (address + read enable, data one cycle later); `done`
// (one cycle) with the remainder, held until the next start. A disabled
// divider (the ingress port) finishes at once with remainder 0; the OPB logic
// masks it.
// Timing: an enabled divider raises `done` exactly len*(Q/W + 1) + 1 cycles
// after the start cycle: one fetch cycle plus Q/W shift cycles per word, and
// one final cycle. A disabled divider or len = 0 raises `done` the cycle after
// start.
//
// From the paper: one divider per port, M_CP(s) as dividend and the key as
// divisor, q-bit words and a w-bit shifter, so that the latency grows with
// ceil(|M_CP|/q) as in its latency formula. This design's choices: the
// restoring algorithm, the word-serial schedule and the one-cycle fetch.
module p3fa_divider
  import p3fa_pkg::*;
#(
  parameter int unsigned Q     = Q_DEF,
  parameter int unsigned KEY_W = KEY_W_DEF,
  parameter int unsigned W     = W_DEF,
  parameter int unsigned WORDS = mcp_words(N_FLOWS_DEF, KEY_W_DEF, Q_DEF),
  localparam int unsigned AW = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned LW = $clog2(WORDS + 1),
  localparam int unsigned STEPS = Q / W,
  localparam int unsigned CW = (STEPS > 1) ? $clog2(STEPS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             enable,
  input  logic [KEY_W-1:0] key,
  input  logic [LW-1:0]    len,
  output logic             mem_rd,
  output logic [AW-1:0]    mem_addr,
  input  logic [Q-1:0]     mem_rdata,
  output logic             busy,
  output logic             done,
  output logic [KEY_W-1:0] remainder
);

  typedef enum logic [1:0] {S_IDLE, S_FETCH, S_SHIFT, S_DONE} state_e;

  state_e           state;
  logic [AW-1:0]    idx;
  logic [CW-1:0]    cnt;
  logic [Q-1:0]     shreg;
  logic [KEY_W-1:0] k;
  logic [KEY_W-1:0] r;

  // The word being shifted: fresh from memory on the first step.
  logic [Q-1:0] cur;
  assign cur = (cnt == '0) ? mem_rdata : shreg;

  // W restoring steps in one cycle.
  logic [KEY_W-1:0] r_next;
  always_comb begin
    logic [KEY_W:0] t;
    r_next = r;
    for (int j = 0; j < W; j++) begin
      t = {r_next, cur[Q-1-j]};
      if (t >= {1'b0, k}) t = t - {1'b0, k};
      r_next = t[KEY_W-1:0];
    end
  end

  assign mem_rd    = (state == S_FETCH);
  assign mem_addr  = idx;
  assign busy      = (state != S_IDLE);
  assign done      = (state == S_DONE);
  assign remainder = r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      idx   <= '0;
      cnt   <= '0;
      shreg <= '0;
      k     <= '0;
      r     <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          k   <= key;
          r   <= '0;
          cnt <= '0;
          if (!enable || len == '0) begin
            state <= S_DONE;
          end else begin
            idx   <= AW'(len - 1'b1);
            state <= S_FETCH;
          end
        end
        S_FETCH: begin
          cnt   <= '0;
          state <= S_SHIFT;
        end
        S_SHIFT: begin
          r     <= r_next;
          shreg <= cur << W;
          if (cnt == CW'(STEPS - 1)) begin
            cnt <= '0;
            if (idx == '0) state <= S_DONE;
            else begin
              idx   <= idx - 1'b1;
              state <= S_FETCH;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  initial begin
    assert (Q % W == 0) else $error("W must divide Q");
    assert (KEY_W <= Q) else $error("key wider than the divider word");
  end

endmodule
