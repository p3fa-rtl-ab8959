# P3FA — a Per-Port Prime Filter Array forwarding engine in SystemVerilog

A packet forwarding engine has to answer one question for every packet: through
which output ports does this packet's flow leave? For a unicast flow the answer
is one port. For a multicast flow it is a set of ports, the *output port bitmap*
(OPB). P3FA stores the forwarding table as arithmetic instead of as a lookup
table:

* every flow `x` gets its own prime number, its key `k_x`;
* every port `s` keeps one long integer `M_CP(s)`, the product of the keys of
  all flows that leave through `s`.

Primes have no common factors, so `k_x` divides `M_CP(s)` exactly when flow `x`
leaves through port `s`. To forward a packet, the engine computes
`M_CP(s) mod k_x` for all ports at once, in one divider per port. A zero
remainder sets that port's bit in the OPB. A non-zero remainder clears it. The
divider of the port the packet came in on is switched off, so a packet never
goes back out of its ingress port.

The scheme comes from the paper "P3FA: Unified Unicast/Multicast Forwarding with
Low Egress Diversities" (Z. Jin, W.-K. Jia). Its motivation is that most flows
leave through only a few ports. The paper calls the average number of ports per
flow the *egress diversity* φ. When φ is low, each `M_CP(s)` holds only the keys
of the flows routed through `s`, so the scalars stay short. Short scalars use
little memory and are quick to divide. The paper describes the scheme at the
level of a block diagram and equations. This RTL fills in the rest, and the
sections below say which parts follow the paper and which are this
implementation's own choices.

## A worked example (4 ports)

Six flows with keys 3, 71, 7, 11, 13 and 17 give the scalars

| port | flows through it | M_CP |
|------|------------------|------|
| 1 | 3, 71 | 213 |
| 2 | 3, 7, 11, 13 | 3003 |
| 3 | 7, 11, 17 | 1309 |
| 4 | 11, 13, 17 | 2431 |

Inserting a new flow with key 23 routed to ports 3 and 4 multiplies those two
scalars by 23: `M_CP(3) = 30107` and `M_CP(4) = 55913`. A packet of this flow
arriving on port 1 is checked against ports 2, 3 and 4. The remainders are
`3003 mod 23 = 13`, `30107 mod 23 = 0` and `55913 mod 23 = 0`, so the OPB names
ports 3 and 4.

In the RTL, OPB vectors are written with the highest port on the left, and port
`s` of the text is bit `s-1`. The OPB of this flow is therefore `4'b1100`.
`tb/tb_p3fa_example.sv` replays this example through the complete engine.

## Block structure

```
 packet header ──► parser ──► prime hash ──► key ─────────┬──► divider 1 ◄── bank M_CP(1)
 + ingress port     (dst IP)   (flow table)               ├──► divider 2 ◄── bank M_CP(2)
                                   │                      │        ...
                              ingress port ──► ρ-DEMUX ──►└──► divider ρ ◄── bank M_CP(ρ)
                                               + inverters        │ remainders
                                               (enables)          ▼
                                                         OPB merge, zero test ──► OPB / drop
                                                                                 (to the switch fabric)
 routing-engine commands ──► update unit (Insert / Remove) ──► flow table, banks
```

| module | role |
|--------|------|
| `p3fa_parser` | Takes the IPv4 destination address of the header as the flow identifier. One register stage. |
| `p3fa_prime_hash` | Flow table that maps an identifier to its key. Lookup takes one cycle. An unknown identifier is a *miss*. |
| `p3fa_port_enable` | A ρ-output demultiplexer fed with a constant 1 and selected by the ingress port, followed by inverters. Every divider is enabled except the ingress port's. |
| `p3fa_divider` | One per port. Computes `M_CP(s) mod k` word by word from the port's own memory bank. |
| `p3fa_memory_unit` | One bank per port, `WORDS × Q` bits, with a length register. Each bank has its own data path to its divider. |
| `p3fa_opb_merge` | Turns each remainder into an OPB bit (zero → 1, else 0), masks the ingress port, counts the egress ports, and drops the packet when the OPB is empty. |
| `p3fa_update` | The routing engine's Insert/Remove, done in hardware on the flow table and the banks. Also initialises every `M_CP(s)` to 1 after reset. |
| `p3fa_diversity_monitor` | Keeps the egress diversity φ of the installed flows and flags φ > Φ for a preset threshold Φ. Also reports the scalar words in use. |
| `p3fa_top` | Wires the blocks together and sequences queries and updates. |
| `p3fa_pkg` | Default sizes, the bank-size function, and the command and status encodings. |

The routing protocols and the routing information base that decide the OPBs are
control-plane software. They are not part of this design: their decisions
arrive on the top's `cmd_*` port. The switch fabric that moves packets to the
ports is not part of it either: it receives the `out_*` result.

## The divider: where the latency comes from

The divider is the heart of the engine and sets its speed. `M_CP(s)` is a long
integer of `len` words of `Q` bits (default `Q = 32`). It is stored
little-endian, with the number of significant words in `len[s]`. The divider
reads the words most significant first. Each word is fetched in one cycle. It is
then shifted into the partial remainder `W` bits per cycle (default `W = 1`),
with a restoring step per bit:

```
r = 2·r + next_bit;   if (r >= k) r = r − k;
```

Before each step `r < k`, so `2r + 1 < 2k` and one subtraction is always
enough. The remainder register therefore needs only `KEY_W + 1` bits, however
long `M_CP(s)` is. The key is the divisor. The long integer is only ever read,
one word at a time, so the divider's hardware does not grow with the scalar.

Timing is exact and checked by the testbenches:

* divider: `done` comes `len·(Q/W + 1) + 1` cycles after `start`;
* whole engine: a packet of a known flow gets its result `4 + L·(Q/W + 1)`
  cycles after the engine accepts its header. `L` is the length in words of the
  longest enabled sub-scalar. The 4 extra cycles are the parser, the lookup,
  the divider's final cycle and the output register.

The latency therefore grows with the length of the longest scalar, not with the
total size of the table. This is the property the scheme relies on: with low
egress diversity every scalar is short. The paper models a divider's time with
the formula `T = (⌈|M_CP|/q⌉ + 1 + T_O)(q + 1 + T_O)(q/w)`, taken from the
divider design it cites. This implementation is also linear in `⌈|M_CP|/q⌉`,
but it spends `q/w + 1` cycles per word instead of `(q + 1)(q/w)`. The paper
gives no value for the shifter width `w` or the overhead `T_O`.

A disabled divider (the one for the ingress port) finishes the cycle after
`start`. Its remainder is ignored.

## Keeping the scalars up to date: Insert and Remove

`p3fa_update` executes one command at a time. The paper gives only the effect
of Insert, and only names Remove. The way both are carried out here is this
design's own.

**Insert(flow, key, OPB).** The command is rejected if the flow already exists,
the key is below 2, the key belongs to another flow, the table is full, or a
port in the OPB already has a full bank. Otherwise the flow is written into the
flow table and every `M_CP(s)` with `OPB[s] = 1` is multiplied by the key. The
multiplication runs least significant word first, one word every 2 cycles,
with a `KEY_W`-bit carry. A non-zero final carry becomes a new top word. The
check for a full bank is conservative: multiplying by a key below `2^Q` adds at
most one word, so a bank must have one word free.

**Remove(flow).** The flow's key is read from the table and its entry is freed.
The update unit does not need the OPB: the scalars themselves record it. For
each port, a first pass computes `M_CP(s) mod k` (1 bit per cycle). Only if the
result is zero does a second pass divide the key out exactly. That pass writes
each quotient word back in place, from the most significant word down, and
sets the new length to the highest non-zero quotient word. The response lists
the ports the key was removed from.

Keys are chosen by whoever sends the commands. The paper wants distinct primes,
preferably small ones. The hardware enforces distinctness and `k >= 2`, but
does not check that a key is prime. A composite key could falsely match the
scalar of a port that holds the key's factors.

**Queries and updates never overlap.** While a command is pending or running,
no new lookup starts and no packet enters the dividers, so packets wait in the
parser (`in_ready` low). The update unit only accepts a command when the query
path is empty. A packet therefore always sees either the old table or the new
one, never a half-updated scalar.

## Sizes

| parameter | default | where it comes from |
|-----------|---------|---------------------|
| `PORTS` (ρ) | 16 | Smallest port density the paper evaluates (16 … 1024). |
| `N_FLOWS` (n) | 256 | Smallest table size the paper evaluates (2^8 … 2^20). |
| `KEY_W` | 16 | The paper's keys are ρ bits wide. 6542 primes lie below 2^16, enough for 256 flows. |
| `Q` | 32 | The paper's 32-bit dividers and memory data paths. |
| `W` | 1 | Not given; one bit per cycle. |
| `WORDS` | 128 | Derived, `N_FLOWS·KEY_W/Q`: room for the worst case, every flow through one port. |
| `FLOW_ID_W` | 32 | IPv4 destination address. |

At the defaults the scalar memory is 16 banks × 128 words × 32 bits = 64 Kbit.
The flow table adds 256 × (32 + 16) bits. The longest possible query takes
4 + 128 × 33 = 4228 cycles. A realistic low-diversity table is much shorter:
the end-to-end test, with 256 flows of mostly one to three ports, produces sub-scalars of roughly 15 to 20 words, so queries of roughly 500 to 700 cycles.

Larger configurations follow from the parameters. Holding n = 2^12 flows needs
`N_FLOWS = 4096`, which makes `WORDS = 2048`. From n = 2^16 on, 16-bit keys run
out of primes, so `KEY_W` must grow beyond the paper's ρ bits. The flow table
is a fully associative search over `N_FLOWS` entries. It is the part that
scales worst in area.

## Watching the egress diversity

The scheme only pays off while φ stays low. Every port a flow uses adds its
key to one more scalar, so memory and query time grow with φ. The paper defines
φ as the total number of 1 bits in all OPBs divided by the number of flows n.
It calls φ above a preset threshold Φ "high" diversity. Past that threshold a
scheme that stores the table in a fixed number of bits would need less memory.

`p3fa_diversity_monitor` tracks φ without a divider. It keeps the numerator
and the denominator as two counters, and both change only when a command
succeeds. An Insert adds the number of ports in its OPB and one flow. A Remove
subtracts the number of ports the key was divided out of and one flow. The flag
`stat_high_diversity` compares `sum > Φ·n`. This is the same test as φ > Φ, but
it needs only a small multiplier, no divider. Φ is an input, a whole number
of ports. `stat_scalar_words` is the sum of the per-port length registers. It is
the memory the scalars actually occupy, in 32-bit words, and it can be compared
with any fixed-size alternative.

In the 4-port example above, the seven installed flows have 14 OPB 1 bits in
all. So φ = 2, which is above Φ = 1 and not above Φ = 2.

How much φ costs shows when the default engine is filled with 256 flows that
all use exactly φ ports, and random packets are sent through it
(`tb_p3fa_workload`, one random seed):

| φ | scalar memory in use (32-bit words) | average query latency (cycles) |
|---|------|------|
| 1 (unicast) | 125 | 397 |
| 4 | 470 | 1219 |
| 8 (ρ/2) | 923 | 2083 |
| 16 (broadcast) | 1840 | 3799 |

Both grow roughly in proportion to φ. Each flow adds its 16-bit key to φ
scalars, and a query takes as long as the longest scalar it divides. With
φ = ρ every scalar holds all 256 keys, about 115 of its 128 words.

## Interface of `p3fa_top`

* **Packets in:** `in_valid`/`in_ready`, `in_hdr[159:0]` (20-byte IPv4 header,
  byte 0 in bits 159:152, destination address in bits 31:0), and `in_ingress`.
* **Results out:** `out_valid`/`out_ready`, with `out_opb`, `out_n_egress`,
  `out_drop` (empty OPB or unknown flow), `out_miss` (unknown flow),
  `out_flow_id` and `out_ingress`. A result is held until it is taken. Only one
  packet is in the dividers at a time.
* **Commands:** `cmd_valid`/`cmd_ready`, with `cmd_op` (`RE_INSERT` or
  `RE_REMOVE`), `cmd_flow_id`, `cmd_key` and `cmd_opb`. Each command gets one
  response: `rsp_valid` for one cycle, `rsp_status` (an `re_status_e` code)
  and `rsp_opb`.
* **Egress diversity:** `phi_threshold` (Φ) in; `stat_n_flows`,
  `stat_egress_sum`, `stat_high_diversity` and `stat_scalar_words` out, all
  updated the cycle after a successful command.
* **Reset:** `rst_n` is asynchronous and active low. After reset the update
  unit spends `PORTS` cycles writing `M_CP(s) = 1`. `init_done` then rises.
  Memories are not reset; only their length registers are.

## Departures from the paper and open points

* **Prime hash.** The paper states only what it does: a unique key per flow,
  and the same key for the same identifier. Here it is an associative table
  filled by Insert, and an unknown flow is dropped as a miss. The paper does
  not say what happens to unknown flows.
* **Dividend and divisor.** The paper's block diagram labels the key "dividend"
  and the memory path "divisor". Its text, and the arithmetic, have it the
  other way round. The RTL follows the text.
* **OPB bit order.** The paper's example writes the new flow's OPB as
  {1,1,0,0}, yet updates and forwards to ports 3 and 4. The RTL reads that
  vector with the highest port on the left.
* **Memory timing.** The paper assumes 10 ns per memory access at a 2 GHz
  divider clock. The banks here read in one cycle, and the clock frequency is
  left to the implementation.
* **Divider schedule.** The timing is `q/w + 1` cycles per word, not the
  paper's `(q+1)(q/w)` model (see above).
* **Insert/Remove, the update/query exclusion, status codes, the header format,
  handshakes and reset:** all this design's own.
* The paper's remarks on (ρ+1)-bit and ⌈log2(ρ+1)⌉-bit keys concern the schemes
  it compares against, not P3FA, and are not used.
* **Counting φ.** The paper counts φ periodically. Here it is kept up to date
  at every command, and Φ is a whole number.
* Key allocation strategies, such as giving small primes to high-diversity
  flows, are mentioned in the paper only as future work and are not built.

## Simulating

All files are plain SystemVerilog-2017. Each testbench checks its own results
and ends with a `TB_RESULT checks=N failures=M` line. To build and run one with
Verilator:

```
verilator --binary --timing --assert -Irtl rtl/p3fa_pkg.sv tb/tb_p3fa_top.sv \
          --top-module tb_p3fa_top -Mdir obj_top
./obj_top/Vtb_p3fa_top
```

Sources are found by module name through `-Irtl`. Substitute any testbench
below.

| testbench | what it shows |
|-----------|---------------|
| `tb_p3fa_parser` | Identifier extraction, one-cycle latency, back-pressure. |
| `tb_p3fa_prime_hash` | Hit, miss, same key for the same identifier, control searches, free-entry search, invalidation. |
| `tb_p3fa_port_enable` | For every ingress port, exactly its divider is disabled (16 and 5 ports). |
| `tb_p3fa_opb_merge` | Random remainders and enables against a bit-by-bit reference; the example's remainders. |
| `tb_p3fa_divider` | Random long integers up to 128 words against 64-bit reference arithmetic, for W = 1 and W = 4. Exact cycle counts. The example's three divisions. A product containing the key. |
| `tb_p3fa_memory_unit` | Parallel bank reads, the update read port, held outputs, length registers. |
| `tb_p3fa_update` | Every scalar compared after every command with the product of the installed keys. All error codes, bank overflow, random insert/remove (4 ports, 8 flows, 3-word banks). |
| `tb_p3fa_diversity_monitor` | Random inserts and removes against a list of OPBs. Flow count, OPB 1-bit sum and word count after every event. The flag for every Φ from 0 to 8, including the empty table. |
| `tb_p3fa_workload` | The default engine filled with 256 flows of exactly φ ports, for φ = 1, 4, 8, 16, with a reset between phases. OPBs, exact latencies and statistics. Latency and memory must grow with φ. |
| `tb_p3fa_example` | The 4-port worked example end to end, including remove and its φ = 2. |
| `tb_p3fa_top` | The default configuration end to end: 256 flows with mostly low egress diversity, over 400 packets, and churn. Checks every OPB against set membership and every undisturbed packet's latency. Each of these must occur at least once: unicast, multicast, broadcast, ingress masking, drop, miss, table full, a packet held off by a command, output back-pressure, φ both above and below Φ. After every command the diversity statistics are checked too. It runs in seconds. |

The testbenches draw their stimulus from `$urandom`. They assume that
variables start at random values (Verilator `+verilator+rand+reset+2`) and
reset or initialise everything they read.
