# Charon load balancer — SystemVerilog match-action datapath

A layer-4 load balancer in a data center has to send every new connection to
one of many application servers behind a virtual IP, and then keep sending
every later packet of that connection to the same server. Charon does both
without a per-connection table, and it picks servers by how busy they are:

* **Load-aware choice.** For a new connection (a client `SYN`), two candidate
  servers are drawn at random, weighted by the servers' capacities. The one
  whose *predicted* backlog is lower wins. This is the power-of-two-choices
  scheme.
* **Passive feedback.** A server answers a `SYN` with a `SYNACK`, which it
  sends back through the load balancer inside a GRE tunnel. The GRE key
  carries the server's current backlog `g` and its drain rate `v`. The load
  balancer stores both, with the time it received them, in a *Score Table*.
  Between two reports it extrapolates the backlog linearly.
* **Stateless consistency.** The server writes its own id into the top 4 bits
  of its TCP timestamp. The client echoes that value in every later packet,
  so the load balancer reads the id from the packet and looks up the server's
  address in an *IP Table*. It keeps no flow table.

This RTL implements the match-action part of that load balancer, following
the design in *Charon: Load-Aware Load-Balancing in P4* (Rizzi, Yao,
Desmouceaux, Townsley, Clausen). The original was built with the P4-NetFPGA
tool chain around one hand-written Verilog extern, `dip_reg_score`. Here that
extern is rebuilt from its published state-machine description. The
surrounding P4 pipeline is written as plain SystemVerilog that works on
already-parsed headers.

## The three packet paths

| packet | class | what happens | request to `dip_reg_score` {index0, index1, data, opCode} |
|---|---|---|---|
| client `SYN` | `CLS_SYN` | two hashes of the 5-tuple → two Alias Tables → two weighted candidates; `dip_reg_score` picks the less loaded one and charges it one flow; the IP Table gives its address; the packet leaves GRE-encapsulated towards it | {cand0, cand1, ts_now, `GET_IND_OP`} |
| server `SYNACK` | `CLS_SYNACK` | the feedback in the GRE key is written into the Score Table for the server whose id is in TSval; GRE and the outer IP header are stripped; the packet goes on to the client | {id, 0, blob, `UPDATE_OP`} |
| anything else from a client | `CLS_OTHER` | the id is read from TSecr; the packet is tunnelled to that server (the server replies directly to the client) | {0, 0, id, `COPY_OP`} |

A non-`SYN` client packet without a timestamp option has no server id. It
is marked `drop`.

## The score

Each Score Table entry is a 72-bit *blob*:

```
 71            40 39             8 7      0
+----------------+----------------+--------+
|  g  (32 bits)  |  t  (32 bits)  | v (8b) |
+----------------+----------------+--------+
```

* `g` is the backlog at the time `t`, in fixed point: one flow is `1<<20`.
* `t` is the time of the last update, in `ts_now` units. `ts_now` is a free
  clock-cycle counter shifted right by 11, so one unit is 2048 cycles.
* `v` is how much backlog the server drains per `ts_now` unit.

The predicted backlog at time `now` is

```
g' = max(0, g - v * (now - t))          (now - t taken modulo 2^32)
```

For a `SYN`, both candidates' `g'` are computed at the same `now`. The
candidate with the strictly lower `g'` wins; on a tie the second candidate
wins. The winner's `g'` is raised by `1<<20`. **Both** entries are then
written back with their new `g'` and `t = now`, so that the decay already
predicted is committed.

Worked example (the numbers of the design's own illustration, used by the
testbenches): entry 0 = {g=1, v=2, t=5} and entry 1 = {g=3, v=1, t=7}. At
`now = 8`, `g'0 = max(0, 1-2·3) = 0` and `g'1 = 3-1·1 = 2`. Server 0 is
chosen, so entry 0 becomes {2^20, 2, 8} and entry 1 becomes {2, 1, 8}.

The server's 32-bit GRE key is read as `{g[31:8], v[7:0]}`. The server sends
the top 24 bits of its backlog in the same fixed point, and the load balancer
appends 8 zero bits.

## `dip_reg_score`: the read-modify-write engine

This is the heart of the design, and the only part whose inside the original
describes in detail. It has three parts:

```
            data_in_valid/ready, data_in {opCode,index0,index1,data}
                         |
                   +-----v------+   (64 entries, first-word-fall-through)
                   |  sync_fifo |
                   +-----+------+
                         | head, rd_en
                +--------v----------+      addr/din/we      +------------+
                | rmw_state_machine |---------------------->| score_bram |
                |                   |<----------------------| 16 x 72    |
                +--------+----------+   dout (2-cycle read) +------------+
                         |
              OUTPUT_VALID, OUTPUT (one pulse per request, in order)
```

The block RAM is registered on both the address and the data side, so a word
comes out two cycles after its address goes in. The state machine is built
around that latency. It has two top-level states, `RMW_START` and
`WAIT_BRAM`, which are split into sub-states:

| cycle | sub-state | action |
|---|---|---|
| 0 | `READ_FIFO` | wait for a request; pop it and latch index0, index1, data |
| 1 | `UPDATE_OP` | write data at index0; result = data |
| 1 | `COPY_OP` | result = data |
| 1 | `GET_IND_OP_1` | address ← index0 |
| 2 | `GET_IND_OP_2` | (RAM busy) |
| 3 | `GET_IND_OP_3` | blob0 ← RAM; address ← index1; ts_now ← data |
| 4 | `GET_IND_OP_4` | (RAM busy) → `WAIT_BRAM` |
| 5 | `GET_IND_OP_0` | blob1 ← RAM; score0, score1 ← g' of blob0, blob1 |
| 6 | `GET_IND_OP_1` | compare; add `1<<20` to the lower; remember its index |
| 7 | `GET_IND_OP_2` | write {score0, ts_now, v0} at index0 |
| 8 | `GET_IND_OP_3` | write {score1, ts_now, v1} at index1; result = chosen index |

So a `GET_IND_OP` holds the engine for 9 cycles and the two other operations
for 2. The result register is loaded at the end of the last sub-state and
`OUTPUT_VALID` is high for one cycle.

Two cases are worth checking when changing this code:

* **index0 = index1.** Both candidates are then the same server. The scores
  are equal, so the second candidate wins and is charged. Its write in the
  last sub-state comes after the first write, so the stored value is the
  charged score, which is correct.
* **Back-to-back operations.** Each write lands at a clock edge before the
  next request's first read address is presented. An update is therefore
  visible to the very next `GET_IND_OP`, and no forwarding is needed.

The original keeps the sub-state in two counters (`ind_op`, `able_read`) and
pops its queue on every `READ_FIFO` cycle, using the read enable as the
result's valid bit. Here the sub-state is one enumerated register, and
`READ_FIFO` waits while the queue is empty. The results and timing are the
same. While reset is held the engine neither pops nor writes. Without that
gating, a random power-up state could write garbage into the RAM.

## Weighted candidates: the alias method

Each Alias Table has 16 entries of {threshold, alias}. A lookup takes an
entry index `i` (the low 4 bits of a 5-tuple CRC) and an 8-bit random number
`r`. It returns `i` if `r < threshold[i]`, and `alias[i]` otherwise. If the
control plane fills the table with Vose's construction from the server
weights (threshold in 1/256 units), server `k` is drawn with probability
proportional to its weight, from one memory read and one compare.

The two candidates come from two separate tables. Hash 0 is CRC-32
(0x04C11DB7) and hash 1 is CRC-32C (0x1EDC6F41). Both run MSB first over
{src_ip, dst_ip, proto, sport, dport}, 296 bits, starting from all ones. The
random numbers come from two free-running 16-bit LFSRs with different seeds.
The hash functions, the random source and the 8-bit threshold are choices
made in this RTL; the original does not specify them.

## Top level: `charon_lb`

```
in_hdr ─┬─ tuple_hash ×2 ─ alias_table ×2 ─┐
        ├─ server_id_extract ──────────────┼─ tcp_flag_dispatch ─ dip_reg_score ─┐
        │  timestamp_gen ──────────────────┘                                    │
        └──────────── descriptor queue (128) ───────────────────────────────────┼─ ip_table ─ header_update ─ out_hdr
```

* **Ingress is combinational.** A packet is taken in the cycle where
  `in_valid && in_ready`. `in_ready` falls when `dip_reg_score`'s 64-entry
  queue is full. This happens with back-to-back `SYN`s, because a `SYN`
  needs 9 cycles.
* **The descriptor queue** holds each packet's headers while its request is
  in `dip_reg_score`. Results come back in order, so each result pops one
  descriptor.
* **Egress.** For a `SYN` the server id is the result; for other packets it
  is the id from the timestamp. The id addresses the IP Table, and
  `header_update` fills `out_hdr`. `out_valid` and `out_hdr` are registered.
* **Latency**, with `dip_reg_score` idle: a `SYN` taken in cycle *n* is out in
  cycle *n+11*; any other packet in cycle *n+4*. A steady stream of one
  packet every 16 cycles therefore sees constant latency. This is the flat
  profile the original reports for its 600-packet burst, where the `SYN`
  path is the longer one.
* **Configuration.** `cfg_alias_*` (a write enable per table), `cfg_ip_*`,
  and the load balancer's own IP and MAC and the next-hop MAC.

`header_update` builds the output headers as follows:

* **Client packets:** the outer IP header (LB → server address) and the GRE
  header (key 0) are marked valid. The client's IP header becomes the inner
  one.
* **Server packets:** the outer header and GRE are marked invalid.
* **Layer 2:** the Ethernet addresses are rewritten in both directions.

## What is not here

* **Parser and deparser.** In the original, the P4 compiler generates these
  from the P4 program. The input of `charon_lb` is therefore a parsed-header
  struct (`pkt_hdr_t`), and its output is the header fields plus valid bits
  for a deparser (`out_hdr_t`).
* **Control plane.** It computes the alias tables from the weights, about
  once per second, and loads the IP Table. The original loads the IP Table
  with special packets whose format is not published, so this RTL uses a
  plain write port instead.
* **Server agent, NetFPGA MACs and PCIe.** These are outside the load
  balancer.
* **One interface only.** As in the original prototype's simulation, the RTL
  has a single packet pipeline, not four.

## Where this RTL departs from, or adds to, the original

* `max(0, …)` is applied to the predicted score. The original's prose has
  it, but the formula in its state-machine figure does not.
* The alias rule is `r >= threshold → alias`. The original's example uses
  this form; its prose says "bigger than".
* `dip_reg_score` gained `rst_n` and `data_in_ready`.
* These are choices made in this RTL:
  * the GRE key split `{g[31:8], v}`;
  * taking the id from TSval for server packets and from TSecr for client
    packets;
  * the descriptor queue;
  * the cfg ports;
  * the drop flag;
  * the clock-cycle timestamp.
* Score additions wrap at 32 bits, as in the original's state machine; they
  do not saturate.
* A footnote of the original says that changes to the timestamp touching
  more than 24 bits are ignored. That rule is not implemented, because its
  hardware meaning is not given.

## Sizes

All sizes are in `charon_pkg`:

* 16 servers (4-bit id);
* a 64-entry request queue;
* a 72-bit blob (32/32/8);
* `ts_now` = timestamp >> 11;
* one flow = `1<<20`.

The first four are the original prototype's sizes; so is the `1<<20` step.
The other widths are this RTL's: the 8-bit alias threshold, 128-bit
addresses, and the 32-bit GRE key and TCP timestamp fields of the protocols.

Going to 64 servers, as in the original's fairness simulations, means
setting `N_SERVERS = 64`. This gives 6-bit ids, still within the 8-bit limit
the original allows. Every table, width and testbench follows from that one
constant. With it changed, the end-to-end test passes unchanged, and the
latencies stay 4 and 11 cycles. The constant must stay a power of two,
because the candidate's entry index is taken from the low bits of the hash.

## Files

| file | contents |
|---|---|
| `rtl/charon_pkg.sv` | sizes, `opcode_e`, `score_req_t`, `pkt_hdr_t`, `out_hdr_t`, `d_stack`, `get_score` |
| `rtl/charon_lb.sv` | top level |
| `rtl/dip_reg_score.sv` | queue + state machine + Score Table |
| `rtl/rmw_state_machine.sv` | read-modify-write controller |
| `rtl/score_bram.sv` | 16 × 72 RAM, 2-cycle read |
| `rtl/sync_fifo.sv` | first-word-fall-through queue |
| `rtl/alias_table.sv`, `rtl/lfsr_rng.sv`, `rtl/tuple_hash.sv` | candidate draw |
| `rtl/ip_table.sv`, `rtl/server_id_extract.sv`, `rtl/timestamp_gen.sv` | lookups |
| `rtl/tcp_flag_dispatch.sv`, `rtl/header_update.sv` | match-action stages |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_model_pkg.sv` | reference score, blob packing and CRC used by the testbenches |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. It
also has a watchdog. To run the end-to-end test at the default sizes:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/charon_pkg.sv tb/tb_model_pkg.sv rtl/*.sv tb/tb_charon_lb.sv \
  --top-module tb_charon_lb -o sim
./obj_dir/sim
```

It takes under a second and runs four phases:

1. The 600-packet burst, one packet every 16 cycles: 16 established-flow
   packets, then 584 `SYN`s. Latency must be constant per kind, 4 and 11
   cycles.
2. A `SYNACK` from every server, then an idle stretch long enough for some
   predicted scores to decay to zero.
3. 200 back-to-back `SYN`s, which fill the queue and stall the input.
4. A random mix of all packet kinds, including packets without a timestamp
   option.

Every output header is compared with a reference model that lives in the
testbench: its own hashes, alias tables, IP Table and Score Table. At the
end, the RAM contents are compared with the model's Score Table. The test
also counts how often each mechanism happened:

* alias draws and entry draws;
* the first candidate chosen and the second candidate chosen;
* a score clamped at zero;
* back-pressure;
* encapsulation, decapsulation and drop.

A mechanism that never happened counts as a failure.

The unit testbenches cover the rest:

* `tb_rmw_state_machine` and `tb_dip_reg_score` check the worked example, the
  9- and 2-cycle occupancy, the 4-cycle `WAIT_BRAM`, and back-pressure
  without loss.
* `tb_alias_table` checks every (index, random) pair, and a 64k-draw
  weighted distribution against a Vose table.
* `tb_tuple_hash` checks a byte-wise CRC reference, itself validated on the
  standard check value.

## How far to trust it

* **`dip_reg_score`** follows the published sub-states one for one, and is
  checked against an independent model.
* **The pipeline around it** follows the published field mapping. Its
  handshakes, widths and header fields are reasonable choices, not the
  original's.
* **Not exercised:** nothing has been run on hardware or against a real
  packet parser. Timing closure at the platform's clock rate is also
  unknown: the 296-bit CRCs and the 32 × 8 multiply are combinational.
