# A SYN-authentication proxy data plane in SystemVerilog

A SYN flood tries to exhaust a server with TCP connection requests (SYN
segments) sent from spoofed source addresses. Every such SYN makes the server
keep a half-open connection or compute a SYN cookie. This design moves the
defence onto a separate device in front of the servers. The device answers
every first connection attempt itself and passes a client on only after the
client has shown that it really owns its source address.

The method is *SYN authentication*:

1. A client that is not yet known sends a SYN. The proxy answers it with a
   SYN/ACK whose sequence number `y` it chooses itself.
2. A real client completes the handshake with an ACK whose acknowledgement
   number is `y + 1`. A spoofing attacker never sees the SYN/ACK, so it cannot
   send this ACK. On the ACK, the proxy records the client's source address in
   a whitelist and answers with a RST (sequence number `y + 1`). This closes
   the half-made connection.
3. The client's TCP stack (or browser) retries. The retried SYN and every later
   segment from that address are now forwarded to the server unchanged.

Two variants are built, selected at run time by the `mode` input:

* **Auth_full** whitelists on any completing ACK. It needs no hashing, so it is
  cheap. A flood of forged ACKs can still get addresses whitelisted.
* **Auth_cookie** makes `y` a cryptographic cookie. This is a 24-bit SipHash of
  the connection's addresses, ports and a coarse timestamp. An ACK is accepted
  only if `ack - 1` is a valid, recent cookie for its own 4-tuple. Forged ACKs
  are then dropped.

The proxy never creates a packet. Every reply is the received packet with
some fields rewritten: addresses and ports swapped, new sequence number,
acknowledgement number and flags, new MAC addresses and an updated TCP
checksum. This is how a match-action (P4-style) pipeline works, and it keeps
the datapath small. Each SYN of a flood costs exactly one reflected reply and
never reaches a server.

## What the data plane does with each segment

| Ingress side | Whitelisted | Segment (TCP flags) | Auth_full | Auth_cookie |
|---|---|---|---|---|
| server | – | anything | forward | forward |
| client | yes | anything | forward | forward |
| client | no | SYN without ACK/RST | reflect as SYN/ACK | reflect as SYN/ACK with cookie |
| client | no | ACK without SYN/RST | reflect as RST, whitelist the source | if the cookie verifies: RST and whitelist; otherwise drop |
| client | no | anything else (RST, FIN, SYN/ACK, ...) | drop | drop |
| any | – | not IPv4/TCP, or IPv4 with options | forward | forward |

A forwarded packet goes to the egress port that the port table gives for its
ingress port. A reflected packet leaves on its ingress port. In both cases the
MAC addresses are set from the MAC table entry of the egress port. Only the
SYN/ACK and the RST get new TCP fields:

| Field | SYN/ACK | RST |
|---|---|---|
| IP source / destination | swapped | swapped |
| TCP ports | swapped | swapped |
| sequence number | cookie (Auth_cookie) or `{ts, mss_code, 24'b0}` (Auth_full) | the client's acknowledgement number (`y + 1`) |
| acknowledgement number | client's sequence number + 1 | 0 |
| flags | SYN, ACK | RST |
| TCP checksum | updated incrementally | updated incrementally |

Everything else, including TCP options and the IP TTL, is left as received.
The IP header checksum needs no change, because swapping two 16-bit-aligned
fields does not change a one's-complement sum. For the same reason the TCP
checksum only has to account for the five 16-bit words that really change
(sequence, acknowledgement, offset/flags). `tcp_csum_update` applies the
incremental rule `HC' = ~(~HC + Σ~m + Σm')` and never needs the payload.

## The cookie

```
 31      27 26    24 23                                 0
+----------+--------+------------------------------------+
| ts (5 b) | mss(3b)|   SipHash-2-4(key, msg)[23:0]      |
+----------+--------+------------------------------------+
msg = saddr(4) | daddr(4) | sport(2) | dport(2) | {000, ts}(1)   -- 13 bytes, network order
```

* `ts` is a 5-bit timestamp that advances every 64 s (`timestamp_counter`,
  `TICK_CYCLES` clocks per step). It wraps about every 34 minutes.
* `mss` encodes the client's MSS option. The code is the index of the largest
  entry of {536, 1024, 1220, 1300, 1360, 1400, 1440, 1460} that is not above
  the offered MSS, or 0 without an MSS option. In this proxy the connection is
  reset anyway, so the code is carried for completeness and is not hashed.
* Verification recomputes the hash with the timestamp found in the cookie.
  The cookie is accepted if the hash matches and the cookie is at most
  `MAX_AGE` (default 1) steps old, computed modulo 32. With the defaults a
  client has between 64 s and 128 s to answer.

`siphash` is SipHash-2-4 as published. It uses a 128-bit key and four 64-bit
state words, and computes one SipRound per clock. A 13-byte message is two
8-byte blocks. With two compression rounds per block and four finalisation
rounds, that is 8 rounds, and the result arrives on the 9th clock edge after
`start`. `cookie_unit` adds one register stage, so a cookie request is
answered 10 cycles later. The key is an input of the top (`cookie_key`) and is
meant to be set by the control plane.

## The whitelist and how it forgets

The whitelist (`whitelist`) is a plain bitmap indexed by the client's IPv4
source address. No hashing is needed and no collisions are possible. Each
address has a 2-bit entry, and the address is whitelisted while either bit
is set. The two bits implement second-chance ageing:

* a successful lookup sets the entry to `11`, and so does an insert;
* a background *ageing pass* visits every entry and shifts it right
  (`11 -> 01 -> 00`);
* an address that sends nothing during two passes falls to `00` and must
  authenticate again.

A pass starts every `SWEEP_INTERVAL` cycles, or on `sweep_req`. With the
default of 10 minutes at 200 MHz, an idle client is forgotten after 10 to 20
minutes.

**Memory organisation.** 2^32 entries of 2 bits are 1 GiB. They are stored 32
to a 64-bit word, in 2^27 words. Entry `a` is in word `a[31:5]`, bits
`2*a[4:0] +: 2`. The array has one read port and one write port. The write
port has a write enable per entry, so an insert or refresh writes only its own
2 bits, without reading the word first. An ageing pass reads a whole word and
writes back the aged word, 32 entries at a time. A full pass therefore takes
2^27 memory cycles, about 0.7 s at 200 MHz, when there is no traffic.

**Sharing the ports.** The packet datapath always has priority. The sweeper
issues a read only in a cycle with no lookup. It writes back only in a cycle
with no insert or refresh, and holds the write-back until then. The race to
avoid is this: the sweeper reads word *w*, the datapath then sets an entry in
*w* to `11`, and the sweeper's write-back of the old, aged word overwrites
that `11`. To prevent it, the sweeper tracks which entries of its word the
datapath has written since the read: in the read cycle, in the following
cycle, and while the write-back waits. It leaves those entries out of its
write-back. A new or refreshed entry is therefore never aged by a pass that was
already running.

**After reset.** The memory's contents are unknown after reset, so the
sweeper first runs a clearing pass that writes zeros, one word per cycle.
`init_done` (the top's `ready_init`) rises when it ends, 2^27 + 1 cycles after
reset (0.67 s at 200 MHz). Until then the top does not accept packets.

## Packet path and timing

Packets enter and leave as AXI4-Stream-like beats of 512 bits (`s_t*`,
`m_t*`), with the ingress or egress port number as side-band (`s_tport`,
`m_tport`). Byte 0 of the frame is in bits [511:504]. A beat carries 64
bytes, so the Ethernet (14 B), IPv4 (20 B) and TCP (20 B) headers and a
leading 4-byte MSS option are all in the first beat. `pkt_parser` overlays
packed structs on that beat. `pkt_deparser` writes the rewritten headers back.

`syn_proxy_top` handles one packet at a time:

| Cycle | State | What happens |
|---|---|---|
| 0 | IDLE | first beat accepted and parsed; whitelist lookup issued |
| 1 | LOOKUP | whitelist answer; action decided; cookie request if Auth_cookie needs one |
| 2 ... 11 | HASH | only with a cookie: wait for the cookie unit (10 cycles) |
| 2 or 12 | EMIT | rewritten first beat offered (or dropped); whitelist insert on a verified ACK |
| ... | BODY / DRAIN | further beats are passed through (or discarded) at one beat per cycle |

A minimum-size packet takes 3 cycles without a cookie and 13 with one. At a
200 MHz clock that is 66.7 Mpps and 15.4 Mpps. Line rate for 10 GbE is 14.88
Mpps of minimum-size frames, so both modes keep up with a 10 GbE SYN flood on
one port. Back-pressure on `m_tready` stalls the proxy. An offered beat is held
stable until it is taken, and an immediate assertion in the top checks this.

## Top-level interface (`syn_proxy_top`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `s_tvalid/s_tready/s_tdata/s_tkeep/s_tlast/s_tport` | in (`s_tready` out) | 1/1/512/64/1/2 | ingress stream |
| `m_tvalid/m_tready/m_tdata/m_tkeep/m_tlast/m_tport` | out (`m_tready` in) | 1/1/512/64/1/2 | egress stream |
| `mode` | in | 1 | `MODE_AUTH_FULL` or `MODE_AUTH_COOKIE` |
| `cookie_key` | in | 128 | SipHash key |
| `cfg_we/cfg_sel/cfg_addr/cfg_data` | in | 1/1/2/96 | table writes: `cfg_sel=0` port entry `{client_side, egress}`, `cfg_sel=1` MAC entry `{src_mac, dst_mac}` |
| `sweep_req` | in | 1 | start an ageing pass now |
| `ready_init` | out | 1 | whitelist cleared; traffic accepted |
| `wl_sweeping`, `wl_sweep_count` | out | 1, 32 | ageing status |
| `cnt_forward/cnt_synack/cnt_rst/cnt_drop/cnt_cookie_fail` | out | 32 each | packet counters |

After reset, port *i* forwards to port *i*^1, even ports face the clients, and
all MACs are zero. A control plane is expected to write the MAC table and the
key before traffic starts.

## Parameters

| Parameter (top) | Default | Meaning |
|---|---|---|
| `WL_IDX_W` | 32 | whitelist index bits; entries = 2^`WL_IDX_W`, memory = 2^(`WL_IDX_W`-5) x 64 bit |
| `SWEEP_INTERVAL` | 120 000 000 000 | cycles between ageing passes (10 min at 200 MHz) |
| `TICK_CYCLES` | 12 800 000 000 | cycles per cookie timestamp step (64 s at 200 MHz) |
| `MAX_AGE` | 1 | oldest accepted cookie, in timestamp steps |

If `WL_IDX_W` < 32, the whitelist is indexed by the low source-address bits.
Different clients then share entries. The reduced-size testbench takes this
into account. The defaults assume a 200 MHz clock. For another clock, scale
`SWEEP_INTERVAL` and `TICK_CYCLES` to match.

The full-size whitelist is a 1 GiB array. A simulator handles it: the
full-size testbench needs about 1 GB of memory and under two minutes with
Verilator, most of it for the clearing pass. A real device would keep the
bitmap in external DRAM behind a memory controller, which is not part of this
code. Synthesis tools that elaborate memories word by word need a great deal
of time and memory at this size. Use a smaller `WL_IDX_W` for synthesis
experiments.

## Design choices and departures

The following follow the published description: SYN authentication in its
Auth_full and Auth_cookie forms, the message exchange, the 5/3/24-bit cookie
over the 4-tuple and timestamp with a 64 s step, SipHash as the hash, the
bitmap whitelist over the IPv4 source address with two second-chance bits and
a periodic pass that clears one bit, the L2-forwarding core with MAC rewrite by
table lookup, and reply generation by rewriting the received packet, with only
the TCP checksum to update.

These are choices of this implementation:

* the bus: 512-bit beats, byte order, and the port number as side-band;
* parsing only option-less IPv4 headers, and looking only at the first TCP
  option for the MSS;
* the cookie field order, the hashed message layout, `MAX_AGE = 1` and the
  MSS table;
* the SYN/ACK sequence number in Auth_full (`{ts, mss_code, 24'b0}`); it is
  never checked;
* forwarding non-TCP traffic and all server-side traffic; dropping other
  unauthenticated client segments;
* the 200 MHz clock behind the default tick and sweep values, and the 10-minute
  sweep interval (derived from a typical 10-minute connection timeout);
* the one-packet-at-a-time sequencing and its timing;
* the memory packing, port arbitration and post-reset clearing pass of the
  whitelist;
* the incremental checksum method.

In the prototype that this design follows, the hardware whitelist was a
match-action table filled by the control plane through digest messages. Here
the bitmap is written directly from the data plane, so a client is whitelisted
the moment its ACK is accepted, with no round trip through software.
Likewise, the cookie timestamp comes from a free-running counter in the data
plane (`timestamp_counter`). The control plane does not write it into a table.
Both ways of providing the timestamp are possible in a P4 data plane.

## Not included

* The control plane (table writes, key management) is represented only by the
  `cfg_*`, `cookie_key`, `mode` and `sweep_req` inputs.
* The Ethernet MACs/PHYs connect to the packet-stream ports.
* A transparent SYN-cookie proxy (second handshake with the server and
  per-flow sequence-number translation) is not included. Neither is buffering
  of the client's first data segment.

## Verification

Each module has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb_util_pkg` holds the
reference models: a straight-line SipHash-2-4, a packet builder, and a
from-scratch TCP checksum.

| Testbench | What it checks |
|---|---|
| `tb_siphash` | the published SipHash-2-4 vector (key 00..0f, message 00..0e → `a129ca6149be45e5`), 200 random messages of 0 to 16 bytes against the model, and the latency |
| `tb_cookie_unit` | cookie layout and hash, acceptance at age 0 and 1, rejection at age 2, after a bit flip and for another tuple, 10-cycle latency |
| `tb_whitelist` | at 4096 entries: clearing time, insert and lookup, refresh, one bit per pass, removal after two passes, no ageing of entries touched during a pass, the interval timer |
| `tb_pkt_parser`, `tb_pkt_deparser` | every field, TCP classification, MSS option |
| `tb_tcp_csum_update` | 500 rewritten segments re-checked with a full checksum |
| `tb_auth_decision` | all 512 flag combinations x side x whitelist x mode x cookie result |
| `tb_l2_forward`, `tb_timestamp_counter` | table reset and writes; step length and wrap |
| `tb_syn_proxy_top` | end to end at 4096 whitelist entries, in both modes: handshake, retry forwarded, multi-beat data both ways, a 50-SYN flood with the cycles per SYN (3 and 13), forged ACK, stray RST/FIN, multi-beat drop, non-TCP, stale cookie, ageing out, random back-pressure, counters; every mechanism must occur |
| `tb_syn_proxy_flood_mix` | the measurement scenario at 65536 whitelist entries, in both modes: 100 legitimate clients authenticate and send data while 3200 spoofed SYNs and 200 forged ACKs arrive back to back in random order; every reply is checked, all 100 clients are served, and the flood rate is 3.0 and 13.0 cycles per SYN |
| `tb_syn_proxy_full` | the top at default parameters: full 2^32-entry whitelist, clearing pass, one complete Auth_cookie authentication and a spoofed neighbour address |

To run one with Verilator, for example the end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/syn_pkg.sv tb/tb_util_pkg.sv tb/tb_syn_proxy_top.sv \
    --top-module tb_syn_proxy_top -o sim
./obj_dir/sim
```

Verilator finds the other modules through `-I` by their file names. The
512-bit datapath makes the C++ build of the top testbenches take one to two
minutes.

## Files

| File | Content |
|---|---|
| `rtl/syn_pkg.sv` | header structs, flags, action and mode enums, MSS table |
| `rtl/syn_proxy_top.sv` | top: sequencing, header rewrite, counters |
| `rtl/pkt_parser.sv`, `rtl/pkt_deparser.sv` | header extraction and write-back |
| `rtl/auth_decision.sv` | per-segment action |
| `rtl/cookie_unit.sv`, `rtl/siphash.sv` | cookie generation and check; SipHash-2-4 core |
| `rtl/timestamp_counter.sv` | 64 s cookie timestamp |
| `rtl/whitelist.sv` | bitmap whitelist with second-chance ageing |
| `rtl/l2_forward.sv` | port and MAC tables |
| `rtl/tcp_csum_update.sv` | incremental TCP checksum |
| `tb/*.sv` | testbenches and `tb_util_pkg` |
