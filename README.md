# CountingStars on-board measurement engine

In a low-earth-orbit mega-constellation the topology changes every few
minutes. Satellites therefore spread the packets of one flow over all their
output ports (packet-based load balancing). Measuring traffic per flow *and
per port* then runs into two problems:

- **Memory inflation.** A conventional sketch keeps one table per port,
  which stores every flow key once per port.
- **Hash collisions.** The set of flows crossing a satellite keeps changing.
  A fixed hash function that is collision-free in one period collides in the
  next.

CountingStars moves the hard part to the ground. The ground station predicts
the topology, and from it the exact set of flows each satellite will carry
in the next period. For that set it computes the smallest modulus `h` under
which all flow identifiers are distinct (a *minimal perfect hash seed*) and
uploads `h` to the satellite. On board, all that is left is a modulo, one
memory read-modify-write and a counter report at the end of the period.

This repository holds synthesizable SystemVerilog for that on-board part. It
follows the published CountingStars design: four ports, 64-bit counters of
four 16-bit port fields, round-robin parsers, Cantor flow identifiers,
modulo hashing, jump-based counter updates, and the seed / report / clear
sequence. It also fills the details the design leaves open. Those are marked
below as *this design's choice*. The ground-side software is not RTL and is
not included:

- orbit propagation and topology prediction;
- routing and flow-set generation;
- the seed search.

The testbenches carry a small SystemVerilog version of the seed search so
they can produce seeds.

## How one packet is counted

```
port p ──► round-robin ──► parser ×M ──┐
           dispatcher                  ├─► round-robin ─► t mod h ─► jump-based ─► counter
port …                                 │    arbiter       + BASE     update         memory
(×4)                                   ┘  (all 4·M parsers)          (+inc in field p)
```

1. **Flow identifier.** A flow is a (source satellite, destination
   satellite) pair. The parser masks both ids out of the header word and
   forms the Cantor pairing

       t = (src + dst)(src + dst + 1) / 2 + dst

   The Cantor pairing is injective, so distinct flows always get distinct
   `t`. With 11-bit ids, `t` needs 23 bits.
2. **Dynamic hash.** The counter address is `BASE + (t mod h)`, where `h` is
   the seed for the current period. The ground chose `h` so that no two of
   this period's flows share a residue. The address space is therefore
   collision-free and exactly `h` words long.
3. **Jump-based update.** Each memory word is one flow's 64-bit counter.
   Bits `[16(p-1) +: 16]` count the packets that left on port `p`. A packet
   on port `p` adds `2^(16(p-1))` to its word. It "jumps" to its port's
   field, so one key and one word serve all four ports.

## Count unit: packets or 64-byte units

By default every packet adds one to its port field. Flow size can instead be
measured in 64-byte units, so that a 120-byte packet counts
`⌈120/64⌉ = 2`. Set the top parameter `UNIT_BYTES = 64` for that. The
parser then reads the packet length from header bits `[47:32]` and computes
`inc = max(1, ⌈length / UNIT_BYTES⌉)` in its first cycle. The increment
travels with the flow record through the arbiter and the hash. The update
adds `inc · 2^(16(p-1))`. With `UNIT_BYTES = 0` the length field is ignored
and `inc = 1`. Both modes share one datapath; the per-packet mode simply
holds `inc` at a constant 1, which synthesis removes.

The figure in the published design shows port `p` owning bits
`(p-1)x … px` of an `nx`-bit counter. Here `x = 16` and `n = 4`.

## Periods, seeds and reports (`cs_meas_ctrl`)

The on-board controller runs this cycle:

```
IDLE ─seed─► UPDATE ─► CLEAR ─► MEASURE ─period_end─► DRAIN ─► SEND ─► HOLD
                ▲                                                        │
                └──────────── seed ◄─────────────────────────────────────┘
             UPDATE ─► RESEND ─► CLEAR ─► MEASURE …
```

- **End of a period.** `period_end` stops new packets from entering. DRAIN
  waits until every packet already inside the pipeline has been written.
  SEND then streams the `h` counters out in index order (`tx_retx = 0`).
- **HOLD.** The counters stay untouched until the next seed arrives. If the
  report was lost on the link, it can still be sent again.
- **New seed.** The published design gives this order: update the seed,
  return the historical data, clear the memory, start measuring. UPDATE
  latches the new `h`. RESEND sends the previous period's counters again
  (`tx_retx = 1`). CLEAR writes zeros to the words the new seed addresses.
  MEASURE counts.
- **Early seed.** A seed that arrives while a period is still running is
  held. It is applied after that period's report.
- **Refused seed.** A seed of 0, or one larger than `MEM_DEPTH - BASE`, is
  refused. `seed_err` pulses and nothing else changes.

Packets that arrive outside MEASURE are accepted and not counted.
`unmeasured` reports how many there were. The engine never back-pressures
the forwarding plane between periods.

## Timing and rate

The clock target is 50 MHz, as in the published FPGA build. In steady state
the engine counts one packet per clock:

| stage | cycles | note |
|---|---|---|
| parser | 1 (result on the edge after acceptance) | a parser holds one packet, so it takes a new one every 2 cycles; with M = 2 a port takes one packet per cycle |
| arbiter | 1 | one record per cycle into the hash, from all 4·M parsers |
| modulo | `HASH_STAGES` = 2 | restoring division, remainder only, 12 bits per stage |
| counter read | 1 | synchronous block RAM |
| counter write | 1 | |

A packet accepted on a port at edge 0 is in memory at edge 6. At 50 MHz
that is 120 ns. The published build reports 136 ns, about 6.8 cycles.

The four ports together can offer four packets per cycle. Only one per
cycle passes the arbiter, so the rest wait in the parsers and then at the
ports (`pkt_ready` low). The published design likewise puts a single hash
function behind all parsers and reports about 50 Mpps at 50 MHz.

The report stream takes three cycles per counter while `tx_ready` is high.
At the end of a period it takes `3h` cycles; with a new seed it takes
`3h_old + h_new` cycles (resend, then clear).

### The read-modify-write hazard

The memory is read-first. Two packets of the same flow on consecutive cycles
cause a hazard: the second one reads the counter on the same edge that the
first one writes it, so it gets the old word. `cs_counter_update` keeps the
last write's address and data for one cycle. When the addresses match, it
uses the kept data instead of the memory word (the *bypass*). A distance of
one cycle is the only case this can happen. With the bypass every packet is
counted, even when one flow has a long burst.

## Blocks

| file | what it is |
|---|---|
| `rtl/cs_pkg.sv` | widths, types (`flow_rec_t`, `meas_state_t`), reference Cantor function |
| `rtl/cs_rr_dispatch.sv` | per-port strict round-robin hand-out to the M parsers |
| `rtl/cs_parser.sv` | AND-mask extraction, Cantor pairing and packet increment, 2-cycle, one packet at a time |
| `rtl/cs_port_parsers.sv` | dispatcher plus M parsers for one port |
| `rtl/cs_rr_arbiter.sv` | round-robin merge of all parser outputs, registered output |
| `rtl/cs_hash_mod.sv` | pipelined `BASE + t mod h` |
| `rtl/cs_counter_update.sv` | jump-based read-modify-write (`+inc` in field `p`) with bypass and 16-bit saturation |
| `rtl/cs_counter_mem.sv` | `MEM_DEPTH` × 64 simple dual-port counter memory (inferred array) |
| `rtl/cs_meas_ctrl.sv` | period / seed / report / clear controller |
| `rtl/countingstars_top.sv` | the whole engine |

Top-level ports of `countingstars_top`:

- `pkt_valid/pkt_ready/pkt_hdr[4]`: one header stream per output port.
  Each header word is 48 bits:
  - packet length in bytes in bits `[47:32]` (used only when
    `UNIT_BYTES` ≠ 0);
  - source id in bits `[31:16]`;
  - destination id in bits `[15:0]`.

  Only the low 11 bits of each id are used.
- `seed_valid/seed`: the uploaded seed `h`, 17 bits.
- `period_end`: a one-cycle pulse.
- `tx_valid/tx_ready/tx_index/tx_data/tx_last/tx_retx`: the counter report
  stream.
- `meas_en`, `seed_err`, `state`, `unmeasured`: status.
- `ev_bypass`, `ev_sat`: event strobes. `ev_sat` marks an update that was
  clipped at 65535.

Reset is synchronous and active low. The counter memory is not reset; every
word is cleared before the period that uses it.

## Parameters

| parameter | default | origin |
|---|---|---|
| `NPORT` (package) | 4 | published design |
| `SUB_W`, `CNT_W` (package) | 16, 64 | published design |
| `NODE_W` (package) | 11 | this design: holds the 1584 satellites of first-generation Starlink |
| `HDR_W`, `LEN_LSB`, `SRC_LSB`, `DST_LSB` (package) | 48, 32, 16, 0 | this design (header format not published) |
| `M` | 2 | this design (published as "M parsers"); the smallest M at full port rate |
| `MEM_DEPTH` | 65536 (512 KB) | this design: largest power of two fitting the 4.86 Mb block RAM of the XC7A100T used for the published FPGA build |
| `BASE` | 0 | this design ("a fixed basic address") |
| `HASH_STAGES` | 2 | this design |
| `UNIT_BYTES` | 0 (one per packet) | 0 follows the on-board description; 64 is the unit of the published evaluation |

`h` can be at most `MEM_DEPTH - BASE`. The seed width follows `MEM_DEPTH`.

## Where this RTL departs from, or adds to, the published design

- **Saturation.** Port fields saturate at 65535 and do not carry into the
  neighbouring port's field. The published text only gives the increment
  of `2^(16(p-1))`.
- **Report range.** Only the `h` counters the seed addresses are reported
  and cleared, not the whole memory.
- **Seed storage.** The seed is held in a register. The published
  operation count mentions an SRAM access to fetch it.
- **Packet input.** Each port delivers a header word. There is no packet
  buffer, so the parser's "two SRAM accesses to read packet data" become
  the header input.
- **Count unit as a parameter.** The on-board description counts packets;
  the published evaluation counts 64-byte units. Both are available through
  `UNIT_BYTES`, and packets are the default.
- **Open details.** The published design leaves these open, and the
  choices here are this design's own:
  - the merging arbiter;
  - the bypass;
  - the split of the parser work over two cycles and the division pipeline;
  - the DRAIN state;
  - holding an early seed;
  - refusing out-of-range seeds;
  - the `unmeasured` counter;
  - the three-cycle report rate;
  - the `period_end` pulse, which means the period timer is outside the
    engine.

## How far the seed scheme scales

The smallest collision-free modulus is usually much larger than the number
of flows `n`. For random identifiers, `h` grows roughly like `n²`:

- 60 flows drawn from 1584 satellites gave `h` between 380 and 500;
- 821 flows gave `h` of about 40 000.

The published evaluation gives dataset totals only:

- Iridium (66 satellites): at most 3.7K flows and 42.5K packets in 100 s;
- Starlink (1584 satellites): up to 1.3M flows and 117.5M packets in 100 s.

Spread evenly over 100 one-second periods, and for Starlink over the
satellites, a satellite sees a few tens of flows and a few hundred packets
per period. That is far inside 65536 counters and 16-bit fields. Even all
821 flows of one Starlink satellite in a single period needed `h` of about
40 000 in the test below, which still fits. Much larger per-satellite flow sets
would need a larger `MEM_DEPTH` or would exceed the on-chip memory.

## Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=F` and stops itself with a watchdog. For
example, with Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/cs_pkg.sv \
          tb/tb_countingstars_top.sv --top-module tb_countingstars_top -Mdir obj
obj/Vtb_countingstars_top
```

Testbenches:

- `tb_countingstars_top`: the whole engine at its default parameters, over
  three periods. It checks:
  - latency (6 cycles);
  - one write per cycle under full load on all ports;
  - three cycles per report word while `tx_ready` is high;
  - back-pressure and the bypass;
  - a field saturating after 65535 packets;
  - the early seed, the refused seed, the resend, the drain and the
    `unmeasured` count;
  - every word of every report.

  It counts each of these mechanisms and fails if any never happened. It
  runs in well under a second.
- `tb_cs_workloads`: the six Iridium / Starlink load points, counted in
  64-byte units (`UNIT_BYTES = 64`) with random packet lengths of 40 to
  1500 bytes. Per-period flow and packet counts are derived as above. The
  test checks that every per-port size is exact (average relative error 0).
- `tb_cs_*`: one unit test per block. Each checks against an independent
  model and under random back-pressure.

The simulator has two-state logic and random initial values. The
testbenches reset or initialise everything they read.
