# A stateless coherent home node for FPGA near-memory operators

An FPGA sits in the second socket of a two-socket ARM server (ThunderX-1 CPU) and speaks the
CPU's own inter-socket cache-coherence protocol. FPGA DRAM therefore appears to software
as ordinary memory on a second NUMA node. This RTL uses that position to turn the FPGA into
a *smart memory controller*. A core reads a 128-byte cache line from an FPGA address, and
the FPGA does not return what is stored there: it returns a line computed by an operator
from data in FPGA DRAM, such as the next row that passes a filter or the value found under a
key. The line lands in the core's cache like any other line. No driver, no DMA set-up and no
interrupt is involved.

The design follows the ECI paper ("ECI: a Customizable Cache Coherency Stack for Hybrid
FPGA-CPU Architectures", Ramdas et al.). It covers the memory-controller configuration
that the paper evaluates. It does not cover the link below the message level or the
symmetric directory-based configuration (see *What is not here*).

## Why the home node keeps no state

The CPU protocol is MOESI with a home-based directory. Every line has a home node that owns
the backing store. The paper abstracts the protocol into a joint (home state, remote state)
pair per line, taken from an enhanced MESI. It sorts these pairs by how far the data has
moved from its resting place in memory. Seven signalled transitions exist:

| initiated by | transition            | request payload | reply | reply payload |
|--------------|-----------------------|-----------------|-------|---------------|
| remote       | Read-Shared (I→S)     | no              | yes   | yes           |
| remote       | Read-Exclusive (I→E)  | no              | yes   | yes           |
| remote       | Upgrade S→E           | no              | yes   | no            |
| remote       | downgrade to S        | if dirty        | no    | –             |
| remote       | downgrade to I        | if dirty        | no    | –             |
| home         | downgrade remote to S | no              | yes   | if dirty      |
| home         | downgrade remote to I | no              | yes   | if dirty      |

A node has to handle every transition its partner may send, unless it can rule some out.
In the memory-controller use the CPU only reads FPGA-homed lines and the FPGA caches none
of them. So the remote (CPU) can only move between shared and invalid, and the home (FPGA)
is always invalid. All those joint states look the same to the home node, which makes the
whole protocol collapse into one state, "I*". The home node then has only two duties:

* answer **Read-Shared** with a line of data;
* ignore **voluntary downgrades** (the CPU evicting a clean copy), which need no reply.

It needs no directory and no per-line storage. The CPU can still cache results freely,
because from its side the protocol is the normal one. `eci_home_stateless` is exactly this.
Anything outside the subset gets counted, raises a sticky `proto_err` and is then dropped:
a Read-Exclusive, an upgrade, a downgrade carrying dirty data, or a home-side message. In
a correct read-only deployment that never happens.

## Block diagram

```
 link layer ──rx──► eci_vc_layer ──coh──► eci_home_stateless ──op_req──► region decode
            ◄─tx───      │  ▲                    ▲                          │ line[32:31]
                      io │  │ io_rsp             │ op_rsp          ┌────────┼─────────┬──────────┐
                         ▼  │                    │                 ▼        ▼         ▼          ▼
                       op_config ──cfg──► (all operators)   select_op  regex_op  dispatcher  zero line
                                                 │                 │        │     ┌──┴──┐   (unmapped)
                                          response_arbiter ◄───────┴────────┴─── kvs ×32 ─┘
                                                                   │        │     │
                                                                   └───► axi_arbiter ◄──┘
                                                                             │ 512-bit read port
                                                                       DRAM controller
```

Each operator has its own `dma_engine`, which is the only thing that reads DRAM. The DRAM
controller, the CPU and the link are outside `eci_memctrl_top`. They connect through its
ports: a message stream in each direction (`rx_*`, `tx_*`) and an AXI4 read port
(`dram_ar_*`, `dram_r_*`).

## Messages and channels (`eci_pkg`, `eci_vc_layer`)

Messages reach the top module already decoded into `eci_msg_t`: a virtual channel, an
opcode, an 8-bit transaction ID, a 33-bit line number, a dirty flag and a 1024-bit payload.
The CPU link has 14 virtual channels. Ten of them carry coherence traffic, in pairs: one
set for even line numbers and one for odd. The paper gives those numbers but not which
message class uses which channel, so `eci_pkg` fixes a numbering of its own. Coherence
requests and voluntary downgrades for even and odd lines go on channels 0/1 and 8/9. Data
responses go back on 6/7, chosen by line-number bit 0. I/O requests and responses use
channels 10 and 11.

`eci_vc_layer` gives each of the four inbound coherence channels its own 4-entry queue.
A stalled class therefore never blocks another, which is why the protocol uses separate
channels at all. The four queues are merged round-robin for the home node. I/O requests
go to `op_config`. The layer counts and discards traffic on channels this node never
serves, such as interrupts or replies to home-initiated requests (the node sends none).
An assertion checks that each coherence message arrived on the channel matching its line
parity.

## Operators

All operators share one interface. A request `{ID, line}` goes in, and exactly one
`{ID, line, 128-byte data}` comes out. The two top bits of the line number pick the operator:

| line[32:31] | operator | meaning of the rest of the line number |
|---|---|---|
| 0 | `select_operator` | ignored (results come out of a FIFO) |
| 1 | `regex_operator`  | ignored (results come out of a FIFO) |
| 2 | 32 × `kvs_operator` via `request_dispatcher` | the key (31 bits) |
| 3 | none | answered with an all-zero line |

The paper runs the three operators as separate experiments. Placing them side by side
behind one address decoder is this design's choice.

### Scan operators: SELECT and regex

`select_operator` runs `SELECT * FROM S WHERE S.a > X AND S.b < Y` over a table of 128-byte
rows, where `a` and `b` are the unsigned 64-bit words in bytes 0–7 and 8–15. Its life cycle
is what makes it unusual:

1. **Armed.** The first read that arrives starts a scan of the configured table: base
   address and row count.
2. **Scanning.** `dma_engine` streams rows. `select_alu` tests each row in the cycle it
   arrives, and matching rows enter a 32-entry result FIFO. Reads wait in a 64-entry
   request FIFO. Each read takes the next result, so cores reading at the same time get
   interleaved results in table order, first come first served.
3. **Done.** When every row has been scanned and every result handed out, each further read
   gets an all-zero line. That line cannot be a real result, because `a > X` fails for
   `a = 0`. The operator stays done until software writes the ARM register.

The end marker and the re-arm register are choices made here. The paper does not say how
a core learns that the scan is over.

`regex_operator` works the same way, but the filter is a regular expression applied to the
62-byte string in bytes 0–61 of the row (NUL-terminated or full length). Rows are handed
round-robin to whichever of the 48 `regex_engine`s is idle, and the operator keeps the whole
row beside that engine. An engine that matches offers its row to the result FIFO, and one
that fails is freed at once. Results therefore leave in completion order, not table order.

**The regex engine is a stand-in.** The paper plugs in an existing open-source engine and
gives only its behaviour: one character per cycle, a 62-byte field and early termination.
`regex_engine` is a bit-parallel shift-and NFA. A pattern is up to 16 positions. Each
position is a character range `[lo,hi]` (a literal has `lo = hi`; `.` is `[1,255]`) with an
optional `+`, and the whole pattern can be anchored at the start. For each character `c`:

```
M[i] = lo_i <= c <= hi_i            (i < len)
D'   = ((D << 1) | inject) & M  |  (D & M & plus)
```

Here `inject` is 1 on every character, or only on the first one when the pattern is
anchored. A match is reported as soon as `D'[len-1]` is set. Unanchored, a miss runs to
the end of the string. Anchored, a miss stops as soon as `D'` is all zero. Alternation,
`*`, `?` and groups are not supported.

Throughput. One 512-bit DRAM port delivers a line every 2 cycles. The SELECT path keeps up
with that at any selectivity, as long as readers drain the results. The regex path, with
48 engines and at most 62 characters per row, handles at least 48/62 ≈ 0.77 rows per
cycle, which is also above the DRAM rate.

### Pointer chasing: the key-value store

`kvs_operator` looks a key up in a chained hash table in FPGA DRAM:

* bucket array at `KVS_BASE`: one 8-byte head pointer per bucket, 16 per line;
* entry: one line, laid out as key in bytes 0–7, value in 8–119, next pointer in 120–127;
  pointers are byte addresses and 0 ends the chain;
* bucket = `(key * 0x9E3779B97F4A7C15)[63:32] & KVS_MASK`. The paper does not give its
  hash function; this multiplicative hash is this design's choice.

A lookup reads the bucket line, then follows the chain one line at a time. It answers with
the matching entry, or with zeros if the chain ends. A chain of length L costs L + 1
dependent DRAM round trips. At about 100 ns each, a single unit manages only a few lookups
per microsecond. The design makes up for this with 32 units behind `request_dispatcher`,
which sends each request to the next free unit. Their reads share the DRAM port through
`axi_arbiter`, which puts the master's index in the AXI ID and routes the data back by it.
Results merge through `response_arbiter`. Dispatcher and arbiters are all round-robin.

### Configuration (`op_config`)

I/O writes and reads on the I/O channel reach 64 registers of 64 bits each. The register
index is the line number. The register map in `eci_pkg` is this design's own:

| reg | name | reg | name |
|---|---|---|---|
| 0 | SEL_BASE | 8 | RX_BASE |
| 1 | SEL_ROWS | 9 | RX_ROWS |
| 2 | SEL_X | 10 | RX_CTRL: [4:0] length, [8] anchored |
| 3 | SEL_Y | 11 | RX_ARM (write to re-arm) |
| 4 | SEL_ARM (write to re-arm) | 16–31 | RX_POS0..15: [7:0] lo, [15:8] hi, [16] plus |
| 32 | KVS_BASE | 33 | KVS_MASK (buckets − 1) |

Every access gets one I/O response with the same ID, one cycle later.

## Timing summary

* Single clock domain; the paper's system runs it at 300 MHz. Every `always_ff` resets
  asynchronously on active-low `rst_n`.
* Every stream uses valid/ready. Data transfers when both are high, and valid does not wait
  for ready.
* Home node, address decode, dispatcher and arbiters are combinational pass-throughs. A read
  reaches an operator's request FIFO in the cycle it leaves the VC-layer queue.
* `dma_engine`: one AXI burst of 2 beats per line. It keeps up to 32 lines of credit in
  flight, so with a 30-cycle DRAM latency it sustains one line every 2 cycles. It never
  stalls the read-data channel.
* `regex_engine`: n cycles for a string that ends (by match or mismatch) at character n.

## Where the bottleneck sits

The point of putting operators next to DRAM is that the link to the CPU is the scarce
resource. In the evaluated system the link carries about one sixth of the FPGA's DRAM
bandwidth. So an operator wins when it sends fewer lines over the link than it reads from
DRAM, and loses that advantage once almost every line it reads must be sent on. Three
workload testbenches drive the whole design as the CPU would, with the link modelled as
accepting one response every 12 cycles: one sixth of the DRAM model's line every 2 cycles.

| Testbench | Sweep | Result (cycles at the 300 MHz clock) |
|---|---|---|
| `tb_wl_select` | selectivity 1%, 10%, 100%; 1,200 rows | 2.5 cycles/row at 1% and 10% (DRAM-bound); 12.5 at 100% (link-bound) |
| `tb_wl_regex` | selectivity 1%, 10%, 100%; 1,200 strings | same pattern: the 48 engines outrun DRAM, so only DRAM or the link limits |
| `tb_wl_kvs` | chain length 1, 4, 16, 128; 256 lookups each | length 1: 0.081 lookups/cycle (link-bound); length 16: 0.029 and length 128: 0.0039 (DRAM-bound) |

Each of them checks every returned row or entry. It also checks the measured rate against
the bound it expects: DRAM at 2 cycles per line, the 32 units at one DRAM round trip per
line, or the link. The extra half cycle per row in the scans is the end marker: each of the
48 modelled threads must receive one over the slow link. The tables are far smaller than
the paper's 5.12 million rows. The rates are steady-state, so they do not depend on table
size beyond start-up.

## Departures from the paper and things it leaves open

* The paper draws a DRAM controller per operator in its parallel-operator figure. Here each
  operator has its own DMA engine, and all share one controller port through the AXI
  arbiter, which is what that figure's AXI arbiter implies.
* The channel numbering, opcode encoding, 40-bit physical address (33-bit line number),
  8-bit ID, row field positions, register map, end-of-scan marker, re-arm mechanism, hash
  function and bucket layout are all choices made here.
* The regex engine is a simplified stand-in (see above).
* Only the read channels of AXI exist: every workload here is read-only.
* Figure 2 of the paper labels the interface "ACI"; the text calls it ECI. Both mean the
  same link.

## What is not here

The ECI link, transaction and physical layers: packing, credit flow control, CRC and
replay, serial lanes. Building them needs the ThunderX-1 wire format, which the paper does
not give. Also missing are the DDR4 controller (vendor IP), the CPU, the directory
controller of the symmetric configuration (which the paper explicitly leaves out), and the
online protocol checker used for debugging.

## Files

* `rtl/eci_pkg.sv`: types, channel map, register map, hash.
* `rtl/eci_memctrl_top.sv`: the top level.
* `rtl/eci_vc_layer.sv`, `rtl/eci_home_stateless.sv`, `rtl/op_config.sv`: ECI front end.
* `rtl/select_operator.sv`, `rtl/select_alu.sv`, `rtl/regex_operator.sv`, `rtl/regex_engine.sv`,
  `rtl/kvs_operator.sv`, `rtl/dma_engine.sv`: operators.
* `rtl/request_dispatcher.sv`, `rtl/response_arbiter.sv`, `rtl/axi_arbiter.sv`,
  `rtl/rr_arbiter.sv`, `rtl/sync_fifo.sv`: plumbing.
* `tb/tb_<module>.sv`: one self-checking testbench per module. Each prints
  `TB_RESULT checks=N failures=M`.
* `tb/tb_wl_select.sv`, `tb/tb_wl_regex.sv`, `tb/tb_wl_kvs.sv`: whole-design workload
  sweeps with a rate-limited link (see above).
* `tb/dram_model.sv`: behavioural AXI read-only DRAM with fixed latency and optional
  address back-pressure.

## Simulating

Each testbench runs with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_eci_memctrl_top rtl/eci_pkg.sv tb/tb_eci_memctrl_top.sv
./obj_dir/Vtb_eci_memctrl_top
```

`tb_eci_memctrl_top` runs the whole design at its default size (32 key-value units,
48 regex engines) in a few seconds. It plays the CPU side: it configures the operators
over I/O and drains a SELECT scan and a regex scan. It then fires 140 key lookups that keep
all 32 units busy, and finally sends voluntary downgrades, a Read-Exclusive, an unmapped
read and a message on an unserved channel. Its link is always ready. It checks every response against its own model
and counts each of these mechanisms. Tables in the tests are a few hundred rows; the
paper's 5.12-million-row tables fit the design (32-bit row counts, 40-bit addresses) but
were not simulated.

## How far to trust it

Every module has a testbench with an independent reference: a queue model, a substring
search, a backtracking regex matcher, or a software copy of the hash table. The
testbenches also check cycle counts where a rate follows from the design: two cycles per
DRAM line, L + 1 round trips per lookup, one character per cycle. Each testbench was also
run against a deliberately broken copy of its module and caught the break. None of this
has met a real ThunderX-1. The message format after the VC layer is an abstraction, so
connecting this to the real link needs the layers listed above.
