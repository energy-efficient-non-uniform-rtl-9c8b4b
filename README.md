# A compressed, bank-gated NUCA last-level cache

In a chip with 16 cores, the shared last-level cache (LLC) can be stacked on
top of the cores as a separate die. Through-silicon vias (TSVs) connect the
two dies. Such a cache is large, leaks a great deal, and is used very
unevenly: a few of its 64 banks take most of the accesses. Many of the lines
it holds are also all zero or one of a few frequent 64-byte values.

This design uses both facts. Every line carries one extra bit saying that it
is compressed. A compressed line is never stored in the power-gated data
array. For the frequent-value scheme (NFVCache), the line is a one-hot 32-bit
codeword; for the zero-line scheme (NIZCache), the bit alone is enough.
Because the tags, the compression bits and the codeword column stay powered,
a bank whose data array is switched off can still serve its compressed lines.
A monitoring unit looks at the banks' counters at the end of each interval
(64M cycles). It switches off the banks that see few accesses to valid,
uncompressed data, and switches banks back on when they cause misses. The
same codewords also cut TSV traffic: a frequent-value line crosses the link
on 32 of the 128 wires, as one flit instead of four.

The RTL is SystemVerilog (IEEE 1800-2017) in `rtl/`, with self-checking
testbenches in `tb/`.

## Structure

```
nfvcache_top
 |- network_interface x16   (core die, one per tile)
 |   |- fv_table            32 frequent values, CAM search + codeword decode
 |   |- pkt_tx / pkt_rx     packets on the 128-wire TSV link
 |- cache_controller x16   (cache die)
 |   |- pkt_rx / pkt_tx
 |   |- l2_bank x4          128 KB each, 64 banks = 8 MB
 |   |   |- zero_detector   (used when SCHEME = SCHEME_NIZ)
 |   |- C_A, C_C, C_I counters per bank
 |- power_manager           monitoring unit: interval timer and policies
     |- mean_std_unit       mean and standard deviation of 64 counts
```

`nfv_pkg` holds the shared sizes, the packet and request structs and the
address map. An address has a 6-bit byte offset. Bits [11:6] select the bank
(line-interleaved across the 64 banks). Bank `g` is bank `g % 4` of
controller `g / 4`. The bits above select the line and form the tag.

The mesh network of the cache die is not part of this design. The top brings
out both ends: `ni_tx`/`ni_rx` on each tile's link and `cc_in`/`cc_out` on
each controller. An external router must carry a packet from a tile to the
controller that owns its address, and the response back to the tile named in
the header (`src`). Both testbenches of the top contain such a router at the
packet level.

## Frequent values and the 1-LWC code

A frequent-value table is loaded at start-up with the 32 values found by
profiling. The load port `fv_load` writes one entry per cycle and is
broadcast to all tiles. Entry *i* is coded by the 32-bit word with only bit
*i* set. This is a limited-weight code of weight 1 (1-LWC): a codeword drives
at most one wire high, so no two neighbouring TSVs carry a 1 together.

On the write path the network interface searches the table for the outgoing
line. On a hit, the FV bit selects the codeword through the multiplexer;
otherwise it selects the original line. This adds one register stage to a
write (the packet's head flit appears two cycles after the request is
accepted; one cycle is the encoder, one the serialiser). The cache die never
decodes: the bank stores the codeword as it arrives. On the read path the
interface decodes a compressed response back to the 64-byte value.

Packets (`pkt_tx`, `pkt_rx`):

| packet | flits | wires used |
|---|---|---|
| read request, miss response | head | header bits |
| FV line (write or response) | head + 1 | [31:0]; [127:32] held at 0 |
| zero line in NIZ mode | head | header bits |
| raw line | head + 4 | all 128 |

The head flit carries `hdr_t`: command, compression bit, hit, source tile
and address. Links use `valid`/`ready`.

## The bank

`l2_bank` is direct-mapped, with 2048 lines of 64 bytes. Each line has a
valid bit, a dirty bit, a compression bit, a tag, a 32-bit codeword entry and
a 512-bit data entry. Only the data array is behind the power gate; `powered`
shows its state.

* **Read** (1 cycle): the read hits if the line is valid, the tag matches,
  and the line is compressed or the bank is on.
* **Write / fill of a compressed line**: sets the compression bit and the
  codeword. The data array is not written, whether the bank is on or off.
* **Write / fill of a raw line**: writes the data array if the bank is on. If
  the bank is off, a dirty line goes straight on to memory through `evict`
  (write-around) and a clean fill is dropped.
* A dirty victim with a different tag is written back through `evict`.

Each request pulses three counter events:

* `access` (C_A) on every request;
* `invalid` (C_I) if the indexed line is invalid;
* `cmp_hit` (C_C) if it hits a compressed line.

So C_X = C_A − C_C − C_I is the number of accesses to valid, uncompressed
data. This is what the policy ranks banks by.

**Power-off** is started when the T field (`power_on`) falls. The bank then
walks its lines, one per cycle, stalling while the write buffer (`evict_ready`)
is busy. Every valid uncompressed line is invalidated:

* a dirty line is written back;
* with M = 0 every such line also goes out with `migrate` set;
* with M = 1 clean lines are dropped.

Compressed lines stay. After the last line, the data array is switched off.
The drain takes LINES cycles when the write buffer never stalls. **Power-on**
takes one cycle.

In NIZ mode (`SCHEME_NIZ`) the bank sets the compression bit itself with
`zero_detector`, and a compressed line reads back as zeros.

## The controller's counters

Each controller counts C_A, C_C and C_I for its four banks in 12-bit
saturating counters. On `snap` it latches them, together with C_X, on its
outputs and restarts from zero. It takes one request packet at a time. Lines
leaving its four banks are merged round-robin onto one `evict` port.

## The power policy (`power_manager`)

A free-running timer pulses `snap` every `INTERVAL` cycles. The policy then
runs in the background; an assertion checks that it ends within the interval.
Its steps, in order:

1. **Individual power-on.** An off bank with
   1000·(C_C + C_I) < 7·C_A is switched on. Such a bank sees many accesses
   that compressed lines cannot serve (threshold 0.7 %).
2. **Collective power-on.** If the off banks' misses, Σ(C_A − C_C), exceed
   1 % of all accesses, half of the off banks are switched on. Those with
   the most misses go first.
3. **Mean and deviation.** `mean_std_unit` computes μ and σ of C_X over all
   64 banks. It reads one value per cycle and sums both *x* and *x²*. Each sum
   is divided by 64 with a shift. Then μ² is subtracted, and a digit-by-digit
   square root takes one cycle per result bit. This costs 64 + 2 + 12 cycles.
4. **Non-uniform interval** (σ > μ). Every on bank with C_X < μ is switched
   off with M = 1: its uncompressed lines are discarded.
5. **Non-uniform across intervals** (otherwise). If μ two intervals ago is
   more than 2μ, and fewer than N_OFF = 16 banks are off, the on banks with
   the lowest C_X are switched off until 16 are off, with M = 0: their
   uncompressed lines are migrated.
6. The mean history shifts.

Banks switched on in steps 1–2 are not switched off in the same interval.
The rankings in steps 2 and 5 scan the 64 banks once per chosen bank (64
cycles each). The T and M fields keep their values between intervals. Status
outputs count how often each branch was taken.

## Parameters

| parameter | default | where |
|---|---|---|
| `SCHEME` | `SCHEME_NFV` | top, network_interface, cache_controller, l2_bank |
| `LINES` (lines per bank) | 2048 (128 KB) | top, cache_controller, l2_bank |
| `INTERVAL` (cycles) | 67 108 864 (64·2^20) | top, power_manager |
| `N_OFF` | 16 | top, power_manager |
| `TH_IND_PM`, `TH_T_PM` (per mille) | 7, 10 | power_manager |
| `NUM_FV`, `CW_BITS`, `FLIT_BITS`, `CNT_W` | 32, 32, 128, 12 | nfv_pkg |

`LINES` = 512 or 1024 gives the 2 MB and 4 MB caches of the capacity sweep.

## Where this departs from the source description, or fills gaps

* **Migration ends at the bank.** Lines to migrate leave through `evict`
  with `migrate` set. Putting them into other active banks, replacing those
  banks' LRU lines, is not built. The banks are direct-mapped, and with the
  fixed address-to-bank map it is not said how a migrated line would be found
  again.
* **Chosen here, not given by the source:**
  * direct mapping;
  * line interleaving across banks;
  * the packet format;
  * write-around to an off bank;
  * 12-bit counter saturation;
  * the order of the policy steps;
  * the reference of the 1 % collective threshold (all accesses);
  * M = 1 at reset.
* **Conflicts resolved here:**
  * Power-off compares μ two intervals back with 2μ, as the algorithm states.
    The prose says "two previous intervals".
  * The capacity is 8 MB (64 × 128 KB), as in the system table. Elsewhere a
    32 MB LLC is mentioned.
  * Off-bank misses are computed as C_A − C_C, with no extra miss counter.
  * A zero line sets its zero bit to 1, as the bank figure shows.
  * An FV line is sent on 32 of the 128 wires. One passage instead says
    1/16 of the wires.
* **Not hardware here:** the TSV crosstalk and energy model, the gated-Vdd
  transistors (only their control bit), the cores and L1 caches, the write
  buffer and the routers. The threshold-based power-off policy is an
  alternative in the source, not part of this design.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with
a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/nfv_pkg.sv tb/tb_nfvcache_top.sv \
          -y rtl --top-module tb_nfvcache_top -Mdir obj && obj/Vtb_nfvcache_top
```

Replace the testbench name for the others:

* `tb_zero_detector`
* `tb_fv_table`
* `tb_network_interface`
* `tb_l2_bank`
* `tb_cache_controller`
* `tb_mean_std_unit`
* `tb_power_manager`
* `tb_nfvcache_full`

What the top-level testbenches cover:

* `tb_nfvcache_top` runs 64 banks of 16 lines with 6000-cycle intervals. It
  drives the cache through every mechanism: FV and raw writes, the
  consecutive-interval power-off with migration, the skewed-interval
  power-off with write-back, compressed reads from an off bank,
  write-around, and individual and collective power-on. It counts each one
  and fails if any never happens.
* `tb_nfvcache_full` uses the top at its default size (8 MB, 64M-cycle
  interval) for one write and read-back per kind of line. It takes about a
  minute to build.
* `tb_power_manager` compares the T and M fields after every interval with a
  reference model of the policy.
