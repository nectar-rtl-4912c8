# NeCTAr accelerator RTL

NeCTAr is a four-core RISC-V system-on-chip, built in Intel 16, for running
small language models at the edge. Most of the time in such a model goes to
matrix-vector and sparse matrix products whose operands do not fit in a
core's L1 cache. To cut that traffic the chip adds compute in three places
around the standard Rocket cores:

* **near the data**: beside each of the four L2 banks sits a near-memory
  compute engine (NMCE). It does int8 dot products of a vector it holds
  against lines read straight out of its bank. It can also copy memory.
* **next to each core**: a sparse x dense matrix-multiply accelerator,
  driven by custom RoCC instructions. Cores 0 and 1 have a first version
  that handles one memory read at a time. Cores 2 and 3 have a second
  version with a reservation station, so L2 answers can come back in any
  order.
* **in front of the L2**: one best-offset prefetcher per core. It learns the
  stride of the core's miss stream and fetches ahead of it.

A clock tree supports all of this. It gives every core its own divided and
gated clock and its own reset, and it can switch the whole chip between the
on-chip PLL and an external clock. There is also a 64 KB scratchpad on the
memory bus.

This RTL covers those added blocks and wires them into one top level,
`nectar_soc`. The cores, caches, L2 banks, the network-on-chip, the
peripherals and the PLL come from existing generators and vendor IP. They are
not included. Every signal that would connect to one of them is a port of the
top.

## Common conventions

All modules share `nectar_pkg`, which defines three things.

**Memory port.** The memory port is a reduced TileLink-UL channel pair:

* Channel A (`tl_a_t`) carries Get (4) and PutFullData (0) requests. Each
  request has a size (log2 of bytes), a 4-bit source tag, a 64-bit address
  and a 64-bit data beat.
* Channel D (`tl_d_t`) carries AccessAckData (1) and AccessAck (0) answers
  with the same fields.
* A 64-byte line is 8 beats. A Put of a line sends 8 A beats and gets one
  AccessAck. A Get of a line gets 8 AccessAckData beats.
* Both channels use a valid/ready handshake. A sender holds its payload
  steady until the transfer happens; assertions in the masters check this.
* The source tag is how a master that keeps several reads in flight matches
  each answer to its request.

**Register port.** `mmio_req_t` / `mmio_rsp_t` form a simple 64-bit register
port. A request is valid for one cycle, and read data comes back on the next
cycle.

**RoCC port.** `rocc_cmd_t` / `rocc_rsp_t` are the fields of the Rocket
custom-instruction interface that the sparse accelerator uses: funct, rd, xd,
rs1 and rs2. The response carries rd and data.

## Near-memory compute engine (`nmce`)

Each NMCE computes up to 32 dot products per command. Each product is
between a 64-byte operand vector `v1` and the 64-byte line at
`v2addr + stride*i`. Both are read as 64 signed int8 values.

**One operation.** One line is in flight at a time:

1. A single Get fetches the line as 8 beats.
2. In the cycle after the last beat, 64 multipliers and four 16-input adder
   trees reduce the line to one sum.
3. The sum is saturated to int16 and written into slot `i` of a 64-byte
   result register (32 int16 slots).

So a MAC costs about 10 cycles per line, and the core sees only the 64-byte
result. A memcpy command uses the same loop. It reads line `i` through the
read node and writes it to `dst + stride*i` through the separate write node.

**Matrix-vector products.** Software builds a matrix-vector product from
these commands. With rows of up to 64 bytes, one command computes 32 rows.
Longer rows are split into 64-byte pieces. The lines of a row are spread over
the four banks, each NMCE computes its part, and the core adds the partial
sums.

**Cycle counts.** `tb_nmce_workloads` runs the evaluated kernels against a
memory that never stalls, so the counts are the engine's own cost:

| kernel | commands | cycles |
|--------|----------|--------|
| 64 B memcpy | 1 | 28 |
| 128 KB memcpy | 64 | 37,378 |
| 1 MiB memcpy | 512 | 299,010 |
| 8x8 int8 matmul | 8 | 960 |

* The cycle counts include the register writes, at two cycles each.
* A copied line costs about 18 cycles: 8 read beats, 8 write beats and the
  handshakes.
* For the 8x8 matmul, most of the time goes to reloading the operand
  register for each column.
* The chip's published figures for the same kernels come from a real cache
  hierarchy. They are of the same order for the large copies.

Register map (byte offsets; every register is 64 bits):

| offset        | register | notes |
|---------------|----------|-------|
| 0x000 – 0x038 | v1Reg    | byte k of the operand is bits 8k+7:8k of the 64 little-endian bytes |
| 0x040         | v2addr   | rounded down to a line |
| 0x048         | stride   | bytes between successive lines |
| 0x050         | count    | number of operations, values above 32 are clamped to 32 |
| 0x058         | dst      | memcpy destination |
| 0x060         | command  | write 0: start MAC, write 1: start memcpy |
| 0x068         | status   | bit 0 busy, bit 1 done, bits 13:8 operations finished |
| 0x080 – 0x0B8 | result   | slot i = bits 16(i%4)+15:16(i%4) of word i/4; cleared when a MAC starts |

The operand, v2addr, stride and count registers, the count limit, int8
operands, int16 saturation, the 32-slot result and the single-cycle MAC are
the published design. The destination and command registers and the exact
offsets are this implementation's own choices. The published design lists
only four registers and does not say how memcpy learns its destination or
how an operation starts. Writes to the configuration registers are ignored
while the engine is busy.

## Sparse matrix accelerator (`sparse_accel`)

The accelerator computes `C = A * B`. B is a dense matrix of int32 with
`cols` columns (at most `MAX_COLS = 128`). A is sparse and given as a stream
of 64-bit nonzero elements:

```
 63    62     61..48   47..32          31..0
 last  start  -        weight (int16)  dense row index
```

**Per element.** For each element the accelerator:

1. reads row `index` of B, two int32 per beat;
2. multiplies each value by the weight;
3. adds the products into a row of `cols` int32 accumulators.

`start` clears the accumulators first. `last` writes the accumulator row to
`dest + r*cols*4` and moves to the next output row `r`. Rows of A with no
nonzero elements are the software's concern. A row ends where the element
stream says it ends.

**Commands.** Three RoCC commands program and start it:

| funct | rs1        | rs2           | effect |
|-------|------------|---------------|--------|
| 0     | A pointer  | element count | |
| 1     | B pointer  | cols (even)   | |
| 2     | C pointer  | –             | start; with xd the core gets the number of C rows written |

**Reads in flight.** All memory traffic is single-beat Gets and Puts, and
the port's source tag does the bookkeeping:

* **V1** (`RS_DEPTH = 1`) has one read outstanding. A beat is only asked for
  once the previous one has been accumulated.
* **V2** (`RS_DEPTH = 4` by default) keeps up to `RS_DEPTH` dense-row beats in
  flight. Beat `k` of a row is assigned entry `k mod RS_DEPTH` of the
  reservation station. The Get carries the entry number as its source. When
  an answer arrives, in any order, the source selects the entry, the entry
  names the column pair, and the pair is accumulated.
* An entry is reused only after its answer has come back, so a slow answer
  stops the issue instead of being overtaken.
* Sparse-element reads (source 14) and output Puts (source 15) use their own
  tags.
* With `SPLIT_PORTS` set, as for the two V2 instances, the sparse-element
  reads leave on a second port, `l1_*`, towards the core's L1 cache. Dense
  reads and output writes stay on the L2 port. The L1 port carries virtual
  addresses, which the L1's own TLB translates.

This matters because the L2 is banked. Answers from an idle bank can
overtake those from a busy one, and V1 has to wait for each answer in turn.

**Address translation (`sparse_tlb`).** Software hands the accelerator
virtual addresses. At the top level each accelerator's L2 request channel
passes through a small TLB:

* It has 4 fully associative entries with round-robin replacement and 4 KB
  pages.
* On a hit the request goes through in the same cycle. Only the page number
  of the address changes.
* On a miss the request is held. The virtual page number goes to the core's
  page-table walker, and its answer fills an entry.
* With `vm_en` low, addresses pass unchanged. `flush` empties the TLB after
  an SFENCE.
* Page faults are not reported back, so buffers must be mapped before the
  accelerator starts.

**Departures from the published design.** Its block diagram shows a lookup
table and a "virtual weight counter" in the V1 pipeline, which are not
described. They are not modelled here, and V1 shares the V2 datapath
instead of following the diagram's pipeline stage by stage.

## Best-offset prefetcher (`bop_prefetcher`)

This is Michaud's best-offset prefetcher. It searches a fixed list of
candidate offsets for the one that would have made prefetches arrive in time,
and then prefetches `X + D` for each triggering access to line `X`.

**Triggers and the recent-requests table.** A trigger is an L2 miss or the
first hit on a prefetched line. The recent-requests (RR) table holds lines
that a prefetch with the current offset would have brought in on time:

* when a prefetched line `Y` is filled, `Y - D` is recorded;
* while prefetching is off, each fetched line is recorded.

**Learning phases.**

1. On each trigger, one candidate `d` is tested. If `X - d` is in the RR
   table, `d` scores a point.
2. One pass over all candidates is a round.
3. A phase ends when a score reaches `SCORE_MAX` or after `ROUND_MAX`
   rounds.
4. At the end of a phase, the best candidate becomes `D` and the scores
   clear.
5. Prefetching stays on only if the best score was above `BAD_SCORE`. This
   way a random access stream turns the prefetcher off instead of polluting
   the cache.

**Sizes.** The published chip gives the algorithm but no sizes. This design
uses Michaud's published values:

* 52 candidates, the numbers from 1 to 256 whose only prime factors are 2,
  3 and 5. They are computed at elaboration as the divisors of
  2^8·3^5·5^3 that are at most 256.
* A 256-entry direct-mapped RR table. The index is the XOR of the two low
  bytes of the line address, and the tag is 12 bits.
* `SCORE_MAX` 31, `ROUND_MAX` 100, `BAD_SCORE` 1.

**Attachment.** On the chip the prefetcher hangs off the core's RoCC port,
but no command for it is published. Here it has no command interface. It
watches the L2's trigger and fill events and sends its requests on plain
ports.

**Other choices.** The best score and offset are tracked as scores change, so
a phase ends without a search. Prefetches are not issued across a 4 KB page.
After reset prefetching is off and `D = 1`. Prefetch requests wait in a
one-entry buffer, and a newer one replaces a request that has not been
taken.

**Strides and pages.** The evaluated kernel walks memory with byte strides
of 0x0, 0x1, 0x10, 0x100, 0x1000 and 0x10000. The sweep in `tb_bop_strides`
shows how these choices play out:

* Strides below one line give a line stream of stride 1. A stride of 0x100
  bytes is 4 lines. Both are learned in the first phase.
* With a 4-line stride about 80% of the lines are prefetched. With the
  1-line stream it is about 25%, for the drift described below.
* A stride of 0x1000 bytes (64 lines) is in the list, but every prefetch
  would cross a page, so none is issued.
* A stride of 0x10000 bytes is 1024 lines. That is past the largest offset,
  so such a stream gets no useful prefetches.
* These are the two strides with no gain on the chip, too.

**Drift.** When every candidate looks equally timely, for example when
prefetches arrive at once, a later phase can move to a larger multiple of the
stride. If that multiple reaches 64 lines, the page check silences the
prefetcher until a phase ends with a low score and turns it off. In the
sweep this happens for the one-line stride.

## Clock and reset tree (`clock_ctrl`, `clk_divider`, `clk_gate`, `reset_sync`)

**Main clock.** The active-low reset pin is inverted into one chip reset.
The `sel` register picks the main clock: the PLL output `clkpll` or the
external `CLK_IN_EXT`. After reset the external clock is selected, so the
chip can start before the PLL is programmed.

**Per-domain clocks and resets.**

* Each core gets an integer divider (`clk_divider`), then a latch-based
  glitch-free clock gate (`clk_gate`), then a three-flop reset synchronizer
  (`reset_sync`) on the gated clock. The synchronizer's input is the chip
  reset OR that core's tile-reset bit. This lets software hold a single core
  in reset.
* The uncore domain (system bus, L2, NMCEs, scratchpad) has its own divider
  and synchronizer.
* The front-bus and peripheral domain has its own divider and synchronizer.
* Resets assert at once and release three edges of the domain clock later.

**Debug output.** A debug selector picks one of `clkpll`, `clkpll0`,
`clkpll1` and `CLK_IN_EXT`. That clock is divided and driven on `CLK_OUT`
when enabled.

**Register clock.** The control registers are clocked by `CLK_IN_EXT`, so
they keep working while the PLL is reprogrammed.

| offset     | register | reset |
|------------|----------|-------|
| 0x000      | sel: 0 clkpll, 1 CLK_IN_EXT | 1 |
| 0x008      | debug_sel: 0 clkpll, 1 clkpll0, 2 clkpll1, 3 CLK_IN_EXT | 0 |
| 0x010      | CLK_OUT enable | 0 |
| 0x018      | CLK_OUT divider | 1 |
| 0x020 + 8i | core i divider | 1 |
| 0x040 + 8i | core i clock enable | 1 |
| 0x060 + 8i | core i reset hold | 0 |
| 0x080      | uncore divider | 1 |
| 0x088      | front-bus divider | 1 |
| 0x100, 0x108 | PLL control and configuration words, passed to the PLL | 0 |
| 0x110      | PLL lock (read only) | – |

**Divider behaviour.** A divider ratio of 0 or 1 passes the clock through.
For a ratio N the output is high for N/2 of every N input cycles.

**Selectors.** The selectors are plain multiplexers. Software should gate
the affected clocks, or hold the domains in reset, while it switches
sources.

**Structure and assumptions.** The structure (which dividers, gates and
synchronizers exist and which clocks feed the selectors) follows the
published clock diagram. The register map, reset values and divider
encoding are assumptions. The PLL's own register fields are not published,
so its two control words pass through unchanged.

## Scratchpad (`scratchpad`)

The scratchpad is 64 KB of SRAM, organised as 8192 64-bit words, with a
TileLink-style port. It serves one request at a time:

* A Get of one beat or one line streams its beats one per cycle, starting
  one cycle after the request is accepted.
* A Put is written beat by beat and acknowledged once.
* Addresses wrap inside the 64 KB.

The published text gives the size once as 16 KB. Its block diagram and its
SRAM total (320 KB = 256 KB L2 + 64 KB) both give 64 KB, and this design
follows them.

## Top level (`nectar_soc`)

`nectar_soc` instantiates:

* the clock tree;
* four NMCEs on the uncore clock;
* per core, a sparse accelerator with its TLB and a prefetcher on that
  core's clock. Cores 0 and 1 get V1 and cores 2 and 3 get V2;
* the scratchpad on the uncore clock.

The ports are grouped by the blocks outside this RTL that would drive them:

| port group | connects to |
|------------|-------------|
| chip pins and PLL | `resetn`, `clk_in_ext`, `clkpll*`, `pll_*`, `clk_out` |
| `clk_mmio_*` | clock-tree registers, `CLK_IN_EXT` domain |
| `nmce_mmio_*`, `nmce_rd_*`, `nmce_wr_*` | per bank: peripheral bus and the L2 bank |
| `sp_cmd_*`, `sp_resp_*`, `sp_a/d_*` | per core: RoCC and the cache port (physical addresses) |
| `sp_l1_a/d_*` | per core: sparse-element reads into the core's L1 (cores 2 and 3; idle on cores 0 and 1) |
| `sp_vm_en`, `sp_tlb_flush`, `sp_ptw_*` | per core: paging mode, SFENCE and the core's page-table walker |
| `pf_*` | per core: L2 access and fill events in, prefetch requests out |
| `spad_*` | the memory bus |
| `tile_clk/rst`, `uncore_clk/rst`, `fbus_clk/rst`, `chip_rst` | the domain clocks and resets for the external blocks |

Parameters: `N_TILES = 4`, `N_BANKS = 4`, `V2_RS_DEPTH = 4` and
`PF_LINE_W = 26` (line addresses of a 32-bit physical space).

## What is not here

The following parts are not in this RTL:

* the Rocket cores and their L1 caches;
* the L2 banks (an inclusive cache generator);
* the torus network-on-chip of the system bus and the other crossbars;
* debug and boot ROM;
* the UART, I2C, PWM, SPI, GPIO, QSPI flash and PSRAM controllers;
* the serialized-TileLink bring-up link and the Intel PLL.

None of these is designed in the published work beyond its name and role.
In the testbenches a behavioural memory, `tb/tl_mem_model.sv`, takes the
place of the L2. It can stall at random and answer out of order.

The 1.7 M-parameter model that the published chip runs needs about 1.7 MB
of int8 weights. That is more than the 320 KB of on-chip SRAM, and on the
chip it runs from off-chip DRAM over the serial link. Every kernel of the
published evaluation fits the blocks here:

* 64 B to 1 MiB memcpy, as commands of up to 2 KB;
* 8-element MACs and 8x8 matmuls;
* sparse products with 13x64 and 13x128 dense matrices;
* strided prefetch kernels.

## Simulating

Every testbench checks itself and prints one summary line,
`TB_RESULT checks=N failures=M`. It also has a watchdog that ends a hung
run. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/nectar_pkg.sv rtl/nmce.sv tb/tb_nmce.sv --top-module tb_nmce
./obj_dir/Vtb_nmce
```

The other blocks are built the same way. Always list `nectar_pkg.sv` first
and add the files the block instantiates. Testbenches that need memory also
use `tb/tl_mem_model.sv`. For the top, list every file in `rtl/` plus
`tb/tl_mem_model.sv` and `tb/tb_nectar_soc.sv`.

| testbench | what it shows |
|-----------|---------------|
| `tb_nmce` | MACs with random operands against a software dot product, saturation both ways, count clamping, memcpy, status bits, MAC latency, random memory stalls |
| `tb_sparse_accel` | V1 on an in-order memory and V2 on a memory that answers out of order, with its elements from a separate L1 port: 13x64 and 13x128 products with 8 and 12 nonzeros against a reference product; the number of rows returned |
| `tb_sparse_tlb` | translated addresses against a page-table model, same-cycle hits, replacement with more pages than entries, flush, paging off |
| `tb_bop_prefetcher` | learning a stride, prefetch addresses X+D, a new stride in a later phase, switching off on random addresses, the page check |
| `tb_clk_divider`, `tb_clk_gate`, `tb_reset_sync` | measured periods and duty cycles, glitch-free gating, asynchronous assert and three-edge release |
| `tb_clock_ctrl` | clock switch, per-core dividers and gates, tile reset hold, uncore and front-bus dividers, CLK_OUT selection and enable, PLL registers |
| `tb_scratchpad` | random line and word accesses against a reference with back-pressure, streaming rate |
| `tb_nectar_soc` | the whole top at its default parameters |
| `tb_nmce_workloads` | the NMCE on the evaluated kernels: 64 B, 128 KB and 1 MiB memcpy, an 8-element MAC, an 8x8 matmul, a matrix-vector product with 256-byte rows; prints the cycles of each |
| `tb_bop_strides` | the strided-access kernel for the strides 0x0 to 0x10000 bytes; prints the learned offsets and the share of lines brought in by prefetches |

`tb_nectar_soc` starts on the external clock and moves to the PLL. It then:

* divides one core's clock and holds another core in reset;
* runs MACs (including saturating ones) on all four NMCEs, and a memcpy on
  one of them;
* runs a sparse product on every core, with the V2 cores fed by an
  out-of-order memory and two cores using virtual addresses that a walker
  model maps elsewhere;
* trains two prefetchers on strided streams and turns one of them off with
  random traffic;
* uses the scratchpad.

It counts each of these events and fails if any never happened.
