# A lane-split RISC-V vector unit with an RVV 1.0 register layout

This is the RTL of a RISC-V vector coprocessor built from identical *lanes*.
Each lane owns a slice of the vector register file (VRF) and its own
functional units. The design solves one problem that RVV 1.0 creates for this
kind of machine. In RVV 1.0 a vector register is just a byte array, and its
element width (EEW) can change from one instruction to the next. A
lane-split VRF still has to place element *i* in lane *i mod L*. So the
byte-to-lane mapping depends on the element width the register was last
written with. The design keeps the register file in that element-interleaved
layout. It deals with the cost in four ways:

* a **shuffle/deshuffle** network between memory order and lane order;
* a per-register **EEW table** in the dispatcher, which injects a
  **reshuffle** when a register is reinterpreted;
* a **mask unit** that fetches a mask register from all lanes and hands each
  lane its own bits;
* a **three-step reduction**: intra-lane, inter-lane and SIMD.

The scalar side holds a small accelerator dispatcher, a memory-ordering stall
and an invalidation filter. Together they keep the vector unit's memory
traffic coherent with a write-through scalar data cache.

The main configuration, and the parameter defaults, are:

* 4 lanes (`NR_LANES`);
* VLEN = 4096 bits, so a 16 KiB VRF and 4 KiB per lane;
* 8 single-port SRAM banks per lane (`NR_BANKS`).

## Data layout across lanes

Each lane holds 64-bit VRF words. One register is 4096/64/4 = 16 words per
lane, so the lane holds 512 words in all. Word *w* of register *v* is at
address `v*16 + w`, in bank `addr mod 8`. Banks are not rotated per register,
so different registers' word 0 land in the same bank.

Element *i* of width `EEW` bytes lives in lane `i mod L`, at byte offset
`(i div L)*EEW` of the lane's concatenated words. Word *k* of all lanes
together covers memory bytes `k*8L .. k*8L+8L-1` of the vector. A *beat* of
`8L` bytes (32 bytes here) is therefore the natural unit of every cross-lane
transfer. Inside a beat:

    lane byte  l*8 + j   <->   memory byte ((j div EEW)*L + l)*EEW + (j mod EEW)

`ara_shuffle` implements this permutation for EEW = 1, 2, 4 and 8 bytes, as
one small multiplexer per byte. A one-bit instance of the same module
remaps byte enables.

### Reshuffle

The dispatcher records the EEW of every register. Take an instruction that
writes register *vd* with a new EEW. If it does not overwrite all of *vd*,
the bytes it leaves alone (the tail, which must stay undisturbed) would be
read back under the wrong mapping. The dispatcher first issues a reshuffle
of *vd*: a slide by zero through the slide unit, reading with the old EEW
and writing with the new one. Each register of an LMUL group is checked and,
if needed, reshuffled separately. A write that covers the whole register
needs no reshuffle.

## Lane

A lane (`lane`) contains:

* **`lane_vrf`**: eight 1RW banks of 64-bit words with byte enables, and a
  crossbar in each direction. Six masters compete per bank, with fixed
  priority, lower index first. The masters are the external write
  (VLSU/SLDU), the functional-unit result write, the external read, and the
  three operand requesters A, B and C. A grant is combinational; read data
  return one cycle later.
* **`operand_requester`** ×3: each walks a register's words from a base
  address. It reads one word per cycle. It never holds more reads in flight
  than its operand queue has room for.
* **`operand_queue`** ×3: 4-deep FIFOs between the VRF and the units.
* **`valu`**: a SIMD integer ALU on 64-bit words at 8/16/32/64-bit element
  width. It does add, sub, and, or, xor, min/max (signed and unsigned) and
  merge. It also has an accumulator for reductions.
* **`vmfpu`**: a two-stage SIMD integer multiplier for `vmul` (low half) and
  `vmacc`.
* **`lane_sequencer`**: takes one operation from the main sequencer. It
  works out how many of the `vl` elements fall in this lane
  (`ceil((vl-l)/L)`) and how many words that is. It starts the requesters it
  needs, feeds the unit, and writes results back. Byte enables cover the
  tail and, for masked operations, the mask.

## Reductions

An integer reduction (`vredsum`, `vredand`, `vredor`, `vredxor`,
`vredmin[u]`, `vredmax[u]`) runs in three steps. All of them are in this RTL:

1. **Intra-lane.** Every lane first clears its VALU accumulator to the
   operation's identity. It then folds all its `vs2` words into it, one word
   per cycle. Bytes past the last element count as the identity.
2. **Inter-lane.** The slide unit runs `log2(L)` steps. In step *s*, each
   lane *l* with `l mod 2^(s+1) = 0` receives the accumulator of lane
   `l + 2^s` and combines it with its own. After the last step, lane 0 holds
   everything.
3. **SIMD and scalar.** Lane 0 folds the SIMD elements of its accumulator in
   `log2(64/SEW)` halvings. It combines the result with element 0 of `vs1`
   and writes element 0 of `vd`.

The intra-lane step takes about `VL_B/(8L)` cycles and the inter-lane step
takes `log2 L` steps. So long vectors amortise the fixed cost, while more
lanes shorten the first step and lengthen the second.

## Slide unit

`sldu` reads beats from all lanes, shifts them in memory byte order, and
writes them back:

* for `vslideup`, by `offset*EEW` bytes;
* for `vslidedown`, by `-offset*EEW` bytes.

It keeps the previous beat so that it can shift across beat boundaries. A
shift is a byte rotate of the pair {current, previous}. Destination elements
below the offset (slide up) are not written. Elements read past the register
group (slide down) read as zero. The same machinery runs the reshuffle
(shift 0, source and destination EEW differ) and the data movement of the
inter-lane reduction.

## Mask unit

`masku` fetches `v0` from all lanes, as many beats as `vl` requires. It
deshuffles each beat with `v0`'s recorded EEW and keeps the mask as a flat
bit vector. Each lane then asks for the word it is about to write. The mask
unit returns that word's byte enables by computing, for every byte, the
element index `((8w+j) >> eew)*L + l`. Mask-producing instructions, such as
compares and mask logic, are not implemented.

## Load/store unit

`vlsu` handles unit-stride `vle`/`vse` of 8 to 64-bit elements, with a
base aligned to a beat.

* **Loads.** Each load request fetches one beat. The response is shuffled
  with the load's EEW and written into word *k* of every lane.
* **Stores.** A store reads word *k* from every lane and deshuffles it with
  the EEW the source register was written with. It then sends it with byte
  strobes that cover the `vl` elements.

The memory port is a simple in-order valid/ready request channel plus a
response channel (address, write flag, 32-byte data, strobes). Every request
gets one response, writes included.

## Dispatcher and sequencer

* **`ara_dispatcher`** decodes the supported instructions:
  * `vsetvli`/`vsetvl`;
  * integer OPIVV/OPIVX/OPIVI arithmetic and logic;
  * `vmul`/`vmacc` and the integer reductions;
  * `vle`/`vse`;
  * `vslideup`/`vslidedown`.

  It holds `vl`, `vtype` and the EEW table, injects reshuffles, and answers
  each instruction once. The answer carries an error flag for anything it
  does not support.
* **`ara_sequencer`** executes one instruction at a time. It sends the
  operation to the lanes, the VLSU or the SLDU. For a masked operation it
  first has the mask unit fetch `v0`. For a reduction it runs the three
  phases in turn. It pulses `vld_done`/`vst_done` when a vector load or
  store completes.

There is **no chaining**. Units do not overlap, so throughput is lower than
a machine that chains the multiply into the reduction.

## Scalar-side interface and coherence

* **`acc_dispatcher`** is a 4-entry queue between the scalar core's decode
  stage and the vector unit. Instructions are pushed while still
  speculative. Each `commit` makes the oldest speculative entry final, and
  `flush` drops every entry that is still speculative. The head is sent only
  once it is final, and a vector memory access also needs the ordering
  logic's permission. A pre-decoder tells the core whether an instruction is
  a vector instruction and whether it needs a scalar operand.
* **`mem_ordering`** counts vector loads and stores in flight and applies
  three rules:
  * a scalar load may issue only when no vector store is in flight;
  * a scalar store may issue only when no vector load or store is in flight;
  * a vector memory access may issue only while no scalar store is pending.
* **`axi_inval_filter`** sits on the vector unit's memory request path. For
  every store beat it queues the addresses of the 32-byte data-cache lines
  written. A line that repeats the previous one is skipped. It holds the
  store back while the queue is full. With a write-through data cache, this
  keeps the scalar core's view coherent without fences.

`ara_system` is the top. It contains the accelerator dispatcher, the
ordering logic, the vector unit (`ara`) and the filter. The scalar core, its
caches and the memory interconnect are outside, so their signals are ports:

* instruction push/commit/flush and the response;
* scalar load/store permissions;
* cache invalidations;
* the memory port.

## Departures from the described architecture

* No floating point: the VMFPU multiplies integers only, so FP64 kernels
  such as matrix multiply and 2-D convolution cannot run.
* No chaining and no concurrent units; one instruction at a time.
* The memory port is a simplified channel, not AXI.
* Only unit-stride loads and stores with a beat-aligned base.
* Only the integer instruction subset listed above. No mask-producing
  instructions, and no widening or narrowing.
* The VRF bank of a word is its address mod 8, with no barber-pole
  rotation.
* These are this design's own choices: queue depths, arbitration priority,
  the commit/flush protocol, the cache line size, and every EEW resetting to
  8 bits.

## Simulating

All RTL is in `rtl/`. The package `rtl/ara_pkg.sv` must come first. Each
testbench in `tb/` is self-checking. It prints
`TB_RESULT checks=N failures=M` and stops, and a watchdog ends it if it
hangs. For example:

    verilator --binary --timing -Wno-fatal --top-module tb_ara_system \
        rtl/ara_pkg.sv $(ls rtl/*.sv | grep -v ara_pkg) tb/tb_ara_system.sv
    ./obj_dir/Vtb_ara_system

`tb_ara_system` runs the whole design at its default size, against a
behavioural 32 KiB memory with random back-pressure. It covers:

* vector arithmetic, loads and stores at every element width;
* an LMUL=2 group;
* multiply-accumulate;
* reductions;
* slides in both directions;
* masked execution;
* reshuffles;
* an illegal instruction and a flushed speculative instruction;
* the coherence rules and the invalidation of every written line.

It counts each mechanism (reshuffles, ordering stalls, invalidations) and
fails if one never happens.

`tb_dotp` runs a dot product, `vmul.vv` followed by `vredsum.vs`, on
vectors of 64, 512 and 4096 bytes with 8-bit and 64-bit elements. It checks
each result and times the kernel. The measured counts are 36, 64 and 288
cycles at both element widths. A fully chained reduction would ideally take
`VL_B/(8L) + 1 + log2 L` cycles, which is 5, 19 and 131 here. The extra
cycles come from running the multiply and the reduction one after the
other, plus start-up.

The other testbenches each check one block against a reference model.
