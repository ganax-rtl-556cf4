# GANAX in SystemVerilog: a MIMD-SIMD array for transposed convolution

The generator of a generative adversarial network upsamples with *transposed
convolution*. You can picture it as an ordinary convolution over an input into
which zeros have been inserted between the real samples. For a stride of 2, about
three quarters of the enlarged input are zeros. A plain convolution engine would
spend most of its multiplies on these zeros. It would also keep every processing
element in lock step, even though output windows now differ in how many real
operands they touch.

The fix is to skip the zeros. Then each output row needs its own filter rows and
its own number of multiplies. In one row every window has the same pattern, but
neighbouring rows differ. This design follows the GANAX architecture (Yazdanbakhsh
et al., ISCA 2018) and handles the mismatch in two ways:

* **Two-level u-op issue.**
  * The PEs form a 16 x 16 array of 16 *processing vectors* (PVs). Each PV is a row
    of 16 PEs.
  * Each global u-op is either a SIMD u-op broadcast to the whole array, or a
    `mimd.exe` word. A `mimd.exe` word carries a 4-bit index for each PV into that
    PV's own 16-entry *local u-op buffer*.
  * Rows with different patterns therefore run different operations in the same
    cycle. Within one PV, all PEs run in SIMD.
* **Decoupled access and execute.**
  * Execute u-ops (`mul`, `mac`, `add`, `pool`, `act`) have no operand fields.
  * Operand addresses come from three programmable *strided index generators* per
    PE, one each for input, weight and output. Their addresses are queued in FIFOs.
  * The irregular but periodic access pattern of a zero-skipping window is a
    modulo-strided sequence. A generator produces it once it is configured, so the
    u-op stream stays short and the local buffers stay small.

All sizes are those of the published design: 16-bit fixed point and a 16 x 16 array,
with these buffers:

| Buffer | Size | Words |
|---|---|---|
| Per-PE input register | 12 x 16 bit | |
| Per-PE weight SRAM | 224 x 16 bit | |
| Per-PE partial-sum register | 24 x 16 bit | |
| Partial-sum link FIFOs | 8 x 32 bit | |
| Local u-op buffer | 16 x 16 bit | |
| Global u-op buffer | 32 x (64 + 1 mode bit), double-buffered | |
| Global data buffer | 108 KB | 55 296 |
| Instruction buffer | 27 KB | 3 456 |

## Block structure

```
ganax_top
 |- global_instr_buffer   program of all layers (host-written)
 |- global_controller     layer queue, bank loader, issuer, stall
 |- global_uop_buffer     2 banks x 32 global u-ops
 |- global_data_buffer    host port + network port
 |- data_noc              block mover between data buffer and PE buffers, multicast
 `- pv x16
     |- local_uop_buffer  16 x 16-bit execute u-ops
     `- pe x16
         |- pe_controller     decodes the u-op for this PE
         |- access_engine     3 x (strided_index_gen + sync_fifo)
         |- pe_buffer x3      input 12, weight 224, output 24
         |- sync_fifo         partial-sum link from the left neighbour
         `- execute_engine    u-op FIFO, MAC, accumulator, nonlinear_unit
```

`ganax_pkg` holds the constants, the u-op encodings and the helper functions that
build u-ops. Every file begins with a description of its interface and timing.

## Global u-ops and their encoding

A global u-op is 65 bits wide. Bit 64 selects the mode.

**MIMD-SIMD mode (`mimd.exe`, bit 64 = 1)**
* Bits `[4i+3:4i]` give the local-buffer index for PV *i*.
* The PV reads its local buffer and broadcasts the 16-bit local u-op to its PEs.
* A local u-op has the layout `[15:12]` opcode, `[11:10]` generator.
* By convention, index 0 holds `nop`, which idles a PV.

**SIMD mode (bit 64 = 0)**

| Bits | Field |
|---|---|
| `[63:60]` | opcode |
| `[59:56]` | target PV |
| `[55:54]` | generator |
| `[53:51]` | destination register |
| `[50:47]` | sub-index (LUT entry) |
| `[15:0]` | 16-bit immediate |

Opcodes:
* `add`, `mul`, `mac`, `pool`, `act`, `repeat`: execute u-ops. In SIMD mode they go to every PV.
* `access.cfg gen, reg, imm`: writes Addr, Offset, Step, End or Repeat of one generator in every PE of the target PV.
* `access.start gen`, `access.stop gen`: start or stop one generator in every PE of the target PV.
* `mimd.ld dst, imm`: loads a per-PE register in the target PV. The possible registers are:
  * the repeat count;
  * the partial-sum link mask;
  * one LUT entry.

The paper fixes the opcode set, the 16-bit immediate, the four index bits per PV and
the single mode bit. The bit positions above are this design's own.

## The strided index generator

Each generator holds Addr (the primary address), Offset, Step, End and Repeat.

* `access.start` loads the running address from Addr and the round counter from Repeat.
* While it runs and its FIFO has room, it emits `addr + Offset` each cycle and then advances:

```
sum  = addr + Step
addr = (sum < End) ? sum : sum - End      // a wrap ends one round
```

* Each wrap decrements the round counter. At zero the generator stops by itself.
* `access.stop` halts it at once. A later `access.start` begins again from Addr.

With Step 2 and End 5, the generator visits 0, 2, 4, 1, 3, 0, 2, 4, ... . This is
the order in which a 5-tap filter row is needed by the even and odd columns of a
stride-2 transposed convolution.

## Execute engine and its operand rules

Execute u-ops wait in a 4-entry u-op FIFO. The head fires in the cycle when every
address it needs is at the head of its address FIFO. It fires `count` times; the
count was attached by a preceding `repeat`. Buffers are read combinationally, and
results land at the next clock edge.

| u-op | effect | addresses popped |
|------|--------|-----------|
| `mul` | acc = IN[i] * W[w] | input, weight |
| `mac` | acc += IN[i] * W[w] | input, weight |
| `pool` | acc = max(acc, IN[i] << FRAC) | input |
| `add` | r = acc + left partial sum (if enabled); OUT[o] = sat16(r >>> FRAC); r sent right (if enabled); acc = 0 | output |
| `act` | OUT[o] = LUT(IN[i]) | input, output |

Number format and accumulator:
* Operands are signed Q7.8 (`FRAC` = 8).
* The accumulator and partial-sum links are 32 bits wide.
* The lookup table has 16 entries, indexed by the top four bits of the operand. At reset it holds a quantised ReLU.

Two per-PE bits from the link mask control `add`:
* whether this PE adds the partial sum arriving from its left neighbour;
* whether it forwards its sum to the right.

Addresses at or beyond a buffer's depth read as zero. This supplies the convolution's
zero padding without storing it.

## How a transposed convolution is mapped

The reference program (`tb/ganax_prog.svh`) runs a 4 x 4 input, a 5 x 5 filter and
stride 2 with padding 2, producing a 7 x 7 output. It maps onto the array like this:

1. **Rows.** Output row *r* belongs to PV *r*.
   * An even row needs filter rows 0, 2 and 4. It uses a chain of three PEs.
   * An odd row needs filter rows 1 and 3. It uses a chain of two PEs.
   * PE *j* of the chain holds the matching input row and filter row. Partial sums flow left to right, and the last PE of the chain holds the finished output row.
2. **Columns.** Within a row, even columns need taps 0, 2 and 4; odd columns need taps 1 and 3.
   * The weight generator (Step 2, End 5, two rounds) produces these taps in order, one window after another.
   * The output generator steps through the columns.
   * For each window, one SIMD `access.cfg`/`access.start` per PV sets the input window's offset.
3. **Operations.** Each window is a short local program.
   * An even window with three taps is `mul`, `repeat`, `mac` (x2), `add`.
   * An odd window with two taps is `mul`, `mac`, `add`.
   * Every row does both kinds of window, but in opposite column phases. So in a given step, some PVs run three-tap windows while others run two-tap windows. `mimd.exe` sends each PV its own local index. The other nine PVs receive index 0 (`nop`).

No multiply ever touches an inserted zero.

## Global controller, double buffering and stalls

The host supplies layers through a queue. A layer is a base address and a length of
up to 32 u-ops in the instruction buffer.

* **Loader.** It copies the next layer into the global u-op bank that is not executing, at one u-op per cycle.
* **Issuer.** It walks the executing bank and broadcasts one u-op per cycle. It moves to the other bank when that bank holds a layer.
* **Double buffering.** Loading overlaps issue. The `overlap` counter counts the cycles in which both happened.
* **Lock step.** Issue is lock-step across the array. A u-op waits (`stall`) while any PE cannot take it. This happens in two cases:
  * an execute u-op meets a full u-op FIFO;
  * an `access.cfg` or `access.start` targets a generator that is still running. This interlock is what lets a program reconfigure a generator right after starting the computation that uses it.

## Network and host ports

There is no off-chip memory controller. The host writes and reads the global data
buffer through its own port, and it also:
* writes the instruction buffer;
* writes the local u-op buffers, one PV or all PVs at once;
* issues network commands.

A network command moves `len` words in one direction:
* from the data buffer into one PE's input, weight or output buffer (optionally multicast to that PE position in every PV);
* from a PE's output buffer back into the data buffer.

One word moves per cycle.

## Verification

Each block has a self-checking testbench in `tb/`, which compares against a
behavioural model using random stimulus.

`tb_ganax_top` runs the full-size array at its default parameters. It does the following:
* loads data through the network, sending the even-row filters by multicast and then correcting the odd rows;
* runs the 7 x 7 transposed convolution on seven PVs;
* drains the results back through the network;
* compares all 49 outputs with a reference model.

It also counts each mechanism and fails if one never occurs. In the last run, it saw:

| Mechanism | Count |
|---|---|
| SIMD issues | 266 |
| `mimd.exe` issues | 25 |
| Cycles with the array stalled | 327 |
| Cycles of overlapped bank loading | 248 |
| Layers | 10 |
| Repeated u-ops | 8 |
| Horizontal partial-sum transfers | 7 |
| Generator wrap-arounds | 7 |
| Multicasts | 4 |
| Read-backs | 7 |

The stalls are forced by a long network write that keeps the output-buffer port busy.

To simulate with plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -Itb -y rtl -y tb --top-module tb_ganax_top rtl/ganax_pkg.sv tb/tb_ganax_top.sv
obj_dir/Vtb_ganax_top +verilator+rand+reset+2
```

Every testbench ends by printing `TB_RESULT checks=N failures=M`. The top testbench
takes about 2.5 minutes to compile and runs in well under a second.

## Where this design departs from, or goes beyond, the published architecture

* **Operand routing of `add`.** The paper's `add` takes two source addresses and one destination address. Here `add` sums the accumulator and the left neighbour's partial sum, so it pops only a destination address.
* **Horizontal accumulation.** The paper says only that partial sums are accumulated across PEs. The link mask and the rule that the last PE of a chain holds the result are this design's own.
* **Sequencing.** The generator interlock, the lock-step stall and the host layer queue are choices made here; the paper does not describe how the controller sequences work.
* **Network and off-chip memory.** The network is a simple block mover, and there is no DRAM interface. The paper names a NoC and DDR4 memory without detail.
* **Idle PEs.** PEs outside a chain, in an active PV, execute the same u-ops on their own (unused) buffers.
* **Workload scope.** Real GAN layers have many channels and are far larger than the per-PE buffers. They must be tiled in rows, columns and channels by the program generator. Weights are streamed in through the host port. The largest layers need 4–26 MB of weights against the 108 KB data buffer. No such program generator is included, and only the single-channel example above has been run.
* **Not reproduced.** Clock rate (500 MHz target), area, energy and the speed-ups reported for the six evaluated GANs are not reproduced.
