# ARCANE: a last-level cache that computes

A microcontroller's data cache is, physically, a large set of SRAM banks sitting
next to the processor. ARCANE makes those banks do two jobs. Normally they are a
128 KiB fully associative last-level cache (LLC) for the host CPU. When the host
issues a custom matrix instruction, the same banks become the vector register
files of four near-memory vector processing units (VPUs). The VPUs then compute
on the data where it already sits.

A small controller CPU inside the cache, the eCPU, keeps the two roles from
colliding. It decodes the host's matrix instructions in software. It moves
operands into vector registers and runs the kernel as a sequence of vector
instructions. It then puts the result back into the cache. The hardware gives
the eCPU the mechanisms it needs for this:

- a cache lock;
- per-line "busy computing" and "operand" status;
- an address table that stalls host accesses that would race with a running kernel;
- a 2D DMA that goes through the cache controller;
- a coprocessor bridge that turns the host's instruction into an interrupt for the eCPU.

This RTL implements that hardware. The eCPU itself (an RV32IMC core) and its
firmware are not included. The eCPU's instruction-fetch, data, interrupt and
vector-issue ports are ports of the top module. The end-to-end testbench
plays the eCPU's part.

## Geometry: one line = one vector register

The default configuration has:

- `NUM_VPU` = 4 VPUs.
- `LANES` = 4 lanes per VPU.
- `VRF_BYTES` = 32 KiB of vector register file (VRF) per VPU.
- 1 KiB vector registers, so 32 registers per VPU.

A cache line is 1 KiB, the same size as a vector register. The cache therefore
has exactly `NUM_VPU x 32 = 128` lines. Line `i` *is* vector register
`i mod 32` of VPU `i / 32`: it occupies VRF words `(i mod 32) * 256 ...+255`
of that VPU.

Each VRF is built from `LANES` single-port SRAM banks of 32-bit words. Word `w`
is in bank `w mod LANES`, row `w / LANES`. A VPU therefore reads or writes one
row, `LANES` consecutive words, per cycle, one word per lane. A per-VRF arbiter
shares the banks between the VPU lanes and the cache-side port. The lanes always
win. A cache-side access to a bank a lane is using gets no grant in that cycle
and waits.

| parameter      | default | meaning                                  |
|----------------|---------|------------------------------------------|
| `NUM_VPU`      | 4       | VPUs / VRFs                              |
| `LANES`        | 4       | banks per VRF, ALUs per VPU              |
| `VRF_BYTES`    | 32768   | bytes per VRF                            |
| `AT_ENTRIES`   | 16      | address-table entries                    |
| `EMEM_BYTES`   | 16384   | eCPU firmware memory                     |
| `LINE_BYTES`   | 1024    | line = vector register size (package)    |

Configurations with 2 and 8 lanes are obtained by setting `LANES`. The bank
depth follows automatically.

## Blocks and how they connect

```
 host cache port ─┐                          ┌─ VRF0 ─ VPU0
 SW DMA ──────────┼─ llc_ctl ── VRF select ──┼─ VRF1 ─ VPU1      ← dispatch ← eCPU vector port
 HW DMA ──────────┘  (cache table,           ├─ VRF2 ─ VPU2
     │                address table)         └─ VRF3 ─ VPU3
 external memory
 host cfg port ─┐
 eCPU data ─────┴─ ctrl_bus ── eMEM | xif_bridge | cfg_reg | addr_table | sw_dma
 host CV-X-IF ──── xif_bridge ── irq ──> eCPU
```

| module        | role |
|---------------|------|
| `arcane_top`  | everything above; generates the VPU/VRF pairs |
| `llc_ctl`     | cache FSM, lock, hazard stalls, DMA routing; contains `cache_table` and `addr_table` |
| `cache_table` | tag, valid, dirty, operand (sd), busy and age of every line; associative lookup and victim choice |
| `addr_table`  | registered kernel operands (start, end, role, busy) |
| `hw_dma`      | whole-line refill and write-back between external memory and a VRF |
| `sw_dma`      | 2D DMA programmed by the eCPU; its memory port goes into `llc_ctl` |
| `xif_bridge`  | coprocessor-interface slave towards the host |
| `cfg_reg`     | lock, line release, VPU busy flags, per-VPU dirty counts |
| `emem`        | 16 KiB eCPU firmware memory, fetch port plus bus port |
| `ctrl_bus`    | eCPU data port and host configuration port to the register slaves and eMEM |
| `dispatch`    | sends the eCPU's vector instructions to the VPUs selected by a mask |
| `vpu`         | vector unit working in place on its VRF |
| `vrf`, `sram_bank` | banked vector register file with the arbiter |

All buses use one request/grant/read-valid protocol (`bus_req_t` / `bus_rsp_t`
in `arcane_pkg`):

- A transfer happens in the cycle where `req` and `gnt` are both high.
- The master holds `req` and the request fields stable until it gets `gnt`.
- Read data return, in order, with `rvalid` one or more cycles later.
- Writes get no `rvalid`.

`llc_ctl` and the bridge carry assertions for these hold rules.

## The cache

Lookup compares the tag against all 128 lines at once. A hit is granted in the
cycle of the request, and its read data arrive one cycle later. A hit costs one
cycle, unless a VPU is using the same bank or the line holds kernel operand
data (see below).

A miss goes through these states:

1. `VICTIM`: pick a line. The first invalid line is taken. Otherwise the
   oldest valid line that is not busy computing is taken.
2. `WB`: if the victim is dirty, the HW DMA writes it back.
3. `FILL`: the HW DMA refills the line.
4. The request is replayed as a hit.

Writes that miss also allocate a line.

Replacement is an approximate LRU. Every line has a saturating 3-bit age. The
line that is hit goes to age 0, and every other valid line ages by one.

The HW DMA moves one 32-bit word at a time. With a zero-wait memory that takes
three cycles per word, so a clean miss costs about 770 cycles. A dirty miss
costs about twice that.

`cache_table` keeps a count of dirty lines per VPU. The eCPU reads these counts
in `cfg_reg`. Its scheduler picks the VPU with the fewest dirty lines, because
that VPU is the cheapest to clear for a kernel.

## Sharing lines with kernels

This is the hard part of the design. A line can be in four situations:

| state | valid | busy | who may touch it |
|-------|-------|------|------------------|
| free / invalid | 0 | 0 | victim candidate |
| cached | 1 | 0 | host (hits), SW DMA |
| cached operand (`sd`=1) | 1 | 0 | host, but only after the address-table check |
| busy computing | 0 | 1 | only the VPU and the SW DMA's register window; never chosen as victim |

### Claiming registers

The SW DMA has two kinds of addresses:

- Ordinary addresses are cached accesses, like the host's. The lock and the
  hazard stalls never hold them up, because they are the eCPU's own traffic.
- Addresses in the window `0xF000_0000 + line * 1024 + offset` (128 KiB) go
  straight to a vector register.

The first window access to a line *claims* it. If the line holds dirty cached
data, that data is written back first. The line is then invalidated and marked
busy. A matrix is allocated into a VPU by a 2D DMA from its memory address into
the window, and the transfer itself claims the destination registers. A result
is put back by a DMA from the window to the result's memory address. If that
address misses, the line is first fetched and then updated, and it is left
dirty ("fetch-on-write").

The eCPU hands busy lines back by writing a line range to the `RELEASE`
register. The lines become free.

> A VPU instruction may only write registers that have been claimed. The VPU
> does not check this, and writing an unclaimed register overwrites whatever
> cache line lives there. The kernel runtime must claim temporary and result
> registers before use. Any DMA write into the window does this; the testbench
> uses a one-word write.

### The lock

The eCPU sets `LOCK.req` in `cfg_reg`. The controller grants it, visible as
`LOCK.gnt`, only between host operations: when the FSM is idle and no host
request is waiting. While the lock is held, every host access stalls. The eCPU
holds the lock around operand allocation and result write-back, so the host
never sees a half-moved matrix.

### The address table and the hazard stalls

When the eCPU accepts a kernel, it writes each operand's byte range into the
address table. It sets the operand's role (source or destination) and its
`busy` flag. Writing an entry also marks every cached line that overlaps the
range as an operand line (`sd`). Lines refilled later inside such a range get
the same mark.

For a host access, the controller consults the table only when it matters:

- on a miss;
- on a hit to an `sd` line.

All other hits keep their single-cycle path. The controller then stalls:

- a host **store** to a busy **source** (WAR: the kernel has not yet copied it);
- **any** host access to a busy **destination** (RAW and WAW: the result is
  not yet written back).

The stall lasts until the eCPU clears the entry's `busy` flag.

The two kinds of lookup are timed differently:

- A hit on an `sd` line spends one extra cycle on the lookup. Its result is
  registered, and in the following cycle that registered verdict serves or
  stalls the access. While the access stalls, the verdict is refreshed every
  cycle.
- On a miss the lookup is combinational, because the refill costs hundreds of
  cycles anyway.

Register layout of entry `e` (word offsets from the table base; word `4e+3` is unused):

| word | content |
|------|---------|
| `4e+0` | start byte address |
| `4e+1` | end byte address (inclusive) |
| `4e+2` | bit 0 valid, bit 1 busy, bit 2 role (1 = destination) |

## Offloading an instruction

The host sees the cache as a coprocessor on a reduced CORE-V-X-IF: issue,
commit and result channels. The matrix extension uses the custom-2 major
opcode `0x5b`:

- `func5` in `instr[11:7]` selects the kernel.
- Values 0 to 30 are kernels `xmk0` to `xmk30`.
- 31 is `xmr`, which binds a matrix's address and shape to a logical matrix
  register.
- The host's source registers carry 16-bit fields: matrix indices and scalars.

Only the firmware interprets these fields.

`xif_bridge` steps through the offload:

1. **Issue.** A custom-2 instruction is latched with its operands and id, and
   the eCPU's bridge interrupt is raised. Any other opcode is refused
   (`accept = 0`) at once. `issue_ready` stays low meanwhile.
2. **Decode.** The firmware reads `INSTR` and `RS1..RS3` and decides. It writes
   `DECISION` = {accept, valid}. The bridge then completes the issue handshake
   with that `accept`.
3. **Commit.** Commit arrives from the host:
   - If it is a commit, the instruction is handed over (`STATUS.committed`).
     When the firmware writes `ACK`, the bridge returns the id on the result
     channel.
   - If it is a kill, `STATUS.killed` is raised with the interrupt. The bridge
     idles once the firmware acknowledges.

The instruction does not write back a register. The host continues as soon as
the result has been sent. The kernel itself keeps running in the cache, and
the address-table stalls protect its operands.

Bridge registers (word offsets): 0 `INSTR`, 1–3 `RS1`–`RS3`, 4 `ID`,
5 `STATUS` {killed, committed, pending}, 6 `DECISION`, 7 `ACK`.

Interrupts to the eCPU (`ecpu_irq_o`):

- bit 0 is the bridge;
- bit 1 is SW-DMA-done.

## Controller registers

Controller-bus map. The host reaches it through its configuration port. The
eCPU reaches it through its data port and has priority.

| base        | slave       | registers (word offsets) |
|-------------|-------------|--------------------------|
| `0x0000_0000` | eMEM      | 16 KiB firmware (host uploads, eCPU fetches on its own port) |
| `0x0001_0000` | bridge    | see above |
| `0x0001_0100` | cfg_reg   | 0 `LOCK` {gnt, req}; 1 `RELEASE` {last line [31:16], first line [15:0]}; 2 VPU busy mask; 4+v dirty lines of VPU v |
| `0x0001_0200` | addr_table | 4 words per entry (the fourth unused), see above |
| `0x0001_0400` | sw_dma    | 0 `SRC`; 1 `DST`; 2 `SRC_STRIDE`; 3 `DST_STRIDE` (bytes); 4 `WIDTH` (words); 5 `HEIGHT` (rows); 6 `CTRL` (write 1 to start); 7 `STATUS` {done, busy} |

Unmapped addresses read as zero.

The SW DMA copies `HEIGHT` rows of `WIDTH` words, one word read and then
written at a time. Its `done` flag is also its interrupt. The flag is cleared
by the next start.

## The vector units

The eCPU issues vector instructions on its coprocessor port, which goes to
`dispatch`. The dispatcher delivers an instruction to every VPU in the mask
`rs2[16 +: NUM_VPU]`. It waits until all of those VPUs are ready, so one
instruction can be broadcast to several VPUs.

The VPU is a simple stand-in for a full near-memory vector unit. It has its own
small instruction set:

```
instr[6:0]   = 0x0b            instr[25]    = .vx (second operand = rs1)
instr[11:7]  = vd              instr[31:26] = operation
instr[14:12] = element width   rs1          = scalar / slide amount
               (0: 8, 1: 16, 2: 32 bit)      rs2[15:0] = vector length (elements)
instr[19:15] = vs1
instr[24:20] = vs2
```

| op | operation |
|----|-----------|
| 0 `VADD` | `vd = vs1 + vs2` |
| 1 `VSUB` | `vd = vs1 - vs2` |
| 2 `VMUL` | `vd = vs1 * vs2` |
| 3 `VMACC` | `vd += vs1 * vs2` |
| 4 `VMAX` | signed maximum |
| 5 `VMIN` | signed minimum |
| 6 `VSRA` | `vd = vs1 >>> vs2` |
| 7 `VMV` | move or scalar splat |
| 8 `VSLIDEDN` | `vd[i] = vs1[i + rs1]`, elements past the vector length read 0 |

Elements of 8 and 16 bits are packed in each 32-bit word and processed as
SIMD. Results wrap.

A register is processed one row (`LANES` words) at a time:

- one cycle for each source read (`vs1`; `vs2` unless `.vx`; `vd` for `VMACC`);
- then one write cycle.

A slide reads `LANES` consecutive source words starting anywhere. They always
fall in different banks, and a rotation puts each word on its lane, so a slide
by whole words costs 2 cycles per row. If 8- or 16-bit elements are slid by an
amount that is not a whole number of words, the unit also reads the next
`LANES` words. It then shifts each pair of neighbouring words by the leftover
bytes, so such a slide costs 3 cycles per row.

So `VADD.vv` over a full 1 KiB register at 4 lanes takes 64 × 3 = 192 cycles.
`VADD.vx` takes 128, and `VMACC.vx` takes 192. `done` pulses with the last
write. An unknown opcode or operation is dropped and flagged with `illegal`.

With these operations a convolution is built as follows:

- shifted copies of an input row come from `VSLIDEDN`;
- products are accumulated with `VMACC.vx` by the filter taps;
- a leaky ReLU is `VMAX(x, x >>> k)`;
- max-pooling is `VMAX` of slid copies.

## Timing summary

| event | cycles |
|-------|--------|
| cache hit (host) | grant in the request cycle, data 1 cycle later |
| address-table check | +1 cycle on hits to operand (`sd`) lines; folded into the miss path |
| line refill / write-back | 3 per word, 256 words, plus memory wait states |
| SW DMA | about 3 + read and write latencies per word |
| VPU, per row of `LANES` words | 1 per source read + 1 write |
| eMEM, registers | 1-cycle reads |

## Departures from the published design, and open points

- **No eCPU, no runtime.** The controller core and its firmware are outside
  the RTL. The firmware covers the kernel decoder, the scheduler, the matrix
  allocator and the kernel library. The top brings out the core's ports.
- **The VPU is not the original near-memory vector unit.** Its instruction
  encoding, operation set and pipeline are this design's own. They are kept
  small, but they suffice for convolution, ReLU and pooling micro-programs.
  Throughput numbers of the original (for example its peak operations per
  cycle) should not be expected.
- **The 2D DMA is a simple word-serial engine.** It replaces the platform's
  own 2D DMA and has its own register map.
- **The HW DMA does no bursts.** Refills are slow (3 cycles per word) compared
  with a pipelined engine.
- **The tag compare is combinational.** The 128-way tag compare is done in the
  request cycle, and so is the address-table check on a miss. Whether this
  meets the intended clock has not been checked by any timing analysis.
- **Claiming is explicit.** Registers must be claimed through the DMA window
  before a VPU writes them (see above).
- **Chosen details.** The following are all choices of this design: the
  address-table size, the replacement counter width, bus priorities (SW DMA
  before host, eCPU before host on the controller bus), register maps and the
  `xmr` func5 value.

## Simulating

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=<n> failures=<m>` and stops itself after a watchdog limit.
`tb_arcane_top` runs the whole design at its default size.

It acts as both the host and the eCPU:

1. It uploads firmware words.
2. It fills the cache past its capacity, which causes misses, evictions and
   write-backs.
3. It offloads a kernel instruction and accepts it.
4. It registers the operands.
5. It takes the lock.
6. It moves a 64-word matrix into a vector register with the 2D DMA.
7. It runs a 3-tap convolution with leaky ReLU on the VPU.
8. It writes the result back into the cache.

While the kernel runs, the host provokes WAR, RAW and lock stalls. At the end
the testbench kills one offload, and one more is refused. Each mechanism is
counted, and the test fails if one never happened.

`tb_conv_layer` runs the kind of layer this architecture was built for, also at
the default size. It is a 3-channel convolution followed by ReLU and 2×2
max-pooling. It runs with int32, int16 and int8 data and with 3×3, 5×5 and 7×7
filters, at every input size where one channel fits in one vector register:
8×8 and 16×16, plus 32×32 for int8. Each channel is one vector register. Every filter tap costs one slide and one
scalar multiply-accumulate over the whole register. The testbench checks the
pooled output element by element. It also checks the VPU time against the row
model of the timing table, plus a small issue overhead. At 4 lanes a
16×16×3 layer with 7×7 filters takes about 47,000 cycles of vector work:
147 taps × 5 cycles × 64 rows.

Packed 8- and 16-bit results are written back as whole rows, because the DMA
moves whole words. Larger images need the runtime to cut them into row bands,
so they are not exercised.

With Verilator 5:

```
verilator --binary --timing -Irtl -Itb rtl/arcane_pkg.sv \
  $(ls rtl/*.sv | grep -v arcane_pkg) tb/ext_mem_model.sv tb/tb_arcane_top.sv \
  --top-module tb_arcane_top -o sim
./obj_dir/sim
```

For a single block, replace the last testbench file and the top module name.
For example, use `tb/tb_vpu.sv` with `--top-module tb_vpu`. Add
`tb/ext_mem_model.sv` for the testbenches that use external memory:
`tb_hw_dma`, `tb_sw_dma`, `tb_llc_ctl` and `tb_arcane_top`.

`ext_mem_model` is a behavioural memory with random wait states. An unwritten
word `i` reads as `(i * 0x9E3779B1) ^ 0x5A5A0F0F`, so the testbenches can
predict refill data without storing it.
