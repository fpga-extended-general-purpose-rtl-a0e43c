# FPGA-extended core: instruction slots, disambiguator and bitstream cache

A general-purpose core cannot afford to harden every instruction extension it
might want. In the FPGA-extended modified Harvard architecture, part of the
ISA is instead implemented in a few small FPGAs ("instruction slots") inside
the core, and the hardware loads the right configuration on demand, the same
way a cache loads instructions. Bitstreams live in the ordinary address
space, next to code and data; a third level-1 cache, the *bitstream cache*,
sits beside the instruction and data caches; and a small fully-associative
structure in the core, the *instruction disambiguator*, keeps track of which
slot currently implements which instruction. Software never sees the
reconfiguration: an instruction whose implementation is not loaded simply
stalls the core, like an instruction-cache miss, until its bitstream has been
streamed into a slot. That is also what makes context switches free of any
software involvement: after a switch, the new task's instructions just hit or
miss.

This repository gives synthesizable SystemVerilog for that subsystem, in the
configuration of an RV32IMF core whose M and F extensions are moved into
four reconfigurable slots:

```
             decode                         +------------------------------+
 insn,rs1..3 ------> insn_group_decoder --> |  instruction_disambiguator   |
                      (group = tag)         |  tag array, LRU, halt, muxes |--> res_valid/res_data
 in_valid/in_ready/halt <-----------------> |                              |
                                            +--+-----------+-----------+---+
                    start, operands (demux) |  cfg words  |  bitstream |
                    result (mux)            v  (demux)    v  request   v
                                     +-----------+   +------------------+
                                     | fpga_slot |x4 | bitstream_cache  |--> 256-bit refill
                                     | chain+LUTs|   | 64 x 91,200 bits |    from L2 (mem_*)
                                     +-----------+   +------------------+
```

`fpga_ext_top` is that whole picture. The core pipeline, its instruction and
data caches and the rest of the memory hierarchy are not part of it; their
connections are the top-level ports.

## What happens to one extension instruction

The core offers an instruction on `in_valid` with its three source operands.
`is_ext` (combinational from the instruction word) tells the core whether the
instruction belongs to one of the reconfigurable groups; only those are
offered. The group number is the tag that the disambiguator looks up in all
four slots at once. There are three outcomes.

| case | what happens | cycles the core is halted |
|---|---|---|
| slot hit | `in_ready` in the same cycle; the operands go to the hit slot; `res_valid` L + 1 cycles later (L = logic depth of the loaded design) | 0 |
| slot miss, bitstream-cache hit | the least recently used slot (an empty one first) is invalidated, the bitstream is requested, 50 configuration words of 1824 bits are shifted into the slot, one per cycle; then the instruction hits | 50 + 3 = 53 |
| slot miss, bitstream-cache miss | as above, but the words are forwarded to the slot while the cache reads the 91,200-bit bitstream from memory as 357 beats of 256 bits | about the refill time (at least 357 cycles plus memory latency) |

While the instruction waits, `halt` is high and the core must keep offering
the same instruction (an assertion checks this). One extension instruction
is in flight at a time; results are not back-pressured.

The bitstream of group `g` is expected at byte address
`bs_base + g * 16 KiB`. `bs_base` is an input, standing for the base of a
bitstream library that an operating system (or the program itself) provides.

## The ten instruction groups

Instructions are grouped by logic similarity, one bitstream per group. The
tag is the group number that `insn_group_decoder` derives from the major
opcode, funct3, funct7 (funct5 for OP-FP) and, for fsqrt and fcvt, the rs2
field:

| group | instructions |
|---|---|
| 0 | mul, mulh, mulhsu, mulhu |
| 1 | div, divu |
| 2 | rem, remu |
| 3 | fadd.s, fsub.s |
| 4 | fmul.s |
| 5 | fdiv.s |
| 6 | fsgnj.s, fsgnjn.s, fsgnjx.s, fmin.s, fmax.s, fle.s, flt.s, feq.s |
| 7 | fsqrt.s |
| 8 | fcvt.w.s, fcvt.wu.s, fcvt.s.w, fcvt.s.wu |
| 9 | fmadd.s, fmsub.s, fnmsub.s, fnmadd.s |

Everything else, including flw/fsw, fmv.x.w, fmv.w.x and fclass.s, stays on
the hardened datapath (`is_ext = 0`). Because the whole instruction word is
one of the fabric's inputs, one bitstream can tell, for instance, mul from
mulhu by its funct3 bits.

## Inside a slot

A slot (`fpga_slot`) is a configuration chain plus a LUT fabric plus a small
timer.

**Configuration chain** (`fpga_config_chain`). Configuration latency is set
by the number of wordlines, so the configuration memory is made wide and
shallow: 1824 bits wide and only 50 words deep, which loads a whole 91,200-bit
bitstream in 50 cycles straight from the bitstream cache, with no narrowing
to an 8- or 32-bit port. It is built as a chain of shift registers: each
configuration cycle a word enters at the top and every word moves down one
stage. The chain's contents are presented in parallel to the fabric, the
first word loaded in the lowest bits.

**LUT fabric** (`lut4_fabric`). 1680 four-input LUTs, each followed by a
flip-flop. 4-LUTs are used rather than 6-LUTs because they need fewer
configuration bits for the same designs. Each LUT input is chosen by a full,
binary-encoded 8-bit multiplexer rather than one-hot switches:

- select 0..127 picks a fabric input bit: the instruction word (0..31), rs1
  (32..63), rs2 (64..95), rs3 (96..127);
- select 128..255 picks the registered output of LUT `i - 64 + (select - 128)`
  (indices wrap around), a window of 128 LUTs around LUT `i`.

Each of the 32 result bits is the registered output of any LUT (11-bit
select). Because every LUT is registered, no bitstream can create a
combinational loop; a design `k` LUT levels deep produces its result `k`
cycles after its inputs settle, and the bitstream states `k` in a latency
field. The slot latches the instruction and operands on `start` and raises
`done` for one cycle exactly `max(1, k) + 1` cycles after `start`.

Bitstream layout, as bit offsets into the 91,200-bit configuration:

| offset | width | content |
|---|---|---|
| 48·i | 16 | truth table of LUT i, entry `{in3,in2,in1,in0}` |
| 48·i + 16 + 8·j | 8 | select of input j of LUT i |
| 80,640 + 11·b | 11 | LUT driving result bit b |
| 80,992 | 8 | latency field (LUT levels) |
| 81,000 .. 91,199 | | unused |

There is no block RAM and no DSP block in the fabric.

## The bitstream cache

`bitstream_cache` holds 64 bitstreams, one per block, i.e. 64 × 91,200 bits
(about 713 KiB; rounding each bitstream up to 12 KB gives the 768 KB usually
quoted for this cache). The cache is direct-mapped on the bitstream number
(`address >> 14`) and read-only: blocks are never written back.

Towards the disambiguator it streams a block as 50 words of 1824 bits, one per
cycle, the first word two cycles after the request is accepted. Towards memory
it uses a 256-bit path: a miss issues one burst of `ceil(91,200 / 256) = 357`
beats, bit 0 of the bitstream in bit 0 of the first beat. A gearbox
accumulates beats; each 1824-bit word, as soon as it is complete, is written
into the data array and also forwarded to the disambiguator. A slot is thus
configured progressively while its bitstream is still arriving from memory,
at the pace of the refill (one word per 7 to 8 beats), and a refill costs no
extra read-out pass.

## Sizes

| parameter | default | origin |
|---|---|---|
| slots `NS` | 4 | main evaluated configuration (2 and 8 also evaluated) |
| configuration word `W` × depth `DEPTH` | 1824 × 50 | prototype fast-reconfigurable FPGA |
| LUTs per slot `N_L` | 1680 | prototype fabric |
| bitstream-cache blocks `BLOCKS` | 64 | opcode-reuse study |
| refill width `MW` | 256 | "128/256-bit datapaths to L2" |
| groups | 10 | M and F compartmentalisation |
| LUT input select width | 8 | this design |
| bitstream alignment | 16 KiB | this design |

All of these are module parameters; `fpga_ext_pkg` holds the defaults.

## Where this departs from the architecture it implements

- **Fabric routing.** The reference fabric is a tiled FPGA modelled in a
  place-and-route tool. Its routing graph is not public in enough detail, so
  the fabric here is a deliberately simple stand-in with the same LUT type,
  LUT count, configuration size and full-mux routing. Bitstreams made for the
  reference fabric will not run on it, and whether designs such as bextdep
  (which needs 1680 LUTs there) route on this one is unknown. Every LUT is
  registered here, so deep logic costs cycles.
- **SRAM configuration array.** The reference idea is an SRAM array with many
  bitlines and few wordlines. Like the reference prototype, this design uses
  the shift-register chain instead; the physical array is not modelled.
- **Slot interface.** The configuration and operand ports are reduced to a
  start/done handshake; a full co-processor interface (PCPI-style) is not
  reproduced, and slot bitstreams cannot be read back.
- **Own choices** where nothing is specified: LRU replacement in the
  disambiguator, direct mapping in the bitstream cache, the bitstream address
  formula, one instruction in flight.
- **Evaluation latencies.** The 10/50/250-cycle miss and 0..16-cycle hit
  latencies used to explore the design space are emulation settings, not
  hardware; here the latencies follow from the blocks (53 cycles for a slot
  miss that hits in the bitstream cache).

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks |
|---|---|
| `tb_insn_group_decoder` | every instruction of the ten groups by encoding, and hardened ones |
| `tb_fpga_config_chain` | word order, hold without `shift_en`, reload |
| `tb_lut4_fabric` | ten test designs, one and two LUT levels, window wrap-around, output selects |
| `tb_fpga_slot` | loading through the port, results, done exactly L + 1 cycles after start |
| `tb_bitstream_cache` | refill address and gearbox packing, hits without memory traffic, hit timing, conflicts |
| `tb_instruction_disambiguator` | steering, output mux, LRU against a model, halt, timing, counters |
| `tb_fpga_ext_top` | end to end, reduced sizes, 400 instructions; counts every mechanism |
| `tb_fpga_ext_full` | end to end with all defaults, 150 instructions |
| `tb_multiprogram` | two tasks time-sharing four slots, round-robin quanta of 8 and 200 instructions: all results, and fewer slot misses and halted cycles with the longer quantum |

The test bitstreams come from `tb/tb_fpga_pkg.sv`: for each group it
generates a small bit-sliced design (truth tables `TA(g)`, `TB(g)`; one LUT
level for even groups, two for odd ones, using funct3 bits so that one
bitstream behaves differently for different instructions) and a reference
function computed straight from the truth tables. They are test patterns,
not implementations of multiplication or floating point: producing real
bitstreams needs a synthesis and place-and-route flow for this fabric.
`tb/bs_mem_model.sv` stands in for the memory hierarchy and serves these
bitstreams with request latency and gaps between beats.

The end-to-end runs count and require at least one of each: slot hit, slot
miss served by the bitstream cache, bitstream refill from memory,
bitstream-cache conflict (reduced run, 8 blocks), LRU eviction of a slot,
core halt, one- and two-level latency, partial decoding and a hardened
instruction. The full-size run also checks the 53-cycle halt of a slot miss.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fpga_ext_top \
  -Irtl -Itb -y rtl -y tb +libext+.sv rtl/fpga_ext_pkg.sv tb/tb_fpga_pkg.sv \
  tb/tb_fpga_ext_top.sv
./obj_dir/Vtb_fpga_ext_top
```

The full-size testbench (`tb_fpga_ext_full`) takes about two minutes to build
and a few seconds to run.

## Files

- `rtl/fpga_ext_pkg.sv` – shared constants, group enum, bitstream layout helpers
- `rtl/insn_group_decoder.sv`, `rtl/instruction_disambiguator.sv`,
  `rtl/fpga_config_chain.sv`, `rtl/lut4_fabric.sv`, `rtl/fpga_slot.sv`,
  `rtl/bitstream_cache.sv`, `rtl/fpga_ext_top.sv`
- `tb/` – testbenches, the test-bitstream package, the memory model and the
  body shared by the two end-to-end testbenches (`tb_fpga_ext_body.svh`)
