# DPU: DAG processing unit in SystemVerilog

This is an RTL model of a DAG processing unit. The unit runs irregular
directed acyclic graphs, such as probabilistic circuits and sparse triangular
solves, on 64 asynchronous compute units (CUs). The CUs share a banked global
scratchpad. Arithmetic uses a precision-scalable custom posit format at 32,
16 or 8 bits.

## Structure

`dpu_top` contains the following parts:

- **64 `compute_unit`s.** Each CU holds:
  - an instruction memory;
  - a load address memory and a store address memory;
  - a 2KB local scratchpad;
  - a `load_streaming_unit`, which fills a load FIFO that can pop 2 words per cycle;
  - a `pe`;
  - a `store_streaming_unit`, which drains the store FIFO.

  The three streams are decoupled. The load unit prefetches as far as the
  current load stream length allows. The PE stalls only when a word it needs
  is missing, or when the store FIFO is full.
- **`asymmetric_crossbar`.** Any CU can load from any bank, but a CU stores
  only to its own bank. Each bank has a round-robin arbiter (`rr_arbiter`) for
  loads. The owning CU's store always wins.
- **`global_scratchpad`.** 64 banks of 1024 × 32b, 256KB in total. The global
  read latency is one cycle after the grant.
- **`global_sync_unit`.** An AND tree over all CUs. A global barrier opens in
  the same cycle in which the last CU arrives.
- **Host port.** A parallel port that writes every memory and the
  program-length registers, and reads the global scratchpad.

### PE

The instruction word is 21 bits:

| Bits | Field |
|---|---|
| [20:18] | opcode |
| [17:13] | src1 |
| [12:8] | src2 |
| [7:3] | dst |
| [2] | ld0 |
| [1] | ld1 |
| [0] | st |

The PE does the following:

- It executes one instruction per cycle, with no pipeline stages.
- The register file has 32 registers, 3 write ports (2 for loads, 1 for the
  ALU) and 2 read ports.
- The ALU operations are add, mul, max and min.
- The special operations are:
  - global barrier;
  - local barrier, which waits until the stores are done;
  - set_ld_stream_len, which waits until the previous stream has been issued;
  - set_precision, which selects 1×32b, 2×16b or 4×8b lanes.

  Special operations take a 15-bit immediate, formed as {src1, src2, dst}.
- A program-length register ends the program. The PE is idle until `start`.

### Posit arithmetic

The posit value is (-1)^s · 1.f · 2^e · 2^(k·2^es), in sign-magnitude form.
es is 6, 4 or 2 for 32-, 16- or 8-bit lanes.

`posit_unit` works as follows:

- Two `posit_decoder`s decode the operands. Each decoder uses a
  precision-scalable priority encoder (`ps_prio_enc`) and a precision-scalable
  barrel shifter (`ps_barrel_shifter`).
- The shared precision-scalable mantissa multiplier (`ps_int_mult`, built from
  `ps_mult16`) forms the products.
- The shared scale adder (`ps_int_adder`) adds the scales.
- Each lane of `posit_lane` then does the float add, normalisation,
  round-to-nearest-even and encoding.
- Results saturate at maxpos and minpos. A result never rounds to zero.

## Where this RTL departs from the paper or fills gaps

- **Posit unit.** The float adder, normaliser and encoder are written once per
  lane width (7 lane instances). The chip instead builds them from shared 8b
  sub-blocks. Only the decoders, the multiplier and the scale adder are shared.
- **Rounding.** The paper does not state the rounding mode or the zero/NaR
  handling. This design uses round-to-nearest-even on the bit string,
  saturates instead of rounding to zero, and has no NaR code.
- **Instruction encoding.** The opcode values, field positions and immediate
  format are this design's choices.
- **Memory layouts.** The address-memory entry formats are this design's
  choices:
  - load entries are {global, bank[5:0], addr[9:0], dst[4:0]};
  - store entries are {global, addr[9:0]}.
- **Memory depths.** The instruction, load and store address memories have
  1024 entries each. This depth is assumed; with it, the chip's memory total
  comes to 864kB.
- **FIFO depth.** 4, assumed.
- **Host port.** The slow FPGA link and the I/O interface are not modelled. A
  parallel host port replaces them. Pads, clocking and the supply are not
  modelled either.
- **Store FIFO.** The store FIFO never fills. The store unit drains one word
  per cycle and stores are always accepted (store priority), so the
  store-full stall in the PE exists but never triggers.
- **Load forwarding.** A word loaded by an instruction can be read only from
  the next instruction onwards.
- **Synthesis size.** At full size the design has 64 posit units and a 64×64
  crossbar. Generic logic synthesis of the whole top is slow. The blocks
  synthesise on their own.

## Verification

Every block has a self-checking testbench in `tb/`.

- **Posit blocks.** The posit tests compare against a reference written
  independently, which scans bit strings and computes with real numbers.
- **`tb_dpu_top`.** This test uses 8 CUs. It generates a random 5-superlayer
  DAG program, loads it through the host port, runs it, and compares every
  stored word with a model. It counts these mechanisms and fails if any of
  them never happens:
  - load stalls;
  - two-word pops;
  - local and global barrier waits;
  - global barriers;
  - bank conflicts;
  - loads blocked by a store;
  - ALU operations at each precision;
  - local and global loads and stores.
- **`tb_dpu_top_full`.** Runs the same test at the default size of 64 CUs.
