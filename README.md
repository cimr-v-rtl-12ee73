# CIMR-V in SystemVerilog: a RISC-V core that drives an SRAM compute-in-memory macro

CIMR-V joins two things: a 1024 × 512 SRAM compute-in-memory (CIM) macro, which does a
binary neural-network layer in one step, and a small RISC-V core that runs the whole network
end to end. The core does the pre- and post-processing that needs integer precision. It also
sequences the macro through three custom instructions.

The design attacks a specific problem. A large CIM array computes quickly, but the chip then
spends most of its time moving data: feature maps travel to and from DRAM between layers, and
new weights must be loaded from DRAM whenever the model is larger than the array. CIMR-V
reduces both with on-chip storage:

* **Layer fusion.** Feature maps stay in a 256 Kb on-chip feature-map (FM) SRAM. The macro's
  input register is a shift buffer, so consecutive convolution windows reuse what they share
  and only one new 32-bit word enters per step.
* **Convolution / max-pool pipeline.** A max-pool stage made of OR gates sits right after the
  sense amplifiers. A pooled result is therefore written without a separate pass over memory.
* **Weight fusion.** A 512 Kb weight SRAM receives the next layer's weights from DRAM through
  a micro-DMA (uDMA) while the macro is still computing the current layer. Swapping weights
  then costs only on-chip copies.

This RTL models the complete digital system:

* the core;
* the CIM control unit and the buffers around the macro;
* the memories;
* the uDMA;
* the AXI-facing I/O interface.

The analog macro is a behavioural model. The whole system runs a two-layer binary CNN end to
end in simulation at its full default sizes.

## Block map

```
            host MCU / DRAM (outside: AXI4-Lite ports host_* and dram_*)
                     │                                   ▲
              ┌──────┴────────────── io_interface ───────┴─────┐
              │ imem writes, CTRL/STATUS        uDMA master    │
              └──────┬─────────────────────────────────┬───────┘
                     ▼                                 │
               inst_mem (4096×32)                    udma ◄── registers at 0x2_0000
                     │                                 │ port B
                     ▼                                 ▼
 rv_core ── prefetch ─ aligner ─ RVC decoder ─ decoder ┐   data memory (data_xbar)
  │  regfile  ALU  mul/div  CSR(cimcfg)  LSU ──────────┼──► FM SRAM   8192×32 (256 Kb)
  │                                                    │   weight SRAM 16384×32 (512 Kb)
  └─ CIM issue ──► cim_ctrl ─────── port A ────────────┘
                    │ input buffers (X 1024 b / Y 512 b, 32-bit shift)
                    │ cim_macro 1024 WL × 512 BL  (X: 256 SAs, Y: 512 SAs)
                    │ output buffers (X 256 b / Y 512 b) → 32-bit word mux
                    └ maxpool_unit (OR) → write-back
```

All links inside the chip are 32 bits wide. The core and the CIM control unit share port A of
the data memory. The uDMA uses port B, so weight streaming never stalls computation.

## The macro and how a weight is stored

`cim_macro` is the behavioural model of the analog array. It has 1024 word lines (WL) and 512
bit lines (BL), with one bit per cell. Inputs, weights and outputs are all 1 bit wide.

Weights use a symmetric mapping. Each sense amplifier (SA) reads a pair of bit lines:

* a cell on the first line of the pair counts the input as +1;
* a cell on the second line counts it as −1.

So a binary weight +1 is stored as `(1,0)`, −1 as `(0,1)`, and a ternary zero as `(0,0)`. The
SA output is 1 when the signed sum over the active word lines is greater than zero. This is a
ReLU followed by a 1-bit quantiser, which the real macro performs in the sense amplifier.

The macro has two modes, chosen per instruction:

| mode | inputs | outputs | how the model uses the array |
|---|---|---|---|
| X-mode | 1024 WLs | 256 SAs | SA *i* reads BL pair (2*i*, 2*i*+1) over all 1024 word lines |
| Y-mode | 512 WLs | 512 SAs | the array is read as two halves, WL 0–511 and WL 512–1023; input bit *j* drives WL *j* and WL *j*+512; SA *k* reads pair *k* mod 256 in half ⌊*k*/256⌋ |

X-mode suits layers with many inputs per output. Y-mode suits layers with many outputs. Y-mode
makes 1024 bit lines of 512 cells out of the same physical array. How the two halves are wired
is this model's choice.

The macro is written 32 cells at a time: one word line, one 32-bit group of bit lines. It can
be read back one word line at a time.

## The three CIM instructions

The core recognises one extra major opcode, `1111110`. Its fields are:

```
 31        23 22   19 18 17 16 15 14  12 11     7 6       0
┌────────────┬───────┬─────┬─────┬──────┬────────┬─────────┐
│ imm_d[8:0] │imm_s  │ rs2 │ rs1 │funct │ imm_s  │ 1111110 │
│            │ [8:5] │     │     │      │ [4:0]  │         │
└────────────┴───────┴─────┴─────┴──────┴────────┴─────────┘
```

* The 2-bit register fields select `a0`–`a3` (`x10`–`x13`).
* The immediates are zero-extended.
* Addresses are 32-bit word indices into the data memory: word 0 is the start of the FM SRAM,
  and word 0x2000 is the start of the weight SRAM.
* None of the three instructions writes the register file. Data moves directly between the
  SRAMs and the macro.

| funct | name | effect |
|---|---|---|
| `001` | `cim_conv` | shift data word `[rs1+imm_s]` into the input buffer of the current mode; compute all SAs; write the selected 32-bit output word (optionally max-pooled) to data word `[rs2+imm_d]` |
| `010` | `cim_r` | read macro word line `rs1+imm_s` into the output buffer; write the selected 32-bit word to `[rs2+imm_d]` |
| `011` | `cim_w` | write data word `[rs1+imm_s]` into the macro at word line `rs2[9:0]`, bit lines `32·imm_d[3:0]` … `+31` |

**Mode, output word and pooling** are set by a custom CSR, `cimcfg`, at 0x7C0:

| bits | field |
|---|---|
| [0] | Y-mode |
| [4:1] | which 32-bit word of the 256- or 512-bit output to store |
| [5] | max-pool enable |
| [8:6] | pooling window − 1 |

Each CIM instruction carries a snapshot of `cimcfg` down the pipeline. Switching mode is
therefore just a CSR write between two instructions.

**Output width.** The X-mode output is 256 bits but the write-back path is 32 bits. A network
layer that needs all outputs runs one `cim_conv` per output word, changing `cimcfg[4:1]`
between them. The input buffer shifts on every `cim_conv`, so before computing another word
of the same window the program must shift that window in again. (`cim_r` reads only weights
back, not outputs.)

## CIM pipeline, timing and hazards

`cim_ctrl` accepts one CIM instruction per cycle in a three-stage pipeline:

1. **Issue.** Read the source word through the asynchronous port. At the clock edge, either
   shift it into the input buffer or write it into the macro.
2. **Evaluate.** The macro evaluates. At the edge the output buffer latches the SA outputs.
3. **Write-back.** The output mux picks the word, the max-pool stage ORs it into the running
   window, and at the edge the result is written.

So back-to-back `cim_conv` instructions complete at one per cycle, and each result is in memory
two cycles after it issued. At 1024 inputs × 256 outputs × 2 operations per cycle and 50 MHz,
that rate is 26.2 TOPS, which is the paper's peak throughput figure.

Because results land two cycles late, the control unit raises `stall` and holds the core's
current instruction when either of these happens:

* a load, or the source read of a CIM instruction, touches a word that is still pending in
  stage 2 or 3;
* any store issues while a CIM result is pending. This keeps program order on the shared
  write port.

An immediate assertion in `cim_ctrl` checks that no read ever overtakes a pending write.

**Max pooling** is binary. The maximum of 1-bit values is their OR. With pooling on, every
`cim_conv` in a window ORs its output word into an accumulator and writes the running result to
its destination. The last instruction of the window (counted from `cimcfg[8:6]`) leaves the
pooled word, and the next one starts a new window. Give all instructions of a window the same
destination and only the final value remains.

**Layer fusion** follows from the input buffer: a 1024-bit (X) or 512-bit (Y) shift register
that takes one 32-bit word per `cim_conv`. The new word enters at bit 0 and the oldest 32 bits
fall off the top. A 1-D convolution that slides its window by one word therefore costs one
SRAM read per output, and the 31 (or 15) reused words never move through memory.

## Weight fusion and the uDMA

`udma` moves words between the external AXI side and the data memory on its own port. The core
programs it with memory-mapped registers at byte address 0x0002_0000:

| offset | register |
|---|---|
| 0x00 | SRC: external byte address |
| 0x04 | DST: data-memory word index |
| 0x08 | LEN: number of words |
| 0x0C | CTRL: [0] start, [1] direction (1 = data memory → external) |
| 0x10 | STATUS: [0] busy, [31:1] words moved |

A program starts the uDMA on the next layer's weights, runs the current layer's `cim_conv`
sequence, polls STATUS, and then copies the new weights into the macro with `cim_w`.

## Host side

`io_interface` is an AXI4-Lite slave for the host and an AXI4-Lite master for DRAM. Its
register map:

| address | function |
|---|---|
| below 0x1_0000 | instruction memory (write) |
| 0x1_0000 | CTRL: [0] fetch enable, which starts the core |
| 0x1_0004 | STATUS: [0] halted, [1] halted on error, [2] uDMA busy |

The core halts on `ebreak`/`ecall`, on an illegal instruction or on a misaligned access. The
host polls STATUS to see the halt.

## The core

`rv_core` is a two-stage RV32IMC + Zicsr core. Its stages are:

* **IF:** a two-entry prefetch buffer over a synchronous instruction memory, a half-word
  aligner, and the RV32C expander.
* **ID/EX:** decoder, register file, ALU, single-cycle multiplier/divider, CSRs, load/store
  unit, and CIM issue, all in the same cycle.

Its behaviour and timing:

* Loads and stores finish in one cycle because the data memory reads asynchronously.
* A taken branch or jump costs one bubble. A jump to a half-word address costs one more.
* There are no interrupts, traps or debug mode.

One encoding conflict had to be resolved. The CIM opcode `1111110` ends in `10`, which the
standard RISC-V length rule reads as a 16-bit instruction. Here, any word whose low seven bits
are `1111110` is decoded as a 32-bit CIM instruction. The 16-bit encodings with those low bits
(quadrant 2 with bits [6:2] = `11111`) cannot be used. They are `c.slli` by 31, `c.mv`/`c.add`
from `x31`, `c.swsp` of `x31`, and some `c.lwsp` offsets. An assembler for this core must avoid
them.

## Parameters

Top-level defaults (`cimrv_top`):

| parameter | default | meaning |
|---|---|---|
| `CIM_ROWS_P` | 1024 | word lines |
| `CIM_COLS_P` | 512 | bit lines |
| `FM_WORDS_P` | 8192 | 256 Kb FM SRAM |
| `W_WORDS_P` | 16384 | 512 Kb weight SRAM |
| `IMEM_WORDS_P` | 4096 | instruction memory, a size chosen here |

Types, sizes and the address map live in `rtl/cimrv_pkg.sv`. The core's decode types live in
`rtl/rv_pkg.sv`.

## Where this RTL departs from the paper, or fills gaps in it

* **Core.** The paper's core is ibex on the PULPissimo platform. This is a compact
  re-implementation with the same two-stage structure and functional blocks, not ibex.
* **Single-cycle CIM.** The paper says each CIM instruction executes atomically in a single
  cycle. Here the throughput is one per cycle, but each result has a two-cycle latency, covered
  by hazard stalls. A macro that computes and writes back in the issue cycle would need an SRAM
  read, an analog evaluation and a write in one clock.
* **`funct` values.** The paper prints them as `0x01`, `0x10`, `0x11` in a 3-bit field. They
  are read here as binary `001`/`010`/`011`.
* **Output-word select, pooling window and `cimcfg`.** The paper's table stores
  `CIM_out[31:0]` and shows no way to choose the word, the mode or the pooling. These are this
  design's additions.
* **Macro model.** The BL-pair form of the symmetric mapping, the threshold at zero and the
  Y-mode split of the array are this design's reading of the paper's description. The macro is
  a behavioural model, and its analog behaviour is not modelled: no nonlinearity, variation or
  timing.
* **`cim_w` column.** Only `imm_d[3:0]` selects the 32-bit column group, since 512 bit lines
  hold 16 groups. The paper writes `imm_d` without a width.
* **Bus protocol and sizes.** AXI4-Lite stands in for the unnamed AXI bus protocol. The uDMA
  and host register maps, the memory map and the instruction-memory size are not given in the
  paper.
* **Outside the chip.** The host MCU, DRAM, memory controller and AXI interconnect are outside
  this RTL. The test bench uses a behavioural AXI4-Lite memory in their place.
* **Not modelled.** Energy, area and clock-frequency results are not modelled. The latency
  reductions the paper reports for keyword spotting (33 %, 63 % and 40 % steps) come from its
  DRAM-timing simulation and are not reproduced. The end-to-end test shows the mechanisms
  working together but does not time against a DDR model.

## Verification

Every module has a self-checking testbench in `tb/` named `tb_<module>`. Each ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog. Reference values are computed independently
in the testbench:

* bit-level sums for the macro;
* an encoder (not a decoder) for the RV32C expander;
* a scoreboard with per-cycle timing for `cim_ctrl`.

`tb_cimrv_top` runs the whole chip at the default sizes. It runs a two-layer binary 1-D CNN
shaped like a keyword-spotting pipeline:

* high-pass filtering and quantising raw samples on the core;
* X-mode convolution with layer-fusion reuse and 2-wide max pooling;
* weight fusion through the uDMA;
* Y-mode convolution;
* `cim_r` readback;
* global-average-pool and arg-max on the core;
* writing results back to DRAM.

It checks every result against a model computed in the testbench. It also counts each
mechanism (mode switch, pooling, reuse, overlap of DMA with CIM, stalls, both DMA directions,
`cim_r`, `cim_w`) and fails if any never happened. It takes about 110 k cycles.

Simulating with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
  rtl/cimrv_pkg.sv rtl/rv_pkg.sv tb/rv_asm_pkg.sv tb/tb_cimrv_top.sv --top-module tb_cimrv_top
./obj_dir/Vtb_cimrv_top
```

Swap in any other testbench name for a single block. `tb/rv_asm_pkg.sv` holds the small
instruction encoders the testbenches use to write programs. `tb/axil_dram_model.sv` is the
external memory model.

The remaining Verilator warnings (unused parameters or signals, and a reset used inside
assertion conditions) are expected.
