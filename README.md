# Snowflake: a trace-driven CNN accelerator in SystemVerilog

Snowflake runs the convolution, max-pooling and ReLU layers of convolutional
neural networks at close to the peak rate of its multipliers, whatever the
shape of the network. It gets there by working on *traces*. A trace is a long,
contiguous run of words in an on-chip buffer. One vector instruction hands a
whole trace to a functional unit, which then stays busy for tens to thousands
of cycles. A small in-order control core meanwhile runs the loop code,
branches and loads that prepare the next trace, so their latency is hidden
behind the arithmetic.

This RTL implements the configuration the Snowflake authors built on a Zynq
XC7Z045:

- one compute cluster of four compute units (CUs);
- four vector MAC units (vMACs) of 16 MACs each per CU, so 256 16-bit MACs
  in all;
- a vector max-pool unit per CU;
- a five-stage control core with a double-buffered 4 kB instruction cache;
- a single memory port.

At 250 MHz that is 256 × 2 × 250 M = 128 G-ops/s peak.

## Hierarchy

```
snowflake_top
├── control_core            five-stage scalar pipeline, vector issue
│   ├── icache              2 × 512 instructions, double buffered
│   └── regfile             32 × 32 bit, two read ports
├── compute_cluster         ×NCLUSTERS (default 1)
│   ├── memory_interface    loads into CU buffers, stores from CUs
│   └── compute_unit        ×4
│       ├── maps_buffer         4 lanes × ROWS × 256 bit, 1 write / 4 read ports
│       ├── mac_trace_decoder   walks MAC and VMOV traces → vMAC beats
│       ├── max_trace_decoder   walks MAX traces → vMAX
│       ├── trace_move_decoder  walks ST (to memory) and TMOV (to another CU)
│       ├── vmac ×4             16 × mac_unit + weights_buffer + gather_adder
│       └── vmax                4 comparators over a 16-word line
└── memory_interconnect     round-robin onto the external memory port
```

The shared types live in `rtl/snowflake_pkg.sv`. `rtl/sync_fifo.sv` is a
small helper FIFO. Every file opens with a comment that gives its function,
timing and interface, and says which parts follow the published design and
which are choices made here.

The external DRAM and the host processor are outside the design. The top
brings out a line-wide memory port and a `start`/`start_pc`/`done` handshake
for them. `tb/mem_model.sv` is a behavioural memory for simulation.

## Data layout

- **Words:** 16-bit fixed point.
- **Lines:** a line holds 16 words (256 bits). Lines are the unit of every
  buffer access and of every memory transfer. Memory addresses count lines.
- **Maps-buffer rows:** a row holds four lines (1024 bits), one per lane.
  Line address `L` lives in lane `L[1:0]`, row `L >> 2`, so consecutive lines
  sit in different lanes.
- **Weights buffers:** each vMAC has one, 512 words deep per MAC, with one
  word per MAC per address. One weights "line" written by a load therefore
  fills the same address in all 16 MACs.
- **Products:** a product of two words has 8 more fraction bits than a word
  (`OUT_SHIFT` = 8). Accumulators are 32 bits. Biases and preloads are
  shifted left by 8 before they are added. A result keeps accumulator bits
  [23:8]. The bit positions are this design's choice; the published design
  says only that results are truncated to 16 bits.

## The two MAC modes

Each vMAC can run its 16 MACs in two ways, chosen per instruction by the mode
bit.

**COOP (cooperative).** Every cycle, one whole maps line (16 words from 16
input maps) is multiplied word by word with the 16 weights at the current
weights address. Each MAC holds a partial sum of the *same* output. On the
last beat, the 16 partial sums are latched into a shift register. The
**gather adder** then reduces them one per cycle and adds one bias, which
takes 16 cycles. A vMAC therefore produces one output word per 16 cycles or
more. The trace decoder enforces this: it holds back a beat that would end an
output until 16 cycles have passed since the previous one. In COOP mode the
four vMACs each produce one word, and together they write one 64-bit granule.

**INDP (independent).** Every cycle, one maps word is broadcast to all 16 MACs,
and each MAC multiplies it with its own weight. The 16 MACs produce 16
different output maps. The gather adder adds each MAC's own bias as the
partials shift out. The four vMACs together write a full 1024-bit row.

In INDP mode the word is taken from a **shift register** that holds the
current line, as in the published design. The register shifts one word per
cycle until the requested word is at its head. A trace that starts at the
fifth word of a line therefore waits four cycles. After that, consecutive
words cost nothing. The decoder prefetches the next line into a second
register while the current one drains, so crossing a line boundary is also
free. `tb_mac_trace_decoder` checks the four-cycle figure.

Extra beats:

- **Bias beat:** when the load-bias flag is set, one extra beat reads the bias
  from the weights buffer at the instruction's weights address, and the trace
  starts at the next address.
- **VMOV preload:** VMOV reads one line through the maps buffer's third-operand
  port into one vMAC's preload register. A MAC instruction with the preload
  flag then starts its accumulators from those values instead of zero. This is
  how residual "bypass" inputs or earlier partial results are added.
- **ReLU:** an optional ReLU flag clamps negative results to zero in the
  gather adder.

## Maps-buffer ports and write-back

The maps buffer has four read ports of one line each:

| port | user | priority |
|---|---|---|
| 0 | MAC trace decoder (operands) | always granted |
| 2 | MAC trace decoder (VMOV, third operand) | 2nd |
| 1 | MAX trace decoder | 3rd |
| 3 | trace move decoder (ST / TMOV) | 4th |

Each lane serves one read per cycle. A refused read is retried in the next
cycle. The published design fixes only that the MAC decoder wins; the order
of the other three ports is this design's choice.

There is one 1024-bit write port with a write enable per 64-bit chunk. Several
sources compete for it. They are served in this fixed order:

1. vMAC results, which are never refused;
2. vMAX results;
3. lines moved in from another CU;
4. lines loaded from memory.

Weights loads go straight to the weights buffers and never wait.

**Write-back addresses** count 64-bit granules: row = `wb[13:4]`,
chunk = `wb[3:0]`.

- A COOP result writes the four vMAC words into granule `wb`.
- An INDP result writes the whole row `wb >> 4`.
- A vMAX result writes the 256-bit line `wb >> 2`.

The control core holds a base/offset pair per CU, one for MAC results and one
for MAX results. A MAC (or MAX) instruction with the *last* flag takes each
targeted CU's current base and then advances it by the offset. A loop over
output positions therefore needs no address arithmetic in the loop body.

## vMAX

Four signed 16-bit comparators share a line. Comparator *j* handles words
4*j*…4*j*+3, one per cycle, so a line takes four cycles. A 3×3 window of nine
lines takes 36 cycles and yields 16 maxima, which `tb_vmax` checks.

A window may span several MAX instructions through the *first* and *last*
flags. The MAX decoder reads the next line while the vMAX is still working on
the current one.

## Control core and the instruction set

The control core has five in-order stages:

1. **Fetch:** program counter and instruction cache.
2. **Decode:** holds an instruction whose source register is still to be
   written by an older one, until that one commits.
3. **Dispatch:**
   - reads the register file;
   - issues vector instructions;
   - keeps a count per CU of loads that have not completed.
4. **ALU:** add, multiply, compare.
5. **Write-back.**

Branches resolve in the ALU stage and have **four delay slots**. The four
instructions after a branch always execute. There is no prediction and
nothing is flushed.

A vector instruction that reads or writes a CU's buffers waits in dispatch
while that CU has a load pending. Only loads are tracked, as in the published
design. If a trace move or store reads results of an earlier MAC or MAX, the
program must order the two itself: with independent work in between, or a
counted wait as in `tb_snowflake_top`.

All vector instructions leave through one queue. Each CU decoder then works
on its own instruction FIFO, so MAC, MAX and trace-move work overlap.

The encoding below is this design's own. The published design gives only a
4-bit opcode and a mode bit.

```
[31:28] opcode  [27] mode  [26:22] rd  [21:17] rs1  [16:12] rs2  [11:0] imm
```

| op | name | meaning |
|---|---|---|
| 0 | NOP | |
| 1 | MOV | mode 0: rd = sign-extended ir[21:0]; mode 1: rd = rs1 << imm[4:0] |
| 2, 3 | ADD, MUL | rd = rs1 op (mode ? rs2 : sext imm) |
| 4, 5, 6 | BGT, BLE, BEQ | signed compare rs1 with rs2; target = branch pc + sext imm |
| 7 | LD | rs1 = memory line; rs2 = [31:28] CU, [27:23] buffer (0 maps, 1–4 weights of vMAC 0–3), [22:0] buffer address; imm = words |
| 8 | ST | rs1 = memory line; rs2 = [31:28] CU, [11:0] maps line; imm = words |
| 9 | MAC | rs1 = [31:28] CU mask, [27:26] cluster, [15:0] maps word address; rs2 = [8:0] weights address + flags; imm = trace length in words; mode = COOP/INDP |
| 10 | MAX | rs1 = CU mask, cluster, [17] first, [18] last, [11:0] line; imm = words |
| 11 | TMOV | rs1 = [31:28] source CU, [11:0] line; rs2 = [29:28] destination CU, [11:0] line; imm = words |
| 12 | VMOV | rs1 = CU mask, cluster, [11:0] line; imm[1:0] = vMAC |
| 13 | WBSET | write-back base (mode 0) or offset (mode 1) from rs1; rd[3:0] = CU, rd[4] = MAX pair |
| 15 | HALT | stop; `done` rises when the CUs are idle and no load is pending |

MAC flag bits in rs2:

| bit | flag |
|---|---|
| 16 | load bias |
| 17 | first |
| 18 | last |
| 19 | preload |
| 20 | ReLU |

COOP, MAX, LD, ST and TMOV lengths are whole lines (imm / 16). Program
counters count instructions.

The instruction cache holds two blocks of 512 instructions, one in each bank.
While the current block runs, the next block is fetched into the other bank,
so straight-line code never waits after the first fill.

## Memory side

Each cluster's memory interface:

- runs loads one line per cycle, keeping up to eight lines in flight;
- writes returning lines into the target CU's buffer;
- pulses `load_done` for that CU after the last line of a load;
- forwards store lines from the four CUs round-robin;
- alternates load reads and store writes when both are waiting.

The interconnect puts the instruction cache and the clusters onto the single
memory port, round-robin. It keeps an ID queue so that in-order read data
goes back to the master that asked for it.

## Verification

Each block has a self-checking testbench `tb/tb_<module>.sv`. Each one:

- compares the block against values computed independently in the
  testbench;
- ends by printing `TB_RESULT checks=<n> failures=<n>`;
- has a watchdog.

Most testbenches use reduced buffer sizes. Some highlights:

- `tb_gather_adder`, `tb_vmax`, `tb_mac_trace_decoder` check the published
  cycle counts: 16 cycles per gathered result, 36 cycles per 3×3 window,
  four cycles for a fifth-word start.
- `tb_control_core` compares every issued vector instruction with an
  instruction-level model. The model covers delay slots, taken and not-taken
  branches, write-back address stepping and load tracking.
- `tb_snowflake_top` runs the whole accelerator at its **default parameters**:
  - a program that loads maps and weights;
  - a COOP loop;
  - INDP traces, including one that starts mid-line and one from VMOV
    preloads with ReLU;
  - two max-pool windows;
  - a CU-to-CU move and stores.

  It checks every stored word against a model. It also counts RAW stalls,
  load stalls, taken branches, COOP and INDP outputs and switches between
  them, max-pool outputs, write-port stalls, CU moves and instruction fills,
  and it fails if any of them never occurs. It finishes in about 1,300
  cycles.

To run a testbench with Verilator (from the directory holding `rtl/` and
`tb/`):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
    rtl/snowflake_pkg.sv tb/tb_snowflake_top.sv --top-module tb_snowflake_top
./obj_dir/Vtb_snowflake_top +verilator+rand+reset+2
```

## Sizing against the benchmark networks

| network | largest COOP kernel per MAC | INDP first layer per MAC | longest trace |
|---|---|---|---|
| AlexNet | 216 words | 363 words | 1152 words |
| GoogLeNet | 108 words | 147 words | 1024 words |
| ResNet-50 | 288 words | 147 words | 2048 words |

A MAC's weights buffer holds 512 words, so every kernel in the table fits.
The 12-bit length field allows traces up to 4095 words, so every trace fits.
Row bands of the input maps (a few rows of one layer) take 20–30 kB, against
128 kB of maps buffer per CU.

Layer shapes are those of the standard published models. Efficiency was not
measured: no layer-sized program has been run.

## Departures and open points

- **Maps-buffer size.** The text gives 128 kB per CU, so `ROWS` = 1024 rows
  of 1024 bits. The compute-unit figure prints 8192 entries. The RTL follows
  the text.
- **This design's own choices.** The published design gives none of these:
  - the instruction encoding;
  - the flag bits;
  - the write-back address format;
  - the fixed-point result bits;
  - ReLU in the gather adder;
  - memory addressing in lines;
  - the HALT and WBSET instructions;
  - the host handshake.
- **Not built:** the DRAM controller and the host processor.
- **Not done:**
  - average pooling and fully connected layers were not exercised, although
    they map onto the same MAC instructions;
  - no FPGA timing closure was attempted, so 250 MHz is not shown here.
- **Result ordering.** Only pending loads block vector instructions. Ordering
  results before a move or store is the program's job.
- **Vector commit order.** The published description says two things here.
  It says vector instructions commit in order among themselves. It also says
  MAC and maxpool instructions run at the same time. This RTL keeps order
  within each trace decoder only. Instructions on different decoders overlap
  and can finish in any order.
- **Multiple clusters.** `NCLUSTERS` > 1 is parameterised (cluster index in
  rs1[27:26], CU index in [31:28]). It has not been simulated.
