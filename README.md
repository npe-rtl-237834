# NPE: an overlay processor for transformer inference, in SystemVerilog

Transformer networks such as BERT spend most of their arithmetic in matrix
multiplies. Those are easy to build hardware for. The rest of the work is softmax,
layer normalization and GELU. These steps are nonlinear, need more precision than the
matrix part, and change from one model to the next. A fixed-function block for each
one wastes area and cannot follow new models.

NPE therefore splits the work between two engines:

* a **fixed matrix engine** (the MMU) with 2048 multipliers;
* a small **programmable vector processor** (the NVU). Its vector unit has hardware
  for piecewise-linear (PWL) function evaluation, so any smooth nonlinearity (exp,
  1/sqrt, GELU, ...) costs one table and one instruction per vector.

A control unit reads a program of coarse instructions from external memory. Examples
are "load this block", "multiply these matrices" and "run this NVU microprogram". The
control unit hands each instruction to the unit that executes it, so loads, matrix
multiplies, vector work and stores overlap. Changing the network means changing the
program and the microprograms, not the hardware.

This repository holds synthesizable RTL for the whole processor:

* the default configuration is a 16-bit MMU of 128 PEs x 16 MACs, with a 1024-bit NVU
  ("NVU-1024");
* there is a self-checking testbench for every unit;
* an end-to-end testbench runs the full-size design.

## 1. Units and data flow

```
            external memory (read channel)         external memory (write channel)
                     |                                        ^
                     v                                        |
   program  +-----+  instr.  +-----+   +-----+   +------+   +-----+
   -------->| ICU |--------->| MRU |-->| MIB |-->| MMU  |   | MWU |
            +-----+          +-----+   +-----+   +------+   +-----+
             | | |  \           |  \      ^          |          ^
             | | |   \ microcode|   \     | vectors  v          | rows
             | | |    \-------->|    \    |       +------+      |
             | | +------------------->  NVU  <----| MMEM |      |
             | +----------------------> (LSU,VRF,VCU,SRF,SCU,MPC)
             +-------------------------> MWU         |          |
                                                     v          |
                                                   NMEM --------+
```

| unit | module | what it does |
|---|---|---|
| ICU | `icu` | Loads the program through the MRU into its instruction memory. Dispatches instructions in order. `SYNC` waits for chosen units to go idle. |
| MRU | `mru` | Copies a block of 256-bit external words into the MIB (activations or weights), the NVU microprogram memory, or the ICU instruction memory. |
| MIB | `mib` | Input buffer of the MMU: one activation buffer plus one weight bank per PE. Written by the MRU and by the NVU. |
| MMU | `mmu`, `mmu_pe` | Block matrix multiply with quantization to 16 bits. One output row per MMEM row. |
| MMEM | `mmem` | Scratchpad for MMU results. The NVU reads it one vector at a time. |
| NVU | `nvu` and the modules below | Microprogrammed VLIW vector processor for the nonlinear steps. |
| NMEM | `nmem` | Banked scratchpad of the NVU, with per-lane addressing. It has a second, arbitrated port for the MWU. |
| MWU | `mwu` | Reads NMEM rows and writes them to external memory. |

The external memory controller is not part of the design. The top level `npe_top`
exposes two channels instead:

* **read channel:** a request handshake (`ext_rd_req_valid/ready`, `ext_rd_addr`),
  then in-order response beats (`ext_rd_resp_valid`, `ext_rd_resp_data`). Any latency
  is allowed.
* **write channel:** a valid/ready handshake (`ext_wr_valid/ready`, `ext_wr_addr`,
  `ext_wr_data`).

Addresses count 256-bit words. A program starts with a one-cycle `start` pulse, given
the program's address and its length in words; `done` rises when its `END` executes.

A typical layer runs like this:

1. The MRU streams activations and weights into the MIB.
2. The MMU produces rows of 16-bit results in MMEM.
3. The NVU reads them and applies the nonlinearity.
4. The NVU writes the results either back into the MIB, as the next multiply's
   activations, or into NMEM.
5. The MWU writes NMEM rows out.

## 2. Instructions and synchronisation (ICU)

Each instruction is one 256-bit word (`icu_instr_t` in `npe_pkg`):

| field | bits | meaning |
|---|---|---|
| `op` | 3 | `END`, `MRU`, `MMU`, `NVU`, `MWU`, `SYNC` |
| `sync_mask` | 4 | for `SYNC`: which units to wait for (bit 0 MRU, 1 MMU, 2 NVU, 3 MWU) |
| `payload` | 248 | the unit's command struct (`mru_cmd_t`, `mmu_cmd_t`, `nvu_cmd_t`, `mwu_cmd_t`) |

The ICU issues one instruction per cycle when the target unit is ready. Units accept a
new command only when idle; the NVU is the exception, because it buffers four
instructions in `nvu_ibuf`. So independent work overlaps automatically, for example
an MRU weight load during an NVU microprogram, or an MWU store during the next
multiply. Where one step needs another's result, the program inserts `SYNC` with the
producer's bit.

The commands are:

* **MRU** `{dst, dst_bank, dst_addr, count, ext_addr}`: copy `count` words.
  * For weights, word *i* goes to bank `(dst_bank+i) mod N_PE`, word
    `dst_addr + (dst_bank+i) div N_PE`. Consecutive external words therefore fill
    one word of every PE before moving to the next.
  * For activations, word *i* goes to activation word `dst_addr + i`.
* **MMU** `{act_base, act_stride, w_base, k_steps, rows, out_base, qshift}`: see §3.
* **NVU** `{upc, arg0..arg3}`: run the microprogram at `upc`. It is passed four
  32-bit arguments.
* **MWU** `{nmem_row, rows, ext_addr}`: write `rows` NMEM rows, each as
  VRWIDTH/256 consecutive words.

## 3. Matrix multiply unit

The MMU has 128 PEs. Each PE has 16 multipliers and an adder tree, so one step
multiplies a 16-element slice of an activation row by a 16 x 128 weight block: 2048
MACs per cycle.

**Buffer layout.**

* An MIB activation word holds 16 elements: one k-slice of one row.
* MIB weight bank *p* holds, at word *k*, the 16 weights of output column *p* for
  k-slice *k*.

**Command.** One MMU command computes

    out[r][n] = sat16( round( sum_{k<16*k_steps} A[r][k] * W[k][n] ) >> qshift )

for `rows` rows:

* row *r* reads activation words `act_base + r*act_stride + k`;
* it reads weight words `w_base + k`;
* it writes MMEM row `out_base + r`.

**Pipeline.** The five stages are:

1. address generation and buffer read (data selection);
2. the products, registered;
3. the PE adder tree, registered;
4. a 48-bit accumulator per column;
5. quantization, then the MMEM write.

Rounding adds half an LSB before the arithmetic shift. The result saturates to 16 bits.

**Timing.** A command occupies the MMU for `rows * k_steps + 5` cycles, and one MMEM
row is written every `k_steps` cycles.

**8-bit mode.** With `DW = 8`, each multiplier position computes two products that
share the activation operand, as an FPGA DSP slice split in two would. A PE then
serves two output columns: 4096 multiplies per cycle, 256 outputs per row. The
weight word of bank *p* then holds columns 2p and 2p+1. MMEM always receives 16-bit
results.

**Not built.** A second, configurable adder tree that would add PE outputs together
for narrow matrices is not built. Every PE always owns one output column, so a
matrix narrower than 128 columns leaves PEs idle.

## 4. The nonlinear vector unit

### 4.1 Microprograms and the bundle

The NVU does not execute ICU instructions directly. The microprogram controller (MPC)
maps each instruction to a microprogram in `ucode_mem`: 512 bundles by default,
loaded by the MRU. The instruction starts in two phases:

1. In the first four cycles, the instruction's arguments are written to scalar
   registers s0..s3.
2. Bundles then issue from the entry point.

A bundle (`ubundle_t`) holds five operations plus sequencing:

| slot | struct | contents |
|---|---|---|
| `ctrl` | `uctrl_t` | `SEQ` (next), `LDC` (loop counter *c* := scalar register), `DJNZ` (decrement *c*, branch to `target` if non-zero), `END`. Two loop counters. |
| `lsu` | `ulsu_t` | one load or store; base and stride registers, index vector, 16-bit offset |
| `va` | `uvcu_t` | ALU and shift slot |
| `vm` | `uvcu_t` | multiply slot |
| `vn` | `uvcu_t` | nonlinear, permute and reduction slot |
| `scu` | `uscu_t` | one scalar operation |

**Commit rule.** This rule is the key to the timing: *a bundle commits in the cycle
its memory operation completes*. Until then the MPC holds the bundle and asserts
`stall`. At commit, every slot writes its result. All slots read their operands
before any of them writes, so a bundle behaves as if its five operations ran at once.

Costs per bundle:

| bundle | cycles |
|---|---|
| no memory operation, or an NMEM store without conflicts | 1 |
| MMEM load | 2 (registered read) |
| unit-stride NMEM load | 2 |
| NMEM access with bank conflicts | one extra cycle per conflicting lane in the worst bank |

### 4.2 Register files

**VRF** (`vrf`): 32 registers of VRWIDTH bits.

* Eight read ports: two per VCU slot, one for store data, one for the index vector of
  indexed access.
* Four write ports: one per VCU slot and one for LSU loads. If two write the same
  register, the LSU wins.

**SRF** (`srf`): 32 registers of 64 bits.

* Eight read ports.
* Three write ports: argument passing, vector reductions, the SCU.

Both register files are built from flip-flops.

### 4.3 Vector compute unit

Every slot works on 8, 16, 32 or 64-bit elements (field `ew`): 128, 64, 32 or 16
lanes at VRWIDTH 1024. The second operand is either a vector register or a scalar
register broadcast to every lane (`scal`, `sreg`).

| slot | operations |
|---|---|
| `va` | add, sub, min, max, and, or, xor, set-less-than, set-greater-equal, set-equal, shifts (vector or scalar amount), move, widen-low / widen-high (sign-extend the half-width elements of one half of a register), narrow (saturate two registers into half-width elements) |
| `vm` | multiply `(a*b) >>> imm`, saturated to the element width |
| `vn` | PWL evaluate, PWL table load (knots, values, slopes), permute `out[i] = a[b[i] mod n]`, and the reductions sum, max, min and dot product `sum((a*b) >>> imm)` |

Reductions write a 64-bit result into a scalar register. Widening and narrowing are
how a microprogram moves between 16-bit data and 32 or 64-bit intermediates. MMU
results always arrive as 16-bit values. For an 8-bit MMU, the NVU narrows its
results to packed 8-bit elements before storing them into the MIB as the next
activations.

### 4.4 Piecewise-linear evaluation

This is the NVU's central feature. A function is approximated on up to 16 segments
(`PWL_SEG`). Segment widths need not be equal, so steep regions get more segments.
The table holds, per segment *i*:

* a knot `x_i`;
* the function value `v_i` at that knot;
* a slope `s_i = (v_{i+1} - v_i) / (x_{i+1} - x_i)`, in fixed point with `frac`
  fraction bits.

Unused knots are set to the largest 16-bit value.

Evaluation of an element `x` (`pwl_eval`) takes two steps:

1. **Segment search.** Every knot is compared with `x` in parallel. The segment is
   the last knot not above `x`; inputs below `x_0` use segment 0. In software this
   search is a loop of tens of instructions. Here it is a row of comparators and a
   priority encoder.
2. **Interpolation.** `y = v_i + ((x - x_i) * s_i) >>> frac`, saturated to 16 bits.
   Storing the slope avoids a divider; outside the table the end segments extrapolate.

There is one table, shared by all lanes and loaded from three vector registers
(`PWLK`, `PWLV`, `PWLS`, the first 16 lanes of each). `PWL` then evaluates a whole
vector in the bundle's single cycle. The table is also wired to the SCU, so a scalar
PWL (`S_PWL`) can evaluate, for example, 1/sqrt(variance) right after a reduction. A
microprogram that needs several functions reloads the table between them.

Tables reach the NVU like any other data:

* the MRU loads the table rows as activations;
* the MMU passes them through an identity weight block into MMEM;
* three vector loads bring them into the VRF.

The end-to-end testbench does exactly this.

### 4.5 Scalar compute unit

The SCU (`scu`) reads two scalar registers, or one register and an immediate. It
provides add, sub, mul, shifts, min, max, move, load-immediate, count-leading-zeros
and PWL. It computes at 8, 16, 32 or 64 bits and sign-extends the result to 64.
Typical uses are address increments, mean and variance scaling, and normalising a
value before a PWL lookup.

### 4.6 Load/store unit and NMEM

The LSU (`nvu_lsu`) moves one vector per operation. The address is scalar register
`base` + `offs`, in 16-bit elements.

| operation | transfer |
|---|---|
| `LD_MMEM` | MMEM vector → VRF. MMEM is addressed in vectors: row x (128·16/VRWIDTH) + slice. |
| `LD_NMEM`, `ST_NMEM` | unit stride |
| `LDS`, `STS` | lane *l* at `addr + l*stride` |
| `LDX`, `STX` | lane *l* at `addr + idx[l]`, with `idx` a vector register of 16-bit offsets |
| `ST_ACT` | VRF → MIB activation words |
| `ST_W` | VRF → MIB weight banks (bank = addr mod N_PE, word = addr div N_PE) |

`ST_ACT` and `ST_W` are how NVU results become the next multiply's operands.

**NMEM banking.** NMEM (`nmem`) is built from VRWIDTH/16 single-port banks of 16-bit
elements. Element *e* lives in bank `e mod NB`, row `e div NB`. A unit-stride vector
touches every bank once, so it completes in one access. Each lane carries its own
address; routing those addresses to banks, and the data back, is the permutation
network that strided and indexed access need.

**Bank conflicts.** When several lanes need different rows of the same bank, the
lowest lane wins that cycle and the others retry in the next. Lanes that read the
same element share one access. For example, with 64 banks:

* stride 2 takes 2 accesses;
* stride 64 takes 64;
* stride 8 (a transposed store of eight vectors) takes 8.

`lsu_conflict` marks every retry cycle.

**Arbitration.** The MWU reads whole rows through a second port. A round-robin
arbiter gives each access cycle either to the LSU or to the MWU. `lsu_wait` marks
cycles the LSU lost. A read's data returns one cycle after its access.

## 5. Memory read and write units

The MRU (`mru`) issues one read request per cycle while the memory accepts them. It
places response beats in arrival order, using the destination rules of §2, so any
memory latency is hidden behind the stream.

The MWU (`mwu`) handles one NMEM row at a time:

1. requests the row from the NMEM port;
2. captures it;
3. writes it out as VRWIDTH/256 beats, to `ext_addr + row*beats + beat`, with the
   low beat first.

## 6. Parameters

| parameter | default | meaning |
|---|---|---|
| `N_PE` | 128 | processing elements in the MMU |
| `PE_LANES` | 16 | multipliers per PE |
| `DW` | 16 | MMU operand width (16, or 8 for two products per multiplier) |
| `VRWIDTH` | 1024 | vector register width in bits (256, 512, 1024 and 2048 are the intended sizes) |
| `ACT_DEPTH` | 1024 | MIB activation words (16 elements each) |
| `W_DEPTH` | 256 | words per MIB weight bank |
| `MMEM_DEPTH` | 256 | MMEM rows (128 x 16 bits) |
| `NMEM_DEPTH` | 512 | NMEM rows (VRWIDTH bits) |
| `UDEPTH` | 512 | microprogram bundles |
| `IMEM_DEPTH` | 256 | ICU instructions |

The external word width (256 bits), the PWL segment count (16) and all encodings live
in `rtl/npe_pkg.sv`.

At the defaults these buffers hold one tile of a BERT-base layer (hidden size 768,
feed-forward size 3072):

* 21 rows of a 768-wide activation matrix per MIB fill;
* 48 weight words per PE per 128 output columns, or 192 for the 3072-wide layer;
* a 128 x 128 softmax block in NMEM.

A whole layer streams through in tiles.

## 7. Where this RTL departs from the original design

* **Unpublished details.** The published design gives the units, their connections,
  the MMU pipeline stages, the PE count and width, the NVU's register count and width
  options, and the PWL method. It does not publish the instruction or micro-instruction
  formats, the NVU operation encodings, memory sizes, arbitration policy,
  accumulator width or rounding. All of those are this design's own choices.
* **MMU second adder tree:** missing (see §3).
* **VRF.** The register file is true multi-port flip-flops. An FPGA build would time-share
  and duplicate dual-port block RAMs to get the same eight logical ports.
* **Per-width datapaths.** Each element width has its own datapath. A
  resource-sharing multi-precision datapath would be smaller.
* **Softmax and layer normalization.** Layer normalization is written (`UP_LN`) but
  normalises each vector on its own. A row longer than one vector would need an extra
  pass that combines the per-vector sums. Softmax has no microprogram; only its
  building blocks are tested:
  * square-root and 1/sqrt PWL tables;
  * reductions into scalars;
  * scalar PWL;
  * vector-scalar operations.
* **GELU rate.** The simple microprogram `UP_PWL` takes 5 cycles per vector: load,
  evaluate, and stores to both NMEM and the MIB. The software-pipelined `UP_GELU`
  overlaps the load of the next vector with the evaluation of the current one, so it
  takes 3 cycles per vector. That is 4 elements per cycle at VRWIDTH 256 (measured:
  8 vectors in 32 cycles, including the start-up) and 16 elements per cycle at
  VRWIDTH 1024. This matches the published GELU rates for those widths.

## 8. Verification

Every unit has a self-checking testbench in `tb/` that prints one line
`TB_RESULT checks=N failures=M`. The testbenches use `$urandom` stimulus and
independent reference models (`tb/npe_tb_pkg.sv`). Where a unit has a defined
rate, the testbench checks cycle counts: for example the MMU's `rows*k_steps+5`, and
NMEM access counts for unit, strided and conflicting patterns.

`tb/ext_mem_model.sv` is a behavioural external memory with latency and random
back-pressure on both channels.

`tb_nvu` runs three microprograms (`tb/npe_tb_pkg.sv`, `build_ucode`) on a complete
NVU with real NMEM and MMEM:

* `UP_TABLE` loads a PWL table;
* `UP_PWL` computes `y = PWL(x)` and stores the results to NMEM and the MIB;
* `UP_GELU` computes the same with software pipelining, and its cycle count is
  checked;
* `UP_NORM` subtracts each vector's mean and stores it transposed with a stride,
  which causes bank conflicts;
* `UP_LN` runs layer normalization: mean, variance by dot product, 1/sqrt by scalar
  PWL, then a vector-scalar multiply.

`tb_npe_top` runs the full-size processor with its default parameters:

1. loads microcode, a PWL table, identity weights, inputs and two weight matrices;
2. multiplies the inputs by the first weight matrix;
3. applies the PWL on the NVU;
4. feeds the result back through the MIB into a second multiply, while the MRU loads
   the second weights;
5. writes the first result out while the NVU normalises the second;
6. compares every word written to external memory with a reference.

It also counts that each mechanism actually happened at least once:

* SYNC waits;
* MPC stalls;
* NMEM bank conflicts;
* NMEM arbitration losses;
* read and write back-pressure;
* NVU writes into the MIB;
* MRU/NVU overlap.

The whole run takes about 2,200 cycles.

To simulate with Verilator 5, for example the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/npe_pkg.sv tb/npe_tb_pkg.sv tb/tb_npe_top.sv --top-module tb_npe_top
./obj_dir/Vtb_npe_top
```

Replace `tb_npe_top` with any other `tb_<unit>`. Unit testbenches use reduced
sizes (for example 8 PEs or VRWIDTH 256) to stay fast. The end-to-end test builds in
about a minute and runs in well under a second.
