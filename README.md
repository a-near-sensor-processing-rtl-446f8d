# NS-LBP: a local-binary-pattern accelerator inside an SRAM cache

A local binary pattern (LBP) layer replaces the multiply-accumulate of a
convolution with comparisons. Each output bit is 1 when a neighbouring pixel
is brighter than the pixel at the centre of the window (the *pivot*), and the
bits of several sampling points form a small integer. NS-LBP puts that
comparison inside the memory that sits next to the image sensor. The memory is
a 2.5 MB cache slice. Every one of its 256x256-bit sub-arrays can sense three
rows at once and compute a bit-wise logic function of them in one memory cycle.
Pixels are stored transposed, one bit-plane per row and one pixel per column.
An MSB-first XOR search then compares 256 pixels with their pivots in parallel.
The fully connected layers at the end of the network run in the same arrays as
AND / bit-count / shift-add dot products. A small digital unit does batch
normalisation, activation and quantisation.

This repository holds synthesizable SystemVerilog for the whole slice at its
real size: 80 banks x 2 mats x 2 sub-arrays = 320 sub-arrays of 8 KB. It also
holds a behavioural model of the analog read bit-line and a self-checking
testbench for every module.

## 1. The compute sub-array and three-row sensing

`compute_subarray` is one 256-row x 256-column array of 8T cells. It uses a
separate read port: a read word line (RWL) per row and a read bit-line (RBL)
per column. The bit-line is precharged. Every activated cell that stores '0'
pulls it down. A row that is not activated does not, so it looks like a '1'.
With three rows activated, the RBL settles at one of four levels, depending on
how many of the three cells hold '1':

| ones among the 3 cells | RBL level | VR1 = 360 mV | VR2 = 550 mV | VR3 = 850 mV |
|---|---|---|---|---|
| 0 | 280 mV | 0 | 0 | 0 |
| 1 | 495 mV | 1 | 0 | 0 |
| 2 | 735 mV | 1 | 1 | 0 |
| 3 | 950 mV | 1 | 1 | 1 |

Each column therefore has three sub-sense-amplifiers that compare against three
references. Their outputs are OR3, MAJ3 and AND3 of the three cells. XOR3 is
formed without any extra sensing: it is the majority of OR3, MIN3 (= NOT MAJ3)
and AND3. `cap_maj3` is that majority; in silicon it is a capacitive divider
followed by an inverter pair. A 4:1 output mux (`Out_S`) selects OR3, XOR3,
MAJ3 or AND3. An `inv` input takes the complementary output, which gives NOR3,
XNOR3, MIN3 or NAND3.

The RTL does not carry voltages. `reconfig_sa` gets a 2-bit *level* per column:
the number of activated cells holding '1', with an inactive port counted as
'1'. From that level it forms the sub-SA outputs. `rbl_sense_model` is a
behavioural model of one bit-line that uses `real` millivolts. It exists only
to tie the table above to the digital encoding, and its testbench checks all 64
combinations of word lines and cell values.

Some common cases fall out of this scheme:

* **Normal read.** Activate one row and sense with AND3. The two idle ports
  read as '1', so AND3 is the cell value.
* **Two-input operations.** Use a constant third row: an all-zero row
  (`ROW_ZERO`) turns XOR3 into XOR2, and an all-one row (`ROW_ONE`) turns AND3
  into AND2.
* **Write-back.** The selected result is written back into a destination row at
  the same clock edge as the sensing. The result also appears, registered, on
  `array_out` one cycle later. The destination may be one of the source rows.
* **Operation size.** The size `n` (256, 128 or 64 columns, always starting at
  column 0) limits which columns are written. The other columns keep their
  contents.

`row_decoder` turns up to three row addresses into the RWL vector and one write
address into the write word line (WWL). A row named twice has a single word
line and is sensed once. The sub-array therefore counts duplicate addresses
only once, and the instruction encodings below always use distinct rows.
Assertions check that no more than three RWLs and one WWL are ever active.

## 2. Row map of a sub-array

| rows | region | use |
|---|---|---|
| 0-63 | P | bit-planes of the neighbour pixels (row `P+i` = bit i of every column's pixel) |
| 64-127 | C | bit-planes of each column's own pivot, same layout |
| 128 | Resv | Result row: the per-column XOR of the latest compared bit |
| 129 | Resv | LBP row: the LBP output bits |
| 130 | Resv | all-zero constant |
| 131 | Resv | all-one constant (this design's addition, for AND2) |
| 132-191 | Resv | free |
| 192-223 | W | weight bit-planes for the MLP |
| 224-255 | I | input (activation) bit-planes for the MLP |

Each column is one comparison: a neighbour pixel and, in the same column of the
C-region, the pivot it is compared with. Columns can hold different pivots,
which lets one sub-array serve many output pixels. For example, the end-to-end
testbench puts 32 output pixels, 2 kernels and 4 sampling points into the 256
columns: column `p*8 + c*4 + k` holds point `k` of kernel `c` of output pixel
`p`. The P-region has room for eight 8-bit sets, so a pass can start at any
`P_BASE + 8*j`.

## 3. The in-memory LBP search (`lbp_ctrl`)

Each sub-array has its own small controller. Started with a P base row, a C
base row, a per-column enable and a size, it runs the search below and then
hands the sub-array back. A column's first differing bit, scanning from the
MSB, decides the comparison, and the pivot's value at that bit says which side
is larger.

1. Set every enabled column to *undecided*. Disabled columns are decided
   already and will output 0.
2. For bit i = 7 down to 0:
   * One cycle senses XOR3 of row `P+i`, row `C+i` and the zero row. That is
     the bit mismatch of every column, and it is written into the Result row.
   * If some undecided column mismatches, a second cycle reads row `C+i`. Each
     such column gets LBP bit = NOT pivot bit: the pixel is larger exactly when
     the pivot holds the 0. Those columns become decided.
   * If every column is decided, stop early.
3. One cycle writes the LBP bits into the LBP row. `done` follows.

Timing from the start pulse to `done` is:

`1 + sum over the compared bits of (1, or 2 when a new mismatch appeared) + 1`

The worst case for 8-bit pixels is 18 cycles, whatever the data. The early exit
makes it shorter when all columns differ in their high bits. If every column
differs at the MSB it takes 4 cycles, which the end-to-end testbench checks.

**Ties.** Equal pixel and pivot never mismatch, so they give 0. This follows
the algorithm as the accelerator executes it. The software definition of an
LBP bit (1 when the neighbour is greater than *or equal to* the pivot) would
give 1. A network trained for this hardware must use the strict comparison.

## 4. Partial approximate computing and channel fusion (`pac_mapper`)

The network's LBP kernels have four sampling points. Two kernels (channels A
and B) are fused into one 4-bit output pixel. A *projection table* says, for
each output bit k, which channel supplies bit k. The approximation drops the
`apx` least significant output bits:

* the comparisons that would feed them are never run (their column enable is 0);
* they are written as 0 in the output.

For the table B,A,B,A (bit 3 to bit 0) and `apx = 1`, the output is
`8*b3 + 4*a2 + 2*b1`. `pac_mapper` is exactly this selection.

In the slice, a MAP instruction reads the LBP row of a sub-array. Channel c,
bit k of the output pixel is found in column `offset + c*MBITS + k`. The pixel
goes through the mapper and on into the DPU. In the instruction, `imm[3:0]` is
the projection table (bit k = channel of output bit k), `imm[10:8]` is `apx`
and `imm[31:24]` is the column offset.

## 5. Fully connected layers in memory (`mlp_unit`)

Weights and inputs are unsigned integers stored bit-plane by bit-plane, in the
W-region and the I-region, one vector element per column. A dot product is
then

`sum_k W_k * I_k = sum_n sum_m 2^(n+m) * popcount( Wplane_n AND Iplane_m )`

`mlp_unit` issues one AND2 per (n, m) pair: AND3 of the two planes and the all-one
row. It counts the ones of the registered sense-amp output, shifts the count by
n+m and accumulates it. The count of one pair is added while the next AND is
sensed. For `wbits x ibits` pairs, `done` comes `wbits*ibits + 2` cycles after
start: 11 cycles for 3-bit x 3-bit. Signed weights are not supported. The
operation size masks the columns that take part, so 64, 128 or 256 products
are summed in one instruction. Longer vectors are split across column groups
and the partial sums are added outside.

## 6. The digital processing unit (`dpu`)

The paper names its three functions but gives no formulas. This design uses
two pipeline stages, so `out_valid` comes two cycles after `in_valid`:

* batch normalisation: `b = (x*scale + bias) >>> frac`, with a signed 8-bit
  scale and a signed 16-bit bias (optional);
* shifted ReLU: `a = max(b - shift, 0)` (optional);
* quantisation: `q = min(a >> qshift, 2^Q_BITS - 1)`, with 3 bits by default.

All coefficients are static input ports.

## 7. Slice organisation and control

```
ns_lbp_top
 ├─ transpose_buffer      256 x 8-bit pixels in, one bit-plane out per LOADT step
 ├─ ns_lbp_ctrl           instruction sequencer
 │   ├─ command_decoder   ISA instruction -> sub-array micro-operation
 │   └─ mlp_unit
 ├─ ns_lbp_bank x 80      32 KB each; 20 ways of 4 banks (the way is only a grouping)
 │   └─ ns_lbp_mat x 2    16 KB each
 │       ├─ compute_subarray x 2   8 KB each (row_decoder, reconfig_sa, cap_maj3)
 │       └─ lbp_ctrl x 2
 ├─ pac_mapper
 └─ dpu
```

Sub-arrays are numbered flat, from 0 to 319: bank*4 + mat*2 + sub. One
instruction at a time is accepted on a valid/ready handshake. `instr_ready`
stays low while a multi-cycle instruction runs. A broadcast bit sends the same
micro-operation, or the same LBP start, to all 320 sub-arrays in the same
cycle. That is how a layer's comparisons run in parallel across the slice.

Instruction fields: `opcode`, `bcast`, `sub` (9 bits), `src1`, `src2`, `src3`,
`dest` (row addresses), `size`, `imm` (32 bits) and `data` (one 256-bit row).

| opcode | name | effect |
|---|---|---|
| 1 | READ | row `src1` of sub-array `sub` on `rd_data`, 2 cycles after acceptance |
| 2 | WRITE | `dest <- data` |
| 3 | COPY | `dest <- src1` |
| 4 | INI | `src1 <-` all 0 or all 1 (`imm[0]`) |
| 5 | CMP (xor2) | `dest <- src1 ^ src2` |
| 6 | SEARCH | `dest <- ~(src1 ^ src2)`: columns where row `src1` equals the key row `src2` |
| 7 | NAND3 | `dest <- ~(src1 & src2 & src3)` |
| 8 | NOR3 | `dest <- ~(src1 \| src2 \| src3)` |
| 9 | MAJ3 (carry) | `dest <- maj(src1, src2, src3)` |
| 10 | XOR3 (sum) | `dest <- src1 ^ src2 ^ src3` |
| 11 | AND2 | `dest <- src1 & src2` |
| 12 | LOADT | write the 8 planes of the transpose buffer into `dest .. dest+7`, then clear it |
| 13 | LBP | run `lbp_ctrl` with P base `src1`, C base `src2`, column enables `data` |
| 14 | MLP | dot product of planes at `src1` (W) and `src2` (I); `imm[3:0]` weight bits, `imm[7:4]` input bits |
| 15 | MAP | read row `src1`, PAC-map one output pixel, send it through the DPU (see section 4) |

Opcodes 3 to 11 are the bit-wise ISA of the design. Together with full-adder
sum and carry (XOR3 and MAJ3), they allow in-memory addition as well.

Pixels arrive on `pix_valid / pix_data`, one per cycle, and fill the transpose
buffer in column order. A LOADT then writes them as bit-planes.

## 8. Where this design departs from, or adds to, the paper

* **Sensing.** The analog read path is abstracted. Voltages become a count of
  '1' cells, and the capacitive majority becomes a logic majority. Precharge,
  word-line under-drive and sense timing are not modelled in the RTL. The
  reported 92 mV sense margin does not follow from the printed levels and
  references: the smallest gap is 55 mV, between 495 mV and VR2. The model uses
  the printed numbers.
* **Ties.** They give 0 (section 3), not the "greater or equal" rule.
* **Mat structure.** The mat drawing shows four quadrants with chunk muxes. The
  text's organisation, two 8 KB sub-arrays per 16 KB mat, is built instead.
* **Choices made where the paper says nothing:**
  * the Out_S encoding and the instruction format and opcodes;
  * the all-one constant row, the LOADT, LBP, MLP and MAP macro-instructions,
    and the column layout that MAP expects;
  * the DPU formulas and widths (24-bit accumulator, 3-bit activations);
  * one instruction at a time, with no overlap between sub-arrays running
    different instructions, except for broadcast.
* **Not built:** the pixel array and its ADC, the sensor-side skipping of
  approximated bit conversions, the bus fabric, the sub-cycle timing generator
  and the transistor-level cell and precharger. The pixel stream, the
  instruction stream and the results are top-level ports in their place.

## 9. Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and stops, and a watchdog stops it if it
hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_lbp_ctrl \
    rtl/nslbp_pkg.sv $(ls rtl/*.sv | grep -v nslbp_pkg) tb/tb_lbp_ctrl.sv
./obj_dir/Vtb_lbp_ctrl
```

Replace the name to run any other testbench: `tb_<module>` for each module in
`rtl/`.

`tb_ns_lbp_top` runs the full-size slice (320 sub-arrays) end to end. It does
the following:

* streams an 8x8 zero-padded image and loads the pixels and their pivots
  transposed;
* broadcasts the constant rows and the LBP start;
* runs two 4-point kernels with one approximated bit, and checks the LBP rows
  and every fused pixel after the shifted ReLU and quantisation;
* feeds the 64 activations into an in-memory MLP neuron and checks its sum and
  its cycle count;
* executes every ISA instruction on the last sub-array;
* forces an early-stopping LBP search.

It counts each mechanism (broadcast, transposed load, parallel LBP, early stop,
skipped comparisons, approximated output bits, MLP, ReLU clipping, quantisation
saturation, every opcode). If one never happens, that counts as a failure. At
full size the C++ build takes about five minutes and the simulation about ten
seconds.

To change the size, override `NBANKS` on `ns_lbp_top`. `NSUB` follows as
4 x NBANKS. The row count and column count of a sub-array are package
constants (`nslbp_pkg`), because the row map and the instruction format depend
on them.
