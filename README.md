# Layered QC-LDPC decoder with min-sum and NS-FAID kernels

This is a high-throughput layered decoder for a quasi-cyclic LDPC code. It supports two
check-node kernels. One is the usual 4-bit min-sum (MS) kernel. The other is a
*non-surjective finite alphabet iterative decoder* (NS-FAID).

The idea behind the NS-FAID is simple. Variable-node messages are computed with the full
internal precision. Before they reach a check node, though, they pass through a *framing
function* F, which maps the 15 possible 4-bit values onto a smaller set. Only that set is
stored and moved around. The set has 2 or 3 bits per message instead of 4, so the check-node
units, the check-message memory and the wiring between them all shrink. The decoding loss is
small, and a well-chosen F can even do better than min-sum.

The RTL implements both decoder architectures for the (3,6)-regular code with N = 1296. They
are selected by `ARCH` on `ldpc_decoder_top`:

- **pipelined** (`ARCH = 0`, the default): one base-matrix row per layer, with two layers in
  flight at once;
- **full-layer** (`ARCH = 1`): four rows per layer, one layer per cycle.

Three more things are parameters: the kernel, the storage format of the check-node messages
(plain or compressed) and the number of iterations. Both architectures compute exactly the
same hard decisions.

## The code and its schedule

The parity-check matrix is given by a 12 x 24 base matrix. Each non-negative entry b stands
for a z x z cyclically shifted identity matrix, with z = 54. Every row has 6 non-negative
entries and every column has 3. The table is in `ldpc_pkg` (`LAYER_COL` lists the columns,
`LAYER_SHIFT` the shifts).

The circulant convention used throughout is as follows. Check node r of row l, through entry
(l, j, b), sees element (r + b) mod z of column j.

Decoding is layered, with one base-matrix row per layer, so there are L = 12 layers and z = 54
check nodes are processed in parallel. Two consecutive rows of this matrix never share a
column, and the row after the last is the first. The pipeline relies on this property.

For every layer, the decoder does the following:

    alpha  = gamma~ - beta_old                  (VNU, q~ = 6 bits, saturated to +-31)
    m      = F(sat_7(alpha))                    (SAT/FRA, coded on w bits)
    beta   = min-sum over the 6 framed messages (CNU: sign product, min of the others)
    gamma~ = alpha + DEFRA(beta)                (AP-LLR unit, saturated to +-31)

Here gamma~ is the a-posteriori LLR of a variable node, and beta_old is the message this check
node sent to it in the previous iteration. In the first iteration beta_old is taken as 0. The
hard decision is the sign of gamma~: negative gives 1, zero or positive gives 0. The decoder
runs a fixed number of iterations. There is no syndrome check.

## Framing functions

F is odd, so it is given by its table `[|F(0)|, F(1), ..., F(7)]` (type `fra_lut_t`). Let W be
the number of distinct magnitudes in the table. Messages then take w = ceil(log2 W) + 1 bits:
one sign bit plus the *rank* of the magnitude among the distinct values.

Because the ranks keep the order of the magnitudes, the CNU can compare codes directly. The
DE-FRA block turns a rank back into its 4-bit value. Both blocks are generated from the table
at elaboration (`fra_index`, `defra_value`).

| `F_LUT`       | table                   | w | image of F        |
|---------------|-------------------------|---|-------------------|
| `LUT_MS`      | 0 1 2 3 4 5 6 7         | 4 | 0..7 (plain MS)   |
| `LUT_NSFAID3` | 0 1 1 3 3 3 7 7         | 3 | 0, 1, 3, 7        |
| `LUT_NSFAID2` | 1 1 1 1 1 6 6 6         | 2 | 1, 6              |

The NS-FAID-2 table has |F(0)| = 1. The sign of F(0) would otherwise be a coin toss, so a
zero message is sent as +1 (a message of 0 has a positive sign bit).

## Pipelined data path

```
 in_llr --> input_buffer --> BS_INIT --> DS --> gamma~ memory (24 blocks of z x 6 bits)
 (24 beats)                                          |           ^
                       P1                            v           | PER_W
                 PER_R (6 of 24 blocks) --> BS_R --> VNU         |
                 beta memory --> [DCP] --> DE-FRA --^   |        |
                                               registers        |
                       P2                               v        |
                 SAT/FRA --> CNU --> beta memory (write)         |
                                |--> DCP --> DE-FRA --> AP-LLR --+
 gamma~ memory --> BS_INIT-bar (signs) --> output_buffer --> out_bits (24 beats)
```

**Keeping the AP-LLRs rotated.** The gamma~ memory does not hold the LLRs in codeword order.
Each column block is kept rotated the way the last layer that used it needed it. When layer l
reads column j, BS_R only rotates by b(l, j) - b(l', j) mod z. Here l' is the previous layer
with an entry in column j. These differences are constants of the code, tabulated per layer in
`shift_factor`.

The updated values are written back without any shifter. To start this scheme, BS_INIT
rotates each input column by the shift of the column's *last* entry. At the end, BS_INIT-bar
undoes that rotation on the sign bits. Both are fixed wiring.

**Two stages, two layers at once.** A register after the VNUs splits a layer into P1 and P2:

- **P1:** read, permute, rotate and subtract.
- **P2:** frame, CNU, de-frame, add, write back and store beta.

While P2 finishes layer l, P1 already reads layer l+1. The two layers use disjoint column
blocks, so no AP-LLR value is read before its update is written. The controller asserts this
in simulation.

**Beta memory.** This is a dual-port RAM with synchronous read and one word per layer. The word
for layer l+1 is addressed one cycle ahead, so it is at the output when P1 needs it. The memory
is never cleared: in the first iteration the VNU is fed 0 instead of the stored word.

A word holds either:

- all 6 x z framed messages (z * 6 * w bits); or, with `COMPRESSED = 1,`
- per check node the 6 input signs, min1, min2 and the index of min1. That is
  z * (6 + 2(w-1) + 3) bits. DCP rebuilds the 6 outgoing messages from it.

| kernel    | uncompressed word | compressed word |
|-----------|-------------------|-----------------|
| MS        | 1296 bits         | 810 bits        |
| NS-FAID-3 | 972 bits          | 702 bits        |
| NS-FAID-2 | 648 bits          | 594 bits        |

**CNU.** Each of the z CNUs finds the minimum and second minimum of the 6 magnitudes, the
index of the minimum, and the xor of the signs. The outgoing message on edge k is built like
this:

- its magnitude is min2 if k is the index of the minimum, and min1 otherwise;
- its sign is the xor of all signs except edge k's.

The uncompressed build uses the same CNU and DCP back to back. Only the value stored in memory
differs.

## Full-layer data path

The 12 rows can also be grouped into 3 *full* layers of 4 consecutive rows (rows 1-4, 5-8 and
9-12). In each group every column appears exactly once. A layer then needs 4 x z = 216 CNUs
and 24 x z VNUs, and it takes one cycle. A codeword takes 3 x N_ITER = 60 cycles, and back to
back there is no extra load cycle.

A layer's result feeds the very next layer, so a pipeline register would add a cycle per layer.
There is none. Instead the loop is arranged so that the beta memory can stay a synchronous RAM:

```
 input word --> PER_1/BS_1 --> DS --> alpha memory (24 slots of z x 6 bits)
                                ^           |
                                |           v
                                |      SAT/FRA --> CNU --> beta memory (write layer l)
                                |           |        \--> DCP --> DE-FRA --+
                                |           +------------------> AP-LLR <--+
                                |                                  |
                               VNU <-- PER_WR/BS_WR (to layer l+1) <+--> PER_L/BS_L --> hard bits
                                ^
       beta memory (layer l+1, previous iteration) --> [DCP] --> DE-FRA
```

**The alpha memory replaces the AP-LLR memory.** It holds only the variable-to-check messages
of the layer about to run. They are kept in *slot* order: slot 6r + k holds edge k of row r of
the layer. So CNU group r always reads slots 6r..6r+5, whichever layer is running.

Within one cycle, the decoder does the following:

1. The AP-LLRs produced for layer l are moved into the slot order and rotation of layer l+1 by
   PER_WR/BS_WR.
   - Each slot picks the slot of layer l that carries the same column.
   - It rotates it by the difference of the two shifts.
   - This is a 3-way multiplexer and one barrel shifter per slot.
2. The VNUs subtract layer l+1's old check messages.
3. The result is written back as the next alpha.

**Beta read one layer ahead.** The old beta word of layer l+1 has to be at the RAM output during
the cycle of layer l. So it is addressed one cycle earlier, while layer l-1 runs. That address
is never the one being written, so the RAM needs no read-during-write behaviour.

**Entry and exit.** PER_1/BS_1 places a new codeword directly into layer 0's slots. Beta is zero
in the first iteration, so no VNU step is needed on entry. After the last layer of the last
iteration, PER_L/BS_L returns the signs to codeword order.

| kernel    | beta word, uncompressed | beta word, compressed |
|-----------|-------------------------|-----------------------|
| MS        | 5184 bits               | 3240 bits             |
| NS-FAID-3 | 3888 bits               | 2808 bits             |
| NS-FAID-2 | 2592 bits               | 2376 bits             |

The memory has 3 words of this width, against 12 shorter words in the pipelined decoder. The
total number of bits is the same.

## Timing and interface

In the pipelined decoder, one codeword takes 1 + 12 x N_ITER cycles, which is 241 cycles with
the default 20 iterations:

- one cycle loads the word into the gamma~ memory;
- then P1 runs for 240 cycles, with P2 one cycle behind it.

The load of the next word shares a cycle with the last P2 of the current one. During that
cycle the hard decision is taken from the values being written. So while the input keeps up,
a new codeword starts every 241 cycles.

The throughput is 1296 x f / 241 bit/s, which is N f / (delta + L n_iter) with delta = 1. The
latency from start to result is also 241 cycles. The full-layer decoder needs 60 cycles for both
(delta = 0, L = 3).

Both architectures have the same ports (`ldpc_decoder_top`):

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `en_decoder` | in | 1 | allow a new codeword to start |
| `in_valid` / `in_ready` | in / out | 1 | input handshake, one column per beat |
| `in_llr` | in | z x 4 | channel LLRs of one column, element e in `in_llr[e]`, values -7..7 |
| `out_valid` / `out_ready` | out / in | 1 | output handshake, one column per beat |
| `out_bits` | out | z | hard decisions of one column |
| `out_last` | out | 1 | marks the 24th column |
| `cw_start` | out | 1 | a codeword is loaded and decoding starts |
| `cw_done` | out | 1 | a result is handed to the output buffer |
| `stall` | out | 1 | a finished codeword waits because the output buffer is still busy |

The input buffer takes 24 beats per codeword. It accepts the next word while the current one
is being decoded, and `in_ready` drops once it is full.

The output buffer hands out 24 beats. If it still holds the previous result when a codeword
finishes, the decoder stalls: the result stays in the gamma~ memory, `stall` is high, and
nothing new starts until the buffer frees up.

## Files

| file | block |
|------|-------|
| `rtl/ldpc_pkg.sv` | sizes, base matrix, framing tables and the functions derived from them |
| `rtl/ldpc_decoder_top.sv` | top level: selects the architecture |
| `rtl/ldpc_decoder.sv` | pipelined decoder, pipeline registers |
| `rtl/ldpc_decoder_fl.sv` | full-layer decoder and its sequencing |
| `rtl/alpha_mem.sv` | VN-message memory with its selector (full-layer) |
| `rtl/fl_shift_net.sv` | PER_1/BS_1, PER_WR/BS_WR, PER_L/BS_L (full-layer) |
| `rtl/controller.sv` | layer and iteration counters, load, write enables, beta read address, stall |
| `rtl/input_buffer.sv`, `rtl/output_buffer.sv` | serial-in/parallel-out input, parallel-in/serial-out output |
| `rtl/bs_init.sv`, `rtl/bs_init_inv.sv` | fixed rotations into and out of the AP-LLR memory |
| `rtl/gamma_mem.sv` | AP-LLR registers with the load/write-back selector (DS) |
| `rtl/shift_factor.sv` | per-layer columns and BS_R rotations |
| `rtl/per_r.sv`, `rtl/per_w.sv` | read and write permutations |
| `rtl/bs_r.sv`, `rtl/cyclic_shifter.sv` | barrel shifters |
| `rtl/vnu.sv`, `rtl/apllr.sv` | saturating subtract and add |
| `rtl/fra.sv`, `rtl/defra.sv` | saturation, framing and de-framing |
| `rtl/cnu.sv`, `rtl/dcp.sv` | check-node units and decompression |
| `rtl/beta_mem.sv` | check-message RAM |

## Verification

Every block has a self-checking testbench, `tb/tb_<module>.sv`. The testbenches compare
against values computed independently inside the testbench.

`tb/ldpc_ref_pkg.sv` is a plain behavioural model of the whole algorithm. It uses integers,
has no memories or shifters, and follows the circulant convention directly.

- **`tb/tb_ldpc_decoder.sv`** runs the top at its default parameters (pipelined).
  - It streams six codewords with BPSK/AWGN noise at two levels, plus one random word. Two of
    the words are sent while the output side is held back.
  - Every decoded bit must match the reference.
  - The test checks the 241-cycle latency and period.
  - It counts the load, P1/P2 overlap, first-iteration bypass, beta reuse, loading during
    decoding, back-to-back starts, waiting for input and output stalls. It fails if any of
    these never happened.
- **`tb/tb_ldpc_decoder_fl.sv`** does the same for the full-layer decoder at full size, with a
  60-cycle period.
- **`tb/tb_ldpc_decoder_variants.sv`** and **`tb/tb_ldpc_decoder_fl_variants.sv`** build the
  other five kernel and storage combinations of each architecture at z = 18. They check them
  the same way.

Simulate with plain verilator, package first, for example:

    verilator --binary --timing rtl/ldpc_pkg.sv $(ls rtl/*.sv | grep -v ldpc_pkg) \
              tb/ldpc_ref_pkg.sv tb/tb_ldpc_decoder.sv --top-module tb_ldpc_decoder
    obj_dir/Vtb_ldpc_decoder

Each testbench ends with a line `TB_RESULT checks=<n> failures=<n>`.

## Changing it

- **`Z`** may be lowered for faster simulation. Shifts are then taken mod Z, which gives a
  smaller code from the same base matrix.
- **A new framing function** is a new `fra_lut_t` constant. Its entries must not decrease, and
  the image must not need more than 3 bits of rank.
- **Another code** needs new `LAYER_COL` / `LAYER_SHIFT` tables. It must also keep the
  property that consecutive layers share no column, and the row degree must stay 6.

## Where this design goes beyond or departs from its source description

- **Saturation.** Subtractor and adder overflow is saturated to +-31. The description only
  says these are 6-bit operations.
- **Assumed layouts.** The circulant convention, the lane order (ascending column within a row)
  and the rank coding of framed messages are assumptions.
- **CNU structure.** The CNU is a straight min1/min2 search, not a specific tree-structured
  circuit. Its function is the same.
- **Stream interfaces.** The column-per-beat valid/ready streams, the stall behaviour and the
  asynchronous reset are this design's own.
- **Full-layer sequencing.** The one-cycle-ahead beta read and the slot order of the
  full-layer decoder are this design's own. So is the choice of the pipelined decoder as the
  default.
- **Codes not included.** Only the (3,6)-regular code is built in. The irregular WiMAX code would need per-column framing tables and layers
  of degree 6 and 7, and its base matrix is not reproduced here.
