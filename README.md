# Tight-compression CNN accelerator: a bit-serial systolic array for permuted, column-packed sparse weights

## The idea

A convolution layer is a matrix product, with output channels as rows and input channels as columns. After fine-grained (unstructured) pruning, most of its weights are zero, but they are scattered. A systolic array that maps one weight to one node gains nothing from that sparsity.

This accelerator gets its speed-up from compression done offline:

1. **Row sections.** The pruned matrix is cut into row sections of 32 rows. Each section matches the 32 rows of the array.
2. **Permutation and packing.** Inside a section, the columns are permuted and then packed. Up to **G = 16** original columns are merged into one *packed column*, and no two merged columns may have a nonzero in the same row. The permutation is what makes such conflict-free groups common, so nothing has to be pruned to resolve conflicts. A section of 512 columns can shrink to a few dozen packed columns.
3. **Node content.** Every node of a packed column keeps the one surviving weight of its row, together with a 4-bit **index** that says which of the 16 original columns (input channels) the weight belongs to.
4. **Input selection.** At run time the 16 activations of a packed column travel up that column together, and each node picks its own one with the index.
5. **Subword merging.** Most surviving weights need only a few significant bits. A weight can therefore be stored as *Subword H* (upper bits), as *Subword L* (lower bits), or at full 8-bit precision. Two weights from different original columns may then share one node, one in H and one in L, each with its own index. The node multiplies the H part by activation x_i and the L part by activation x_j. This packs the matrix even more tightly. The split of the 8 bits can be set per layer to {5H,3L}, {4H,4L} or {3H,5L}.

The RTL here is the hardware side: the array, its buffers and its sequencing. The offline pruning, permutation and packing software is not part of it. Tiles, LUT contents and descriptors are loaded through ports.

## Block map

```
            weight_buffer ---- one array row per cycle ----+
  (tiles + tile descriptors)                               v
                                                 systolic_array (32 x 32 sa_node,
 address_lut --> input_buffer --> input_reg_array --> four 32x8 subarrays)
 (channel of each  (channels x    (2 banks, LUT-order   ^ inputs move up
  packed slot)      pixels)        fill, bit-serial,    | partial sums move right
                                   column skew)         |
 output_buffer --> accu_in (group A, group B) --> rows --> accu_out (A, B) --> output_buffer
            tc_controller: LOAD tile -> STREAM all pixels -> DRAIN -> next tile
```

Top module: `tc_top`. The shared types and sizes are in the package `tc_pkg`.

## Bit-serial arithmetic

**Number formats.**
- Activations are unsigned 8-bit values and enter LSB first, one bit per cycle.
- A weight is an 8-bit magnitude plus a separate sign.
- Partial sums are 32-bit two's complement. They also move one bit per cycle, LSB first, along the rows.

**Weight-level MAC (`mac_weight`).** This is a serial–parallel multiplier.
- Eight AND gates form w·x_bit. Eight full adders hold the product in carry-save form, shifting it one place towards the LSB every cycle, so one product bit comes out per cycle.
- A serial negator (invert, plus a carry of 1 on bit 0 of the word) applies the sign.
- A last full adder adds the result to the partial-sum bit arriving from the left.

The activation input must be zero after its 8 bits. After 32 cycles the word is exact modulo 2^32. The `first` input marks bit 0 of a word and clears all carries and sums.

**Subword MAC (`mac_subword`).** It has the same chain, with these differences:
- Weight bits w7..w5 always multiply x_i, and w2..w0 always multiply x_j.
- w4 and w3 each go through a mux controlled by `mode[1]` and `mode[0]`:

| mode | split  |
|------|--------|
| 00   | 5H, 3L |
| 01   | 4H, 4L |
| 11   | 3H, 5L |

- When the two subwords have opposite signs (`opp`), x_i is negated serially before it enters the chain. It is inverted, with +1 on the first bit, and from then on runs as its own sign extension.
- `sign_l` negates the whole product.

The result is

    y += (-1)^sign_l * ( W_H * (opp ? -x_i : x_i) + W_L * x_j )

Here W_H and W_L are the weight field masked to its H and L bits, with the bits kept in place. For a full-precision weight, both indices name the same channel (x_i = x_j) and opp = 0. For a weight that has only one subword, the other subword is zero.

## Four interleaved MACs and the 32-cycle frame

An activation vector takes 8 cycles to enter, but a partial sum takes 32 cycles to leave. Each node therefore has **4 MAC units** that share its weight and indices and take vectors in turn.

A free-running 5-bit phase numbers the cycles of a 32-cycle frame:
- MAC m owns the words that start at phase 8·m.
- MAC m takes the node's selected bits during the first 8 cycles of its word, and zero for the remaining 24 cycles.
- Every row carries four independent partial-sum lanes, one per MAC.

A new vector (one pixel position) can thus enter every 8 cycles, and every node does useful work in every cycle.

A **control word** `{vld, pix, phase}` travels up each column with the data bits and leaves each node registered, in step with the partial sums. The units at the array edges read it to find word boundaries, to know whether a slot held a vector, and to find out which pixel a word belongs to.

## Skews, accumulation across tiles, and the split

Timing through the array:
- Input bits move up one row per cycle.
- The input register array delays column c by c cycles.
- Partial sums move right one column per cycle.

So node (r, c) sees the data of a vector at the same relative time as the partial sum arriving from its left. Row r is one cycle behind row r−1.

A row section usually needs several tiles of 32 packed columns. The tiles of one section accumulate through the output buffer:
- **`accu_in`** (one per row and group) runs when a lane reaches bit 0 of a word at the group's first column. It reads the 32-bit sum that earlier tiles left for (section slot, pixel), then shifts it in serially as the lane's starting value. On a section's first tile it shifts in zero instead.
- **`accu_out`** collects the 32 bits that leave the group's last column and writes the word back.

**Folding.** The array consists of four 32×8 subarrays. If a tile's `split` field is k (1–3), the chain is cut in front of column 8k:
- columns 0…8k−1 form group A;
- columns 8k…31 form group B.

Each group has its own accu_in/accu_out pair and its own output-buffer slot. This lets a row section that needs only a part of a tile share the array with another row section. With `split` = 0 the whole array is group A.

## Dataflow and control (`tc_controller`, `input_reg_array`)

One run processes `num_tiles` tiles from the weight buffer against `num_pix` pixel vectors held in the input buffer. For each tile, the controller does three things:

1. **LOAD, 32 cycles.** It copies the tile into the array, one array row per cycle. It also latches the tile descriptor.
2. **STREAM.** It issues one fill request per pixel. Filling a vector works like this:
   - The input register array walks the address LUT four columns at a time.
   - For each group of four columns it reads the 4×16 = 64 activations named by the LUT from the input buffer.
   - A vector is therefore gathered in 8 cycles.
   - There are two banks: one is filled while the other streams. So with requests arriving back to back, a vector enters the array every 8 cycles.
   - A slot that has no filled bank carries `vld = 0` and zeros.
3. **DRAIN.** It waits a fixed (COLS−1)+(ROWS−1)+24+4 cycles. This covers the column and row skews and the tail of the last 32-bit word. Then it moves on to the next tile.

Weights are stationary, so the next tile is loaded only after the drain. A `done` pulse ends the run. At full size, a run of 3 tiles × 8 pixels takes 604 cycles from `start` to `done`.

The host writes all buffers through the top's ports and reads results back through the output buffer's host port. Layers larger than the buffers are handled as a sequence of runs:
- Partial sums stay in the output buffer between runs.
- The descriptor's first-tile flags decide whether a section starts from zero.

## Formats

**`node_wt_t`** (one per node, 18 bits):

| Field    | Bits | Meaning |
|----------|------|---------|
| `w`      | 8    | weight field (magnitude, or {H, L} subwords) |
| `sign_l` | 1    | sign of the L subword (of the whole weight when it has one part) |
| `opp`    | 1    | H sign opposite to L sign |
| `idx_h`  | 4    | channel slot of x_i |
| `idx_l`  | 4    | channel slot of x_j |

The weight-level variant uses only `w`, `sign_l` and `idx_h`.

**LUT entry `lut_entry_t`:** `{vld, ch[8:0]}`. There is one entry per (tile, array column, slot 0…15). It names the input-buffer channel of that slot. `vld = 0` marks an unused slot, which reads as activation 0.

**Tile descriptor `tile_desc_t`:** `{split[1:0], sec_a[3:0], first_a, sec_b[3:0], first_b}`.
- `sec_*` are the output-buffer slots of the two groups.
- `first_*` say whether the group starts from zero.

**Output-buffer address:** per array row, `{section slot, pixel}`, which gives 16 × 8 words of 32 bits.

## Sizes

| Parameter | Value | Source |
|-----------|-------|--------|
| Array rows × columns | 32 × 32 | paper |
| Subarrays | four of 32 × 8 | paper |
| Packed columns per array column (G) | 16 | paper |
| MACs per node | 4 | paper |
| Activation and weight width | 8 bits | paper |
| Partial-sum width | 32 bits | paper |
| Input buffer | 512 channels × 8 pixels | this design |
| Weight buffer and LUT | 16 tiles | this design |
| Output buffer | 16 section slots × 8 pixels per row | this design |
| Input-buffer reads per cycle | 64 | this design |
| Weight-load rate | 1 array row per cycle | this design |

`tc_top` has the parameters `ROWS_P` and `COLS_P`, which shrink the array for fast tests. `COLS_P` must be a multiple of 8. A third parameter, `SUBWORD`, selects the MAC: 1 (the default) builds the subword MAC, 0 the weight-level MAC.

## Where this design departs from, or goes beyond, the source description

- **Not described in the source, chosen here:**
  - the insides of the accumulation units;
  - the control word;
  - the phase-based assignment of words to the 4 MACs;
  - the fill width (4 columns per cycle);
  - the buffer capacities and port counts;
  - the tile descriptor and split encoding;
  - the weight-load rate;
  - the FSM and its fixed drain time;
  - the mode and sign encodings of the subword MAC.
- **Read from a drawing:** the carry-save arrangement of the 8 full adders, and which mux input of the w4/w3 muxes selects x_j.
- **Number formats:** activations are treated as unsigned. The weight is a sign plus an 8-bit magnitude, as drawn, even though the text speaks of "8-bit weights".
- **Buffers** are written as register arrays. A real chip would use SRAM macros.
- **Not built:**
  - the activation function and requantization of finished sums (the sums are read out as 32-bit values);
  - the off-chip memory interface;
  - the offline compression software.
- **No overlap between tiles:** loading the next tile is not overlapped with the drain of the current one.

## Simulating

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog if the design hangs. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_tc_top \
    rtl/tc_pkg.sv $(ls rtl/*.sv | grep -v tc_pkg) tb/tb_tc_top.sv
./obj_dir/Vtb_tc_top
```

| Testbench | What it checks |
|-----------|----------------|
| `tb_mac_weight`, `tb_mac_subword` | random weights, signs and modes against integer products |
| `tb_sa_node` | slot assignment, index selection and both MAC variants |
| `tb_systolic_array` | skewed streams through a 4 × 16 array, with split 0 and 1, against a reference matrix product |
| `tb_accu_in`, `tb_accu_out` | serialisation and deserialisation, and buffer addresses |
| `tb_input_reg_array` | LUT-ordered fill, double buffering, bit order, skew, empty slots |
| `tb_address_lut`, `tb_input_buffer`, `tb_weight_buffer`, `tb_output_buffer` | random write and read traffic against a model |
| `tb_tc_controller` | state sequence, cycle counts, fill requests |
| `tb_tc_top` | 8 × 16 array end to end (details below) |
| `tb_tc_top_full` | the same test at the default 32 × 32 size |
| `tb_conv15_layer` | a whole 512 × 512 layer at full size (details below) |

`tb_tc_top` makes three runs, one per subword split. Each run has three random tiles: a first tile of a row section, a second tile that must add onto it through the output buffer, and a folded tile that splits the array between two other sections. It compares every output-buffer word with a reference computed from the tile contents. It also counts each mechanism and fails if one never happened: folded writes, accumulation reads, fills overlapping a stream, held fills, opposite-sign subwords, full-precision weights, empty slots, and the 8-cycle vector spacing.

`tb_conv15_layer` runs a complete 512 × 512 pointwise layer for 8 pixels on the default-size top:
- The layer is random, 93.3 % pruned, with weights already reduced to subwords for {4H,4L}.
- The bench packs it itself: a random channel order, then first-fit into conflict-free groups of 16, where an H-only and an L-only weight may share a node.
- It then cuts the groups into tiles and runs them in as many runs as the 16-tile weight buffer needs.
- Every output is compared with the plain product of the unpacked sparse matrix.

In a typical run, about 590 packed columns (about 14× fewer than 16 × 512) fill 32 tiles, which takes two runs and about 6400 array cycles.

The full-size benches spend a few minutes compiling and then run in seconds.
