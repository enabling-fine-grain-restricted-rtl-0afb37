# WLCRC-16: word-level compression with restricted coset coding for MLC PCM

Multi-level-cell phase change memory stores two bits per cell as one of four
resistance states. Programming the states costs very different energy: with
the figures used here, a changed cell costs a 36 pJ RESET plus a SET energy of
0 pJ (S1), 20 pJ (S2), 307 pJ (S3) or 547 pJ (S4). A coset encoder rewrites
data with one of a few alternative symbol-to-state mappings ("candidates").
It picks the candidate that puts the changed cells into cheap states, and it
records that choice in auxiliary bits. The finer the blocks it chooses for, the
more energy it saves. But each block needs its own auxiliary bits. At 16-bit
blocks they would need 12.5 % more storage and cost more than they save.

This design removes that overhead in two steps:

* **Word-level compression (WLC).** In most program data the six top bits of
  each 64-bit word are all zeros or all ones. In a word like that, b63..b59
  can be dropped and rebuilt from b58, like sign extension. A 512-bit line
  whose eight words all qualify frees 5 bits per word. Every other bit stays
  in place, so differential write still sees the old bit positions.
* **Restricted coset coding.** Only three candidates are used, C1, C2 and
  C3. Each word first picks a *group*, C1/C2 or C1/C3. Then each of its four
  blocks picks C1 or the group's other candidate. That takes 1 + 4 = 5 bits
  per word, exactly what WLC frees.

A line that cannot be compressed is written unencoded. One extra flag cell per
line (257 cells instead of 256) says which form the line is in.

The RTL covers the on-chip encoder and decoder between a memory controller
and the PCM array. It does not include the controller or the array.

## Cell states and candidates

The array always reads a stored bit pair with the default mapping
`00→S1, 10→S2, 11→S3, 01→S4`. To store data symbol `d` under candidate `Ck`,
the encoder writes the bit pair whose default state is `Ck(d)`. So every
candidate is a fixed 2-bit permutation.

| state | energy if changed | C1 (default) | C2 | C3 |
|-------|------------------|----|----|----|
| S1 | 36 pJ  | 00 | 11 | 11 |
| S2 | 56 pJ  | 10 | 00 | 01 |
| S3 | 343 pJ | 11 | 10 | 00 |
| S4 | 583 pJ | 01 | 01 | 10 |

C2 puts runs of zeros and ones (`00`, `11`) into the two cheap states, which
suits biased data. Between them, C1 and C3 give every symbol a cheap state,
which suits random data. A cell that already holds the target state is not
programmed and costs nothing (differential write).

## Stored word format (compressed lines)

```
 63   62   61   60   59   58  57 ........ 48  47 ..... 32  31 ..... 16  15 ...... 0
+----+----+----+----+----+----+--------------+------------+------------+-----------+
| G  | s0 | s1 | s2 | s3 | b58|  block 3     |  block 2   |  block 1   |  block 0  |
+----+----+----+----+----+----+--------------+------------+------------+-----------+
 G  = group: 0 -> C1/C2, 1 -> C1/C3
 sj = candidate of block j: 0 -> C1, 1 -> the group's other candidate
```

* Blocks 0 to 2 are whole 16-bit blocks (8 cells each).
* Block 3 is the 11-bit remainder b58..b48. Only its five whole cells,
  b57..b48, are coded. Bit b58 sits in the same cell as auxiliary bit s3
  (cell b59,b58), so it is stored uncoded.
* The wiring from s0..s3 to blocks 0..3 follows the published figure of the
  format.
* The 0/1 meaning of G and sj is this design's choice. The only value the
  source states is that `0` means C1.
* Word i of a line occupies line bits 64·i+63 .. 64·i.

The flag cell sits above the line (image bits 513:512):

* `00` (S1, the cheapest state): the line is compressed and encoded.
* `10` (S2): the line is raw.

Most lines compress, so the cheap state is the common one.

## How a word's encoding is chosen

Each word encoder (`rcc_word_encoder`) works only on the word's 59 data bits
and the 64 bits stored there now. It works in these steps:

1. For every block and every candidate, it sums the programming energy of the
   block's coded cells against the stored cells. That gives 12 sums, all
   computed in parallel.
2. It computes `cost12 = Σ min(C1, C2)` and `cost13 = Σ min(C1, C3)` over the
   four blocks.
3. It uses group C1/C2 only if `cost12 < cost13`. On a tie it uses C1/C3.
4. Inside the chosen group, each block takes the other candidate only if that
   is strictly cheaper than C1. On a tie it keeps C1.

The auxiliary bits are not included in the cost. Their values are not known
until the choice is made, so leaving them out keeps all four blocks fully
parallel. This is the same trade the 11-bit top block makes.

**Optional multi-objective rule.** `MO_T_PERMILLE` is 0 by default, which
turns the rule off. When it is set, it applies if the two group costs differ
by less than T (in ‰ of the larger one). The word then takes the group that
programs fewer cells, which trades a little energy for endurance. T = 1 % is
`MO_T_PERMILLE = 10`.

## Datapath

```
             new line (512)                         stored image (514)
                 |                                        |
        +--------+---------+                              |
        |                  |                              |
      [WLC]--compressible--+------------------+           |
        | 8 x 59 bits      |                  |           |
        v                  |                  v           |
   [Encoder: 8 x rcc_word_encoder] <-- stored line        |
        |                  | raw line         |           |
        +----> [2:1 mux + flag cell] <--------+           |
                      | image (514)                       |
                      v                                   |
                   [DIFF] <-------------------------------+
                      | per-cell enables (257)
                      v
                 registered outputs -> PCM array

   stored line (512) + flag --> [Decoder: 8 x rcc_word_decoder] --> [WLD]
                      |                                               |
                      +--------------- raw ----> [2:1 mux] <----------+
                                                     |
                                          registered line (512)
```

* `wlc_compress`: tests b63..b58 of every word and passes b58..b0 through.
* `wlcrc_encoder`: eight word encoders in parallel. The WLC result enables
  them; while it is low, their outputs are zero.
* `diff_write`: compares the 257-cell image with the stored one. It outputs
  one program enable per cell, the number of changed cells, and their energy.
  It sits after the multiplexer, so encoded lines and the flag cell are also
  written differentially.
* `wlcrc_decoder` / `rcc_word_decoder`: apply the inverse candidate of each
  block. The flag enables them.
* `wld_decompress`: copies b58 into b63..b59.
* `wlcrc_top`: the two paths, the flag cell, and one output register per path.

### Timing and interface of `wlcrc_top`

Both paths are combinational, with a single register at their outputs:

* `wr_valid_o` and `rd_valid_o` rise exactly one clock after `wr_req_i` and
  `rd_req_i`.
* Each path takes a new request every clock, and a write and a read can run in
  the same cycle.
* `rst_n` is an asynchronous, active-low reset that clears the outputs.

For every write, the controller supplies the line now stored
(`wr_old_line_i`, `wr_old_flag_i`). PCM reads a line before writing it anyway.
The write outputs are:

* `wr_image_o`: the 514-bit image, flag cell on top.
* `wr_cell_en_o`: which cells the array must program.
* Accounting and choice outputs: `wr_ncells_o`, `wr_energy_o`, `wr_group_o`,
  `wr_sel_o` and `wr_enc_cost_o`.

The read path takes the stored 512 bits and the 2-bit flag cell. Any flag
other than `00` is read as raw.

All geometry and energy constants live in `rtl/wlcrc_pkg.sv`. The SET
energies of the two expensive states are also parameters, `E_S3` and `E_S4`
(default 307 and 547 pJ), on `wlcrc_top`, `wlcrc_encoder`, `rcc_word_encoder`
and `diff_write`. Lower values model cells whose intermediate states are
cheaper to program; the encoder then weighs its choices with those numbers.
S1, S2 and the RESET energy stay fixed.

The RTL covers only the 16-bit block granularity. The 8-, 32- and 64-bit
variants need a different reclaimed-bit layout and are not provided.

A coarse yosys synthesis of `wlcrc_top` gives about 17,000 word-level cells
and 1,391 flip-flops. Nearly all of the logic is in the eight word encoders,
which compute 3 × 29 cell costs each.

## Where this RTL goes beyond its source

These are choices the source does not pin down:

* the word order within the line;
* the 0/1 polarity of the group bit;
* tie rules inside a block;
* how b58 is handled in the shared cell;
* zeroed encoder and decoder outputs while disabled;
* a flag value other than `00` read as raw;
* DIFF placed after the multiplexer rather than on the raw path only;
* the register stage and handshake;
* making the S3/S4 SET energies build-time parameters;
* the accounting outputs;
* how the multi-objective threshold is measured.

Everything else follows the source: the compressibility rule, the candidates,
the default energies, the group/block cost rule, the bit format, and the flag states.

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself if
it hangs. The testbenches compare against `tb/tb_ref_pkg.sv`, a separate
reference model. It types the candidate table in again and finds each word's
encoding by brute force over all 32 group/pattern combinations.

| testbench | what it covers |
|-----------|----------------|
| `tb_wlc_compress`, `tb_wld_decompress` | compressibility per word and line; data split; sign-style rebuild |
| `tb_rcc_word_encoder` | word encoder against the brute-force reference, at the default, at T = 1 % and at S3/S4 SET energies of 75/135 pJ; round trip |
| `tb_rcc_word_decoder` | decoder against the reference inverse; round trip |
| `tb_wlcrc_encoder`, `tb_wlcrc_decoder` | eight-word wrappers, word alignment, enables |
| `tb_diff_write` | per-cell enables, changed-cell count, energy at the default and at 50/80 pJ S3/S4 SET energies |
| `tb_wlcrc_top` | full design at default parameters against a behavioural 16-line PCM array (`tb/pcm_mem_model.sv`), 3000 write/read-back steps (see below) |
| `tb_wlcrc_workloads` | random-line and biased-line write streams at the default, at T = 1 %, and at three lower S3/S4 energy settings; energy, programmed cells, expected write disturbance |

`tb_wlcrc_top` checks the image, the cell enables, the 1-cycle latency, and
that every line reads back intact. It also counts that each mechanism occurs
at least once:

* encoded and raw writes;
* both groups;
* C2 and C3 blocks;
* skipped unchanged cells;
* the flag cell changing in both directions;
* encoded and raw reads;
* a write and a read in the same cycle.

On the biased stream of `tb_wlcrc_workloads`, about 95 % of lines compress.
Programming energy falls by about 49 % against plain differential write of
the same data, and about a third fewer cells are programmed. With T = 1 % the
energy is within 0.1 % of that and slightly fewer cells are written. When the
S3/S4 SET energies drop, the savings shrink but remain large:

| S3 / S4 SET energy | energy saved vs. plain differential write |
|--------------------|-------------------------------------------|
| 307 / 547 pJ | 49 % |
| 152 / 273 pJ | 46 % |
| 75 / 135 pJ  | 43 % |
| 50 / 80 pJ   | 42 % |

The testbench also estimates write disturbance. Programming a cell starts
with a RESET, whose heat can shift an idle neighbouring cell. The chance is
12.3 % for a neighbour in S1, 0 for S2, 27.6 % for S3 and 15.2 % for S4. On
the biased stream the encoded writes expect about 2.05 disturbed cells per
line against 2.24 for plain writes, so the encoding does not make disturbance
worse.

Random lines practically never pass WLC: each word qualifies with
probability 1/32. They therefore cost the same as plain differential write,
plus the occasional flag-cell write. These
streams are synthetic stand-ins, not application traces.

Run one testbench with plain Verilator:

```
verilator --binary --timing --assert --top-module tb_wlcrc_top \
  -y rtl -y tb +libext+.sv -Irtl rtl/wlcrc_pkg.sv tb/tb_ref_pkg.sv tb/tb_wlcrc_top.sv
./obj_dir/Vtb_wlcrc_top
```

Swap the top module and its file for any other testbench. The top-level
testbench runs in a few seconds once built; building takes about a minute.
