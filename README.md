# FeNOMS: open modification spectral search inside a 3D FeNAND array

Open modification search compares a query spectrum with every reference spectrum of a large
library. This design never moves the references off the flash. Every spectrum is turned into
a binary hypervector of D = 8192 bits. The references are stored as multi-level cells in a
3D ferroelectric NAND (FeNAND) array. The distance between query and reference is computed
by the array itself, with ordinary reads whose wordline biases come from the query.

A NAND string is a series chain of cells. It conducts only if every cell on it is on. So
a single read can tell, for every bitline at once, whether *all* of m selected cells pass a
threshold test. The distance metric is chosen to fit this AND:

* **Upper-bound check (UBC).** The m wordlines are biased to `q_i + alpha_pos`. The string
  conducts if every stored value satisfies `r_i <= q_i + alpha_pos`.
* **Lower-bound check (LBC).** The m wordlines are biased to `q_i - alpha_neg`. The string
  conducts only if every `r_i < q_i - alpha_neg`. The check passes when the string does
  **not** conduct, i.e. `LBC = 1 - prod[r_i < q_i - alpha_neg]`.
* **Score.** The score of a reference is the number of passed UBCs plus the number of passed
  LBCs over all m-subsets of the hypervector (dual-bound approximate matching, D-BAM). A
  higher score means a closer match. The K best references are the result.

Each pass bit leaves the chip through the normal page buffer and I/O path. It is then added
into a plain binary counter outside the array.

## Cells, levels and bias codes

Before storage, PF = 3 adjacent hypervector bits are summed into one cell ("dimensional
packing"). A cell then holds a level 0..3 (2 bits). With D = 8192 this gives
NCELLS = ceil(8192/3) = 2731 cells. The last cell holds only the sum of the 2 bits left over.
The query is packed the same way, on the fly, from the encoded query register (`dim_packer`).

The analog wordline voltages are carried as signed 8-bit codes (`fenoms_pkg::vcode_t`) in
units of **half a level**:

| meaning                           | code                     |
|-----------------------------------|--------------------------|
| threshold of a cell at level r    | `2r`                     |
| a cell is on when                 | `code >= 2r`             |
| UBC bias on lane i                | `2q_i + alpha_pos_x2`    |
| LBC bias on lane i                | `2q_i - alpha_neg_x2 - 1` |
| unselected or padded wordline     | `VPASS = 127` (always on) |

The margins are inputs in half levels, so alpha = 1.5 is `alpha_*_x2 = 3`. With this scale:
* UBC passes exactly when `r <= q + alpha_pos`.
* The `-1` in the LBC code makes "not below" include a tie. The LBC is then exact for whole
  margins as well as half ones.

A cell reads level-exact; no threshold spread or read noise is modelled.

## Where a reference lives: folding over blocks

One hypervector (2731 cells) is much longer than a 32-cell string. It is therefore cut into
NPARTS = ceil(2731/32) = 86 parts. Part p is stored in **block p** of a plane, on the same
bitline and string-select row (SSL) in every block. A reference is addressed by
(string row, plane, bitline). Its id is

    id = (ssl * PLANES + plane) * BL + bitline

With the default 16 string rows, 23 planes and 5462 bitlines, that gives 2,010,016 reference
slots, ids 0 .. 2,010,015. The controller checks at elaboration that NPARTS <= BLOCKS.

Subsets of m cells are aligned to m inside one part. A part never shares a subset with the
next part. The last part has 11 cells, and the lanes past its end are biased to VPASS:
* a padded lane never breaks a UBC;
* a padded lane never makes an LBC "below".

A consequence worth knowing: an erased (never programmed) slot reads level 0 everywhere.
Such a slot passes every UBC, and it passes every LBC whose subset has any `q_i` above
alpha_neg. It therefore scores well, often better than a poorly matching reference. The
host should fill unused slots or ignore their ids.

## Search schedule and cycle count

`dbam_controller` runs the search as nested loops, outermost first:

1. string row `ssl` (0..SSL-1);
2. part (block) 0..NPARTS-1;
3. subset 0..ceil(cells_in_part/m)-1;
4. UBC, then LBC.

For every check it performs these steps:
* `dim_packer` forms the m query values.
* `wl_decoder` opens the m wordlines. The extended decoder simply ignores the low log2(m)
  address bits.
* `dbam_wl_bias` sets the biases.
* All PLANES planes read the same block and string row at once (`fenand_plane`).
* Every plane's `page_buffer` latches one bit per bitline, inverted for an LBC.
* `shared_io` then walks plane by plane, column by column, and sends IO_W bits per cycle to
  `score_accumulator`.

The accumulator keeps one SCORE_W-bit counter per reference of the current string row. The
first transfer of a row overwrites the counters instead of adding, so no clearing pass is
needed. After the last check of a row, the accumulator streams PLANES*BL scores, one per
cycle, into `topk_select`. That block keeps a sorted list of the K best (score, id) pairs;
ties keep the earlier id.

Reads and transfers do not overlap. With `ROWS = PLANES * ceil(BL/IO_W)` words per page
set, the cycles from `search_start` to `search_done` are:

    reads        = SSL * 2 * sum over parts of ceil(cells_in_part / m)
    cycles       = reads * (T_READ + 3 + ROWS) + SSL * (ROWS * IO_W + 2) + 1

For the defaults at m = 4 this gives:
* ROWS = 23 * 86 = 1978;
* 21,856 reads;
* 45,409,665 cycles, which is 45.4 ms at 1 GHz.

The transfer of 1978 words per read dominates. A wider I/O or overlapping the next read with
the current transfer would be the first things to change.

## Blocks

| file | what it is |
|------|-----------|
| `fenoms_pkg.sv` | bias code type, `VPASS`, UBC/LBC enum |
| `hdc_encoder.sv` | ID-level encoder: streams XORed ID/level chunks, counts per dimension, majority into the query register |
| `dim_packer.sv` | sums PF bits per cell; outputs the m query values of one subset |
| `wl_decoder.sv` | wordline decoder that opens m aligned consecutive wordlines |
| `dbam_wl_bias.sv` | per-wordline bias code for UBC/LBC, pass bias elsewhere |
| `fenand_plane.sv` | behavioural model of one plane: blocks × string rows × wordlines × bitlines, series-string sensing |
| `page_buffer.sv` | one latched bit per bitline, column read-out |
| `shared_io.sv` | time-multiplexes the planes' page buffers onto one valid/ready bus |
| `dbam_controller.sv` | search sequencer (loops above) |
| `score_accumulator.sv` | counter RAM, IO_W counters per word; drains scores |
| `topk_select.sv` | sorted top-K insertion list |
| `fenoms_top.sv` | wires it all together |

Top-level use:
* **Program.** Write the references with `prog_*`, one wordline page (BL cells of 2 bits)
  of one plane per cycle.
* **Encode the query.** Pulse `enc_clear`. Then for every peak, stream `D/ENC_W` beats of
  ID and level hypervector chunks on `enc_valid/enc_id/enc_lvl`. Finally pulse
  `enc_finalize` and wait for `query_valid`.
* **Search.** Pulse `search_start` with `log2m` and the two margins. Read `top_*` after
  `search_done`.

Programming and encoding during a search is an assertion failure.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| D | 8192 | hypervector length used throughout the evaluation |
| PF | 3 | packing factor of the main configuration |
| WL, SSL, BLOCKS | 32, 16, 128 | array organisation of the comparison setup |
| PLANES, BL | 23, 5462 | planes and PF3 bitline count of the comparison setup |
| MAXM | 16 | largest m evaluated (m = 1, 2, 4, 8, 16 at run time) |
| IO_W | 64 | chosen; the I/O width is not specified |
| T_READ | 4 | chosen; read latency in cycles (must be >= 2) |
| K | 4 | chosen; the number of candidates is not specified |
| ENC_W, ENC_CNT_W | 64, 8 | chosen; encoder stream width, peak counter width (<= 255 peaks) |

The other configurations studied for this architecture are reached by parameters:
* PF4 needs `PF=4`, `BL=4192`.
* A 512-wordline, 2-plane array needs `WL=512`, `PLANES=2`.

## Departures and choices

* The series string is modelled digitally, with no noise. The original study adds Gaussian
  threshold noise of 0.2 V in simulation.
* All planes are driven by one controller with one set of wordline biases, and they share
  one I/O bus; each has its own page buffer. Inside a plane, all blocks share the plane's one
  page buffer, and the parts of a reference are read one block after another. A drawing of
  this architecture shows a page buffer under each folded part; the text puts the parts in
  different blocks of one plane, and that reading was followed.
* The item memories (the ID and level hypervectors for every m/z bin and intensity level)
  are the host's. Their sizes and generation are not part of the design. The encoder takes
  them already selected, as a stream.
* Majority ties go to 0. Top-K ties keep the earlier reference.
* The decoy handling and false-discovery-rate filtering that follow the search run on the
  host and are not built.
* The wordline, string-select and bitline voltage generation, and the sense amplifiers, are
  analog. They appear only as bias codes and as the `sense_bits` of the plane model.

## Simulating

All testbenches are self-checking. Each one ends by printing
`TB_RESULT checks=<n> failures=<n>`. With verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_fenoms_top \
        -y rtl -y tb +libext+.sv -Irtl rtl/fenoms_pkg.sv tb/tb_fenoms_top.sv
    ./obj_dir/Vtb_fenoms_top

Replace `tb_fenoms_top` with any `tb/tb_*.sv`. The testbenches fall into three groups.

**Block testbenches.** These use small parameters, and most finish in seconds. Each one
compares its block with an independent model written in the testbench. The plane,
shared-I/O, controller and encoder testbenches also check latencies and cycle counts.

**`tb_fenoms_top`.** This runs the whole path at a tiny size (D = 42, 8 wordlines,
2 planes, 6 bitlines, K = 3). It compares the top-K and the cycle count of four searches
against a reference model of the D-BAM score (`tb/fenoms_ref_pkg.sv`). The searches use
m = 4, 1, 2 and 4, and margins 1.5/1.5, 0.5/0.5, 2.5/2.5 and 1.5/0.5. The testbench
counts the following, and fails if any never happened:
* failing UBCs and LBCs;
* padded lanes;
* overwrite-first counter words;
* top-K replacements;
* each value of m.

**`tb_fenoms_sweep`.** This runs the full grid of m = 1, 2, 4, 8, 16 and symmetric margins
0.5, 1.5, 2.5 end to end: 15 searches on one library. The instance has 120-bit vectors and
16 wordlines, so m = 16 opens a whole string and pads half of the last part. Every search
checks the top-3 and the cycle count.

**`tb_fenoms_pf4`.** This is the same sweep with four bits packed per cell: levels 0..4
in 3-bit cells, bias codes up to 13.

**`tb_fenoms_full`.** This runs at the default sizes. It programs an exact copy of the
query, a half copy and a second exact copy at the last id, 2,010,015. It then runs one
m = 4, alpha = 1.5 search over all 2,010,016 slots. It checks the top-4 ids and scores
against the model and the exact cycle count (45,409,665). It takes about two minutes.
