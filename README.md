# A linear systolic array for 2-D dynamic-programming sequence alignment

Many bioinformatics tools compare two sequences by filling a 2-D
dynamic-programming (DP) matrix. Examples are global (Needleman-Wunsch),
local (Smith-Waterman), semi-global and overlap alignment. The query runs
down the rows and the reference across the columns. Each cell's score
depends only on its three neighbours: up, left and up-left (diagonal). So
all cells on one anti-diagonal (a *wavefront*) can be scored at the same
time. A *traceback* then walks stored pointers from a start cell back to an
end cell and returns the alignment path.

This RTL implements the hardware organisation described in the DP-HLS
framework paper (Cao et al., "DP-HLS: A High-Level Synthesis Framework for
Accelerating Dynamic Programming Algorithms in Bioinformatics"). In that
framework a C++ template is compiled by an HLS tool into this structure:

* a linear systolic array of `N_PE` processing elements (PEs) per *block*;
* `N_B` blocks per *kernel*, sharing one arbiter;
* `N_K` kernels, each with its own host channel.

Here the same structure is written directly in SystemVerilog for the
linear-gap DNA kernels. The default configuration matches the best
configuration the paper reports for its baseline kernel (#1, global linear):
64 PEs, 16 blocks and 4 channels. That is 4096 PEs working on 64 alignments
of up to 256 x 256 at once.

## The recurrence

For cell (i, j), with query character q[i] and reference character r[j]:

```
ins   = H(i, j-1)   + linear_gap
del   = H(i-1, j)   + linear_gap
match = H(i-1, j-1) + (q[i] == r[j] ? match : mismatch)
H(i,j) = max(ins, match, del)            local kernel: max(.., 0)
```

`match`, `mismatch` and `linear_gap` are runtime inputs. The gap is *added*,
so it is normally negative. The pointer records which term won. Ties are
decided in a fixed order:

1. start with `ins` (TB_LEFT);
2. take `match` (TB_DIAG) only if it is strictly larger;
3. then take `del` (TB_UP) only if it is strictly larger;
4. in the local kernel, a negative result becomes 0 (TB_END).

The pointer needs 2 bits, characters are 2 bits, and scores are 16-bit
signed values that wrap on overflow.

The `KERNEL` parameter (`dphls_pkg::kernel_e`) selects one of four kernels.
They share this datapath and differ only at the edges of the matrix:

| KERNEL | first row / column | traceback starts at | traceback stops at |
|---|---|---|---|
| `K_GLOBAL_LINEAR` | k * gap | (Q, R) | (0, 0); on row 0 it moves left, on column 0 it moves up |
| `K_LOCAL_LINEAR` | 0 | best cell anywhere | a TB_END pointer (a zero cell), or row 0 or column 0 |
| `K_OVERLAP_LINEAR` | 0 | best cell of the last row or last column | row 0 or column 0 |
| `K_SEMIGLOBAL_LINEAR` | 0 | best cell of the last row | row 0; on column 0 it moves up |

"Best" means the highest score. Among equal scores, the first cell in
row-major order wins.

## How one block fills the matrix

```
              preserved row buffer (one score per reference column)
              | up (PE0 reads column wf+1)           ^ last PE writes its row
              v                                      |
 ref_in --> [PE0] --ref,up--> [PE1] --> ... --> [PE N_PE-1]
              |                 |                    |
           TB bank 0        TB bank 1         TB bank N_PE-1   (one write per PE per cycle)
```

The query is cut into *chunks* of `N_PE` rows. PE p owns row
`c*N_PE + p + 1` of chunk c. Its query character sits in a register (the
local query buffer) for the whole chunk.

The reference streams through the array. In wavefront `wf` (one per
cycle), PE p scores column `j = wf - p + 1`. The reference character
reaches PE p through a shift register (the local reference buffer), one
step behind PE p-1. A chunk therefore takes `R + N_PE - 1` cycles. While
the chunk fills and drains, some PEs sit outside the matrix and do
nothing. This idle time is why throughput grows less than linearly with
`N_PE` when the sequences are short.

Each PE keeps two registers, and together they supply all three
neighbours:

* `left_r` is the score it produced in the previous wavefront. It serves
  as the PE's own *left* neighbour. It is also the *up* neighbour of the
  next PE, which scores the same column one wavefront later.
* `diag_r` is the *up* value the PE received one wavefront ago. That value
  is its *diagonal* neighbour now.

PE0 has no PE above it. It takes *up* from the preserved row buffer, which
holds the last row of the previous chunk. The last PE overwrites that
buffer, entry by entry, as it scores the last row of the current chunk.

For column 1, the left and diagonal neighbours come from the initial
column scores. They are loaded into `left_r` / `diag_r` when a chunk
starts. Before chunk 0, the initial row is written into the preserved row
buffer.

A block runs these phases one after another. Nothing overlaps, as in the
HLS framework.

```
INIT   max(Q,R)+1 cycles: write the initial row and column scores
LOAD   1 cycle per chunk: query characters and column-0 boundary into the PEs
WAVE   R+N_PE-1 cycles per chunk
REDUCE log2(N_PE)+1 cycles: choose the traceback start cell
TRACE  path_len+4 cycles: walk the pointers, one move per cycle
```

The total time from `start` to `done` is

```
(max(Q,R) + 3) + ceil(Q/N_PE) * (R + N_PE) + (log2(N_PE) + 1) + (path_len + 5)   cycles.
```

The testbenches check this formula exactly. For a 256 x 256 global
alignment with 64 PEs it comes to about 1840 cycles, or 7.4 us at 250 MHz.
Loading the characters through a channel, one per cycle, takes longer than
that. The paper's measured throughput for kernel #1 works out to about
4560 cycles per batch of 64 alignments. That figure includes the data
movement of the HLS design, which this RTL leaves to the host side.

## Where the pointers go: the banked traceback memory

This is the least obvious part of the design. Every PE must store one
pointer per cycle, so each PE gets its own bank (`dphls_tb_mem`). The
banks are also *address-coalesced*: all PEs of one wavefront write to the
same address, and consecutive wavefronts use consecutive addresses. Cell
(i, j), with `i-1 = c*N_PE + p`, therefore lives at

```
bank    = p
address = c * (R + N_PE - 1) + (j - 1) + p
```

The traceback FSM (`dphls_traceback`) has to invert this mapping. It
computes the chunk base of the start cell once, with a multiply. After
that it only moves by small steps:

| move | effect on the address |
|---|---|
| left (`AL_INS`) | address - 1 |
| up (`AL_DEL`) | p - 1 and address - 1; when p wraps from 0 to N_PE-1, also subtract one chunk stride |
| diagonal (`AL_MMI`) | both of the above |

The memory is read combinationally, so one move takes one cycle.

The path buffer holds the moves in the order they are found: entry 0 is
the move out of the start cell, toward the origin, and an `AL_END` entry
ends the path. Each move is one of:

* `AL_MMI`: match or mismatch, a diagonal step;
* `AL_INS`: a left step, which consumes a reference character;
* `AL_DEL`: an up step, which consumes a query character.

## Choosing the start cell

While filling the matrix, each PE remembers the best cell it has scored
that is allowed to start the traceback (see the kernel table above). For
the global kernel the only such cell is (Q, R). After the last chunk, a
registered binary tree (`dphls_max_reduce`) combines the `N_PE` candidates
in `log2(N_PE)` cycles. It uses the same rule as before: higher score
first, then the earlier cell in row-major order. `N_PE` must be a power of
two.

## Blocks, kernels, channels

`dphls_kernel` puts `N_B` blocks behind one arbiter. The host channel:

* writes characters into a chosen block (`wr_blk`, `wr_sel` 0 = query,
  1 = reference, `wr_addr`, `wr_data`);
* sets a job with its lengths for each block (`job_blk`, `job_qlen`,
  `job_rlen`; a query length of 0 removes the job);
* pulses `start`.

Every block that has a job starts in the same cycle. `busy` stays high
until the slowest block finishes, and then `done` pulses for one cycle.
Writes and job changes are ignored while the kernel is busy. Results are
read through `rd_blk` and `rd_addr`:

* `rd_score`;
* `rd_start_i/j` and `rd_end_i/j`;
* `rd_path_len`;
* `rd_move`, the path entry at `rd_addr`.

All blocks of a kernel share its scoring parameters.

`dphls_top` instantiates `N_K` kernels. Every channel port appears as an
unpacked array indexed by channel. The PCIe/DMA shell, device memory and
host software that would drive these ports are not part of this design.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `KERNEL` | `K_GLOBAL_LINEAR` | alignment kernel (table above) |
| `N_PE` | 64 | PEs per block, a power of two >= 2 |
| `N_B` | 16 | blocks per kernel |
| `N_K` | 4 | kernels (host channels) |
| `MAX_QUERY_LENGTH` | 256 | query buffer size |
| `MAX_REFERENCE_LENGTH` | 256 | reference buffer and preserved row buffer size |
| `dphls_pkg::SCORE_W` | 16 | score width |

The traceback memory of a block has `N_PE` banks, each
`ceil(MAX_Q/N_PE) * (MAX_R + N_PE - 1)` entries of 2 bits deep. That is
1276 entries per bank at the defaults.

## Files

| file | content |
|---|---|
| `rtl/dphls_pkg.sv` | types (`score_t`, `char_t`, pointers, moves, parameters struct, candidate struct), kernel rules |
| `rtl/dphls_pe.sv` | cell recurrence (combinational) |
| `rtl/dphls_init_scores.sv` | initial row/column score generator |
| `rtl/dphls_pe_array.sv` | systolic array with local query/reference buffers, wavefront registers, per-PE best cell |
| `rtl/dphls_row_buffer.sv` | preserved row buffer |
| `rtl/dphls_tb_mem.sv` | banked, address-coalesced traceback memory |
| `rtl/dphls_max_reduce.sv` | best-cell reduction tree |
| `rtl/dphls_traceback.sv` | traceback FSM |
| `rtl/dphls_block.sv` | one alignment block and its sequencer |
| `rtl/dphls_kernel.sv` | `N_B` blocks + arbiter |
| `rtl/dphls_top.sv` | `N_K` kernels |
| `tb/dphls_ref_pkg.sv` | reference model (row-major fill + traceback) used by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_dphls_top_full.sv` | the full default configuration, 64 pairs of 256 x 256 |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends. With
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb -Itb \
    rtl/dphls_pkg.sv tb/dphls_ref_pkg.sv tb/tb_dphls_top.sv --top-module tb_dphls_top
./obj_dir/Vtb_dphls_top
```

Replace `tb_dphls_top` with any other testbench name. The reduced
end-to-end test (`tb_dphls_top`: 2 channels x 4 blocks x 4 PEs) takes
seconds. It counts how often each mechanism happened, and fails if one
never did:

* multi-chunk alignments (the row buffer carrying scores between chunks);
* partial last chunks;
* every traceback move;
* traceback along the matrix border;
* idle blocks;
* channels running concurrently.

`tb_dphls_top_full` builds all 4096 PEs. Compiling it takes a few minutes;
the run itself takes about 10 s. It checks all 64 results and paths
against the reference model.

What is verified: every module is compared against values computed
independently, either the reference model or a scan written directly in
the testbench. The block and kernel cycle counts are checked against the
formula above. Each testbench was also shown to fail against a copy of its
module with a deliberate bug.

What is not verified: timing closure and resource use on an FPGA.

## Departures from the paper and what is missing

* **Only the linear-gap DNA kernels (#1, #3, #6, #7 of the paper's list)
  are implemented.** The framework's other kernels need datapaths that are
  not here:
  * affine and two-piece affine gaps, with 3 or 5 scores per cell and
    multi-state traceback;
  * fixed banding;
  * profile alignment;
  * DTW / sDTW, with complex or integer signals and a min objective;
  * Viterbi;
  * protein alphabets with substitution matrices.
* **One kernel type per device.** The framework can link different kernels
  on different channels; here `KERNEL` applies to every channel.
* **Host-facing protocol.** In the HLS design, blocks read and write
  device-memory buffers through generated interfaces. Here they have a
  simple character-write and result-read port. The arbiter's exact
  behaviour (start all, done when all finish) is a reasonable reading of
  the paper's one-line description, not a copy of it.
* **This design's own choices.** The paper does not state any of these:
  * the 16-bit score width;
  * the numeric pointer and move codes;
  * the tie rule for the best cell;
  * walking along row 0 / column 0 at the end of a global or semi-global
    traceback;
  * the combinational read ports;
  * the exact traceback memory layout and cycle schedule;
  * asynchronous active-low reset.
* **The figure and the listing disagree on the gap sign** (`H - d` versus
  `H + linear_gap`). The listing's form is used: the gap is added and is
  normally negative.
* **Long reads.** The paper's long-read tiling runs on the host and uses
  an affine kernel, so it is not covered.
