# A CAM-based accelerator for sparse matrix × sparse vector multiplication

This is synthesizable SystemVerilog for the SpMSpV accelerator described by
L. Yavits and R. Ginosar in "Sparse Matrix Multiplication on CAM Based
Accelerator". It computes C = A·B. A is a sparse matrix, B is a sparse vector,
and all three (A, B and the result C) are held in compressed sparse row (CSR)
form. The RTL implements the architecture as published. The interfaces, timing
and number-format details were not published, so this implementation chose
them; each choice is listed below.

## The problem and the idea

In sparse matrix × dense vector multiplication, the column index of an element
of A is simply an address into the vector. When B is sparse too, that shortcut
is gone. B holds only (index, value) pairs, so each column index of A has to be
matched against the row indices present in B.

The accelerator matches indices with a content-addressable memory (CAM):

* Each nonzero of B is written into one row of a CAM (its index) and into the
  same row of a juxtaposed RAM (its value).
* To find the partner of an element A[j][i], the index i is put into the CAM's
  INDEX register and compared with every row at once.
* The matching row's match line is wired straight to the RAM as its word line,
  so the RAM delivers B[i]. If B has no element i, no word line rises and the
  RAM reads 0.
* A floating-point multiplier forms A[j][i]·B[i].

One CAM + RAM + multiplier is an **acceleration module**. K modules run side by
side, each with its own full copy of B. Each cycle they take K nonzeros of one
row of A. An accumulator **ACC** adds the K products and its register **REG**
in a single step. After ceil(nzr_j / K) groups (nzr_j being the number of
nonzeros in row j), C_j is complete. It is written out with its index j if it
is nonzero.

Peak rate per cycle: K·H index comparisons (H being the number of CAM rows)
and 2K floating-point operations.

## Default configuration

| parameter | default | meaning | origin |
|---|---|---|---|
| `K`  | 15  | acceleration modules | evaluated configuration |
| `H`  | 512 | CAM/RAM rows = largest B held at once | evaluated configuration |
| `IW` | 32  | index width w (CAM word, row number) | stated as w = 32 |
| value | 32 | IEEE-754 single precision | stated as 32-bit floating point |
| `AW` | 32  | memory element-address width | own choice |
| `LW` | 32  | width of a row's nonzero count | own choice |

The publication also discusses a design point with H = 2^20 rows, for area and
memory-bandwidth estimates. Its evaluation uses H = 512, because the largest
vector in its test set has 390 nonzeros. 512 is the default here.

## Pipeline and timing

Each algorithm step takes one clock cycle, and a new group of K elements can
enter every cycle:

| cycle | step | where |
|---|---|---|
| t   | read request for the next group (address, count ≤ K) | `spmspv_ctrl` |
| t+1 | memory returns up to K (index, value) pairs; INDEX registers load | memory, `cam_array` |
| t+2 | CAM compare; match lines latched | `cam_array` |
| t+3 | RAM read of the B values (0 where no match) | `ram_array` |
| t+4 | K multiplications | `fp32_mul` in `accel_module` |
| t+5 | ACC adds the K products and REG; REG is updated; C_j leaves on `c_valid` | `fp_accumulator` |

The group control bits (first group, last group, row number) travel beside the
modules in a four-stage shift register in `spmspv_accel`, so they reach ACC
together with the products.

REG is "reset" at the start of a row by reading it as +0 for the row's first
group. That costs no cycle, so rows follow each other without bubbles. A row
therefore costs ceil(nzr_j / K) cycles, and an empty row costs one cycle. The
end-to-end test measured 426 cycles for 419 such slots over 200 rows. The 7
extra cycles are the first descriptor load and the pipeline drain.

## Operating the accelerator

Commands are accepted on `cmd_valid` while `cmd_ready` (idle) is high. `done`
pulses when a command has finished.

**INIT (`cmd = 1`)** loads vector B:

* It first clears every CAM row's valid flag, so entries from an earlier vector
  cannot match.
* It then reads `b_nnz` (index, value) pairs from element addresses `b_base`,
  `b_base+1`, … at one per cycle, on lane 0 of the memory port.
* It writes pair n into row n of every module.
* `b_nnz` is capped at H.

**MAIN (`cmd = 2`)** processes the rows of A:

* Rows arrive as a valid/ready stream of CSR row descriptors: `rd_row` (j),
  `rd_ptr` (element address of the row's first nonzero), `rd_nzr` (nzr_j), and
  `rd_last` (marks the matrix's last row).
* The controller reads each row in groups of up to K consecutive elements, one
  group per cycle, and masks the unused lanes of the last group.
* Rows with no nonzeros are skipped.
* After the last row it waits for the pipeline to drain and pulses `done`.

**Memory port.** The memory is not part of the design; its ports are brought
out. A read issued with `mem_rd_en`, `mem_rd_addr` and `mem_rd_cnt` in cycle t
must return its elements in `mem_rd_idx[0..K-1]` and `mem_rd_val[0..K-1]` in
cycle t+1. The memory is assumed always ready, with K elements of bandwidth at
any address. A real memory system that cannot meet this would need a stall
path, which is not built.

**Result stream.** The result leaves as (`c_row`, `c_val`) pairs on `c_valid`,
in row order, one per cycle at most. A row whose sum is ±0 is not written, and
`zero_drop` pulses instead. `lane_hit[m]` pulses when module m found a B
partner for its element.

**Vectors longer than H.** The publication notes that a larger vector can be
processed in H-sized intervals. Load one interval with INIT, run MAIN over A,
and repeat for each interval. The host adds the partial C values of equal row
numbers. The end-to-end test does this with a 700-element B in two intervals.

**Dense operands.** A dense vector B is simply a B with every element stored,
up to H of them per interval. The hardware is the same, but the area spent on
index matching is then wasted.

**Sparse × sparse matrix.** Multiplying two sparse matrices is the same
procedure run once per column of the right-hand matrix, which takes the place
of B.

## Floating-point arithmetic

Both units handle IEEE-754 binary32 values and are combinational:

* **Rounding:** round to nearest, ties to even.
* **Subnormals:** subnormal inputs are read as zero, and results below the
  normal range are flushed to a signed zero.
* **Overflow:** gives infinity.
* **NaN:** a NaN input, or an invalid operation (0·∞, ∞−∞), gives the quiet NaN
  `7FC00000`.

The ACC is a balanced tree of `fp32_add` units. REG sits at leaf 0 and product
m at leaf m+1; with K = 15 that makes 16 leaves and 4 levels. Floating-point
addition is not associative, so a result can differ in the last bits from a
serial sum in another order. The publication gives neither the adder structure
nor the order of additions.

## Files

| file | contents |
|---|---|
| `rtl/spmspv_pkg.sv` | defaults, binary32 field struct, command and state enums |
| `rtl/cam_array.sv` | CAM rows + valid flags, INDEX register, parallel compare, latched match lines |
| `rtl/ram_array.sv` | value rows, word lines from the CAM, OR of the selected words (0 when none), read register |
| `rtl/fp32_mul.sv`, `rtl/fp32_add.sv` | binary32 multiplier and adder |
| `rtl/accel_module.sv` | CAM + RAM + multiplier, with the A value pipelined alongside |
| `rtl/fp_accumulator.sv` | ACC adder tree and REG, first/last handling, zero suppression |
| `rtl/spmspv_ctrl.sv` | INIT and MAIN sequencing, memory read requests, group control |
| `rtl/spmspv_accel.sv` | top level: controller, K modules, group control pipeline, ACC |
| `tb/*_tb.sv` | one self-checking testbench per module; `tb/fp_ref_pkg.sv` is a bit-level binary32 reference |

The CAM and RAM rows are written as flip-flop arrays. Every CAM row is compared
in every cycle, and every RAM row can drive the bit lines.

## What is modelled and what is not

The publication's main implementation is resistive:

* Each ReCAM bit is a pair of diode-gated memristors (bit and complementary
  bit), and each ReRAM bit is a single memristor.
* The match lines are precharged, and a sense amplifier decides whether each
  one stayed high.
* A CMOS variant differs only in its cells.

These are analog circuits. The RTL models what they do at array level:

* a row matches when all its bits equal the key;
* a compare can leave columns out through a per-search mask, as the ReCAM
  allows; the accelerator always compares the full index;
* the sensed match line is a register;
* the RAM sense amplifiers are the read register.

Also not built:

* A parallel mode for diagonal matrices. It is mentioned only in passing, with
  no mechanism described.
* The external memory, including the conversion of the CSR row-pointer array
  into row descriptors.
* Any back-pressure on the memory or result interfaces.

Choices made where the publication is silent:

* the row-valid flags and the clear on INIT;
* one B element loaded per cycle;
* the one-cycle memory latency;
* the descriptor interface;
* asynchronous active-low reset (array contents are not reset, valid flags
  are);
* the floating-point details above.

## Verification

Every module has a testbench that checks its outputs against an independently
computed reference and prints `TB_RESULT checks=N failures=M`:

* **FP units:** thousands of random operands plus corner cases, against a
  double-precision reference rounded once to binary32. That reference gives the
  correctly rounded result for + and ×.
* **CAM:** one-hot match at the right row, no match for absent keys,
  back-to-back searches, masked compare, clear, the two-cycle latency, and
  the publication's 4-bit compare example (rows 0110 and 0101, key 0110).
* **RAM:** selected word, 0 with no word line, back-to-back reads.
* **Acceleration module:** the worked example from the publication, then 2000
  random elements mixing hits, misses and bubbles, and the four-cycle latency.
* **Accumulator:** 300 rows of 1–5 groups against a tree-ordered reference,
  including cancelling rows that must not be stored.
* **Controller:** every memory read and every group-control bit against groups
  derived from random descriptors, plus the per-row cycle cost.
* **Top (`spmspv_accel_tb`), at the default parameters:**
  * the worked example: a row with (4,56) (10,16) (12,78) (20,12) against B
    holding 98, 40 and 32 at indices 4, 10 and 12, which gives C_j = 8624;
  * a 390-element B with a random 200-row A;
  * a 700-element B in two intervals;
  * re-initialization with a short B.

  It counts multi-group rows, partial and full groups, empty rows, lanes
  without a match, dropped zero rows, intervals and re-initializations, and
  fails if any of these never occurred. Values are small integers, so every sum
  is exact.

A separate workload test (`spmspv_workload_tb`, default parameters) runs the
smallest matrix size of the publication's evaluation: A with 100,000 nonzeros
in about 5,000 rows of 0–40 nonzeros, and B with 390 nonzeros. Every C_j is
checked. The main stage took 9,366 cycles for 9,359 group slots, about 21
FLOPs per cycle against the peak of 2K = 30. The shortfall comes from row
lengths that are not multiples of K, the same cause the publication gives for
the spread in its measured performance.

To run a testbench with Verilator (5.x) from the directory holding `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/spmspv_pkg.sv tb/fp_ref_pkg.sv tb/spmspv_accel_tb.sv \
  --top-module spmspv_accel_tb
./obj_dir/Vspmspv_accel_tb
```

Replace the testbench name to run another. The full-size end-to-end test builds
in a few seconds and runs in well under a second.

## Sizes against the evaluated workloads

* **Evaluation set:** rows taken from sparse matrices of 10^5–8·10^6 nonzeros,
  used as B, with at most 390 nonzeros. That fits in one pass of H = 512. A is
  streamed, so its size is bounded only by the 32-bit address and index fields.
* **H = 2^20 design point:** a B of up to 2^20 nonzeros needs
  ceil(nnz_B / 512) passes over A with the default H. H is a parameter, but at
  2^20 rows × 15 modules the flip-flop arrays are far beyond what a simulator
  or synthesis run handles.
