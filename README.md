# ACPC-protected configuration memory: RTL of an error-correcting ICAP block

SRAM-based FPGAs keep their configuration in SRAM cells that radiation can flip.
An upset there changes the circuit itself, so it stays until the device is
configured again. This design protects the configuration of a partially
reconfigurable region with a simple two-dimensional parity code, the
*adaptive cross parity check* (ACPC) code. The protected region holds only
data. The check bits are kept in the static part of the design, which is
assumed to be free of upsets. A controller placed in front of the configuration
port reads the region back at intervals, corrects what the code can correct
and writes back only the partitions that held faults. When there are more
errors than the code can correct, it asks the system processor to download
that partition again.

The code needs only XOR trees and a small sequential search, with no
Galois-field arithmetic. Its decoder is iterative and *adaptive*: a bit
corrected along one diagonal can make a second error visible along another.

## 1. The code

### Geometry

One code block covers a window of configuration memory 14 rows high and 17 bits
wide. It is split into two matrices, M1 and M2, of 9 rows each:

| row | content |
|-----|---------|
| 0   | cross (diagonal) parity bits |
| 1–7 | data (7 × 17 bits) |
| 8   | vertical (column) parity bits |

The drawing of the code stacks M1 rows 1..7 on top of M2 rows 7..1, so M1 row 7
and M2 row 7 are neighbours. A diagonal drawn through this stack runs through
both matrices. Each matrix row is extended on the right by `EXT = 7`
zero columns, so a stored row is `W = 24` bits wide. The extension lets the
diagonals that start in the right-hand part of the window end inside the
stored area. Seven is the smallest width for which every data bit lies on at
least one diagonal. (The published drawing shows six; with six, bit
(row 7, column 16) of each matrix lies on no diagonal.)

### Encoding

With bits outside columns 0..W-1 counted as 0, and `m` running over 0..W-1:

```
M1(0)(m) = XOR_{t=1..7} M1(t)(m-t)  ^  XOR_{t=0..7} M2(t)(m+t-15)    positive slope
M2(0)(m) = XOR_{t=1..7} M2(t)(m-t)  ^  XOR_{t=0..7} M1(t)(m+t-15)    negative slope
Mx(8)(m) = XOR_{t=0..7} Mx(t)(m)                                     vertical, x = 1, 2
```

The `t = 0` term of the second sum is the other matrix's cross parity bit 15
columns further left. So the two cross parity rows depend on each other.
`acpc_pkg::encode` computes them together, from column 0 upwards, which
resolves the dependency. The vertical parity covers rows 0..7, including the
cross parity row.

### Syndromes

From a read-back block, `acpc_syndrome` forms four 24-bit vectors in parallel:

* `xd_pos[m]`: parity of positive-slope diagonal m together with `M1(0)(m)`;
* `xd_neg[m]`: the same for negative-slope diagonal m and `M2(0)(m)`;
* `xv_m1[c]`, `xv_m2[c]`: parity of rows 0..8 of column c.

A bit at (matrix a, row t ≤ 7, column c) lies on its own matrix's diagonal
`c+t` and on the other matrix's diagonal `c−t+15`, and in column c of its own
matrix. A single upset therefore sets up to two diagonal bits and exactly one
vertical bit.

### Iterative decoding (`acpc_decoder`)

The block is loaded into a register, and the syndromes are recomputed from
that register every cycle. The decoder then runs a search loop:

1. **Diagonal walk** (`dia_syn` = 1). A pointer steps through the
   positive-slope diagonals 0..23, one per cycle, and then through the
   negative-slope ones. It stops at the first diagonal with a non-zero syndrome.
2. **Column walk** (`syn_nonzero` = 1, `varticle_syn` = 0). A column pointer
   starts at column 0. At each column the faulty diagonal crosses at most two
   bits: one in its own matrix at row `d−c`, and one in the other matrix at row
   `c−d+15`. The walk stops at the first crossing whose matrix has a non-zero
   vertical syndrome in that column.
3. **Detect, then correct.** `error_detect` is high for one cycle while the
   position is on `fix_*`. Then `error_correct` is high for one cycle while the
   bit is inverted. The walk then re-examines the same diagonal, because a
   diagonal may hold an odd number of errors greater than one.
4. If no column explains a diagonal, that diagonal is skipped.
5. After both slopes, a new pass starts if the last pass corrected anything.
   This is the adaptive step. Two errors on one negative diagonal cancel in
   that diagonal's syndrome. Once the positive-slope walk has fixed one of
   them, the other becomes visible.

Every correction clears one vertical-syndrome bit, so the loop always ends.
When it does, `decode_done` rises. `uncorrectable` is set if any syndrome is
still non-zero.

Timing: one cycle per diagonal or column examined, and two per correction. A
clean block takes `2·W + 1 = 49` cycles from the rising edge of `decode_start`
to `decode_done`. One single error typically takes 60–80 cycles.

What the code corrects, as exercised by the tests:

* any single error in rows 0..7;
* two errors in one column when one is in M1 and the other in M2;
* an odd number of errors on one diagonal;
* the shared-diagonal pair described in step 5.

Two errors in the same column of the same matrix leave that column's vertical
syndrome at zero. They cannot be located, and the block is flagged
uncorrectable. Errors in row 8 alone lie on no diagonal; they are also only
flagged. In the full system this row is never stored in configuration memory,
so it cannot be upset.

## 2. The error-correcting ICAP block (`acpc_icap_top`)

```
 master  ──icap_start, bit_length, pr_index, rows──▶ slave_interface ──▶ acpc_ctrl ──▶ TX FIFO ─┐
 (CPU)   ◀─icap_done, redownload_req/pr────────────                       ▲   │                  ├─ hwicap ──▶ configuration port
                                                                          │   └──── RX FIFO ◀────┘
                                      acpc_encoder, acpc_decoder (+acpc_syndrome), acpc_fix_history
```

* **slave_interface.** The master names a first partition and a bit length and
  pulses `icap_start`, then streams the partial bit file as 17-bit rows
  (valid/ready). The interface counts the bits received and marks the last row
  for the controller. When the file has been written, it pulses `icap_done`.
  It also holds the controller's re-download requests (`redownload_req`,
  `redownload_pr`) until the master starts the next transfer.
* **acpc_ctrl**, the ACPC block. It runs both phases:
  * *Configuration phase.* Every 14 rows form a block: M1 rows 1..7, then M2
    rows 1..7. A short last block is padded with zero rows. The controller
    encodes the block and stores its four check rows (96 bits) in a register
    file. It then writes the 14 data rows to configuration memory at
    `block·14 + row`.
  * *Run phase.* A scrub pass starts every `SCRUB_INTERVAL` idle cycles while
    `scrub_en` is high, or at once on `scrub_now`. The pass visits every
    configured partition and reads it back block by block. Each block is joined
    with its stored check rows. Any logged earlier corrections are forced into
    it, and then it is decoded. At the end of each partition:
    * if a block was uncorrectable, the controller asks for a re-download;
    * otherwise, if anything was corrected, it writes the corrected partition
      back;
    * otherwise it writes nothing.

    `fault_map` shows which partitions were faulty in the last pass.
    `corr_count` counts decoder corrections, and `hist_count` counts blocks
    repaired from the history.
* **acpc_fix_history.** A small table (8 entries) of (block, position,
  corrected value). A bit that was upset once is likely to be upset again.
  Forcing the known good value before decoding leaves the code's full capacity
  for new errors. An entry for the same position is updated in place;
  otherwise the oldest entry is replaced. All entries of a block are dropped
  when the block is configured again.
* **hwicap** with two **acpc_fifo** buffers (16 deep). They decouple the
  controller from the single configuration port. Queued writes are served
  before reads. Reads pause when the RX FIFO has no room.

### Configuration port

The ICAP primitive and the configuration memory are outside the RTL. The port
is row-addressed:

* `icap_csib = 0` selects the port;
* `icap_rdwrb = 1` reads and `0` writes the 17-bit row at `icap_addr`;
* read data appear on `icap_o` one cycle after the read strobe.

An adapter to a vendor's packet-based configuration port would sit behind this
interface.

### Status signals

The top exports these signals:

* encoder: `enc_start`, `par_check_start`, `enc_done`;
* decoder: `decode_start`, `dia_syn`, `syn_nonzero`, `varticle_syn`,
  `error_detect`, `error_correct`, `decode_done`.

They follow the published timing diagram in kind and order. `enc_done` is low
while encoding. `varticle_syn` is low during the column walk. `decode_start`
is a level that stays high until `decode_done`. The exact cycle counts are
this implementation's own:

* encoding takes 2 cycles (`enc_start` → `par_check_start` → `enc_done`);
* decoding is timed as in section 1.

## 3. Parameters

| where | name | default | meaning |
|-------|------|---------|---------|
| acpc_pkg | `ROWS`, `COLS` | 9, 17 | matrix size, from the published code |
| acpc_pkg | `EXT` | 7 | zero columns added on the right (own choice, see §1) |
| acpc_icap_top | `N_PR` | 4 | partitions of the protected region |
| acpc_icap_top | `BLK_PER_PR` | 2 | code blocks per partition |
| acpc_icap_top | `SCRUB_INTERVAL` | 1000 | idle cycles between scrub passes |
| acpc_icap_top | `HIST_DEPTH` | 8 | entries of the correction history |
| acpc_icap_top | `FIFO_DEPTH` | 16 | TX/RX FIFO depth |

The geometry constants are package constants, because the decoder's pointer
widths (5 bits) and the offset 15 are tied to them. Only the 9 × 17 matrix pair
has been verified. The region size scales with `N_PR × BLK_PER_PR × 14` rows.

## 4. Where this RTL departs from, or adds to, the published design

* **Matrix layout.** The 18 × 17 window is read as M1 over an upside-down M2
  (the "interleaving" of rows). Rows 1..7 of each matrix are data.
* **Extension columns.** There are 7 extension columns instead of the 6 drawn
  (see §1).
* **Diagonal walk.** The published steps start from fixed pointer positions
  and accumulate each diagonal bit by bit. Here all syndromes are computed in
  parallel, and the walk simply scans the diagonals in order.
* **Write-back timing.** Faulty partitions are written back as soon as each one
  has been scanned, not after the whole region has been scanned.
* **Unspecified details.** The following are not specified in the publication
  and were chosen here:
  * the configuration-port protocol and the row-wide (17-bit) data path;
  * the partition index on the slave interface and the form of the
    re-download request;
  * the FIFO depths;
  * the size and replacement rule of the history;
  * the `uncorrectable` criterion;
  * `scrub_now`.
* **Outside the RTL.** The master processor, the bus adapter between master
  and slave interface (AXI/PLB/FSL), the secondary memory holding the bit
  files, the ICAP primitive and the configuration memory are not part of the
  RTL. The configuration memory is modelled in `tb/cfg_mem_model.sv` for
  simulation.

## 5. Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_acpc_ref_pkg` is an independent reference encoder. It *scatters* each
  data bit into the diagonals through it, instead of gathering each diagonal
  as the RTL does.
* `tb_acpc_encoder` compares 200+ random blocks and hand-computed single-bit
  cases with the reference, and checks the 2-cycle handshake.
* `tb_acpc_syndrome` checks that a single flipped bit sets exactly the
  predicted diagonal and column bits.
* `tb_acpc_decoder` checks:
  * clean-block latency (49 cycles);
  * single errors over all rows and many columns;
  * column pairs across the halves;
  * the shared-diagonal pair;
  * three errors on one diagonal;
  * detection of a four-error pattern it cannot correct.
* `tb_acpc_fix_history`, `tb_acpc_fifo`, `tb_hwicap` and `tb_slave_interface`
  test the support blocks against models kept inside each testbench.
* `tb_acpc_ctrl` runs the ACPC block at reduced size, with the HWICAP buffers
  and the memory model attached.
* `tb_acpc_icap_top` runs the whole block at its default parameters, with a
  master model and the configuration-memory model. It configures the region,
  then injects upsets. It checks a clean pass, correction with write-back of
  only the faulty partitions, a repair from the history, a re-download for an
  uncorrectable partition, and a timer-started pass. Each of these mechanisms
  must occur at least once. The test takes a few thousand cycles.

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/acpc_pkg.sv tb/tb_acpc_ref_pkg.sv tb/tb_acpc_icap_top.sv \
    --top-module tb_acpc_icap_top
./obj_dir/Vtb_acpc_icap_top
```

Replace the testbench name to run another test. `tb_acpc_ref_pkg.sv` is only
needed by the encoder, syndrome, decoder and controller tests, but listing it
does no harm.

### Limits of trust

The code's correction behaviour has been tested only for the patterns listed
above. For other multi-error patterns the decoder can invert a wrong bit. A
diagonal may cross a column whose vertical syndrome was set by a different
error. In that case the block may even end with zero syndromes while holding
wrong data. This is a property of the code, not of the implementation.

Nothing has been run on an FPGA, and the configuration-port model is generic.
