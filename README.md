# Cerberus: one ECC encoding shared by link, device and system

HBM and LPDDR put a whole memory channel in a single DRAM device and fetch 32 bytes at a time,
which leaves room for only a small amount of redundancy. Today that redundancy is split among
three ECC layers that know nothing of each other:

* a link code that checks each transfer,
* an on-die code that repairs cell faults inside the DRAM,
* a system code in the processor's memory controller.

Each layer encodes its own check bits. An on-die decoder that miscorrects can also turn an error
the system code could have fixed into one it cannot.

Cerberus encodes each 32-byte block **once**, in the memory controller, into a 288-bit codeword
with 32 check bits. Three decoders then read the same check bits, each for its own purpose
(*encode once, decode many*):

| Decoder | Where | Matrix | Uses | Job |
|---|---|---|---|---|
| 1 | DRAM, write path | H2 (16 x 288) | syndrome bits [15:0] | detect link errors; raise ALERT so the controller resends |
| 2 | DRAM, read path, per bank group | H2 | syndrome bits [15:0] | single-error correction, double-error detection; miscorrections stay inside one 16-bit symbol |
| 3 | memory controller | H_S-ECC (32 x 288) | all 32 bits | correct one bad 16-bit symbol **or** two bad bits in different symbols; otherwise retry once, then report a DUE |

The overhead is 12.5 % for storage and for transfer (32 check bits per 256 data bits). H2 is
exactly the first 16 rows of H_S-ECC. So a codeword valid for the system code is also valid for
the device and link code, and the DRAM never re-encodes anything.

This RTL follows that architecture. The whole channel is modelled: controller, the 288-bit
links in both directions, and one DRAM bank. Fault-injection inputs sit at the three places where
errors arise: the write link, the cells, and the read path.

## Codeword and symbols

```
bit  287 ........ 272 271 ........ 256 255 ................................ 0
    |      R2 (16)   |     R1 (16)    |              D (256 data)            |
     symbol 17        symbol 16        symbols 15 .. 0 (16 bits each)
```

A *symbol*, also called a *bounded region*, is 16 adjacent codeword bits. A syndrome, like every
column of H_S-ECC, is stored as `{lower 16 rows, H2 rows}`. So `syn[15:0]` is always the H2
syndrome, the only part the DRAM decoders compute.

## The code (`rtl/cerberus_pkg.sv`)

This is the hardest part of the design, and it is where the RTL adds the most of its own. The
paper states the rules the two matrices must meet and how they were searched for. It does not
print the matrices. The rules are:

* **H2:** all columns non-zero, distinct and of odd weight (SEC-DED).
* **H2, bounded fault:** a sum of columns inside one region never equals a column of another
  region.
* **H2, CRC8-like:** any 8 consecutive columns are linearly independent.
* **H2, shared masks:** in every region, columns 8..15 are XOR combinations of columns 0..7.
* **H_S-ECC:** every single-symbol error and every two-bit error across two symbols has its own
  syndrome (SSC+DEC).
* **H_S-ECC:** H2 forms its upper half, which is what lets the layers share one encoding.

The matrices used here come from an algebraic construction in GF(2^16), with
p(x) = x^16 + x^12 + x^3 + x + 1. F = GF(2^8) is its subfield.

* **H2, region `a`, column `b`:** `GAMMA[a] * PSI[b]`.
  * `PSI[0..7]` is a basis of F.
  * `PSI[8..15]` are XOR combinations of it. They use the same odd-size masks `MASK` in every
    region.
  * The 18 `GAMMA` values lie on 18 different lines `GAMMA*F`. Each region therefore spans its
    own 8-dimensional subspace, and any two of these subspaces meet only at zero. This gives the
    bounded-fault rule and the CRC8 rule across region borders for free.
  * Each `GAMMA` was chosen within its line so that all 16 columns have odd weight.
* **Lower 16 rows, symbol `a`, column `b`:** `ALPHA_J[a] * BETA[b]`, a multiplication by a field
  element.
  * `BETA` is a basis whose elements differ from `PSI` by multiples of alpha * F.
  * The `ALPHA_J` differ pairwise by factors outside F\*. This makes every symbol-error syndrome
    unique (SSC).
  * The exact `ALPHA_J` values come from a greedy search that removed every clash between
    double-bit syndromes and symbol syndromes (DEC and SSC+DEC).

The package builds all 288 columns (`HS`) during elaboration. It also builds the inverse of the
redundancy columns (`RED_INV`, used by the encoder) and, for each symbol, the inverse of its lower
block (`LOW_INV`, used by Decoder 3). The testbenches compare everything against a fixed list of
the 288 reference columns (`tb/cerberus_tb_pkg.sv`).

**One departure from the paper's wording.** The paper describes encoding as two steps: G1
appends R1, then G2 appends R2. With rank-8 regions, however, the 16 R2 columns alone cannot
serve as independent check columns of H2. The encoder therefore solves for R1 and R2 together,
so that `H_S-ECC * c = 0`. This is the paper's own "composite matrix in one step" implementation,
and it implies `H2 * c = 0`. The figures draw each H2 region as a single field element alpha^i.
Here only the lower rows are field multiplications; the H2 regions are rank-8 maps, as the text's
construction requires.

## Blocks

| File | Block |
|---|---|
| `cerberus_encoder.sv` | The shared encoder: 32 XOR trees over the 256 data bits (`PAR[i]` = contribution of data bit i). Combinational. |
| `cerberus_link_dec.sv` | Decoder 1: H2 syndrome, `alert_o = |syn`. Never corrects. |
| `cerberus_ondie_dec.sv` | Decoder 2: H2 syndrome compared with all 288 columns. A match flips that bit; otherwise the word passes unchanged and `ue_o` is set. |
| `cerberus_ssc_corr.sv` | SSC corrector. For every symbol a, in parallel, the only candidate pattern is `e = LOW_INV[a] * s_low`; it is accepted when H2's columns of a reproduce `s_up`. |
| `cerberus_dec_corr.sv` | DEC corrector. Bit i is flagged when `s ^ h_i` equals one column of another symbol. Both bits of a true double error flag themselves, so exactly two flags mean a correction. |
| `cerberus_sys_dec.sv` | Decoder 3: 32-bit syndrome, SSC and DEC correctors side by side, a decision stage, and one output register. |
| `cerberus_cells.sv` | Cell array of 288-bit words with a one-cycle read; `fault_i` XORs an in-bank fault into read data. |
| `cerberus_dram_bank.sv` | DRAM side: Decoder 1 on writes (a write that raises ALERT is dropped), the cells, and Decoder 2 on reads. |
| `cerberus_host_ctrl.sv` | Controller side: the encoder, Decoder 3 and the retry rules (FSM). |
| `cerberus_top.sv` | Controller and DRAM bank joined by 288-bit write and read paths, with fault masks on both links and on the cells. |

The SSC and DEC correctors compute the same function the paper asks for, by a different method.
The paper's decoder uses Berlekamp-Massey with a Chien search, plus a block-pair solver. The
circuits here are simple exhaustive trials, correct for this code but larger. In particular, the
DEC trial has 288 x 17 small tests.

## Operation and timing

Times are counted in clock cycles from the edge at which the controller accepts the request
(`req_valid_i && req_ready_o`). The controller handles one request at a time.

**Write** (answer after 3 cycles when the link is clean):

1. The encoder builds the codeword, which is registered.
2. `wr_valid` carries it across the write link, where `wr_link_fault_i` is XORed in.
3. Decoder 1 checks it in the same cycle. If clean, the word is written to the cells.
4. One cycle later the DRAM answers `wr_ack` with `alert`.
5. On ALERT the controller resends the same codeword, up to `WR_RETRY_MAX` times (default 1).
   If ALERT is still present after that, it answers `resp_wr_fail_o`.

**Read** (answer after 5 cycles when nothing goes wrong):

1. Read command.
2. The cell array reads the word, with `cell_fault_i` XORed in.
3. Decoder 2 corrects it, and the result is registered. The DRAM's `dev_ce_o`/`dev_ue_o` stay
   inside the device; the host never sees them.
4. The word crosses the read link, where `rd_link_fault_i` is XORed in.
5. Decoder 3 decodes it (one registered cycle).
6. The controller responds. If Decoder 3 reported an uncorrectable error, the read is issued
   exactly once more. If the retry decodes, its data are returned with `resp_retried_o`;
   otherwise `resp_due_o` is set.

Only the clean-access latencies (3 and 5 cycles) are fixed above. The paper does not specify any
of these cycle counts. The one-cycle latency of Decoder 3 follows the paper's statement that
detection and correction each fit in a single cycle. The cycle counts in the DRAM are this
design's own.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| `K`, `N`, `SYM_W`, `NSYM` | 256, 288, 16, 18 | paper |
| `R_LINK`, `R_SYS` | 16, 32 | paper |
| `DEPTH` (codewords stored in the modelled bank) | 64 | own choice; the paper has no depth |
| `WR_RETRY_MAX` | 1 | own choice; the paper says only that the controller retransmits |

The code widths are fixed by the matrices in the package. Changing them means building a new code
with the same rules.

## What was checked

Each block has a self-checking testbench in `tb/`; `tb_cerberus_top` runs the whole channel at its
default parameters. All of them were compiled and run with Verilator and pass. They check:

* **Encoder** (`tb_cerberus_encoder`): the 32-bit syndrome of every codeword is zero against the
  reference columns, and encoding is linear.
* **Decoder 1** (`tb_cerberus_link_dec`): every single-bit, double-bit, odd-weight and 8-bit burst
  error raises ALERT.
* **Decoder 2** (`tb_cerberus_ondie_dec`): every single-bit error is corrected, every double error
  is flagged and left alone, and a random multi-bit error inside one symbol never changes any bit
  outside that symbol (bounded fault).
* **Decoder 3** (`tb_cerberus_ssc_corr`, `tb_cerberus_dec_corr`, `tb_cerberus_sys_dec`):
  * any 16-bit symbol error is corrected;
  * any two bit errors in two symbols are corrected;
  * the result appears exactly one cycle after the input;
  * errors across two symbols are never reported as clean.
* **Top** (`tb_cerberus_top`), fault scenarios of the paper's evaluation, counted one by one:
  * write retransmission;
  * write failure;
  * on-die single-error correction that the host does not see;
  * in-bank 16-bit error corrected by SSC;
  * in-bank single error plus out-of-bank double error, corrected by Decoders 2 and 3;
  * a transient wide read error recovered by the retry;
  * a persistent one reported as DUE.

* **Read-path error scenarios** (`tb_cerberus_err_scenarios`): random errors are placed before
  the on-die decoder (in-bank) and after it (out-of-bank). Each region bit flips with
  probability 1/2.
  * Every trial must be corrected for these scenarios: in-bank SE, 16E and SE+SE; out-of-bank
    SE, DE and 16E; in-bank SE with out-of-bank SE; in-bank SE with out-of-bank DE.
  * In-bank 32E (two adjacent regions) is beyond the guarantee. Its outcomes are counted and
    printed. Silent corruption must stay within 5 %. In the runs so far every 32E trial was
    detected.

To simulate a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/cerberus_pkg.sv tb/cerberus_tb_pkg.sv tb/tb_cerberus_top.sv --top-module tb_cerberus_top
./obj_dir/Vtb_cerberus_top
```

## Limits and differences from the paper

* **Matrices.** The numbers in `cerberus_pkg` are this design's own (see above). The reliability
  percentages the paper reports for its matrices (e.g. 99.97 % detection of 32-bit errors) were
  not reproduced for these matrices. Only the guaranteed properties are tested.
* **Decoder 3 circuits.** SSC and DEC use exhaustive parallel trials, not Berlekamp-Massey/Chien
  and a block-pair solver. The paper's area figures (about 124k NAND2 for Decoder 3) do not apply.
* **What is not modelled.** The physical HBM channel (I/O, TSVs, DQ/DQS signalling and burst
  order) is not modelled. For that reason the paper's pin-shaped errors (whole-DQ and whole-DQS
  errors) cannot be placed onto codeword bits here. The GPU and its request scheduling are not
  modelled either.
* **Cells.** The cell array is a small register-array model of one bank.
* **Device-internal flags.** On an uncorrectable on-die syndrome the data pass unchanged, and
  the on-die flags are not sent to the host.
* **Not built.** The paper's 40-bit variant (15.6 % redundancy) is an alternative configuration
  and is not built.
