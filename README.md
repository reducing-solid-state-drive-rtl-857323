# Pipelined and adaptive read-retry for a NAND flash SSD controller

When an SSD reads a page from modern 3D NAND flash, the raw bit error rate is
often too high for the ECC decoder, mostly in blocks that have seen many
program/erase (P/E) cycles or that have held their data for months. The
controller then runs a **read-retry** operation: it reads the same page again
and again, each time with another set of read-reference voltages from the
vendor's list, until ECC succeeds or the list runs out. In worn or aged blocks
a single host read can need 10 to 25 such retry steps. A regular read-retry
step is fully serial. First the die senses the page (tR), then the page is
transferred to the controller (tDMA), then it is decoded (tECC). Only after a
failed decode does the next step start:

    tRETRY(regular) = N_RR x (tR + tDMA + tECC)

This RTL implements two controller-side changes to that loop. They need
nothing new in the flash die, only commands it already has.

* **PR² – pipelined read-retry.** It overlaps the steps. As soon as the die
  has finished sensing step *i*, the controller issues CACHE READ for step
  *i+1*. The die moves step *i*'s data to its cache register and starts
  sensing step *i+1*, while step *i* is transferred and decoded. Transfer and
  decoding drop off the critical path, except for the last step:

      tRETRY(PR²) = N_RR x tR + tDMA + tECC

  The price is one speculative sensing after the step that succeeds. The
  controller kills it with RESET (about 5 µs) as soon as ECC succeeds.

* **AR² – adaptive read-retry.** It shortens every sensing. By the final,
  successful retry step the voltages are close to optimal. The error count is
  then far below what the ECC can correct. That margin can be spent on a
  shorter bit-line precharge time (tPRE), which makes tR shorter. In the
  earlier steps, ECC fails whatever the tPRE. How much tPRE can safely be cut
  depends on the block's wear and on the age of its data. The cut is
  profiled offline per die and stored in a small **read-timing parameter
  table (RPT)**. On a read failure the controller does four things:
  1. it looks up the tPRE for the block's (P/E cycles, retention age);
  2. it sets that tPRE in the die with one SET FEATURE;
  3. it runs all the retry steps;
  4. it sets the default tPRE back.

      tRETRY(AR²) = tSET + ρ·N_RR x tR + tDMA + tECC     (ρ = tR'/tR)

**PnAR²**, both mechanisms together, is the main configuration and the
default use of `pnar2_top`. With the default timing of the model used here,
each retry step costs:

| mode    | one retry step     | simulated (µs) | against regular |
|---------|--------------------|----------------|-----------------|
| regular | tR + tDMA + tECC   | 127.7          | –               |
| PR²     | tR                 | 91.3           | −28.5 %         |
| AR²     | tR' + tDMA + tECC  | 105.3          | −17.5 %         |
| PnAR²   | tR'                | 68.9           | −46.0 %         |

These are averages over LSB, CSB and MSB pages with tPRE cut by 40 %, from 24 µs
to 14.4 µs (`tb_retry_latency`). The 40 % cut shortens tR by about 25 %.

## NAND timing assumed

The die's timing is that of a triple-level-cell 3D NAND chip. The read of a
page senses it N_SENSE times: 2 times for LSB pages, 3 for CSB pages and 2 for
MSB pages. Each sensing has three phases, precharge, evaluation and discharge:

    tR = N_SENSE x (tPRE + tEVAL + tDISCH)

| parameter | value | meaning |
|-----------|-------|---------|
| tPRE      | 24 µs | bit-line precharge (default; what AR² shortens) |
| tEVAL     | 5 µs  | cell evaluation |
| tDISCH    | 10 µs | discharge |
| tR        | 78 / 117 / 78 µs | LSB / CSB / MSB page, about 90 µs on average |
| tDMA      | 16 µs | 16-KiB page out (about 1 GB/s) |
| tECC      | 20 µs | ECC decode of one page |
| tSET      | 1 µs  | SET FEATURE |
| tRST      | 5 µs  | RESET of a read |

Only tPRE, tDMA and tECC matter to the engine. The die and decoder models use
the others.

## The command sequence (`read_retry_ctrl`)

Every host read starts as a plain read with voltage set 0:

    PAGE READ(p, set 0) → sense → DATA OUT → ECC

If ECC succeeds the page is returned with `resp_steps = 0`. Otherwise a
read-retry operation starts. With PnAR² and a block inside the table's range,
an operation that succeeds at retry step 3 looks like this:

    RPT query → SET FEATURE(tPRE') ─────────────────────────── (AR² step 1, 2)
    PAGE READ(p, set 1) → sense 1
       CACHE READ(set 2) → sense 2 ║ DATA OUT 1 → ECC 1 fails
       CACHE READ(set 3) → sense 3 ║ DATA OUT 2 → ECC 2 fails
       CACHE READ(set 4) → sense 4 ║ DATA OUT 3 → ECC 3 ok → resp_valid
    RESET (aborts sense 4) → SET FEATURE(24 µs) ───────────── (AR² step 4)

Details that matter:

* The first retry step is a PAGE READ. When the sensing of step *i* has
  finished, the engine issues CACHE READ for step *i+1* at once and then the
  DATA OUT of step *i* from the cache register. At most one step is in flight
  ahead of the one being decoded. CACHE READ for step *i+2* waits until two
  things have happened: step *i* has failed ECC, and step *i+1* has finished
  sensing. With the default timing the ECC result always arrives first,
  because tDMA + tECC (36 µs) is less than tR (78 µs or more). Sensing is then
  back to back.
* The step that succeeds is the one whose ECC passes. The response is raised
  in the cycle after `ecc_done`/`ecc_ok`. At that moment the speculative next
  step is still sensing. The engine then issues RESET, waits for
  `fl_op_done`, restores tPRE and only then returns to idle (`req_ready`). The
  host has its data before the cleanup.
* At the last voltage set (`MAX_RR`) there is no further set to start. The
  step is closed with the end-of-cache-read command (3Fh), which copies the
  data to the cache register without sensing again. If that step fails too,
  the page is uncorrectable (`resp_ok = 0`, `resp_steps = MAX_RR`).
* With `cfg_pr2_en = 0` every step is PAGE READ → DATA OUT → ECC in series:
  the regular read-retry, kept as a mode for comparison and for dies without
  CACHE READ.
* With `cfg_ar2_en = 0` no table lookup or SET FEATURE happens.
* The enables are sampled when a request is accepted. They may change
  between requests.

### Fallback to the default tPRE

A reduced tPRE is safe only as far as the offline profiling saw. An outlier
page may still fail every step at the reduced tPRE although it would have been
readable at the default one. When all retry steps fail at a reduced tPRE, the
engine restores 24 µs and repeats the whole retry operation once from set 1.
The answer then has `resp_fallback = 1`. A read that also fails the second
pass is reported uncorrectable. Fallback and uncorrectable reads are expected
to be very rare. Their cost is about twice the retry time.

### Table misses

A block whose P/E count or retention age lies outside the profiled range gets
`r_hit = 0` from the table. Its retry runs without SET FEATURE at the default
tPRE, so it still has PR².

## The read-timing parameter table (`rpt`, `rpt_loader`)

The table has `N_PEC_BINS x N_RET_BINS` entries of 32 bits, each a tPRE in
nanoseconds. The defaults are 6 × 6 = 36 entries = 144 bytes:

| bin | P/E cycles | retention age (days) |
|-----|-----------|-----------------------|
| 0   | < 250     | < 60                  |
| 1   | < 500     | < 120                 |
| …   | …         | …                     |
| 5   | < 1500    | < 360                 |

The entry index is `pec_bin * N_RET_BINS + ret_bin`. Each bin is found with
a row of constant comparators, not a divider. Queries answer one cycle later.
After reset every entry holds the default tPRE, so an unloaded or partly
loaded table never shortens a read.

The values come from offline characterization of the die type: the smallest
tPRE at which the final retry step still decodes, plus a safety margin. They
are not computed by the hardware. The only published points are the four
corners of a table of this shape:

* 14 µs and 16 µs in the lowest P/E row, at the youngest and the oldest age;
* 16 µs and 18 µs in the highest P/E row.

The testbenches fill the table with `tPRE = 14 µs + 0.4 µs × pec_bin +
0.4 µs × ret_bin`, which meets those corners. `tb_retry_latency` uses a flat
14.4 µs (40 % below the default).

The table lives in one flash page of the die (`RPT_PAGE`, default page 0). After
reset `rpt_loader` owns the die's command port. It issues PAGE READ of that
page at the default timing, then DATA OUT, and writes the first 36 32-bit
words of the data stream into entries 0 … 35. It then raises `boot_done`,
which stays high. `pnar2_top` holds host requests and the sequencer's die
events off until then. The boot costs one tR + tDMA (about 95 µs).

## Interfaces (`pnar2_top`)

All signals are synchronous to `clk`, and `rst_n` is active low. The types
are in `rr_pkg`.

| group | signals | notes |
|-------|---------|-------|
| config | `cfg_pr2_en`, `cfg_ar2_en` | sampled per request; both 1 = PnAR² |
| host request | `req_valid`, `req_ready`, `req_page[21:0]`, `req_pec[15:0]`, `req_ret[15:0]` | valid/ready. P/E count and retention age in days of the page's block come from the firmware's block metadata |
| host response | `resp_valid`, `resp_ok`, `resp_steps[4:0]`, `resp_fallback` | one-cycle pulse |
| boot | `boot_done` | table loaded; requests are accepted only after it |
| die command | `fl_cmd_valid`, `fl_cmd_ready`, `fl_cmd` (`flash_cmd_t`: op, page, step, feat) | valid/ready; `fl_cmd` is held while waiting |
| die events | `fl_sense_done`, `fl_dma_done`, `fl_op_done` | one-cycle pulses: sensing done, data out done, SET FEATURE / RESET done |
| die data | `fl_rdata_valid`, `fl_rdata[31:0]` | only used to load the table |
| ECC decoder | `ecc_start` (out), `ecc_done`, `ecc_ok` (in) | one decode per data output |

Opcodes (`flash_op_e`) reuse the ONFI command bytes:

| opcode | command |
|--------|---------|
| 30h | PAGE READ |
| 31h | CACHE READ |
| 3Fh | end of cache read |
| 05h | DATA OUT |
| EFh | SET FEATURE |
| FFh | RESET |

`step` selects the voltage set. `feat` carries the tPRE in ns for SET FEATURE.
A real ONFI interface would add a PHY and a timing layer that expand these
into bus cycles. That layer is not part of this design.

The parameters of `pnar2_top` are:

| parameter | default | meaning |
|-----------|---------|---------|
| `MAX_RR` | 31 | voltage sets after set 0 |
| `N_PEC_BINS`, `N_RET_BINS` | 6, 6 | table shape |
| `PEC_BIN` | 250 | bin width in P/E cycles |
| `RET_BIN` | 60 | bin width in days |
| `RPT_PAGE` | 0 | page holding the table |
| `TPRE_DEFAULT` | 24000 | default tPRE in ns |

The engine serves one die and handles one read at a time. An SSD with
16 dies would instantiate it 16 times, behind a channel scheduler that is not
part of this design. The engine never uses a clock-based timer. Every wait is
for an event from the die or the decoder, so the clock frequency is free.

## Where this design departs from the published description, or fills gaps

* **Own choices.** The command encoding, the valid/ready handshakes, the
  completion pulses from the die, the 32-bit ns format of tPRE and the
  end-of-cache-read at the last voltage set are this design's. The published
  description names the commands, not their encoding or handshakes.
* **Number of voltage sets.** `MAX_RR = 31` is assumed. It covers the ~25
  retry steps seen in the worst characterized conditions.
* **Table range.** The table covers P/E counts below 1,500 and ages below
  360 days. Blocks at 2,000 P/E cycles or at a 12-month age therefore miss
  and run PR² at the default tPRE, without the tR reduction. This is one of
  the conditions for which a 25 % cut is reported as possible. To include
  them, raise `N_PEC_BINS` to 9 and `N_RET_BINS` to 7 (63 entries, up to
  2,250 P/E cycles and 420 days) and store the profiled values. Entry values
  for those rows are not published. `tb_operating_conditions` runs both
  sizes.
* **No temperature axis.** Table entries already contain a safety margin for
  temperature. A third table index for the operating temperature is possible
  but not built.
* **Bins.** Equal bin widths between the printed first and last rows are an
  assumption.
* **No wear tracking.** P/E count and retention age arrive with each request.
  Wear tracking is assumed to exist in the firmware.
* **Starting voltage set.** Set selection always starts at 1. Schemes that
  predict a better starting set can sit in front of this engine but are not
  built.
* **Table page.** The table page is read without ECC and without retry.
  A product would protect it, for example with a copy and a checksum.
* **Speculation depth.** Only one step runs ahead of the step being decoded.
  The step after it starts when the decode has failed. This never delays
  sensing as long as tDMA + tECC < tR, which holds for every page type here.
  A die with a tR below 36 µs would see gaps.

## How far it is checked

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. The die and the ECC
decoder are behavioural models in `tb/`.

* `nand_chip_model` has a data register and a cache register. It times
  PAGE READ, CACHE READ, end of cache read, DATA OUT, SET FEATURE and RESET
  with the table above (tR from the current tPRE and the page type). It
  streams a table image from `RPT_PAGE`. It flags protocol errors: a command
  while busy, DATA OUT with nothing to send, or a CACHE READ before the cache
  register is free. It also counts aborted sensings.
* `ecc_model` decodes in tECC. It succeeds when the step's voltage set is at
  least the page's needed step and the sensing used at least the page's
  minimum safe tPRE. Outliers and unreadable pages can be set up this way.

| testbench | what it checks |
|-----------|----------------|
| `tb_rpt` | every bin edge, misses, writes, one-cycle query latency (413 checks) |
| `tb_read_retry_ctrl` | all modes, against a stand-in table. It checks exact command counts and the closed-form tRETRY of each mode within a few cycles per step. Cases: success at the last set, table miss, fallback, uncorrectable page in both pipelined and regular mode, and one RESET per pipelined success |
| `tb_rpt_loader` | all 36 writes and their order, and the boot time (tR + tDMA) |
| `tb_pnar2_top` | end-to-end at the default parameters: boot fill from flash, 8 directed and 60 random reads across the operating range. Each result, SET FEATURE value and final tPRE is checked against an independent prediction, and tRETRY against `tSET + N_RR x tR' + tDMA + tECC` |
| `tb_operating_conditions` | per-read latency at four aging conditions, in four modes, with the default and an extended table. Each read is checked against its closed form (1163 checks) |
| `tb_retry_latency` | per-step retry cost in the four modes against the closed forms, and the ≈28.5 % (PR²) and ≈25 % (tPRE −40 %) reductions |

In `tb_pnar2_top`, every mechanism must occur at least once:

* boot fill;
* read without retry;
* CACHE READ step;
* RESET of the speculative step;
* end of cache read;
* reduced tPRE;
* table miss;
* fallback;
* uncorrectable page;
* regular mode.

Not checked: real ONFI bus timing, several dies sharing a channel, and SSD-level
response times under host I/O traces. Those need an SSD simulator, not RTL.

## Read latency under aging

`tb_operating_conditions` reads pages at four operating conditions whose
retry-step counts come from published characterization of a 3D TLC NAND:

* a fresh block: no retry;
* 6 months at 0 P/E cycles: 7 steps (more than half of reads need at least 7);
* 3 months at 1K P/E cycles: 8 steps (every read needs at least 8);
* 1 year at 2K P/E cycles: 19.9 steps on average.

Each condition runs in all four modes, once with the default 6 × 6 table and
once with the 9 × 7 table described above. Both tables hold tPRE = 14.4 µs.
The figures are mean latency in µs from request to response, with the
reduction against regular read-retry:

| condition | regular | PR² | AR² | PnAR² (6 × 6) | PnAR² (9 × 7) |
|-----------|---------|-----|-----|---------------|---------------|
| fresh | 127.8 | 127.8 | 127.8 | 127.8 | 127.8 |
| 0 P/E, 6 months | 1021.7 | 803.4 (−21.4 %) | 866.3 (−15.2 %) | 648.0 (−36.6 %) | 648.0 (−36.6 %) |
| 1K P/E, 3 months | 1149.4 | 894.7 (−22.2 %) | 971.6 (−15.5 %) | 716.9 (−37.6 %) | 716.9 (−37.6 %) |
| 2K P/E, 1 year | 2669.0 | 1981.2 (−25.8 %) | 2669.2 (miss) / 2224.7 (9 × 7) | 1981.4 (−25.8 %) | 1536.8 (−42.4 %) |

Observations from the table:

* A read that needs no retry costs the same in every mode.
* At 19.9 regular retry steps, a read is 20.9 times slower than a fresh one.
  That matches the roughly 21× published for these conditions.
* These are latencies of single reads on an idle die. SSD response times under
  host traces also include queueing, which the RTL does not model.

## Simulating

With Verilator 5:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
        rtl/rr_pkg.sv tb/tb_pnar2_top.sv --top-module tb_pnar2_top
    ./obj_dir/Vtb_pnar2_top

For another test, replace `tb_pnar2_top` with `tb_rpt`, `tb_read_retry_ctrl`,
`tb_rpt_loader`, `tb_retry_latency` or `tb_operating_conditions`. Each runs in
a few seconds. The
models count 10 clock cycles per microsecond (`CYC_PER_US`). That only scales
the simulated time; the RTL has no notion of it.

To try other tables, change `rpt_image` in the testbench. To try other die
timings, change the parameters of `nand_chip_model`.
