# TS cache: a timing-speculative L1 cache for near-threshold supply voltages

At low supply voltage the bitlines of a 6T SRAM discharge slowly. They also discharge very
unevenly from cell to cell, because process variation weakens some cells far more than others.
A conventional array must hold its wordline open long enough for the weakest cell in the
array. At 0.5 V that can be several times the time a typical cell needs.

The TS (timing-speculation) cache senses early and checks whether the early result can be
trusted. Each column's sense amplifier (SA) fires twice in quick succession:

1. The first time with its inputs straight (BL on IN, BLB on INB). This gives Q1.
2. The second time with the inputs swapped by a small switch (BLB on IN, BL on INB). This
   gives Q2.

If the bitline differential is larger than the SA's offset, the swap inverts the decision, so
Q2 = ~Q1. If the differential is still smaller than the offset, the offset decides both
times, so Q2 = Q1. In that case the early read is not reliable. An error detector flags it,
and the cache takes one extra cycle. During that cycle the wordline is enabled again without
precharging, so the bitlines keep discharging from where they were. Then the column is sensed
twice more.

A reliable word is therefore delivered after a short wordline time, and only the rare weak
word costs an extra cycle. This RTL models the 32 KB, 2-way cache with a 64-bit port, built
around that mechanism. It also includes the on-chip test logic used to characterise it.

## Organisation

| Item | Value |
|---|---|
| capacity | 32 KB |
| associativity | 2 ways |
| sets | 256 |
| line size | 64 B (512 bits) |
| tag | 32 bits, two per tag-array row |
| read/write port | 64 bits |

Each way has its own data array of 256 rows x 512 columns. Every column has a switch and an SA.
The 512 columns form 8 segments of 64 bits, matching the port width, and each segment has its
own error detector. A read therefore reports 8 error flags per way. Only one of them matters:
the flag of the requested word in the hit way. An error in the other way, or in a word that
was not asked for, never delays the read.

```
ts_test_chip                      top: cache + test logic
├── ts_clock_gate                 CK -> CK_G, stopped while ERR
├── ts_test_controller            pattern writer / reader (on CK_G)
├── ts_error_counter              comparator and counters (on CK)
└── ts_cache                      the TS cache
    ├── ts_timing_control         CK-counting read sequencer
    ├── ts_tag_array              2 x 32-bit tags + valid per set
    ├── ts_tag_comparator         hit, hit way, WAYSEL = {way, word}
    ├── ts_output_mux             1 of 16 64-bit words
    └── ts_data_array  (x2, one per way)
        ├── ts_bitcell_array      cells, precharge, write buffers, WL drivers  [behavioural]
        ├── ts_cross_sense_amp    x512 switch + latch SA                         [behavioural]
        └── ts_error_detector     x8, one per 64-bit segment
```

`ts_pkg` holds the geometry constants, the timing-configuration struct, the counter struct and
the device-variation functions.

## Timing of a read

All timing comes from counting cycles of an internal clock, CK. In silicon, CK comes from a
replica-bitline oscillator that tracks the array. Its period is roughly 0.69 ns at 0.5 V and
0.27 ns at 0.6 V. The RTL takes CK as an input.

A read is configured by `ts_timing_cfg_t`, which holds three counts in CK cycles:

- `t_pre`: how long the bitlines are precharged.
- `t_wle`: how long the wordline is enabled before the first sensing.
- `t_ext`: how long the wordline is enabled again in each extra cycle.

`ts_timing_control` steps through the following phases. Every output is a registered
decode of the next state.

| Phase | CK cycles | Signals high | What happens |
|---|---|---|---|
| PRE  | t_pre | PRE | bitlines precharged to VDD |
| WLE  | t_wle | WLE | selected row discharges BL or BLB |
| SAE1 | 1 | SAE | first sensing, inputs straight -> Q1 |
| LCH  | 1 | QLCH, SWT | detectors store Q1; switch swaps the SA inputs |
| SAE2 | 1 | SAE, SWT | second sensing, swapped -> Q2 |
| DTC  | 1 | DTC | detectors compare Q1 with Q2 |
| ELCH | 1 | ELCH | comparison latched into each segment's ERR |
| CHK  | 1 | PASS_DONE | the hit segment's ERR is examined |
| EXT  | t_ext | WLE | only after an error: more discharge, no precharge, then back to SAE1 |

A read that passes first time takes **t_pre + t_wle + 6** CK cycles. Each extra cycle adds
**t_ext + 6** CK cycles. Extra cycles repeat until the flag clears. Because the differential
only grows, every cell eventually passes. The testbenches check these cycle counts exactly.

The order of the signals follows the published description: SAE, then QLCH, then SWT around
the second SAE, then DTC, then the latched ERR. The one-cycle pulse widths are this
implementation's choice, as is dropping WLE while sensing.

## The error detector, and why false positives are harmless

Each detector (`ts_error_detector`) keeps Q1 for its 64 bits, and that is the data the cache
returns. When DTC is high, the detector checks whether any bit has Q1 == Q2. In the circuit,
each bit's XOR/AND stack can pull down one shared precharged node. ELCH latches that node as
ERR, which then holds until the next ELCH. The RTL is the synchronous equivalent: QLCH, DTC
and ELCH act as enables on CK edges.

How Q1 and Q2 come out depends on the sign of the SA offset VOS and on the differential
ΔV = V(BL) − V(BLB). The table below is for a cell storing 1, so ΔV > 0.

| VOS | differential | Q1 | Q2 | flag |
|---|---|---|---|---|
| > 0 | 0 < ΔV < VOS | 0 (wrong) | 0 | error |
| > 0 | ΔV > VOS | 1 | 0 | none |
| < 0 | ΔV < \|VOS\| | 1 (right) | 1 | error (false positive) |
| < 0 | ΔV > \|VOS\| | 1 | 0 | none |

A wrong Q1 is always flagged. The only other case is a correct Q1 that is flagged anyway,
which costs an extra cycle but never corrupts data. In other words, the scheme has no false
negatives.

Charge sharing slightly worsens false positives. When the switch swaps the inputs, each SA
input node, still charged to one bitline, shares its charge with the other bitline. This
shrinks the second differential by (C_BL − C_IN)/(C_BL + C_IN). With the published 50 fF
bitline and 0.5 fF SA input, that is a factor of about 0.98. `ts_cross_sense_amp` models the
effect exactly, and its testbench includes a case that a swap without charge sharing would not
flag.

## Behavioural device models

Two blocks are analog in reality and are written as non-synthesizable behavioural models:

- **`ts_bitcell_array`** models the cells, precharge, write buffers and wordline drivers.
  - Voltages are integers in microvolts.
  - On each falling CK edge with WLE high, the selected cell lowers one bitline by its
    discharge rate: BLB if it stores 1, BL if it stores 0.
  - Precharge restores VDD, which is 0.5 V by default.
- **`ts_cross_sense_amp`** models the switch and the latch SA.
  - On each rising edge of SAE it resolves Q = (V(IN) − V(INB) > VOS), with IN and INB chosen
    by SWT as described above.

Process variation is deterministic and needs no table:

- Each cell's rate comes from `ts_cell_rate(row, col, seed, min, max)`. This is a hash mapped
  onto a cubic distribution: most cells sit near the fast end, with a tail down to the slow
  end. The default range is 3 to 30 mV per CK.
- Each column's SA offset comes from `ts_col_vos(col, seed, max)`. It is uniform within
  ±40 mV by default.

Each way uses a different seed. None of these device numbers are measured values. They were
chosen so that a wordline time of a few CK cycles gives a realistic mix of clean reads, real
errors and false positives. All of them are parameters of `ts_cache` and `ts_data_array`.

## The cache port (`ts_cache`)

| Signal | Dir | Meaning |
|---|---|---|
| `ck`, `rst_n` | in | internal clock, asynchronous active-low reset |
| `cen`, `wen` | in | chip enable and write enable, both active low |
| `way`, `tag`, `index`, `word`, `wdata` | in | request; `way` is used by writes only |
| `cfg` | in | `ts_timing_cfg_t`, captured when a read starts |
| `ready` | out | a request is taken on a rising edge with `ready` high and `cen` low |
| `q`, `hit`, `rvalid` | out | read result; `rvalid` stays high until the next request |
| `err` | out | high while the requested word is being corrected |
| `pass_done`, `first_pass` | out | end of each sensing pass; the first pass is the speculative one |

- **Writes** store one 64-bit word and also write `tag` as the tag of that way, marking the
  way valid. Writes take one CK cycle.
- **Reads** sense both ways while the tag is compared. A miss ends after its first pass, with
  `hit` low.
- **Refill, replacement and write-back** are not part of this design. A requester fills lines
  with writes.

## Test logic (`ts_test_chip`)

This reproduces the characterisation setup:

- The **test controller** writes every byte of the cache by address traversal. Each byte is
  0x55 or 0xAA, alternating by set and word. It then reads every word back in the same order.
- The **clock gate** stops the controller's clock, CK_G, while ERR is high.
- The **comparator and error counter** runs on the ungated CK. It counts:
  - wrong bits and wrong words in the speculative first-pass word (the bit and word error
    rates at the chosen wordline time);
  - first passes flagged by ERR;
  - extra cycles;
  - errors in the delivered words, which must be zero;
  - reads, misses and CK cycles spent reading.

`start` clears the counters and runs the procedure once. `done` marks the end of the run.

## Departures and assumptions

- **Reading of the 4-bit tag-comparator output.** Only its width is published. Here it
  carries {hit way, word offset} as the select of the output multiplexer.
- **Valid bits.** One valid bit per way is added; the published tag array holds only tags.
- **Interface details of this design's own.** The CEN/WEN polarity, the READY/RVALID
  handshake, single-cycle writes and reset behaviour were all chosen here.
- **No PVT tracking.** The replica-bitline clock and the PVT-tracking part of the timing
  control are not built. CK and the cycle counts are inputs.
- **Physical arrays.** The prototype splits the data into 8 physical arrays of 256 x 128 and
  the tags into 4 of 64 x 64. The RTL uses the logical view instead: one 256 x 512 array per
  way and one 256-row tag array. The totals are the same.
- **What is not modelled.** Energy, area and delay are not modelled; the bitline discharge
  model is linear; cells too weak to ever read correctly (which the authors leave to BIST and
  redundancy) do not occur in the model.
- **Test pattern placement.** Where 0x55 and 0xAA go in the test pattern is a choice made here.
- **No pipelining.** The per-segment flags would let a pipelined cache hide an extra cycle
  behind the transfer of words that were read correctly. This cache serves one 64-bit word per
  read and does not do that.

## Simulating

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=M` and stops itself.
For example, the whole chip at full size:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_ts_test_chip \
    rtl/ts_pkg.sv tb/tb_ts_test_chip.sv -Mdir obj_chip
./obj_chip/Vtb_ts_test_chip
```

This runs the full procedure twice:

- **t_wle = 5 CK.** Thousands of speculative errors are flagged and corrected, the clock gate
  stops the controller, and false positives occur.
- **t_wle = 40 CK.** There are no errors, and each read costs exactly t_pre + t_wle + 8 CK
  cycles including the handshake.

It finishes in a few seconds. Replace `test_chip` by any other block name to run that block's
testbench, for example `tb_ts_cache` or `tb_ts_timing_control`. Some warnings are expected:
`-Wall` reports blocking assignments inside the behavioural models, which are intended there.

`tb_ts_wl_sweep` repeats the characterisation across wordline times from 2 to 16 CK. For each
setting it prints the speculative bit error rate, the fraction of words flagged, the number of
extra cycles and the total CK cycles, and it takes about 10 seconds. With the default device
spread:

- the first-sensing bit error rate falls from about 5 % at 2 CK to 0 at 16 CK;
- the fastest setting, 10 CK, reads the whole cache in about 1.23 times fewer CK cycles than
  16 CK, the shortest time at which every first sensing is right.

This gain is a property of the invented device spread, not a prediction for silicon. It shows
the trade the design makes: a shorter wordline time, paid for by occasional extra cycles. The
reference is the same sequencer, so the conventional read is charged for a second sensing it
would not need.

To explore the mechanism, change `cfg.t_wle` in the top testbench and compare the
first-pass error counts with the extra-cycle count. To change the device spread, use the
`RATE_*`, `VOS_MAX_UV` and `SEED` parameters of `ts_cache`.
