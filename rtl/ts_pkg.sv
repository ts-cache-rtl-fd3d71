// ts_pkg: shared constants, types and helper functions of the timing-speculation (TS) cache.
//
// The cache geometry follows the prototype: 32 KB, 2-way set associative, 64-byte lines,
// a 64-bit read/write port, 256 sets and 32-bit tags (two tags per tag-array row).
// The timing of a read is set in whole cycles of the internal clock CK, which in silicon
// comes from a replica bitline; ts_timing_cfg_t carries those cycle counts.
// The hash and the two device functions below are this design's own: they give every
// bitcell a repeatable discharge rate and every sense amplifier a repeatable offset, so the
// behavioural array models show process variation without any stored table.
package ts_pkg;

  localparam int unsigned SETS      = 256;
  localparam int unsigned WAYS      = 2;
  localparam int unsigned LINE_BITS = 512;
  localparam int unsigned WORD_BITS = 64;
  localparam int unsigned WORDS     = LINE_BITS / WORD_BITS;  // 8 segments, 8 error detectors
  localparam int unsigned TAG_W     = 32;
  localparam int unsigned INDEX_W   = $clog2(SETS);
  localparam int unsigned WORD_W    = $clog2(WORDS);
  localparam int unsigned WAY_W     = $clog2(WAYS);
  localparam int unsigned WAYSEL_W  = WAY_W + WORD_W;          // 4, the WAYSEL bus

  // Width of each timing count, in CK cycles.
  localparam int unsigned CFG_W = 6;

  // Timing configuration of a read, in CK cycles.
  typedef struct packed {
    logic [CFG_W-1:0] t_pre;  // bitline precharge (PRE high)
    logic [CFG_W-1:0] t_wle;  // wordline enable before the first sensing (first cycle)
    logic [CFG_W-1:0] t_ext;  // wordline enable of each extra (error-correcting) cycle
  } ts_timing_cfg_t;

  // Counters of the on-chip comparator and error counter.
  typedef struct packed {
    logic [31:0] reads;           // read accesses completed
    logic [31:0] misses;          // reads that missed
    logic [31:0] raw_bit_errs;    // wrong bits in the speculative first-pass word
    logic [31:0] raw_word_errs;   // first-pass words with at least one wrong bit
    logic [31:0] err_words;       // first passes with ERR set (double-word error rate)
    logic [31:0] extra_cycles;    // extra cycles spent correcting
    logic [31:0] final_bit_errs;  // wrong bits in delivered words
    logic [31:0] final_word_errs; // delivered words with at least one wrong bit
    logic [31:0] ck_cycles;       // CK cycles spent in the read phase
  } ts_err_counts_t;

  // Test pattern: every byte of the word at (set, word) holds 0x55 or 0xAA, alternating
  // from set to set and from word to word.
  function automatic logic [WORD_BITS-1:0] ts_pattern(input logic [INDEX_W-1:0] set,
                                                      input logic [WORD_W-1:0] word);
    return {WORDS{(set[0] ^ word[0]) ? 8'hAA : 8'h55}};
  endfunction

  // Tag written with each line by the test controller: distinct for every way and set.
  function automatic logic [TAG_W-1:0] ts_test_tag(input logic [WAY_W-1:0] way,
                                                   input logic [INDEX_W-1:0] set);
    return 32'h7500_0000 | TAG_W'({way, set});
  endfunction

  // States of the read sequencer.
  typedef enum logic [3:0] {
    TC_IDLE, TC_PRE, TC_WLE, TC_SAE1, TC_LCH, TC_SAE2, TC_DTC, TC_ELCH, TC_CHK, TC_EXT
  } ts_tc_state_t;

  // 32-bit integer mixer (xorshift-multiply), usable in constant expressions.
  function automatic logic [31:0] ts_hash(input logic [31:0] a, input logic [31:0] b,
                                          input logic [31:0] seed);
    logic [31:0] h;
    h = a * 32'h9E37_79B1 ^ b * 32'h85EB_CA77 ^ seed * 32'hC2B2_AE3D;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A_2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  // Bitline discharge rate of the cell at (row, col), in uV per CK cycle. Most cells are
  // near rate_max; a cubic tail reaches down to rate_min (the slow, weak cells).
  function automatic int ts_cell_rate(input int row, input int col, input int seed,
                                      input int rate_min, input int rate_max);
    logic [31:0] h;
    longint      u;
    h = ts_hash(row, col, seed);
    u = longint'(h[9:0]);  // 0..1023
    return rate_max - int'(((longint'(rate_max) - longint'(rate_min)) * u * u * u)
                           / longint'(1023 * 1023 * 1023));
  endfunction

  // Input offset voltage of the sense amplifier of a column, in uV, within +/- vos_max.
  function automatic int ts_col_vos(input int col, input int seed, input int vos_max);
    logic [31:0] h;
    h = ts_hash(32'h5A5A_0000 + col, 32'h0000_A5A5, seed);
    return int'(h % (2 * vos_max + 1)) - vos_max;
  endfunction

endpackage
