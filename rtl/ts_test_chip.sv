// ts_test_chip: the TS cache prototype with its on-chip test logic (top level).
//
// CK, the internal clock, comes from a replica-bitline oscillator outside this RTL. The test
// controller, clocked by CK_G (CK gated off while the cache's ERR is high), writes the 0x55 /
// 0xAA pattern into the whole cache and reads it back; the comparator and error counter
// checks every read and counts error bits, error words, ERR-flagged words and extra cycles.
// CFG sets the CK-cycle counts of precharge, wordline enable and extra cycle; START runs the
// procedure once and DONE reports its end, after which CNT holds the results (START clears
// them). Q and ERR of the cache are brought out for observation.
module ts_test_chip
  import ts_pkg::*;
(
  input  logic                 ck,
  input  logic                 rst_n,
  input  logic                 start,
  input  ts_timing_cfg_t       cfg,
  output logic                 done,
  output logic [WORD_BITS-1:0] q,
  output logic                 err,
  output ts_err_counts_t       cnt
);

  logic                 ck_g;
  logic                 cen, wen, ready, hit, rvalid, pass_done, first_pass, reading;
  logic [WAY_W-1:0]     way;
  logic [TAG_W-1:0]     tag;
  logic [INDEX_W-1:0]   index;
  logic [WORD_W-1:0]    word;
  logic [WORD_BITS-1:0] wdata, exp;

  ts_clock_gate u_cg (.ck, .rst_n, .err, .ck_g);

  ts_test_controller u_ctrl (
    .ck(ck_g), .rst_n, .start, .ready, .rvalid,
    .cen, .wen, .way, .tag, .index, .word, .wdata, .exp, .reading, .done
  );

  ts_cache u_cache (
    .ck, .rst_n, .cen, .wen, .way, .tag, .index, .word, .wdata, .cfg,
    .ready, .q, .err, .hit, .rvalid, .pass_done, .first_pass
  );

  ts_error_counter u_cnt (
    .ck, .rst_n, .clear(start), .active(reading), .q, .exp, .err, .hit,
    .pass_done, .first_pass, .rvalid, .cnt
  );

endmodule
