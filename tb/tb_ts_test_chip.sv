// tb_ts_test_chip: end-to-end test of the TS cache prototype at its full size (32 KB).
//
// Runs the on-chip test procedure (write the 0x55/0xAA pattern into every byte, read every
// word back) twice:
//  1. an aggressive wordline time (t_wle = 5 CK cycles): many speculative reads are wrong,
//     the error detectors flag them, extra cycles correct them, and the clock gate stops the
//     test controller meanwhile; every delivered word must still be right;
//  2. a conservative time (t_wle = 40): no errors, no extra cycles, and the read phase takes
//     exactly (t_pre + t_wle + 8) CK cycles per read.
// It counts how often each mechanism happened (speculative error, ERR, extra cycle, clock
// gating, false-positive flag) and fails if one never did.
module tb_ts_test_chip;
  import ts_pkg::*;

  logic           ck = 1'b0;
  logic           rst_n = 1'b0;
  logic           start = 1'b0;
  ts_timing_cfg_t cfg;
  logic           done, err;
  logic [63:0]    q;
  ts_err_counts_t cnt;

  int checks = 0, failures = 0;
  int gated = 0, false_pos = 0;

  ts_test_chip dut (.ck, .rst_n, .start, .cfg, .done, .q, .err, .cnt);

  always #5 ck = ~ck;

  // Clock-gating events: CK high while CK_G stays low.
  always @(posedge ck) if (rst_n && !dut.ck_g) gated++;
  // False positives: ERR flagged at a first pass whose speculative word was right.
  always @(posedge ck)
    if (dut.pass_done && dut.first_pass && dut.err && dut.q == dut.u_ctrl.exp) false_pos++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run(input int t_pre, input int t_wle, input int t_ext);
    cfg = '{t_pre: CFG_W'(t_pre), t_wle: CFG_W'(t_wle), t_ext: CFG_W'(t_ext)};
    @(negedge ck) start = 1'b1;
    @(negedge ck) start = 1'b0;
    wait (done);
    @(negedge ck);
    $display("t_wle=%0d: reads=%0d misses=%0d raw_bit=%0d raw_word=%0d err_words=%0d extra=%0d final_bit=%0d final_word=%0d ck=%0d",
             t_wle, cnt.reads, cnt.misses, cnt.raw_bit_errs, cnt.raw_word_errs, cnt.err_words,
             cnt.extra_cycles, cnt.final_bit_errs, cnt.final_word_errs, cnt.ck_cycles);
    check(cnt.reads == 32'(WAYS * SETS * WORDS), "every word read once");
    check(cnt.misses == 0, "every read hits");
    check(cnt.final_bit_errs == 0 && cnt.final_word_errs == 0, "delivered words are correct");
  endtask

  initial begin
    repeat (3) @(posedge ck);
    rst_n = 1'b1;

    run(2, 5, 3);
    check(cnt.raw_word_errs > 0, "speculative read errors happened");
    check(cnt.err_words > 0, "ERR was raised");
    check(cnt.extra_cycles > 0, "extra cycles happened");
    check(cnt.err_words >= cnt.raw_word_errs, "every wrong speculative word was flagged");
    check(gated > 0, "clock gating happened");
    check(false_pos > 0, "a false-positive flag happened");
    $display("mechanisms: gated=%0d false_positive=%0d", gated, false_pos);

    run(2, 40, 3);
    check(cnt.raw_bit_errs == 0 && cnt.err_words == 0, "no errors at a conservative time");
    check(cnt.extra_cycles == 0, "no extra cycles at a conservative time");
    // One request per read: 1 cycle to take it, t_pre+t_wle+6 to sense and check, 1 for the
    // controller to see RVALID; the counter also sees the final cycle into DONE.
    check(cnt.ck_cycles == 32'(WAYS * SETS * WORDS * (2 + 40 + 8) + 1), "read phase cycle count");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge ck);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
