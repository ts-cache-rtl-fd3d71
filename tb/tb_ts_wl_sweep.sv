// tb_ts_wl_sweep: the characterisation sweep of the prototype, run on the full-size chip.
//
// For a series of wordline-enable times t_wle (in CK cycles) it runs the whole test
// procedure (write the 0x55/0xAA pattern, read all 4096 words) and reports, per setting:
//   BER  = wrong speculative bits / bits read,
//   DER  = first passes flagged by ERR / words read (each costs at least one extra cycle),
//   CK cycles spent reading.
// The conventional design must wait until every bit is right at the first sensing; here that
// is the shortest t_wle with no speculative bit error. The timing-speculative design may run
// shorter and pay extra cycles instead. The testbench checks that:
//   * every delivered word is right at every setting (no false negatives),
//   * every wrong speculative word was flagged,
//   * the BER never rises as t_wle grows,
//   * the best speculative setting reads the cache in fewer CK cycles than the conventional
//     time, i.e. the throughput gain is above 1.
module tb_ts_wl_sweep;
  import ts_pkg::*;

  localparam int N_SET = 9;
  localparam int TWS [N_SET] = '{2, 3, 4, 5, 6, 8, 10, 13, 16};
  localparam int TP = 2, TE = 2;

  logic           ck = 1'b0;
  logic           rst_n = 1'b0;
  logic           start = 1'b0;
  ts_timing_cfg_t cfg;
  logic           done, err;
  logic [63:0]    q;
  ts_err_counts_t cnt;

  int checks = 0, failures = 0;
  longint cycles [N_SET];
  longint rawbits [N_SET];

  ts_test_chip dut (.ck, .rst_n, .start, .cfg, .done, .q, .err, .cnt);

  always #5 ck = ~ck;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    int conv, best;
    repeat (3) @(posedge ck);
    rst_n = 1'b1;
    for (int i = 0; i < N_SET; i++) begin
      cfg = '{t_pre: CFG_W'(TP), t_wle: CFG_W'(TWS[i]), t_ext: CFG_W'(TE)};
      @(negedge ck) start = 1'b1;
      @(negedge ck) start = 1'b0;
      wait (done);
      @(negedge ck);
      cycles[i]  = cnt.ck_cycles;
      rawbits[i] = cnt.raw_bit_errs;
      $display("t_wle=%2d  BER=%8.6f  DER=%6.4f  extra=%5d  CK cycles=%0d", TWS[i],
               real'(cnt.raw_bit_errs) / (4096.0 * 64.0), real'(cnt.err_words) / 4096.0,
               cnt.extra_cycles, cnt.ck_cycles);
      check(cnt.reads == 4096 && cnt.final_bit_errs == 0, "all delivered words right");
      check(cnt.err_words >= cnt.raw_word_errs, "every wrong speculative word flagged");
      if (i > 0) check(rawbits[i] <= rawbits[i-1], "BER does not rise with t_wle");
    end
    conv = -1;
    for (int i = 0; i < N_SET; i++) if (conv < 0 && rawbits[i] == 0) conv = i;
    check(conv >= 0, "a conventional (error-free) wordline time exists in the sweep");
    best = 0;
    for (int i = 1; i < N_SET; i++) if (cycles[i] < cycles[best]) best = i;
    if (conv >= 0) begin
      $display("conventional t_wle=%0d: %0d CK; best speculative t_wle=%0d: %0d CK; gain %4.2fX",
               TWS[conv], cycles[conv], TWS[best], cycles[best],
               real'(cycles[conv]) / real'(cycles[best]));
      check(cycles[best] < cycles[conv], "timing speculation raises throughput");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000_000) @(posedge ck);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
