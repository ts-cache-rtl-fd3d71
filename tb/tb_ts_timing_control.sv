// tb_ts_timing_control: runs reads with several configurations and checks, cycle by cycle,
// the count of PRE and WLE cycles, the two SAE pulses with SWT low then high, the order
// QLCH -> DTC -> ELCH -> PASS_DONE, and the total read time: t_pre+t_wle+6 CK cycles from
// START to DONE, plus t_ext+6 for every extra cycle forced by ERR.
module tb_ts_timing_control;
  import ts_pkg::*;
  logic ck = 1'b0, rst_n = 1'b0, start = 1'b0, err = 1'b0;
  ts_timing_cfg_t cfg;
  logic pre, wle, sae, swt, qlch, dtc, elch, pass_done, first_pass, done, busy;
  int checks = 0, failures = 0;

  ts_timing_control dut (.*);
  always #5 ck = ~ck;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // n_err: number of passes that report an error before a clean one.
  task automatic read(input int tp, input int tw, input int te, input int n_err);
    int cyc, n_pre, n_wle, n_sae, n_sae_swt, passes, order_ok, last_lch, last_dtc, last_elch;
    cfg = '{t_pre: CFG_W'(tp), t_wle: CFG_W'(tw), t_ext: CFG_W'(te)};
    @(negedge ck) start = 1'b1;
    @(negedge ck) start = 1'b0;
    cyc = 1; n_pre = 0; n_wle = 0; n_sae = 0; n_sae_swt = 0; passes = 0; order_ok = 1;
    last_lch = -1; last_dtc = -1; last_elch = -1;
    forever begin
      if (pre) n_pre++;
      if (wle) n_wle++;
      if (sae) begin
        n_sae++;
        if (swt) n_sae_swt++;
      end
      if (qlch) last_lch = cyc;
      if (dtc) begin
        last_dtc = cyc;
        if (last_lch != cyc - 2) order_ok = 0;
      end
      if (elch) begin
        last_elch = cyc;
        if (last_dtc != cyc - 1) order_ok = 0;
      end
      if (pass_done) begin
        if (last_elch != cyc - 1) order_ok = 0;
        if (first_pass != (passes == 0)) order_ok = 0;
        passes++;
        err = (passes <= n_err);
        #1;
        if (!err) begin
          check(done, "DONE with a clean pass");
          break;
        end
        check(!done, "no DONE while ERR");
      end
      @(negedge ck);
      cyc++;
      if (cyc > 1000) break;
    end
    check(cyc == tp + tw + 6 + n_err * (te + 6), $sformatf("read time %0d", cyc));
    check(n_pre == tp, "PRE cycles");
    check(n_wle == tw + n_err * te, "WLE cycles");
    check(n_sae == 2 * (n_err + 1) && n_sae_swt == n_err + 1, "two SAE per pass, second swapped");
    check(passes == n_err + 1, "pass count");
    check(order_ok == 1, "QLCH, DTC, ELCH, PASS_DONE order");
    @(negedge ck) err = 1'b0;
    check(!busy, "idle after DONE");
  endtask

  initial begin
    repeat (2) @(negedge ck);
    rst_n = 1'b1;
    read(1, 4, 2, 0);
    read(2, 7, 3, 1);
    read(3, 28, 5, 2);
    read(1, 1, 1, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000) @(posedge ck);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
