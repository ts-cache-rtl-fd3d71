// tb_ts_data_array: one data-array way at reduced size (4 rows x 128 columns, 2 segments).
// The testbench plays the timing control: precharge, n CK cycles of wordline, cross-sensing,
// QLCH, DTC, ELCH; then extra cycles (wordline again without precharge) until no segment
// flags an error. For every column it predicts the bitline voltages from the documented cell
// rate, both SA decisions from the documented offset (with the charge sharing of the swap)
// and from those the read line and the per-segment error flags, and compares.
module tb_ts_data_array;
  import ts_pkg::*;
  localparam int ROWS = 4, COLS = 128, SEG = 64, VDD = 500_000;
  localparam int RMIN = 3_000, RMAX = 30_000, VOSM = 40_000, CBL = 500, CIN = 5, SEED = 9;

  logic ck = 1'b0, rst_n = 1'b0;
  logic pre = 0, wle = 0, swt = 0, sae = 0, qlch = 0, dtc = 0, elch = 0, we = 0;
  logic [1:0]      row;
  logic [COLS-1:0] wbit_en, wdata, q1;
  logic [1:0]      err;
  logic [COLS-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0, n_err = 0, n_fp = 0;

  ts_data_array #(.ROWS(ROWS), .COLS(COLS), .SEG(SEG), .VDD_UV(VDD), .RATE_MIN_UV(RMIN),
                  .RATE_MAX_UV(RMAX), .VOS_MAX_UV(VOSM), .C_BL(CBL), .C_IN(CIN),
                  .SEED(SEED)) dut (.*);
  always #5 ck = ~ck;

  // Timing signals change just after rising edges, as the timing control's registers do.
  task automatic step(input logic [6:0] sig);
    @(posedge ck) #1 {pre, wle, sae, swt, qlch, dtc, elch} = sig;
  endtask

  task automatic sense_pass();
    step(7'b0010000);  // SAE1
    step(7'b0001100);  // QLCH, SWT
    step(7'b0011000);  // SAE2 with SWT
    step(7'b0000010);  // DTC
    step(7'b0000001);  // ELCH
    step(7'b0000000);
    @(negedge ck);
  endtask

  // Predicts the outcome of a pass after a total of t wordline cycles.
  task automatic predict(input int r, input int t, output logic [COLS-1:0] eq1,
                         output logic [1:0] eerr);
    eerr = '0;
    for (int c = 0; c < COLS; c++) begin
      int rate, bl, blb, vos, in2, inb2;
      logic a, b;
      rate = ts_cell_rate(r, c, SEED, RMIN, RMAX);
      vos  = ts_col_vos(c, SEED, VOSM);
      bl = VDD; blb = VDD;
      if (ref_mem[r][c]) blb = (VDD - rate * t < 0) ? 0 : VDD - rate * t;
      else               bl  = (VDD - rate * t < 0) ? 0 : VDD - rate * t;
      a = (bl - blb) > vos;
      in2  = int'((longint'(CBL) * blb + longint'(CIN) * bl) / (CBL + CIN));
      inb2 = int'((longint'(CBL) * bl + longint'(CIN) * blb) / (CBL + CIN));
      b = (in2 - inb2) > vos;
      eq1[c] = a;
      if (a == b) eerr[c / SEG] = 1'b1;
    end
  endtask

  task automatic read(input int r, input int tw, input int te);
    int t;
    logic [COLS-1:0] eq1;
    logic [1:0] eerr;
    @(posedge ck) #1 row = 2'(r);
    step(7'b1000000);
    step(7'b0100000);
    repeat (tw - 1) step(7'b0100000);
    t = tw;
    for (int pass = 0; pass < 20; pass++) begin
      sense_pass();
      predict(r, t, eq1, eerr);
      checks++;
      if (q1 !== eq1 || err !== eerr) begin
        failures++;
        $display("FAIL row %0d t=%0d: q1 %h exp %h err %b exp %b", r, t, q1, eq1, err, eerr);
      end
      if (eerr != 0) begin
        n_err++;
        if (q1 == ref_mem[r]) n_fp++;
      end
      if (err == 0) begin
        checks++;
        if (q1 !== ref_mem[r]) begin
          failures++;
          $display("FAIL row %0d: error-free pass returned wrong data", r);
        end
        break;
      end
      repeat (te) step(7'b0100000);  // extra cycle: wordline again, no precharge
      t += te;
    end
  endtask

  initial begin
    repeat (2) @(negedge ck);
    rst_n = 1'b1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge ck) begin
        row = 2'(r); we = 1'b1; wbit_en = '1;
        for (int k = 0; k < COLS / 32; k++) wdata[k*32 +: 32] = $urandom;
        ref_mem[r] = wdata;
      end
    end
    @(negedge ck) we = 1'b0;
    for (int i = 0; i < 12; i++) read(i % ROWS, 2 + i % 5, 2);
    checks++;
    if (n_err == 0) begin
      failures++;
      $display("FAIL: no timing error was ever flagged");
    end
    $display("flagged passes %0d (with correct data %0d)", n_err, n_fp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000) @(posedge ck);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
