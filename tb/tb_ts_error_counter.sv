// tb_ts_error_counter: feeds random read outcomes (speculative word, ERR, extra passes,
// final word, hit or miss) and checks every counter against totals kept here.
module tb_ts_error_counter;
  import ts_pkg::*;
  logic ck = 1'b0, rst_n = 1'b0, clear = 1'b0, active = 1'b0;
  logic [63:0] q, exp;
  logic err = 0, hit = 0, pass_done = 0, first_pass = 0, rvalid = 0;
  ts_err_counts_t cnt, e;
  int checks = 0, failures = 0;

  ts_error_counter dut (.*);
  always #5 ck = ~ck;

  function automatic int popc(input logic [63:0] v);
    int n = 0;
    for (int i = 0; i < 64; i++) n += int'(v[i]);
    return n;
  endfunction

  task automatic one_read();
    logic [63:0] x, flip;
    int extra;
    bit h;
    h = ($urandom_range(9) != 0);
    x = {$urandom, $urandom};
    flip = ($urandom_range(2) == 0) ? (64'd1 << $urandom_range(63)) | (64'd1 << $urandom_range(63)) : '0;
    extra = $urandom_range(2);
    @(negedge ck) begin
      exp = x; q = x ^ flip; hit = h; active = 1'b1; rvalid = 1'b0;
      pass_done = 1'b1; first_pass = 1'b1; err = (extra > 0);
    end
    e.ck_cycles += 1;
    if (h) begin
      e.raw_bit_errs += popc(flip);
      e.raw_word_errs += (flip != 0);
      e.err_words += (extra > 0);
      e.extra_cycles += (extra > 0);
    end
    for (int p = 1; p <= extra; p++) begin
      @(negedge ck) begin pass_done = 1'b0; err = 1'b1; end
      @(negedge ck) begin pass_done = 1'b1; first_pass = 1'b0; q = x; err = (p < extra); end
      e.ck_cycles += 2;
      if (h && p < extra) e.extra_cycles += 1;
    end
    @(negedge ck) begin pass_done = 1'b0; err = 1'b0; rvalid = 1'b1; q = x; end
    @(negedge ck) active = 1'b0;
    e.ck_cycles += 1;
    e.reads += 1;
    if (!h) e.misses += 1;
  endtask

  task automatic compare(input string when);
    logic [31:0] got [9], want [9];
    got  = '{cnt.reads, cnt.misses, cnt.raw_bit_errs, cnt.raw_word_errs, cnt.err_words,
             cnt.extra_cycles, cnt.final_bit_errs, cnt.final_word_errs, cnt.ck_cycles};
    want = '{e.reads, e.misses, e.raw_bit_errs, e.raw_word_errs, e.err_words,
             e.extra_cycles, e.final_bit_errs, e.final_word_errs, e.ck_cycles};
    for (int k = 0; k < 9; k++) begin
      checks++;
      if (got[k] !== want[k]) begin
        failures++;
        $display("FAIL %s: counter %0d is %0d, expected %0d", when, k, got[k], want[k]);
      end
    end
  endtask

  initial begin
    e = '0;
    repeat (2) @(negedge ck);
    rst_n = 1'b1;
    for (int i = 0; i < 200; i++) begin
      one_read();
      @(negedge ck);
      compare($sformatf("after read %0d", i));
    end
    @(negedge ck) clear = 1'b1;
    @(negedge ck) clear = 1'b0;
    checks++;
    if (cnt !== '0) begin
      failures++;
      $display("FAIL: clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10_000) @(posedge ck);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
