// tb_ts_test_controller: a reduced controller (4 sets x 2 ways, 64 words) against a cache
// stand-in with random READY and RVALID delays. Checks that all words are written first, in
// order, with the documented pattern and tags, then read in the same order one at a time
// with EXP matching, and that DONE follows the last read; then runs it a second time.
module tb_ts_test_controller;
  import ts_pkg::*;
  localparam int NS = 4, NW = 2, N = NS * NW * WORDS;

  logic ck = 1'b0, rst_n = 1'b0, start = 1'b0, ready = 1'b1, rvalid = 1'b0;
  logic cen, wen, reading, done;
  logic [0:0]  way;
  logic [31:0] tag;
  logic [7:0]  index;
  logic [2:0]  word;
  logic [63:0] wdata, exp;
  int checks = 0, failures = 0, n_wr = 0, n_rd = 0, busy = 0;

  ts_test_controller #(.N_SETS(NS), .N_WAYS(NW)) dut (.*);
  always #5 ck = ~ck;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Cache stand-in: takes a request on a rising edge with READY and CEN low.
  always @(posedge ck) begin
    if (rst_n && ready && !cen) begin
      int a;
      a = n_wr < N ? n_wr : n_rd;
      check({way, index[1:0], word} == 6'(a), $sformatf("address order %0d", a));
      check(tag == ts_test_tag(way, index) && wdata == ts_pattern(index, word), "tag and pattern");
      if (!wen) begin
        check(n_rd == 0, "writes come first");
        n_wr <= n_wr + 1;
      end else begin
        check(n_wr == N, "reads after all writes");
        check(exp == ts_pattern(index, word), "expected word");
        check(reading, "READING during reads");
        n_rd <= n_rd + 1;
        ready  <= 1'b0;
        rvalid <= 1'b0;
        busy   <= 2 + $urandom_range(6);
      end
    end else if (busy > 1) busy <= busy - 1;
    else if (busy == 1) begin
      busy <= 0;
      ready <= 1'b1;
      rvalid <= 1'b1;
    end else if (busy == 0) ready <= ($urandom_range(3) != 0);
  end

  initial begin
    repeat (2) @(negedge ck);
    rst_n = 1'b1;
    for (int run = 0; run < 2; run++) begin
      @(negedge ck) start = 1'b1;
      @(negedge ck) start = 1'b0;
      n_wr = 0; n_rd = 0;
      wait (done);
      check(n_wr == N && n_rd == N, $sformatf("counts %0d writes %0d reads", n_wr, n_rd));
      repeat (5) @(negedge ck);
      check(done && cen, "idle and DONE after the run");
    end
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
