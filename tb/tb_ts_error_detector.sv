// tb_ts_error_detector: drives QLCH/DTC/ELCH sequences with random first outcomes. A second
// outcome equal to ~Q1 everywhere must give ERR=0; one with any bit equal to Q1 must give
// ERR=1. Q1 must hold the first outcome, and ERR must hold until the next ELCH.
module tb_ts_error_detector;
  localparam int W = 64;
  logic         ck = 1'b0, rst_n = 1'b0, qlch = 1'b0, dtc = 1'b0, elch = 1'b0;
  logic [W-1:0] q, q1;
  logic         err;
  int           checks = 0, failures = 0;

  ts_error_detector #(.W(W)) dut (.*);
  always #5 ck = ~ck;

  task automatic sense(input logic [W-1:0] a, input logic [W-1:0] b, input bit exp_err);
    @(negedge ck) begin q = a; qlch = 1'b1; end
    @(negedge ck) begin qlch = 1'b0; q = b; end
    @(negedge ck) dtc = 1'b1;
    @(negedge ck) begin dtc = 1'b0; elch = 1'b1; end
    @(negedge ck) elch = 1'b0;
    checks++;
    if (err !== exp_err || q1 !== a) begin
      failures++;
      $display("FAIL: err=%b exp %b q1=%h exp %h", err, exp_err, q1, a);
    end
    // ERR holds while nothing is latched
    q = ~q;
    repeat (3) @(negedge ck);
    checks++;
    if (err !== exp_err) begin
      failures++;
      $display("FAIL: err did not hold");
    end
  endtask

  initial begin
    repeat (2) @(negedge ck);
    rst_n = 1'b1;
    for (int i = 0; i < 40; i++) begin
      logic [W-1:0] a, b;
      a = {$urandom, $urandom};
      b = ~a;
      if (i % 2 == 1) begin
        int k;
        k = $urandom_range(W - 1);
        b[k] = a[k];
      end
      sense(a, b, i % 2 == 1);
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
