// tb_ts_clock_gate: counts CK_G rising edges over windows with ERR low (every CK edge
// passes) and ERR high (none pass), with ERR changing right after a CK rising edge.
module tb_ts_clock_gate;
  logic ck = 1'b0, rst_n = 1'b0, err = 1'b0, ck_g;
  int   edges = 0, checks = 0, failures = 0;

  ts_clock_gate dut (.*);
  always #5 ck = ~ck;
  always @(posedge ck_g) edges++;

  task automatic window(input bit e, input int n, input int exp);
    @(posedge ck) #1 err = e;
    @(posedge ck) #1 edges = 0;
    repeat (n) @(posedge ck);
    #1;
    checks++;
    if (edges != exp) begin
      failures++;
      $display("FAIL: err=%b edges=%0d expected %0d", e, edges, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge ck);
    rst_n = 1'b1;
    window(1'b0, 10, 10);
    window(1'b1, 10, 0);
    window(1'b0, 7, 7);
    window(1'b1, 3, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1_000) @(posedge ck);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
