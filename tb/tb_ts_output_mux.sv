// tb_ts_output_mux: random 512-bit lines in both ways; every WAYSEL value must return the
// matching 64-bit word, cut out here bit by bit.
module tb_ts_output_mux;
  logic [511:0] lines [2];
  logic [3:0]   waysel;
  logic [63:0]  q;
  int checks = 0, failures = 0;

  ts_output_mux dut (.*);

  initial begin
    for (int i = 0; i < 50; i++) begin
      for (int w = 0; w < 2; w++)
        for (int k = 0; k < 16; k++) lines[w][k*32 +: 32] = $urandom;
      for (int s = 0; s < 16; s++) begin
        logic [63:0] e;
        waysel = 4'(s);
        for (int b = 0; b < 64; b++) e[b] = lines[s / 8][(s % 8) * 64 + b];
        #1;
        checks++;
        if (q !== e) begin
          failures++;
          $display("FAIL waysel %0d: %h expected %h", s, q, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
