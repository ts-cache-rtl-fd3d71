// tb_ts_cache: the TS cache at full size (32 KB, 2 ways). Fills 48 sets with random lines
// and tags, then reads random words with an aggressive wordline time and checks that every
// delivered word and HIT are right, and that each read takes exactly
// t_pre + t_wle + 6 CK cycles plus t_ext + 6 for every extra cycle (counted from PASS_DONE).
// It also checks misses (one pass only, HIT low) and a write-after-read to a filled line,
// and fails if no read ever needed an extra cycle or raised ERR.
module tb_ts_cache;
  import ts_pkg::*;
  localparam int NSET = 48, TP = 2, TW = 5, TE = 3;

  logic ck = 1'b0, rst_n = 1'b0, cen = 1'b1, wen = 1'b1;
  logic [0:0]  way;
  logic [31:0] tag;
  logic [7:0]  index;
  logic [2:0]  word;
  logic [63:0] wdata, q;
  ts_timing_cfg_t cfg;
  logic ready, err, hit, rvalid, pass_done, first_pass;

  logic [31:0] ref_tag [NSET][2];
  logic [63:0] ref_data [NSET][2][8];
  int checks = 0, failures = 0, n_extra = 0, n_err_seen = 0;

  ts_cache dut (.*);
  always #5 ck = ~ck;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic request(input bit is_write, input int w, input logic [31:0] t, input int s,
                         input int wd, input logic [63:0] d);
    while (!ready) @(negedge ck);
    cen = 1'b0; wen = !is_write; way = 1'(w); tag = t; index = 8'(s); word = 3'(wd); wdata = d;
    @(negedge ck) cen = 1'b1;
  endtask

  task automatic do_read(input logic [31:0] t, input int s, input int wd, input bit e_hit,
                         input logic [63:0] e_q);
    int cyc, passes;
    bit saw_err;
    request(1'b0, 0, t, s, wd, '0);
    cyc = 1; passes = 0; saw_err = 0;
    while (!rvalid) begin
      if (pass_done) passes++;
      if (err) saw_err = 1;
      @(negedge ck);
      cyc++;
    end
    check(hit == e_hit, $sformatf("hit for set %0d", s));
    if (e_hit) check(q == e_q, $sformatf("data set %0d word %0d: %h vs %h", s, wd, q, e_q));
    check(cyc - 1 == TP + TW + 6 + (passes - 1) * (TE + 6), $sformatf("latency %0d passes %0d", cyc - 1, passes));
    if (!e_hit) check(passes == 1, "a miss ends after one pass");
    if (passes > 1) begin
      n_extra += passes - 1;
      check(saw_err, "ERR high during an extra cycle");
    end
    if (saw_err) n_err_seen++;
  endtask

  initial begin
    cfg = '{t_pre: CFG_W'(TP), t_wle: CFG_W'(TW), t_ext: CFG_W'(TE)};
    repeat (2) @(negedge ck);
    rst_n = 1'b1;
    @(negedge ck);
    for (int s = 0; s < NSET; s++)
      for (int w = 0; w < 2; w++) begin
        ref_tag[s][w] = $urandom;
        for (int k = 0; k < 8; k++) begin
          ref_data[s][w][k] = {$urandom, $urandom};
          request(1'b1, w, ref_tag[s][w], s, k, ref_data[s][w][k]);
        end
      end
    for (int i = 0; i < 300; i++) begin
      int s, w, k;
      s = $urandom_range(NSET - 1); w = $urandom_range(1); k = $urandom_range(7);
      do_read(ref_tag[s][w], s, k, 1'b1, ref_data[s][w][k]);
    end
    // misses: an unknown tag, and a set never written
    do_read(32'hDEAD_BEEF, 3, 1, 1'b0, '0);
    do_read(ref_tag[0][0], 200, 0, 1'b0, '0);
    // overwrite one word and read it back
    request(1'b1, 1, ref_tag[5][1], 5, 6, 64'h0123_4567_89AB_CDEF);
    do_read(ref_tag[5][1], 5, 6, 1'b1, 64'h0123_4567_89AB_CDEF);
    do_read(ref_tag[5][1], 5, 5, 1'b1, ref_data[5][1][5]);
    check(n_extra > 0, "extra cycles happened");
    check(n_err_seen > 0, "ERR was raised");
    $display("extra cycles %0d, reads with ERR %0d", n_extra, n_err_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000) @(posedge ck);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
