// ts_error_counter: comparator and error counter of the test logic.
//
// It compares the cache's output word Q with the expected word EXP. At the end of the first
// sensing pass of a read (PASS_DONE with FIRST_PASS) Q is the speculative word read after
// t_wle CK cycles: its wrong bits and words measure the bit error rate of that timing, and
// ERR at that point marks a word the error detectors flagged (double-word error rate). When
// the read completes (rising edge of RVALID) the delivered word is compared again: with
// correct error detection these counts stay zero. Extra cycles and the CK cycles of the read
// phase (ACTIVE high) are counted too. CLEAR zeroes all counters. Runs on the ungated CK,
// since ERR-driven clock gating would otherwise hide the passes it must count. The set of
// counters beyond error bits and error words is this design's choice.
module ts_error_counter
  import ts_pkg::*;
(
  input  logic                 ck,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 active,
  input  logic [WORD_BITS-1:0] q,
  input  logic [WORD_BITS-1:0] exp,
  input  logic                 err,
  input  logic                 hit,
  input  logic                 pass_done,
  input  logic                 first_pass,
  input  logic                 rvalid,
  output ts_err_counts_t       cnt
);

  logic              rvalid_q;
  logic [6:0]        nbits;

  always_comb begin
    nbits = '0;
    for (int i = 0; i < int'(WORD_BITS); i++) nbits += 7'(q[i] ^ exp[i]);
  end

  always_ff @(posedge ck or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      rvalid_q <= 1'b0;
    end else begin
      rvalid_q <= rvalid;
      if (clear) cnt <= '0;
      else begin
        if (active) cnt.ck_cycles <= cnt.ck_cycles + 1;
        if (pass_done && hit) begin
          if (first_pass) begin
            cnt.raw_bit_errs  <= cnt.raw_bit_errs + 32'(nbits);
            cnt.raw_word_errs <= cnt.raw_word_errs + 32'(nbits != 0);
            cnt.err_words     <= cnt.err_words + 32'(err);
          end
          if (err) cnt.extra_cycles <= cnt.extra_cycles + 1;
        end
        if (rvalid && !rvalid_q) begin
          cnt.reads <= cnt.reads + 1;
          if (!hit) cnt.misses <= cnt.misses + 1;
          else begin
            cnt.final_bit_errs  <= cnt.final_bit_errs + 32'(nbits);
            cnt.final_word_errs <= cnt.final_word_errs + 32'(nbits != 0);
          end
        end
      end
    end
  end

endmodule
