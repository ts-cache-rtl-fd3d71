// ts_error_detector: timing-error detector of one 64-bit data segment.
//
// A bank of latches keeps the first sensing outcome Q1 (the read data). When DTC is high,
// the segment is compared bit by bit with the second outcome Q2, sensed with the SA inputs
// swapped: a correctly sensed bit gives Q2 = ~Q1, so a bit with Q1 == Q2 is a timing error.
// In silicon every bit's XOR+AND stack can pull a shared precharged node (VVDD) to ground,
// so the segment flags an error if any bit does; ELCH then latches that node into ERR, which
// holds until the next ELCH.
//
// This RTL is the synchronous equivalent of the dynamic circuit: QLCH, DTC and ELCH are
// enables sampled on the rising edge of CK, one CK cycle each, in that order (QLCH, then DTC
// after the second sensing, then ELCH). Q1 is the data output; ERR is valid from the CK cycle
// after ELCH. Reset clears the flags; the data latches are not reset.
module ts_error_detector #(
  parameter int W = 64
) (
  input  logic         ck,
  input  logic         rst_n,
  input  logic [W-1:0] q,
  input  logic         qlch,
  input  logic         dtc,
  input  logic         elch,
  output logic [W-1:0] q1,
  output logic         err
);

  logic vvdd_low;  // the shared node has been pulled down: some bit has Q1 == Q2

  always_ff @(posedge ck) begin
    if (qlch) q1 <= q;
  end

  always_ff @(posedge ck or negedge rst_n) begin
    if (!rst_n) begin
      vvdd_low <= 1'b0;
      err      <= 1'b0;
    end else begin
      if (dtc)  vvdd_low <= |(~(q1 ^ q));
      if (elch) err      <= vvdd_low;
    end
  end

endmodule
