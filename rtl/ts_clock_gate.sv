// ts_clock_gate: clock gating of the test logic. CK_G follows CK while ERR is low and stays
// low while ERR is high, so the test controller waits while the cache corrects a read.
// The enable (not ERR) is sampled on the falling edge of CK and ANDed with CK, the usual
// glitch-free gating cell; the cell type is this design's choice, the published design gives only the
// function. Reset opens the gate.
module ts_clock_gate (
  input  logic ck,
  input  logic rst_n,
  input  logic err,
  output logic ck_g
);

  logic en_q;

  always_ff @(negedge ck or negedge rst_n) begin
    if (!rst_n) en_q <= 1'b1;
    else        en_q <= !err;
  end

  assign ck_g = ck & en_q;

endmodule
