// tb_ts_cross_sense_amp: checks the switch + sense-amplifier model against the cross-sensing
// truth table (offset positive / negative, weak / strong differential) and the charge-sharing
// shrink of the second differential. Expected values are worked out by hand in the comments.
module tb_ts_cross_sense_amp;
  int   bl_uv, blb_uv;
  logic swt = 1'b0, sae = 1'b0;
  logic q_pos, q_neg;
  int   checks = 0, failures = 0;

  ts_cross_sense_amp #(.VOS_UV( 20_000)) u_pos (.bl_uv, .blb_uv, .swt, .sae, .q(q_pos));
  ts_cross_sense_amp #(.VOS_UV(-20_000)) u_neg (.bl_uv, .blb_uv, .swt, .sae, .q(q_neg));

  task automatic pulse_sae();
    #1 sae = 1'b1;
    #1 sae = 1'b0;
    #1;
  endtask

  // One cross-sensing: straight, then swapped. Returns {Q1, Q2} of each SA.
  task automatic cross_sense(input int bl, input int blb, output logic [1:0] p, output logic [1:0] n);
    bl_uv = bl; blb_uv = blb;
    swt = 1'b0; pulse_sae();
    p[1] = q_pos; n[1] = q_neg;
    swt = 1'b1; pulse_sae();
    p[0] = q_pos; n[0] = q_neg;
    swt = 1'b0;
  endtask

  task automatic check(input logic [1:0] got, input logic [1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got Q1Q2=%b expected %b", what, got, exp);
    end
  endtask

  logic [1:0] p, n;

  initial begin
    // Cell storing 1, weak: BL-BLB = 10 mV. VOS>0: Q1=0, second diff ~-9.8 mV -> Q2=0 (error).
    // VOS<0: Q1=1, -9.8 mV > -20 mV -> Q2=1 (false positive).
    cross_sense(500_000, 490_000, p, n);
    check(p, 2'b00, "VOS>0 weak 1");
    check(n, 2'b11, "VOS<0 weak 1 (false positive)");
    // Strong: 60 mV. Both SAs read 1 then 0.
    cross_sense(500_000, 440_000, p, n);
    check(p, 2'b10, "VOS>0 strong 1");
    check(n, 2'b10, "VOS<0 strong 1");
    // Cell storing 0, strong: BL-BLB = -60 mV. Both read 0 then 1.
    cross_sense(440_000, 500_000, p, n);
    check(p, 2'b01, "VOS>0 strong 0");
    check(n, 2'b01, "VOS<0 strong 0");
    // Weak 0: -10 mV. VOS>0: Q1=0, +9.8 mV < 20 mV -> Q2=0 (false positive).
    // VOS<0: -10 > -20 -> Q1=1, Q2=1 (error).
    cross_sense(490_000, 500_000, p, n);
    check(p, 2'b00, "VOS>0 weak 0 (false positive)");
    check(n, 2'b11, "VOS<0 weak 0");
    // Charge sharing: BL-BLB = 20.3 mV. IN = (500*479700+5*500000)/505 = 479900,
    // INB = (500*500000+5*479700)/505 = 499799, second diff = -19899 mV > -20 mV, so the
    // negative-offset SA reads Q2=1, where an ideal swap (-20.3 mV) would read 0.
    cross_sense(500_000, 479_700, p, n);
    check(n, 2'b11, "charge sharing shrinks the second differential");
    check(p, 2'b10, "VOS>0 at 20.3 mV");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
