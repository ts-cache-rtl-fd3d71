// ts_cross_sense_amp: behavioural model of one data column's input switch and latch-type
// sense amplifier (SA). This is an analog circuit; the model is not synthesizable.
//
// The switch (four PMOS, P1..P4) connects BL->IN and BLB->INB while SWT is low and swaps
// them (BLB->IN, BL->INB) while SWT is high. On each rising edge of SAE the latch SA resolves
//   Q = (V(IN) - V(INB) > VOS_UV)
// so a differential smaller than the SA's own offset resolves the wrong way. Cross-sensing
// senses once with SWT low and once with SWT high; for a strong cell the two outcomes differ,
// for a weak one they are equal, which the error detector flags.
//
// Charge sharing (as in the published noise analysis): with SWT low the SA inputs take the bitline
// voltages. When SWT swaps them, the charge held on the input node is shared with the newly
// connected bitline:
//   V(IN)  = (C_BL*V(BLB) + C_IN*V(IN)prev)  / (C_BL + C_IN)
//   V(INB) = (C_BL*V(BL)  + C_IN*V(INB)prev) / (C_BL + C_IN)
// which shrinks the second differential by (C_BL-C_IN)/(C_BL+C_IN). The capacitances follow
// the published example (C_BL = 50 fF, C_IN = 0.5 fF), here in units of 0.1 fF; BL and BLB,
// and IN and INB, are taken as equal. The bitlines themselves are not loaded back by the model.
//
// Interface: voltages are integers in microvolts. Q changes right after the rising edge of
// SAE and holds until the next one. The offset VOS_UV is a per-instance parameter (a device
// property); its default 0 is this model's choice.
module ts_cross_sense_amp #(
  parameter int VOS_UV = 0,
  parameter int C_BL   = 500,
  parameter int C_IN   = 5
) (
  input  int   bl_uv,
  input  int   blb_uv,
  input  logic swt,
  input  logic sae,
  output logic q
);

  int in_uv;
  int inb_uv;

  initial begin
    in_uv  = 0;
    inb_uv = 0;
    q      = 1'b0;
  end

  always @(posedge sae) begin
    if (!swt) begin
      in_uv  = bl_uv;
      inb_uv = blb_uv;
    end else begin
      in_uv  = int'((longint'(C_BL) * blb_uv + longint'(C_IN) * in_uv)  / (longint'(C_BL) + longint'(C_IN)));
      inb_uv = int'((longint'(C_BL) * bl_uv  + longint'(C_IN) * inb_uv) / (longint'(C_BL) + longint'(C_IN)));
    end
    q <= (in_uv - inb_uv) > VOS_UV;
  end

endmodule
