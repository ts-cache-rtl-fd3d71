// ts_timing_control: read sequencer of the TS cache, counting cycles of the internal clock CK.
//
// A read (START for one CK cycle while idle) runs the first cycle:
//   PRE   t_pre CK cycles   bitlines precharged
//   WLE   t_wle CK cycles   the selected wordline discharges the bitlines
//   SAE1  1                 first sensing, SA inputs straight
//   LCH   1                 QLCH: error detectors keep Q1; SWT rises
//   SAE2  1                 second sensing with SWT high (inputs swapped)
//   DTC   1                 detectors compare Q1 with Q2
//   ELCH  1                 the comparison is latched into ERR
//   CHK   1                 PASS_DONE; ERR (input) is checked
// If ERR is low in CHK, DONE is high in that cycle and the sequencer is idle in the next.
// If ERR is high, an extra cycle follows: WLE again for t_ext CK cycles without precharge,
// so the bitlines keep discharging, then SAE1..CHK again. Extra cycles repeat until ERR is
// low. A read thus takes t_pre+t_wle+6 CK cycles, plus t_ext+6 for each extra cycle.
// All outputs are registered. The order of the signals follows the published timing diagram;
// the one-CK widths of the sensing pulses and the counts are this design's choice, and
// counts of 0 are treated as 1.
module ts_timing_control
  import ts_pkg::*;
(
  input  logic           ck,
  input  logic           rst_n,
  input  logic           start,
  input  ts_timing_cfg_t cfg,
  input  logic           err,
  output logic           pre,
  output logic           wle,
  output logic           sae,
  output logic           swt,
  output logic           qlch,
  output logic           dtc,
  output logic           elch,
  output logic           pass_done,
  output logic           first_pass,
  output logic           done,
  output logic           busy
);

  ts_tc_state_t     state, state_n;
  logic [CFG_W-1:0] cnt, cnt_n;
  logic             first_n;
  logic [CFG_W-1:0] t_wle_q, t_ext_q;  // wordline counts held for the whole read

  function automatic logic [CFG_W-1:0] len(input logic [CFG_W-1:0] v);
    return (v == '0) ? CFG_W'(1) : v;
  endfunction

  always_comb begin
    state_n = state;
    cnt_n   = cnt;
    first_n = first_pass;
    unique case (state)
      TC_IDLE: if (start) begin
        state_n = TC_PRE;
        cnt_n   = len(cfg.t_pre);
        first_n = 1'b1;
      end
      TC_PRE: if (cnt == CFG_W'(1)) begin
        state_n = TC_WLE;
        cnt_n   = len(t_wle_q);
      end else cnt_n = cnt - 1'b1;
      TC_WLE, TC_EXT: if (cnt == CFG_W'(1)) state_n = TC_SAE1;
                      else cnt_n = cnt - 1'b1;
      TC_SAE1: state_n = TC_LCH;
      TC_LCH:  state_n = TC_SAE2;
      TC_SAE2: state_n = TC_DTC;
      TC_DTC:  state_n = TC_ELCH;
      TC_ELCH: state_n = TC_CHK;
      TC_CHK: if (err) begin
        state_n = TC_EXT;
        cnt_n   = len(t_ext_q);
        first_n = 1'b0;
      end else state_n = TC_IDLE;
      default: state_n = TC_IDLE;
    endcase
  end

  always_ff @(posedge ck or negedge rst_n) begin
    if (!rst_n) begin
      state      <= TC_IDLE;
      cnt        <= '0;
      first_pass <= 1'b0;
      t_wle_q    <= '0;
      t_ext_q    <= '0;
    end else begin
      state      <= state_n;
      cnt        <= cnt_n;
      first_pass <= first_n;
      if (state == TC_IDLE && start) begin
        t_wle_q <= cfg.t_wle;
        t_ext_q <= cfg.t_ext;
      end
    end
  end

  // Registered timing outputs, decoded from the next state.
  always_ff @(posedge ck or negedge rst_n) begin
    if (!rst_n) begin
      {pre, wle, sae, swt, qlch, dtc, elch, pass_done} <= '0;
    end else begin
      pre       <= (state_n == TC_PRE);
      wle       <= (state_n == TC_WLE) || (state_n == TC_EXT);
      sae       <= (state_n == TC_SAE1) || (state_n == TC_SAE2);
      swt       <= (state_n == TC_LCH) || (state_n == TC_SAE2);
      qlch      <= (state_n == TC_LCH);
      dtc       <= (state_n == TC_DTC);
      elch      <= (state_n == TC_ELCH);
      pass_done <= (state_n == TC_CHK);
    end
  end

  assign done = (state == TC_CHK) && !err;
  assign busy = (state != TC_IDLE);

  // A read never runs with PRE and WLE together, and SWT is stable whenever SAE rises.
  a_pre_wle: assert property (@(posedge ck) disable iff (!rst_n) !(pre && wle));
  a_swt_sae: assert property (@(posedge ck) disable iff (!rst_n) $rose(sae) |-> $stable(swt));

endmodule
