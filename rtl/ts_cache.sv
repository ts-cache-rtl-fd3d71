// ts_cache: the timing-speculation (TS) L1 cache, 32 KB, 2-way set associative, 64-byte
// lines, one 64-bit read/write port.
//
// Blocks: the tag array (two 32-bit tags per set) and tag comparator, one ts_data_array per
// way (each with cross-sensing SAs and 8 error detectors), the timing control that sequences
// every read in cycles of the internal clock CK, and the output multiplexer that selects the
// requested word of the hit way (WAYSEL = {way, word}).
//
// Read: the data arrays of both ways are precharged, discharged for t_wle CK cycles and
// cross-sensed while the tag array is read and compared. Only the error flag of the
// requested 64-bit segment of the hit way matters (errors in the other way or in other
// segments are never delivered). If it is set, ERR rises and the timing control adds an
// extra cycle: the wordline is enabled again for t_ext CK cycles with no precharge, so the
// bitlines keep discharging, and the column is cross-sensed again, until the flag is clear.
// A miss ends after the first pass (refilling is left to the requester).
//
// Port protocol (this design's choice; CEN and WEN are low active, as usual for SRAM macros):
//  * a request is taken on a rising CK edge with READY high and CEN low;
//  * WEN low: write WDATA into word WORD of way WAY in set INDEX, and write TAG as that way's
//    tag (marking it valid); READY returns after one CK cycle;
//  * WEN high: read; RVALID rises when the word is correct and stays high, with Q and HIT,
//    until the next request is taken. PRE rises at the edge that takes the request, and
//    RVALID t_pre+t_wle+6 CK cycles later, plus t_ext+6 per extra cycle.
//  * ERR is high from the check of a failing pass (the cycle after ELCH) until the check of
//    the pass that reads correctly.
//  * PASS_DONE pulses at the end of every sensing pass; FIRST_PASS marks the first pass,
//    whose Q is the speculative, uncorrected read (used to measure bit error rates).
module ts_cache
  import ts_pkg::*;
#(
  parameter int RATE_MIN_UV = 3_000,
  parameter int RATE_MAX_UV = 30_000,
  parameter int VOS_MAX_UV  = 40_000,
  parameter int SEED        = 1
) (
  input  logic                 ck,
  input  logic                 rst_n,
  input  logic                 cen,
  input  logic                 wen,
  input  logic [WAY_W-1:0]     way,
  input  logic [TAG_W-1:0]     tag,
  input  logic [INDEX_W-1:0]   index,
  input  logic [WORD_W-1:0]    word,
  input  logic [WORD_BITS-1:0] wdata,
  input  ts_timing_cfg_t       cfg,
  output logic                 ready,
  output logic [WORD_BITS-1:0] q,
  output logic                 err,
  output logic                 hit,
  output logic                 rvalid,
  output logic                 pass_done,
  output logic                 first_pass
);

  typedef enum logic [1:0] {C_IDLE, C_WRITE, C_READ} cstate_t;

  typedef struct packed {
    logic [WAY_W-1:0]     way;
    logic [TAG_W-1:0]     tag;
    logic [INDEX_W-1:0]   index;
    logic [WORD_W-1:0]    word;
    logic [WORD_BITS-1:0] wdata;
  } req_t;

  cstate_t cstate;
  req_t    req_q;
  logic    accept, rd_start, err_valid;

  // Timing signals.
  logic pre, wle, sae, swt, qlch, dtc, elch, tc_done, tc_busy;

  // Tag path.
  logic [TAG_W-1:0]    rtag [WAYS];
  logic [WAYS-1:0]     tvalid;
  logic [WAY_W-1:0]    hit_way;
  logic [WAYSEL_W-1:0] waysel;

  // Data path.
  logic [LINE_BITS-1:0] lines [WAYS];
  logic [WORDS-1:0]     seg_err [WAYS];
  logic [LINE_BITS-1:0] wbit_en;
  logic                 err_sel;

  assign ready    = (cstate == C_IDLE);
  assign accept   = ready && !cen;
  assign rd_start = accept && wen;

  always_ff @(posedge ck or negedge rst_n) begin
    if (!rst_n) begin
      cstate    <= C_IDLE;
      req_q     <= '0;
      rvalid    <= 1'b0;
      err_valid <= 1'b0;
    end else begin
      if (accept) begin
        req_q     <= '{way: way, tag: tag, index: index, word: word, wdata: wdata};
        cstate    <= wen ? C_READ : C_WRITE;
        rvalid    <= 1'b0;
        err_valid <= 1'b0;
      end else begin
        if (cstate == C_WRITE) cstate <= C_IDLE;
        if (cstate == C_READ && tc_done) begin
          cstate <= C_IDLE;
          rvalid <= 1'b1;
        end
        if (pass_done) err_valid <= 1'b1;
      end
    end
  end

  ts_timing_control u_tc (
    .ck, .rst_n, .start(rd_start), .cfg, .err(err_sel),
    .pre, .wle, .sae, .swt, .qlch, .dtc, .elch,
    .pass_done, .first_pass, .done(tc_done), .busy(tc_busy)
  );

  ts_tag_array u_tag (
    .ck, .rst_n, .rd_en(rd_start), .index(accept ? index : req_q.index),
    .we(cstate == C_WRITE), .wway(req_q.way), .wtag(req_q.tag),
    .rtag, .rvalid(tvalid)
  );

  ts_tag_comparator u_cmp (
    .rtag, .rvalid(tvalid), .req_tag(req_q.tag), .req_word(req_q.word),
    .hit, .hit_way, .waysel
  );

  assign wbit_en = LINE_BITS'({WORD_BITS{1'b1}}) << (req_q.word * WORD_BITS);

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    ts_data_array #(
      .ROWS(SETS), .COLS(LINE_BITS), .SEG(WORD_BITS),
      .RATE_MIN_UV(RATE_MIN_UV), .RATE_MAX_UV(RATE_MAX_UV), .VOS_MAX_UV(VOS_MAX_UV),
      .SEED(SEED + 7919 * w)
    ) u_data (
      .ck, .rst_n, .pre, .wle, .swt, .sae, .qlch, .dtc, .elch,
      .row(req_q.index),
      .we(cstate == C_WRITE && req_q.way == WAY_W'(w)),
      .wbit_en, .wdata({WORDS{req_q.wdata}}),
      .q1(lines[w]), .err(seg_err[w])
    );
  end

  // Only the requested segment of the hit way can stall the read.
  assign err_sel = hit && seg_err[hit_way][req_q.word];
  assign err     = err_sel && (err_valid || pass_done) && (cstate == C_READ);

  ts_output_mux u_mux (.lines, .waysel, .q);

  // The tag array must hold the read tags through the whole access.
  a_busy: assert property (@(posedge ck) disable iff (!rst_n) (cstate == C_READ) |-> !accept);
  a_tc:   assert property (@(posedge ck) disable iff (!rst_n) tc_busy |-> (cstate == C_READ));

endmodule
