// ts_data_array: one way of the TS cache's data array (ROWS x COLS, 256 x 512 by default).
//
// Structure, as in the published architecture: a bitcell array with precharge, write buffers
// and wordline drivers (ts_bitcell_array), one input switch and latch SA per column
// (ts_cross_sense_amp), and one error detector per SEG-bit segment (ts_error_detector), 8
// detectors for a 512-bit line and a 64-bit read port. The timing signals come from the
// cache's timing control and are shared by all columns.
//
// A read precharges (PRE), discharges the bitlines of row ROW (WLE), senses twice with the
// SA inputs swapped for the second sensing (SAE, SWT), keeps the first outcome (QLCH),
// compares (DTC) and latches the per-segment error flags (ELCH). Q1 is the whole line read in
// the last pass, ERR[s] flags segment s. A write (WE) stores WDATA where WBIT_EN is set.
//
// Process variation: the SA of column c has offset ts_col_vos(c, SEED, VOS_MAX_UV) and each
// cell its own discharge rate (see ts_bitcell_array). These device values are behavioural
// stand-ins chosen for this design; the published work characterises them only statistically.
module ts_data_array
  import ts_pkg::*;
#(
  parameter int ROWS        = 256,
  parameter int COLS        = 512,
  parameter int SEG         = 64,
  parameter int VDD_UV      = 500_000,
  parameter int RATE_MIN_UV = 3_000,
  parameter int RATE_MAX_UV = 30_000,
  parameter int VOS_MAX_UV  = 40_000,
  parameter int C_BL        = 500,
  parameter int C_IN        = 5,
  parameter int SEED        = 1
) (
  input  logic                    ck,
  input  logic                    rst_n,
  input  logic                    pre,
  input  logic                    wle,
  input  logic                    swt,
  input  logic                    sae,
  input  logic                    qlch,
  input  logic                    dtc,
  input  logic                    elch,
  input  logic [$clog2(ROWS)-1:0] row,
  input  logic                    we,
  input  logic [COLS-1:0]         wbit_en,
  input  logic [COLS-1:0]         wdata,
  output logic [COLS-1:0]         q1,
  output logic [COLS/SEG-1:0]     err
);

  int          bl_uv  [COLS];
  int          blb_uv [COLS];
  logic [COLS-1:0] q;

  ts_bitcell_array #(
    .ROWS(ROWS), .COLS(COLS), .VDD_UV(VDD_UV),
    .RATE_MIN_UV(RATE_MIN_UV), .RATE_MAX_UV(RATE_MAX_UV), .SEED(SEED)
  ) u_cells (
    .ck, .pre, .wle, .row, .we, .wbit_en, .wdata, .bl_uv, .blb_uv
  );

  for (genvar c = 0; c < COLS; c++) begin : g_col
    ts_cross_sense_amp #(
      .VOS_UV(ts_col_vos(c, SEED, VOS_MAX_UV)), .C_BL(C_BL), .C_IN(C_IN)
    ) u_sa (
      .bl_uv(bl_uv[c]), .blb_uv(blb_uv[c]), .swt, .sae, .q(q[c])
    );
  end

  for (genvar s = 0; s < COLS / SEG; s++) begin : g_det
    ts_error_detector #(.W(SEG)) u_det (
      .ck, .rst_n, .q(q[s*SEG +: SEG]), .qlch, .dtc, .elch,
      .q1(q1[s*SEG +: SEG]), .err(err[s])
    );
  end

endmodule
