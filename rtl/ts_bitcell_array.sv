// ts_bitcell_array: behavioural model of a 6T bitcell array with its bitline precharge,
// write buffers, row decoder and wordline drivers. The bitline discharge is analog, so the
// model is not synthesizable; its storage is an ordinary array.
//
// Operation, all on the internal clock CK:
//  * write: on a rising CK edge with WE high, every column whose WBIT_EN bit is set in row
//    ROW takes the matching WDATA bit (the write buffers drive the bitlines).
//  * precharge: on each falling CK edge with PRE high, every BL and BLB returns to VDD_UV.
//  * read: on each falling CK edge with WLE high, the cell of row ROW pulls down one bitline
//    of its column (BLB when it stores 1, BL when it stores 0) by its discharge rate, in uV
//    per CK cycle, down to 0 V. After n CK cycles of WLE the differential BL-BLB is
//    +/- n*rate. Updating on the falling edge keeps the bitlines stable when the timing
//    signals change on the rising edge.
// The discharge rate of each cell is ts_pkg::ts_cell_rate(row, col, SEED, RATE_MIN_UV,
// RATE_MAX_UV): a fixed pseudo-random value that stands for the cell's process variation.
// The rate range is this model's choice; the precharge level defaults to the 0.5 V supply
// that the prototype is characterised at.
module ts_bitcell_array
  import ts_pkg::*;
#(
  parameter int ROWS        = 256,
  parameter int COLS        = 512,
  parameter int VDD_UV      = 500_000,
  parameter int RATE_MIN_UV = 3_000,
  parameter int RATE_MAX_UV = 30_000,
  parameter int SEED        = 1
) (
  input  logic                    ck,
  input  logic                    pre,
  input  logic                    wle,
  input  logic [$clog2(ROWS)-1:0] row,
  input  logic                    we,
  input  logic [COLS-1:0]         wbit_en,
  input  logic [COLS-1:0]         wdata,
  output int                      bl_uv  [COLS],
  output int                      blb_uv [COLS]
);

  logic [COLS-1:0] mem [ROWS];

  // Rate table of the cells is computed, not stored: one lookup per column and cycle.
  function automatic int rate_of(input int r, input int c);
    return ts_cell_rate(r, c, SEED, RATE_MIN_UV, RATE_MAX_UV);
  endfunction

  initial begin
    for (int c = 0; c < COLS; c++) begin
      bl_uv[c]  = VDD_UV;
      blb_uv[c] = VDD_UV;
    end
  end

  // Write buffers.
  always @(posedge ck) begin
    if (we) mem[row] <= (mem[row] & ~wbit_en) | (wdata & wbit_en);
  end

  // Precharge and bitline discharge.
  always @(negedge ck) begin
    if (pre) begin
      for (int c = 0; c < COLS; c++) begin
        bl_uv[c]  <= VDD_UV;
        blb_uv[c] <= VDD_UV;
      end
    end else if (wle) begin
      logic [COLS-1:0] cells;
      cells = mem[row];
      for (int c = 0; c < COLS; c++) begin
        int r;
        r = rate_of(int'(row), c);
        if (cells[c]) blb_uv[c] <= (blb_uv[c] > r) ? blb_uv[c] - r : 0;
        else          bl_uv[c]  <= (bl_uv[c]  > r) ? bl_uv[c]  - r : 0;
      end
    end
  end

endmodule
