// tb_ts_bitcell_array: checks the bitcell-array model: writes with bit enables, precharge,
// and a discharge of rate*n on the bitline of the stored 0 side (BLB for a 1, BL for a 0),
// clamped at 0 V. Expected rates come from the same device function the model documents.
module tb_ts_bitcell_array;
  import ts_pkg::*;
  localparam int ROWS = 8, COLS = 16, VDD = 500_000, RMIN = 3_000, RMAX = 30_000, SEED = 5;

  logic            ck = 1'b0, pre = 1'b0, wle = 1'b0, we = 1'b0;
  logic [2:0]      row;
  logic [COLS-1:0] wbit_en, wdata;
  int              bl_uv [COLS], blb_uv [COLS];
  logic [COLS-1:0] ref_mem [ROWS];
  int              checks = 0, failures = 0;

  ts_bitcell_array #(.ROWS(ROWS), .COLS(COLS), .VDD_UV(VDD), .RATE_MIN_UV(RMIN),
                     .RATE_MAX_UV(RMAX), .SEED(SEED)) dut (.*);

  always #5 ck = ~ck;

  task automatic read_check(input int r, input int n);
    // PRE and WLE are sampled on falling edges: drive them just after rising edges.
    @(posedge ck) #1 begin row = 3'(r); pre = 1'b1; end
    @(posedge ck) #1 begin pre = 1'b0; wle = 1'b1; end
    repeat (n) @(posedge ck);
    #1 wle = 1'b0;
    for (int c = 0; c < COLS; c++) begin
      int rate, low;
      rate = ts_cell_rate(r, c, SEED, RMIN, RMAX);
      low  = VDD - rate * n;
      if (low < 0) low = 0;
      checks++;
      if (ref_mem[r][c] ? (bl_uv[c] != VDD || blb_uv[c] != low)
                        : (blb_uv[c] != VDD || bl_uv[c] != low)) begin
        failures++;
        $display("FAIL row %0d col %0d bit %0b: BL=%0d BLB=%0d expected low %0d", r, c,
                 ref_mem[r][c], bl_uv[c], blb_uv[c], low);
      end
    end
  endtask

  initial begin
    // fill all rows
    for (int r = 0; r < ROWS; r++) begin
      @(negedge ck) begin
        row = 3'(r); we = 1'b1; wbit_en = '1; wdata = COLS'($urandom);
        ref_mem[r] = wdata;
      end
    end
    // partial write: only the enabled bits change
    @(negedge ck) begin
      row = 3'd3; wbit_en = 16'h00F0; wdata = 16'hABCD;
      ref_mem[3] = (ref_mem[3] & ~16'h00F0) | (16'hABCD & 16'h00F0);
    end
    @(negedge ck) we = 1'b0;
    for (int r = 0; r < ROWS; r++) read_check(r, 1 + r);
    read_check(2, 40);  // deep discharge, clamps at 0 for the fast cells
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10_000) @(posedge ck);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
