// ts_tag_array: tag array of the TS cache. Each of the SETS rows holds the tags of all WAYS
// ways (two 32-bit tags, a 64-bit row), as in the prototype's four 64-row x 64-column tag
// arrays. The tag array is small and short-bitlined and is read with conventional sensing,
// so it is modelled as an ordinary synchronous memory: RD_EN on a rising CK edge reads row
// INDEX, and RTAG/RVALID hold that row from the next cycle until the next read.
// WE writes WTAG into way WWAY of row INDEX and marks it valid.
// The valid bit per way (flip-flops, cleared by reset) is this design's addition: the published design
// names only the tags.
module ts_tag_array
  import ts_pkg::*;
#(
  parameter int unsigned N_SETS = SETS,
  parameter int unsigned N_WAYS = WAYS,
  parameter int unsigned TW     = TAG_W
) (
  input  logic                      ck,
  input  logic                      rst_n,
  input  logic                      rd_en,
  input  logic [$clog2(N_SETS)-1:0] index,
  input  logic                      we,
  input  logic [$clog2(N_WAYS)-1:0] wway,
  input  logic [TW-1:0]             wtag,
  output logic [TW-1:0]             rtag   [N_WAYS],
  output logic [N_WAYS-1:0]         rvalid
);

  logic [TW-1:0]     tags  [N_SETS][N_WAYS];
  logic [N_WAYS-1:0] valid [N_SETS];

  always_ff @(posedge ck) begin
    if (we) tags[index][wway] <= wtag;
    if (rd_en) begin
      for (int w = 0; w < int'(N_WAYS); w++) rtag[w] <= tags[index][w];
    end
  end

  always_ff @(posedge ck or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(N_SETS); s++) valid[s] <= '0;
      rvalid <= '0;
    end else begin
      if (we) valid[index][wway] <= 1'b1;
      if (rd_en) rvalid <= valid[index];
    end
  end

endmodule
