// ts_tag_comparator: compares the requested tag with the tags of all ways of the indexed set
// (combinational). HIT is high when a valid way holds the tag; HIT_WAY is that way. WAYSEL,
// the 4-bit select of the output multiplexer, is {HIT_WAY, REQ_WORD}: it picks one 64-bit
// word out of the 2 x 512 bits the two data-array ways deliver. The 4-bit width is the
// published one; what the four bits carry is this design's reading of it.
module ts_tag_comparator
  import ts_pkg::*;
#(
  parameter int unsigned N_WAYS = WAYS,
  parameter int unsigned TW     = TAG_W,
  parameter int unsigned WW     = WORD_W
) (
  input  logic [TW-1:0]                  rtag   [N_WAYS],
  input  logic [N_WAYS-1:0]              rvalid,
  input  logic [TW-1:0]                  req_tag,
  input  logic [WW-1:0]                  req_word,
  output logic                           hit,
  output logic [$clog2(N_WAYS)-1:0]      hit_way,
  output logic [$clog2(N_WAYS)+WW-1:0]   waysel
);

  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int w = 0; w < int'(N_WAYS); w++) begin
      if (!hit && rvalid[w] && rtag[w] == req_tag) begin
        hit     = 1'b1;
        hit_way = w[$clog2(N_WAYS)-1:0];
      end
    end
    waysel = {hit_way, req_word};
  end

endmodule
