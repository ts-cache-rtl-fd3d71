// tb_ts_tag_comparator: random stored tags, valid bits and requests (a third of them forced
// to match a way); checks HIT, HIT_WAY and WAYSEL = {way, word}.
module tb_ts_tag_comparator;
  logic [31:0] rtag [2];
  logic [1:0]  rvalid;
  logic [31:0] req_tag;
  logic [2:0]  req_word;
  logic        hit, hit_way;
  logic [3:0]  waysel;
  int checks = 0, failures = 0;

  ts_tag_comparator dut (.*);

  initial begin
    for (int i = 0; i < 2000; i++) begin
      bit e_hit, e_way;
      rtag[0] = $urandom; rtag[1] = $urandom;
      rvalid = 2'($urandom);
      req_word = 3'($urandom);
      case ($urandom_range(2))
        0: req_tag = rtag[0];
        1: req_tag = rtag[1];
        default: req_tag = $urandom;
      endcase
      if (i % 7 == 0) rtag[1] = rtag[0];
      #1;
      e_hit = (rvalid[0] && rtag[0] == req_tag) || (rvalid[1] && rtag[1] == req_tag);
      e_way = !(rvalid[0] && rtag[0] == req_tag) && (rvalid[1] && rtag[1] == req_tag);
      checks++;
      if (hit !== e_hit || (e_hit && (hit_way !== e_way || waysel !== {e_way, req_word}))) begin
        failures++;
        $display("FAIL: hit %b/%b way %b/%b waysel %h", hit, e_hit, hit_way, e_way, waysel);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
