// tb_ts_tag_array: writes random tags into random ways of random sets and reads rows back,
// comparing tags and valid bits with a reference model kept in the testbench.
module tb_ts_tag_array;
  import ts_pkg::*;
  logic ck = 1'b0, rst_n = 1'b0, rd_en = 1'b0, we = 1'b0;
  logic [7:0]  index;
  logic        wway;
  logic [31:0] wtag;
  logic [31:0] rtag [2];
  logic [1:0]  rvalid;
  logic [31:0] ref_tag [256][2];
  logic [1:0]  ref_v [256];
  int checks = 0, failures = 0;

  ts_tag_array dut (.*);
  always #5 ck = ~ck;

  initial begin
    for (int s = 0; s < 256; s++) ref_v[s] = '0;
    repeat (2) @(negedge ck);
    rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      @(negedge ck) begin
        we = 1'b1; rd_en = 1'b0;
        index = 8'($urandom); wway = 1'($urandom); wtag = $urandom;
        ref_tag[index][wway] = wtag;
        ref_v[index][wway] = 1'b1;
      end
    end
    @(negedge ck) we = 1'b0;
    for (int i = 0; i < 256; i++) begin
      @(negedge ck) begin rd_en = 1'b1; index = 8'(i); end
      @(negedge ck) rd_en = 1'b0;
      checks++;
      if (rvalid !== ref_v[i] || (ref_v[i][0] && rtag[0] !== ref_tag[i][0])
          || (ref_v[i][1] && rtag[1] !== ref_tag[i][1])) begin
        failures++;
        $display("FAIL set %0d: valid %b/%b tags %h %h", i, rvalid, ref_v[i], rtag[0], rtag[1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000) @(posedge ck);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
