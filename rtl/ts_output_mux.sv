// ts_output_mux: the output multiplexer and drivers. Both data-array ways deliver a whole
// 512-bit line; WAYSEL = {way, word} selects one 64-bit word of one way for the read port.
// Combinational; the drivers are not modelled.
module ts_output_mux
  import ts_pkg::*;
#(
  parameter int unsigned N_WAYS = WAYS,
  parameter int unsigned LB     = LINE_BITS,
  parameter int unsigned WB     = WORD_BITS
) (
  input  logic [LB-1:0]                           lines [N_WAYS],
  input  logic [$clog2(N_WAYS)+$clog2(LB/WB)-1:0] waysel,
  output logic [WB-1:0]                           q
);

  localparam int unsigned NW = LB / WB;

  logic [$clog2(N_WAYS)-1:0] way;
  logic [$clog2(NW)-1:0]     word;

  assign {way, word} = waysel;
  assign q = lines[way][word*WB +: WB];

endmodule
