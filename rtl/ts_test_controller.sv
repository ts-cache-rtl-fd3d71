// ts_test_controller: on-chip test controller of the TS cache prototype.
//
// After START it writes every 64-bit word of the cache by address traversal (way, then set,
// then word, in increasing order), each byte holding 0x55 or 0xAA (ts_pattern) and each line
// tagged with ts_test_tag(way, set); then it reads every word back in the same order, one
// read at a time, presenting the expected word on EXP while the read is outstanding. DONE
// rises when the last read has returned and holds until the next START. The cache's timing
// configuration is set outside and the procedure repeated for every configuration.
//
// Handshake with the cache: the request (CEN low) is held until a rising edge with READY
// high takes it; a read is complete when RVALID is high. The controller runs on the gated
// clock CK_G, which stops while the cache's ERR is high. The traversal order and the pattern
// placement are this design's choice.
module ts_test_controller
  import ts_pkg::*;
#(
  parameter int unsigned N_SETS = SETS,
  parameter int unsigned N_WAYS = WAYS
) (
  input  logic                 ck,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 ready,
  input  logic                 rvalid,
  output logic                 cen,
  output logic                 wen,
  output logic [WAY_W-1:0]     way,
  output logic [TAG_W-1:0]     tag,
  output logic [INDEX_W-1:0]   index,
  output logic [WORD_W-1:0]    word,
  output logic [WORD_BITS-1:0] wdata,
  output logic [WORD_BITS-1:0] exp,
  output logic                 reading,
  output logic                 done
);

  typedef enum logic [2:0] {T_IDLE, T_WRITE, T_READ, T_WAIT, T_DONE} tstate_t;

  localparam int unsigned AW = WAY_W + INDEX_W + WORD_W;
  localparam logic [AW-1:0] LAST = AW'(N_WAYS * N_SETS * WORDS - 1);
  localparam int unsigned LINES = N_SETS * WORDS;  // words per way

  tstate_t       state;
  logic [AW-1:0] addr;

  // Linear word address -> (way, set, word); word fastest, then set, then way.
  assign word  = WORD_W'(32'(addr) % WORDS);
  assign index = INDEX_W'((32'(addr) / WORDS) % N_SETS);
  assign way   = WAY_W'(32'(addr) / LINES);
  assign tag     = ts_test_tag(way, index);
  assign wdata   = ts_pattern(index, word);
  assign exp     = wdata;
  assign cen     = !(state == T_WRITE || state == T_READ);
  assign wen     = (state != T_WRITE);
  assign reading = (state == T_READ || state == T_WAIT);
  assign done    = (state == T_DONE);

  always_ff @(posedge ck or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE;
      addr  <= '0;
    end else begin
      unique case (state)
        T_IDLE, T_DONE: if (start) begin
          state <= T_WRITE;
          addr  <= '0;
        end
        T_WRITE: if (ready) begin
          if (addr == LAST) begin
            state <= T_READ;
            addr  <= '0;
          end else addr <= addr + 1'b1;
        end
        T_READ: if (ready) state <= T_WAIT;
        T_WAIT: if (rvalid) begin
          if (addr == LAST) state <= T_DONE;
          else begin
            state <= T_READ;
            addr  <= addr + 1'b1;
          end
        end
        default: state <= T_IDLE;
      endcase
    end
  end

endmodule
