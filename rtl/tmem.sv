// tmem: synchronous single-port memory of 9-trit words, used for both the
// ternary instruction memory (TIM) and the ternary data memory (TDM).
//
// One port serves reads and writes. When en is high at a rising clock edge
// the word at addr is copied to rdata (one-cycle read latency, read-first:
// a write returns the old contents) and, if we is high, wdata is stored.
// When en is low rdata keeps its value, which lets the pipeline hold a
// fetched instruction during a stall.
//
// The 9-trit address is read as an unsigned number (signed value + 9841,
// 0..19682) and taken modulo DEPTH. The default DEPTH covers the whole 9-trit
// address range. The paper gives the synchronous single-port organisation;
// the address mapping, read-first behaviour and enable are this design's
// choices. The array is not reset.
module tmem
  import art9_pkg::*;
#(
  parameter int DEPTH = WORDS
) (
  input  logic   clk,
  input  logic   en,
  input  logic   we,
  input  tword_t addr,
  input  tword_t wdata,
  output tword_t rdata
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  tword_t         mem [DEPTH];
  logic [AW-1:0]  a;

  always_comb begin
    a = AW'((word_val(addr) + WORD_OFS) % DEPTH);
  end

  always_ff @(posedge clk) begin
    if (en) begin
      rdata <= mem[a];
      if (we) mem[a] <= wdata;
    end
  end

endmodule
