// trf: ternary register file, nine 9-trit registers.
//
// Registers are named by a 2-trit index read as an unsigned number (signed
// value + 4, so index (-1,-1) is register 0 and (+1,+1) register 8). Two
// read ports are asynchronous: ra_data/rb_data follow ra_idx/rb_idx in the
// same cycle. The single write port is synchronous: w_data is stored at the
// rising clock edge when we is high, and a read of the same register in that
// cycle still returns the old value (no internal bypass; the pipeline
// forwards instead).
//
// From the paper: nine registers, 2-trit indices, two asynchronous reads and
// one synchronous write. This design's choices: the unsigned index reading
// and an active-low reset that clears every register to 0.
module trf
  import art9_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  tidx_t  ra_idx,
  input  tidx_t  rb_idx,
  output tword_t ra_data,
  output tword_t rb_data,
  input  logic   we,
  input  tidx_t  w_idx,
  input  tword_t w_data
);

  tword_t regs [NREG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREG; i++) regs[i] <= WORD_ZERO;
    end else if (we) begin
      regs[idx_u(w_idx)] <= w_data;
    end
  end

  assign ra_data = regs[idx_u(ra_idx)];
  assign rb_data = regs[idx_u(rb_idx)];

endmodule
