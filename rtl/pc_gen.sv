// pc_gen: the PC generator of the IF stage.
//
// Holds the 9-trit program counter. Each cycle the PC moves to PC+1 (a
// ternary adder with carry-in +1), or to the calculated branch-target address
// when the ID stage reports a taken branch or jump, or keeps its value while
// the hazard detection unit holds the front end (load-use stall; hold wins).
// The PC changes at the rising clock edge; pc is the register output and
// addresses the instruction memory directly.
//
// From the paper: the +1 adder and the multiplexer with the calculated
// branch-target address (PC generator inset of the core diagram) and the PC
// control from the hazard unit. This design's choice: reset to unsigned
// address 0, which is the word with every trit -1.
//
// The adder's carry-out is left unconnected on purpose: the PC wraps
// modulo 3^9 like every other 9-trit address.
module pc_gen
  import art9_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   hold,
  input  logic   taken,
  input  tword_t target,
  output tword_t pc
);

  localparam tword_t PC_RESET = {TRITS{T_N}};

  tword_t pc_inc;
  trit_t  inc_co;

  tadder #(.N(TRITS)) u_inc (
    .a(pc), .b(WORD_ZERO), .cin(T_P), .s(pc_inc), .cout(inc_co)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      pc <= PC_RESET;
    else if (hold)   pc <= pc;
    else if (taken)  pc <= target;
    else             pc <= pc_inc;
  end

endmodule
