// branch_unit: branch-target calculator and condition checker of the ID stage.
//
// For BEQ, BNE and JAL the target is the PC of the branch instruction plus
// the sign-carrying offset; for JALR it is the (forwarded) register TRF[Tb]
// plus the offset. BEQ is taken when the least significant trit of TRF[Tb]
// equals the B trit of the instruction, BNE when it differs; JAL and JALR are
// always taken. Purely combinational; the PC generator uses target and taken
// at the next clock edge, so a taken branch costs one bubble.
//
// From the paper: resolving branches in ID with a dedicated target adder and
// condition checker, and the conditions of Table I. This design's choices:
// offsets are relative to the branch's own PC, and the whole 9-trit TRF[Tb]
// (not only its lowest trit) is forwarded in, since JALR needs it as base.
//
// The target adder's carry-out is left unconnected on purpose: targets wrap
// modulo 3^9 like the PC.
module branch_unit
  import art9_pkg::*;
(
  input  br_e    br,
  input  tword_t pc,
  input  tword_t base,
  input  tword_t off,
  input  trit_t  bcond,
  output logic   taken,
  output tword_t target
);

  tword_t add_a;
  trit_t  co;

  assign add_a = (br == BR_JALR) ? base : pc;

  tadder #(.N(TRITS)) u_tgt (
    .a(add_a), .b(off), .cin(T_Z), .s(target), .cout(co)
  );

  always_comb begin
    unique case (br)
      BR_BEQ:         taken = (t2i(base[0]) == t2i(bcond));
      BR_BNE:         taken = (t2i(base[0]) != t2i(bcond));
      BR_JAL, BR_JALR: taken = 1'b1;
      default:        taken = 1'b0;
    endcase
  end

endmodule
