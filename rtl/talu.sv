// talu: the 9-trit ternary arithmetic logic unit of the EX stage.
//
// Function units, as drawn in the TALU of the core diagram: an adder (ADD,
// and SUB through a standard ternary inversion of the second operand), the
// two-input logic gates AND/OR/XOR applied trit by trit, a comparator (COMP),
// a trit shifter (SR/SL) and the one-input inverters STI/NTI/PTI. An output
// multiplexer picks the unit named by op; a direct path passes the second
// operand (MV, LUI, and the link value of JAL/JALR), and LI merges the upper
// four trits of a with the lower five of b. Purely combinational.
//
// Interface: a = TRF[Ta] (after forwarding), b = TRF[Tb] or the immediate,
// y = result written to TRF[Ta].
//
// From the paper: the function set (Table I), the logic truth tables (Fig. 1),
// COMP setting the least significant trit to +1/0/-1. This design's choices:
// the inverter sits on b so that SUB is a - b as Table I states (the diagram
// draws it on the first input); COMP clears the upper eight trits; the shift
// amount is the signed value k of b's two low trits, SL multiplies by 3^k and
// SR by 3^-k, filling with 0; ADD and SUB wrap modulo 3^9.
module talu
  import art9_pkg::*;
(
  input  alu_op_e op,
  input  tword_t  a,
  input  tword_t  b,
  output tword_t  y
);

  tword_t add_b, sum, lg_and, lg_or, lg_xor, inv_s, inv_n, inv_p, shl, shr, cmp;
  trit_t  add_co;
  int     sh;

  assign add_b = (op == ALU_SUB) ? inv_s : b;

  tadder #(.N(TRITS)) u_add (
    .a(a), .b(add_b), .cin(T_Z), .s(sum), .cout(add_co)
  );

  // Trit-wise logic and inverters
  always_comb begin
    for (int i = 0; i < TRITS; i++) begin
      lg_and[i] = t_and(a[i], b[i]);
      lg_or[i]  = t_or(a[i], b[i]);
      lg_xor[i] = t_xor(a[i], b[i]);
      inv_s[i]  = t_sti(b[i]);
      inv_n[i]  = t_nti(b[i]);
      inv_p[i]  = t_pti(b[i]);
    end
  end

  // Shifter: amount from the two low trits of b (-4..4)
  always_comb begin
    sh  = field_val(b, 0, 2);
    shl = WORD_ZERO;
    shr = WORD_ZERO;
    for (int i = 0; i < TRITS; i++) begin
      if (i - sh >= 0 && i - sh < TRITS) shl[i] = a[i-sh];
      if (i + sh >= 0 && i + sh < TRITS) shr[i] = a[i+sh];
    end
  end

  // Comparator: the most significant differing trit decides
  always_comb begin
    cmp = WORD_ZERO;
    for (int i = 0; i < TRITS; i++) begin
      if (t2i(a[i]) > t2i(b[i]))      cmp[0] = T_P;
      else if (t2i(a[i]) < t2i(b[i])) cmp[0] = T_N;
    end
  end

  always_comb begin
    unique case (op)
      ALU_PASSB: y = b;
      ALU_LI:    y = {a[8:5], b[4:0]};
      ALU_STI:   y = inv_s;
      ALU_NTI:   y = inv_n;
      ALU_PTI:   y = inv_p;
      ALU_AND:   y = lg_and;
      ALU_OR:    y = lg_or;
      ALU_XOR:   y = lg_xor;
      ALU_ADD,
      ALU_SUB:   y = sum;
      ALU_SR:    y = shr;
      ALU_SL:    y = shl;
      ALU_COMP:  y = cmp;
      default:   y = WORD_ZERO;
    endcase
  end

endmodule
