// tadder: N-trit balanced-ternary ripple-carry adder.
//
// Each trit position is a ternary full adder: the three inputs a, b and the
// incoming carry sum to a value between -3 and +3, which is split into a sum
// trit s (-1..+1) and a carry trit c (-1..+1) with a + b + cin = s + 3c.
// The carries ripple from trit 0 upward. The result wraps modulo 3^N and the
// final carry is brought out. Purely combinational.
//
// The paper uses a ternary adder in the TALU, the PC generator (+1) and the
// branch-target calculator but does not describe its structure; the ripple
// chain is this design's choice as the simplest correct form. Trits use the
// binary encoding of art9_pkg.
module tadder
  import art9_pkg::*;
#(
  parameter int N = 9
) (
  input  trit_t [N-1:0] a,
  input  trit_t [N-1:0] b,
  input  trit_t         cin,
  output trit_t [N-1:0] s,
  output trit_t         cout
);

  trit_t [N:0] c;

  // One ternary full adder: returns {carry, sum}
  function automatic logic [3:0] tfa(trit_t ta, trit_t tb, trit_t tc);
    int v;
    v = t2i(ta) + t2i(tb) + t2i(tc);
    case (v)
      -3:      return {T_N, T_Z};
      -2:      return {T_N, T_P};
      -1:      return {T_Z, T_N};
       1:      return {T_Z, T_P};
       2:      return {T_P, T_N};
       3:      return {T_P, T_Z};
      default: return {T_Z, T_Z};
    endcase
  endfunction

  assign c[0] = cin;

  for (genvar i = 0; i < N; i++) begin : g_fa
    assign {c[i+1], s[i]} = tfa(a[i], b[i], c[i]);
  end

  assign cout = c[N];

endmodule
