// tb_tadder: self-checking test of the 9-trit balanced-ternary adder.
// Random operands and carries (plus the extremes); the reference is integer
// addition: value(s) + 3^9 * cout must equal value(a) + value(b) + cin.
module tb_tadder;
  import art9_pkg::*;
  import art9_asm_pkg::*;

  tword_t a, b, s, cw;
  trit_t  cin, cout;
  int checks = 0, failures = 0;

  tadder #(.N(9)) dut (.a(a), .b(b), .cin(cin), .s(s), .cout(cout));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(int va, int vb, int vc);
    int exp, got;
    a = put('0, 0, 9, va); b = put('0, 0, 9, vb); cw = put('0, 0, 1, vc); cin = cw[0];
    #1;
    exp = va + vb + vc;
    got = fval(s, 0, 9) + P9 * t2i(cout);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %0d + %0d + %0d -> %0d", va, vb, vc, got);
    end
  endtask

  initial begin
    try(9841, 9841, 1);
    try(-9841, -9841, -1);
    try(9841, 1, 0);
    try(0, 0, 0);
    for (int i = 0; i < 3000; i++)
      try(int'($urandom_range(19682)) - 9841, int'($urandom_range(19682)) - 9841,
          int'($urandom_range(2)) - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
