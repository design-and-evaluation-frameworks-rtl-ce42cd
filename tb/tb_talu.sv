// tb_talu: self-checking test of the ternary ALU. Every operation is driven
// with random operands (and hand-picked edge values); expected results come
// from integer arithmetic and the testbench's own copies of the Fig. 1 truth
// tables (art9_asm_pkg), never from the RTL's functions.
module tb_talu;
  import art9_pkg::*;
  import art9_asm_pkg::*;

  alu_op_e op;
  tword_t  a, b, y;
  int checks = 0, failures = 0;

  talu dut (.op(op), .a(a), .b(b), .y(y));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expect_of(alu_op_e o, int va, int vb);
    int k, r;
    k = digit(vb, 0) + 3 * digit(vb, 1);
    case (o)
      ALU_PASSB: return vb;
      ALU_LI: begin
        r = 0;
        for (int i = 8; i >= 5; i--) r = r * 3 + digit(va, i);
        for (int i = 4; i >= 0; i--) r = r * 3 + digit(vb, i);
        return r;
      end
      ALU_STI:  return tritwise(0, vb, 3);
      ALU_NTI:  return tritwise(0, vb, 4);
      ALU_PTI:  return tritwise(0, vb, 5);
      ALU_AND:  return tritwise(va, vb, 0);
      ALU_OR:   return tritwise(va, vb, 1);
      ALU_XOR:  return tritwise(va, vb, 2);
      ALU_ADD:  return wrap(va + vb);
      ALU_SUB:  return wrap(va - vb);
      ALU_SR:   return shift(va, -k);
      ALU_SL:   return shift(va, k);
      ALU_COMP: return (va > vb) ? 1 : (va < vb) ? -1 : 0;
      default:  return 0;
    endcase
  endfunction

  task automatic try(alu_op_e o, int va, int vb);
    int e;
    op = o; a = put('0, 0, 9, va); b = put('0, 0, 9, vb);
    #1;
    e = expect_of(o, va, vb);
    checks++;
    if (fval(y, 0, 9) != e) begin
      failures++;
      if (failures < 20)
        $display("FAIL op=%s a=%0d b=%0d y=%0d exp=%0d", o.name(), va, vb, fval(y, 0, 9), e);
    end
  endtask

  initial begin
    // directed: Fig. 1 single-trit cases and shift edges
    for (int x = -1; x <= 1; x++)
      for (int z = -1; z <= 1; z++)
        for (int o = 0; o <= int'(ALU_COMP); o++) try(alu_op_e'(o), x, z);
    try(ALU_SL, 1, 4);  try(ALU_SR, 9841, 4);  try(ALU_SR, 81, -4);
    try(ALU_SL, 5, -1); try(ALU_COMP, 9841, -9841); try(ALU_SUB, -9841, 9841);
    try(ALU_LI, 9841, -121); try(ALU_LI, -1000, 7);
    // random
    for (int i = 0; i < 4000; i++)
      try(alu_op_e'($urandom_range(int'(ALU_COMP))),
          int'($urandom_range(19682)) - 9841, int'($urandom_range(19682)) - 9841);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
