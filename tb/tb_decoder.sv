// tb_decoder: self-checking test of the main decoder. Each of the 24
// instructions (and NOP) is assembled with random registers and immediates by
// the testbench assembler; the decoded controls are compared with values the
// testbench derives from the mnemonic: write enable and destination, source
// indices and use flags, TALU op, immediate and offset values, memory and
// branch controls. Reserved encodings must decode as no-ops.
module tb_decoder;
  import art9_pkg::*;
  import art9_asm_pkg::*;

  tword_t instr, link;
  ctrl_t  c;
  int checks = 0, failures = 0;

  decoder dut (.instr(instr), .link(link), .c(c));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rn(tidx_t t);
    return fval({14'b0, t}, 0, 2) + 4;
  endfunction

  // expectation record
  typedef struct {
    bit we; int rd; bit ua; int ra; bit ub; int rb; bit bimm; alu_op_e op;
    int imm; int boff; bit ld; bit st; br_e br; int bc;
  } ex_t;

  task automatic cmp(string nm, ex_t e);
    bit bad;
    bad = 0;
    if (c.we != e.we || c.load != e.ld || c.store != e.st || c.br != e.br) bad = 1;
    if (e.we && rn(c.rd) != e.rd) bad = 1;
    if (c.use_a != e.ua || (e.ua && rn(c.ra) != e.ra)) bad = 1;
    if (c.use_b != e.ub || (e.ub && rn(c.rb) != e.rb)) bad = 1;
    if (e.we || e.st) begin
      if (c.op != e.op || c.b_imm != e.bimm) bad = 1;
      if (e.bimm && fval(c.imm, 0, 9) != e.imm) bad = 1;
    end
    if (e.br != BR_NONE && fval(c.boff, 0, 9) != e.boff) bad = 1;
    if ((e.br == BR_BEQ || e.br == BR_BNE) && t2i(c.bcond) != e.bc) bad = 1;
    checks++;
    if (bad) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %p", nm, c);
    end
  endtask

  initial begin
    ex_t e;
    int ta, tb, im, f, lk;
    alu_op_e rops [12] = '{ALU_PASSB, ALU_PTI, ALU_NTI, ALU_STI, ALU_AND, ALU_OR, ALU_XOR,
                           ALU_ADD, ALU_SUB, ALU_SR, ALU_SL, ALU_COMP};
    for (int n = 0; n < 300; n++) begin
      ta = $urandom_range(8); tb = $urandom_range(8);
      lk = int'($urandom_range(19682)) - 9841; link = put('0, 0, 9, lk);
      // R-type
      for (f = 0; f < 12; f++) begin
        instr = a_r(f, ta, tb); #1;
        e = '{1, ta, (f > 3), ta, 1, tb, 0, rops[f], 0, 0, 0, 0, BR_NONE, 0};
        cmp("R", e);
      end
      // I-type
      im = int'($urandom_range(26)) - 13;
      instr = a_addi(ta, im); #1;
      if (im == 0) e = '{0, 0, 0, 0, 0, 0, 0, ALU_ADD, 0, 0, 0, 0, BR_NONE, 0};
      else e = '{1, ta, 1, ta, 0, 0, 1, ALU_ADD, im, 0, 0, 0, BR_NONE, 0};
      cmp("ADDI", e);
      instr = a_i(IF_ANDI, ta, im); #1;
      e = '{1, ta, 1, ta, 0, 0, 1, ALU_AND, im, 0, 0, 0, BR_NONE, 0}; cmp("ANDI", e);
      instr = a_i(IF_SRI, ta, im); #1;
      e = '{1, ta, 1, ta, 0, 0, 1, ALU_SR, digit(im,0) + 3*digit(im,1), 0, 0, 0, BR_NONE, 0};
      cmp("SRI", e);
      instr = a_i(IF_SLI, ta, im); #1;
      e = '{1, ta, 1, ta, 0, 0, 1, ALU_SL, digit(im,0) + 3*digit(im,1), 0, 0, 0, BR_NONE, 0};
      cmp("SLI", e);
      im = int'($urandom_range(80)) - 40;
      instr = a_lui(ta, im); #1;
      e = '{1, ta, 0, 0, 0, 0, 1, ALU_PASSB, im * 243, 0, 0, 0, BR_NONE, 0}; cmp("LUI", e);
      im = int'($urandom_range(242)) - 121;
      instr = a_li(ta, im); #1;
      e = '{1, ta, 1, ta, 0, 0, 1, ALU_LI, im, 0, 0, 0, BR_NONE, 0}; cmp("LI", e);
      // B-type
      instr = a_jal(ta, im); #1;
      e = '{1, ta, 0, 0, 0, 0, 1, ALU_PASSB, lk, im, 0, 0, BR_JAL, 0}; cmp("JAL", e);
      im = int'($urandom_range(26)) - 13;
      instr = a_jalr(ta, tb, im); #1;
      e = '{1, ta, 0, 0, 1, tb, 1, ALU_PASSB, lk, im, 0, 0, BR_JALR, 0}; cmp("JALR", e);
      f = int'($urandom_range(2)) - 1;
      im = int'($urandom_range(80)) - 40;
      instr = a_beq(tb, f, im); #1;
      e = '{0, 0, 0, 0, 1, tb, 0, ALU_PASSB, 0, im, 0, 0, BR_BEQ, f}; cmp("BEQ", e);
      instr = a_bne(tb, f, im); #1;
      e = '{0, 0, 0, 0, 1, tb, 0, ALU_PASSB, 0, im, 0, 0, BR_BNE, f}; cmp("BNE", e);
      // M-type
      im = int'($urandom_range(26)) - 13;
      instr = a_load(ta, tb, im); #1;
      e = '{1, ta, 1, tb, 0, 0, 1, ALU_ADD, im, 0, 1, 0, BR_NONE, 0}; cmp("LOAD", e);
      instr = a_store(ta, tb, im); #1;
      e = '{0, 0, 1, tb, 1, ta, 1, ALU_ADD, im, 0, 0, 1, BR_NONE, 0}; cmp("STORE", e);
      // reserved R func3 and reserved I sub-function
      instr = a_r(12 + $urandom_range(1), ta, tb); #1;
      e = '{0, 0, 0, 0, 0, 0, 0, ALU_PASSB, 0, 0, 0, 0, BR_NONE, 0}; cmp("RSV-R", e);
      instr = a_i(-4, ta, 3); #1;
      cmp("RSV-I", e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
