// tb_branch_unit: self-checking test of the branch-target calculator and
// condition checker. Random branch kinds, PCs, bases, offsets and B trits;
// expected target = PC + offset (JALR: base + offset) modulo 3^9 and taken
// per Table I (BEQ: trit 0 of base == B, BNE: !=, JAL/JALR: always).
module tb_branch_unit;
  import art9_pkg::*;
  import art9_asm_pkg::*;

  br_e br;
  tword_t pc, base, off, target, bw;
  trit_t bcond;
  logic taken;
  int checks = 0, failures = 0;

  branch_unit dut (.br(br), .pc(pc), .base(base), .off(off), .bcond(bcond),
                   .taken(taken), .target(target));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int vp, vb, vo, vc, et;
    bit ek;
    for (int n = 0; n < 4000; n++) begin
      br = br_e'($urandom_range(4));
      vp = int'($urandom_range(19682)) - 9841;
      vb = int'($urandom_range(19682)) - 9841;
      vo = int'($urandom_range(242)) - 121;
      vc = int'($urandom_range(2)) - 1;
      pc = put('0, 0, 9, vp); base = put('0, 0, 9, vb); off = put('0, 0, 9, vo);
      bw = put('0, 0, 1, vc); bcond = bw[0];
      #1;
      et = wrap(((br == BR_JALR) ? vb : vp) + vo);
      case (br)
        BR_BEQ:  ek = (digit(vb, 0) == vc);
        BR_BNE:  ek = (digit(vb, 0) != vc);
        BR_JAL, BR_JALR: ek = 1;
        default: ek = 0;
      endcase
      checks++;
      if (taken != ek || (ek && fval(target, 0, 9) != et)) begin
        failures++;
        if (failures < 10)
          $display("FAIL br=%s taken=%0b exp=%0b target=%0d exp=%0d", br.name(), taken, ek,
                   fval(target, 0, 9), et);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
