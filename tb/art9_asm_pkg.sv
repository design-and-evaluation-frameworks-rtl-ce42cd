// art9_asm_pkg: testbench-side assembler and instruction-level reference model
// for the ART-9 core.
//
// The encode functions build 9-trit instruction words from mnemonics, with
// registers given as numbers 0..8 (field value = number - 4) and immediates as
// signed integers. The reference model (ref_step) executes one instruction on
// an integer machine state, computing every result from integer arithmetic and
// its own copies of the ternary truth tables, independently of the RTL. It
// also reports which registers the instruction reads, which the cycle
// predictor uses to count load-use stalls.
package art9_asm_pkg;
  import art9_pkg::*;

  localparam int P9 = 19683;

  function automatic tword_t put(tword_t w, int lo, int n, int v);
    int x, r;
    x = v;
    for (int i = 0; i < n; i++) begin
      r = ((x % 3) + 3) % 3;
      if (r == 2) r = -1;
      w[lo+i] = (r == 1) ? T_P : (r == -1) ? T_N : T_Z;
      x = (x - r) / 3;
    end
    return w;
  endfunction

  function automatic tword_t base(int opc, int ta);
    tword_t w;
    w = '0;
    w = put(w, 0, 2, opc);
    w = put(w, 2, 2, ta - 4);
    return w;
  endfunction

  function automatic tword_t a_r(int f, int ta, int tb);
    tword_t w;
    w = base(OP_R, ta); w = put(w, 4, 2, tb - 4); return put(w, 6, 3, f);
  endfunction
  function automatic tword_t a_i(int sub, int ta, int imm);
    tword_t w;
    w = base(OP_I, ta); w = put(w, 4, 2, sub); return put(w, 6, 3, imm);
  endfunction
  function automatic tword_t a_addi(int ta, int imm); return a_i(IF_ADDI, ta, imm); endfunction
  function automatic tword_t a_lui(int ta, int imm);
    tword_t w;
    w = base(OP_I, ta); return put(w, 5, 4, imm);
  endfunction
  function automatic tword_t a_li(int ta, int imm);
    tword_t w;
    w = base(OP_LI, ta); return put(w, 4, 5, imm);
  endfunction
  function automatic tword_t a_jal(int ta, int imm);
    tword_t w;
    w = base(OP_JAL, ta); return put(w, 4, 5, imm);
  endfunction
  function automatic tword_t a_m(int opc, int ta, int tb, int imm);
    tword_t w;
    w = base(opc, ta); w = put(w, 4, 2, tb - 4); return put(w, 6, 3, imm);
  endfunction
  function automatic tword_t a_jalr(int ta, int tb, int imm);  return a_m(OP_JALR, ta, tb, imm); endfunction
  function automatic tword_t a_load(int ta, int tb, int imm);  return a_m(OP_LOAD, ta, tb, imm); endfunction
  function automatic tword_t a_store(int ta, int tb, int imm); return a_m(OP_STORE, ta, tb, imm); endfunction
  function automatic tword_t a_b(int opc, int tb, int b, int imm);
    tword_t w;
    w = base(opc, tb); w = put(w, 4, 1, b); return put(w, 5, 4, imm);
  endfunction
  function automatic tword_t a_beq(int tb, int b, int imm) ; return a_b(OP_BEQ, tb, b, imm); endfunction
  function automatic tword_t a_bne(int tb, int b, int imm) ; return a_b(OP_BNE, tb, b, imm); endfunction
  function automatic tword_t a_nop(); return a_addi(4, 0); endfunction

  // ------------------------------------------------ integer helpers
  function automatic int wrap(int v);            // into -9841..9841
    int r;
    r = ((v % P9) + P9) % P9;
    return (r > 9841) ? r - P9 : r;
  endfunction
  function automatic int fval(tword_t w, int lo, int n);
    int v;
    v = 0;
    for (int i = n - 1; i >= 0; i--)
      v = v * 3 + ((w[lo+i] == T_P) ? 1 : (w[lo+i] == T_N) ? -1 : 0);
    return v;
  endfunction
  function automatic int digit(int v, int i);    // balanced trit i of v
    int x, r;
    x = v;
    r = 0;
    for (int k = 0; k <= i; k++) begin
      r = ((x % 3) + 3) % 3;
      if (r == 2) r = -1;
      x = (x - r) / 3;
    end
    return r;
  endfunction
  function automatic int pow3(int k);
    int p;
    p = 1;
    for (int i = 0; i < k; i++) p *= 3;
    return p;
  endfunction
  // trit-wise op by table: tbl[(a+1)*3 + (b+1)]
  function automatic int tritwise(int a, int b, int sel);
    int r, x, y, z;
    // Fig. 1 tables, row = input 2 (b), column = input 1 (a)
    int tand [9] = '{-1,-1,-1, -1,0,0, -1,0,1};
    int tor  [9] = '{-1,0,1, 0,0,1, 1,1,1};
    int txor [9] = '{-1,0,1, 0,0,0, 1,0,-1};
    int sti  [3] = '{1,0,-1};
    int nti  [3] = '{1,-1,-1};
    int pti  [3] = '{1,1,-1};
    r = 0;
    for (int i = 8; i >= 0; i--) begin
      x = digit(a, i); y = digit(b, i);
      case (sel)
        0: z = tand[(y+1)*3 + (x+1)];
        1: z = tor [(y+1)*3 + (x+1)];
        2: z = txor[(y+1)*3 + (x+1)];
        3: z = sti[y+1];
        4: z = nti[y+1];
        default: z = pti[y+1];
      endcase
      r = r * 3 + z;
    end
    return r;
  endfunction
  function automatic int shift(int a, int k);    // a * 3^k, trits dropped
    int r;
    if (k >= 0) return wrap(a * pow3(k));
    r = 0;
    for (int i = 8; i >= -k; i--) r = r * 3 + digit(a, i);
    return r;
  endfunction

  // ------------------------------------------------ reference model
  typedef struct {
    int regs [9];
    int pc;                      // unsigned address 0..P9-1
  } st_t;

  typedef struct {
    bit taken;
    bit is_load;
    int rd;                      // register written, -1 if none
    int uses [2];                // registers read, -1 if none
  } info_t;

  // Execute instruction w on s, memory m (keyed by unsigned address)
  function automatic info_t ref_step(ref st_t s, ref int m [int], input tword_t w);
    info_t in;
    int opc, ta, tb, f, sub, a, b, imm, res, addr, nxt;
    bit wr;
    in.taken = 0; in.is_load = 0; in.rd = -1; in.uses = '{-1, -1};
    opc = fval(w, 0, 2);
    ta  = fval(w, 2, 2) + 4;
    tb  = fval(w, 4, 2) + 4;
    a = s.regs[ta]; b = s.regs[tb];
    wr = 0; res = 0;
    nxt = (s.pc + 1) % P9;
    case (opc)
      OP_R: begin
        f = fval(w, 6, 3);
        wr = 1;
        in.uses = '{ta, tb};
        case (f)
          F_MV:  begin res = b; in.uses[0] = -1; end
          F_PTI: begin res = tritwise(0, b, 5); in.uses[0] = -1; end
          F_NTI: begin res = tritwise(0, b, 4); in.uses[0] = -1; end
          F_STI: begin res = tritwise(0, b, 3); in.uses[0] = -1; end
          F_AND: res = tritwise(a, b, 0);
          F_OR:  res = tritwise(a, b, 1);
          F_XOR: res = tritwise(a, b, 2);
          F_ADD: res = wrap(a + b);
          F_SUB: res = wrap(a - b);
          F_SR:  res = shift(a, -(digit(b,0) + 3*digit(b,1)));
          F_SL:  res = shift(a, digit(b,0) + 3*digit(b,1));
          F_COMP: res = (a > b) ? 1 : (a < b) ? -1 : 0;
          default: begin wr = 0; in.uses = '{-1, -1}; end
        endcase
      end
      OP_I: begin
        imm = fval(w, 6, 3);
        sub = fval(w, 4, 2);
        wr = 1;
        in.uses[0] = ta;
        if (fval(w, 4, 1) == 0) begin
          res = fval(w, 5, 4) * 243; in.uses[0] = -1;
        end else case (sub)
          IF_ADDI: begin res = wrap(a + imm); if (imm == 0) begin wr = 0; in.uses[0] = -1; end end
          IF_ANDI: res = tritwise(a, imm, 0);
          IF_SRI:  res = shift(a, -fval(w, 6, 2));
          IF_SLI:  res = shift(a, fval(w, 6, 2));
          default: begin wr = 0; in.uses[0] = -1; end
        endcase
      end
      OP_LI: begin
        wr = 1; in.uses[0] = ta;
        // upper four trits of a, lower five from imm
        res = 0;
        for (int i = 8; i >= 5; i--) res = res * 3 + digit(a, i);
        res = res * 243 + fval(w, 4, 5);
      end
      OP_JAL: begin
        wr = 1; res = wrap(s.pc + 1 - 9841);
        nxt = ((s.pc + fval(w, 4, 5)) % P9 + P9) % P9; in.taken = 1;
      end
      OP_JALR: begin
        wr = 1; res = wrap(s.pc + 1 - 9841); in.uses[1] = tb;
        nxt = ((b + fval(w, 6, 3) + 9841) % P9 + P9) % P9; in.taken = 1;
      end
      OP_BEQ, OP_BNE: begin
        in.uses[1] = ta;
        if ((digit(s.regs[ta], 0) == fval(w, 4, 1)) == (opc == OP_BEQ)) begin
          in.taken = 1;
          nxt = ((s.pc + fval(w, 5, 4)) % P9 + P9) % P9;
        end
      end
      OP_LOAD: begin
        wr = 1; in.is_load = 1; in.uses[0] = tb;
        addr = ((b + fval(w, 6, 3) + 9841) % P9 + P9) % P9;
        res = m.exists(addr) ? m[addr] : 0;
      end
      OP_STORE: begin
        in.uses = '{tb, ta};
        addr = ((b + fval(w, 6, 3) + 9841) % P9 + P9) % P9;
        m[addr] = a;
      end
      default: ;
    endcase
    if (wr) begin
      s.regs[ta] = res;
      in.rd = ta;
    end
    s.pc = nxt;
    return in;
  endfunction

endpackage
