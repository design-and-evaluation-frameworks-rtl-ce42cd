// art9_pkg: shared types, constants and trit-level functions of the ART-9 core.
//
// ART-9 works on balanced-ternary words of 9 trits, each trit being -1, 0 or
// +1. Since the RTL runs on binary logic, every trit is carried on two bits
// (binary-encoded ternary): 2'b00 = 0, 2'b01 = +1, 2'b10 = -1. The code 2'b11
// never appears on a net driven by this design and reads as 0. The bit
// assignment is this design's choice; the paper only says the trits are
// binary-encoded.
//
// The package also holds the instruction encoding. The paper lists the 24
// instructions and their operand widths but prints no encoding, so the
// layout below is this design's own:
//
//   trit   8  7  6  5  4  3  2  1  0
//   R     [func3  ][ Tb ][ Ta ][ op ]     func3 selects one of 12 functions
//   I     [imm2:0 ][f1 f0][ Ta ][ op ]    f0 = 0: LUI with imm[3:0] = trits 8:5
//   LI    [   imm[4:0]   ][ Ta ][ op ]
//   JAL   [   imm[4:0]   ][ Ta ][ op ]
//   JALR  [imm2:0 ][ Tb ][ Ta ][ op ]
//   LOAD  [imm2:0 ][ Tb ][ Ta ][ op ]    Ta = destination, Tb = base
//   STORE [imm2:0 ][ Tb ][ Ta ][ op ]    Ta = data, Tb = base
//   BEQ   [imm[3:0] ][B][ Tb ][ op ]    register in trits 3:2, B in trit 4
//   BNE   same as BEQ
//
// Trit fields are read as signed balanced values; opcode and func3 values are
// listed below. Register indices and memory addresses use the unsigned reading
// of the paper's eq. (1), each trit taken as the digit t+1 (the same three
// levels), so an n-trit field with signed value v names unsigned v+(3^n-1)/2.
package art9_pkg;

  localparam int TRITS = 9;
  localparam int WORDS = 19683;          // 3^9: range of a 9-trit address
  localparam int WORD_OFS = 9841;        // (3^9-1)/2
  localparam int NREG = 9;               // 3^2 registers

  typedef logic [1:0] trit_t;
  localparam trit_t T_Z = 2'b00;
  localparam trit_t T_P = 2'b01;
  localparam trit_t T_N = 2'b10;

  typedef trit_t [TRITS-1:0] tword_t;
  typedef trit_t [1:0]       tidx_t;     // 2-trit register index

  localparam tword_t WORD_ZERO = '0;

  // ---------------- opcodes (signed value of trits 1:0) ----------------
  localparam int OP_R     = 0;
  localparam int OP_I     = 1;
  localparam int OP_LI    = 2;
  localparam int OP_JAL   = 3;
  localparam int OP_JALR  = 4;
  localparam int OP_BEQ   = -1;
  localparam int OP_BNE   = -2;
  localparam int OP_LOAD  = -3;
  localparam int OP_STORE = -4;

  // R-type func3 (signed value of trits 8:6)
  localparam int F_MV = 0, F_PTI = 1, F_NTI = 2, F_STI = 3, F_AND = 4, F_OR = 5,
                 F_XOR = 6, F_ADD = 7, F_SUB = 8, F_SR = 9, F_SL = 10, F_COMP = 11;

  // I-type sub-function (signed value of trits 5:4); trit 4 = 0 means LUI
  localparam int IF_ADDI = 1;    // (0,+1)
  localparam int IF_ANDI = 4;    // (+1,+1)
  localparam int IF_SRI  = -1;   // (0,-1)
  localparam int IF_SLI  = 2;    // (+1,-1)

  typedef enum logic [3:0] {
    ALU_PASSB, ALU_LI, ALU_STI, ALU_NTI, ALU_PTI, ALU_AND, ALU_OR, ALU_XOR,
    ALU_ADD, ALU_SUB, ALU_SR, ALU_SL, ALU_COMP
  } alu_op_e;

  typedef enum logic [2:0] {BR_NONE, BR_BEQ, BR_BNE, BR_JAL, BR_JALR} br_e;

  // Forwarding source of an operand.
  //   FWD_RF : value read from the TRF in ID
  //   FWD_M  : producer one stage ahead (MEM-stage write data)
  //   FWD_W  : producer two stages ahead (MEM/WB register)
  //   FWD_H  : producer that wrote the TRF while the consumer was in ID
  // For the ID-stage branch operand, FWD_M/FWD_W/FWD_H mean EX result,
  // MEM-stage write data and MEM/WB data respectively.
  typedef enum logic [1:0] {FWD_RF, FWD_M, FWD_W, FWD_H} fwd_e;

  // Decoded instruction
  typedef struct packed {
    logic    we;       // writes TRF[rd]
    tidx_t   rd;
    tidx_t   ra;       // TALU operand a
    logic    use_a;
    tidx_t   rb;       // TALU operand b / store data / branch operand
    logic    use_b;
    logic    b_imm;    // TALU b takes imm instead of TRF[rb]
    alu_op_e op;
    tword_t  imm;      // TALU immediate (LUI, link value, ...)
    tword_t  boff;     // branch / jump offset
    logic    load;
    logic    store;
    br_e     br;
    trit_t   bcond;    // B of BEQ/BNE
  } ctrl_t;

  // Per-cycle event flags brought out of the core
  typedef struct packed {
    logic load_use;    // load-use stall cycle
    logic taken;       // taken branch / jump in ID (next ID gets NOP)
    logic fwd_ex;      // an EX operand came from a forwarding path
    logic fwd_id;      // the ID branch operand came from a forwarding path
    logic wb;          // a TRF write in WB
  } ev_t;

  // ---------------- trit functions ----------------
  function automatic int t2i(trit_t t);
    case (t)
      T_P:     return 1;
      T_N:     return -1;
      default: return 0;
    endcase
  endfunction

  function automatic trit_t i2t(int v);
    if (v > 0) return T_P;
    if (v < 0) return T_N;
    return T_Z;
  endfunction

  // Fig. 1 truth tables
  function automatic trit_t t_and(trit_t a, trit_t b);   // minimum
    return (t2i(a) < t2i(b)) ? i2t(t2i(a)) : i2t(t2i(b));
  endfunction
  function automatic trit_t t_or(trit_t a, trit_t b);    // maximum
    return (t2i(a) > t2i(b)) ? i2t(t2i(a)) : i2t(t2i(b));
  endfunction
  function automatic trit_t t_xor(trit_t a, trit_t b);   // -(a*b)
    return i2t(-(t2i(a) * t2i(b)));
  endfunction
  function automatic trit_t t_sti(trit_t a);             // standard inverter
    return i2t(-t2i(a));
  endfunction
  function automatic trit_t t_nti(trit_t a);             // negative inverter
    return (t2i(a) == -1) ? T_P : T_N;
  endfunction
  function automatic trit_t t_pti(trit_t a);             // positive inverter
    return (t2i(a) == 1) ? T_N : T_P;
  endfunction

  // Signed value of trits [lo+n-1:lo] of a word
  function automatic int field_val(tword_t w, int lo, int n);
    int v;
    v = 0;
    for (int i = n - 1; i >= 0; i--) v = v * 3 + t2i(w[lo+i]);
    return v;
  endfunction

  function automatic int word_val(tword_t w);
    return field_val(w, 0, TRITS);
  endfunction

  // Unsigned reading of a register index: signed value + 4, 0..8
  function automatic int unsigned idx_u(tidx_t t);
    return unsigned'(3 * t2i(t[1]) + t2i(t[0]) + 4);
  endfunction

  // Word with signed value v (wraps modulo 3^9 into the balanced range)
  function automatic tword_t val_word(int v);
    tword_t w;
    int r, x;
    x = v;
    for (int i = 0; i < TRITS; i++) begin
      r = ((x % 3) + 3) % 3;
      if (r == 2) r = -1;
      w[i] = i2t(r);
      x = (x - r) / 3;
    end
    return w;
  endfunction

  // Index word for a 2-trit register index given as unsigned 0..8
  function automatic tidx_t u_idx(int unsigned u);
    int v;
    v = int'(u) - 4;
    return {i2t((v + 4) / 3 - 1), i2t((v + 4) % 3 - 1)};
  endfunction

endpackage
