// decoder: main instruction decoder of the ID stage.
//
// Splits a 9-trit instruction (layout in art9_pkg) into register indices,
// operand-use flags, the TALU operation, the immediate, memory and branch
// controls. Two-address semantics follow Table I of the paper: R-type and
// I-type results overwrite TRF[Ta]; one-operand R-type functions (MV, PTI,
// NTI, STI) take their operand from Tb. Register port a is the TALU's first
// operand; port b is its second operand, the store data, or the branch /
// JALR register. For LOAD/STORE port a reads the base Tb so that the TALU
// computes the address TRF[Tb]+imm. JAL/JALR write the link value, given on
// the link input (PC+1 of the instruction), through the TALU's pass path.
//
// Immediates are value-extended (upper trits 0). ADDI with a zero immediate
// is the NOP of the ISA and decodes to no write and no register use, as do
// reserved encodings (this design's choice). Purely combinational.
module decoder
  import art9_pkg::*;
(
  input  tword_t instr,
  input  tword_t link,
  output ctrl_t  c
);

  int opc, f3, fi;

  // Value-extend trits [lo+n-1:lo] of the instruction
  function automatic tword_t ext(tword_t w, int lo, int n);
    tword_t r;
    r = WORD_ZERO;
    for (int i = 0; i < n; i++) r[i] = w[lo+i];
    return r;
  endfunction

  always_comb begin
    opc = field_val(instr, 0, 2);
    f3  = field_val(instr, 6, 3);
    fi  = field_val(instr, 4, 2);

    c       = '0;
    c.op    = ALU_PASSB;
    c.br    = BR_NONE;
    c.rd    = instr[3:2];
    c.ra    = instr[3:2];
    c.rb    = instr[5:4];
    c.bcond = T_Z;

    case (opc)
      OP_R: begin
        c.we = 1'b1; c.use_b = 1'b1; c.use_a = 1'b1;
        case (f3)
          F_MV:   begin c.op = ALU_PASSB; c.use_a = 1'b0; end
          F_PTI:  begin c.op = ALU_PTI;   c.use_a = 1'b0; end
          F_NTI:  begin c.op = ALU_NTI;   c.use_a = 1'b0; end
          F_STI:  begin c.op = ALU_STI;   c.use_a = 1'b0; end
          F_AND:  c.op = ALU_AND;
          F_OR:   c.op = ALU_OR;
          F_XOR:  c.op = ALU_XOR;
          F_ADD:  c.op = ALU_ADD;
          F_SUB:  c.op = ALU_SUB;
          F_SR:   c.op = ALU_SR;
          F_SL:   c.op = ALU_SL;
          F_COMP: c.op = ALU_COMP;
          default: begin c.we = 1'b0; c.use_a = 1'b0; c.use_b = 1'b0; end
        endcase
      end
      OP_I: begin
        c.b_imm = 1'b1;
        c.imm   = ext(instr, 6, 3);
        c.we    = 1'b1;
        c.use_a = 1'b1;
        if (t2i(instr[4]) == 0) begin
          c.op    = ALU_PASSB;                   // LUI: {imm[3:0], 00000}
          c.use_a = 1'b0;
          c.imm   = WORD_ZERO;
          c.imm[8:5] = instr[8:5];
        end else begin
          case (fi)
            IF_ADDI: begin
              c.op = ALU_ADD;
              if (field_val(instr, 6, 3) == 0) begin  // NOP
                c.we = 1'b0; c.use_a = 1'b0;
              end
            end
            IF_ANDI: c.op = ALU_AND;
            IF_SRI:  begin c.op = ALU_SR; c.imm = ext(instr, 6, 2); end
            IF_SLI:  begin c.op = ALU_SL; c.imm = ext(instr, 6, 2); end
            default: begin c.we = 1'b0; c.use_a = 1'b0; end
          endcase
        end
      end
      OP_LI: begin
        c.we = 1'b1; c.use_a = 1'b1; c.b_imm = 1'b1;
        c.op = ALU_LI; c.imm = ext(instr, 4, 5);
      end
      OP_JAL: begin
        c.we = 1'b1; c.b_imm = 1'b1; c.op = ALU_PASSB; c.imm = link;
        c.br = BR_JAL; c.boff = ext(instr, 4, 5);
      end
      OP_JALR: begin
        c.we = 1'b1; c.b_imm = 1'b1; c.op = ALU_PASSB; c.imm = link;
        c.use_b = 1'b1;
        c.br = BR_JALR; c.boff = ext(instr, 6, 3);
      end
      OP_BEQ, OP_BNE: begin
        c.use_b = 1'b1; c.rb = instr[3:2];
        c.br = (opc == OP_BEQ) ? BR_BEQ : BR_BNE;
        c.bcond = instr[4];
        c.boff = ext(instr, 5, 4);
      end
      OP_LOAD: begin
        c.we = 1'b1; c.load = 1'b1; c.use_a = 1'b1; c.ra = instr[5:4];
        c.b_imm = 1'b1; c.op = ALU_ADD; c.imm = ext(instr, 6, 3);
      end
      OP_STORE: begin
        c.store = 1'b1; c.use_a = 1'b1; c.ra = instr[5:4];
        c.use_b = 1'b1; c.rb = instr[3:2];
        c.b_imm = 1'b1; c.op = ALU_ADD; c.imm = ext(instr, 6, 3);
      end
      default: ;
    endcase
  end

endmodule
