// art9_core: the 5-stage pipelined ART-9 ternary processor.
//
// A 9-trit balanced-ternary RISC core with 24 instructions, nine registers and
// separate instruction and data memories, pipelined as IF, ID, EX, MEM, WB.
//
//   IF  : the PC generator addresses the synchronous TIM; the fetched word
//         appears at the TIM output in the next cycle (IF/ID boundary).
//   ID  : a NOP multiplexer replaces the fetched word by NOP (ADDI, imm 0)
//         in the cycle after a taken branch; the main decoder, the TRF's two
//         asynchronous reads, the hazard detection unit and the branch-target
//         calculator / condition checker work here. Branches and jumps are
//         resolved in ID and redirect the PC at the end of the cycle.
//   EX  : forwarding multiplexers pick each TALU operand from the TRF value
//         or one of three later-stage values; the TALU computes the result or
//         the memory address. The TDM latches address / write data at the end
//         of EX (synchronous memory).
//   MEM : the TDM read data or the registered TALU result is chosen as the
//         write-back value.
//   WB  : the TRF is written at the end of the cycle.
//
// Stalls happen only for a load followed by a user of the loaded register (one
// bubble: PC and fetched instruction held, no-write bubble into EX) and for a
// taken branch or jump (one NOP in the next ID). Every other dependence is
// served by forwarding: into EX from MEM, from WB, and from a one-entry
// register holding the last write-back; into ID (branch condition and JALR
// base) from the EX result, the MEM write data and the WB data.
//
// Interface besides clk/rst_n (active-low, asynchronous): a TIM write port
// and a TDM access port for loading programs and data while the core is held
// in reset (not part of the paper, which leaves peripherals out), per-cycle
// event flags (ev) and the PC of the instruction in ID.
//
// From the paper: the stage split, the units and where they sit, synchronous
// single-port TIM/TDM, TRF with two asynchronous reads and a synchronous
// write, ID-stage branch resolution with a one-cycle penalty, HDU with
// forwarding, NOP as ADDI with imm 0. This design's choices: the instruction
// encoding (art9_pkg), the load-use bubble mechanism, the last-write-back
// forwarding register and the link value taken from the PC register, which
// always holds the address after the instruction in ID.
//
// Unused-signal lint notes: the ID-stage fields of ex_c (source indices,
// branch offset and kind) are carried into EX with the rest of the decoded
// word but only the execute / memory / write-back fields are read there.
module art9_core
  import art9_pkg::*;
#(
  parameter int TIM_DEPTH = WORDS,
  parameter int TDM_DEPTH = WORDS
) (
  input  logic   clk,
  input  logic   rst_n,
  // program load (used while rst_n is low)
  input  logic   prog_we,
  input  tword_t prog_addr,
  input  tword_t prog_wdata,
  // data memory access (used while rst_n is low)
  input  logic   ext_en,
  input  logic   ext_we,
  input  tword_t ext_addr,
  input  tword_t ext_wdata,
  output tword_t ext_rdata,
  // observation
  output ev_t    ev,
  output tword_t dbg_id_pc
);

  // NOP: ADDI T?,0 -> opcode I (+1), sub-function ADDI (0,+1), imm 0
  localparam tword_t NOP_WORD = {T_Z, T_Z, T_Z, T_Z, T_P, T_Z, T_Z, T_Z, T_P};

  // ---------------------------------------------------------------- IF
  tword_t pc, pc_id, tim_q, br_target;
  logic   stall, br_taken, squash_q;

  pc_gen u_pc (
    .clk(clk), .rst_n(rst_n), .hold(stall), .taken(br_taken),
    .target(br_target), .pc(pc)
  );

  tmem #(.DEPTH(TIM_DEPTH)) u_tim (
    .clk(clk),
    .en(prog_we || !stall),
    .we(prog_we),
    .addr(prog_we ? prog_addr : pc),
    .wdata(prog_wdata),
    .rdata(tim_q)
  );

  // IF/ID: PC of the fetched instruction and the registered stall control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc_id    <= '0;
      squash_q <= 1'b1;
    end else if (!stall) begin
      pc_id    <= pc;
      squash_q <= br_taken;
    end
  end

  // ---------------------------------------------------------------- ID
  tword_t id_instr, rf_a, rf_b, id_b;
  ctrl_t  dc;
  fwd_e   fwd_a, fwd_b, fwd_id;

  assign id_instr  = squash_q ? NOP_WORD : tim_q;
  assign dbg_id_pc = pc_id;

  decoder u_dec (.instr(id_instr), .link(pc), .c(dc));

  // later-stage state (declared here, driven below)
  ctrl_t  ex_c;
  tword_t ex_a_q, ex_b_q, ex_y;
  fwd_e   ex_fa, ex_fb;
  logic   mem_we, mem_load;
  tidx_t  mem_rd;
  tword_t mem_y, mem_wdata, tdm_q;
  logic   wb_we;
  tidx_t  wb_rd;
  tword_t wb_data;
  tword_t h_data;

  trf u_trf (
    .clk(clk), .rst_n(rst_n),
    .ra_idx(dc.ra), .rb_idx(dc.rb), .ra_data(rf_a), .rb_data(rf_b),
    .we(wb_we), .w_idx(wb_rd), .w_data(wb_data)
  );

  hdu u_hdu (
    .id_ra(dc.ra), .id_use_a(dc.use_a), .id_rb(dc.rb), .id_use_b(dc.use_b),
    .ex_we(ex_c.we), .ex_rd(ex_c.rd), .ex_load(ex_c.load),
    .mem_we(mem_we), .mem_rd(mem_rd),
    .wb_we(wb_we), .wb_rd(wb_rd),
    .fwd_a(fwd_a), .fwd_b(fwd_b), .fwd_id(fwd_id), .stall(stall)
  );

  // ID forwarding of the branch / JALR register
  always_comb begin
    unique case (fwd_id)
      FWD_M:   id_b = ex_y;
      FWD_W:   id_b = mem_wdata;
      FWD_H:   id_b = wb_data;
      default: id_b = rf_b;
    endcase
  end

  logic bu_taken;
  branch_unit u_br (
    .br(dc.br), .pc(pc_id), .base(id_b), .off(dc.boff), .bcond(dc.bcond),
    .taken(bu_taken), .target(br_target)
  );
  assign br_taken = bu_taken && !stall;

  // ID/EX
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ex_c   <= '0;
      ex_a_q <= '0;
      ex_b_q <= '0;
      ex_fa  <= FWD_RF;
      ex_fb  <= FWD_RF;
    end else begin
      ex_c   <= dc;
      ex_a_q <= rf_a;
      ex_b_q <= rf_b;
      ex_fa  <= fwd_a;
      ex_fb  <= fwd_b;
      if (stall) begin                 // bubble: no write, no memory access
        ex_c.we    <= 1'b0;
        ex_c.load  <= 1'b0;
        ex_c.store <= 1'b0;
      end
    end
  end

  // ---------------------------------------------------------------- EX
  tword_t ex_a, ex_b;

  function automatic tword_t fwd_mux(fwd_e s, tword_t rf, tword_t m, tword_t w, tword_t h);
    unique case (s)
      FWD_M:   return m;
      FWD_W:   return w;
      FWD_H:   return h;
      default: return rf;
    endcase
  endfunction

  assign ex_a = fwd_mux(ex_fa, ex_a_q, mem_wdata, wb_data, h_data);
  assign ex_b = fwd_mux(ex_fb, ex_b_q, mem_wdata, wb_data, h_data);

  talu u_alu (
    .op(ex_c.op), .a(ex_a), .b(ex_c.b_imm ? ex_c.imm : ex_b), .y(ex_y)
  );

  // TDM: address and data from EX, latched at the EX/MEM edge
  tmem #(.DEPTH(TDM_DEPTH)) u_tdm (
    .clk(clk),
    .en(ext_en || ex_c.load || ex_c.store),
    .we(ext_en ? ext_we : ex_c.store),
    .addr(ext_en ? ext_addr : ex_y),
    .wdata(ext_en ? ext_wdata : ex_b),
    .rdata(tdm_q)
  );
  assign ext_rdata = tdm_q;

  // EX/MEM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_we   <= 1'b0;
      mem_load <= 1'b0;
      mem_rd   <= '0;
      mem_y    <= '0;
    end else begin
      mem_we   <= ex_c.we;
      mem_load <= ex_c.load;
      mem_rd   <= ex_c.rd;
      mem_y    <= ex_y;
    end
  end

  // ---------------------------------------------------------------- MEM
  assign mem_wdata = mem_load ? tdm_q : mem_y;

  // MEM/WB and the last-write-back register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_we   <= 1'b0;
      wb_rd   <= '0;
      wb_data <= '0;
      h_data  <= '0;
    end else begin
      wb_we   <= mem_we;
      wb_rd   <= mem_rd;
      wb_data <= mem_wdata;
      h_data  <= wb_data;
    end
  end

  // ---------------------------------------------------------------- events
  always_comb begin
    ev.load_use = stall;
    ev.taken    = br_taken;
    ev.fwd_ex   = (ex_c.we || ex_c.store) && (ex_fa != FWD_RF || ex_fb != FWD_RF);
    ev.fwd_id   = (dc.br != BR_NONE) && (fwd_id != FWD_RF) && !stall;
    ev.wb       = wb_we;
  end

endmodule
