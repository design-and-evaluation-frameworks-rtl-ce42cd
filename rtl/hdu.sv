// hdu: hazard detection unit of the ID stage.
//
// Two index checkers compare the source indices of the instruction in ID
// (operand a and operand b) with the destinations of the instructions now in
// EX, MEM and WB; the nearest writing producer wins. Their results are the
// forwarding selects for the TALU inputs, which the core registers into the
// ID/EX pipeline register:
//   producer now in EX  -> FWD_M (it will be in MEM when the consumer is in EX)
//   producer now in MEM -> FWD_W (it will be in WB)
//   producer now in WB  -> FWD_H (it writes the TRF in this very cycle, after
//                                 the consumer has read the old value)
// The same comparison on operand b gives fwd_id, the select for the branch
// condition / JALR base used inside ID.
// The load-use checker raises stall when the EX instruction is a load whose
// destination the ID instruction reads; the core then holds the PC and the
// fetched instruction and sends a bubble to EX. Purely combinational.
//
// From the paper: index checkers on Ta/Tb against EX/MEM/WB destinations, a
// load-use checker fed by the load enable of EX, stall and PC controls. The
// nearest-wins priority and the encoding of the selects are this design's.
module hdu
  import art9_pkg::*;
(
  input  tidx_t id_ra,
  input  logic  id_use_a,
  input  tidx_t id_rb,
  input  logic  id_use_b,
  input  logic  ex_we,
  input  tidx_t ex_rd,
  input  logic  ex_load,
  input  logic  mem_we,
  input  tidx_t mem_rd,
  input  logic  wb_we,
  input  tidx_t wb_rd,
  output fwd_e  fwd_a,
  output fwd_e  fwd_b,
  output fwd_e  fwd_id,
  output logic  stall
);

  // Index checker: select for one source index
  function automatic fwd_e check(tidx_t r, logic ew, tidx_t er, logic mw,
                                 tidx_t mr, logic ww, tidx_t wr);
    if (ew && r == er) return FWD_M;
    if (mw && r == mr) return FWD_W;
    if (ww && r == wr) return FWD_H;
    return FWD_RF;
  endfunction

  always_comb begin
    fwd_a  = id_use_a ? check(id_ra, ex_we, ex_rd, mem_we, mem_rd, wb_we, wb_rd) : FWD_RF;
    fwd_b  = id_use_b ? check(id_rb, ex_we, ex_rd, mem_we, mem_rd, wb_we, wb_rd) : FWD_RF;
    fwd_id = fwd_b;
    stall  = ex_load && ex_we &&
             ((id_use_a && id_ra == ex_rd) || (id_use_b && id_rb == ex_rd));
  end

endmodule
