// tb_art9_core: end-to-end test of the ART-9 pipeline at its default sizes.
//
// Each program is written into the TIM and the whole TDM is cleared through
// the load ports while the core is in reset; the core then runs until the
// halt instruction (JAL to itself) reaches ID. The testbench executes the
// same program on the instruction-level reference model of art9_asm_pkg and
// compares all nine registers, the data words touched, and the cycle at which
// the halt reaches ID, predicted as
//   1 (reset squash) + instructions executed + load-use stalls + taken branches,
// i.e. CPI 1 with exactly one bubble per load-use hazard and per taken branch.
// Programs: one directed program (LI/LUI, forwarding, store/load, load-use,
// COMP+BEQ with ID forwarding, JAL and JALR) and a set of random programs
// over every instruction except JALR, with forward branches only.
// Every pipeline mechanism must occur at least once: load-use stall, taken
// and not-taken branch, EX forwarding from each of its three sources, ID
// forwarding from each of its three sources.
module tb_art9_core;
  import art9_pkg::*;
  import art9_asm_pkg::*;

  localparam int NPROG  = 40;
  localparam int PLEN   = 60;

  logic clk = 0, rst_n = 0;
  logic prog_we = 0, ext_en = 0, ext_we = 0;
  tword_t prog_addr = '0, prog_wdata = '0, ext_addr = '0, ext_wdata = '0, ext_rdata, dbg_id_pc;
  ev_t ev;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_lu = 0, n_tk = 0, n_nt = 0, n_fm = 0, n_fw = 0, n_fh = 0, n_im = 0, n_iw = 0, n_ih = 0;

  art9_core dut (
    .clk(clk), .rst_n(rst_n), .prog_we(prog_we), .prog_addr(prog_addr), .prog_wdata(prog_wdata),
    .ext_en(ext_en), .ext_we(ext_we), .ext_addr(ext_addr), .ext_wdata(ext_wdata),
    .ext_rdata(ext_rdata), .ev(ev), .dbg_id_pc(dbg_id_pc)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    n_lu += ev.load_use;
    n_tk += ev.taken;
    if (ev.fwd_ex) begin
      n_fm += (dut.ex_fa == FWD_M || dut.ex_fb == FWD_M);
      n_fw += (dut.ex_fa == FWD_W || dut.ex_fb == FWD_W);
      n_fh += (dut.ex_fa == FWD_H || dut.ex_fb == FWD_H);
    end
    if (ev.fwd_id) begin
      n_im += (dut.fwd_id == FWD_M);
      n_iw += (dut.fwd_id == FWD_W);
      n_ih += (dut.fwd_id == FWD_H);
    end
    if ((dut.dc.br == BR_BEQ || dut.dc.br == BR_BNE) && !ev.taken && !ev.load_use) n_nt++;
  end

  tword_t prog [$];

  task automatic run_and_check(int halt_at, string nm);
    st_t s;
    int m [int];
    info_t in;
    int n, lu, tk, prev_rd, exp_cyc, cyc, v;
    bit prev_ld;
    // reference
    for (int i = 0; i < 9; i++) s.regs[i] = 0;
    s.pc = 0; n = 0; lu = 0; tk = 0; prev_ld = 0; prev_rd = -1;
    while (s.pc != halt_at && n < 100000) begin
      in = ref_step(s, m, prog[s.pc]);
      if (prev_ld && prev_rd >= 0 && (in.uses[0] == prev_rd || in.uses[1] == prev_rd)) lu++;
      prev_ld = in.is_load; prev_rd = in.rd;
      tk += in.taken;
      n++;
    end
    exp_cyc = 1 + n + lu + tk;
    in = ref_step(s, m, prog[s.pc]);       // the halt jump itself writes its link
    // load the core
    rst_n = 0;
    @(negedge clk);
    for (int i = 0; i < prog.size(); i++) begin
      prog_we = 1; prog_addr = put('0, 0, 9, i - 9841); prog_wdata = prog[i];
      @(negedge clk);
    end
    prog_we = 0;
    ext_en = 1; ext_we = 1; ext_wdata = '0;
    for (int i = 0; i < P9; i++) begin
      ext_addr = put('0, 0, 9, i - 9841);
      @(negedge clk);
    end
    ext_en = 0; ext_we = 0;
    // run
    rst_n = 1;
    cyc = 0;
    while (!(ev.taken && fval(dbg_id_pc, 0, 9) == halt_at - 9841) && cyc < 200000) begin
      @(negedge clk);
      cyc++;
    end
    // let the pipeline drain
    repeat (6) @(negedge clk);
    checks++;
    if (cyc != exp_cyc) begin
      failures++;
      $display("FAIL %s: halt in ID at cycle %0d, expected %0d (n=%0d lu=%0d tk=%0d)",
               nm, cyc, exp_cyc, n, lu, tk);
    end
    for (int r = 0; r < 9; r++) begin
      checks++;
      v = fval(dut.u_trf.regs[r], 0, 9);
      if (v != s.regs[r]) begin
        failures++;
        $display("FAIL %s: T%0d=%0d expected %0d", nm, r, v, s.regs[r]);
      end
    end
    rst_n = 0;
    foreach (m[a]) begin
      ext_en = 1; ext_we = 0; ext_addr = put('0, 0, 9, a - 9841);
      @(negedge clk);
      checks++;
      if (fval(ext_rdata, 0, 9) != m[a]) begin
        failures++;
        $display("FAIL %s: TDM[%0d]=%0d expected %0d", nm, a, fval(ext_rdata, 0, 9), m[a]);
      end
    end
    ext_en = 0;
  endtask

  function automatic tword_t rnd_instr(int idx, int halt_at);
    int k, ta, tb, fwd;
    ta = $urandom_range(8); tb = $urandom_range(8);
    fwd = halt_at - idx;                     // largest forward offset allowed
    k = $urandom_range(13);
    case (k)
      0, 1:  return a_r($urandom_range(11), ta, tb);
      2:     return a_addi(ta, int'($urandom_range(26)) - 13);
      3:     return a_i(IF_ANDI, ta, int'($urandom_range(26)) - 13);
      4:     return a_i(($urandom_range(1) != 0) ? IF_SRI : IF_SLI, ta, int'($urandom_range(8)) - 4);
      5:     return a_lui(ta, int'($urandom_range(80)) - 40);
      6:     return a_li(ta, int'($urandom_range(242)) - 121);
      7, 8:  return a_load(ta, tb, int'($urandom_range(26)) - 13);
      9:     return a_store(ta, tb, int'($urandom_range(26)) - 13);
      10:    return a_beq(tb, int'($urandom_range(2)) - 1, 1 + $urandom_range((fwd > 4) ? 3 : fwd - 1));
      11:    return a_bne(tb, int'($urandom_range(2)) - 1, 1 + $urandom_range((fwd > 4) ? 3 : fwd - 1));
      12:    return a_jal(ta, 1 + $urandom_range((fwd > 3) ? 2 : fwd - 1));
      default: return a_r(F_COMP, ta, tb);
    endcase
  endfunction

  initial begin
    // ---------------- directed program
    prog = {};
    prog.push_back(a_jal(2, 2));          // 0: T2 = link(1), go to 2
    prog.push_back(a_jal(8, 0));          // 1: halt
    prog.push_back(a_lui(0, 0));          // 2: T0 = 0
    prog.push_back(a_li(1, 100));         // 3: T1 = 100
    prog.push_back(a_li(3, -50));         // 4: T3 = -50
    prog.push_back(a_r(F_ADD, 1, 3));     // 5: T1 = 50 (EX fwd from MEM)
    prog.push_back(a_r(F_SUB, 3, 1));     // 6: T3 = -100
    prog.push_back(a_store(3, 0, 2));     // 7: TDM[2] = -100
    prog.push_back(a_load(4, 0, 2));      // 8: T4 = -100
    prog.push_back(a_r(F_ADD, 4, 1));     // 9: load-use, T4 = -50
    prog.push_back(a_r(F_COMP, 4, 0));    // 10: T4 = -1
    prog.push_back(a_beq(4, -1, 2));      // 11: taken (ID fwd from EX)
    prog.push_back(a_addi(5, 5));         // 12: skipped
    prog.push_back(a_nop());              // 13
    prog.push_back(a_lui(6, 40));         // 14: T6 = 40*243
    prog.push_back(a_li(6, -121));        // 15: T6 = 9720-121
    prog.push_back(a_jalr(7, 2, 0));      // 16: T7 = link, go to 1 (halt)
    run_and_check(1, "directed");
    // ---------------- random programs
    for (int p = 0; p < NPROG; p++) begin
      prog = {};
      for (int i = 0; i < PLEN; i++) prog.push_back(rnd_instr(i, PLEN));
      prog.push_back(a_jal(8, 0));        // halt
      run_and_check(PLEN, $sformatf("random%0d", p));
    end
    $display("mechanisms: load-use=%0d taken=%0d not-taken=%0d ex-fwd M/W/H=%0d/%0d/%0d id-fwd M/W/H=%0d/%0d/%0d",
             n_lu, n_tk, n_nt, n_fm, n_fw, n_fh, n_im, n_iw, n_ih);
    if (n_lu == 0) failures++;
    if (n_tk == 0) failures++;
    if (n_nt == 0) failures++;
    if (n_fm == 0) failures++;
    if (n_fw == 0) failures++;
    if (n_fh == 0) failures++;
    if (n_im == 0) failures++;
    if (n_iw == 0) failures++;
    if (n_ih == 0) failures++;
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
