// tb_art9_kernels: matrix multiplication (GEMM) and a Sobel edge filter
// running on the full ART-9 core (default sizes).
//
// Both programs are generated by this testbench with the assembler of
// art9_asm_pkg as straight-line code over the data, so their length grows
// with the problem size while the register use stays within the nine TRF
// entries.
//
// GEMM: C = A x B for N x N matrices of small signed words. ART-9 has no
// multiplier, so every product calls a trit-serial multiply subroutine
// through JALR (address kept in T7, link in T6): for each trit of the
// multiplier, BEQ/BNE on its lowest trit add or subtract the multiplicand,
// then SLI shifts the multiplicand up and SRI the multiplier down until the
// multiplier is zero (COMP + BNE). The return is a JALR on the link.
//
// Sobel: each interior pixel of an H x W image gets |Gx| + |Gy| with the
// usual 3 x 3 Sobel weights (1, 2, 1). Every neighbour is loaded once with a
// base-plus-offset LOAD and added or subtracted into the two sums (a weight
// of 2 is a second add); |x| uses COMP, BNE and STI.
//
// Checks, per program: every result word against the testbench's own integer
// computation and against the instruction-level reference model, all nine
// registers, and the cycle at which the halt reaches ID against
//   1 + instructions executed + load-use stalls + taken branches.
// Sizes (this design's choice): GEMM 4 x 4 with elements -9..9, Sobel on an
// 8 x 8 image with pixel values 0..255.
module tb_art9_kernels;
  import art9_pkg::*;
  import art9_asm_pkg::*;

  localparam int GN = 4;                        // GEMM size
  localparam int GA = 0, GB = 20, GC = 40;      // matrix base addresses
  localparam int SH = 8, SW = 8;                // Sobel image size
  localparam int SI = 0, SO = 70;               // image / output base addresses

  logic clk = 0, rst_n = 0;
  logic prog_we = 0, ext_en = 0, ext_we = 0;
  tword_t prog_addr = '0, prog_wdata = '0, ext_addr = '0, ext_wdata = '0, ext_rdata, dbg_id_pc;
  ev_t ev;
  int checks = 0, failures = 0;

  art9_core dut (
    .clk(clk), .rst_n(rst_n), .prog_we(prog_we), .prog_addr(prog_addr), .prog_wdata(prog_wdata),
    .ext_en(ext_en), .ext_we(ext_we), .ext_addr(ext_addr), .ext_wdata(ext_wdata),
    .ext_rdata(ext_rdata), .ev(ev), .dbg_id_pc(dbg_id_pc)
  );

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  tword_t prog [$];
  int     m [int];              // model memory, unsigned addresses

  // LUI + LI pair that puts the value v into register r
  task automatic set_reg(int r, int v);
    int lo;
    lo = ((v % 243) + 243) % 243;
    if (lo > 121) lo -= 243;
    prog.push_back(a_lui(r, (v - lo) / 243));
    prog.push_back(a_li(r, lo));
  endtask

  // Run prog (halt at index halt) on the model and on the core, with the
  // data memory holding init (signed address -> value), everything else 0.
  task automatic run(int halt, int init [int], string nm);
    st_t s;
    info_t in;
    int n, lu, tk, prev_rd, exp_cyc, cyc, v;
    bit prev_ld;
    m.delete();
    foreach (init[a]) m[a + WORD_OFS] = init[a];
    for (int i = 0; i < 9; i++) s.regs[i] = 0;
    s.pc = 0; n = 0; lu = 0; tk = 0; prev_ld = 0; prev_rd = -1;
    while (s.pc != halt && n < 1000000) begin
      in = ref_step(s, m, prog[s.pc]);
      if (prev_ld && prev_rd >= 0 && (in.uses[0] == prev_rd || in.uses[1] == prev_rd)) lu++;
      prev_ld = in.is_load; prev_rd = in.rd;
      tk += in.taken;
      n++;
    end
    exp_cyc = 1 + n + lu + tk;
    in = ref_step(s, m, prog[s.pc]);        // the halt writes its link too
    rst_n = 0;
    @(negedge clk);
    foreach (prog[i]) begin
      prog_we = 1; prog_addr = val_word(i - WORD_OFS); prog_wdata = prog[i];
      @(negedge clk);
    end
    prog_we = 0;
    ext_en = 1; ext_we = 1;
    for (int i = 0; i < P9; i++) begin
      ext_addr  = val_word(i - WORD_OFS);
      ext_wdata = val_word(init.exists(i - WORD_OFS) ? init[i - WORD_OFS] : 0);
      @(negedge clk);
    end
    ext_en = 0; ext_we = 0;
    rst_n = 1;
    cyc = 0;
    while (!(ev.taken && fval(dbg_id_pc, 0, 9) == halt - WORD_OFS) && cyc < 500000) begin
      @(negedge clk);
      cyc++;
    end
    repeat (6) @(negedge clk);
    checks++;
    if (cyc != exp_cyc) begin
      failures++;
      $display("FAIL %s: halt in ID at cycle %0d, expected %0d", nm, cyc, exp_cyc);
    end
    for (int r = 0; r < 9; r++) begin
      checks++;
      v = fval(dut.u_trf.regs[r], 0, 9);
      if (v != s.regs[r]) begin
        failures++;
        $display("FAIL %s: T%0d=%0d expected %0d", nm, r, v, s.regs[r]);
      end
    end
    $display("%s: %0d program words, %0d cycles (%0d instructions, %0d load-use, %0d taken)",
             nm, prog.size(), cyc, n, lu, tk);
    rst_n = 0;
  endtask

  // Read data word at signed address a (core in reset) and compare
  task automatic expect_word(int a, int e, string nm);
    int v;
    ext_en = 1; ext_we = 0; ext_addr = val_word(a);
    @(negedge clk);
    ext_en = 0;
    v = fval(ext_rdata, 0, 9);
    checks += 2;
    if (v != e) begin
      failures++;
      $display("FAIL %s: word %0d = %0d, expected %0d", nm, a, v, e);
    end
    if (v != m[a + WORD_OFS]) begin
      failures++;
      $display("FAIL %s: word %0d = %0d, model %0d", nm, a, v, m[a + WORD_OFS]);
    end
  endtask

  // ---------------------------------------------------------------- GEMM
  task automatic gemm();
    int init [int];
    int am [GN][GN], bm [GN][GN];
    int halt, sub, acc;
    for (int i = 0; i < GN; i++)
      for (int j = 0; j < GN; j++) begin
        am[i][j] = int'($urandom_range(18)) - 9;
        bm[i][j] = int'($urandom_range(18)) - 9;
        init[GA + i*GN + j] = am[i][j];
        init[GB + i*GN + j] = bm[i][j];
      end
    am[0][0] = 9; bm[0][0] = -9;            // extremes
    init[GA] = 9; init[GB] = -9;
    // main program; halt and subroutine addresses are known once it is built
    halt = 2 + 2 + 1 + GN*GN*(1 + GN*6 + 2);
    sub  = halt + 1;
    prog = {};
    prog.push_back(a_lui(0, 0));            // T0 = 0
    prog.push_back(a_lui(5, 0));            // T5 = address register
    set_reg(7, sub - WORD_OFS);             // T7 = multiply routine
    prog.push_back(a_nop());
    for (int i = 0; i < GN; i++)
      for (int j = 0; j < GN; j++) begin
        prog.push_back(a_lui(8, 0));        // acc = 0
        for (int k = 0; k < GN; k++) begin
          prog.push_back(a_li(5, GA + i*GN + k));
          prog.push_back(a_load(1, 5, 0));
          prog.push_back(a_li(5, GB + k*GN + j));
          prog.push_back(a_load(2, 5, 0));
          prog.push_back(a_jalr(6, 7, 0));  // T3 = T1 * T2
          prog.push_back(a_r(F_ADD, 8, 3));
        end
        prog.push_back(a_li(5, GC + i*GN + j));
        prog.push_back(a_store(8, 5, 0));
      end
    checks++;
    if (prog.size() != halt) begin
      failures++;
      $display("FAIL gemm4x4: program layout %0d words, expected %0d", prog.size(), halt);
    end
    prog.push_back(a_jal(8, 0));            // halt
    // multiply: T3 = T1 * T2 (T1, T2, T4 clobbered), return to T6
    prog.push_back(a_lui(3, 0));            // sub+0
    prog.push_back(a_bne(2, 1, 2));         // sub+1: lowest trit != +1 -> sub+3
    prog.push_back(a_r(F_ADD, 3, 1));       // sub+2
    prog.push_back(a_bne(2, -1, 2));        // sub+3: lowest trit != -1 -> sub+5
    prog.push_back(a_r(F_SUB, 3, 1));       // sub+4
    prog.push_back(a_i(IF_SLI, 1, 1));      // sub+5: multiplicand * 3
    prog.push_back(a_i(IF_SRI, 2, 1));      // sub+6: next multiplier trit
    prog.push_back(a_r(F_MV, 4, 2));        // sub+7
    prog.push_back(a_r(F_COMP, 4, 0));      // sub+8
    prog.push_back(a_bne(4, 0, -8));        // sub+9: more trits -> sub+1
    prog.push_back(a_jalr(4, 6, 0));        // sub+10: return
    run(halt, init, "gemm4x4");
    for (int i = 0; i < GN; i++)
      for (int j = 0; j < GN; j++) begin
        acc = 0;
        for (int k = 0; k < GN; k++) acc += am[i][k] * bm[k][j];
        expect_word(GC + i*GN + j, acc, "gemm4x4");
      end
  endtask

  // ---------------------------------------------------------------- Sobel
  function automatic int wx(int dr, int dc);  // horizontal gradient weight
    return dc * ((dr == 0) ? 2 : 1);
  endfunction
  function automatic int wy(int dr, int dc);  // vertical gradient weight
    return dr * ((dc == 0) ? 2 : 1);
  endfunction

  task automatic add_w(int acc, int w);       // acc += w * T3
    for (int i = 0; i < ((w < 0) ? -w : w); i++)
      prog.push_back(a_r((w < 0) ? F_SUB : F_ADD, acc, 3));
  endtask

  task automatic abs_reg(int r);              // r = |r|, via T4
    prog.push_back(a_r(F_MV, 4, r));
    prog.push_back(a_r(F_COMP, 4, 0));
    prog.push_back(a_bne(4, -1, 2));
    prog.push_back(a_r(F_STI, r, r));
  endtask

  task automatic sobel();
    int init [int];
    int img [SH][SW];
    int halt, gx, gy;
    for (int r = 0; r < SH; r++)
      for (int c = 0; c < SW; c++) begin
        img[r][c] = ((r + c) % 3 == 0) ? 255 : int'($urandom_range(255));
        init[SI + r*SW + c] = img[r][c];
      end
    prog = {};
    prog.push_back(a_lui(0, 0));
    prog.push_back(a_lui(5, 0));
    for (int r = 1; r < SH - 1; r++)
      for (int c = 1; c < SW - 1; c++) begin
        prog.push_back(a_lui(1, 0));        // Gx
        prog.push_back(a_lui(2, 0));        // Gy
        prog.push_back(a_li(5, SI + r*SW + c));
        for (int dr = -1; dr <= 1; dr++)
          for (int dc = -1; dc <= 1; dc++)
            if (dr != 0 || dc != 0) begin
              prog.push_back(a_load(3, 5, dr*SW + dc));
              add_w(1, wx(dr, dc));
              add_w(2, wy(dr, dc));
            end
        abs_reg(1);
        abs_reg(2);
        prog.push_back(a_r(F_ADD, 1, 2));
        prog.push_back(a_li(5, SO + (r-1)*(SW-2) + (c-1)));
        prog.push_back(a_store(1, 5, 0));
      end
    halt = prog.size();
    prog.push_back(a_jal(8, 0));
    run(halt, init, "sobel8x8");
    for (int r = 1; r < SH - 1; r++)
      for (int c = 1; c < SW - 1; c++) begin
        gx = 0; gy = 0;
        for (int dr = -1; dr <= 1; dr++)
          for (int dc = -1; dc <= 1; dc++) begin
            gx += wx(dr, dc) * img[r+dr][c+dc];
            gy += wy(dr, dc) * img[r+dr][c+dc];
          end
        expect_word(SO + (r-1)*(SW-2) + (c-1), ((gx < 0) ? -gx : gx) + ((gy < 0) ? -gy : gy),
                    "sobel8x8");
      end
  endtask

  initial begin
    gemm();
    sobel();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
