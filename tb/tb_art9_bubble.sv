// tb_art9_bubble: bubble sort running on the full ART-9 core (default sizes).
//
// A 22-instruction bubble-sort program, assembled with art9_asm_pkg, sorts an
// array of N words kept in the data memory at signed addresses 0..N-1 into
// ascending order. The inner loop loads a neighbour pair, compares it with
// COMP, branches over the swap with BNE and counts down with ADDI/COMP/BNE;
// the program ends in a jump-to-self. The array is written through the TDM
// access port while the core is in reset, then the core runs until the halt
// reaches ID.
//
// Checks, per array: the array read back is the input sorted by the
// testbench (independent of the core and of the reference model); every word
// equals the reference model's memory; all nine registers match the model;
// and the cycle at which the halt reaches ID equals
//   1 + instructions executed + load-use stalls + taken branches
// as counted on the model. Arrays: random (N=16), reversed (N=16, the most
// swaps), random with many duplicates (N=32).
module tb_art9_bubble;
  import art9_pkg::*;
  import art9_asm_pkg::*;

  localparam int HALT = 21;

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

  task automatic build(int n);
    prog = {};
    prog.push_back(a_lui(0, 0));            //  0: T0 = 0 (array base, zero)
    prog.push_back(a_lui(1, 0));            //  1:
    prog.push_back(a_li(1, n - 1));         //  2: T1 = passes left
    prog.push_back(a_lui(2, 0));            //  3: outer: T2 = &A[0]
    prog.push_back(a_r(F_MV, 3, 1));        //  4: T3 = pairs this pass
    prog.push_back(a_load(4, 2, 0));        //  5: inner: T4 = A[i]
    prog.push_back(a_load(5, 2, 1));        //  6: T5 = A[i+1]
    prog.push_back(a_r(F_MV, 6, 4));        //  7:
    prog.push_back(a_r(F_COMP, 6, 5));      //  8: T6 = sign(A[i] - A[i+1])
    prog.push_back(a_bne(6, 1, 3));         //  9: in order -> 12
    prog.push_back(a_store(5, 2, 0));       // 10: swap
    prog.push_back(a_store(4, 2, 1));       // 11:
    prog.push_back(a_addi(2, 1));           // 12: i++
    prog.push_back(a_addi(3, -1));          // 13:
    prog.push_back(a_r(F_MV, 7, 3));        // 14:
    prog.push_back(a_r(F_COMP, 7, 0));      // 15:
    prog.push_back(a_bne(7, 0, -11));       // 16: more pairs -> 5
    prog.push_back(a_addi(1, -1));          // 17:
    prog.push_back(a_r(F_MV, 7, 1));        // 18:
    prog.push_back(a_r(F_COMP, 7, 0));      // 19:
    prog.push_back(a_bne(7, 0, -17));       // 20: more passes -> 3
    prog.push_back(a_jal(8, 0));            // 21: halt
  endtask

  task automatic sort_and_check(int arr [$], string nm);
    st_t s;
    int m [int];
    int srt [$];
    info_t in;
    int n, lu, tk, prev_rd, exp_cyc, cyc, v;
    bit prev_ld;
    build(arr.size());
    foreach (arr[i]) m[i + WORD_OFS] = arr[i];
    // reference run
    for (int i = 0; i < 9; i++) s.regs[i] = 0;
    s.pc = 0; n = 0; lu = 0; tk = 0; prev_ld = 0; prev_rd = -1;
    while (s.pc != HALT && n < 1000000) begin
      in = ref_step(s, m, prog[s.pc]);
      if (prev_ld && prev_rd >= 0 && (in.uses[0] == prev_rd || in.uses[1] == prev_rd)) lu++;
      prev_ld = in.is_load; prev_rd = in.rd;
      tk += in.taken;
      n++;
    end
    exp_cyc = 1 + n + lu + tk;
    in = ref_step(s, m, prog[s.pc]);        // the halt writes its link too
    // load program and data, clearing the rest of the TDM
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
      ext_wdata = val_word((i >= WORD_OFS && i < WORD_OFS + arr.size()) ? arr[i - WORD_OFS] : 0);
      @(negedge clk);
    end
    ext_en = 0; ext_we = 0;
    // run
    rst_n = 1;
    cyc = 0;
    while (!(ev.taken && fval(dbg_id_pc, 0, 9) == HALT - WORD_OFS) && cyc < 500000) begin
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
    // read the array back
    srt = arr;
    for (int i = 1; i < srt.size(); i++)    // insertion sort, signed compare
      for (int j = i; j > 0 && srt[j-1] > srt[j]; j--) begin
        v = srt[j]; srt[j] = srt[j-1]; srt[j-1] = v;
      end
    rst_n = 0;
    ext_en = 1; ext_we = 0;
    foreach (srt[i]) begin
      ext_addr = val_word(i);
      @(negedge clk);
      v = fval(ext_rdata, 0, 9);
      checks += 2;
      if (v != srt[i]) begin
        failures++;
        $display("FAIL %s: A[%0d]=%0d, sorted value %0d", nm, i, v, srt[i]);
      end
      if (v != m[i + WORD_OFS]) begin
        failures++;
        $display("FAIL %s: A[%0d]=%0d, model %0d", nm, i, v, m[i + WORD_OFS]);
      end
    end
    ext_en = 0;
    $display("%s: N=%0d sorted in %0d cycles (%0d instructions, %0d load-use, %0d taken)",
             nm, arr.size(), cyc, n, lu, tk);
  endtask

  initial begin
    int arr [$];
    arr = {};
    for (int i = 0; i < 16; i++) arr.push_back(int'($urandom_range(19682)) - 9841);
    sort_and_check(arr, "random16");
    arr = {};
    for (int i = 0; i < 16; i++) arr.push_back(500 - 37 * i);
    sort_and_check(arr, "reversed16");
    arr = {};
    for (int i = 0; i < 32; i++) arr.push_back(int'($urandom_range(6)) - 3);
    sort_and_check(arr, "dups32");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
