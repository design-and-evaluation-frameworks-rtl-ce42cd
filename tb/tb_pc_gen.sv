// tb_pc_gen: self-checking test of the PC generator: reset to address 0
// (all trits -1), increment by one per cycle, hold, redirect to a target,
// hold winning over taken, and wrap-around at the top of the address range.
module tb_pc_gen;
  import art9_pkg::*;
  import art9_asm_pkg::*;

  logic clk = 0, rst_n = 0, hold = 0, taken = 0;
  tword_t target, pc;
  int exp_pc;
  int checks = 0, failures = 0;

  pc_gen dut (.clk(clk), .rst_n(rst_n), .hold(hold), .taken(taken), .target(target), .pc(pc));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk();
    checks++;
    if (fval(pc, 0, 9) != exp_pc) begin
      failures++;
      $display("FAIL pc=%0d exp=%0d", fval(pc, 0, 9), exp_pc);
    end
  endtask

  initial begin
    target = '0;
    exp_pc = -9841;
    #6 chk();                 // after the first clock edge in reset
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      hold = ($urandom_range(4) == 0);
      taken = ($urandom_range(3) == 0);
      target = put('0, 0, 9, int'($urandom_range(19682)) - 9841);
      if (n == 100) begin hold = 0; taken = 1; target = put('0, 0, 9, 9840); end
      @(posedge clk);
      if (!hold) exp_pc = taken ? fval(target, 0, 9) : wrap(exp_pc + 1);
      #1 chk();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
