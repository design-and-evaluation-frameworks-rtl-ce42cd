// tb_tmem: self-checking test of the synchronous single-port ternary memory
// at its full 3^9-word size. Random writes and reads against an associative
// model; checks the one-cycle read latency, read-first behaviour on a write,
// that rdata holds while en is low, and the two ends of the address range
// (signed address -9841 is word 0, +9841 is word 19682).
module tb_tmem;
  import art9_pkg::*;
  import art9_asm_pkg::*;

  logic clk = 0, en = 0, we = 0;
  tword_t addr, wd, rd;
  int model [int];
  int checks = 0, failures = 0;

  tmem dut (.clk(clk), .en(en), .we(we), .addr(addr), .wdata(wd), .rdata(rd));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic acc(bit w, int a, int d, bit check_read);
    int old;
    @(negedge clk);
    en = 1; we = w; addr = put('0, 0, 9, a); wd = put('0, 0, 9, d);
    old = model.exists(a) ? model[a] : 0;
    @(posedge clk);
    #1;
    en = 0; we = 0;
    if (w) model[a] = d;
    if (check_read) begin
      checks++;
      if (fval(rd, 0, 9) != old) begin
        failures++;
        $display("FAIL addr %0d read %0d exp %0d", a, fval(rd, 0, 9), old);
      end
    end
  endtask

  initial begin
    int a, hold;
    // write every address used below first so all reads are defined
    for (int i = -60; i <= 60; i++) acc(1, i, i * 7, 0);
    acc(1, -9841, 1111, 0);
    acc(1, 9841, -2222, 0);
    acc(0, -9841, 0, 1);
    acc(0, 9841, 0, 1);
    for (int n = 0; n < 3000; n++) begin
      a = int'($urandom_range(120)) - 60;
      acc($urandom_range(1), a, int'($urandom_range(19682)) - 9841, 1);
    end
    // rdata holds while en is low
    hold = fval(rd, 0, 9);
    @(negedge clk); addr = put('0, 0, 9, 5); repeat (3) @(posedge clk); #1;
    checks++;
    if (fval(rd, 0, 9) != hold) begin failures++; $display("FAIL hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
