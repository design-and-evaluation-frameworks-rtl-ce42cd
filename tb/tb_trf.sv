// tb_trf: self-checking test of the ternary register file. Checks the reset
// value, random synchronous writes against a model array, both asynchronous
// read ports in the same cycle, and that a write is not visible on a read
// port until the clock edge.
module tb_trf;
  import art9_pkg::*;
  import art9_asm_pkg::*;

  logic clk = 0, rst_n = 0, we = 0;
  tidx_t ra, rb, wi;
  tword_t rda, rdb, wd;
  int model [9];
  int checks = 0, failures = 0;

  trf dut (.clk(clk), .rst_n(rst_n), .ra_idx(ra), .rb_idx(rb), .ra_data(rda),
           .rb_data(rdb), .we(we), .w_idx(wi), .w_data(wd));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic tidx_t ix(int r);
    tword_t w;
    w = put('0, 0, 2, r - 4);
    return w[1:0];
  endfunction

  task automatic chk(int r0, int r1);
    ra = ix(r0); rb = ix(r1);
    #1;
    checks += 2;
    if (fval(rda, 0, 9) != model[r0] || fval(rdb, 0, 9) != model[r1]) begin
      failures++;
      $display("FAIL read T%0d=%0d T%0d=%0d exp %0d %0d", r0, fval(rda, 0, 9), r1,
               fval(rdb, 0, 9), model[r0], model[r1]);
    end
  endtask

  initial begin
    for (int i = 0; i < 9; i++) model[i] = 0;
    ra = ix(0); rb = ix(0); wi = ix(0); wd = '0;
    #12 rst_n = 1;
    for (int i = 0; i < 9; i++) chk(i, 8 - i);
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we = ($urandom_range(3) != 0);
      wi = ix($urandom_range(8));
      wd = put('0, 0, 9, int'($urandom_range(19682)) - 9841);
      // before the edge the old value is still read
      chk(fval({16'b0, wi}, 0, 2) + 4, $urandom_range(8));
      @(posedge clk);
      if (we) model[fval({16'b0, wi}, 0, 2) + 4] = fval(wd, 0, 9);
      #1 we = 0;
      chk($urandom_range(8), $urandom_range(8));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
