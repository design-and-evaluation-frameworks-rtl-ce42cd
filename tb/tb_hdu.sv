// tb_hdu: self-checking test of the hazard detection unit. Random source
// indices, use flags and EX/MEM/WB destinations; the expected forwarding
// select is the nearest writing producer of each used source (EX -> FWD_M,
// MEM -> FWD_W, WB -> FWD_H, none -> FWD_RF) and the expected stall is a load
// in EX writing a register the ID instruction reads.
module tb_hdu;
  import art9_pkg::*;
  import art9_asm_pkg::*;

  tidx_t id_ra, id_rb, ex_rd, mem_rd, wb_rd;
  logic  ua, ub, ex_we, ex_load, mem_we, wb_we, stall;
  fwd_e  fa, fb, fi;
  int checks = 0, failures = 0;
  int n_stall = 0;

  hdu dut (.id_ra(id_ra), .id_use_a(ua), .id_rb(id_rb), .id_use_b(ub),
           .ex_we(ex_we), .ex_rd(ex_rd), .ex_load(ex_load), .mem_we(mem_we), .mem_rd(mem_rd),
           .wb_we(wb_we), .wb_rd(wb_rd), .fwd_a(fa), .fwd_b(fb), .fwd_id(fi), .stall(stall));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic tidx_t ix(int r);
    tword_t w;
    w = put('0, 0, 2, r - 4);
    return w[1:0];
  endfunction

  initial begin
    int ra, rb, re, rm, rw;
    fwd_e ea, eb;
    bit es;
    for (int n = 0; n < 5000; n++) begin
      // small index range so that matches are frequent
      ra = $urandom_range(2); rb = $urandom_range(2); re = $urandom_range(2);
      rm = $urandom_range(2); rw = $urandom_range(2);
      id_ra = ix(ra); id_rb = ix(rb); ex_rd = ix(re); mem_rd = ix(rm); wb_rd = ix(rw);
      ua = $urandom_range(1); ub = $urandom_range(1);
      ex_we = $urandom_range(1); ex_load = $urandom_range(1);
      mem_we = $urandom_range(1); wb_we = $urandom_range(1);
      #1;
      ea = !ua ? FWD_RF : (ex_we && ra == re) ? FWD_M : (mem_we && ra == rm) ? FWD_W :
           (wb_we && ra == rw) ? FWD_H : FWD_RF;
      eb = !ub ? FWD_RF : (ex_we && rb == re) ? FWD_M : (mem_we && rb == rm) ? FWD_W :
           (wb_we && rb == rw) ? FWD_H : FWD_RF;
      es = ex_load && ex_we && ((ua && ra == re) || (ub && rb == re));
      n_stall += es;
      checks++;
      if (fa != ea || fb != eb || fi != eb || stall != es) begin
        failures++;
        if (failures < 10) $display("FAIL fa=%s/%s fb=%s/%s stall=%0b/%0b", fa.name(), ea.name(),
                                    fb.name(), eb.name(), stall, es);
      end
    end
    checks++;
    if (n_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
