// tb_fs_cpm3: checks the three-square complex partial multiplication against
// its defining squares and checks that, with the operand-only correction
// terms added, it gives twice the complex product.
module tb_fs_cpm3;
  int checks = 0, failures = 0;
  logic signed [7:0]  a, b, c, s;
  logic signed [21:0] re, im;

  fs_cpm3 dut (.a(a), .b(b), .c(c), .s(s), .re(re), .im(im));

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      int ia, ib, ic, is, q1, q2, q3, cre, cim;
      if (n < 16) begin
        ia = (n & 1) ? -128 : 127; ib = (n & 2) ? -128 : 127;
        ic = (n & 4) ? -128 : 127; is = (n & 8) ? -128 : 127;
      end else begin
        ia = int'($urandom_range(0, 255)) - 128; ib = int'($urandom_range(0, 255)) - 128;
        ic = int'($urandom_range(0, 255)) - 128; is = int'($urandom_range(0, 255)) - 128;
      end
      a = 8'(ia); b = 8'(ib); c = 8'(ic); s = 8'(is); #1;
      q1 = (ic+ia+ib)*(ic+ia+ib); q2 = (ib+ic+is)*(ib+ic+is); q3 = (ia+is-ic)*(ia+is-ic);
      check(int'(re), q1 - q2, "re");
      check(int'(im), q1 + q3, "im");
      // Sab + Scs and Sba + Ssc for a single product
      cre = (-(ia+ib)*(ia+ib) + ib*ib) + (-ic*ic + (ic+is)*(ic+is));
      cim = (-(ia+ib)*(ia+ib) - ia*ia) + (-ic*ic - (is-ic)*(is-ic));
      check(int'(re) + cre, 2*(ia*ic - ib*is), "2*Re(product)");
      check(int'(im) + cim, 2*(ib*ic + ia*is), "2*Im(product)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
