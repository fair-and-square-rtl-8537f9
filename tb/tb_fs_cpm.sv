// tb_fs_cpm: checks the four-square complex partial multiplication against
// its defining sums of squares and checks that, with the operand-only
// correction terms added, it gives twice the complex product.
module tb_fs_cpm;
  int checks = 0, failures = 0;
  logic signed [7:0] a, b, c, s;
  logic [18:0] re, im;

  fs_cpm dut (.a(a), .b(b), .c(c), .s(s), .re(re), .im(im));

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
      int ia, ib, ic, is, corr;
      if (n < 16) begin
        ia = (n & 1) ? -128 : 127; ib = (n & 2) ? -128 : 127;
        ic = (n & 4) ? -128 : 127; is = (n & 8) ? -128 : 127;
      end else begin
        ia = int'($urandom_range(0, 255)) - 128; ib = int'($urandom_range(0, 255)) - 128;
        ic = int'($urandom_range(0, 255)) - 128; is = int'($urandom_range(0, 255)) - 128;
      end
      a = 8'(ia); b = 8'(ib); c = 8'(ic); s = 8'(is); #1;
      check(int'(re), (ia+ic)*(ia+ic) + (ib-is)*(ib-is), "re");
      check(int'(im), (ib+ic)*(ib+ic) + (ia+is)*(ia+is), "im");
      corr = -(ia*ia + ib*ib) - (ic*ic + is*is);
      check(int'(re) + corr, 2*(ia*ic - ib*is), "2*Re(product)");
      check(int'(im) + corr, 2*(ib*ic + ia*is), "2*Im(product)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
