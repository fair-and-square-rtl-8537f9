// tb_fs_cpm3_acc: random complex dot products sum (a_i + jb_i)(c_i + js_i)
// through the CPM3 accumulator. It is initialised with
// (Sab + Scs) + j(Sba + Ssc), computed here from the operands, and must end
// at twice the complex dot product.
module tb_fs_cpm3_acc;
  localparam int DW = 8, AW = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic init = 0, en = 0;
  logic signed [AW-1:0] init_re = '0, init_im = '0;
  logic signed [DW-1:0] a = '0, b = '0, c = '0, s = '0;
  logic signed [AW-1:0] acc_re, acc_im;

  always #5 clk = ~clk;

  fs_cpm3_acc dut (.clk(clk), .rst_n(rst_n), .init(init), .init_re(init_re),
                   .init_im(init_im), .en(en), .a(a), .b(b), .c(c), .s(s),
                   .acc_re(acc_re), .acc_im(acc_im));

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      int n, va[24], vb[24], vc[24], vs[24];
      int sab, sba, scs, ssc, zre, zim;
      n = int'($urandom_range(1, 24));
      sab = 0; sba = 0; scs = 0; ssc = 0; zre = 0; zim = 0;
      for (int i = 0; i < n; i++) begin
        va[i] = int'($urandom_range(0, 255)) - 128; vb[i] = int'($urandom_range(0, 255)) - 128;
        vc[i] = int'($urandom_range(0, 255)) - 128; vs[i] = int'($urandom_range(0, 255)) - 128;
        sab += -(va[i]+vb[i])*(va[i]+vb[i]) + vb[i]*vb[i];
        sba += -(va[i]+vb[i])*(va[i]+vb[i]) - va[i]*va[i];
        scs += -vc[i]*vc[i] + (vc[i]+vs[i])*(vc[i]+vs[i]);
        ssc += -vc[i]*vc[i] - (vs[i]-vc[i])*(vs[i]-vc[i]);
        zre += va[i]*vc[i] - vb[i]*vs[i];
        zim += vb[i]*vc[i] + va[i]*vs[i];
      end
      @(negedge clk);
      init = 1; init_re = AW'(sab + scs); init_im = AW'(sba + ssc);
      @(negedge clk);
      init = 0;
      for (int i = 0; i < n; i++) begin
        en = 1; a = DW'(va[i]); b = DW'(vb[i]); c = DW'(vc[i]); s = DW'(vs[i]);
        @(negedge clk);
        if ($urandom_range(0, 3) == 0) begin
          en = 0; a = DW'($urandom);
          @(negedge clk);
        end
      end
      en = 0;
      check(acc_re, 2*zre, $sformatf("2*Re z, n=%0d", n));
      check(acc_im, 2*zim, $sformatf("2*Im z, n=%0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
