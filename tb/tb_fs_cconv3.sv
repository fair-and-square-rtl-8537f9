// tb_fs_cconv3: streams random complex samples through the N-tap (N = 8)
// CPM3-based complex convolution, with idle cycles, and checks z_valid and
// z2 = 2 * sum_i (c_i + js_i)(x_{t-i} + jy_{t-i}) after every sample. Sw is
// the complex weight term of the three-square form, computed here. The last
// run uses unit weights.
module tb_fs_cconv3;
  localparam int DW = 8, AW = 32, N = 8, L = 60;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, z_valid;
  logic signed [DW-1:0] x = '0, y = '0, c [N], s [N];
  logic signed [AW-1:0] sw_re = '0, sw_im = '0, z2_re, z2_im;

  always #5 clk = ~clk;

  fs_cconv3 dut (.clk(clk), .rst_n(rst_n), .en(en), .x(x), .y(y), .c(c), .s(s),
                .sw_re(sw_re), .sw_im(sw_im), .z2_re(z2_re), .z2_im(z2_im), .z_valid(z_valid));

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int Ct [N], St [N], XR [L], XI [L];

  initial begin
    foreach (c[i]) begin c[i] = '0; s[i] = '0; end
    for (int run = 0; run < 3; run++) begin
      int vr, vi;
      rst_n = 0;
      repeat (2) @(negedge clk);
      rst_n = 1;
      vr = 0; vi = 0;
      foreach (Ct[i]) begin
        if (run == 2) begin
          Ct[i] = (i % 2) ? 0 : 1; St[i] = (i % 2) ? -1 : 0;
        end else begin
          Ct[i] = int'($urandom_range(0, 255)) - 128; St[i] = int'($urandom_range(0, 255)) - 128;
        end
        c[i] = DW'(Ct[i]); s[i] = DW'(St[i]);
        vr += -Ct[i]*Ct[i] + (Ct[i]+St[i])*(Ct[i]+St[i]);
        vi += -Ct[i]*Ct[i] - (St[i]-Ct[i])*(St[i]-Ct[i]);
      end
      sw_re = AW'(vr); sw_im = AW'(vi);
      foreach (XR[t]) begin
        XR[t] = int'($urandom_range(0, 255)) - 128; XI[t] = int'($urandom_range(0, 255)) - 128;
      end
      for (int t = 0; t < L; t++) begin
        en = 1; x = DW'(XR[t]); y = DW'(XI[t]);
        @(negedge clk);
        en = 0; x = DW'($urandom);
        check(int'(z_valid), (t >= N-1) ? 1 : 0, "z_valid");
        if (t >= N-1) begin
          int zr, zi; zr = 0; zi = 0;
          for (int i = 0; i < N; i++) begin
            zr += Ct[i]*XR[t-i] - St[i]*XI[t-i];
            zi += Ct[i]*XI[t-i] + St[i]*XR[t-i];
          end
          check(z2_re, 2*zr, $sformatf("2Re z at t=%0d", t));
          check(z2_im, 2*zi, $sformatf("2Im z at t=%0d", t));
          if ($urandom_range(0, 3) == 0) @(negedge clk);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
