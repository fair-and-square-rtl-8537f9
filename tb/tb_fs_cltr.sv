// tb_fs_cltr: random complex N-point linear transforms (N = 8) on the
// four-square CPM engine, including one with unit coefficients (the 4-point
// DFT twiddles 1, -j, -1, j scaled to 1), for which S_k = -N. Accumulators
// are initialised with S_k(1+j); checks done timing and 2(X_k + jY_k).
module tb_fs_cltr;
  localparam int DW = 8, AW = 32, N = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, init = 0, en = 0, done;
  logic signed [AW-1:0] sk [N], acc_re [N], acc_im [N];
  logic signed [DW-1:0] x = '0, y = '0, c [N], s [N];

  always #5 clk = ~clk;

  fs_cltr dut (.clk(clk), .rst_n(rst_n), .init(init), .sk(sk), .en(en), .x(x),
               .y(y), .c(c), .s(s), .acc_re(acc_re), .acc_im(acc_im), .done(done));

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

  int C [N][N], S [N][N], XR [N], XI [N];

  initial begin
    foreach (sk[k]) sk[k] = '0;
    foreach (c[k]) begin c[k] = '0; s[k] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      foreach (C[k, i]) begin
        if (trial == 1) begin
          // unit complex coefficients: (-j)^(k*i)
          case ((k*i) % 4)
            0: begin C[k][i] = 1;  S[k][i] = 0;  end
            1: begin C[k][i] = 0;  S[k][i] = -1; end
            2: begin C[k][i] = -1; S[k][i] = 0;  end
            default: begin C[k][i] = 0; S[k][i] = 1; end
          endcase
        end else begin
          C[k][i] = (trial == 0) ? -128 : int'($urandom_range(0, 255)) - 128;
          S[k][i] = (trial == 0) ? -128 : int'($urandom_range(0, 255)) - 128;
        end
      end
      foreach (XR[i]) begin
        XR[i] = (trial == 0) ? -128 : int'($urandom_range(0, 255)) - 128;
        XI[i] = (trial == 0) ? 127  : int'($urandom_range(0, 255)) - 128;
      end
      for (int k = 0; k < N; k++) begin
        int v; v = 0;
        for (int i = 0; i < N; i++) v -= C[k][i]*C[k][i] + S[k][i]*S[k][i];
        if (trial == 1) check(v, -N, "unit coefficients give S_k = -N");
        sk[k] = AW'(v);
      end
      init = 1;
      @(negedge clk);
      init = 0;
      for (int i = 0; i < N; i++) begin
        check(int'(done), 0, "done low before N samples");
        en = 1; x = DW'(XR[i]); y = DW'(XI[i]);
        foreach (c[k]) begin c[k] = DW'(C[k][i]); s[k] = DW'(S[k][i]); end
        @(negedge clk);
        if (i < N-1 && $urandom_range(0, 3) == 0) begin
          en = 0; x = DW'($urandom);
          @(negedge clk);
        end
      end
      en = 0;
      check(int'(done), 1, "done after N samples");
      for (int k = 0; k < N; k++) begin
        int vr, vi; vr = 0; vi = 0;
        for (int i = 0; i < N; i++) begin
          vr += C[k][i]*XR[i] - S[k][i]*XI[i];
          vi += C[k][i]*XI[i] + S[k][i]*XR[i];
        end
        check(acc_re[k], 2*vr, $sformatf("2*X[%0d]", k));
        check(acc_im[k], 2*vi, $sformatf("2*Y[%0d]", k));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
