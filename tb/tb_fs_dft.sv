// tb_fs_dft: 8-point discrete Fourier transforms on the square-based
// transform engines at their default size.
//
// Twiddles are quantised to 8 bits: c_ki = round(127 cos(2 pi k i / 8)),
// s_ki = round(-127 sin(2 pi k i / 8)). Three engines transform random
// samples:
//   - fs_cltr  (four-square CPM) and fs_cltr3 (three-square CPM3) take
//     complex samples x + jy;
//   - two fs_ltr instances take real samples, one with the c coefficients
//     (real part) and one with the s coefficients (imaginary part).
// Each result is checked exactly against the integer DFT with the same
// quantised twiddles, and against the floating-point DFT within the error
// that 8-bit twiddles allow (at most 8.1 in sample units for 8 points).
module tb_fs_dft;
  localparam int DW = 8, AW = 32, N = 8;
  localparam real PI = 3.14159265358979323846;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, init = 0, en = 0;
  logic done4, done3, done_r, done_i;
  logic signed [DW-1:0] x = '0, y = '0, c [N], s [N];
  logic signed [AW-1:0] sk [N], sx [N], sy [N], swc [N], sws [N];
  logic signed [AW-1:0] a4_re [N], a4_im [N], a3_re [N], a3_im [N], ar [N], ai [N];

  always #5 clk = ~clk;

  fs_cltr  u_cpm  (.clk(clk), .rst_n(rst_n), .init(init), .sk(sk), .en(en), .x(x), .y(y),
                   .c(c), .s(s), .acc_re(a4_re), .acc_im(a4_im), .done(done4));
  fs_cltr3 u_cpm3 (.clk(clk), .rst_n(rst_n), .init(init), .sx(sx), .sy(sy), .en(en), .x(x),
                   .y(y), .c(c), .s(s), .acc_re(a3_re), .acc_im(a3_im), .done(done3));
  fs_ltr   u_re   (.clk(clk), .rst_n(rst_n), .init(init), .sw(swc), .en(en), .x(x),
                   .w(c), .acc(ar), .done(done_r));
  fs_ltr   u_im   (.clk(clk), .rst_n(rst_n), .init(init), .sw(sws), .en(en), .x(x),
                   .w(s), .acc(ai), .done(done_i));

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic check_near(input real got, input real exp, input string what);
    checks++;
    if (got - exp > 8.1 || exp - got > 8.1) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %f expected %f", what, got, exp);
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
    foreach (C[k, i]) begin
      C[k][i] = $rtoi($floor(127.0 * $cos(2.0*PI*k*i/N) + 0.5));
      S[k][i] = $rtoi($floor(-127.0 * $sin(2.0*PI*k*i/N) + 0.5));
    end
    for (int k = 0; k < N; k++) begin
      int v4, vx, vy, vc, vs;
      v4 = 0; vx = 0; vy = 0; vc = 0; vs = 0;
      for (int i = 0; i < N; i++) begin
        v4 -= C[k][i]*C[k][i] + S[k][i]*S[k][i];
        vx += -C[k][i]*C[k][i] + (C[k][i]+S[k][i])*(C[k][i]+S[k][i]);
        vy += -C[k][i]*C[k][i] - (S[k][i]-C[k][i])*(S[k][i]-C[k][i]);
        vc -= C[k][i]*C[k][i];
        vs -= S[k][i]*S[k][i];
      end
      sk[k] = AW'(v4); sx[k] = AW'(vx); sy[k] = AW'(vy); swc[k] = AW'(vc); sws[k] = AW'(vs);
    end
    foreach (c[k]) begin c[k] = '0; s[k] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 10; trial++) begin
      foreach (XR[i]) begin
        XR[i] = int'($urandom_range(0, 255)) - 128;
        XI[i] = int'($urandom_range(0, 255)) - 128;
      end
      // complex-sample pass: fs_cltr and fs_cltr3 (fs_ltr sees x as well)
      for (int pass = 0; pass < 2; pass++) begin
        init = 1; @(negedge clk); init = 0;
        for (int i = 0; i < N; i++) begin
          en = 1; x = DW'(XR[i]); y = (pass == 0) ? DW'(XI[i]) : '0;
          foreach (c[k]) begin c[k] = DW'(C[k][i]); s[k] = DW'(S[k][i]); end
          @(negedge clk);
        end
        en = 0;
        check(int'(done4 & done3 & done_r & done_i), 1, "done after 8 samples");
        for (int k = 0; k < N; k++) begin
          int er, ei; real fr, fi;
          er = 0; ei = 0; fr = 0.0; fi = 0.0;
          for (int i = 0; i < N; i++) begin
            int yi; yi = (pass == 0) ? XI[i] : 0;
            er += C[k][i]*XR[i] - S[k][i]*yi;
            ei += C[k][i]*yi + S[k][i]*XR[i];
            fr += XR[i]*$cos(2.0*PI*k*i/N) + yi*$sin(2.0*PI*k*i/N);
            fi += yi*$cos(2.0*PI*k*i/N) - XR[i]*$sin(2.0*PI*k*i/N);
          end
          if (pass == 0) begin
            check(a4_re[k], 2*er, "CPM DFT re");  check(a4_im[k], 2*ei, "CPM DFT im");
            check(a3_re[k], 2*er, "CPM3 DFT re"); check(a3_im[k], 2*ei, "CPM3 DFT im");
            check_near(real'(a4_re[k]) / 254.0, fr, "CPM DFT re vs float");
            check_near(real'(a3_im[k]) / 254.0, fi, "CPM3 DFT im vs float");
          end else begin
            // real-input DFT: two real transforms
            check(ar[k], 2*er, "real-input DFT re");
            check(ai[k], 2*ei, "real-input DFT im");
            check_near(real'(ar[k]) / 254.0, fr, "real-input DFT re vs float");
            check_near(real'(ai[k]) / 254.0, fi, "real-input DFT im vs float");
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
