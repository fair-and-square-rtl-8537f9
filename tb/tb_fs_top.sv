// tb_fs_top: end-to-end run of the whole design at its default parameters.
//
// Every engine is taken through one complete operation on random data, and
// every correction term it needs (Sa_i, Sb_j, Sw_k, Sw, S_k, Sab/Sba,
// Scs/Ssc, Sx_k/Sy_k) is produced by the design's own correction-term unit
// from the same operands, so the whole flow is the hardware's:
//   correction unit -> engine init / output adder -> 2 * exact result.
// Results are compared with integer products worked out here. The mechanisms
// of the design are counted and each must occur at least once: every
// correction mode, the systolic array's load/compute switch, tensor-core
// accumulation over several tiles, idle (en low) cycles that must hold an
// accumulator, done flags of the transforms and window-full flags of the
// convolutions (1-D and 2-D).
module tb_fs_top;
  import fs_pkg::*;
  localparam int DW = fs_pkg::DATA_W, AW = fs_pkg::ACC_W;
  localparam int SR = 4, SC = 4, TM = 4, TN = 4, TP = 4, TRN = 8, CVN = 8;
  localparam int KH = 3, KW = 3, IW = 16;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---- top ports ----
  logic pma_init, pma_en; logic signed [AW-1:0] pma_init_val, pma_acc;
  logic signed [DW-1:0] pma_a, pma_b;
  logic sys_sel; logic signed [AW-1:0] sys_col_in [SC], sys_sb_in, sys_col_out [SC];
  logic signed [DW-1:0] sys_row_in [SR];
  logic tc_init, tc_en; logic signed [DW-1:0] tc_a [TM][TN], tc_b [TN][TP];
  logic signed [AW-1:0] tc_sa [TM], tc_sb [TP], tc_o [TM][TP];
  logic ltr_init, ltr_en, ltr_done; logic signed [AW-1:0] ltr_sw [TRN], ltr_acc [TRN];
  logic signed [DW-1:0] ltr_x, ltr_w [TRN];
  logic conv_en, conv_valid; logic signed [DW-1:0] conv_x, conv_w [CVN];
  logic signed [AW-1:0] conv_sw, conv_y2;
  logic cltr_init, cltr_en, cltr_done; logic signed [AW-1:0] cltr_sk [TRN], cltr_acc_re [TRN], cltr_acc_im [TRN];
  logic signed [DW-1:0] cltr_x, cltr_y, cltr_c [TRN], cltr_s [TRN];
  logic cconv_en, cconv_valid; logic signed [DW-1:0] cconv_x, cconv_y, cconv_c [CVN], cconv_s [CVN];
  logic signed [AW-1:0] cconv_sw, cconv_z2_re, cconv_z2_im;
  logic cacc_init, cacc_en; logic signed [AW-1:0] cacc_init_re, cacc_init_im, cacc_re, cacc_im;
  logic signed [DW-1:0] cacc_a, cacc_b, cacc_c, cacc_s;
  logic cltr3_init, cltr3_en, cltr3_done;
  logic signed [AW-1:0] cltr3_sx [TRN], cltr3_sy [TRN], cltr3_acc_re [TRN], cltr3_acc_im [TRN];
  logic signed [DW-1:0] cltr3_x, cltr3_y, cltr3_c [TRN], cltr3_s [TRN];
  logic cconv3_en, cconv3_valid; logic signed [DW-1:0] cconv3_x, cconv3_y, cconv3_c [CVN], cconv3_s [CVN];
  logic signed [AW-1:0] cconv3_sw_re, cconv3_sw_im, cconv3_z2_re, cconv3_z2_im;
  logic c2d_en, c2d_sof, c2d_valid; logic signed [DW-1:0] c2d_x, c2d_w [KH][KW];
  logic signed [AW-1:0] c2d_sw, c2d_y2;
  corr_mode_t corr_mode; logic corr_clear, corr_en; logic signed [DW-1:0] corr_p, corr_q;
  logic signed [AW-1:0] corr_re, corr_im;

  fs_top dut (.*);

  // ---- mechanism counters ----
  int n_corr [4];
  int n_sys_switch = 0, n_tc_tiles = 0, n_hold = 0, n_done = 0, n_valid = 0;

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int rnd8();
    return int'($urandom_range(0, 255)) - 128;
  endfunction

  // Run the correction unit over n elements (p[k], q[k]).
  task automatic corr(input corr_mode_t m, input int ps [64], input int qs [64], input int n,
                      output int re, output int im);
    corr_mode = m;
    for (int k = 0; k < n; k++) begin
      corr_clear = (k == 0); corr_en = 1; corr_p = DW'(ps[k]); corr_q = DW'(qs[k]);
      @(negedge clk);
    end
    corr_clear = 0; corr_en = 0;
    re = int'(corr_re); im = int'(corr_im);
    n_corr[int'(m)]++;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ps [64], qs [64], zero [64];
  int re, im;

  initial begin
    // idle all inputs
    pma_init = 0; pma_en = 0; pma_init_val = '0; pma_a = '0; pma_b = '0;
    sys_sel = 0; sys_sb_in = '0; foreach (sys_col_in[i]) sys_col_in[i] = '0; foreach (sys_row_in[k]) sys_row_in[k] = '0;
    tc_init = 0; tc_en = 0; foreach (tc_a[i, k]) tc_a[i][k] = '0; foreach (tc_b[k, j]) tc_b[k][j] = '0;
    foreach (tc_sa[i]) tc_sa[i] = '0; foreach (tc_sb[j]) tc_sb[j] = '0;
    ltr_init = 0; ltr_en = 0; ltr_x = '0; foreach (ltr_sw[k]) begin ltr_sw[k] = '0; ltr_w[k] = '0; end
    conv_en = 0; conv_x = '0; conv_sw = '0; foreach (conv_w[i]) conv_w[i] = '0;
    cltr_init = 0; cltr_en = 0; cltr_x = '0; cltr_y = '0;
    foreach (cltr_sk[k]) begin cltr_sk[k] = '0; cltr_c[k] = '0; cltr_s[k] = '0; end
    cconv_en = 0; cconv_x = '0; cconv_y = '0; cconv_sw = '0; foreach (cconv_c[i]) begin cconv_c[i] = '0; cconv_s[i] = '0; end
    cacc_init = 0; cacc_en = 0; cacc_init_re = '0; cacc_init_im = '0; cacc_a = '0; cacc_b = '0; cacc_c = '0; cacc_s = '0;
    cltr3_init = 0; cltr3_en = 0; cltr3_x = '0; cltr3_y = '0;
    foreach (cltr3_sx[k]) begin cltr3_sx[k] = '0; cltr3_sy[k] = '0; cltr3_c[k] = '0; cltr3_s[k] = '0; end
    cconv3_en = 0; cconv3_x = '0; cconv3_y = '0; cconv3_sw_re = '0; cconv3_sw_im = '0;
    foreach (cconv3_c[i]) begin cconv3_c[i] = '0; cconv3_s[i] = '0; end
    c2d_en = 0; c2d_sof = 0; c2d_x = '0; c2d_sw = '0; foreach (c2d_w[r, c]) c2d_w[r][c] = '0;
    corr_mode = CORR_REAL; corr_clear = 0; corr_en = 0; corr_p = '0; corr_q = '0;
    foreach (zero[k]) zero[k] = 0;
    foreach (n_corr[m]) n_corr[m] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---------- 1. partial multiplication accumulator: 16-element dot product ----------
    begin
      int va [64], vb [64], sa, sb, dot;
      dot = 0;
      for (int k = 0; k < 16; k++) begin va[k] = rnd8(); vb[k] = rnd8(); dot += va[k]*vb[k]; end
      corr(CORR_REAL, va, zero, 16, sa, im);
      corr(CORR_REAL, vb, zero, 16, sb, im);
      pma_init = 1; pma_init_val = AW'(sa + sb);
      @(negedge clk);
      pma_init = 0;
      for (int k = 0; k < 16; k++) begin
        pma_en = 1; pma_a = DW'(va[k]); pma_b = DW'(vb[k]);
        @(negedge clk);
        if (k == 7) begin
          int held; held = int'(pma_acc);
          pma_en = 0; @(negedge clk);
          check(pma_acc, held, "pma holds while en low"); n_hold++;
        end
      end
      pma_en = 0;
      check(pma_acc, 2*dot, "pma 2*dot");
    end

    // ---------- 2. systolic array: (4x4) x (4x6), two passes ----------
    for (int pass = 0; pass < 2; pass++) begin
      localparam int P = 6;
      int A [SC][SR], B [SR][P], sa [SC], sb [P];
      foreach (A[i, k]) A[i][k] = rnd8();
      foreach (B[k, j]) B[k][j] = rnd8();
      for (int i = 0; i < SC; i++) begin
        for (int k = 0; k < SR; k++) ps[k] = A[i][k];
        corr(CORR_REAL, ps, zero, SR, sa[i], im);
      end
      for (int j = 0; j < P; j++) begin
        for (int k = 0; k < SR; k++) ps[k] = B[k][j];
        corr(CORR_REAL, ps, zero, SR, sb[j], im);
      end
      sys_sel = 0;
      for (int t = 0; t < SR; t++) begin
        for (int i = 0; i < SC; i++) sys_col_in[i] = AW'(A[i][SR-1-t]);
        @(negedge clk);
      end
      sys_sel = 1; n_sys_switch++;
      for (int i = 0; i < SC; i++) sys_col_in[i] = AW'(sa[i]);
      for (int tau = 0; tau < P + SC + SR + 2; tau++) begin
        for (int k = 0; k < SR; k++)
          sys_row_in[k] = (tau - k >= 0 && tau - k < P) ? DW'(B[k][tau-k]) : '0;
        sys_sb_in = (tau - SR - 1 >= 0 && tau - SR - 1 < P) ? AW'(sb[tau-SR-1]) : '0;
        #1;
        for (int i = 0; i < SC; i++) begin
          int j; j = tau - i - SR - 1;
          if (j >= 0 && j < P) begin
            int c; c = 0;
            for (int k = 0; k < SR; k++) c += A[i][k]*B[k][j];
            check(sys_col_out[i], 2*c, $sformatf("systolic c[%0d][%0d]", i, j));
          end
        end
        @(negedge clk);
      end
      sys_sel = 0;
      foreach (sys_row_in[k]) sys_row_in[k] = '0;
      sys_sb_in = '0;
    end

    // ---------- 3. tensor core: (4x12) x (12x4) as 3 tiles ----------
    begin
      localparam int T = 3, K = TN*T;
      int A [TM][K], B [K][TP], sa, sb;
      foreach (A[i, k]) A[i][k] = rnd8();
      foreach (B[k, j]) B[k][j] = rnd8();
      for (int i = 0; i < TM; i++) begin
        for (int k = 0; k < K; k++) ps[k] = A[i][k];
        corr(CORR_REAL, ps, zero, K, sa, im); tc_sa[i] = AW'(sa);
      end
      for (int j = 0; j < TP; j++) begin
        for (int k = 0; k < K; k++) ps[k] = B[k][j];
        corr(CORR_REAL, ps, zero, K, sb, im); tc_sb[j] = AW'(sb);
      end
      tc_init = 1; @(negedge clk); tc_init = 0;
      for (int t = 0; t < T; t++) begin
        tc_en = 1;
        foreach (tc_a[i, k]) tc_a[i][k] = DW'(A[i][t*TN+k]);
        foreach (tc_b[k, j]) tc_b[k][j] = DW'(B[t*TN+k][j]);
        @(negedge clk);
        n_tc_tiles++;
        if (t == 0) begin
          int held; held = int'(tc_o[1][2]);
          tc_en = 0; @(negedge clk);
          check(tc_o[1][2], held, "tensor core holds while en low"); n_hold++;
        end
      end
      tc_en = 0;
      foreach (tc_o[i, j]) begin
        int c; c = 0;
        for (int k = 0; k < K; k++) c += A[i][k]*B[k][j];
        check(tc_o[i][j], 2*c, $sformatf("tensor core C[%0d][%0d]", i, j));
      end
    end

    // ---------- 4. real linear transform, 8 points ----------
    begin
      int W [TRN][TRN], X [TRN];
      foreach (W[k, i]) W[k][i] = rnd8();
      foreach (X[i]) X[i] = rnd8();
      for (int k = 0; k < TRN; k++) begin
        for (int i = 0; i < TRN; i++) ps[i] = W[k][i];
        corr(CORR_REAL, ps, zero, TRN, re, im); ltr_sw[k] = AW'(re);
      end
      ltr_init = 1; @(negedge clk); ltr_init = 0;
      for (int i = 0; i < TRN; i++) begin
        check(int'(ltr_done), 0, "ltr done low early");
        ltr_en = 1; ltr_x = DW'(X[i]); foreach (ltr_w[k]) ltr_w[k] = DW'(W[k][i]);
        @(negedge clk);
      end
      ltr_en = 0;
      check(int'(ltr_done), 1, "ltr done"); if (ltr_done) n_done++;
      for (int k = 0; k < TRN; k++) begin
        int v; v = 0; for (int i = 0; i < TRN; i++) v += W[k][i]*X[i];
        check(ltr_acc[k], 2*v, "ltr 2X");
      end
    end

    // ---------- 5. real convolution, 8 taps, 24 samples ----------
    begin
      int Wt [CVN], X [24];
      foreach (Wt[i]) begin Wt[i] = rnd8(); ps[i] = Wt[i]; conv_w[i] = DW'(Wt[i]); end
      corr(CORR_REAL, ps, zero, CVN, re, im); conv_sw = AW'(re);
      foreach (X[t]) X[t] = rnd8();
      for (int t = 0; t < 24; t++) begin
        conv_en = 1; conv_x = DW'(X[t]); @(negedge clk); conv_en = 0;
        check(int'(conv_valid), (t >= CVN-1) ? 1 : 0, "conv valid");
        if (t >= CVN-1) begin
          int y; y = 0; for (int i = 0; i < CVN; i++) y += Wt[i]*X[t-i];
          check(conv_y2, 2*y, "conv 2y"); n_valid++;
        end
      end
    end

    // ---------- 6. complex linear transform (CPM), 8 points ----------
    begin
      int C [TRN][TRN], S [TRN][TRN], XR [TRN], XI [TRN];
      foreach (C[k, i]) begin C[k][i] = rnd8(); S[k][i] = rnd8(); end
      foreach (XR[i]) begin XR[i] = rnd8(); XI[i] = rnd8(); end
      for (int k = 0; k < TRN; k++) begin
        for (int i = 0; i < TRN; i++) begin ps[i] = C[k][i]; qs[i] = S[k][i]; end
        corr(CORR_CPLX4, ps, qs, TRN, re, im); cltr_sk[k] = AW'(re);
      end
      cltr_init = 1; @(negedge clk); cltr_init = 0;
      for (int i = 0; i < TRN; i++) begin
        cltr_en = 1; cltr_x = DW'(XR[i]); cltr_y = DW'(XI[i]);
        foreach (cltr_c[k]) begin cltr_c[k] = DW'(C[k][i]); cltr_s[k] = DW'(S[k][i]); end
        @(negedge clk);
      end
      cltr_en = 0;
      check(int'(cltr_done), 1, "cltr done"); if (cltr_done) n_done++;
      for (int k = 0; k < TRN; k++) begin
        int vr, vi; vr = 0; vi = 0;
        for (int i = 0; i < TRN; i++) begin
          vr += C[k][i]*XR[i] - S[k][i]*XI[i]; vi += C[k][i]*XI[i] + S[k][i]*XR[i];
        end
        check(cltr_acc_re[k], 2*vr, "cltr 2X"); check(cltr_acc_im[k], 2*vi, "cltr 2Y");
      end
    end

    // ---------- 7. complex convolution (CPM), 8 taps ----------
    begin
      int Ct [CVN], St [CVN], XR [24], XI [24];
      foreach (Ct[i]) begin
        Ct[i] = rnd8(); St[i] = rnd8(); ps[i] = Ct[i]; qs[i] = St[i];
        cconv_c[i] = DW'(Ct[i]); cconv_s[i] = DW'(St[i]);
      end
      corr(CORR_CPLX4, ps, qs, CVN, re, im); cconv_sw = AW'(re);
      foreach (XR[t]) begin XR[t] = rnd8(); XI[t] = rnd8(); end
      for (int t = 0; t < 24; t++) begin
        cconv_en = 1; cconv_x = DW'(XR[t]); cconv_y = DW'(XI[t]); @(negedge clk); cconv_en = 0;
        check(int'(cconv_valid), (t >= CVN-1) ? 1 : 0, "cconv valid");
        if (t >= CVN-1) begin
          int zr, zi; zr = 0; zi = 0;
          for (int i = 0; i < CVN; i++) begin
            zr += Ct[i]*XR[t-i] - St[i]*XI[t-i]; zi += Ct[i]*XI[t-i] + St[i]*XR[t-i];
          end
          check(cconv_z2_re, 2*zr, "cconv 2Re"); check(cconv_z2_im, 2*zi, "cconv 2Im"); n_valid++;
          if (t == 10) begin
            cconv_x = DW'(rnd8()); @(negedge clk);
            check(cconv_z2_re, 2*zr, "cconv holds while en low"); n_hold++;
          end
        end
      end
    end

    // ---------- 8. CPM3 accumulator: complex dot product of length 12 ----------
    begin
      int va [64], vb [64], vc [64], vs [64], sab, sba, scs, ssc, zr, zi;
      zr = 0; zi = 0;
      for (int i = 0; i < 12; i++) begin
        va[i] = rnd8(); vb[i] = rnd8(); vc[i] = rnd8(); vs[i] = rnd8();
        zr += va[i]*vc[i] - vb[i]*vs[i]; zi += vb[i]*vc[i] + va[i]*vs[i];
      end
      corr(CORR_CPLX3_SAMPLE, va, vb, 12, sab, sba);
      corr(CORR_CPLX3_WEIGHT, vc, vs, 12, scs, ssc);
      cacc_init = 1; cacc_init_re = AW'(sab + scs); cacc_init_im = AW'(sba + ssc);
      @(negedge clk); cacc_init = 0;
      for (int i = 0; i < 12; i++) begin
        cacc_en = 1; cacc_a = DW'(va[i]); cacc_b = DW'(vb[i]); cacc_c = DW'(vc[i]); cacc_s = DW'(vs[i]);
        @(negedge clk);
      end
      cacc_en = 0;
      check(cacc_re, 2*zr, "cpm3 acc 2Re"); check(cacc_im, 2*zi, "cpm3 acc 2Im");
    end

    // ---------- 9. complex linear transform (CPM3), 8 points ----------
    begin
      int C [TRN][TRN], S [TRN][TRN], XR [TRN], XI [TRN];
      foreach (C[k, i]) begin C[k][i] = rnd8(); S[k][i] = rnd8(); end
      foreach (XR[i]) begin XR[i] = rnd8(); XI[i] = rnd8(); end
      for (int k = 0; k < TRN; k++) begin
        for (int i = 0; i < TRN; i++) begin ps[i] = C[k][i]; qs[i] = S[k][i]; end
        corr(CORR_CPLX3_WEIGHT, ps, qs, TRN, re, im); cltr3_sx[k] = AW'(re); cltr3_sy[k] = AW'(im);
      end
      cltr3_init = 1; @(negedge clk); cltr3_init = 0;
      for (int i = 0; i < TRN; i++) begin
        cltr3_en = 1; cltr3_x = DW'(XR[i]); cltr3_y = DW'(XI[i]);
        foreach (cltr3_c[k]) begin cltr3_c[k] = DW'(C[k][i]); cltr3_s[k] = DW'(S[k][i]); end
        @(negedge clk);
        if (i == 3) begin
          int held; held = int'(cltr3_acc_im[5]);
          cltr3_en = 0; @(negedge clk);
          check(cltr3_acc_im[5], held, "cltr3 holds while en low"); n_hold++;
        end
      end
      cltr3_en = 0;
      check(int'(cltr3_done), 1, "cltr3 done"); if (cltr3_done) n_done++;
      for (int k = 0; k < TRN; k++) begin
        int vr, vi; vr = 0; vi = 0;
        for (int i = 0; i < TRN; i++) begin
          vr += C[k][i]*XR[i] - S[k][i]*XI[i]; vi += C[k][i]*XI[i] + S[k][i]*XR[i];
        end
        check(cltr3_acc_re[k], 2*vr, "cltr3 2X"); check(cltr3_acc_im[k], 2*vi, "cltr3 2Y");
      end
    end

    // ---------- 10. complex convolution (CPM3), 8 taps ----------
    begin
      int Ct [CVN], St [CVN], XR [24], XI [24];
      foreach (Ct[i]) begin
        Ct[i] = rnd8(); St[i] = rnd8(); ps[i] = Ct[i]; qs[i] = St[i];
        cconv3_c[i] = DW'(Ct[i]); cconv3_s[i] = DW'(St[i]);
      end
      corr(CORR_CPLX3_WEIGHT, ps, qs, CVN, re, im); cconv3_sw_re = AW'(re); cconv3_sw_im = AW'(im);
      foreach (XR[t]) begin XR[t] = rnd8(); XI[t] = rnd8(); end
      for (int t = 0; t < 24; t++) begin
        cconv3_en = 1; cconv3_x = DW'(XR[t]); cconv3_y = DW'(XI[t]); @(negedge clk); cconv3_en = 0;
        check(int'(cconv3_valid), (t >= CVN-1) ? 1 : 0, "cconv3 valid");
        if (t >= CVN-1) begin
          int zr, zi; zr = 0; zi = 0;
          for (int i = 0; i < CVN; i++) begin
            zr += Ct[i]*XR[t-i] - St[i]*XI[t-i]; zi += Ct[i]*XI[t-i] + St[i]*XR[t-i];
          end
          check(cconv3_z2_re, 2*zr, "cconv3 2Re"); check(cconv3_z2_im, 2*zi, "cconv3 2Im"); n_valid++;
        end
      end
    end

    // ---------- 11. real 2-D convolution, 3x3 kernel over a 4 x 16 frame ----------
    begin
      int Wt [KH][KW], X [4][IW], n;
      n = 0;
      foreach (Wt[r, c]) begin Wt[r][c] = rnd8(); ps[r*KW + c] = Wt[r][c]; c2d_w[r][c] = DW'(Wt[r][c]); end
      corr(CORR_REAL, ps, zero, KH*KW, re, im); c2d_sw = AW'(re);
      foreach (X[h, k]) X[h][k] = rnd8();
      for (int h = 0; h < 4; h++)
        for (int k = 0; k < IW; k++) begin
          c2d_en = 1; c2d_sof = (h == 0 && k == 0); c2d_x = DW'(X[h][k]);
          @(negedge clk);
          c2d_en = 0; c2d_sof = 0;
          check(int'(c2d_valid), (h >= KH-1 && k >= KW-1) ? 1 : 0, "2-D window valid");
          if (h >= KH-1 && k >= KW-1) begin
            int y; y = 0;
            for (int r = 0; r < KH; r++) for (int c = 0; c < KW; c++) y += Wt[r][c]*X[h-r][k-c];
            check(c2d_y2, 2*y, "2-D conv 2y"); n_valid++; n++;
          end
        end
      check(n, 2*(IW-KW+1), "2-D windows");
    end

    // ---------- mechanism coverage ----------
    $display("mechanisms: corr modes %0d/%0d/%0d/%0d, systolic load->compute %0d, tensor tiles %0d, holds %0d, done %0d, window-full outputs %0d",
             n_corr[0], n_corr[1], n_corr[2], n_corr[3], n_sys_switch, n_tc_tiles, n_hold, n_done, n_valid);
    foreach (n_corr[m]) if (n_corr[m] == 0) begin failures++; $display("FAIL correction mode %0d never used", m); end
    if (n_sys_switch == 0) begin failures++; $display("FAIL systolic switch never happened"); end
    if (n_tc_tiles < 2)    begin failures++; $display("FAIL tensor core never accumulated tiles"); end
    if (n_hold == 0)       begin failures++; $display("FAIL no hold cycle"); end
    if (n_done < 3)        begin failures++; $display("FAIL transform done flags"); end
    if (n_valid == 0)      begin failures++; $display("FAIL convolution window never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
