// tb_fs_corr: builds correction terms of random length in every mode of the
// correction-term accumulator and compares them with the sums worked out
// here. Also checks that clear restarts a sum, that clear together with en
// starts it with the current element, and that idle cycles hold it.
module tb_fs_corr;
  import fs_pkg::*;
  localparam int DW = 8, AW = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  corr_mode_t mode = CORR_REAL;
  logic signed [DW-1:0] p = '0, q = '0;
  logic signed [AW-1:0] s_re, s_im;

  always #5 clk = ~clk;

  fs_corr dut (.clk(clk), .rst_n(rst_n), .mode(mode), .clear(clear), .en(en),
               .p(p), .q(q), .s_re(s_re), .s_im(s_im));

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic void term(input corr_mode_t m, input int vp, input int vq,
                               output int tr, output int ti);
    case (m)
      CORR_REAL:         begin tr = -vp*vp;            ti = tr; end
      CORR_CPLX4:        begin tr = -(vp*vp + vq*vq);  ti = tr; end
      CORR_CPLX3_SAMPLE: begin tr = -(vp+vq)*(vp+vq) + vq*vq; ti = -(vp+vq)*(vp+vq) - vp*vp; end
      default:           begin tr = -vp*vp + (vp+vq)*(vp+vq); ti = -vp*vp - (vq-vp)*(vq-vp); end
    endcase
  endfunction

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
    for (int trial = 0; trial < 80; trial++) begin
      int n, er, ei, tr, ti, vp, vq;
      mode = corr_mode_t'(trial % 4);
      n = int'($urandom_range(1, 20));
      er = 0; ei = 0;
      for (int k = 0; k < n; k++) begin
        vp = int'($urandom_range(0, 255)) - 128;
        vq = int'($urandom_range(0, 255)) - 128;
        term(mode, vp, vq, tr, ti);
        er += tr; ei += ti;
        // first element: clear together with en (odd trials) or a clear cycle before
        if (k == 0 && trial % 2 == 0) begin
          clear = 1; en = 0;
          @(negedge clk);
          check(s_re, 0, "clear");
          check(s_im, 0, "clear");
        end
        clear = (k == 0 && trial % 2 == 1);
        en = 1; p = DW'(vp); q = DW'(vq);
        @(negedge clk);
        clear = 0;
        if ($urandom_range(0, 3) == 0) begin
          en = 0; p = DW'($urandom);
          @(negedge clk);
        end
      end
      en = 0;
      check(s_re, er, $sformatf("mode %0d re n=%0d", mode, n));
      check(s_im, ei, $sformatf("mode %0d im n=%0d", mode, n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
