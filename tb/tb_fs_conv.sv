// tb_fs_conv: streams random samples through the N-tap (N = 8) square-based
// convolution, with random idle cycles, and checks after every sample that
// y_valid is high exactly once N samples have entered and that
// y2 = 2 * sum_i w_i * x_{t-i}. A second kernel is run after a reset.
module tb_fs_conv;
  localparam int DW = 8, AW = 32, N = 8, L = 60;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, y_valid;
  logic signed [DW-1:0] x = '0, w [N];
  logic signed [AW-1:0] sw = '0, y2;

  always #5 clk = ~clk;

  fs_conv dut (.clk(clk), .rst_n(rst_n), .en(en), .x(x), .w(w), .sw(sw),
               .y2(y2), .y_valid(y_valid));

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

  int Wt [N], X [L];

  initial begin
    foreach (w[i]) w[i] = '0;
    for (int run = 0; run < 3; run++) begin
      int v;
      rst_n = 0;
      repeat (2) @(negedge clk);
      rst_n = 1;
      v = 0;
      foreach (Wt[i]) begin
        Wt[i] = (run == 2) ? -128 : int'($urandom_range(0, 255)) - 128;
        w[i] = DW'(Wt[i]);
        v -= Wt[i]*Wt[i];
      end
      sw = AW'(v);
      foreach (X[t]) X[t] = (run == 2) ? -128 : int'($urandom_range(0, 255)) - 128;
      for (int t = 0; t < L; t++) begin
        en = 1; x = DW'(X[t]);
        @(negedge clk);
        en = 0; x = DW'($urandom);
        check(int'(y_valid), (t >= N-1) ? 1 : 0, "y_valid");
        if (t >= N-1) begin
          int y; y = 0;
          for (int i = 0; i < N; i++) y += Wt[i]*X[t-i];
          check(y2, 2*y, $sformatf("2y at t=%0d", t));
          if ($urandom_range(0, 3) == 0) begin
            @(negedge clk);
            check(y2, 2*y, "hold while en low");
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
