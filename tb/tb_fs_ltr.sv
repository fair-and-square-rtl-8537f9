// tb_fs_ltr: random real N-point linear transforms X = W x (N = 8).
// The accumulators are initialised with Sw_k = -sum_i w_ki^2, the samples
// are fed one per cycle with their coefficient column, sometimes with idle
// cycles in between. Checks done stays low until the N-th sample and then
// rises, and that acc[k] = 2*X_k.
module tb_fs_ltr;
  localparam int DW = 8, AW = 32, N = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, init = 0, en = 0, done;
  logic signed [AW-1:0] sw [N], acc [N];
  logic signed [DW-1:0] x = '0, w [N];

  always #5 clk = ~clk;

  fs_ltr dut (.clk(clk), .rst_n(rst_n), .init(init), .sw(sw), .en(en), .x(x),
              .w(w), .acc(acc), .done(done));

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

  int W [N][N], X [N];

  initial begin
    foreach (sw[k]) sw[k] = '0;
    foreach (w[k]) w[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      foreach (W[k, i]) W[k][i] = (trial == 0) ? -128 : int'($urandom_range(0, 255)) - 128;
      foreach (X[i]) X[i] = (trial == 0) ? -128 : int'($urandom_range(0, 255)) - 128;
      for (int k = 0; k < N; k++) begin
        int v; v = 0;
        for (int i = 0; i < N; i++) v -= W[k][i]*W[k][i];
        sw[k] = AW'(v);
      end
      init = 1;
      @(negedge clk);
      init = 0;
      for (int i = 0; i < N; i++) begin
        check(int'(done), 0, "done low before N samples");
        en = 1; x = DW'(X[i]);
        foreach (w[k]) w[k] = DW'(W[k][i]);
        @(negedge clk);
        if (i < N-1 && $urandom_range(0, 3) == 0) begin
          en = 0; x = DW'($urandom);
          @(negedge clk);
        end
      end
      en = 0;
      check(int'(done), 1, "done after N samples");
      for (int k = 0; k < N; k++) begin
        int v; v = 0;
        for (int i = 0; i < N; i++) v += W[k][i]*X[i];
        check(acc[k], 2*v, $sformatf("2*X[%0d]", k));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
