// tb_fs_tensor_core: tiled matrix product on the tensor core at its default
// 4x4x4 tile size. A (TM x K) and B (K x TP), K = TN*T, are multiplied as a
// row of T tiles by a column of T tiles: init loads Sa_i + Sb_j (over the
// full inner dimension K), then one tile pair per cycle. Checks that every
// output equals 2*C after the last tile, and that after each step the
// accumulators hold the running partial sums.
module tb_fs_tensor_core;
  localparam int DW = 8, AW = 32, TM = 4, TN = 4, TP = 4, T = 5, K = TN*T;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, init = 0, en = 0;
  logic signed [DW-1:0] a [TM][TN], b [TN][TP];
  logic signed [AW-1:0] sa [TM], sb [TP], o [TM][TP];

  always #5 clk = ~clk;

  fs_tensor_core dut (.clk(clk), .rst_n(rst_n), .init(init), .en(en), .a(a),
                      .b(b), .sa(sa), .sb(sb), .o(o));

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

  int A [TM][K], B [K][TP], part [TM][TP];

  initial begin
    foreach (a[i, k]) a[i][k] = '0;
    foreach (b[k, j]) b[k][j] = '0;
    foreach (sa[i]) sa[i] = '0;
    foreach (sb[j]) sb[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 8; trial++) begin
      foreach (A[i, k]) A[i][k] = (trial == 7) ? -128 : int'($urandom_range(0, 255)) - 128;
      foreach (B[k, j]) B[k][j] = (trial == 7) ? -128 : int'($urandom_range(0, 255)) - 128;
      for (int i = 0; i < TM; i++) begin
        int v; v = 0;
        for (int k = 0; k < K; k++) v -= A[i][k]*A[i][k];
        sa[i] = AW'(v);
      end
      for (int j = 0; j < TP; j++) begin
        int v; v = 0;
        for (int k = 0; k < K; k++) v -= B[k][j]*B[k][j];
        sb[j] = AW'(v);
      end
      init = 1;
      @(negedge clk);
      init = 0;
      foreach (part[i, j]) part[i][j] = int'(sa[i]) + int'(sb[j]);
      for (int t = 0; t < T; t++) begin
        en = 1;
        foreach (a[i, k]) a[i][k] = DW'(A[i][t*TN + k]);
        foreach (b[k, j]) b[k][j] = DW'(B[t*TN + k][j]);
        @(negedge clk);
        foreach (part[i, j])
          for (int k = 0; k < TN; k++)
            part[i][j] += (A[i][t*TN+k] + B[t*TN+k][j]) * (A[i][t*TN+k] + B[t*TN+k][j]);
        foreach (o[i, j]) check(o[i][j], part[i][j], "running sum");
      end
      en = 0;
      foreach (o[i, j]) begin
        int c; c = 0;
        for (int k = 0; k < K; k++) c += A[i][k]*B[k][j];
        check(o[i][j], 2*c, $sformatf("2*C[%0d][%0d]", i, j));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
