// tb_fs_tc_pe: one tensor-core PE computing random dot products of length
// N*steps in steps of N: init loads Sa + Sb of the whole row and column,
// every step adds sum_k (a_k+b_k)^2 in one cycle, and the result must be
// 2 * sum a*b. Idle cycles (en low) must hold the accumulator.
module tb_fs_tc_pe;
  localparam int DW = 8, AW = 32, N = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, init = 0, en = 0;
  logic signed [DW-1:0] a [N], b [N];
  logic signed [AW-1:0] sa = '0, sb = '0, o;

  always #5 clk = ~clk;

  fs_tc_pe dut (.clk(clk), .rst_n(rst_n), .init(init), .en(en), .a(a), .b(b),
                .sa(sa), .sb(sb), .o(o));

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
    foreach (a[k]) begin a[k] = '0; b[k] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 50; trial++) begin
      int steps, va[8][N], vb[8][N], tsa, tsb, dot, part;
      steps = int'($urandom_range(1, 8));
      tsa = 0; tsb = 0; dot = 0;
      for (int t = 0; t < steps; t++)
        for (int k = 0; k < N; k++) begin
          va[t][k] = int'($urandom_range(0, 255)) - 128;
          vb[t][k] = int'($urandom_range(0, 255)) - 128;
          tsa -= va[t][k]*va[t][k]; tsb -= vb[t][k]*vb[t][k];
          dot += va[t][k]*vb[t][k];
        end
      init = 1; en = 1; sa = AW'(tsa); sb = AW'(tsb);   // init wins over en
      @(negedge clk);
      init = 0;
      check(o, tsa + tsb, "init loads Sa+Sb");
      part = tsa + tsb;
      for (int t = 0; t < steps; t++) begin
        en = 1;
        for (int k = 0; k < N; k++) begin a[k] = DW'(va[t][k]); b[k] = DW'(vb[t][k]); end
        @(negedge clk);
        for (int k = 0; k < N; k++) part += (va[t][k]+vb[t][k])*(va[t][k]+vb[t][k]);
        check(o, part, "one step per cycle");
        if ($urandom_range(0, 2) == 0) begin
          en = 0;
          @(negedge clk);
          check(o, part, "hold");
        end
      end
      en = 0;
      check(o, 2*dot, "2*dot");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
