// tb_fs_pma: random dot products of random length through the partial
// multiplication accumulator. The register is initialised with Sa + Sb,
// fed one pair per cycle (with idle cycles in between, which must hold the
// value), and must end at 2 * sum a_k*b_k. Also checks the one-cycle latency
// of every accumulation step.
module tb_fs_pma;
  localparam int DW = 8, AW = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic init = 0, en = 0;
  logic signed [AW-1:0] init_val = '0;
  logic signed [DW-1:0] a = '0, b = '0;
  logic signed [AW-1:0] acc;

  always #5 clk = ~clk;

  fs_pma dut (.clk(clk), .rst_n(rst_n), .init(init), .init_val(init_val),
              .en(en), .a(a), .b(b), .acc(acc));

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
      int n, va[32], vb[32], sa, sb, dot, partial;
      n = (trial == 0) ? 1 : int'($urandom_range(1, 32));
      sa = 0; sb = 0; dot = 0;
      for (int k = 0; k < n; k++) begin
        va[k] = (trial == 1) ? -128 : int'($urandom_range(0, 255)) - 128;
        vb[k] = (trial == 1) ? -128 : int'($urandom_range(0, 255)) - 128;
        sa -= va[k]*va[k]; sb -= vb[k]*vb[k]; dot += va[k]*vb[k];
      end
      @(negedge clk);
      init = 1; init_val = AW'(sa + sb);
      @(negedge clk);
      init = 0;
      check(acc, sa + sb, "init value");
      partial = sa + sb;
      for (int k = 0; k < n; k++) begin
        en = 1; a = DW'(va[k]); b = DW'(vb[k]);
        @(negedge clk);
        partial += (va[k]+vb[k])*(va[k]+vb[k]);
        check(acc, partial, "step");
        if ($urandom_range(0, 3) == 0) begin
          en = 0; a = DW'($urandom); b = DW'($urandom);
          @(negedge clk);
          check(acc, partial, "hold while en low");
        end
      end
      en = 0;
      check(acc, 2*dot, $sformatf("2*dot, n=%0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
