// tb_fs_sys_array: multiplies random COLS x ROWS matrices A by ROWS x P
// matrices B on the square-based systolic array at its default size.
// Each pass loads A (sel = 0, a_i,ROWS-1 first), switches to compute
// (sel = 1, Sa_i at the column tops), streams B staggered by row and Sb_j
// at the bottom, and checks that column i presents 2*c_ij exactly in cycle
// j + i + ROWS + 1 after b_00 entered. Several passes reload A, so the
// load/compute switch happens repeatedly; the last pass uses extreme values.
module tb_fs_sys_array;
  localparam int DW = 8, AW = 32, ROWS = 4, COLS = 4, P = 7;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, sel = 0;
  logic signed [AW-1:0] col_in  [COLS];
  logic signed [DW-1:0] row_in  [ROWS];
  logic signed [AW-1:0] sb_in;
  logic signed [AW-1:0] col_out [COLS];

  always #5 clk = ~clk;

  fs_sys_array dut (.clk(clk), .rst_n(rst_n), .sel(sel), .col_in(col_in),
                    .row_in(row_in), .sb_in(sb_in), .col_out(col_out));

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

  int A [COLS][ROWS];   // A[i][k], i = row of A = array column
  int B [ROWS][P];      // B[k][j]
  int sa [COLS], sb [P];

  initial begin
    int switches;
    switches = 0;
    foreach (col_in[i]) col_in[i] = '0;
    foreach (row_in[k]) row_in[k] = '0;
    sb_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 6; pass++) begin
      for (int i = 0; i < COLS; i++)
        for (int k = 0; k < ROWS; k++)
          A[i][k] = (pass == 5) ? -128 : int'($urandom_range(0, 255)) - 128;
      for (int k = 0; k < ROWS; k++)
        for (int j = 0; j < P; j++)
          B[k][j] = (pass == 5) ? ((j % 2) ? -128 : 127) : int'($urandom_range(0, 255)) - 128;
      foreach (sa[i]) begin
        sa[i] = 0;
        for (int k = 0; k < ROWS; k++) sa[i] -= A[i][k]*A[i][k];
      end
      foreach (sb[j]) begin
        sb[j] = 0;
        for (int k = 0; k < ROWS; k++) sb[j] -= B[k][j]*B[k][j];
      end
      // load: ROWS cycles with sel = 0
      sel = 0;
      for (int t = 0; t < ROWS; t++) begin
        for (int i = 0; i < COLS; i++) col_in[i] = AW'(A[i][ROWS-1-t]);
        foreach (row_in[k]) row_in[k] = DW'($urandom);   // ignored while loading
        @(negedge clk);
      end
      // compute
      sel = 1;
      switches++;
      for (int i = 0; i < COLS; i++) col_in[i] = AW'(sa[i]);
      for (int tau = 0; tau < P + COLS + ROWS + 2; tau++) begin
        for (int k = 0; k < ROWS; k++)
          row_in[k] = (tau - k >= 0 && tau - k < P) ? DW'(B[k][tau-k]) : '0;
        sb_in = (tau - ROWS - 1 >= 0 && tau - ROWS - 1 < P) ? AW'(sb[tau-ROWS-1]) : '0;
        #1;
        for (int i = 0; i < COLS; i++) begin
          int j;
          j = tau - i - ROWS - 1;
          if (j >= 0 && j < P) begin
            int c;
            c = 0;
            for (int k = 0; k < ROWS; k++) c += A[i][k]*B[k][j];
            check(col_out[i], 2*c, $sformatf("pass %0d c[%0d][%0d]", pass, i, j));
          end
        end
        @(negedge clk);
      end
    end
    if (switches < 2) begin
      failures++;
      $display("FAIL load/compute switch exercised %0d times", switches);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
