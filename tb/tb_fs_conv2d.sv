// tb_fs_conv2d: streams two random 6 x 16 frames (marked with sof) through
// the 3 x 3 square-based 2-D convolution, with random idle cycles, and checks
// after every sample that y_valid is high exactly for windows inside the
// frame and that y2 = 2 * sum_{r,c} w[r][c] * x[h-r][k-c] there.
module tb_fs_conv2d;
  localparam int DW = 8, AW = 32, KH = 3, KW = 3, IMG_W = 16, H = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, sof = 0, y_valid;
  logic signed [DW-1:0] x = '0, w [KH][KW];
  logic signed [AW-1:0] sw = '0, y2;

  always #5 clk = ~clk;

  fs_conv2d dut (.clk(clk), .rst_n(rst_n), .en(en), .sof(sof), .x(x), .w(w),
                 .sw(sw), .y2(y2), .y_valid(y_valid));

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

  int Wt [KH][KW], X [H][IMG_W];

  initial begin
    int v, nvalid;
    nvalid = 0;
    v = 0;
    foreach (Wt[r, c]) begin
      Wt[r][c] = int'($urandom_range(0, 255)) - 128;
      w[r][c] = DW'(Wt[r][c]);
      v -= Wt[r][c]*Wt[r][c];
    end
    sw = AW'(v);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int frame = 0; frame < 2; frame++) begin
      foreach (X[h, k]) X[h][k] = (frame == 1 && h == 2) ? -128 : int'($urandom_range(0, 255)) - 128;
      for (int h = 0; h < H; h++)
        for (int k = 0; k < IMG_W; k++) begin
          en = 1; sof = (h == 0 && k == 0); x = DW'(X[h][k]);
          @(negedge clk);
          en = 0; sof = 0; x = DW'($urandom);
          check(int'(y_valid), (h >= KH-1 && k >= KW-1) ? 1 : 0, $sformatf("y_valid at %0d,%0d", h, k));
          if (h >= KH-1 && k >= KW-1) begin
            int y; y = 0;
            for (int r = 0; r < KH; r++)
              for (int c = 0; c < KW; c++) y += Wt[r][c] * X[h-r][k-c];
            check(y2, 2*y, $sformatf("2y at %0d,%0d", h, k));
            nvalid++;
          end
          if ($urandom_range(0, 5) == 0) @(negedge clk);
        end
    end
    if (nvalid != 2*(H-KH+1)*(IMG_W-KW+1)) begin
      failures++;
      $display("FAIL number of valid windows %0d", nvalid);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
