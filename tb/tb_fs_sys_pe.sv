// tb_fs_sys_pe: drives one systolic PE through load (sel = 0) and compute
// (sel = 1) phases with random inputs and compares its outputs, cycle by
// cycle, with the behaviour of Fig. 3 worked out here: RA follows the top
// input only while loading, RB follows the left input, RC = top + (RA+RB)^2,
// down = sel ? RC : RA.
module tb_fs_sys_pe;
  localparam int DW = 8, AW = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, sel = 0;
  logic signed [AW-1:0] top_in = '0;
  logic signed [DW-1:0] left_in = '0;
  logic signed [DW-1:0] right_out;
  logic signed [AW-1:0] down_out;

  always #5 clk = ~clk;

  fs_sys_pe dut (.clk(clk), .rst_n(rst_n), .sel(sel), .top_in(top_in),
                 .left_in(left_in), .right_out(right_out), .down_out(down_out));

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

  initial begin
    int ra, rb, rc;
    ra = 0; rb = 0; rc = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int t, l;
      // phases of random length: mostly compute, sometimes a reload
      if (n % 50 == 0)  sel = 0;
      if (n % 50 == 3)  sel = 1;
      t = (sel == 0) ? int'($urandom_range(0, 255)) - 128 : int'($urandom) % 100000;
      l = int'($urandom_range(0, 255)) - 128;
      top_in = AW'(t); left_in = DW'(l);
      #1;
      check(down_out, sel ? rc : ra, "down_out");
      check(right_out, rb, "right_out");
      @(negedge clk);
      rc = t + (ra + rb) * (ra + rb);
      if (!sel) ra = int'($signed(8'(t)));
      rb = l;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
