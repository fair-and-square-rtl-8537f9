// tb_fs_square: exhaustive check of the squarer at its default width (9 bits)
// and at 4 bits, plus random checks at 12 bits, against x*x computed by the
// testbench with integer arithmetic.
module tb_fs_square;
  int checks = 0, failures = 0;

  logic signed [8:0]  x9;  logic [17:0] y9;
  logic signed [3:0]  x4;  logic [7:0]  y4;
  logic signed [11:0] x12; logic [23:0] y12;

  fs_square              dut9  (.x(x9),  .y(y9));
  fs_square #(.W(4))     dut4  (.x(x4),  .y(y4));
  fs_square #(.W(12))    dut12 (.x(x12), .y(y12));

  task automatic check(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -256; v < 256; v++) begin
      x9 = 9'(v); #1;
      check(longint'(y9), longint'(v) * v, $sformatf("W=9 x=%0d", v));
    end
    for (int v = -8; v < 8; v++) begin
      x4 = 4'(v); #1;
      check(longint'(y4), longint'(v) * v, $sformatf("W=4 x=%0d", v));
    end
    for (int n = 0; n < 2000; n++) begin
      int v;
      v = int'($urandom_range(0, 4095)) - 2048;
      x12 = 12'(v); #1;
      check(longint'(y12), longint'(v) * v, $sformatf("W=12 x=%0d", v));
    end
    x12 = -12'sd2048; #1;
    check(longint'(y12), 2048 * 2048, "W=12 most negative");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
