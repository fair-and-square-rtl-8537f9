// fs_cpm3_acc: complex partial multiply-accumulator built on fs_cpm3.
//
// Computes z_hk = sum_i (a_hi + jb_hi)(c_ik + js_ik) with three squares per
// complex product. The register is first loaded (init) with
//   (Sab_h + Scs_k) + j(Sba_h + Ssc_k), where
//   Sab_h = sum(-(a+b)^2 + b^2), Scs_k = sum(-c^2 + (c+s)^2),
//   Sba_h = sum(-(a+b)^2 - a^2), Ssc_k = sum(-c^2 - (s-c)^2);
// then every cycle with en it adds CPM3(a+jb, c+js). After the last pair the
// register holds 2*z_hk.
//
// Interface: init has priority over en; outputs are the registers.
// The structure follows the paper's Fig. 12b; the strobes, widths and reset
// are this design's choices.
module fs_cpm3_acc
#(
  parameter int DW = fs_pkg::DATA_W,
  parameter int AW = fs_pkg::ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 init,
  input  logic signed [AW-1:0] init_re,
  input  logic signed [AW-1:0] init_im,
  input  logic                 en,
  input  logic signed [DW-1:0] a,
  input  logic signed [DW-1:0] b,
  input  logic signed [DW-1:0] c,
  input  logic signed [DW-1:0] s,
  output logic signed [AW-1:0] acc_re,
  output logic signed [AW-1:0] acc_im
);

  logic signed [2*DW+5:0] pre, pim;

  fs_cpm3 #(.DW(DW)) u_cpm3 (.a(a), .b(b), .c(c), .s(s), .re(pre), .im(pim));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_re <= '0;
      acc_im <= '0;
    end else if (init) begin
      acc_re <= init_re;
      acc_im <= init_im;
    end else if (en) begin
      acc_re <= acc_re + AW'(pre);
      acc_im <= acc_im + AW'(pim);
    end
  end

endmodule
