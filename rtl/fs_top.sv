// fs_top: square-based arithmetic engine with every architecture side by side.
//
// The design replaces each multiplier of a matrix product, linear transform
// or convolution by a squarer, using a*b = ((a+b)^2 - a^2 - b^2)/2: the
// square of a sum is computed for every product, while the squares of
// single operands are gathered into correction terms that depend on one
// operand only and are added once. Every engine therefore produces twice the
// true result; a final right shift (left to the consumer) recovers it.
//
// This top holds one instance of each engine, all on one clock and one
// synchronous active-low reset, each with its own port group:
//   pma_*    partial multiplication accumulator          (fs_pma)
//   sys_*    stationary square-based systolic array      (fs_sys_array)
//   tc_*     square-based tensor core                    (fs_tensor_core)
//   ltr_*    real linear transform                       (fs_ltr)
//   conv_*   real convolution                            (fs_conv)
//   cltr_*   complex linear transform, 4-square CPM      (fs_cltr)
//   cconv_*  complex convolution, 4-square CPM           (fs_cconv)
//   cacc_*   complex multiply-accumulator, 3-square CPM3 (fs_cpm3_acc)
//   cltr3_*  complex linear transform, CPM3              (fs_cltr3)
//   cconv3_* complex convolution, CPM3                   (fs_cconv3)
//   c2d_*    real 2-D convolution                        (fs_conv2d)
//   corr_*   correction-term accumulator                 (fs_corr)
// Each group behaves exactly as the engine's own header describes. The
// engines are the paper's alternatives; gathering them in one top with
// separate ports is this design's choice.
module fs_top
  import fs_pkg::*;
#(
  parameter int DW       = fs_pkg::DATA_W,
  parameter int AW       = fs_pkg::ACC_W,
  parameter int SYS_ROWS = 4,
  parameter int SYS_COLS = 4,
  parameter int TC_M     = 4,
  parameter int TC_N     = 4,
  parameter int TC_P     = 4,
  parameter int TR_N     = 8,   // size of all linear transforms
  parameter int CV_N     = 8,   // taps of all 1-D convolutions
  parameter int C2_KH    = 3,   // 2-D kernel rows
  parameter int C2_KW    = 3,   // 2-D kernel columns
  parameter int C2_IMG_W = 16   // 2-D image width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // partial multiplication accumulator
  input  logic                 pma_init,
  input  logic signed [AW-1:0] pma_init_val,
  input  logic                 pma_en,
  input  logic signed [DW-1:0] pma_a,
  input  logic signed [DW-1:0] pma_b,
  output logic signed [AW-1:0] pma_acc,
  // systolic array
  input  logic                 sys_sel,
  input  logic signed [AW-1:0] sys_col_in  [SYS_COLS],
  input  logic signed [DW-1:0] sys_row_in  [SYS_ROWS],
  input  logic signed [AW-1:0] sys_sb_in,
  output logic signed [AW-1:0] sys_col_out [SYS_COLS],
  // tensor core
  input  logic                 tc_init,
  input  logic                 tc_en,
  input  logic signed [DW-1:0] tc_a  [TC_M][TC_N],
  input  logic signed [DW-1:0] tc_b  [TC_N][TC_P],
  input  logic signed [AW-1:0] tc_sa [TC_M],
  input  logic signed [AW-1:0] tc_sb [TC_P],
  output logic signed [AW-1:0] tc_o  [TC_M][TC_P],
  // real linear transform
  input  logic                 ltr_init,
  input  logic signed [AW-1:0] ltr_sw  [TR_N],
  input  logic                 ltr_en,
  input  logic signed [DW-1:0] ltr_x,
  input  logic signed [DW-1:0] ltr_w   [TR_N],
  output logic signed [AW-1:0] ltr_acc [TR_N],
  output logic                 ltr_done,
  // real convolution
  input  logic                 conv_en,
  input  logic signed [DW-1:0] conv_x,
  input  logic signed [DW-1:0] conv_w [CV_N],
  input  logic signed [AW-1:0] conv_sw,
  output logic signed [AW-1:0] conv_y2,
  output logic                 conv_valid,
  // complex linear transform (CPM)
  input  logic                 cltr_init,
  input  logic signed [AW-1:0] cltr_sk     [TR_N],
  input  logic                 cltr_en,
  input  logic signed [DW-1:0] cltr_x,
  input  logic signed [DW-1:0] cltr_y,
  input  logic signed [DW-1:0] cltr_c      [TR_N],
  input  logic signed [DW-1:0] cltr_s      [TR_N],
  output logic signed [AW-1:0] cltr_acc_re [TR_N],
  output logic signed [AW-1:0] cltr_acc_im [TR_N],
  output logic                 cltr_done,
  // complex convolution (CPM)
  input  logic                 cconv_en,
  input  logic signed [DW-1:0] cconv_x,
  input  logic signed [DW-1:0] cconv_y,
  input  logic signed [DW-1:0] cconv_c [CV_N],
  input  logic signed [DW-1:0] cconv_s [CV_N],
  input  logic signed [AW-1:0] cconv_sw,
  output logic signed [AW-1:0] cconv_z2_re,
  output logic signed [AW-1:0] cconv_z2_im,
  output logic                 cconv_valid,
  // complex multiply-accumulator (CPM3)
  input  logic                 cacc_init,
  input  logic signed [AW-1:0] cacc_init_re,
  input  logic signed [AW-1:0] cacc_init_im,
  input  logic                 cacc_en,
  input  logic signed [DW-1:0] cacc_a,
  input  logic signed [DW-1:0] cacc_b,
  input  logic signed [DW-1:0] cacc_c,
  input  logic signed [DW-1:0] cacc_s,
  output logic signed [AW-1:0] cacc_re,
  output logic signed [AW-1:0] cacc_im,
  // complex linear transform (CPM3)
  input  logic                 cltr3_init,
  input  logic signed [AW-1:0] cltr3_sx     [TR_N],
  input  logic signed [AW-1:0] cltr3_sy     [TR_N],
  input  logic                 cltr3_en,
  input  logic signed [DW-1:0] cltr3_x,
  input  logic signed [DW-1:0] cltr3_y,
  input  logic signed [DW-1:0] cltr3_c      [TR_N],
  input  logic signed [DW-1:0] cltr3_s      [TR_N],
  output logic signed [AW-1:0] cltr3_acc_re [TR_N],
  output logic signed [AW-1:0] cltr3_acc_im [TR_N],
  output logic                 cltr3_done,
  // complex convolution (CPM3)
  input  logic                 cconv3_en,
  input  logic signed [DW-1:0] cconv3_x,
  input  logic signed [DW-1:0] cconv3_y,
  input  logic signed [DW-1:0] cconv3_c [CV_N],
  input  logic signed [DW-1:0] cconv3_s [CV_N],
  input  logic signed [AW-1:0] cconv3_sw_re,
  input  logic signed [AW-1:0] cconv3_sw_im,
  output logic signed [AW-1:0] cconv3_z2_re,
  output logic signed [AW-1:0] cconv3_z2_im,
  output logic                 cconv3_valid,
  // real 2-D convolution
  input  logic                 c2d_en,
  input  logic                 c2d_sof,
  input  logic signed [DW-1:0] c2d_x,
  input  logic signed [DW-1:0] c2d_w [C2_KH][C2_KW],
  input  logic signed [AW-1:0] c2d_sw,
  output logic signed [AW-1:0] c2d_y2,
  output logic                 c2d_valid,
  // correction-term accumulator
  input  corr_mode_t           corr_mode,
  input  logic                 corr_clear,
  input  logic                 corr_en,
  input  logic signed [DW-1:0] corr_p,
  input  logic signed [DW-1:0] corr_q,
  output logic signed [AW-1:0] corr_re,
  output logic signed [AW-1:0] corr_im
);

  fs_pma #(.DW(DW), .AW(AW)) u_pma (
    .clk(clk), .rst_n(rst_n), .init(pma_init), .init_val(pma_init_val),
    .en(pma_en), .a(pma_a), .b(pma_b), .acc(pma_acc));

  fs_sys_array #(.DW(DW), .AW(AW), .ROWS(SYS_ROWS), .COLS(SYS_COLS)) u_sys (
    .clk(clk), .rst_n(rst_n), .sel(sys_sel), .col_in(sys_col_in),
    .row_in(sys_row_in), .sb_in(sys_sb_in), .col_out(sys_col_out));

  fs_tensor_core #(.DW(DW), .AW(AW), .TM(TC_M), .TN(TC_N), .TP(TC_P)) u_tc (
    .clk(clk), .rst_n(rst_n), .init(tc_init), .en(tc_en), .a(tc_a), .b(tc_b),
    .sa(tc_sa), .sb(tc_sb), .o(tc_o));

  fs_ltr #(.DW(DW), .AW(AW), .N(TR_N)) u_ltr (
    .clk(clk), .rst_n(rst_n), .init(ltr_init), .sw(ltr_sw), .en(ltr_en),
    .x(ltr_x), .w(ltr_w), .acc(ltr_acc), .done(ltr_done));

  fs_conv #(.DW(DW), .AW(AW), .N(CV_N)) u_conv (
    .clk(clk), .rst_n(rst_n), .en(conv_en), .x(conv_x), .w(conv_w),
    .sw(conv_sw), .y2(conv_y2), .y_valid(conv_valid));

  fs_cltr #(.DW(DW), .AW(AW), .N(TR_N)) u_cltr (
    .clk(clk), .rst_n(rst_n), .init(cltr_init), .sk(cltr_sk), .en(cltr_en),
    .x(cltr_x), .y(cltr_y), .c(cltr_c), .s(cltr_s),
    .acc_re(cltr_acc_re), .acc_im(cltr_acc_im), .done(cltr_done));

  fs_cconv #(.DW(DW), .AW(AW), .N(CV_N)) u_cconv (
    .clk(clk), .rst_n(rst_n), .en(cconv_en), .x(cconv_x), .y(cconv_y),
    .c(cconv_c), .s(cconv_s), .sw(cconv_sw),
    .z2_re(cconv_z2_re), .z2_im(cconv_z2_im), .z_valid(cconv_valid));

  fs_cpm3_acc #(.DW(DW), .AW(AW)) u_cacc (
    .clk(clk), .rst_n(rst_n), .init(cacc_init), .init_re(cacc_init_re),
    .init_im(cacc_init_im), .en(cacc_en), .a(cacc_a), .b(cacc_b),
    .c(cacc_c), .s(cacc_s), .acc_re(cacc_re), .acc_im(cacc_im));

  fs_cltr3 #(.DW(DW), .AW(AW), .N(TR_N)) u_cltr3 (
    .clk(clk), .rst_n(rst_n), .init(cltr3_init), .sx(cltr3_sx), .sy(cltr3_sy),
    .en(cltr3_en), .x(cltr3_x), .y(cltr3_y), .c(cltr3_c), .s(cltr3_s),
    .acc_re(cltr3_acc_re), .acc_im(cltr3_acc_im), .done(cltr3_done));

  fs_cconv3 #(.DW(DW), .AW(AW), .N(CV_N)) u_cconv3 (
    .clk(clk), .rst_n(rst_n), .en(cconv3_en), .x(cconv3_x), .y(cconv3_y),
    .c(cconv3_c), .s(cconv3_s), .sw_re(cconv3_sw_re), .sw_im(cconv3_sw_im),
    .z2_re(cconv3_z2_re), .z2_im(cconv3_z2_im), .z_valid(cconv3_valid));

  fs_conv2d #(.DW(DW), .AW(AW), .KH(C2_KH), .KW(C2_KW), .IMG_W(C2_IMG_W)) u_c2d (
    .clk(clk), .rst_n(rst_n), .en(c2d_en), .sof(c2d_sof), .x(c2d_x),
    .w(c2d_w), .sw(c2d_sw), .y2(c2d_y2), .y_valid(c2d_valid));

  fs_corr #(.DW(DW), .AW(AW)) u_corr (
    .clk(clk), .rst_n(rst_n), .mode(corr_mode), .clear(corr_clear),
    .en(corr_en), .p(corr_p), .q(corr_q), .s_re(corr_re), .s_im(corr_im));

endmodule
