// fs_corr: correction-term accumulator for the square-based engines.
//
// Every square-based engine needs sums of squares that depend on one operand
// only (a row of A, a column of B, a kernel, a coefficient row). fs_corr
// computes them from a stream of elements p + jq, one per cycle with en:
//   CORR_REAL          re = -sum p^2                      (im = re)
//   CORR_CPLX4         re = im = -sum (p^2 + q^2)
//   CORR_CPLX3_SAMPLE  re = sum(-(p+q)^2 + q^2), im = sum(-(p+q)^2 - p^2)
//   CORR_CPLX3_WEIGHT  re = sum(-p^2 + (p+q)^2), im = sum(-p^2 - (q-p)^2)
// These are the paper's Sa_i/Sb_j/Sw_k/Sw (eq. 5, 9, 11), Sx_h/Sy_k/S_k
// (eq. 18, 25, 30) and the CPM3 terms (eq. 33, 35, 41, 43, 47).
// clear restarts the sum (and has priority over en); with clear and en high
// together the sum restarts with the current element. mode must be held
// while a sum is built. Outputs are registered.
// The paper gives the formulas and notes the terms can be computed on the
// fly or in advance, but no circuit; this single squarer-based unit with a
// mode select is this design's own arrangement.
module fs_corr
  import fs_pkg::*;
#(
  parameter int DW = fs_pkg::DATA_W,
  parameter int AW = fs_pkg::ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  corr_mode_t           mode,
  input  logic                 clear,
  input  logic                 en,
  input  logic signed [DW-1:0] p,
  input  logic signed [DW-1:0] q,
  output logic signed [AW-1:0] s_re,
  output logic signed [AW-1:0] s_im
);

  logic signed [DW:0]     s_pq, s_qp;
  logic        [2*DW+1:0] q_pq, q_qp;
  logic        [2*DW-1:0] q_p, q_q;
  logic signed [AW-1:0]   d_re, d_im;   // this element's contribution
  logic signed [AW-1:0]   base_re, base_im;

  assign s_pq = (DW+1)'(p) + (DW+1)'(q);
  assign s_qp = (DW+1)'(q) - (DW+1)'(p);

  fs_square #(.W(DW+1)) u_q_pq (.x(s_pq), .y(q_pq));
  fs_square #(.W(DW+1)) u_q_qp (.x(s_qp), .y(q_qp));
  fs_square #(.W(DW))   u_q_p  (.x(p),    .y(q_p));
  fs_square #(.W(DW))   u_q_q  (.x(q),    .y(q_q));

  always_comb begin
    unique case (mode)
      CORR_REAL: begin
        d_re = -AW'(q_p);
        d_im = d_re;
      end
      CORR_CPLX4: begin
        d_re = -(AW'(q_p) + AW'(q_q));
        d_im = d_re;
      end
      CORR_CPLX3_SAMPLE: begin
        d_re = AW'(q_q) - AW'(q_pq);
        d_im = -(AW'(q_pq) + AW'(q_p));
      end
      default: begin // CORR_CPLX3_WEIGHT
        d_re = AW'(q_pq) - AW'(q_p);
        d_im = -(AW'(q_p) + AW'(q_qp));
      end
    endcase
  end

  assign base_re = clear ? '0 : s_re;
  assign base_im = clear ? '0 : s_im;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_re <= '0;
      s_im <= '0;
    end else if (clear || en) begin
      s_re <= base_re + (en ? d_re : AW'(0));
      s_im <= base_im + (en ? d_im : AW'(0));
    end
  end

  // A sum is built in one mode: mode may change only on a clear.
  corr_mode_t mode_q;

  always_ff @(posedge clk) begin
    mode_q <= mode;
    if (rst_n && en && !clear)
      a_mode_stable: assert (mode == mode_q)
        else $error("fs_corr: mode changed in the middle of a sum");
  end

endmodule
