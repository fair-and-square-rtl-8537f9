// fs_pkg: shared constants and types of the square-based arithmetic engines.
//
// DATA_W is the operand width and ACC_W the accumulator width, the defaults of
// every engine. Both are this design's choice; the paper fixes no widths.
// corr_mode_t selects which correction term fs_corr accumulates.
package fs_pkg;

  localparam int DATA_W = 8;   // signed operand width (int8-style data)
  localparam int ACC_W  = 32;  // signed accumulator width

  // Correction terms of the paper's equations (5), (18), (33)/(35) and (41)/(43)/(47).
  typedef enum logic [1:0] {
    CORR_REAL  = 2'd0,  // re = -sum p^2                             (Sa_i, Sb_j, Sw_k, Sw)
    CORR_CPLX4 = 2'd1,  // re = im = -sum (p^2 + q^2)                (Sx_h, Sy_k, S_k, Sw)
    CORR_CPLX3_SAMPLE = 2'd2, // re = sum(-(p+q)^2 + q^2), im = sum(-(p+q)^2 - p^2)  (Sab_h/Sba_h, Sxy/Syx)
    CORR_CPLX3_WEIGHT = 2'd3  // re = sum(-p^2 + (p+q)^2), im = sum(-p^2 - (q-p)^2)  (Scs_k/Ssc_k, Sx_k/Sy_k, Sw)
  } corr_mode_t;

endpackage
