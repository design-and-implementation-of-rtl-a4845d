// lref_pkg: constants and types shared by the bandwidth-reconfigurable
// three-stage interpolated FIR filter (LRef filter).
//
// The filter is the cascade H(z) = H_I(z) H_II(z) H_III(z):
//   Filter I   order 26, interpolated by 4, 14 unique coefficients, one bank per bandwidth
//   Filter II  order 26, interpolated by 2, halfband: 7 non-zero coefficients + 0.5 centre
//   Filter III order 14, not interpolated,  halfband: 4 non-zero coefficients + 0.5 centre
// Orders, interpolation factors, the 67-word coefficient store, the four
// bandwidths and the 85-sample group delay follow the paper. The address map
// of the coefficient store and the bandwidth encoding are this design's choice.
package lref_pkg;

  localparam int unsigned WL_DEFAULT = 16;   // sample word length
  localparam int unsigned CW_DEFAULT = 16;   // coefficient word length (Q1.15)
  localparam int unsigned LANES_DEFAULT = 2; // I and Q

  localparam int unsigned NUM_BW = 4;

  localparam int unsigned F1_ORDER = 26;
  localparam int unsigned F1_M     = 4;
  localparam int unsigned F1_NCOEF = F1_ORDER / 2 + 1;        // 14
  localparam int unsigned F2_ORDER = 26;
  localparam int unsigned F2_M     = 2;
  localparam int unsigned F2_NCOEF = (F2_ORDER + 2) / 4;      // 7
  localparam int unsigned F3_ORDER = 14;
  localparam int unsigned F3_M     = 1;
  localparam int unsigned F3_NCOEF = (F3_ORDER + 2) / 4;      // 4

  // Coefficient store: Filter I bank b at F1_BASE + b*F1_NCOEF, then II, then III.
  localparam int unsigned F1_BASE    = 0;
  localparam int unsigned F2_BASE    = F1_BASE + NUM_BW * F1_NCOEF;  // 56
  localparam int unsigned F3_BASE    = F2_BASE + F2_NCOEF;           // 63
  localparam int unsigned COEF_DEPTH = F3_BASE + F3_NCOEF;           // 67
  localparam int unsigned COEF_AW    = $clog2(COEF_DEPTH);           // 7

  // Group delay in samples: 13*4 + 13*2 + 7*1.
  localparam int unsigned GROUP_DELAY = F1_M * F1_ORDER / 2 + F2_M * F2_ORDER / 2
                                      + F3_M * F3_ORDER / 2;         // 85
  // Impulse response length of the cascade, in samples.
  localparam int unsigned IMPULSE_LEN = 2 * GROUP_DELAY + 1;         // 171

  // Transmission bandwidths supported by the Filter I coefficient banks.
  typedef enum logic [1:0] {
    BW_342K = 2'd0,
    BW_498K = 2'd1,
    BW_654K = 2'd2,
    BW_732K = 2'd3
  } bw_e;

endpackage
