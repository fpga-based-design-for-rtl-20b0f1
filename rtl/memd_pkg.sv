// memd_pkg: number formats, shared types and the direction-vector table of the
// MEMD datapath.
//
// Number formats (fixed point, two's complement):
//   samples x(t), h(t), IMFs, residue : 16 bit Q12.4   (sample_t)
//   direction coefficients a_i^k      :  8 bit Q2.6    (HAMM_Q26)
//   projected signals y_k(t)          : 24 bit Q16.8   (proj_t)
//   spline piece coefficients a,b,c,d : 64 bit with 24, 40, 48, 48 fraction
//                                       bits (more for the higher powers, so
//                                       that d dx^3 stays accurate for long
//                                       knot spacings)
//   envelope values                   : 32 bit Q.8     (env_t)
// The 16/8/24-bit widths and the Q12.4, Q2.6 and 16.8 formats are the ones given
// for the projection and extrema datapaths; the spline and envelope widths are
// this design's choice.
//
// HAMM_Q26 holds K=8 unit direction vectors on the 3-sphere (N=4 channels),
// rounded to Q2.6. Row k-1 is built from the Hammersley/Halton point of index k:
//   u_j = radical inverse of k in base p_j, p = (2,3,5,7);  b_j = 2 u_j - 1
//   theta_j = atan2( sqrt(b_{j+1}^2 + ... + b_N^2), b_j ),  j = 1..N-1
//   a = ( cos th1, sin th1 cos th2, sin th1 sin th2 cos th3, sin th1 sin th2 sin th3 )
// The coefficients are compile-time constants, so each projection unit uses
// constant (canonical signed digit) multipliers.
package memd_pkg;

  localparam int DW  = 16;   // sample width
  localparam int XF  = 4;    // sample fraction bits (Q12.4)
  localparam int CWD = 8;    // coefficient width
  localparam int CFR = 6;    // coefficient fraction bits (Q2.6)
  localparam int YW  = 24;   // projected-signal width
  localparam int YF  = 8;    // projected-signal fraction bits (Q16.8)
  localparam int CF  = 24;   // fraction bits of piece coefficient a
  localparam int BF  = 40;   // fraction bits of piece coefficient b
  localparam int KF  = 48;   // fraction bits of piece coefficients c, d (and k)
  localparam int SF  = XF + 24;  // fraction bits of the knot slopes s0, s1
  localparam int RB  = 24;   // reciprocal table fraction bits
  localparam int EF  = 8;    // envelope fraction bits
  localparam int EW  = 32;   // envelope width

  typedef logic signed [DW-1:0] sample_t;
  typedef logic signed [YW-1:0] proj_t;
  typedef logic signed [63:0]   wide_t;
  typedef logic signed [127:0]  xwide_t;   // intermediate products
  typedef logic signed [EW-1:0] env_t;
  typedef logic        [RB:0]   recip_t;

  // one cubic piece q(dx) = a + b dx + c dx^2 + d dx^3; a has CF, b has BF,
  // c and d have KF fraction bits
  typedef struct packed {
    wide_t a;
    wide_t b;
    wide_t c;
    wide_t d;
  } spline_piece_t;

  localparam int HAMM_K = 8;
  localparam int HAMM_N = 4;
  // direction coefficient a_{i+1}^{k+1} in Q2.6 (value / 64)
  function automatic int hamm_q26(input int k, input int i);
    int row [HAMM_N];
    case (k)
      0: row = '{   0,  -22,  -39,   46};
      1: row = '{ -42,   28,  -17,   36};
      2: row = '{  33,  -52,   13,   10};
      3: row = '{ -49,   -7,   39,    9};
      4: row = '{  14,   30,  -50,   23};
      5: row = '{ -15,  -33,  -31,   43};
      6: row = '{  39,    6,   -6,   50};
      7: row = '{ -41,   36,   13,   31};
      default: row = '{0, 0, 0, 0};
    endcase
    return row[i];
  endfunction

  // round(2^CF / 3), used for the divisions by 3 of the spline coefficients
  localparam longint THIRD = ((64'sd1 <<< CF) + 1) / 3;

  // saturate a wide value to a 16-bit sample
  function automatic sample_t sat16(input wide_t v);
    if (v > wide_t'(32767))       return 16'sh7fff;
    else if (v < -wide_t'(32768)) return 16'sh8000;
    else                          return sample_t'(v);
  endfunction

endpackage
