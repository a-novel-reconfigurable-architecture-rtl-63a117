// fpda_pkg: types and constants shared by the Field Programmable DSP Array (FPDA) blocks.
//
// Word widths. Fig. 1 shows each filter input sample as eight bits, X[0]..X[7], each feeding
// the address of a 4-input distributed-arithmetic (DA) LUT; DATA_W = 8 follows that figure.
// The coefficient width, the FFT register width and the fixed-point formats are this design's
// own choices; the paper gives none.
//
// Configuration modes follow the control-signal table: exactly one of C1..C5 is high
// (FIR, IIR, DCT, FFT, DWT). How the 3-bit decoder input D1..D3 encodes a mode is not given;
// this design uses D = 1..5 in the order of that table and treats 0, 6 and 7 as "no function".
//
// The FFT twiddle table holds, for each W16^k (k = 0..7), the three constants that the
// three-multiplier complex multiplier needs: cos(t), cos(t) - sin(t) and cos(t) + sin(t),
// with t = -2*pi*k/16, in signed Q2.14. The DCT cosine table holds cos(m*pi/32) for
// m = 0..16 in Q1.14; every DCT coefficient is that table with a sign, by symmetry.
package fpda_pkg;

  parameter int DATA_W  = 8;    // filter / transform input sample width (Fig. 1)
  parameter int COEF_W  = 16;   // filter coefficient width (assumed)
  parameter int LUT_W   = COEF_W + 4; // one DA LUT word: coefficient times a 4-bit nibble
  parameter int FFT_W   = 16;   // FFT working register width, real and imaginary (assumed)
  parameter int TW_W    = 16;   // twiddle constant width, Q2.14 (assumed)
  parameter int TW_FRAC = 14;
  parameter int DCT_FRAC = 14;  // DCT coefficient fraction bits, Q1.14 (assumed)
  parameter int DCT_IN_W = DATA_W + 2;   // widest combined DCT input: sum of four samples
  parameter int DCT_LUT_W = 18;          // sum of four Q1.14 coefficients
  parameter int DCT_ACC_W = 28;          // scaling accumulator width
  parameter int OUT_W   = 32;   // width of the common result bus

  // One-hot control word C1..C5 of the configuration table, C1 in bit 0.
  typedef enum logic [2:0] {
    MODE_NONE = 3'd0,
    MODE_FIR  = 3'd1,
    MODE_IIR  = 3'd2,
    MODE_DCT  = 3'd3,
    MODE_FFT  = 3'd4,
    MODE_DWT  = 3'd5
  } mode_e;

  typedef struct packed {
    logic signed [FFT_W-1:0] re;
    logic signed [FFT_W-1:0] im;
  } cplx_t;

  typedef struct packed {
    logic signed [TW_W-1:0] c;      // cos(t)
    logic signed [TW_W-1:0] cms;    // cos(t) - sin(t)
    logic signed [TW_W-1:0] cps;    // cos(t) + sin(t)
  } twiddle_t;

  // W16^k for k = 0..7 as (cos, cos-sin, cos+sin), Q2.14, t = -2*pi*k/16.
  function automatic twiddle_t twiddle(input logic [2:0] k);
    case (k)
      3'd0: return '{c: 16'sd16384,  cms: 16'sd16384,  cps: 16'sd16384};
      3'd1: return '{c: 16'sd15137,  cms: 16'sd21407,  cps: 16'sd8867};
      3'd2: return '{c: 16'sd11585,  cms: 16'sd23170,  cps: 16'sd0};
      3'd3: return '{c: 16'sd6270,   cms: 16'sd21407,  cps: -16'sd8867};
      3'd4: return '{c: 16'sd0,      cms: 16'sd16384,  cps: -16'sd16384};
      3'd5: return '{c: -16'sd6270,  cms: 16'sd8867,   cps: -16'sd21407};
      3'd6: return '{c: -16'sd11585, cms: 16'sd0,      cps: -16'sd23170};
      default: return '{c: -16'sd15137, cms: -16'sd8867, cps: -16'sd21407};
    endcase
  endfunction

  // Twiddle exponent k used by butterfly unit `bf` (0..7) in stage `st` (0..3) of the
  // 16-point in-place FFT with the register routing of the scalable FFT figure.
  function automatic logic [2:0] twiddle_exp(input logic [1:0] st, input logic [2:0] bf);
    case (st)
      2'd0: return 3'd0;
      2'd1: return (bf >= 3'd4) ? 3'd4 : 3'd0;
      2'd2: return {bf[2:1], 1'b0};                 // 0,0,2,2,4,4,6,6
      default: return {bf[0], bf[2:1]};             // 0,4,1,5,2,6,3,7
    endcase
  endfunction

  // cos(m*pi/32) for m = 0..16 in Q1.14.
  function automatic int cos32_base(input int m);
    case (m)
      0: return 16384;   1: return 16305;   2: return 16069;   3: return 15679;
      4: return 15137;   5: return 14449;   6: return 13623;   7: return 12665;
      8: return 11585;   9: return 10394;  10: return 9102;   11: return 7723;
     12: return 6270;   13: return 4756;   14: return 3196;   15: return 1606;
      default: return 0;
    endcase
  endfunction

  // cos(m*pi/32) for any m >= 0, Q1.14, folded onto the first quadrant.
  function automatic int cos32(input int m);
    int r;
    r = m % 64;
    if (r > 32) r = 64 - r;               // cos(2pi - a) = cos(a)
    if (r > 16) return -cos32_base(32 - r); // cos(pi - a) = -cos(a)
    return cos32_base(r);
  endfunction

endpackage
