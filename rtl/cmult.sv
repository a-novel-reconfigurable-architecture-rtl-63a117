// cmult: complex multiplier with three real multipliers, for the FFT butterfly.
//
// It computes (a + jb)(cos t + j sin t) as
//   R = (cos t - sin t) * b + cos t * (a - b)
//   I = (cos t + sin t) * a - cos t * (a - b)
// which needs three multipliers, one adder and two subtractors instead of four multipliers,
// at the price of storing cos t - sin t and cos t + sin t in the twiddle table besides
// cos t. This is the paper's formulation. The twiddle constants are signed Q2.14 and the
// products are truncated back to FFT_W bits by an arithmetic shift (this design's choice);
// the result wraps if it does not fit, which the FFT's input width rules out.
// Timing: combinational.
module cmult
  import fpda_pkg::*;
(
  input  cplx_t    x,
  input  twiddle_t w,
  output cplx_t    y
);
  localparam int PW = FFT_W + TW_W + 2;

  logic signed [FFT_W:0]  a_m_b;
  logic signed [PW-1:0]   m_cms_b, m_c_amb, m_cps_a, r_full, i_full;

  always_comb begin
    a_m_b   = (FFT_W+1)'(x.re) - (FFT_W+1)'(x.im);
    m_cms_b = PW'(w.cms) * PW'(x.im);
    m_c_amb = PW'(w.c)   * PW'(a_m_b);
    m_cps_a = PW'(w.cps) * PW'(x.re);
    r_full  = m_cms_b + m_c_amb;
    i_full  = m_cps_a - m_c_amb;
    y.re    = FFT_W'(r_full >>> TW_FRAC);
    y.im    = FFT_W'(i_full >>> TW_FRAC);
  end
endmodule
