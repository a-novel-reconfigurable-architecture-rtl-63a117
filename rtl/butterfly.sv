// butterfly: radix-2 FFT butterfly, top = a + w*b, bottom = a - w*b.
//
// The lower input b passes through the three-multiplier complex multiplier, then one
// complex adder and one complex subtractor form the two outputs, as in the paper's
// butterfly figure. Values wrap at FFT_W bits; the FFT keeps them in range by taking
// DATA_W-bit inputs into FFT_W-bit registers. Timing: combinational.
module butterfly
  import fpda_pkg::*;
(
  input  cplx_t    a,
  input  cplx_t    b,
  input  twiddle_t w,
  output cplx_t    top,
  output cplx_t    bot
);
  cplx_t wb;

  cmult u_mul (.x(b), .w(w), .y(wb));

  always_comb begin
    top.re = a.re + wb.re;
    top.im = a.im + wb.im;
    bot.re = a.re - wb.re;
    bot.im = a.im - wb.im;
  end
endmodule
