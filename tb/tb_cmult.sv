// tb_cmult: three-multiplier complex multiplier. For random 12-bit complex inputs and each
// of the eight twiddles W16^k it compares the result with (a + jb) exp(-j 2 pi k / 16)
// computed in floating point; truncation allows an error of at most 2 LSB per part.
module tb_cmult;
  import fpda_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  cplx_t x, y;
  twiddle_t w;

  cmult dut (.x, .w, .y);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      int k;
      real a, b, er, ei;
      k = i % 8;
      x.re = FFT_W'($signed(12'($urandom)));
      x.im = FFT_W'($signed(12'($urandom)));
      if (i < 8) begin x.re = -16'sd2048; x.im = 16'sd2047; end
      w = twiddle(3'(k));
      @(negedge clk);
      a = x.re; b = x.im;
      er = a * $cos(2.0 * 3.141592653589793 * k / 16) + b * $sin(2.0 * 3.141592653589793 * k / 16);
      ei = b * $cos(2.0 * 3.141592653589793 * k / 16) - a * $sin(2.0 * 3.141592653589793 * k / 16);
      checks += 2;
      if ((er - y.re) > 2.5 || (y.re - er) > 2.5) begin
        failures++; $display("k=%0d re %0d expected %f", k, y.re, er);
      end
      if ((ei - y.im) > 2.5 || (y.im - ei) > 2.5) begin
        failures++; $display("k=%0d im %0d expected %f", k, y.im, ei);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
