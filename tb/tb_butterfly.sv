// tb_butterfly: radix-2 butterfly. For random complex a, b and each twiddle W16^k it
// checks top = a + w b and bottom = a - w b against floating point, within 2 LSB.
module tb_butterfly;
  import fpda_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  cplx_t a, b, top, bot;
  twiddle_t w;

  butterfly dut (.a, .b, .w, .top, .bot);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit near(real e, int g);
    return (e - g) <= 2.5 && (g - e) <= 2.5;
  endfunction

  initial begin
    for (int i = 0; i < 400; i++) begin
      int k;
      real wr, wi, pr, pi_;
      k = i % 8;
      a.re = FFT_W'($signed(12'($urandom))); a.im = FFT_W'($signed(12'($urandom)));
      b.re = FFT_W'($signed(12'($urandom))); b.im = FFT_W'($signed(12'($urandom)));
      w = twiddle(3'(k));
      @(negedge clk);
      wr = $cos(2.0 * 3.141592653589793 * k / 16);
      wi = -$sin(2.0 * 3.141592653589793 * k / 16);
      pr = b.re * wr - b.im * wi;
      pi_ = b.re * wi + b.im * wr;
      checks += 4;
      if (!near(a.re + pr, int'(top.re))) begin failures++; $display("top.re %0d", top.re); end
      if (!near(a.im + pi_, int'(top.im))) begin failures++; $display("top.im %0d", top.im); end
      if (!near(a.re - pr, int'(bot.re))) begin failures++; $display("bot.re %0d", bot.re); end
      if (!near(a.im - pi_, int'(bot.im))) begin failures++; $display("bot.im %0d", bot.im); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
