// tb_twiddle_rom: checks every (stage, butterfly) entry of the twiddle table. The expected
// exponent is worked out here from the in-place FFT positions: in stage s the butterfly
// pairs positions p and p + 8/2^s, and the twiddle is W16^(bitrev_s(block) * 8/2^s), where
// block = p / (16/2^s). The three constants must equal cos t, cos t - sin t and
// cos t + sin t in Q2.14 (t = -2 pi k / 16) within 1 LSB.
module tb_twiddle_rom;
  import fpda_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [1:0] st;
  twiddle_t w [8];

  twiddle_rom dut (.st, .w);

  // Top position handled by butterfly unit i in each stage (from the FFT routing figure).
  int top_pos [4][8] = '{
    '{0, 1, 2, 3, 4, 5, 6, 7},
    '{0, 1, 2, 3, 8, 9, 10, 11},
    '{0, 1, 8, 9, 4, 5, 12, 13},
    '{0, 2, 8, 10, 4, 6, 12, 14}
  };

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int bitrev(int v, int bits);
    int r = 0;
    for (int b = 0; b < bits; b++) if ((v & (1 << b)) != 0) r |= 1 << (bits - 1 - b);
    return r;
  endfunction

  function automatic bit near(real e, int g);
    return (e - g) <= 1.0 && (g - e) <= 1.0;
  endfunction

  initial begin
    for (int s = 0; s < 4; s++) begin
      st = 2'(s);
      @(negedge clk);
      for (int i = 0; i < 8; i++) begin
        int span, k;
        real t, c, sn;
        span = 8 >> s;
        k = bitrev(top_pos[s][i] / (2 * span), s) * span;
        t = -2.0 * 3.141592653589793 * k / 16.0;
        c = $cos(t) * 16384.0; sn = $sin(t) * 16384.0;
        checks += 3;
        if (!near(c, int'(w[i].c)) || !near(c - sn, int'(w[i].cms)) || !near(c + sn, int'(w[i].cps))) begin
          failures += 3;
          $display("stage %0d bf %0d: k=%0d got %0d %0d %0d", s, i, k, w[i].c, w[i].cms, w[i].cps);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
