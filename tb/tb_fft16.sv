// tb_fft16: scalable FFT. Random 8-bit complex blocks (and a full-scale one) are
// transformed at sizes 16, 8, 4 and 2; every output bin is compared with the DFT
// sum x[n] exp(-j 2 pi k n / N) computed here in floating point. Truncation in the
// multipliers allows a small error (within 6 LSB). It also checks that done comes exactly
// log2n + 1 clocks after start, and that bins beyond N read zero.
module tb_fft16;
  import fpda_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 1'b0, start = 1'b0, busy, done;
  logic [2:0] log2n = 3'd4;
  logic signed [DATA_W-1:0] x_re [16], x_im [16];
  cplx_t y [16];

  fft16 dut (.clk, .rst_n, .start, .log2n, .x_re, .x_im, .busy, .done, .y);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int lg, input int kind);
    int n, cycles;
    real xr [16], xi [16];
    n = 1 << lg;
    for (int i = 0; i < 16; i++) begin
      x_re[i] = (kind == 1) ? 8'sd127 : (kind == 2) ? -8'sd128 : 8'($urandom);
      x_im[i] = (kind == 1) ? -8'sd128 : (kind == 2) ? -8'sd128 : 8'($urandom);
      xr[i] = x_re[i]; xi[i] = x_im[i];
    end
    @(negedge clk);
    start = 1'b1; log2n = 3'(lg);
    @(negedge clk);
    start = 1'b0;
    for (int i = 0; i < 16; i++) begin x_re[i] = 8'($urandom); x_im[i] = 8'($urandom); end
    cycles = 1;
    while (!done && cycles < 50) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != lg + 1) begin failures++; $display("N=%0d: done after %0d clocks", n, cycles); end
    for (int k = 0; k < 16; k++) begin
      real er, ei;
      er = 0; ei = 0;
      if (k < n)
        for (int m = 0; m < n; m++) begin
          real t;
          t = -2.0 * 3.141592653589793 * k * m / n;
          er += xr[m] * $cos(t) - xi[m] * $sin(t);
          ei += xr[m] * $sin(t) + xi[m] * $cos(t);
        end
      checks += 2;
      if ((er - y[k].re) > 6.0 || (y[k].re - er) > 6.0 || (ei - y[k].im) > 6.0 || (y[k].im - ei) > 6.0) begin
        failures++;
        $display("N=%0d bin %0d: got (%0d, %0d) expected (%f, %f)", n, k, y[k].re, y[k].im, er, ei);
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(4, 1);
    run(4, 2);
    for (int r = 0; r < 6; r++) run(4, 0);
    for (int lg = 1; lg <= 3; lg++)
      for (int r = 0; r < 4; r++) run(lg, 0);
    run(4, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
