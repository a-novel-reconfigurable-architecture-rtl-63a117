// tb_fpda_top: end-to-end test of the FPDA at its full size. It configures the array in
// turn as every function and checks the results against models computed here:
//   FIR  16 taps, random coefficients; then the LUTs are rewritten with new coefficients
//        and the filter is run again (reconfiguration of the LUT array)
//   IIR  forward 16 taps + feed-backward 15 taps
//   FFT  16-point, then 8-point (the s2 scalability path), floating-point DFT model
//   DCT  16-point, exact against quantised cosines
//   DWT  three levels with the 8-tap Daubechies filters, all four bands
//   FIR  again after the other modes: its delay line must have kept its samples
// With no mode selected, and in the block modes, samples must produce no stream result
// (the interconnect gates the strobes). Each mechanism is counted; one that never happened
// counts as a failure.
module tb_fpda_top;
  import fpda_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 1'b0;
  logic [2:0] d = '0;
  logic [4:0] c;
  mode_e mode;
  logic in_valid = 1'b0, start = 1'b0, cfg_we = 1'b0;
  logic signed [DATA_W-1:0] x_in = '0;
  logic [2:0] log2n = 3'd4;
  logic signed [DATA_W-1:0] blk_x_re [16], blk_x_im [16];
  logic [6:0] cfg_sel = '0;
  logic [3:0] cfg_addr = '0;
  logic signed [LUT_W-1:0] cfg_data = '0;
  logic [3:0] res_valid;
  logic signed [OUT_W-1:0] res_data [4];
  logic blk_busy, blk_done;
  logic signed [OUT_W-1:0] blk_re [16], blk_im [16];

  fpda_top dut (.*);

  // mechanism counters
  int n_mode_switch = 0, n_lut_reload = 0, n_fir = 0, n_iir = 0, n_fft16 = 0, n_fft_small = 0;
  int n_dct = 0, n_dwt_band [4] = '{0, 0, 0, 0}, n_gated = 0, n_state_kept = 0;

  int fir_hist [$];                  // samples seen by the FIR unit, newest first
  int iir_hist [$];
  longint expq [$];
  longint dwt_got [4][$];
  int fc [16];

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    if (mode == MODE_DWT) begin
      for (int l = 0; l < 4; l++) if (res_valid[l]) dwt_got[l].push_back(longint'(res_data[l]));
    end else if (res_valid[0]) begin
      checks++;
      if (mode != MODE_FIR && mode != MODE_IIR) begin
        failures++; $display("stream result in mode %s", mode.name());
      end else if (expq.size() == 0) begin
        failures++; $display("unexpected stream result");
      end else begin
        longint e;
        e = expq.pop_front();
        if (longint'(res_data[0]) != e) begin
          failures++; $display("%s result %0d expected %0d", mode.name(), res_data[0], e);
        end else if (mode == MODE_FIR) n_fir++;
        else n_iir++;
      end
    end
  end

  task automatic set_mode(input mode_e m);
    @(negedge clk);
    d = 3'(int'(m));
    @(negedge clk);
    checks++;
    if (mode != m || c != ((m == MODE_NONE) ? 5'b0 : 5'(1 << (int'(m) - 1)))) begin
      failures++; $display("mode %s not taken", m.name());
    end
    n_mode_switch++;
  endtask

  task automatic load_tap(input int sel, input int coef);
    for (int h = 0; h < 2; h++)
      for (int n = 0; n < 16; n++) begin
        @(negedge clk);
        cfg_we = 1'b1; cfg_sel = 7'(sel + h); cfg_addr = 4'(n);
        cfg_data = LUT_W'((h == 1 && n >= 8) ? (n - 16) * coef : n * coef);
      end
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic stream_fir(input int ns);
    for (int i = 0; i < ns; i++) begin
      longint s;
      @(negedge clk);
      in_valid = 1'b1;
      x_in = 8'($urandom);
      fir_hist.push_front(int'(x_in));
      void'(fir_hist.pop_back());
      s = 0;
      for (int k = 0; k < 16; k++) s += longint'(fc[k]) * fir_hist[k];
      expq.push_back(s);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (5) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d FIR results missing", expq.size()); end
  endtask

  task automatic gated_samples();
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      in_valid = 1'b1; x_in = 8'($urandom);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (4) @(negedge clk);
    n_gated++;     // a stream result here would have failed in the monitor
  endtask

  task automatic run_fft(input int lg);
    int n, cyc;
    real xr [16], xi [16];
    n = 1 << lg;
    for (int i = 0; i < 16; i++) begin
      blk_x_re[i] = 8'($urandom); blk_x_im[i] = 8'($urandom);
      xr[i] = blk_x_re[i]; xi[i] = blk_x_im[i];
    end
    @(negedge clk);
    start = 1'b1; log2n = 3'(lg);
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!blk_done && cyc < 40) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != lg + 1) begin failures++; $display("FFT%0d done after %0d", n, cyc); end
    for (int k = 0; k < n; k++) begin
      real er, ei;
      er = 0; ei = 0;
      for (int m = 0; m < n; m++) begin
        real t;
        t = -2.0 * 3.141592653589793 * k * m / n;
        er += xr[m] * $cos(t) - xi[m] * $sin(t);
        ei += xr[m] * $sin(t) + xi[m] * $cos(t);
      end
      checks++;
      if ((er - blk_re[k]) > 6.0 || (blk_re[k] - er) > 6.0 ||
          (ei - blk_im[k]) > 6.0 || (blk_im[k] - ei) > 6.0) begin
        failures++; $display("FFT%0d bin %0d: (%0d, %0d) expected (%f, %f)", n, k, blk_re[k], blk_im[k], er, ei);
      end
    end
    if (lg == 4) n_fft16++; else n_fft_small++;
  endtask

  task automatic run_dct();
    int cyc, xs [16];
    for (int i = 0; i < 16; i++) begin
      xs[i] = int'($signed(8'($urandom)));
      blk_x_re[i] = 8'(xs[i]);
    end
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!blk_done && cyc < 40) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 11) begin failures++; $display("DCT done after %0d", cyc); end
    for (int k = 0; k < 16; k++) begin
      longint e;
      e = 0;
      for (int n = 0; n < 16; n++) begin
        real v;
        v = $cos((2.0 * n + 1.0) * k * 3.141592653589793 / 32.0) * 16384.0;
        e += longint'(xs[n]) * $rtoi(v + (v < 0 ? -0.5 : 0.5));
      end
      checks++;
      if (longint'(blk_re[k]) != e) begin failures++; $display("DCT Y%0d %0d expected %0d", k, blk_re[k], e); end
    end
    n_dct++;
  endtask

  task automatic run_dwt();
    real hr [8], lr [8];
    int hc [8], lc [8], x [128], s [$], nx [$];
    longint exp_b [4][$];
    hr = '{-0.0106, -0.0329, 0.0308, 0.1870, -0.0280, -0.6309, 0.7148, -0.2304};
    lr = '{0.2304, 0.7148, 0.6309, -0.0280, -0.1870, 0.0308, 0.0329, -0.0106};
    for (int k = 0; k < 8; k++) begin
      hc[k] = $rtoi(hr[k] * 32768.0 + (hr[k] < 0 ? -0.5 : 0.5));
      lc[k] = $rtoi(lr[k] * 32768.0 + (lr[k] < 0 ? -0.5 : 0.5));
    end
    for (int l = 0; l < 3; l++)
      for (int k = 0; k < 8; k++) begin
        load_tap((l << 5) | (0 << 4) | (k << 1), hc[k]);
        load_tap((l << 5) | (1 << 4) | (k << 1), lc[k]);
      end
    foreach (x[i]) begin x[i] = int'($signed(8'($urandom))); s.push_back(x[i]); end
    for (int l = 0; l < 3; l++) begin
      nx.delete();
      for (int n = 0; n < s.size(); n += 2) begin
        longint hh, ll, sh;
        hh = 0; ll = 0;
        for (int k = 0; k < 8; k++) if (n - k >= 0) begin
          hh += longint'(hc[k]) * s[n-k];
          ll += longint'(lc[k]) * s[n-k];
        end
        exp_b[l].push_back(hh);
        if (l == 2) exp_b[3].push_back(ll);
        sh = ll >>> 16;
        nx.push_back(sh > 127 ? 127 : sh < -128 ? -128 : int'(sh));
      end
      s = nx;
    end
    foreach (x[i]) begin
      @(negedge clk);
      in_valid = 1'b1; x_in = 8'(x[i]);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (20) @(negedge clk);
    for (int b = 0; b < 4; b++) begin
      checks++;
      if (dwt_got[b].size() != exp_b[b].size()) begin
        failures++; $display("DWT band %0d: %0d results, expected %0d", b, dwt_got[b].size(), exp_b[b].size());
      end
      for (int i = 0; i < exp_b[b].size() && i < dwt_got[b].size(); i++) begin
        checks++;
        if (dwt_got[b][i] != exp_b[b][i]) begin failures++; $display("DWT band %0d #%0d", b, i); end
        else n_dwt_band[b]++;
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 16; i++) begin blk_x_re[i] = '0; blk_x_im[i] = '0; end
    for (int i = 0; i < 16; i++) begin fir_hist.push_front(0); iir_hist.push_front(0); end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // No function selected: samples are ignored.
    set_mode(MODE_NONE);
    gated_samples();

    // FIR, then the same FIR unit reloaded with new coefficients.
    set_mode(MODE_FIR);
    for (int k = 0; k < 16; k++) begin fc[k] = int'($signed(16'($urandom))); load_tap(2*k, fc[k]); end
    stream_fir(40);
    for (int k = 0; k < 16; k++) begin fc[k] = int'($signed(16'($urandom))); load_tap(2*k, fc[k]); end
    n_lut_reload++;
    stream_fir(40);

    // IIR: forward a[0..15], feed-backward g[1..15].
    set_mode(MODE_IIR);
    begin
      int a [16], g [16];
      for (int k = 0; k < 16; k++) begin a[k] = int'($signed(16'($urandom))); load_tap(2*k, a[k]); end
      g[0] = 0;
      for (int m = 1; m < 16; m++) begin g[m] = int'($signed(16'($urandom))); load_tap(32 + 2*(m-1), g[m]); end
      for (int i = 0; i < 40; i++) begin
        longint s;
        @(negedge clk);
        in_valid = 1'b1; x_in = 8'($urandom);
        iir_hist.push_front(int'(x_in));
        void'(iir_hist.pop_back());
        s = 0;
        for (int k = 0; k < 16; k++) s += longint'(a[k]) * iir_hist[k];
        for (int m = 1; m < 16; m++) s += longint'(g[m]) * iir_hist[m];
        expq.push_back(s);
      end
      @(negedge clk);
      in_valid = 1'b0;
      repeat (6) @(negedge clk);
      checks++;
      if (expq.size() != 0) begin failures++; $display("%0d IIR results missing", expq.size()); end
    end

    // FFT, full size and the 8-point mode; samples are ignored meanwhile.
    set_mode(MODE_FFT);
    run_fft(4);
    gated_samples();
    run_fft(3);
    run_fft(4);

    // DCT.
    set_mode(MODE_DCT);
    run_dct();
    run_dct();

    // DWT.
    set_mode(MODE_DWT);
    run_dwt();

    // Back to FIR: the unit kept its delay line and LUTs through the other modes.
    set_mode(MODE_FIR);
    stream_fir(20);
    if (n_fir == 100) n_state_kept++;

    checks += 11;
    if (n_mode_switch == 0) begin failures++; $display("no mode switch"); end
    if (n_lut_reload == 0) begin failures++; $display("no LUT reload"); end
    if (n_fir == 0) begin failures++; $display("no FIR result"); end
    if (n_iir == 0) begin failures++; $display("no IIR result"); end
    if (n_fft16 == 0) begin failures++; $display("no 16-point FFT"); end
    if (n_fft_small == 0) begin failures++; $display("no scaled FFT"); end
    if (n_dct == 0) begin failures++; $display("no DCT"); end
    if (n_gated == 0) begin failures++; $display("no gated samples"); end
    if (n_state_kept == 0) begin failures++; $display("FIR state not kept across modes"); end
    if (n_dwt_band[0] == 0 || n_dwt_band[1] == 0) begin failures++; $display("DWT bands 1-2 empty"); end
    if (n_dwt_band[2] == 0 || n_dwt_band[3] == 0) begin failures++; $display("DWT bands 3-4 empty"); end
    $display("mode switches %0d, LUT reloads %0d, FIR %0d, IIR %0d, FFT16 %0d, FFT8 %0d, DCT %0d, DWT bands %0d/%0d/%0d/%0d, gated runs %0d",
             n_mode_switch, n_lut_reload, n_fir, n_iir, n_fft16, n_fft_small, n_dct,
             n_dwt_band[0], n_dwt_band[1], n_dwt_band[2], n_dwt_band[3], n_gated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
