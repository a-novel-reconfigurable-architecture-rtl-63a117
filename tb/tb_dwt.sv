// tb_dwt: three-level wavelet pyramid with the 8-tap Daubechies filters of the paper's
// coefficient table (H0 high-pass, L0 low-pass, quantised to Q1.15) in every level.
// It streams 256 samples, one per clock, and compares each band, in order, with a model
// computed here: filter, keep samples 0, 2, 4, ..., and pass the low band to the next
// level shifted right by 16 and saturated to 8 bits. It checks the band sizes
// (128, 64, 32 and 32 results) as well as every value.
module tb_dwt;
  localparam int W = fpda_pkg::LUT_W;
  localparam int YW = W + 4 + 3;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 1'b0, in_valid = 1'b0;
  logic signed [7:0] x_in = '0;
  logic [2:0] h_valid;
  logic signed [YW-1:0] h_out [3];
  logic lo_valid;
  logic signed [YW-1:0] lo_out;
  logic cfg_we = 1'b0, cfg_low = 1'b0;
  logic [1:0] cfg_lvl = '0;
  logic [3:0] cfg_lut = '0, cfg_addr = '0;
  logic signed [W-1:0] cfg_data = '0;

  dwt dut (.clk, .rst_n, .in_valid, .x_in, .h_valid, .h_out, .lo_valid, .lo_out,
           .cfg_we, .cfg_lvl, .cfg_low, .cfg_lut, .cfg_addr, .cfg_data);

  real hr [8] = '{-0.0106, -0.0329, 0.0308, 0.1870, -0.0280, -0.6309, 0.7148, -0.2304};
  real lr [8] = '{0.2304, 0.7148, 0.6309, -0.0280, -0.1870, 0.0308, 0.0329, -0.0106};
  int hc [8], lc [8];
  longint band_exp [4][$];
  longint band_got [4][$];
  int x [256];

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    for (int l = 0; l < 3; l++) if (h_valid[l]) band_got[l].push_back(longint'(h_out[l]));
    if (lo_valid) band_got[3].push_back(longint'(lo_out));
  end

  function automatic void model();
    int s [$];
    int nxt [$];
    foreach (x[i]) s.push_back(x[i]);
    for (int l = 0; l < 3; l++) begin
      nxt.delete();
      for (int n = 0; n < s.size(); n += 2) begin
        longint hh, ll, sh;
        hh = 0; ll = 0;
        for (int k = 0; k < 8; k++) if (n - k >= 0) begin
          hh += longint'(hc[k]) * s[n-k];
          ll += longint'(lc[k]) * s[n-k];
        end
        band_exp[l].push_back(hh);
        if (l == 2) band_exp[3].push_back(ll);
        sh = ll >>> 16;
        nxt.push_back(sh > 127 ? 127 : sh < -128 ? -128 : int'(sh));
      end
      s = nxt;
    end
  endfunction

  initial begin
    foreach (hr[k]) begin
      hc[k] = $rtoi(hr[k] * 32768.0 + (hr[k] < 0 ? -0.5 : 0.5));
      lc[k] = $rtoi(lr[k] * 32768.0 + (lr[k] < 0 ? -0.5 : 0.5));
    end
    foreach (x[i]) x[i] = (i < 64) ? ((i % 16) < 8 ? 127 : -128) : int'($signed(8'($urandom)));
    model();
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < 3; l++)
      for (int f = 0; f < 2; f++)
        for (int k = 0; k < 8; k++)
          for (int h = 0; h < 2; h++)
            for (int n = 0; n < 16; n++) begin
              int c;
              c = (f != 0) ? lc[k] : hc[k];
              @(negedge clk);
              cfg_we = 1'b1; cfg_lvl = 2'(l); cfg_low = f[0]; cfg_lut = 4'(2*k + h);
              cfg_addr = 4'(n);
              cfg_data = W'((h == 1 && n >= 8) ? (n - 16) * c : n * c);
            end
    @(negedge clk);
    cfg_we = 1'b0;
    foreach (x[i]) begin
      @(negedge clk);
      in_valid = 1'b1;
      x_in = 8'(x[i]);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (20) @(negedge clk);
    for (int b = 0; b < 4; b++) begin
      checks++;
      if (band_got[b].size() != band_exp[b].size()) begin
        failures++;
        $display("band %0d: %0d results, expected %0d", b, band_got[b].size(), band_exp[b].size());
      end
      for (int i = 0; i < band_exp[b].size() && i < band_got[b].size(); i++) begin
        checks++;
        if (band_got[b][i] != band_exp[b][i]) begin
          failures++;
          if (failures < 10) $display("band %0d #%0d: %0d expected %0d", b, i, band_got[b][i], band_exp[b][i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
