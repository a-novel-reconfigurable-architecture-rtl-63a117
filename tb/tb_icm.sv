// tb_icm: interconnection matrix. For each control word (none, and each of C1..C5) with
// random unit results, it checks that the strobes reach only the selected unit and that
// the selected unit's results, and nothing else, appear on the result buses.
module tb_icm;
  import fpda_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [4:0] c;
  logic in_valid, start, cfg_we;
  logic fir_in_valid, iir_in_valid, dwt_in_valid, fft_start, dct_start;
  logic fir_cfg_we, iir_cfg_we, dwt_cfg_we;
  logic fir_valid, iir_valid, fft_busy, fft_done, dct_busy, dct_done;
  logic signed [27:0] fir_y;
  logic signed [28:0] iir_y;
  logic [3:0] dwt_valid;
  logic signed [26:0] dwt_y [4];
  cplx_t fft_y [16];
  logic signed [DCT_ACC_W-1:0] dct_y [16];
  logic [3:0] res_valid;
  logic signed [OUT_W-1:0] res_data [4];
  logic blk_busy, blk_done;
  logic signed [OUT_W-1:0] blk_re [16], blk_im [16];

  icm dut (.*);

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("c=%b: %s", c, what); end
  endtask

  initial begin
    for (int t = 0; t < 60; t++) begin
      int m;
      m = t % 6;
      c = (m == 0) ? 5'b0 : 5'(1 << (m - 1));
      {in_valid, start, cfg_we} = 3'b111;
      fir_valid = 1'b1; iir_valid = 1'b1; fft_busy = 1'b1; fft_done = 1'b1;
      dct_busy = 1'b1; dct_done = 1'b1; dwt_valid = 4'($urandom);
      fir_y = 28'($urandom); iir_y = 29'($urandom);
      foreach (dwt_y[i]) dwt_y[i] = 27'($urandom);
      foreach (fft_y[i]) begin fft_y[i].re = 16'($urandom); fft_y[i].im = 16'($urandom); end
      foreach (dct_y[i]) dct_y[i] = 28'($urandom);
      @(negedge clk);
      chk(fir_in_valid == c[0] && fir_cfg_we == c[0], "FIR strobes");
      chk(iir_in_valid == c[1] && iir_cfg_we == c[1], "IIR strobes");
      chk(dct_start == c[2], "DCT start");
      chk(fft_start == c[3], "FFT start");
      chk(dwt_in_valid == c[4] && dwt_cfg_we == c[4], "DWT strobes");
      case (m)
        1: chk(res_valid == 4'b0001 && res_data[0] == OUT_W'(fir_y) && !blk_done, "FIR result");
        2: chk(res_valid == 4'b0001 && res_data[0] == OUT_W'(iir_y) && !blk_done, "IIR result");
        3: begin
          chk(blk_done && blk_busy && res_valid == 0, "DCT strobes out");
          for (int k = 0; k < 16; k++) chk(blk_re[k] == OUT_W'(dct_y[k]) && blk_im[k] == 0, "DCT data");
        end
        4: begin
          chk(blk_done && blk_busy && res_valid == 0, "FFT strobes out");
          for (int k = 0; k < 16; k++)
            chk(blk_re[k] == OUT_W'(fft_y[k].re) && blk_im[k] == OUT_W'(fft_y[k].im), "FFT data");
        end
        5: begin
          chk(res_valid == dwt_valid && !blk_done, "DWT valid");
          for (int l = 0; l < 4; l++) chk(res_data[l] == OUT_W'(dwt_y[l]), "DWT data");
        end
        default: chk(res_valid == 0 && !blk_done && !blk_busy, "no mode: outputs idle");
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
