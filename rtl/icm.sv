// icm: the interconnection matrix between the FPDA's inputs, its function units
// and its outputs.
//
// The control word C1..C5 (one-hot) decides which function unit is connected. The sample
// strobe, the block start and the LUT configuration strobe reach only the selected unit,
// so the others hold still, and the selected unit's results are switched onto the two
// common result buses: four result lanes for sample-stream functions (FIR and IIR use lane
// 0; the DWT uses lanes 0..3 for its bands H1, H2, H3 and the final low band, which can be
// ready on the same clock) and sixteen complex words for block transforms (FFT; the DCT
// uses the real parts). The paper names the matrix and says it connects the common modules
// for one configuration at a time; it gives no switch-level detail. This design realises it
// at the level of whole function units (this design's choice). Timing: combinational.
module icm
  import fpda_pkg::*;
#(
  parameter int FIR_W = 28,
  parameter int IIR_W = 29,
  parameter int DWT_W = 27,
  parameter int DCT_W = DCT_ACC_W
) (
  input  logic [4:0]                c,        // {C5 DWT, C4 FFT, C3 DCT, C2 IIR, C1 FIR}
  // from the chip inputs
  input  logic                      in_valid,
  input  logic                      start,
  input  logic                      cfg_we,
  // to the function units
  output logic                      fir_in_valid,
  output logic                      iir_in_valid,
  output logic                      dwt_in_valid,
  output logic                      fft_start,
  output logic                      dct_start,
  output logic                      fir_cfg_we,
  output logic                      iir_cfg_we,
  output logic                      dwt_cfg_we,
  // from the function units
  input  logic                      fir_valid,
  input  logic signed [FIR_W-1:0]   fir_y,
  input  logic                      iir_valid,
  input  logic signed [IIR_W-1:0]   iir_y,
  input  logic [3:0]                dwt_valid,
  input  logic signed [DWT_W-1:0]   dwt_y [4],
  input  logic                      fft_busy,
  input  logic                      fft_done,
  input  cplx_t                     fft_y [16],
  input  logic                      dct_busy,
  input  logic                      dct_done,
  input  logic signed [DCT_W-1:0]   dct_y [16],
  // to the chip outputs
  output logic [3:0]                res_valid,
  output logic signed [OUT_W-1:0]   res_data [4],
  output logic                      blk_busy,
  output logic                      blk_done,
  output logic signed [OUT_W-1:0]   blk_re [16],
  output logic signed [OUT_W-1:0]   blk_im [16]
);
  always_comb begin
    fir_in_valid = c[0] && in_valid;
    iir_in_valid = c[1] && in_valid;
    dwt_in_valid = c[4] && in_valid;
    dct_start    = c[2] && start;
    fft_start    = c[3] && start;
    fir_cfg_we   = c[0] && cfg_we;
    iir_cfg_we   = c[1] && cfg_we;
    dwt_cfg_we   = c[4] && cfg_we;

    res_valid = '0;
    for (int l = 0; l < 4; l++) res_data[l] = '0;
    blk_busy = 1'b0;
    blk_done = 1'b0;
    for (int k = 0; k < 16; k++) begin
      blk_re[k] = '0;
      blk_im[k] = '0;
    end

    case (1'b1)
      c[0]: begin
        res_valid[0] = fir_valid;
        res_data[0]  = OUT_W'(fir_y);
      end
      c[1]: begin
        res_valid[0] = iir_valid;
        res_data[0]  = OUT_W'(iir_y);
      end
      c[2]: begin
        blk_busy = dct_busy;
        blk_done = dct_done;
        for (int k = 0; k < 16; k++) blk_re[k] = OUT_W'(dct_y[k]);
      end
      c[3]: begin
        blk_busy = fft_busy;
        blk_done = fft_done;
        for (int k = 0; k < 16; k++) begin
          blk_re[k] = OUT_W'(fft_y[k].re);
          blk_im[k] = OUT_W'(fft_y[k].im);
        end
      end
      c[4]: begin
        res_valid = dwt_valid;
        for (int l = 0; l < 4; l++) res_data[l] = OUT_W'(dwt_y[l]);
      end
      default: ;
    endcase
  end
endmodule
