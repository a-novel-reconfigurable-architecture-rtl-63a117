// fpda_top: a Field Programmable DSP Array configured, one function at a time, as a
// 16-tap FIR filter, an IIR filter, a 16-point DCT, a scalable 16-point FFT or a
// three-level DWT.
//
// The decoder turns the mode code D1..D3 into the one-hot control word C1..C5, which is
// registered here so that a new mode takes effect at a clock edge. The interconnection
// matrix then connects the chip inputs to the selected function unit and that unit's
// results to the chip outputs; the units not selected receive no strobes and keep their
// state. Each function unit is built from the array's common modules: DA LUTs, adders,
// registers, the 1-bit counter, complex multipliers and scaling accumulators.
//
// Sample-stream functions (FIR, IIR, DWT): drive x_in with in_valid, one sample per clock
// at most; results appear on res_valid/res_data (lane 0; the DWT uses lanes 0..3 for bands
// H1, H2, H3 and the final low band). Block functions (FFT, DCT): present blk_x_re/blk_x_im
// with start for one clock (log2n picks the FFT size 2..16); blk_done marks blk_re/blk_im.
// LUT configuration: while a filter mode is selected, cfg_we writes cfg_data into word
// cfg_addr of the LUT that cfg_sel names inside that unit:
//   FIR  cfg_sel = {tap[3:0], hi}                       (32 LUTs)
//   IIR  cfg_sel = {bwd, tap[3:0], hi}                  (32 forward + 30 feed-backward LUTs)
//   DWT  cfg_sel = {level[1:0], low, tap[2:0], hi}      (6 filters of 16 LUTs)
// Latencies: FIR 2 clocks, IIR 3, DWT level 0 3 clocks, FFT log2n + 1, DCT 11, all
// counted from the clock that takes the input, plus one clock after a mode change.
module fpda_top
  import fpda_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [2:0]               d,          // {D3, D2, D1}
  output logic [4:0]               c,          // registered {C5..C1}
  output mode_e                    mode,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] x_in,
  input  logic                     start,
  input  logic [2:0]               log2n,
  input  logic signed [DATA_W-1:0] blk_x_re [16],
  input  logic signed [DATA_W-1:0] blk_x_im [16],
  input  logic                     cfg_we,
  input  logic [6:0]               cfg_sel,
  input  logic [3:0]               cfg_addr,
  input  logic signed [LUT_W-1:0]  cfg_data,
  output logic [3:0]               res_valid,
  output logic signed [OUT_W-1:0]  res_data [4],
  output logic                     blk_busy,
  output logic                     blk_done,
  output logic signed [OUT_W-1:0]  blk_re [16],
  output logic signed [OUT_W-1:0]  blk_im [16]
);
  localparam int FIR_W = LUT_W + 4 + 4;   // 16 taps
  localparam int IIR_W = FIR_W + 1;
  localparam int DWT_W = LUT_W + 4 + 3;   // 8 taps

  logic [4:0] c_dec;
  mode_e      mode_dec;

  decoder u_dec (.d, .c(c_dec), .mode(mode_dec));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c    <= '0;
      mode <= MODE_NONE;
    end else begin
      c    <= c_dec;
      mode <= mode_dec;
    end
  end

  logic fir_in_valid, iir_in_valid, dwt_in_valid, fft_start, dct_start;
  logic fir_cfg_we, iir_cfg_we, dwt_cfg_we;
  logic fir_valid, iir_valid;
  logic signed [FIR_W-1:0] fir_y;
  logic signed [IIR_W-1:0] iir_y;
  logic [2:0]              dwt_h_valid;
  logic signed [DWT_W-1:0] dwt_h [3];
  logic                    dwt_lo_valid;
  logic signed [DWT_W-1:0] dwt_lo;
  logic [3:0]              dwt_valid;
  logic signed [DWT_W-1:0] dwt_y [4];
  logic                    fft_busy, fft_done, dct_busy, dct_done;
  cplx_t                   fft_y [16];
  logic signed [DCT_ACC_W-1:0] dct_y [16];

  pda_fir #(.TAPS(16)) u_fir (
    .clk, .rst_n, .in_valid(fir_in_valid), .x_in, .out_valid(fir_valid), .y_out(fir_y),
    .cfg_we(fir_cfg_we), .cfg_lut(cfg_sel[4:0]), .cfg_addr, .cfg_data
  );

  iir #(.FWD_TAPS(16), .BWD_TAPS(15)) u_iir (
    .clk, .rst_n, .in_valid(iir_in_valid), .x_in, .out_valid(iir_valid), .y_out(iir_y),
    .cfg_we(iir_cfg_we), .cfg_bwd(cfg_sel[5]), .cfg_lut(cfg_sel[4:0]), .cfg_addr, .cfg_data
  );

  dwt #(.LEVELS(3), .TAPS(8)) u_dwt (
    .clk, .rst_n, .in_valid(dwt_in_valid), .x_in,
    .h_valid(dwt_h_valid), .h_out(dwt_h), .lo_valid(dwt_lo_valid), .lo_out(dwt_lo),
    .cfg_we(dwt_cfg_we), .cfg_lvl(cfg_sel[6:5]), .cfg_low(cfg_sel[4]),
    .cfg_lut(cfg_sel[3:0]), .cfg_addr, .cfg_data
  );

  assign dwt_valid = {dwt_lo_valid, dwt_h_valid};
  assign dwt_y[0]  = dwt_h[0];
  assign dwt_y[1]  = dwt_h[1];
  assign dwt_y[2]  = dwt_h[2];
  assign dwt_y[3]  = dwt_lo;

  fft16 u_fft (
    .clk, .rst_n, .start(fft_start), .log2n, .x_re(blk_x_re), .x_im(blk_x_im),
    .busy(fft_busy), .done(fft_done), .y(fft_y)
  );

  dct16 u_dct (
    .clk, .rst_n, .start(dct_start), .x(blk_x_re), .busy(dct_busy), .done(dct_done), .y(dct_y)
  );

  icm #(.FIR_W(FIR_W), .IIR_W(IIR_W), .DWT_W(DWT_W)) u_icm (
    .c, .in_valid, .start, .cfg_we,
    .fir_in_valid, .iir_in_valid, .dwt_in_valid, .fft_start, .dct_start,
    .fir_cfg_we, .iir_cfg_we, .dwt_cfg_we,
    .fir_valid, .fir_y, .iir_valid, .iir_y, .dwt_valid, .dwt_y,
    .fft_busy, .fft_done, .fft_y, .dct_busy, .dct_done, .dct_y,
    .res_valid, .res_data, .blk_busy, .blk_done, .blk_re, .blk_im
  );

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(c));
endmodule
