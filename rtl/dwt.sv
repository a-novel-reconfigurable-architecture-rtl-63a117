// dwt: forward discrete wavelet transform by Mallat's pyramid, LEVELS levels deep.
//
// Each level is a pair of decimators (8-tap parallel-DA FIR and downsample by two), one
// loaded with the high-pass and one with the low-pass filter. The high-pass result of
// level l is output band h[l]; the low-pass result feeds level l+1, and that of the last
// level is output band lo. With LEVELS = 3 this is the three-level tree of the paper's DWT
// figure, giving four bands. All LUTs are loadable, so each filter of the tree can be given
// its own coefficients, as the figure names them separately.
//
// The filters work on DATA_W-bit samples, so the low-pass result passed to the next level
// is brought back to DATA_W bits: shifted right by LVL_SHIFT and saturated. That width
// reduction is this design's choice; the paper does not say how the levels are joined.
// With coefficients in Q1.15, LVL_SHIFT = 16 divides by 2 on top of removing the fraction,
// which keeps the low band of a Daubechies filter (gain sqrt 2) inside 8 bits.
//
// Timing: level 0 takes one sample per clock; level l delivers one result per 2^(l+1)
// input samples. Configuration: cfg_lvl picks the level, cfg_low the low-pass (1) or
// high-pass (0) filter, cfg_lut/cfg_addr/cfg_data as in pda_fir with 8 taps.
module dwt #(
  parameter int LEVELS    = 3,
  parameter int TAPS      = 8,
  parameter int LVL_SHIFT = 16,
  parameter int W         = fpda_pkg::LUT_W,
  localparam int YW  = W + 4 + ((TAPS > 1) ? $clog2(TAPS) : 1),
  localparam int SW  = $clog2(2*TAPS),
  localparam int LSW = (LEVELS > 1) ? $clog2(LEVELS) : 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic signed [fpda_pkg::DATA_W-1:0] x_in,
  output logic        [LEVELS-1:0]           h_valid,
  output logic signed [YW-1:0]               h_out [LEVELS],
  output logic                               lo_valid,
  output logic signed [YW-1:0]               lo_out,
  input  logic                               cfg_we,
  input  logic [LSW-1:0]                     cfg_lvl,
  input  logic                               cfg_low,
  input  logic [SW-1:0]                      cfg_lut,
  input  logic [3:0]                         cfg_addr,
  input  logic signed [W-1:0]                cfg_data
);
  localparam int DW = fpda_pkg::DATA_W;
  localparam logic signed [YW-1:0] MAXV = YW'((1 <<< (DW-1)) - 1);
  localparam logic signed [YW-1:0] MINV = -YW'(1 <<< (DW-1));

  logic                 lv_in  [LEVELS];
  logic signed [DW-1:0] lx_in  [LEVELS];
  logic                 l_val  [LEVELS];
  logic signed [YW-1:0] l_out  [LEVELS];

  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    logic selected;
    assign selected = cfg_we && (cfg_lvl == LSW'(l));

    if (l == 0) begin : g_first
      assign lv_in[l] = in_valid;
      assign lx_in[l] = x_in;
    end else begin : g_next
      logic signed [YW-1:0] shifted;
      assign shifted  = l_out[l-1] >>> LVL_SHIFT;
      assign lv_in[l] = l_val[l-1];
      assign lx_in[l] = (shifted > MAXV) ? MAXV[DW-1:0] :
                        (shifted < MINV) ? MINV[DW-1:0] : shifted[DW-1:0];
    end

    decimator #(.TAPS(TAPS), .W(W)) u_hi (
      .clk, .rst_n, .in_valid(lv_in[l]), .x_in(lx_in[l]),
      .out_valid(h_valid[l]), .y_out(h_out[l]),
      .cfg_we(selected && !cfg_low), .cfg_lut, .cfg_addr, .cfg_data
    );
    decimator #(.TAPS(TAPS), .W(W)) u_lo (
      .clk, .rst_n, .in_valid(lv_in[l]), .x_in(lx_in[l]),
      .out_valid(l_val[l]), .y_out(l_out[l]),
      .cfg_we(selected && cfg_low), .cfg_lut, .cfg_addr, .cfg_data
    );
  end

  assign lo_valid = l_val[LEVELS-1];
  assign lo_out   = l_out[LEVELS-1];
endmodule
