// iir: the parallel-DA IIR filter of the FPDA, built from two parallel-DA FIR filters.
//
// Following the paper, the recursion y[n] = sum a[l]x[n-l] + sum b[m]y[n-m] is unrolled so
// that the past outputs are replaced by past inputs (the paper's 3-tap example rewrites
// b2*y1 + b1*y0 as x0*(b2 b1 a0) + x1*(b2 a0)). The filter is then a forward FIR of
// FWD_TAPS taps on x[n]..x[n-FWD_TAPS+1] plus a "feed-backward" FIR of BWD_TAPS taps on the
// same input stream, taps x[n-1]..x[n-BWD_TAPS], with its own LUT contents, and one adder.
// With the defaults (16 and 15 taps) this is 62 LUTs, 61 adders in the filters plus the
// final adder, and 16 + 15 delay registers, the paper's counts. Which coefficients the
// feed-backward LUTs hold (the unrolled products) is for the configuration to compute.
//
// One register x_prev, written with each accepted sample, gives the feed-backward filter
// x[n-1] while the forward filter takes x[n], so both delay lines shift together.
// Timing: y_out/out_valid follow the accepted sample by three clocks.
// Configuration: cfg_bwd selects the filter; cfg_lut, cfg_addr, cfg_data as in pda_fir.
module iir #(
  parameter int FWD_TAPS = 16,
  parameter int BWD_TAPS = 15,
  parameter int W        = fpda_pkg::LUT_W,
  localparam int FYW = W + 4 + ((FWD_TAPS > 1) ? $clog2(FWD_TAPS) : 1),
  localparam int BYW = W + 4 + ((BWD_TAPS > 1) ? $clog2(BWD_TAPS) : 1),
  localparam int YW  = ((FYW > BYW) ? FYW : BYW) + 1,
  localparam int SW  = $clog2(2*FWD_TAPS)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic signed [fpda_pkg::DATA_W-1:0] x_in,
  output logic                               out_valid,
  output logic signed [YW-1:0]               y_out,
  input  logic                               cfg_we,
  input  logic                               cfg_bwd,
  input  logic [SW-1:0]                      cfg_lut,
  input  logic [3:0]                         cfg_addr,
  input  logic signed [W-1:0]                cfg_data
);
  localparam int BSW = $clog2(2*BWD_TAPS);

  logic signed [fpda_pkg::DATA_W-1:0] x_prev;
  logic signed [FYW-1:0] yf;
  logic signed [BYW-1:0] yb;
  logic vf, vb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        x_prev <= '0;
    else if (in_valid) x_prev <= x_in;
  end

  pda_fir #(.TAPS(FWD_TAPS), .W(W)) u_fwd (
    .clk, .rst_n, .in_valid, .x_in, .out_valid(vf), .y_out(yf),
    .cfg_we(cfg_we && !cfg_bwd), .cfg_lut, .cfg_addr, .cfg_data
  );

  pda_fir #(.TAPS(BWD_TAPS), .W(W)) u_bwd (
    .clk, .rst_n, .in_valid, .x_in(x_prev), .out_valid(vb), .y_out(yb),
    .cfg_we(cfg_we && cfg_bwd), .cfg_lut(cfg_lut[BSW-1:0]), .cfg_addr, .cfg_data
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_out     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= vf;
      if (vf) y_out <= YW'(yf) + YW'(yb);
    end
  end

  // Both filters see the same sample strobe, so their results arrive together.
  a_aligned: assert property (@(posedge clk) disable iff (!rst_n) vf == vb);
endmodule
