// decimator: one DWT analysis branch, a parallel-DA FIR followed by downsampling by two.
//
// As in the paper's decimator figure, the filter output goes to a parallel-load register
// whose loading is gated by a 1-bit counter, so one filtered sample in two is kept: the
// input enters at one sample per clock and results leave at one per two clocks. The paper
// clocks the counter with the system clock; here it toggles on each filter result, which is
// the same thing at one sample per clock and stays correct when the decimator is fed at a
// lower rate by the previous level of a wavelet pyramid (this design's choice). The results
// kept are those of samples 0, 2, 4, ... after reset.
//
// The filter is the FIR of the paper with TAPS = 8, for the 8-tap Daubechies filters.
// Timing: y_out/out_valid three clocks after every second accepted sample.
// Configuration: as pda_fir.
module decimator #(
  parameter int TAPS = 8,
  parameter int W    = fpda_pkg::LUT_W,
  localparam int YW  = W + 4 + ((TAPS > 1) ? $clog2(TAPS) : 1),
  localparam int SW  = $clog2(2*TAPS)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic signed [fpda_pkg::DATA_W-1:0] x_in,
  output logic                               out_valid,
  output logic signed [YW-1:0]               y_out,
  input  logic                               cfg_we,
  input  logic [SW-1:0]                      cfg_lut,
  input  logic [3:0]                         cfg_addr,
  input  logic signed [W-1:0]                cfg_data
);
  logic                 fv;
  logic signed [YW-1:0] fy;
  logic                 phase;   // the 1-bit counter

  pda_fir #(.TAPS(TAPS), .W(W)) u_fir (
    .clk, .rst_n, .in_valid, .x_in, .out_valid(fv), .y_out(fy),
    .cfg_we, .cfg_lut, .cfg_addr, .cfg_data
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= 1'b0;
      y_out     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= fv && !phase;
      if (fv) begin
        phase <= ~phase;
        if (!phase) y_out <= fy;     // parallel-load register
      end
    end
  end
endmodule
