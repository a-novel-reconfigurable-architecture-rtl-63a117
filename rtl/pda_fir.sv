// pda_fir: parallel distributed-arithmetic FIR filter, y[n] = sum_k c[k] x[n-k].
//
// A delay line of TAPS sample registers feeds TAPS coefficient units (two 2^4-word LUTs and
// one adder each), whose products a balanced tree of TAPS-1 adders sums. With TAPS = 16 this
// is the paper's 16-tap filter: 32 LUTs, 31 adders, 16 registers. Tap k multiplies x[n-k].
//
// Interface: a sample x_in is taken when in_valid is high. y_out/out_valid follow two
// clocks later (delay-line register, then the output register), one result per input
// sample, so the filter accepts one sample per clock. The output register is this design's
// choice, made so that no path runs combinationally from an input to an output, as the
// paper reports for its implementation.
// Configuration: LUT number cfg_lut = 2*k + h addresses tap k's low (h = 0) or high (h = 1)
// nibble LUT; cfg_we writes cfg_data into its word cfg_addr.
module pda_fir #(
  parameter int TAPS = 16,
  parameter int W    = fpda_pkg::LUT_W,
  localparam int LV  = (TAPS > 1) ? $clog2(TAPS) : 1,
  localparam int YW  = W + 4 + LV,
  localparam int SW  = $clog2(2*TAPS)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic signed [fpda_pkg::DATA_W-1:0] x_in,
  output logic                              out_valid,
  output logic signed [YW-1:0]              y_out,
  input  logic                              cfg_we,
  input  logic [SW-1:0]                     cfg_lut,
  input  logic [3:0]                        cfg_addr,
  input  logic signed [W-1:0]               cfg_data
);
  localparam int NP = 1 << LV;

  logic signed [fpda_pkg::DATA_W-1:0] dly [TAPS];
  logic signed [W+3:0]                prod [TAPS];
  logic signed [YW-1:0]               lvl [LV+1][NP];
  logic                               v1;

  // Delay line: dly[k] holds x[n-k].
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) dly[k] <= '0;
      v1 <= 1'b0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        dly[0] <= x_in;
        for (int k = 1; k < TAPS; k++) dly[k] <= dly[k-1];
      end
    end
  end

  for (genvar k = 0; k < TAPS; k++) begin : g_tap
    pda_coef_unit #(.W(W)) u_cu (
      .clk, .x(dly[k]), .y(prod[k]),
      .cfg_we(cfg_we && (cfg_lut[SW-1:1] == (SW-1)'(k))),
      .cfg_hi(cfg_lut[0]), .cfg_addr, .cfg_data
    );
  end

  // Balanced adder tree.
  always_comb begin
    for (int i = 0; i < NP; i++) lvl[0][i] = (i < TAPS) ? YW'(prod[i]) : '0;
    for (int l = 1; l <= LV; l++)
      for (int i = 0; i < NP; i++)
        lvl[l][i] = (i < (NP >> l)) ? lvl[l-1][2*i] + lvl[l-1][2*i+1] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_out     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= v1;
      if (v1) y_out <= lvl[LV][0];
    end
  end
endmodule
