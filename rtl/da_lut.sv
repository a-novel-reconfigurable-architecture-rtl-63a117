// da_lut: one 2^4-word distributed-arithmetic look-up table, the LUT common module of the FPDA.
//
// Four input bits form the read address; the word read out is whatever partial sum the
// configuration stored there (for the FIR: coefficient times a 4-bit nibble of a sample).
// The paper says only that the LUTs have 2^4 locations and that their contents are
// functions of the coefficients. Making them writable, one word per clock through a
// configuration port, is this design's choice; it is what lets one array of LUTs serve
// different filters. Contents are not reset: they are configuration, loaded before use.
//
// Timing: writes take effect at the clock edge; the read is combinational.
module da_lut #(
  parameter int W = fpda_pkg::LUT_W
) (
  input  logic                clk,
  input  logic                we,
  input  logic [3:0]          waddr,
  input  logic signed [W-1:0] wdata,
  input  logic [3:0]          raddr,
  output logic signed [W-1:0] rdata
);
  logic signed [W-1:0] mem [16];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
