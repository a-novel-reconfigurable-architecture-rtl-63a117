// pda_coef_unit: the "FIR unit for a coefficient" of the parallel-DA FIR.
//
// An 8-bit sample x is split into two nibbles. Bits x[3:0] address the low LUT and bits
// x[7:4] the high LUT, both at once (parallel DA); one adder combines them as
// y = (high << 4) + low, which is x*c when the low LUT holds n*c and the high LUT holds
// signed(n)*c for each nibble value n. Two LUTs and one adder per coefficient follow the
// paper's figure; the shift by 4 that weights the high nibble, and storing the sign in the
// high LUT so that two's-complement samples work, are this design's choices.
//
// Configuration: cfg_we writes cfg_data into word cfg_addr of LUT cfg_hi (0 = low nibble,
// 1 = high nibble). Timing: combinational from x to y.
module pda_coef_unit #(
  parameter int W = fpda_pkg::LUT_W
) (
  input  logic                          clk,
  input  logic signed [fpda_pkg::DATA_W-1:0] x,
  output logic signed [W+3:0]           y,
  input  logic                          cfg_we,
  input  logic                          cfg_hi,
  input  logic [3:0]                    cfg_addr,
  input  logic signed [W-1:0]           cfg_data
);
  logic signed [W-1:0] lo_q, hi_q;

  da_lut #(.W(W)) u_lo (
    .clk, .we(cfg_we && !cfg_hi), .waddr(cfg_addr), .wdata(cfg_data),
    .raddr(x[3:0]), .rdata(lo_q)
  );
  da_lut #(.W(W)) u_hi (
    .clk, .we(cfg_we && cfg_hi), .waddr(cfg_addr), .wdata(cfg_data),
    .raddr(x[7:4]), .rdata(hi_q)
  );

  assign y = ((W+4)'(hi_q) <<< 4) + (W+4)'(lo_q);
endmodule
