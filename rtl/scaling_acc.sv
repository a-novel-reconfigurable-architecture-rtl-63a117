// scaling_acc: scaling accumulator of bit-serial distributed arithmetic.
//
// Inputs arrive one bit-plane per clock, most significant first. Each clock the
// accumulator doubles its value (the scaling) and adds the LUT word for the current
// bit-plane; on the sign-bit plane of two's-complement inputs the word is subtracted.
// After all planes it holds sum_i c_i * u_i exactly. The paper names the block in its DCT
// figure; processing the bits MSB first is this design's choice.
// Interface: en advances one plane; first marks the first (sign) plane, which also clears
// the old sum. Timing: the sum is in acc one clock after the last plane.
module scaling_acc #(
  parameter int DW = fpda_pkg::DCT_LUT_W + 1,
  parameter int AW = fpda_pkg::DCT_ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 first,
  input  logic signed [DW-1:0] din,
  output logic signed [AW-1:0] acc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (en) begin
      if (first)    acc <= -AW'(din);
      else          acc <= (acc <<< 1) + AW'(din);
    end
  end
endmodule
