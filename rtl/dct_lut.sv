// dct_lut: one constant DA look-up table of the 16-point DCT.
//
// The table serves output Y[K] and the four inputs that stand for samples N0..N0+3 of the
// cosine sum Y[K] = sum_n u_n cos((2n+1) K pi / 32). Word a holds the sum of the
// coefficients cos((2(N0+i)+1) K pi / 32) for which bit i of a is set, in Q1.14. The
// coefficients are computed from the DCT definition, which the paper's matrices of
// constants A..O spell out. Timing: combinational read.
module dct_lut #(
  parameter int K  = 0,
  parameter int N0 = 0,
  parameter int W  = fpda_pkg::DCT_LUT_W
) (
  input  logic [3:0]          addr,
  output logic signed [W-1:0] rdata
);
  function automatic int entry(input int a);
    int s;
    s = 0;
    for (int i = 0; i < 4; i++)
      if (a[i]) s += fpda_pkg::cos32((2*(N0+i)+1)*K);
    return s;
  endfunction

  logic signed [W-1:0] rom [16];
  for (genvar a = 0; a < 16; a++) begin : g_rom
    assign rom[a] = W'(entry(a));
  end

  assign rdata = rom[addr];
endmodule
