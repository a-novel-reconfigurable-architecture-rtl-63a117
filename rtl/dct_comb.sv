// dct_comb: input combination block of the 16-point DCT.
//
// Block i (i = 0..3) takes the four samples x_i, x_(15-i), x_(7-i), x_(8+i) and forms
//   ee = (x_i + x_(15-i)) + (x_(7-i) + x_(8+i))   input i of the Y0/Y4/Y8/Y12 matrix
//   eo = (x_i + x_(15-i)) - (x_(7-i) + x_(8+i))   input i of the Y2/Y6/Y10/Y14 matrix
//   da = x_i - x_(15-i)                            input i of the first odd matrix
//   dc = x_(7-i) - x_(8+i)                         input 3-i of the second odd matrix
// These are the even/odd decompositions printed with the paper's DCT matrices and the
// signals leaving the first block in its DCT figure. Timing: combinational.
module dct_comb
  import fpda_pkg::*;
(
  input  logic signed [DATA_W-1:0] xa,   // x_i
  input  logic signed [DATA_W-1:0] xb,   // x_(15-i)
  input  logic signed [DATA_W-1:0] xc,   // x_(7-i)
  input  logic signed [DATA_W-1:0] xd,   // x_(8+i)
  output logic signed [DATA_W+1:0] ee,
  output logic signed [DATA_W+1:0] eo,
  output logic signed [DATA_W:0]   da,
  output logic signed [DATA_W:0]   dc
);
  logic signed [DATA_W:0] s_ab, s_cd;

  always_comb begin
    s_ab = (DATA_W+1)'(xa) + (DATA_W+1)'(xb);
    s_cd = (DATA_W+1)'(xc) + (DATA_W+1)'(xd);
    ee   = (DATA_W+2)'(s_ab) + (DATA_W+2)'(s_cd);
    eo   = (DATA_W+2)'(s_ab) - (DATA_W+2)'(s_cd);
    da   = (DATA_W+1)'(xa) - (DATA_W+1)'(xb);
    dc   = (DATA_W+1)'(xc) - (DATA_W+1)'(xd);
  end
endmodule
