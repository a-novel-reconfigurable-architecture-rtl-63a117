// dct16: 16-point one-dimensional DCT by bit-serial distributed arithmetic.
//
// It computes Y[k] = sum_{n=0}^{15} x[n] cos((2n+1) k pi / 32), k = 0..15, the cosine sums
// of the paper's DCT, split as the paper splits its matrix: four input combination blocks
// form the even-even, even-odd and odd inputs; LUT0..3 serve Y0, Y4, Y8, Y12, LUT4..7 serve
// Y2, Y6, Y10, Y14, and each odd output Y(2m+1) adds LUT(8+m) (samples 0..3) and LUT(16+m)
// (samples 4..7) before its scaling accumulator. That is 24 LUTs, 8 adders and 16 scaling
// accumulators, as in the paper's DCT figure. The normalisation (2/N) C_k of the DCT
// definition is not applied; Y carries DCT_FRAC fraction bits.
//
// The combined inputs are held in 16 shift registers of DCT_IN_W bits and read one bit-plane
// per clock, most significant (sign) plane first; the bit-serial order is this design's
// choice. Interface: assert start for one clock with x valid; x is sampled then. done pulses
// DCT_IN_W + 1 = 11 clocks later, when y holds the results; y stays until the next start.
module dct16
  import fpda_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic signed [DATA_W-1:0]    x [16],
  output logic                        busy,
  output logic                        done,
  output logic signed [DCT_ACC_W-1:0] y [16]
);
  localparam int BW = DCT_IN_W;

  logic signed [DATA_W+1:0] ee [4], eo [4];
  logic signed [DATA_W:0]   da [4], dc [4];
  // u[0..3] = ee, u[4..7] = eo, u[8..11] = x_n - x_(15-n) for n = 0..3, u[12..15] for n = 4..7
  logic [BW-1:0]            u [16];
  logic [$clog2(BW)-1:0]    bitpos;
  logic                     running;
  logic [3:0]               addr [4];
  logic signed [DCT_LUT_W-1:0] lq [24];
  logic signed [DCT_LUT_W:0]   acc_in [16];

  for (genvar i = 0; i < 4; i++) begin : g_comb
    dct_comb u_cb (.xa(x[i]), .xb(x[15-i]), .xc(x[7-i]), .xd(x[8+i]),
                   .ee(ee[i]), .eo(eo[i]), .da(da[i]), .dc(dc[3-i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      bitpos  <= '0;
      done    <= 1'b0;
      for (int j = 0; j < 16; j++) u[j] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        for (int i = 0; i < 4; i++) begin
          u[i]    <= BW'(ee[i]);
          u[4+i]  <= BW'(eo[i]);
          u[8+i]  <= BW'(da[i]);
          u[12+i] <= BW'(dc[i]);
        end
        bitpos  <= ($clog2(BW))'(BW-1);
        running <= 1'b1;
      end else if (running) begin
        if (bitpos == '0) begin
          running <= 1'b0;
          done    <= 1'b1;
        end else begin
          bitpos <= bitpos - 1'b1;
        end
      end
    end
  end

  // Bit-plane addresses: group g uses u[4g .. 4g+3].
  always_comb begin
    for (int g = 0; g < 4; g++)
      for (int i = 0; i < 4; i++) addr[g][i] = u[4*g+i][bitpos];
  end

  for (genvar m = 0; m < 4; m++) begin : g_even
    dct_lut #(.K(4*m),   .N0(0)) u_ee (.addr(addr[0]), .rdata(lq[m]));
    dct_lut #(.K(4*m+2), .N0(0)) u_eo (.addr(addr[1]), .rdata(lq[4+m]));
  end
  for (genvar m = 0; m < 8; m++) begin : g_odd
    dct_lut #(.K(2*m+1), .N0(0)) u_o1 (.addr(addr[2]), .rdata(lq[8+m]));
    dct_lut #(.K(2*m+1), .N0(4)) u_o2 (.addr(addr[3]), .rdata(lq[16+m]));
  end

  always_comb begin
    for (int m = 0; m < 4; m++) begin
      acc_in[4*m]     = (DCT_LUT_W+1)'(lq[m]);
      acc_in[4*m + 2] = (DCT_LUT_W+1)'(lq[4+m]);
    end
    for (int m = 0; m < 8; m++)
      acc_in[2*m+1] = (DCT_LUT_W+1)'(lq[8+m]) + (DCT_LUT_W+1)'(lq[16+m]);
  end

  for (genvar k = 0; k < 16; k++) begin : g_acc
    scaling_acc u_sa (.clk, .rst_n, .en(running), .first(bitpos == ($clog2(BW))'(BW-1)),
                      .din(acc_in[k]), .acc(y[k]));
  end

  assign busy = running;
endmodule
