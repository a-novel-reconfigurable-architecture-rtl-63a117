// decoder: configuration decoder of the FPDA.
//
// The three mode inputs D1..D3 select one DSP function; the decoder raises exactly one of
// the control lines C1..C5 (FIR, IIR, DCT, FFT, DWT), as in the paper's control-signal
// table, so that only one configuration is active at a time. The paper does not give the
// input code; here D = {D3, D2, D1} = 1..5 selects the functions in the table's order and
// every other code selects none (all C low). Timing: combinational.
module decoder
  import fpda_pkg::*;
(
  input  logic [2:0] d,       // {D3, D2, D1}
  output logic [4:0] c,       // {C5, C4, C3, C2, C1}
  output mode_e      mode
);
  always_comb begin
    case (d)
      3'd1:    mode = MODE_FIR;
      3'd2:    mode = MODE_IIR;
      3'd3:    mode = MODE_DCT;
      3'd4:    mode = MODE_FFT;
      3'd5:    mode = MODE_DWT;
      default: mode = MODE_NONE;
    endcase
    c = (mode == MODE_NONE) ? 5'b0 : 5'(1 << (int'(mode) - 1));
  end
endmodule
