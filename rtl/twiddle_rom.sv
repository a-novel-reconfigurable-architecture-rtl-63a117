// twiddle_rom: the FFT twiddle table, one read port per butterfly unit.
//
// For stage st (0..3) of the 16-point FFT it gives butterfly unit bf its twiddle W16^k
// as the three constants cos t, cos t - sin t and cos t + sin t (t = -2 pi k / 16) that
// the three-multiplier complex multiplier uses; the paper calls this the one additional
// table. The exponents per stage and unit (stage 1: all 0; stage 2: 0 0 0 0 4 4 4 4;
// stage 3: 0 0 2 2 4 4 6 6; stage 4: 0 4 1 5 2 6 3 7) follow from the register routing of
// the paper's FFT figure for a natural-order input; they are derived, not printed there.
// Timing: combinational.
module twiddle_rom
  import fpda_pkg::*;
(
  input  logic [1:0] st,
  output twiddle_t   w [8]
);
  always_comb begin
    for (int bf = 0; bf < 8; bf++) w[bf] = twiddle(twiddle_exp(st, 3'(bf)));
  end
endmodule
