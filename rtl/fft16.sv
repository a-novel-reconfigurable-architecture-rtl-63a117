// fft16: scalable 16-point FFT that reuses one column of 8 butterfly units for every stage.
//
// Sixteen complex registers REG0..REG15 feed eight butterfly units; unit i takes REG i and
// REG i+8 and drives outputs B i (a + wb) and B i+8 (a - wb). Each register is loaded
// through a 4:1 multiplexer whose select, the stage number s = {s1, s0}, picks the input
// sample X r (s = 0) or the butterfly output that the next stage needs in that register
// (s = 1, 2, 3). The table below is copied from the paper's FFT figure. Fourteen of those
// multiplexer inputs pass through a 2:1 multiplexer controlled by s2 that can substitute a
// sample X for the butterfly output; loading the samples at stage 1, 2 or 3 with s2 = 1
// starts an 8-, 4- or 2-point transform on X0..X(N-1). This is how the design is scalable.
//
// The paper gives the datapath and the multiplexer wiring. The sequencer below, the twiddle
// exponents (derived from that wiring, see twiddle_rom), the output register, and the
// reordering of the bit-reversed results into natural order are this design's own.
//
// Interface: assert start for one clock with x_re/x_im valid and log2n = 1..4 (N = 2..16).
// The samples are taken on that clock; done pulses when y holds X[0..N-1] in natural order
// (unused entries are zero). Latency: log2n + 1 clocks from start to done. Results are
// unscaled, sum x[n] exp(-j 2 pi k n / N); FFT_W = 16 bits hold them for 8-bit inputs.
module fft16
  import fpda_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [2:0]               log2n,
  input  logic signed [DATA_W-1:0] x_re [16],
  input  logic signed [DATA_W-1:0] x_im [16],
  output logic                     busy,
  output logic                     done,
  output cplx_t                    y [16]
);
  // Butterfly output feeding REG r when loading for stage s = 1..3 (index s-1).
  localparam int BSRC [16][3] = '{
    '{0, 0, 0},   '{1, 1, 8},   '{2, 4, 2},   '{3, 5, 10},
    '{8, 8, 4},   '{9, 9, 12},  '{10, 12, 6}, '{11, 13, 14},
    '{4, 2, 1},   '{5, 3, 9},   '{6, 6, 3},   '{7, 7, 11},
    '{12, 10, 5}, '{13, 11, 13}, '{14, 14, 7}, '{15, 15, 15}
  };
  // Sample that the s2 multiplexer substitutes, -1 where the figure has no 2:1 multiplexer.
  localparam int XSRC [16][3] = '{
    '{0, 0, 0},   '{1, 1, -1},  '{2, -1, -1}, '{3, -1, -1},
    '{-1, -1, -1}, '{-1, -1, -1}, '{-1, -1, -1}, '{-1, -1, -1},
    '{4, 2, 1},   '{5, 3, -1},  '{6, -1, -1}, '{7, -1, -1},
    '{-1, -1, -1}, '{-1, -1, -1}, '{-1, -1, -1}, '{-1, -1, -1}
  };
  // Data position held by butterfly output B j after the last stage (from the stage-4 pairs).
  localparam int BPOS [16] = '{0, 2, 8, 10, 4, 6, 12, 14, 1, 3, 9, 11, 5, 7, 13, 15};

  cplx_t      regs [16];
  cplx_t      xin  [16];
  cplx_t      bout [16];
  cplx_t      nxt  [16];
  twiddle_t   w    [8];
  logic [1:0] cur;        // stage whose input the registers hold
  logic [1:0] sel;        // s1 s0
  logic       s2;
  logic       load;
  logic [2:0] n_log;

  typedef enum logic {IDLE, RUN} state_e;
  state_e state;

  for (genvar r = 0; r < 16; r++) begin : g_x
    assign xin[r].re = FFT_W'(x_re[r]);
    assign xin[r].im = FFT_W'(x_im[r]);
  end

  twiddle_rom u_tw (.st(cur), .w(w));

  for (genvar i = 0; i < 8; i++) begin : g_bf
    butterfly u_bf (.a(regs[i]), .b(regs[i+8]), .w(w[i]), .top(bout[i]), .bot(bout[i+8]));
  end

  // Stage multiplexers (4:1 on s1 s0, 2:1 on s2).
  always_comb begin
    for (int r = 0; r < 16; r++) begin
      if (sel == 2'd0)                               nxt[r] = xin[r];
      else if (s2 && XSRC[r][int'(sel)-1] >= 0)      nxt[r] = xin[XSRC[r][int'(sel)-1]];
      else                                           nxt[r] = bout[BSRC[r][int'(sel)-1]];
    end
  end

  // Sequencer: select lines for this clock.
  always_comb begin
    load = 1'b0;
    sel  = 2'd0;
    s2   = 1'b0;
    if (state == IDLE && start) begin
      load = 1'b1;
      sel  = 2'(3'd4 - log2n);
      s2   = (log2n != 3'd4);
    end else if (state == RUN && cur != 2'd3) begin
      load = 1'b1;
      sel  = cur + 2'd1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      cur   <= '0;
      n_log <= 3'd4;
      done  <= 1'b0;
      for (int r = 0; r < 16; r++) begin
        regs[r] <= '0;
        y[r]    <= '0;
      end
    end else begin
      done <= 1'b0;
      if (load) begin
        for (int r = 0; r < 16; r++) regs[r] <= nxt[r];
        cur <= sel;
      end
      case (state)
        IDLE: if (start) begin
          state <= RUN;
          n_log <= log2n;
        end
        RUN: if (cur == 2'd3) begin
          // The last stage's outputs are in bit-reversed position order.
          for (int j = 0; j < 16; j++) begin
            for (int k = 0; k < 16; k++) begin
              if (k < (1 << n_log) && bitrev(4'(k), n_log) == 4'(BPOS[j])) y[k] <= bout[j];
            end
          end
          for (int k = 0; k < 16; k++) if (k >= (1 << n_log)) y[k] <= '0;
          done  <= 1'b1;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  assign busy = (state == RUN);

  function automatic logic [3:0] bitrev(input logic [3:0] v, input logic [2:0] bits);
    logic [3:0] r;
    r = '0;
    for (int b = 0; b < 4; b++) if (b < int'(bits)) r[int'(bits)-1-b] = v[b];
    return r;
  endfunction

  a_log2n: assert property (@(posedge clk) disable iff (!rst_n)
                            (start && state == IDLE) |-> (log2n >= 3'd1 && log2n <= 3'd4));
endmodule
