// tb_pda_fir: 16-tap parallel-DA FIR. Loads random 16-bit coefficients into the 32 LUTs,
// streams random 8-bit samples (mostly one per clock, with some idle clocks) and compares
// every result with the convolution sum computed here. It also checks the latency: each
// result must appear exactly two clocks after its sample.
module tb_pda_fir;
  localparam int TAPS = 16;
  localparam int W = fpda_pkg::LUT_W;
  localparam int YW = W + 4 + $clog2(TAPS);
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic signed [7:0] x_in = '0;
  logic signed [YW-1:0] y_out;
  logic cfg_we = 1'b0;
  logic [4:0] cfg_lut = '0;
  logic [3:0] cfg_addr = '0;
  logic signed [W-1:0] cfg_data = '0;

  pda_fir dut (.clk, .rst_n, .in_valid, .x_in, .out_valid, .y_out,
               .cfg_we, .cfg_lut, .cfg_addr, .cfg_data);

  int coef [TAPS];
  int hist [$];
  longint expq [$];
  int     tq [$];
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (expq.size() == 0) begin
      failures++; $display("unexpected output");
    end else begin
      longint e; int t;
      e = expq.pop_front(); t = tq.pop_front();
      if (longint'(y_out) != e) begin
        failures++; $display("y=%0d expected %0d", y_out, e);
      end
      if (cyc - t != 2) begin
        failures++; $display("latency %0d", cyc - t);
      end
    end
  end

  initial begin
    for (int k = 0; k < TAPS; k++) coef[k] = int'($signed(16'($urandom)));
    coef[0] = -32768;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < TAPS; k++)
      for (int h = 0; h < 2; h++)
        for (int n = 0; n < 16; n++) begin
          @(negedge clk);
          cfg_we = 1'b1; cfg_lut = 5'(2*k + h); cfg_addr = 4'(n);
          cfg_data = W'((h == 1 && n >= 8) ? (n - 16) * coef[k] : n * coef[k]);
        end
    @(negedge clk);
    cfg_we = 1'b0;
    for (int i = 0; i < TAPS; i++) hist.push_front(0);
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      if (($urandom % 8) == 0) begin
        in_valid = 1'b0;
      end else begin
        longint s;
        in_valid = 1'b1;
        x_in = (i < 20) ? -8'sd128 : 8'($urandom);
        hist.push_front(int'(x_in));
        void'(hist.pop_back());
        s = 0;
        for (int k = 0; k < TAPS; k++) s += longint'(coef[k]) * hist[k];
        expq.push_back(s);
        tq.push_back(cyc);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (5) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin
      failures++; $display("%0d results missing", expq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
