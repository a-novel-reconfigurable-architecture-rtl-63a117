// tb_iir: IIR as forward FIR plus feed-backward FIR. Loads random coefficients a[0..15]
// (forward, on x[n]..x[n-15]) and g[1..15] (feed-backward, on x[n-1]..x[n-15]), streams
// random samples with idle clocks and checks y[n] = sum a[k]x[n-k] + sum g[m]x[n-m]
// computed here, and that each result follows its sample by exactly three clocks.
// A second pass loads the unrolled coefficients of the paper's 3-tap example
// (y2 = a0x2 + a1x1 + a2x0 + x0*b2*b1*a0 + x1*b2*a0) and checks that sum.
module tb_iir;
  localparam int W = fpda_pkg::LUT_W;
  localparam int YW = W + 4 + 4 + 1;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic signed [7:0] x_in = '0;
  logic signed [YW-1:0] y_out;
  logic cfg_we = 1'b0, cfg_bwd = 1'b0;
  logic [4:0] cfg_lut = '0;
  logic [3:0] cfg_addr = '0;
  logic signed [W-1:0] cfg_data = '0;

  iir dut (.clk, .rst_n, .in_valid, .x_in, .out_valid, .y_out,
           .cfg_we, .cfg_bwd, .cfg_lut, .cfg_addr, .cfg_data);

  int a [16];
  int g [16];     // g[0] unused
  int hist [$];
  longint expq [$];
  int tq [$];
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
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
      if (longint'(y_out) != e) begin failures++; $display("y=%0d expected %0d", y_out, e); end
      if (cyc - t != 3) begin failures++; $display("latency %0d", cyc - t); end
    end
  end

  task automatic load_tap(input bit bwd, input int k, input int c);
    for (int h = 0; h < 2; h++)
      for (int n = 0; n < 16; n++) begin
        @(negedge clk);
        cfg_we = 1'b1; cfg_bwd = bwd; cfg_lut = 5'(2*k + h); cfg_addr = 4'(n);
        cfg_data = W'((h == 1 && n >= 8) ? (n - 16) * c : n * c);
      end
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic run(input int nsamp);
    for (int i = 0; i < nsamp; i++) begin
      @(negedge clk);
      if (($urandom % 6) == 0) in_valid = 1'b0;
      else begin
        longint s;
        in_valid = 1'b1;
        x_in = 8'($urandom);
        hist.push_front(int'(x_in));
        void'(hist.pop_back());
        s = 0;
        for (int k = 0; k < 16; k++) s += longint'(a[k]) * hist[k];
        for (int m = 1; m < 16; m++) s += longint'(g[m]) * hist[m];
        expq.push_back(s);
        tq.push_back(cyc);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (6) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 16; i++) hist.push_front(0);
    for (int k = 0; k < 16; k++) a[k] = int'($signed(16'($urandom)));
    for (int m = 0; m < 16; m++) g[m] = (m == 0) ? 0 : int'($signed(16'($urandom)));
    for (int k = 0; k < 16; k++) load_tap(1'b0, k, a[k]);
    for (int m = 1; m < 16; m++) load_tap(1'b1, m - 1, g[m]);
    run(200);
    // Paper's 3-tap example, coefficients in Q0.8-like integers.
    begin
      int a0, a1, a2, b1, b2;
      a0 = 100; a1 = -60; a2 = 25; b1 = 3; b2 = -2;
      for (int k = 0; k < 16; k++) a[k] = 0;
      for (int m = 0; m < 16; m++) g[m] = 0;
      a[0] = a0; a[1] = a1; a[2] = a2;
      g[1] = b2 * a0;            // x1 term of y2 is x[n-1]
      g[2] = b2 * b1 * a0;       // x0 term of y2 is x[n-2]
      for (int k = 0; k < 16; k++) load_tap(1'b0, k, a[k]);
      for (int m = 1; m < 16; m++) load_tap(1'b1, m - 1, g[m]);
    end
    run(100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
