// tb_decimator: 8-tap filter followed by downsampling by two. Loads random coefficients,
// streams 200 samples at one per clock and checks that the block returns the filter
// outputs of samples 0, 2, 4, ... (computed here), one every two clocks, each three clocks
// after its sample. A second run feeds samples every other clock.
module tb_decimator;
  localparam int W = fpda_pkg::LUT_W;
  localparam int YW = W + 4 + 3;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 1'b0, in_valid = 1'b0, out_valid;
  logic signed [7:0] x_in = '0;
  logic signed [YW-1:0] y_out;
  logic cfg_we = 1'b0;
  logic [3:0] cfg_lut = '0, cfg_addr = '0;
  logic signed [W-1:0] cfg_data = '0;

  decimator dut (.clk, .rst_n, .in_valid, .x_in, .out_valid, .y_out,
                 .cfg_we, .cfg_lut, .cfg_addr, .cfg_data);

  int c [8];
  int hist [$];
  longint expq [$];
  int tq [$];
  int cyc = 0, nin = 0, nout = 0, last_out = -1, gap_bad = 0;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 2;
    nout++;
    if (last_out >= 0 && cyc - last_out < 2) gap_bad++;
    last_out = cyc;
    if (expq.size() == 0) begin
      failures++; $display("unexpected output");
    end else begin
      longint e; int t;
      e = expq.pop_front(); t = tq.pop_front();
      if (longint'(y_out) != e) begin failures++; $display("y=%0d expected %0d", y_out, e); end
      if (cyc - t != 3) begin failures++; $display("latency %0d", cyc - t); end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 8; k++) c[k] = int'($signed(16'($urandom)));
    for (int k = 0; k < 8; k++)
      for (int h = 0; h < 2; h++)
        for (int n = 0; n < 16; n++) begin
          @(negedge clk);
          cfg_we = 1'b1; cfg_lut = 4'(2*k + h); cfg_addr = 4'(n);
          cfg_data = W'((h == 1 && n >= 8) ? (n - 16) * c[k] : n * c[k]);
        end
    @(negedge clk);
    cfg_we = 1'b0;
    for (int i = 0; i < 8; i++) hist.push_front(0);
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i < 100; i++) begin
        longint s;
        @(negedge clk);
        in_valid = 1'b1;
        x_in = 8'($urandom);
        hist.push_front(int'(x_in));
        void'(hist.pop_back());
        s = 0;
        for (int k = 0; k < 8; k++) s += longint'(c[k]) * hist[k];
        if ((nin % 2) == 0) begin expq.push_back(s); tq.push_back(cyc); end
        nin++;
        if (pass == 1) begin @(negedge clk); in_valid = 1'b0; end
      end
      @(negedge clk);
      in_valid = 1'b0;
    end
    repeat (6) @(negedge clk);
    checks += 3;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
    if (nout != nin / 2) begin failures++; $display("%0d outputs for %0d inputs", nout, nin); end
    if (gap_bad != 0) begin failures++; $display("outputs closer than two clocks"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
