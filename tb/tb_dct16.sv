// tb_dct16: 16-point DCT. For random and extreme 8-bit blocks it checks each output
// against Y[k] = sum_n x[n] * round(16384 cos((2n+1) k pi / 32)), worked out here with
// the real cosine, exactly; and that done comes 11 clocks after start.
module tb_dct16;
  import fpda_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 1'b0, start = 1'b0, busy, done;
  logic signed [DATA_W-1:0] x [16];
  logic signed [DCT_ACC_W-1:0] y [16];

  dct16 dut (.clk, .rst_n, .start, .x, .busy, .done, .y);

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int qcos(int n, int k);
    real v;
    v = $cos((2.0 * n + 1.0) * k * 3.141592653589793 / 32.0) * 16384.0;
    return $rtoi(v + (v < 0 ? -0.5 : 0.5));
  endfunction

  initial begin
    for (int i = 0; i < 16; i++) x[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 30; t++) begin
      int xs [16];
      int cycles;
      for (int i = 0; i < 16; i++) begin
        xs[i] = (t == 0) ? 127 : (t == 1) ? -128 : (t == 2) ? (((i % 2) != 0) ? 127 : -128)
                : int'($signed(8'($urandom)));
        x[i] = 8'(xs[i]);
      end
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      for (int i = 0; i < 16; i++) x[i] = 8'($urandom);
      cycles = 1;
      while (!done && cycles < 40) begin @(negedge clk); cycles++; end
      checks++;
      if (cycles != 11) begin failures++; $display("done after %0d clocks", cycles); end
      for (int k = 0; k < 16; k++) begin
        longint e;
        e = 0;
        for (int n = 0; n < 16; n++) e += longint'(xs[n]) * qcos(n, k);
        checks++;
        if (longint'(y[k]) != e) begin
          failures++;
          if (failures < 20) $display("block %0d Y%0d: %0d expected %0d", t, k, y[k], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
