// tb_dct_comb: input combination block. For random and extreme samples it checks the four
// outputs (x_i + x_15-i) +/- (x_7-i + x_8+i), x_i - x_15-i and x_7-i - x_8+i, computed here.
module tb_dct_comb;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [7:0] xa, xb, xc, xd;
  logic signed [9:0] ee, eo;
  logic signed [8:0] da, dc;

  dct_comb dut (.xa, .xb, .xc, .xd, .ee, .eo, .da, .dc);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      int a, b, c, d;
      a = (i == 0) ? -128 : (i == 1) ? 127 : int'($signed(8'($urandom)));
      b = (i == 0) ? -128 : (i == 1) ? 127 : int'($signed(8'($urandom)));
      c = (i == 0) ? -128 : (i == 1) ? 127 : (i == 2) ? -128 : int'($signed(8'($urandom)));
      d = (i == 0) ? -128 : (i == 1) ? 127 : (i == 2) ? -128 : int'($signed(8'($urandom)));
      xa = 8'(a); xb = 8'(b); xc = 8'(c); xd = 8'(d);
      @(negedge clk);
      checks += 4;
      if (int'(ee) != (a + b) + (c + d)) begin failures++; $display("ee %0d", ee); end
      if (int'(eo) != (a + b) - (c + d)) begin failures++; $display("eo %0d", eo); end
      if (int'(da) != a - b) begin failures++; $display("da %0d", da); end
      if (int'(dc) != c - d) begin failures++; $display("dc %0d", dc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
