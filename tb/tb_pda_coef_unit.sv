// tb_pda_coef_unit: loads the two nibble LUTs of one coefficient unit with n*c (low) and
// signed(n)*c (high) and checks that the unit returns x*c for all 256 eight-bit samples,
// for several random coefficients and the extreme ones.
module tb_pda_coef_unit;
  localparam int W = fpda_pkg::LUT_W;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [7:0]   x = '0;
  logic signed [W+3:0] y;
  logic cfg_we = 1'b0, cfg_hi = 1'b0;
  logic [3:0] cfg_addr = '0;
  logic signed [W-1:0] cfg_data = '0;

  pda_coef_unit dut (.clk, .x, .y, .cfg_we, .cfg_hi, .cfg_addr, .cfg_data);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input int c);
    for (int h = 0; h < 2; h++)
      for (int n = 0; n < 16; n++) begin
        @(negedge clk);
        cfg_we = 1'b1; cfg_hi = h[0]; cfg_addr = 4'(n);
        cfg_data = W'((h == 1 && n >= 8) ? (n - 16) * c : n * c);
      end
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  initial begin
    int coefs [6];
    coefs = '{32767, -32768, 1, -1, 0, 0};
    coefs[4] = int'($signed(16'($urandom)));
    coefs[5] = int'($signed(16'($urandom)));
    foreach (coefs[i]) begin
      load(coefs[i]);
      for (int v = -128; v < 128; v++) begin
        x = 8'(v);
        #1;
        checks++;
        if (int'(y) != v * coefs[i]) begin
          failures++;
          if (failures < 10) $display("c=%0d x=%0d: got %0d", coefs[i], v, y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
