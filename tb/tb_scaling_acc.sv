// tb_scaling_acc: bit-serial scaling accumulator. Each trial takes a random 10-bit signed
// u and a random word c, presents c on the planes where u has a one, most significant
// (sign) plane first, and checks that the accumulator ends at c * u; then a sum of two
// such products with their own bit patterns.
module tb_scaling_acc;
  localparam int DW = fpda_pkg::DCT_LUT_W + 1;
  localparam int AW = fpda_pkg::DCT_ACC_W;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 1'b0, en = 1'b0, first = 1'b0;
  logic signed [DW-1:0] din = '0;
  logic signed [AW-1:0] acc;

  scaling_acc dut (.clk, .rst_n, .en, .first, .din, .acc);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      logic [9:0] u1, u2;
      int c1, c2;
      longint e;
      u1 = (t == 0) ? 10'h200 : 10'($urandom);
      u2 = ((t % 2) != 0) ? 10'($urandom) : 10'h0;
      c1 = (t == 0) ? 65535 : int'($signed(17'($urandom)));
      c2 = int'($signed(17'($urandom)));
      for (int b = 9; b >= 0; b--) begin
        en = 1'b1; first = (b == 9);
        din = DW'((u1[b] ? c1 : 0) + (u2[b] ? c2 : 0));
        @(negedge clk);
      end
      en = 1'b0;
      @(negedge clk);
      e = longint'(c1) * longint'($signed(u1)) + longint'(c2) * longint'($signed(u2));
      checks++;
      if (longint'(acc) != e) begin failures++; $display("acc %0d expected %0d", acc, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
