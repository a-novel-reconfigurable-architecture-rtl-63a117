// tb_decoder: checks all eight mode codes against the control-signal table: codes 1..5
// raise exactly C1..C5 (FIR, IIR, DCT, FFT, DWT), the others raise none.
module tb_decoder;
  import fpda_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [2:0] d;
  logic [4:0] c;
  mode_e mode;

  decoder dut (.d, .c, .mode);

  // Expected rows of the table, {C5, C4, C3, C2, C1}, for codes 0..7.
  logic [4:0] table_c [8] = '{5'b00000, 5'b00001, 5'b00010, 5'b00100, 5'b01000, 5'b10000,
                              5'b00000, 5'b00000};
  mode_e table_m [8] = '{MODE_NONE, MODE_FIR, MODE_IIR, MODE_DCT, MODE_FFT, MODE_DWT,
                         MODE_NONE, MODE_NONE};

  initial begin : watchdog
    repeat (100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      d = 3'(v);
      @(negedge clk);
      checks += 2;
      if (c != table_c[v]) begin failures++; $display("d=%0d c=%b", v, c); end
      if (mode != table_m[v]) begin failures++; $display("d=%0d mode=%0d", v, mode); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
