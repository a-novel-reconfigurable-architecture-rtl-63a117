// tb_da_lut: writes random words into all 16 locations of a DA LUT, then reads every
// address back and compares with the values written. Also checks that a write with we low
// changes nothing.
module tb_da_lut;
  localparam int W = fpda_pkg::LUT_W;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic we = 1'b0;
  logic [3:0] waddr = '0, raddr = '0;
  logic signed [W-1:0] wdata = '0, rdata;
  logic signed [W-1:0] model [16];

  da_lut dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 3; rep++) begin
      for (int a = 0; a < 16; a++) begin
        @(negedge clk);
        we = 1'b1; waddr = 4'(a); wdata = W'($urandom); model[a] = wdata;
      end
      @(negedge clk);
      we = 1'b0; waddr = 4'd3; wdata = ~model[3];
      @(negedge clk);
      for (int a = 0; a < 16; a++) begin
        raddr = 4'(a);
        @(posedge clk); #1;
        checks++;
        if (rdata !== model[a]) begin
          failures++;
          $display("addr %0d: got %0d expected %0d", a, rdata, model[a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
