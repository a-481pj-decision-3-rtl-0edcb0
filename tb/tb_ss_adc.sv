// tb_ss_adc: converts random inputs at random ramp steps, including inputs above full
// scale; the code must be min(255, vin >> shift) and done must come exactly 257 cycles
// after start (256 ramp steps, then the done pulse).
module tb_ss_adc;
  import dimc_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [CONVW-1:0] vin;
  logic [4:0] shift;
  logic busy, done;
  logic [7:0] code;
  int checks = 0, failures = 0;

  ss_adc dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int n, exp;
      shift = 5'($urandom % 17);
      vin = CONVW'($urandom);
      if (t % 4 == 0) vin = CONVW'($urandom % ((256 << shift) + 1));
      exp = int'(vin >> shift);
      if (exp > 255) exp = 255;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      n = 1;
      while (!done && n < 1000) begin @(negedge clk); n++; end
      checks += 2;
      if (n != 257) begin failures++; $display("latency %0d", n); end
      if (int'(code) != exp) begin
        failures++;
        if (failures < 5) $display("vin=%0d shift=%0d code=%0d exp=%0d", vin, shift, code, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
