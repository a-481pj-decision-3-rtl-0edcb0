// tb_fr_wl_driver: starts functional reads with and without the replica rows, counts how
// many cycles each word-line is high (must be 2^i unit pulses), checks that the pulses
// start together in the cycle after start, and that done comes in cycle 8*PWM_UNIT.
module tb_fr_wl_driver;
  import dimc_pkg::*;
  localparam int unsigned U = 2;
  logic clk = 0, rst_n = 0, start = 0, rep_en = 0;
  logic [3:0] wl, rep_wl;
  logic busy, done;
  int checks = 0, failures = 0;

  fr_wl_driver #(.PWM_UNIT(U)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic rep);
    int hi [4], rhi [4];
    int done_at;
    for (int i = 0; i < 4; i++) begin hi[i] = 0; rhi[i] = 0; end
    done_at = -1;
    @(negedge clk); start = 1; rep_en = rep;
    @(negedge clk); start = 0; rep_en = 0;
    checks++;
    if (wl !== 4'hf) failures++;          // all rows start together
    for (int c = 1; c <= 12 * U; c++) begin
      for (int i = 0; i < 4; i++) begin
        hi[i]  += int'(wl[i]);
        rhi[i] += int'(rep_wl[i]);
      end
      if (done) done_at = c;
      @(negedge clk);
    end
    for (int i = 0; i < 4; i++) begin
      checks += 2;
      if (hi[i] != (1 << i) * U) begin failures++; $display("row %0d high %0d", i, hi[i]); end
      if (rhi[i] != (rep ? (1 << i) * U : 0)) failures++;
    end
    checks++;
    if (done_at != 8 * U) begin failures++; $display("done at %0d", done_at); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1'b0);
    run(1'b1);
    run(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
