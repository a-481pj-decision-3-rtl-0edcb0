// tb_adc_bank: offers a new sample every 20 cycles, faster than one 256-cycle ADC can
// take them, so all four ADCs fill and ready must drop (the stall). Checks that each
// code is min(255, vin >> shift), that codes return in the order given, that at most
// four conversions are ever in flight, and that the bank sustains four conversions per
// 256-cycle conversion time.
module tb_adc_bank;
  import dimc_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic ready, code_valid, busy;
  logic [CONVW-1:0] vin;
  logic [4:0] shift = 5'd8;
  logic [7:0] code;
  int checks = 0, failures = 0;
  int exp_q [$];
  int issued = 0, got = 0, stalls = 0, cyc = 0, first_issue = -1, last_issue = 0;

  adc_bank dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n && code_valid) begin
      checks++;
      got++;
      if (exp_q.size() == 0 || int'(code) != exp_q[0]) begin
        failures++;
        $display("code %0d unexpected", code);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
    if (rst_n) begin
      checks++;
      if (issued - got > 4) failures++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 24; t++) begin
      int e;
      vin = CONVW'($urandom % 70000);
      e = int'(vin >> shift);
      if (e > 255) e = 255;
      start = 1;
      @(posedge clk);
      while (!ready) begin stalls++; @(posedge clk); end
      exp_q.push_back(e);
      issued++;
      if (first_issue < 0) first_issue = cyc;
      last_issue = cyc;
      @(negedge clk); start = 0;
      repeat (19) @(negedge clk);
    end
    while (got < issued) @(negedge clk);
    checks += 3;
    if (stalls == 0) begin failures++; $display("bank never stalled"); end
    // 24 conversions, four at a time, 256 cycles each: issues span about 20*256/4 cycles
    if (last_issue - first_issue > 20 * 257 / 4 + 64) begin failures++; $display("span %0d", last_issue - first_issue); end
    if (busy) failures++;
    $display("stall cycles %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
