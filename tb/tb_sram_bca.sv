// tb_sram_bca: writes random rows of the bit-cell array under random column masks,
// keeps its own copy, and checks the registered normal read (one-cycle latency) and the
// four-row functional read port against that copy.
module tb_sram_bca;
  import dimc_pkg::*;
  logic clk = 0, we = 0, re = 0;
  logic [8:0] waddr, raddr;
  logic [255:0] wdata, wmask, rdata;
  logic [6:0] fr_wrow;
  logic [3:0][255:0] fr_bits;
  logic [255:0] model [512];
  int checks = 0, failures = 0;

  sram_bca dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every row fully once
    for (int r = 0; r < 512; r++) begin
      @(negedge clk);
      we = 1; waddr = 9'(r); wdata = {8{$urandom}}; wmask = '1;
      model[r] = wdata;
    end
    // masked partial writes
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      we = 1; waddr = 9'($urandom); wdata = {8{$urandom}}; wmask = {8{$urandom}};
      model[waddr] = (model[waddr] & ~wmask) | (wdata & wmask);
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      re = 1; raddr = 9'($urandom); fr_wrow = 7'($urandom);
      @(negedge clk);
      re = 0;
      checks++;
      if (rdata !== model[raddr]) begin
        failures++;
        if (failures < 5) $display("read mismatch row %0d", raddr);
      end
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (fr_bits[i] !== model[4*int'(fr_wrow) + i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
