// tb_rw_periph: checks the 4:1 column mux of the normal port. For random selects and
// data, every column must carry data bit c/4 with its mask set exactly when c%4 equals
// the select, and a read must gather bit j from column 4j+sel.
module tb_rw_periph;
  import dimc_pkg::*;
  logic [1:0]   sel;
  logic [63:0]  wdata, rdata;
  logic [255:0] row_wdata, row_wmask, row_rdata;
  int checks = 0, failures = 0;

  rw_periph dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      sel = 2'($urandom);
      wdata = {$urandom, $urandom};
      row_rdata = {8{$urandom}};
      #1;
      for (int c = 0; c < 256; c++) begin
        checks++;
        if (row_wmask[c] !== (c % 4 == int'(sel)) ||
            (c % 4 == int'(sel) && row_wdata[c] !== wdata[c/4])) begin
          failures++;
          if (failures < 5) $display("write mismatch col %0d sel %0d", c, sel);
        end
      end
      for (int j = 0; j < 64; j++) begin
        checks++;
        if (rdata[j] !== row_rdata[4*j + int'(sel)]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
