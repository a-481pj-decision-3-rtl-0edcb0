// tb_replica_bca: writes random query words group by group into all sets and checks both
// read ports, with and without the complement on port A.
module tb_replica_bca;
  import dimc_pkg::*;
  logic clk = 0, we = 0, inv_a = 0;
  logic [1:0] wset, rset_a, rset_b;
  logic [3:0] wgrp;
  logic [63:0] wdata;
  logic [127:0][7:0] p_a, p_b;
  logic [7:0] model [4][128];
  int checks = 0, failures = 0;

  replica_bca dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 3; rep++)
      for (int s = 0; s < 4; s++)
        for (int g = 0; g < 16; g++) begin
          @(negedge clk);
          we = 1; wset = 2'(s); wgrp = 4'(g); wdata = {$urandom, $urandom};
          for (int j = 0; j < 8; j++) model[s][8*g + j] = wdata[8*j +: 8];
        end
    @(negedge clk); we = 0;
    for (int t = 0; t < 200; t++) begin
      rset_a = 2'($urandom); rset_b = 2'($urandom); inv_a = 1'($urandom);
      #1;
      for (int k = 0; k < 128; k++) begin
        checks += 2;
        if (p_a[k] !== (inv_a ? ~model[rset_a][k] : model[rset_a][k])) failures++;
        if (p_b[k] !== model[rset_b][k]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
