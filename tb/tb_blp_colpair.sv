// tb_blp_colpair: DP mode with random D and P: after four bit-serial steps the MSB and
// LSB multiplier outputs must be D*P[7:4] and D*P[3:0] (so 16*acc_m + acc_l = D*P).
// MD mode with the swings MR-FR produces for D and P-bar: the comparator must say D > P
// and the sampled output must be |D-P|.
module tb_blp_colpair;
  import dimc_pkg::*;
  logic clk = 0, sample = 0, mult_step = 0, p_m_bit = 0, p_l_bit = 0, md_sample = 0;
  mode_e mode = MODE_DP;
  logic [BLW-1:0] dbl, dblb;
  logic cmp;
  logic [ACCW-1:0] acc_m, acc_l;
  int checks = 0, failures = 0;

  blp_colpair dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      logic [7:0] d, p;
      d = 8'($urandom); p = 8'($urandom);
      if (t % 2 == 0) begin
        mode = MODE_DP; dblb = BLW'(d); dbl = BLW'(255 - int'(d));
        @(negedge clk); sample = 1;
        @(negedge clk); sample = 0;
        for (int i = 0; i < 4; i++) begin
          mult_step = 1; p_m_bit = p[4 + i]; p_l_bit = p[i];
          @(negedge clk);
          mult_step = 0;
          @(negedge clk);
        end
        checks += 2;
        if (int'(acc_m) != int'(d) * int'(p[7:4]) || int'(acc_l) != int'(d) * int'(p[3:0])) begin
          failures++;
          if (failures < 5) $display("DP d=%0d p=%0d: m=%0d l=%0d", d, p, acc_m, acc_l);
        end
        if (16 * int'(acc_m) + int'(acc_l) != int'(d) * int'(p)) failures++;
      end else begin
        mode = MODE_MD;
        dblb = BLW'(255 + int'(d) - int'(p));
        dbl  = BLW'(255 - int'(d) + int'(p));
        @(negedge clk); sample = 1;
        @(negedge clk); sample = 0; md_sample = 1;
        @(negedge clk); md_sample = 0;
        checks += 3;
        if (int'(acc_m) != ((d > p) ? int'(d) - int'(p) : int'(p) - int'(d))) begin
          failures++;
          if (failures < 5) $display("MD d=%0d p=%0d: m=%0d", d, p, acc_m);
        end
        if (acc_l != 0) failures++;
        if (cmp !== (d > p)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
