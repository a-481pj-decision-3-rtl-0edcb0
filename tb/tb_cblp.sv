// tb_cblp: random BLP outputs for two accesses; checks the merged rail output
// 16*sum(acc_m) + sum(acc_l) after each access and the charge-shared sum of the two
// sampling capacitors presented to the ADC.
module tb_cblp;
  import dimc_pkg::*;
  logic clk = 0, rail_share = 0, phi_con_rail = 1, phi_merge_rail = 0, cap_sample = 0, cap_sel = 0;
  logic [127:0][ACCW-1:0] acc_m, acc_l;
  logic [RAILW-1:0] rail_out;
  logic [CONVW-1:0] conv;
  int checks = 0, failures = 0;

  cblp dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 100; t++) begin
      longint e [2];
      for (int h = 0; h < 2; h++) begin
        e[h] = 0;
        for (int k = 0; k < 128; k++) begin
          acc_m[k] = ACCW'($urandom % 3826);
          acc_l[k] = ACCW'($urandom % 3826);
          e[h] += 16 * longint'(acc_m[k]) + longint'(acc_l[k]);
        end
        @(negedge clk); rail_share = 1;
        @(negedge clk); rail_share = 0; phi_con_rail = 0;
        @(negedge clk); phi_merge_rail = 1;
        @(negedge clk); phi_merge_rail = 0; phi_con_rail = 1;
        acc_m = '0; acc_l = '0;   // BLP moves on; rails must hold
        checks++;
        if (longint'(rail_out) != e[h]) begin failures++; $display("rail %0d vs %0d", rail_out, e[h]); end
        cap_sample = 1; cap_sel = h[0];
        @(negedge clk); cap_sample = 0;
      end
      checks++;
      if (longint'(conv) != e[0] + e[1]) begin failures++; $display("conv %0d vs %0d", conv, e[0] + e[1]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
