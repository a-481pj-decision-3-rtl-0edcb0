// tb_mrfr_colpair: drives one column pair through precharge, a PWM word-line read
// (row i high for 2^i cycles, generated here) and the phi_con/phi_merge sequence, with
// random D and replica contents, with the replica rows on and off. The merged swings
// must equal the binary-weighted bit counts: dBLB = 16*(Dm+Qm) + (Dl+Ql) and
// dBL = 16*(30-Dm-Qm) + (30-Dl-Ql) with the replica, 16*Dm+Dl and 255-D without.
module tb_mrfr_colpair;
  import dimc_pkg::*;
  logic clk = 0, phi_pre = 0, phi_con = 1, phi_merge = 0;
  logic [3:0] wl = 0, rep_wl = 0, d_msb, d_lsb, q_msb, q_lsb;
  logic [BLW-1:0] dbl, dblb;
  int checks = 0, failures = 0;

  mrfr_colpair dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      logic rep;
      logic [7:0] d, q;
      int eb, ebb;
      d = 8'($urandom); q = 8'($urandom); rep = 1'($urandom);
      d_msb = d[7:4]; d_lsb = d[3:0]; q_msb = q[7:4]; q_lsb = q[3:0];
      @(negedge clk); phi_pre = 1;
      @(negedge clk); phi_pre = 0;
      for (int c = 0; c < 8; c++) begin
        for (int i = 0; i < 4; i++) begin
          wl[i] = (c < (1 << i));
          rep_wl[i] = rep && (c < (1 << i));
        end
        @(negedge clk);
      end
      wl = 0; rep_wl = 0;
      phi_con = 0;
      @(negedge clk); phi_merge = 1;
      @(negedge clk); phi_merge = 0; phi_con = 1;
      if (rep) begin
        ebb = 16 * (int'(d[7:4]) + int'(q[7:4])) + int'(d[3:0]) + int'(q[3:0]);
        eb  = 16 * (30 - int'(d[7:4]) - int'(q[7:4])) + 30 - int'(d[3:0]) - int'(q[3:0]);
      end else begin
        ebb = int'(d);
        eb  = 255 - int'(d);
      end
      checks += 2;
      if (int'(dblb) != ebb || int'(dbl) != eb) begin
        failures++;
        if (failures < 5) $display("d=%0d q=%0d rep=%0d: dblb=%0d/%0d dbl=%0d/%0d", d, q, rep, dblb, ebb, dbl, eb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
