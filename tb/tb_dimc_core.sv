// tb_dimc_core: loads random words into the array through the normal port (using the
// column-pair layout) and a random query into the replica array, reads some rows back,
// then drives the in-memory chain by hand, one access at a time: precharge, PWM read,
// phi_con/phi_merge, BLP sample, multiplier steps (DP) or sampler (MD), rail sharing
// and merge, and the two sampling capacitors. The ADC input must equal sum(D*P) over
// the 256 words in DP mode and 16*sum|D-P| in MD mode.
module tb_dimc_core;
  import dimc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic n_we = 0, n_re = 0;
  logic [8:0] n_row;
  logic [1:0] n_sel;
  logic [63:0] n_wdata, n_rdata;
  logic p_we = 0;
  logic [1:0] p_set;
  logic [3:0] p_grp;
  logic [63:0] p_wdata;
  mode_e mode = MODE_DP;
  logic [6:0] fr_wrow = 0;
  logic [1:0] rep_set_a = 0, rep_set_b = 0, mult_bit = 0;
  logic rep_inv = 0, phi_pre = 0, fr_start = 0, rep_en = 0, fr_done, phi_con = 1, phi_merge = 0;
  logic blp_sample = 0, mult_step = 0, md_sample = 0, rail_share = 0;
  logic phi_con_rail = 1, phi_merge_rail = 0, cap_sample = 0, cap_sel = 0;
  logic [CONVW-1:0] conv;
  int checks = 0, failures = 0;

  logic [7:0] D [8][128];     // word-rows 0..7
  logic [7:0] P [4][128];
  logic [255:0] phys [32];

  dimc_core dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(input int wrow, input int set, input bit half);
    @(negedge clk); phi_pre = 1; fr_wrow = 7'(wrow); rep_set_a = 2'(set);
    rep_inv = (mode == MODE_MD); rep_en = (mode == MODE_MD);
    @(negedge clk); fr_start = 1;
    @(negedge clk); fr_start = 0; phi_pre = 0;
    while (!fr_done) @(negedge clk);
    @(negedge clk); phi_con = 0;
    @(negedge clk); phi_merge = 1;
    @(negedge clk); phi_merge = 0; phi_con = 1; blp_sample = 1; rep_set_b = 2'(set);
    @(negedge clk); blp_sample = 0;
    if (mode == MODE_DP) begin
      for (int i = 0; i < 4; i++) begin
        mult_step = 1; mult_bit = 2'(i);
        @(negedge clk); mult_step = 0;
      end
    end else begin
      md_sample = 1;
      @(negedge clk); md_sample = 0;
    end
    rail_share = 1;
    @(negedge clk); rail_share = 0; phi_con_rail = 0;
    @(negedge clk); phi_merge_rail = 1;
    @(negedge clk); phi_merge_rail = 0; phi_con_rail = 1; cap_sample = 1; cap_sel = half;
    @(negedge clk); cap_sample = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 8; r++)
      for (int k = 0; k < 128; k++) D[r][k] = 8'($urandom);
    for (int s = 0; s < 4; s++)
      for (int k = 0; k < 128; k++) P[s][k] = 8'($urandom);
    // physical image of the first 32 rows
    for (int r = 0; r < 8; r++)
      for (int k = 0; k < 128; k++)
        for (int b = 0; b < 8; b++) phys[bit_row(r, b)][bit_col(k, b)] = D[r][k][b];
    for (int row = 0; row < 32; row++)
      for (int s = 0; s < 4; s++) begin
        @(negedge clk);
        n_we = 1; n_row = 9'(row); n_sel = 2'(s);
        for (int j = 0; j < 64; j++) n_wdata[j] = phys[row][4*j + s];
      end
    @(negedge clk); n_we = 0;
    for (int s = 0; s < 4; s++)
      for (int g = 0; g < 16; g++) begin
        @(negedge clk);
        p_we = 1; p_set = 2'(s); p_grp = 4'(g);
        for (int j = 0; j < 8; j++) p_wdata[8*j +: 8] = P[s][8*g + j];
      end
    @(negedge clk); p_we = 0;
    // normal read-back
    for (int t = 0; t < 40; t++) begin
      int row, s;
      row = $urandom % 32; s = $urandom % 4;
      @(negedge clk); n_re = 1; n_row = 9'(row); n_sel = 2'(s);
      @(negedge clk); n_re = 0; n_sel = 2'($urandom);
      checks++;
      for (int j = 0; j < 64; j++) if (n_rdata[j] !== phys[row][4*j + s]) begin failures++; break; end
    end
    // functional: vectors in word-rows (0,1), (2,3), ... against P sets (0,1) and (2,3)
    for (int t = 0; t < 8; t++) begin
      longint e;
      int r0, s0;
      mode = (t % 2 == 0) ? MODE_DP : MODE_MD;
      r0 = 2 * ($urandom % 4); s0 = 2 * ($urandom % 2);
      e = 0;
      for (int h = 0; h < 2; h++)
        for (int k = 0; k < 128; k++)
          if (mode == MODE_DP) e += longint'(D[r0 + h][k]) * longint'(P[s0 + h][k]);
          else e += 16 * ((D[r0 + h][k] > P[s0 + h][k]) ? longint'(D[r0 + h][k] - P[s0 + h][k])
                                                         : longint'(P[s0 + h][k] - D[r0 + h][k]));
      access(r0, s0, 1'b0);
      access(r0 + 1, s0 + 1, 1'b1);
      checks++;
      if (longint'(conv) != e) begin
        failures++;
        $display("mode %0d rows %0d: conv %0d expected %0d", mode, r0, conv, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
