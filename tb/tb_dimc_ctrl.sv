// tb_dimc_ctrl: runs the controller against simple stand-ins: a word-line driver that
// answers fr_start with fr_done eight cycles later, an ADC bank of four 257-cycle
// converters (ready when one is free) and a slicer that reports the decision once all
// conversions are done. Checks, per decision in DP and MD mode: the word-row sequence,
// precharge length, the phi_con/phi_merge order, the number of multiplier steps or
// sampler strobes, alternating sampling capacitors, one ADC start per two accesses, and
// the access period of T_PRE + 11 = 27 cycles when nothing stalls (37 128-word vectors
// per microsecond at 1 GHz). A 64-candidate run must stall on the ADCs and at hand-off.
module tb_dimc_ctrl;
  import dimc_pkg::*;
  localparam int unsigned T_PRE = 16, T_MULT = 4;
  logic clk = 0, rst_n = 0, start = 0, dec_valid = 0;
  rcfg_t rcfg_in, cfg;
  logic slicer_load, busy;
  logic [6:0] fr_wrow;
  logic [1:0] rep_set_a, rep_set_b, mult_bit;
  logic rep_inv, phi_pre, fr_start, rep_en, fr_done, phi_con, phi_merge;
  mode_e mode;
  logic blp_sample, mult_step, md_sample, rail_share, phi_con_rail, phi_merge_rail;
  logic cap_sample, cap_sel, adc_start, adc_ready, stall_blp, stall_adc;
  int checks = 0, failures = 0;

  dimc_ctrl #(.T_PRE(T_PRE), .T_MULT(T_MULT)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // word-line driver stand-in
  int fr_cnt = -1;
  always @(posedge clk) begin
    if (fr_start) fr_cnt <= 0;
    else if (fr_cnt >= 0 && fr_cnt < 7) fr_cnt <= fr_cnt + 1;
    else fr_cnt <= -1;
  end
  assign fr_done = (fr_cnt == 7);

  // ADC bank stand-in
  int adc_left [4];
  int wp = 0, n_conv_done = 0;
  assign adc_ready = (adc_left[wp] == 0);
  always @(posedge clk) begin
    for (int i = 0; i < 4; i++) if (adc_left[i] > 0) begin
      adc_left[i] <= adc_left[i] - 1;
      if (adc_left[i] == 1) n_conv_done <= n_conv_done + 1;
    end
    if (adc_start) begin adc_left[wp] <= 257; wp <= (wp + 1) % 4; end
  end

  // event counters
  int n_samp, n_mult, n_mds, n_capsel_err, n_adc, n_pre_err, n_order_err, n_row_err;
  int n_stall_adc = 0, n_stall_blp = 0;
  int pre_len, last_samp, min_per, max_per, exp_row;
  logic last_cap;
  bit seen_con_open;
  always @(posedge clk) if (rst_n) begin
    if (stall_adc) n_stall_adc++;
    if (stall_blp) n_stall_blp++;
    if (phi_pre) pre_len++;
    if (fr_start) begin
      if (pre_len != int'(T_PRE)) n_pre_err++;
      if (int'(fr_wrow) != exp_row) n_row_err++;
      exp_row = (exp_row + 1) % 128;
      pre_len = 0;
    end
    if (!phi_con) seen_con_open = 1;
    if (phi_merge && (!seen_con_open || phi_con)) n_order_err++;
    if (blp_sample) begin
      if (last_samp >= 0) begin
        if ($time / 10 - last_samp < min_per) min_per = int'($time / 10) - last_samp;
        if ($time / 10 - last_samp > max_per) max_per = int'($time / 10) - last_samp;
      end
      last_samp = int'($time / 10);
      n_samp++;
      seen_con_open = 0;
    end
    if (mult_step) n_mult++;
    if (md_sample) n_mds++;
    if (phi_merge_rail && phi_con_rail) n_order_err++;
    if (cap_sample) begin
      if (cap_sel == last_cap) n_capsel_err++;
      last_cap = cap_sel;
    end
    if (adc_start) n_adc++;
  end

  task automatic decision(input mode_e m, input int base, input int ncand, input int nconv);
    int acc, nconvs;
    acc = ncand * nconv * 2;
    nconvs = ncand * nconv;
    n_samp = 0; n_mult = 0; n_mds = 0; n_capsel_err = 0; n_adc = 0; n_pre_err = 0;
    n_order_err = 0; n_row_err = 0; pre_len = 0; last_samp = -1; min_per = 1 << 30; max_per = 0;
    exp_row = base; last_cap = 1; n_conv_done = 0; seen_con_open = 0;
    rcfg_in = '0;
    rcfg_in.mode = m;
    rcfg_in.base_wrow = 7'(base);
    rcfg_in.n_cand_m1 = 7'(ncand - 1);
    rcfg_in.n_conv_m1 = 1'(nconv - 1);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (n_conv_done < nconvs) @(negedge clk);
    dec_valid = 1;
    @(negedge clk); dec_valid = 0;
    checks += 10;
    if (busy) begin failures++; $display("busy after decision"); end
    if (n_samp != acc) begin failures++; $display("samples %0d/%0d", n_samp, acc); end
    if (m == MODE_DP && n_mult != 4 * acc) begin failures++; $display("mult steps %0d", n_mult); end
    if (m == MODE_MD && (n_mds != acc || n_mult != 0)) begin failures++; $display("md samples %0d", n_mds); end
    if (n_adc != acc / 2) begin failures++; $display("adc starts %0d", n_adc); end
    if (n_capsel_err != 0) begin failures++; $display("cap select order"); end
    if (n_pre_err != 0) begin failures++; $display("precharge length"); end
    if (n_row_err != 0) begin failures++; $display("word-row order"); end
    if (n_order_err != 0) begin failures++; $display("phi order"); end
    if (acc > 1 && min_per != int'(T_PRE) + 11) begin failures++; $display("access period %0d", min_per); end
    $display("mode %0d cand %0d conv %0d: access period min %0d max %0d", m, ncand, nconv, min_per, max_per);
  endtask

  initial begin
    for (int i = 0; i < 4; i++) adc_left[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    decision(MODE_DP, 0, 1, 1);     // matched filter shape
    decision(MODE_DP, 10, 1, 2);    // SVM shape
    decision(MODE_MD, 0, 64, 1);    // template matching shape
    decision(MODE_DP, 120, 3, 1);   // word-row wrap
    checks += 2;
    if (n_stall_adc == 0) begin failures++; $display("no ADC stall seen"); end
    if (n_stall_blp == 0) begin failures++; $display("no hand-off stall seen"); end
    $display("stall cycles: adc %0d, hand-off %0d", n_stall_adc, n_stall_blp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
