// tb_dimc_top: end-to-end test of the processor at its default parameters.
//
// Fills the whole 16 KB array through the normal port (128 word-rows of 128 random
// words) and reads part of it back, then runs the four kinds of decision the chip was
// built for, each against a reference computed here from the stored words:
//  - matched filter: DP mode, one 256-word vector, threshold on one ADC code;
//  - SVM: DP mode, one 512-word vector (two conversions added), threshold;
//  - template matching: MD mode, 64 candidate vectors of 256 words, arg-min;
//    the query is a noisy copy of one candidate;
//  - k-NN: MD mode, 64 candidates in 4 classes of 16, k = 5 vote.
// The expected ADC code of a vector is min(255, S >> shift), with S = sum(D*P) (DP) or
// 16*sum|D-P| (MD). Also checks the access period (27 cycles, 37 vectors/us at 1 GHz)
// and counts each mechanism: DP and MD runs, each slicer mode, multi-conversion
// accumulation, ADC-bank stalls, hand-off stalls, normal reads and writes.
module tb_dimc_top;
  import dimc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic n_we = 0, n_re = 0;
  logic [8:0] n_row = 0;
  logic [1:0] n_sel = 0;
  logic [63:0] n_wdata = 0, n_rdata;
  logic p_we = 0;
  logic [1:0] p_set = 0;
  logic [3:0] p_grp = 0;
  logic [63:0] p_wdata = 0;
  logic start = 0;
  rcfg_t rcfg = '0;
  logic busy, dec_valid, code_valid, stall_blp, stall_adc;
  logic [6:0] dec_class;
  logic [SCOREW-1:0] dec_score;
  logic [7:0] code;
  int checks = 0, failures = 0;

  logic [7:0] D [128][128];
  logic [7:0] P [4][128];

  dimc_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int m_dp = 0, m_md = 0, m_thr = 0, m_argmin = 0, m_knn = 0, m_multiconv = 0;
  int m_stall_adc = 0, m_stall_blp = 0, m_nrd = 0, m_nwr = 0, m_subtract = 0;
  int last_samp = -1, min_per = 1 << 30, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (stall_adc) m_stall_adc++;
    if (stall_blp) m_stall_blp++;
    if (n_re) m_nrd++;
    if (n_we) m_nwr++;
    if (dut.u_core.rep_inv && dut.u_core.fr_start) m_subtract++;
    if (dut.u_ctrl.blp_sample) begin
      if (last_samp >= 0 && cyc - last_samp < min_per) min_per = cyc - last_samp;
      last_samp = cyc;
    end
  end

  function automatic int vec_code(input mode_e m, input int wrow, input int set0, input int nwr, input int shift);
    longint s;
    s = 0;
    for (int h = 0; h < nwr; h++)
      for (int k = 0; k < 128; k++)
        if (m == MODE_DP) s += longint'(D[wrow + h][k]) * longint'(P[set0 + h][k]);
        else s += 16 * ((D[wrow + h][k] > P[set0 + h][k]) ? longint'(D[wrow + h][k] - P[set0 + h][k])
                                                          : longint'(P[set0 + h][k] - D[wrow + h][k]));
    s = s >>> shift;
    return (s > 255) ? 255 : int'(s);
  endfunction

  task automatic write_p();
    for (int s = 0; s < 4; s++)
      for (int g = 0; g < 16; g++) begin
        @(negedge clk);
        p_we = 1; p_set = 2'(s); p_grp = 4'(g);
        for (int j = 0; j < 8; j++) p_wdata[8*j +: 8] = P[s][8*g + j];
      end
    @(negedge clk); p_we = 0;
  endtask

  task automatic run(input rcfg_t c, output int cls, output int score, output int lat);
    @(negedge clk); rcfg = c; start = 1;
    @(negedge clk); start = 0;
    lat = 1;
    while (!dec_valid) begin @(negedge clk); lat++; end
    cls = int'(dec_class); score = int'(dec_score);
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("busy after decision"); end
    if (c.mode == MODE_DP) m_dp++; else m_md++;
    if (c.n_conv_m1 != 0) m_multiconv++;
    case (c.slice) SLICE_THRESH: m_thr++; SLICE_ARGMIN: m_argmin++; default: m_knn++; endcase
  endtask

  initial begin
    logic [255:0] phys;
    int cls, score, lat, e, ecls;
    rcfg_t c;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 128; r++)
      for (int k = 0; k < 128; k++) D[r][k] = 8'($urandom);
    // normal-port fill, one physical row at a time
    for (int row = 0; row < 512; row++) begin
      for (int k = 0; k < 128; k++) begin
        phys[2*k]     = D[row / 4][k][4 + row % 4];
        phys[2*k + 1] = D[row / 4][k][row % 4];
      end
      for (int s = 0; s < 4; s++) begin
        @(negedge clk);
        n_we = 1; n_row = 9'(row); n_sel = 2'(s);
        for (int j = 0; j < 64; j++) n_wdata[j] = phys[4*j + s];
      end
    end
    @(negedge clk); n_we = 0;
    for (int t = 0; t < 64; t++) begin
      int row, s;
      row = $urandom % 512; s = $urandom % 4;
      for (int k = 0; k < 128; k++) begin
        phys[2*k]     = D[row / 4][k][4 + row % 4];
        phys[2*k + 1] = D[row / 4][k][row % 4];
      end
      @(negedge clk); n_re = 1; n_row = 9'(row); n_sel = 2'(s);
      @(negedge clk); n_re = 0;
      checks++;
      for (int j = 0; j < 64; j++) if (n_rdata[j] !== phys[4*j + s]) begin failures++; break; end
    end

    // ---- matched filter: word-rows 10,11 against query sets 0,1
    for (int s = 0; s < 4; s++) for (int k = 0; k < 128; k++) P[s][k] = 8'($urandom);
    write_p();
    for (int t = 0; t < 3; t++) begin
      c = '0; c.mode = MODE_DP; c.base_wrow = 7'd10; c.n_cand_m1 = 0; c.n_conv_m1 = 0;
      c.adc_shift = 5'd15; c.slice = SLICE_THRESH; c.threshold = SCOREW'(100 + 20 * t);
      run(c, cls, score, lat);
      e = vec_code(MODE_DP, 10, 0, 2, 15);
      checks += 3;
      if (score != e || cls != int'(e >= 100 + 20 * t)) begin failures++; $display("MF score %0d/%0d class %0d", score, e, cls); end
      // 2 accesses (27 each) + BLP/CBLP of the 2nd (4*4+4) + ADC hand-off (1) + ADC (256)
      // + ADC done (1) + slicer (1)
      if (lat != 2 * 27 + 20 + 1 + 256 + 1 + 1) begin failures++; $display("MF latency %0d", lat); end
      if (t == 0) $display("matched filter: latency %0d cycles", lat);
    end

    // ---- SVM: 512-word vector, word-rows 20..23 against query sets 0..3
    c = '0; c.mode = MODE_DP; c.base_wrow = 7'd20; c.n_cand_m1 = 0; c.n_conv_m1 = 1;
    c.adc_shift = 5'd15; c.slice = SLICE_THRESH; c.threshold = SCOREW'(250);
    run(c, cls, score, lat);
    e = vec_code(MODE_DP, 20, 0, 2, 15) + vec_code(MODE_DP, 22, 2, 2, 15);
    checks++;
    if (score != e || cls != int'(e >= 250)) begin failures++; $display("SVM score %0d/%0d", score, e); end
    $display("SVM: latency %0d cycles", lat);

    // ---- template matching: query = noisy copy of candidate 37
    for (int h = 0; h < 2; h++)
      for (int k = 0; k < 128; k++) begin
        int v;
        v = int'(D[2*37 + h][k]) + int'($urandom % 9) - 4;
        P[h][k] = 8'((v < 0) ? 0 : (v > 255) ? 255 : v);
      end
    write_p();
    c = '0; c.mode = MODE_MD; c.base_wrow = 7'd0; c.n_cand_m1 = 7'd63; c.n_conv_m1 = 0;
    c.adc_shift = 5'd11; c.slice = SLICE_ARGMIN;
    run(c, cls, score, lat);
    ecls = 0;
    for (int k = 1; k < 64; k++) if (vec_code(MODE_MD, 2*k, 0, 2, 11) < vec_code(MODE_MD, 2*ecls, 0, 2, 11)) ecls = k;
    checks += 2;
    if (cls != ecls || score != vec_code(MODE_MD, 2*ecls, 0, 2, 11)) begin failures++; $display("TM class %0d/%0d", cls, ecls); end
    if (cls != 37) begin failures++; $display("TM did not find the template"); end
    $display("template matching: 64 candidates in %0d cycles", lat);

    // ---- k-NN: candidates 16c..16c+15 form class c; query near candidate 50 (class 3)
    for (int h = 0; h < 2; h++)
      for (int k = 0; k < 128; k++) begin
        int v;
        v = int'(D[2*50 + h][k]) + int'($urandom % 41) - 20;
        P[h][k] = 8'((v < 0) ? 0 : (v > 255) ? 255 : v);
      end
    write_p();
    c = '0; c.mode = MODE_MD; c.base_wrow = 7'd0; c.n_cand_m1 = 7'd63; c.n_conv_m1 = 0;
    c.adc_shift = 5'd11; c.slice = SLICE_KNN; c.knn_k = 3'd5; c.class_shift = 3'd4;
    run(c, cls, score, lat);
    begin
      int codes [64], idx [5], votes [4], best;
      bit used [64];
      for (int k = 0; k < 64; k++) begin codes[k] = vec_code(MODE_MD, 2*k, 0, 2, 11); used[k] = 0; end
      for (int j = 0; j < 5; j++) begin
        idx[j] = -1;
        for (int k = 0; k < 64; k++) if (!used[k] && (idx[j] < 0 || codes[k] < codes[idx[j]])) idx[j] = k;
        used[idx[j]] = 1;
      end
      for (int i = 0; i < 4; i++) votes[i] = 0;
      for (int j = 0; j < 5; j++) votes[idx[j] / 16]++;
      best = -1;
      for (int j = 0; j < 5; j++) if (best < 0 || votes[idx[j] / 16] > votes[best]) best = idx[j] / 16;
      checks++;
      if (cls != best) begin failures++; $display("KNN class %0d/%0d", cls, best); end
    end

    // ---- period and mechanisms
    checks += 12;
    if (min_per != 27) begin failures++; $display("access period %0d", min_per); end
    if (m_dp == 0)        begin failures++; $display("no DP run"); end
    if (m_md == 0)        begin failures++; $display("no MD run"); end
    if (m_thr == 0)       begin failures++; $display("no threshold decision"); end
    if (m_argmin == 0)    begin failures++; $display("no arg-min decision"); end
    if (m_knn == 0)       begin failures++; $display("no k-NN decision"); end
    if (m_multiconv == 0) begin failures++; $display("no multi-conversion vector"); end
    if (m_stall_adc == 0) begin failures++; $display("no ADC stall"); end
    if (m_stall_blp == 0) begin failures++; $display("no hand-off stall"); end
    if (m_nrd == 0)       begin failures++; $display("no normal read"); end
    if (m_nwr == 0)       begin failures++; $display("no normal write"); end
    if (m_subtract == 0)  begin failures++; $display("no replica subtract"); end
    $display("mechanisms: dp=%0d md=%0d thresh=%0d argmin=%0d knn=%0d multiconv=%0d adc_stall=%0d handoff_stall=%0d nread=%0d nwrite=%0d subtract=%0d",
             m_dp, m_md, m_thr, m_argmin, m_knn, m_multiconv, m_stall_adc, m_stall_blp, m_nrd, m_nwr, m_subtract);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
