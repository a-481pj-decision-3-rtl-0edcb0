// tb_workloads: runs the four applications the processor was built for, many queries
// each, on synthetic data generated here (the original image and sound data sets are
// not used), at the default parameters:
//  - face recognition by template matching: 64 stored 256-pixel templates, 64 queries,
//    each a noisy copy of one template; MD mode, arg-min;
//  - digit recognition by k-NN: 4 classes x 16 stored 256-pixel images (class prototype
//    plus noise), 40 queries; MD mode, k = 5 vote;
//  - gun-shot detection by matched filter: a 256-sample decaying burst as template,
//    50 queries of burst + noise at 3 dB SNR and 50 of noise alone with the same power;
//    samples offset-binary around 128; DP mode, threshold;
//  - face detection by a linear SVM: 506 random weights, 40 queries; DP mode with two
//    conversions per vector, threshold.
// Every decision must equal the one computed here from the same ideal arithmetic (ADC
// code = min(255, S >> shift)); the classification accuracy against the ground truth
// and the cycles per decision are printed, and template matching must find every face.
module tb_workloads;
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
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int clip8(input int v);
    return (v < 0) ? 0 : (v > 255) ? 255 : v;
  endfunction

  // approximately Gaussian, zero mean, standard deviation sd
  function automatic int gauss(input int sd);
    int s;
    s = 0;
    for (int i = 0; i < 12; i++) s += int'($urandom % 1001);
    return ((s - 6000) * sd) / 289;
  endfunction

  function automatic int vec_code(input mode_e m, input int wrow, input int set0, input int shift);
    longint s;
    s = 0;
    for (int h = 0; h < 2; h++)
      for (int k = 0; k < 128; k++)
        if (m == MODE_DP) s += longint'(D[wrow + h][k]) * longint'(P[set0 + h][k]);
        else s += 16 * ((D[wrow + h][k] > P[set0 + h][k]) ? longint'(D[wrow + h][k] - P[set0 + h][k])
                                                          : longint'(P[set0 + h][k] - D[wrow + h][k]));
    s = s >>> shift;
    return (s > 255) ? 255 : int'(s);
  endfunction

  task automatic load_array();
    logic [255:0] phys;
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
  endtask

  task automatic write_p(input int nsets);
    for (int s = 0; s < nsets; s++)
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
  endtask

  initial begin
    rcfg_t c;
    int cls, score, lat, correct, total_lat;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------------- face recognition: template matching, 64 classes
    for (int r = 0; r < 128; r++)
      for (int k = 0; k < 128; k++) D[r][k] = 8'($urandom);
    load_array();
    correct = 0; total_lat = 0;
    for (int q = 0; q < 64; q++) begin
      int ecls;
      for (int h = 0; h < 2; h++)
        for (int k = 0; k < 128; k++) P[h][k] = 8'(clip8(int'(D[2*q + h][k]) + gauss(12)));
      write_p(2);
      c = '0; c.mode = MODE_MD; c.n_cand_m1 = 7'd63; c.adc_shift = 5'd11; c.slice = SLICE_ARGMIN;
      run(c, cls, score, lat);
      total_lat += lat;
      ecls = 0;
      for (int k = 1; k < 64; k++) if (vec_code(MODE_MD, 2*k, 0, 11) < vec_code(MODE_MD, 2*ecls, 0, 11)) ecls = k;
      checks++;
      if (cls != ecls) begin failures++; $display("TM query %0d: %0d, reference %0d", q, cls, ecls); end
      if (cls == q) correct++;
    end
    checks++;
    if (correct != 64) failures++;
    $display("template matching: %0d/64 recognised, %0d cycles per decision (%0d K decisions/s at 1 GHz)",
             correct, total_lat / 64, 1000000 / (total_lat / 64));

    // ---------------- digit recognition: k-NN, 4 classes x 16 images
    begin
      logic [7:0] proto [4][256];
      for (int cl = 0; cl < 4; cl++)
        for (int e = 0; e < 256; e++) proto[cl][e] = 8'($urandom);
      for (int i = 0; i < 64; i++)
        for (int e = 0; e < 256; e++) D[2*i + e / 128][e % 128] = 8'(clip8(int'(proto[i / 16][e]) + gauss(50)));
      load_array();
      correct = 0; total_lat = 0;
      for (int q = 0; q < 40; q++) begin
        int truth, codes [64], idx [5], votes [4], best;
        bit used [64];
        truth = $urandom % 4;
        for (int e = 0; e < 256; e++) P[e / 128][e % 128] = 8'(clip8(int'(proto[truth][e]) + gauss(50)));
        write_p(2);
        c = '0; c.mode = MODE_MD; c.n_cand_m1 = 7'd63; c.adc_shift = 5'd11; c.slice = SLICE_KNN;
        c.knn_k = 3'd5; c.class_shift = 3'd4;
        run(c, cls, score, lat);
        total_lat += lat;
        for (int k = 0; k < 64; k++) begin codes[k] = vec_code(MODE_MD, 2*k, 0, 11); used[k] = 0; end
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
        if (cls != best) begin failures++; $display("KNN query %0d: %0d, reference %0d", q, cls, best); end
        if (cls == truth) correct++;
      end
      $display("k-NN: %0d/40 correct, %0d cycles per decision", correct, total_lat / 40);
    end

    // ---------------- gun-shot detection: matched filter
    begin
      int g [256], thr, sig_e;
      sig_e = 0;
      for (int e = 0; e < 256; e++) begin
        g[e] = (e < 8) ? 0 : (gauss(100) * 255) / (255 + 12 * (e - 8));
        g[e] = (g[e] > 127) ? 127 : (g[e] < -127) ? -127 : g[e];
        D[e / 128][e % 128] = 8'(128 + g[e]);
        sig_e += g[e] * g[e];
      end
      load_array();
      // threshold halfway between the expected scores with and without the burst
      begin
        longint base, withs;
        base = 0; withs = 0;
        for (int e = 0; e < 256; e++) begin
          base  += 128 * longint'(128 + g[e]);
          withs += longint'(128 + g[e]) * longint'(128 + g[e]);
        end
        thr = int'(((base + withs) / 2) >>> 15);
      end
      correct = 0; total_lat = 0;
      for (int q = 0; q < 100; q++) begin
        bit has;
        int sd, e_code;
        has = (q % 2 == 0);
        sd = $rtoi($sqrt(real'(sig_e) / 256.0 / 2.0));        // 3 dB SNR
        for (int e = 0; e < 256; e++) begin
          int v;
          v = has ? g[e] + gauss(sd) : gauss($rtoi($sqrt(real'(sig_e) / 256.0 * 1.5)));
          P[e / 128][e % 128] = 8'(clip8(128 + v));
        end
        write_p(2);
        c = '0; c.mode = MODE_DP; c.adc_shift = 5'd15; c.slice = SLICE_THRESH; c.threshold = SCOREW'(thr);
        run(c, cls, score, lat);
        total_lat += lat;
        e_code = vec_code(MODE_DP, 0, 0, 15);
        checks++;
        if (score != e_code || cls != int'(e_code >= thr)) begin failures++; $display("MF query %0d: %0d/%0d", q, score, e_code); end
        if (cls == int'(has)) correct++;
      end
      $display("matched filter: %0d/100 correct, %0d cycles per decision (%0d K decisions/s at 1 GHz)",
               correct, total_lat / 100, 1000000 / (total_lat / 100));
    end

    // ---------------- face detection: linear SVM over 506 pixels (4 word-rows, 4 sets)
    begin
      int ecode, codes [40], sorted [40], thr;
      for (int e = 0; e < 512; e++) D[4 + e / 128][e % 128] = (e < 506) ? 8'($urandom) : 8'd0;
      load_array();
      total_lat = 0;
      for (int q = 0; q < 40; q++) begin
        for (int e = 0; e < 512; e++) P[e / 128][e % 128] = (e < 506) ? 8'($urandom) : 8'd0;
        write_p(4);
        c = '0; c.mode = MODE_DP; c.base_wrow = 7'd4; c.n_conv_m1 = 1'b1; c.adc_shift = 5'd15;
        c.slice = SLICE_THRESH; c.threshold = SCOREW'(254);
        run(c, cls, score, lat);
        total_lat += lat;
        ecode = vec_code(MODE_DP, 4, 0, 15) + vec_code(MODE_DP, 6, 2, 15);
        checks++;
        if (score != ecode || cls != int'(ecode >= 254)) begin failures++; $display("SVM query %0d: %0d/%0d", q, score, ecode); end
      end
      $display("SVM: %0d cycles per decision (%0d K decisions/s at 1 GHz)", total_lat / 40, 1000000 / (total_lat / 40));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
