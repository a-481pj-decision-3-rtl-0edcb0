// tb_slicer: feeds random code streams in all three modes and compares the decision with
// a reference computed here: threshold on the summed score (one and two conversions per
// candidate), arg-min over 64 candidates, and a k-NN vote (k = 5, 16 candidates per
// class) over 64 candidates.
module tb_slicer;
  import dimc_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, code_valid = 0;
  rcfg_t cfg_in;
  logic [7:0] code;
  logic busy, dec_valid;
  logic [6:0] dec_class;
  logic [SCOREW-1:0] dec_score;
  int checks = 0, failures = 0;

  slicer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input slice_e m, input int ncand, input int nconv, output int cls, output int sc);
    int scores [128];
    cfg_in = '0;
    cfg_in.slice = m;
    cfg_in.n_cand_m1 = 7'(ncand - 1);
    cfg_in.n_conv_m1 = 1'(nconv - 1);
    cfg_in.threshold = SCOREW'(200 + $urandom % 100);
    cfg_in.knn_k = 3'd5;
    cfg_in.class_shift = 3'd4;
    @(negedge clk); load = 1;
    @(negedge clk); load = 0;
    for (int c = 0; c < ncand; c++) begin
      scores[c] = 0;
      for (int v = 0; v < nconv; v++) begin
        code = 8'($urandom % 256);
        scores[c] += int'(code);
        code_valid = 1;
        @(negedge clk); code_valid = 0;
        repeat ($urandom % 3) @(negedge clk);
      end
    end
    // reference
    if (m == SLICE_THRESH) begin
      cls = int'(scores[0] >= int'(cfg_in.threshold)); sc = scores[0];
    end else if (m == SLICE_ARGMIN) begin
      cls = 0;
      for (int c = 1; c < ncand; c++) if (scores[c] < scores[cls]) cls = c;
      sc = scores[cls];
    end else begin
      int idx [128], votes [8], best;
      logic used [128];
      for (int c = 0; c < ncand; c++) used[c] = 0;
      for (int j = 0; j < 5; j++) begin      // five nearest, earliest on ties
        idx[j] = -1;
        for (int c = 0; c < ncand; c++)
          if (!used[c] && (idx[j] < 0 || scores[c] < scores[idx[j]])) idx[j] = c;
        used[idx[j]] = 1;
      end
      for (int i = 0; i < 8; i++) votes[i] = 0;
      for (int j = 0; j < 5; j++) votes[idx[j] / 16]++;
      best = -1;
      for (int j = 0; j < 5; j++)
        if (best < 0 || votes[idx[j] / 16] > votes[best]) best = idx[j] / 16;
      cls = best;
      sc = -1;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int cls, sc, n;
      slice_e m;
      int ncand, nconv;
      m = slice_e'(t % 3);
      ncand = (m == SLICE_THRESH) ? 1 : 64;
      nconv = (m == SLICE_THRESH) ? 1 + (t / 3) % 2 : 1;
      fork
        run(m, ncand, nconv, cls, sc);
        begin
          n = 0;
          while (!dec_valid) begin @(posedge clk); #1; end
        end
      join
      checks++;
      if (int'(dec_class) != cls || (sc >= 0 && int'(dec_score) != sc)) begin
        failures++;
        if (failures < 6) $display("mode %0d: class %0d/%0d score %0d/%0d", m, dec_class, cls, dec_score, sc);
      end
      @(negedge clk);
      checks++;
      if (busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
