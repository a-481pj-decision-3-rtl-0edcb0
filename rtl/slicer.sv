// slicer: final stage, turns the stream of ADC codes into a decision.
//
// load (with the reconfiguration word) starts a decision. Codes then arrive in order,
// n_conv_m1+1 per candidate vector (a vector longer than 256 words needs more than one
// conversion; their codes are added), for n_cand_m1+1 candidates. The score of each
// candidate is then used according to the slicer mode:
//  - SLICE_THRESH (SVM, matched filter): dec_class = (score >= threshold).
//  - SLICE_ARGMIN (template matching by Manhattan distance): index of the smallest
//    score, the first one on ties.
//  - SLICE_KNN (k-nearest neighbours): the k smallest scores are kept in a sorted list;
//    class = candidate index >> class_shift (stored vectors grouped by class); the
//    class with most votes among the k wins, ties going to the class met first in
//    distance order.
// dec_valid pulses one cycle after the last code (two for KNN, which votes in an extra
// cycle); dec_score is the winning (or thresholded) score. The modes follow the four
// applications of the chip; score accumulation, tie rules and the vote are this
// design's choices.
module slicer
  import dimc_pkg::*;
#(
  parameter int unsigned KMAX = 7
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  rcfg_t             cfg_in,
  input  logic              code_valid,
  input  logic [ABITS-1:0]  code,
  output logic              busy,
  output logic              dec_valid,
  output logic [6:0]        dec_class,
  output logic [SCOREW-1:0] dec_score
);

  typedef struct packed {
    logic              v;
    logic [SCOREW-1:0] s;
    logic [6:0]        idx;
  } ent_t;

  rcfg_t             cfg;
  logic [0:0]        conv_cnt;
  logic [6:0]        cand;
  logic [SCOREW-1:0] acc;
  logic [SCOREW-1:0] score;
  logic              last_conv, last_cand;
  logic [SCOREW-1:0] best_s;
  logic [6:0]        best_i;
  ent_t              knn [KMAX];
  ent_t              knn_n [KMAX];
  logic              vote;

  assign score     = acc + SCOREW'(code);
  assign last_conv = (conv_cnt == cfg.n_conv_m1);
  assign last_cand = (cand == cfg.n_cand_m1);

  // Sorted insertion of (score, cand) into the k-list.
  always_comb begin
    int pos;
    pos = 0;
    for (int j = 0; j < KMAX; j++) if (knn[j].v && knn[j].s <= score) pos++;
    for (int j = 0; j < KMAX; j++) begin
      if (j < pos)       knn_n[j] = knn[j];
      else if (j == pos) knn_n[j] = '{v: 1'b1, s: score, idx: cand};
      else               knn_n[j] = knn[j-1];
    end
  end

  // Majority vote over the first k entries.
  logic [2:0] win_cls;
  logic [SCOREW-1:0] win_s;
  always_comb begin
    logic [3:0] cnt [8];
    logic [3:0] best_cnt;
    logic [2:0] c;
    for (int i = 0; i < 8; i++) cnt[i] = '0;
    for (int j = 0; j < KMAX; j++) begin
      c = 3'(knn[j].idx >> cfg.class_shift);
      if (knn[j].v && j < int'(cfg.knn_k)) cnt[c] = cnt[c] + 1'b1;
    end
    best_cnt = '0;
    win_cls  = '0;
    win_s    = '0;
    for (int j = 0; j < KMAX; j++) begin
      c = 3'(knn[j].idx >> cfg.class_shift);
      if (knn[j].v && j < int'(cfg.knn_k) && cnt[c] > best_cnt) begin
        best_cnt = cnt[c];
        win_cls  = c;
        win_s    = knn[j].s;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg       <= '0;
      busy      <= 1'b0;
      conv_cnt  <= '0;
      cand      <= '0;
      acc       <= '0;
      best_s    <= '0;
      best_i    <= '0;
      vote      <= 1'b0;
      dec_valid <= 1'b0;
      dec_class <= '0;
      dec_score <= '0;
      for (int j = 0; j < KMAX; j++) knn[j] <= '0;
    end else begin
      dec_valid <= 1'b0;
      vote      <= 1'b0;
      if (load) begin
        cfg      <= cfg_in;
        busy     <= 1'b1;
        conv_cnt <= '0;
        cand     <= '0;
        acc      <= '0;
        for (int j = 0; j < KMAX; j++) knn[j] <= '0;
      end else if (vote) begin
        dec_valid <= 1'b1;
        dec_class <= 7'(win_cls);
        dec_score <= win_s;
        busy      <= 1'b0;
      end else if (busy && code_valid) begin
        if (!last_conv) begin
          acc      <= score;
          conv_cnt <= conv_cnt + 1'b1;
        end else begin
          acc      <= '0;
          conv_cnt <= '0;
          cand     <= cand + 1'b1;
          if (cand == '0 || score < best_s) begin
            best_s <= score;
            best_i <= cand;
          end
          if (cfg.slice == SLICE_KNN) knn <= knn_n;
          if (last_cand) begin
            unique case (cfg.slice)
              SLICE_THRESH: begin
                dec_valid <= 1'b1;
                dec_class <= 7'(score >= cfg.threshold);
                dec_score <= score;
                busy      <= 1'b0;
              end
              SLICE_ARGMIN: begin
                dec_valid <= 1'b1;
                busy      <= 1'b0;
                if (cand == '0 || score < best_s) begin
                  dec_class <= cand;
                  dec_score <= score;
                end else begin
                  dec_class <= best_i;
                  dec_score <= best_s;
                end
              end
              default: vote <= 1'b1;
            endcase
          end
        end
      end
    end
  end

endmodule
