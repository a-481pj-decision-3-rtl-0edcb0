// dimc_ctrl: the digital controller (CTRL) of the deep in-memory processor.
//
// start latches the reconfiguration word (RCFG) and runs one decision: for each of
// n_cand_m1+1 stored candidate vectors, (n_conv_m1+1) * 2 access cycles of 128 words,
// word-rows base_wrow, base_wrow+1, ... in order. Each access cycle passes through two
// pipeline stages with their own local state machines:
//  Stage A (array):  precharge (T_PRE cycles) -> PWM word-line read (fr_wl_driver,
//                    8 unit pulses) -> phi_con opens -> phi_merge closes -> hand-off:
//                    the BLP samples the bit-lines and the next precharge may begin.
//  Stage B (BLP/CBLP): DP: four multiplier steps of T_MULT cycles (bit i of both P
//                    nibbles); MD: one sampler step. Then rail charge share,
//                    phi_con_rail opens, phi_merge_rail closes, the result is sampled on
//                    capacitor 0 (even access) or 1 (odd access); after capacitor 1 the
//                    two are charge-shared into the next free ADC.
// Because the bit-lines are free once the BLP has sampled them, the precharge of access
// n+1 overlaps stage B of access n, so one access costs T_PRE + 11 = 27 cycles at the
// defaults. Stalls: stage A waits at hand-off while stage B is busy (stall_blp), stage B
// waits for an ADC (stall_adc). busy stays high from start until the slicer's decision.
// The stage split, phase lengths and handshakes are this design's choices; the phase
// order and the overlap of precharge with processing follow the chip.
module dimc_ctrl
  import dimc_pkg::*;
#(
  parameter int unsigned T_PRE  = 16,
  parameter int unsigned T_MULT = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  rcfg_t       rcfg_in,
  output rcfg_t       cfg,
  output logic        slicer_load,
  input  logic        dec_valid,
  output logic        busy,
  // stage A
  output logic [6:0]  fr_wrow,
  output logic [1:0]  rep_set_a,
  output logic        rep_inv,
  output logic        phi_pre,
  output logic        fr_start,
  output logic        rep_en,
  input  logic        fr_done,
  output logic        phi_con,
  output logic        phi_merge,
  // stage B
  output mode_e       mode,
  output logic        blp_sample,
  output logic        mult_step,
  output logic [1:0]  mult_bit,
  output logic        md_sample,
  output logic [1:0]  rep_set_b,
  output logic        rail_share,
  output logic        phi_con_rail,
  output logic        phi_merge_rail,
  output logic        cap_sample,
  output logic        cap_sel,
  output logic        adc_start,
  input  logic        adc_ready,
  // observation
  output logic        stall_blp,
  output logic        stall_adc
);

  typedef enum logic [2:0] {A_IDLE, A_PRE, A_FR, A_CON, A_MRG, A_HAND} a_state_e;
  typedef enum logic [2:0] {B_IDLE, B_MULT, B_MDS, B_RSH, B_CONR, B_MRGR, B_CAP, B_CONV} b_state_e;

  localparam int unsigned TW = $clog2((T_PRE > T_MULT ? T_PRE : T_MULT) + 1);

  a_state_e   a_st;
  b_state_e   b_st;
  logic [TW-1:0] a_tmr, b_tmr;
  logic [8:0] acc_cnt;      // access index within the decision
  logic [8:0] acc_last;
  logic       b_half;
  logic [1:0] b_set;
  logic [1:0] b_step;
  logic [1:0] a_set;

  assign acc_last = 9'(((int'(cfg.n_cand_m1) + 1) * (int'(cfg.n_conv_m1) + 1) * 2) - 1);
  assign a_set    = {cfg.n_conv_m1[0] & acc_cnt[1], acc_cnt[0]};

  assign mode      = cfg.mode;
  assign fr_wrow   = 7'(cfg.base_wrow + acc_cnt[6:0]);
  assign rep_set_a = a_set;
  assign rep_inv   = (cfg.mode == MODE_MD);
  assign rep_en    = (cfg.mode == MODE_MD);
  assign rep_set_b = b_set;

  assign phi_pre    = (a_st == A_PRE);
  assign fr_start   = (a_st == A_PRE) && (a_tmr == '0);
  assign phi_con    = !(a_st == A_CON || a_st == A_MRG);
  assign phi_merge  = (a_st == A_MRG);
  assign blp_sample = (a_st == A_HAND) && (b_st == B_IDLE);
  assign stall_blp  = (a_st == A_HAND) && (b_st != B_IDLE);

  assign mult_step      = (b_st == B_MULT) && (b_tmr == '0);
  assign mult_bit       = b_step;
  assign md_sample      = (b_st == B_MDS);
  assign rail_share     = (b_st == B_RSH);
  assign phi_con_rail   = !(b_st == B_CONR || b_st == B_MRGR);
  assign phi_merge_rail = (b_st == B_MRGR);
  assign cap_sample     = (b_st == B_CAP);
  assign cap_sel        = b_half;
  assign adc_start      = (b_st == B_CONV) && adc_ready;
  assign stall_adc      = (b_st == B_CONV) && !adc_ready;

  assign slicer_load = start && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg      <= '0;
      busy     <= 1'b0;
      a_st     <= A_IDLE;
      a_tmr    <= '0;
      acc_cnt  <= '0;
    end else begin
      if (start && !busy) begin
        cfg      <= rcfg_in;
        busy     <= 1'b1;
        acc_cnt  <= '0;
        a_st     <= A_PRE;
        a_tmr    <= TW'(T_PRE - 1);
      end else begin
        if (dec_valid) busy <= 1'b0;
        unique case (a_st)
          A_IDLE: ;
          A_PRE: begin
            a_tmr <= a_tmr - 1'b1;
            if (a_tmr == '0) a_st <= A_FR;
          end
          A_FR:  if (fr_done) a_st <= A_CON;
          A_CON: a_st <= A_MRG;
          A_MRG: a_st <= A_HAND;
          A_HAND: if (b_st == B_IDLE) begin
            if (acc_cnt == acc_last) begin
              a_st     <= A_IDLE;
                    end else begin
              acc_cnt <= acc_cnt + 1'b1;
              a_st    <= A_PRE;
              a_tmr   <= TW'(T_PRE - 1);
            end
          end
          default: a_st <= A_IDLE;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_st   <= B_IDLE;
      b_tmr  <= '0;
      b_half <= 1'b0;
      b_set  <= '0;
      b_step <= '0;
    end else begin
      unique case (b_st)
        B_IDLE: if (blp_sample) begin
          b_half <= acc_cnt[0];
          b_set  <= a_set;
          b_step <= '0;
          b_tmr  <= TW'(T_MULT - 1);
          b_st   <= (cfg.mode == MODE_DP) ? B_MULT : B_MDS;
        end
        B_MULT: begin
          if (b_tmr == '0) begin
            b_tmr  <= TW'(T_MULT - 1);
            b_step <= b_step + 1'b1;
            if (b_step == 2'd3) b_st <= B_RSH;
          end else begin
            b_tmr <= b_tmr - 1'b1;
          end
        end
        B_MDS:  b_st <= B_RSH;
        B_RSH:  b_st <= B_CONR;
        B_CONR: b_st <= B_MRGR;
        B_MRGR: b_st <= B_CAP;
        B_CAP:  b_st <= b_half ? B_CONV : B_IDLE;
        B_CONV: if (adc_ready) b_st <= B_IDLE;
        default: b_st <= B_IDLE;
      endcase
    end
  end

  // A new decision may only be started when the controller is idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
