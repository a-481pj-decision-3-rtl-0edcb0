// dimc_top: multifunctional deep in-memory inference processor.
//
// A 16 KB 6T SRAM bank stores 128 word-rows of 128 8-bit words. A query vector P is
// written into the replica array; start with a reconfiguration word then computes, for
// every stored candidate vector D, either the dot product sum(D*P) (DP mode: SVM,
// matched filter) or the Manhattan distance sum|D-P| (MD mode: template matching,
// k-nearest neighbours) inside the array periphery, 128 words per access cycle, converts
// each 256-word result with one of four single-slope ADCs, and slices the codes into a
// decision (threshold, arg-min or k-NN vote). The normal port reads and writes the array
// as an ordinary SRAM (64 bits per access through a 4:1 column mux) while busy is low.
// Interface timing: start is taken when busy is low; dec_valid pulses once per decision
// with dec_class (0/1 for threshold mode, candidate index for arg-min, class for k-NN)
// and dec_score; busy falls in the next cycle. code_valid/code show each ADC result.
module dimc_top
  import dimc_pkg::*;
#(
  parameter int unsigned T_PRE    = 16,
  parameter int unsigned T_MULT   = 4,
  parameter int unsigned PWM_UNIT = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              n_we,
  input  logic              n_re,
  input  logic [8:0]        n_row,
  input  logic [1:0]        n_sel,
  input  logic [NBITS_IO-1:0] n_wdata,
  output logic [NBITS_IO-1:0] n_rdata,
  input  logic              p_we,
  input  logic [1:0]        p_set,
  input  logic [3:0]        p_grp,
  input  logic [63:0]       p_wdata,
  input  logic              start,
  input  rcfg_t             rcfg,
  output logic              busy,
  output logic              dec_valid,
  output logic [6:0]        dec_class,
  output logic [SCOREW-1:0] dec_score,
  output logic              code_valid,
  output logic [ABITS-1:0]  code,
  output logic              stall_blp,
  output logic              stall_adc
);

  rcfg_t            cfg;
  mode_e            mode;
  logic             slicer_load;
  logic [$clog2(WROWS)-1:0] fr_wrow;
  logic [1:0]       rep_set_a, rep_set_b, mult_bit;
  logic             rep_inv, phi_pre, fr_start, rep_en, fr_done, phi_con, phi_merge;
  logic             blp_sample, mult_step, md_sample, rail_share, phi_con_rail, phi_merge_rail;
  logic             cap_sample, cap_sel, adc_start, adc_ready;
  logic [CONVW-1:0] conv;

  dimc_ctrl #(.T_PRE(T_PRE), .T_MULT(T_MULT)) u_ctrl (
    .clk, .rst_n, .start, .rcfg_in(rcfg), .cfg, .slicer_load, .dec_valid, .busy,
    .fr_wrow, .rep_set_a, .rep_inv, .phi_pre, .fr_start, .rep_en, .fr_done, .phi_con,
    .phi_merge, .mode, .blp_sample, .mult_step, .mult_bit, .md_sample, .rep_set_b,
    .rail_share, .phi_con_rail, .phi_merge_rail, .cap_sample, .cap_sel, .adc_start,
    .adc_ready, .stall_blp, .stall_adc
  );

  dimc_core #(.PWM_UNIT(PWM_UNIT)) u_core (
    .clk, .rst_n, .n_we, .n_re, .n_row, .n_sel, .n_wdata, .n_rdata,
    .p_we, .p_set, .p_grp, .p_wdata, .mode, .fr_wrow, .rep_set_a, .rep_inv, .phi_pre,
    .fr_start, .rep_en, .fr_done, .phi_con, .phi_merge, .blp_sample, .mult_step,
    .mult_bit, .md_sample, .rep_set_b, .rail_share, .phi_con_rail, .phi_merge_rail,
    .cap_sample, .cap_sel, .conv
  );

  adc_bank u_adc (
    .clk, .rst_n, .start(adc_start), .ready(adc_ready), .vin(conv), .shift(cfg.adc_shift),
    .code_valid, .code, .busy()
  );

  slicer u_slicer (
    .clk, .rst_n, .load(slicer_load), .cfg_in(rcfg), .code_valid, .code, .busy(),
    .dec_valid, .dec_class, .dec_score
  );

  // The normal port is only used while no decision is being computed.
  a_normal_idle: assert property (@(posedge clk) disable iff (!rst_n) (n_we || n_re) |-> !busy);

endmodule
