// dimc_core: the CORE of the deep in-memory processor: bit-cell array with its normal
// read/write periphery, replica array, functional word-line driver and the in-memory
// processing chain (128 MR-FR column pairs, 128 BLPs, the CBLP).
//
// Normal port: one physical row and one of four column groups per access (64 bits);
// n_we writes, n_re reads with the data in n_rdata one cycle later. Query port: eight
// 8-bit words of P per write into the replica array. Functional side: the control
// strobes come from dimc_ctrl (see there for their order); conv is the charge-shared
// output of the two CBLP sampling capacitors, to be converted by the ADC bank.
// Data layout: bit i of the upper nibble of word k of word-row r sits at row 4r+i,
// column 2k; bit i of the lower nibble at row 4r+i, column 2k+1.
module dimc_core
  import dimc_pkg::*;
#(
  parameter int unsigned PWM_UNIT = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // normal read/write
  input  logic                 n_we,
  input  logic                 n_re,
  input  logic [8:0]           n_row,
  input  logic [1:0]           n_sel,
  input  logic [NBITS_IO-1:0]  n_wdata,
  output logic [NBITS_IO-1:0]  n_rdata,
  // query (replica) write
  input  logic                 p_we,
  input  logic [1:0]           p_set,
  input  logic [3:0]           p_grp,
  input  logic [63:0]          p_wdata,
  // control from CTRL
  input  mode_e                mode,
  input  logic [$clog2(WROWS)-1:0] fr_wrow,
  input  logic [1:0]           rep_set_a,
  input  logic                 rep_inv,
  input  logic                 phi_pre,
  input  logic                 fr_start,
  input  logic                 rep_en,
  output logic                 fr_done,
  input  logic                 phi_con,
  input  logic                 phi_merge,
  input  logic                 blp_sample,
  input  logic                 mult_step,
  input  logic [1:0]           mult_bit,
  input  logic                 md_sample,
  input  logic [1:0]           rep_set_b,
  input  logic                 rail_share,
  input  logic                 phi_con_rail,
  input  logic                 phi_merge_rail,
  input  logic                 cap_sample,
  input  logic                 cap_sel,
  // to ADC
  output logic [CONVW-1:0]     conv
);

  logic [COLS-1:0]          row_wdata, row_wmask, row_rdata;
  logic [1:0]               sel_q;
  logic [NIB-1:0][COLS-1:0] fr_bits;
  logic [NIB-1:0]           wl, rep_wl;
  logic [WORDS-1:0][DBITS-1:0] p_a, p_b;
  logic [WORDS-1:0][BLW-1:0]   dbl, dblb;
  logic [WORDS-1:0][ACCW-1:0]  acc_m, acc_l;

  always_ff @(posedge clk) if (n_re) sel_q <= n_sel;

  rw_periph u_rw (
    .sel(n_we ? n_sel : sel_q), .wdata(n_wdata), .row_wdata, .row_wmask,
    .row_rdata, .rdata(n_rdata)
  );

  sram_bca u_bca (
    .clk, .we(n_we), .waddr(n_row), .wdata(row_wdata), .wmask(row_wmask),
    .re(n_re), .raddr(n_row), .rdata(row_rdata), .fr_wrow, .fr_bits
  );

  replica_bca u_rep (
    .clk, .we(p_we), .wset(p_set), .wgrp(p_grp), .wdata(p_wdata),
    .rset_a(rep_set_a), .inv_a(rep_inv), .p_a, .rset_b(rep_set_b), .p_b
  );

  fr_wl_driver #(.PWM_UNIT(PWM_UNIT)) u_wl (
    .clk, .rst_n, .start(fr_start), .rep_en, .wl, .rep_wl, .busy(), .done(fr_done)
  );

  for (genvar k = 0; k < WORDS; k++) begin : g_col
    logic [NIB-1:0] d_m, d_l;
    always_comb begin
      for (int i = 0; i < NIB; i++) begin
        d_m[i] = fr_bits[i][2*k];
        d_l[i] = fr_bits[i][2*k+1];
      end
    end

    mrfr_colpair #(.PWM_UNIT(PWM_UNIT)) u_mrfr (
      .clk, .phi_pre, .wl, .rep_wl, .d_msb(d_m), .d_lsb(d_l),
      .q_msb(p_a[k][DBITS-1:NIB]), .q_lsb(p_a[k][NIB-1:0]),
      .phi_con, .phi_merge, .dbl(dbl[k]), .dblb(dblb[k])
    );

    blp_colpair u_blp (
      .clk, .mode, .sample(blp_sample), .dbl(dbl[k]), .dblb(dblb[k]),
      .mult_step, .p_m_bit(p_b[k][NIB + int'(mult_bit)]), .p_l_bit(p_b[k][int'(mult_bit)]),
      .md_sample, .cmp(), .acc_m(acc_m[k]), .acc_l(acc_l[k])
    );
  end

  cblp u_cblp (
    .clk, .acc_m, .acc_l, .rail_share, .phi_con_rail, .phi_merge_rail,
    .cap_sample, .cap_sel, .rail_out(), .conv
  );

endmodule
