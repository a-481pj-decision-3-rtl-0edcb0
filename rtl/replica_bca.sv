// replica_bca: replica bit-cell array holding the streamed query vector P.
//
// The query is written straight over the replica write bit-lines, eight 8-bit words per
// write (set, group), without going through the main array's periphery. P_SETS sets of
// 128 words are held so that queries up to 512 dimensions stay resident while the stored
// vectors stream past. Two read ports serve the two pipeline stages: port A feeds the
// replica word-lines of the MR-FR stage (MD mode, where P or its complement is read on
// the same bit-lines as D), port B feeds the multiplicand bits of the BLP multipliers
// (DP mode). Port A can return the complement (P-bar) for subtraction.
// The number of sets and the two-port arrangement are this design's choices.
// Timing: write at the clock edge, reads combinational.
module replica_bca
  import dimc_pkg::*;
#(
  parameter int unsigned N_SETS  = P_SETS,
  parameter int unsigned N_WORDS = WORDS
) (
  input  logic                              clk,
  input  logic                              we,
  input  logic [$clog2(N_SETS)-1:0]         wset,
  input  logic [$clog2(N_WORDS/8)-1:0]      wgrp,
  input  logic [8*DBITS-1:0]                wdata,   // word j of the group in bits [8j+7:8j]
  input  logic [$clog2(N_SETS)-1:0]         rset_a,
  input  logic                              inv_a,   // 1: read P-bar (subtract)
  output logic [N_WORDS-1:0][DBITS-1:0]     p_a,
  input  logic [$clog2(N_SETS)-1:0]         rset_b,
  output logic [N_WORDS-1:0][DBITS-1:0]     p_b
);

  logic [N_WORDS-1:0][DBITS-1:0] mem [N_SETS];

  always_ff @(posedge clk) begin
    if (we)
      for (int j = 0; j < 8; j++) mem[wset][8*int'(wgrp) + j] <= wdata[8*j +: 8];
  end

  always_comb begin
    for (int k = 0; k < N_WORDS; k++) begin
      p_a[k] = inv_a ? ~mem[rset_a][k] : mem[rset_a][k];
      p_b[k] = mem[rset_b][k];
    end
  end

endmodule
