// cblp: behavioural model of the cross bit-line processor (charge-sharing rails and
// sampling capacitors; mixed-signal in silicon).
//
// rail_share shorts the 128 BLP MSB outputs onto the MSB rail and the LSB outputs onto
// the LSB rail (the model keeps the sums, i.e. the shared voltage times 128). Then
// phi_con_rail opens, isolating 1/16 of the LSB rail, and phi_merge_rail shares it with
// the MSB rail, so the result is the weighted sum MSB + LSB/16; the model reports
// 16*MSB + LSB, which in DP mode is exactly sum(D*P) over the 128 words. cap_sample
// stores the result on sampling capacitor cap_sel. A 256-dimensional vector takes two
// accesses, sampled on the two capacitors; shorting the two capacitors presents their
// charge-shared value to the ADC, which samples conv when it starts (conv is the sum of
// the two capacitors, combinational from them). Ideal, noise-free.
module cblp
  import dimc_pkg::*;
#(
  parameter int unsigned N_WORDS = WORDS
) (
  input  logic                        clk,
  input  logic [N_WORDS-1:0][ACCW-1:0] acc_m,
  input  logic [N_WORDS-1:0][ACCW-1:0] acc_l,
  input  logic                        rail_share,
  input  logic                        phi_con_rail,   // 1: LSB rail fully connected
  input  logic                        phi_merge_rail,
  input  logic                        cap_sample,
  input  logic                        cap_sel,
  output logic [RAILW-1:0]            rail_out,
  output logic [CONVW-1:0]            conv
);

  logic [RAILW-1:0] rail_m, rail_l;
  logic [RAILW-1:0] cap [2];
  logic [RAILW-1:0] sum_m, sum_l;

  always_comb begin
    sum_m = '0;
    sum_l = '0;
    for (int k = 0; k < N_WORDS; k++) begin
      sum_m += RAILW'(acc_m[k]);
      sum_l += RAILW'(acc_l[k]);
    end
  end

  always_ff @(posedge clk) begin
    if (rail_share) begin
      rail_m <= sum_m;
      rail_l <= sum_l;
    end
    if (phi_merge_rail && !phi_con_rail) rail_out <= RAILW'(16 * rail_m + rail_l);
    if (cap_sample) cap[cap_sel] <= rail_out;
  end

  assign conv = CONVW'(cap[0]) + CONVW'(cap[1]);

endmodule
