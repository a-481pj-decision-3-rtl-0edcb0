// blp_colpair: behavioural model of the pitch-matched bit-line processor (BLP) of one
// column pair (mixed-signal circuit in silicon).
//
// sample captures the merged bit-line swings from MR-FR onto the BLP input:
//  - DP mode: the comparator is bypassed and the mux takes BLB, so vin = dBLB = D.
//  - MD mode: D and P-bar were read together, dBLB = 255 + (D-P), dBL = 255 - (D-P).
//    A comparator picks the larger swing through the mux, and subtracting the common
//    255-unit offset (a reference, this design's assumption) leaves vin = |D-P|.
// DP mode then runs two 4-bit capacitive multipliers in parallel (sub-ranged
// multiplication), one on the MSB nibble and one on the LSB nibble of P. Each
// mult_step applies one multiplicand bit, LSB first, by charge sharing:
// acc <- (acc + p_i * vin) / 2. After four steps acc_m = vin * P[7:4] / 16 and
// acc_l = vin * P[3:0] / 16; the model keeps them scaled by 16 so they stay integers.
// In MD mode the multiplier is just a sampler: md_sample puts vin on the MSB output.
// All updates happen at clock edges on the strobes; ideal, noise-free.
module blp_colpair
  import dimc_pkg::*;
(
  input  logic            clk,
  input  mode_e           mode,
  input  logic            sample,     // capture bit-line swings
  input  logic [BLW-1:0]  dbl,
  input  logic [BLW-1:0]  dblb,
  input  logic            mult_step,  // DP: apply one multiplicand bit
  input  logic            p_m_bit,    // current bit of P[7:4]
  input  logic            p_l_bit,    // current bit of P[3:0]
  input  logic            md_sample,  // MD: sample vin onto the MSB output
  output logic            cmp,        // comparator decision (MD): dBLB > dBL, i.e. D > P
  output logic [ACCW-1:0] acc_m,      // MSB-rail contribution
  output logic [ACCW-1:0] acc_l       // LSB-rail contribution
);

  localparam int unsigned OFS = (1 << DBITS) - 1;  // 255

  logic [DBITS-1:0] vin;

  always_ff @(posedge clk) begin
    if (sample) begin
      acc_m <= '0;
      acc_l <= '0;
      if (mode == MODE_DP) begin
        cmp <= 1'b0;
        vin <= DBITS'(dblb);
      end else begin
        cmp <= (dblb > dbl);
        vin <= (dblb > dbl) ? DBITS'(int'(dblb) - OFS) : DBITS'(int'(dbl) - OFS);
      end
    end else if (mult_step) begin
      acc_m <= ACCW'((int'(acc_m) + (p_m_bit ? 16 * int'(vin) : 0)) >> 1);
      acc_l <= ACCW'((int'(acc_l) + (p_l_bit ? 16 * int'(vin) : 0)) >> 1);
    end else if (md_sample) begin
      acc_m <= ACCW'(vin);
      acc_l <= '0;
    end
  end

endmodule
