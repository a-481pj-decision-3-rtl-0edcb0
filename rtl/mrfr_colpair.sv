// mrfr_colpair: behavioural model of the sub-ranged multi-row functional read
// (MR-FR) of one column pair (the analog bit-lines, not synthesizable logic in silicon).
//
// The MSB column holds the upper nibble of a word D in four rows, the LSB column the
// lower nibble. While the word-line of row i is pulsed (2^i unit pulses, from
// fr_wl_driver) each cell pulls down one of its bit-lines: BLB if it stores 1, BL if it
// stores 0, one unit of swing per unit pulse. Replica cells (P or P-bar) hang on the same
// bit-lines and add their own discharge in MD mode, which is how the word-level
// add/subtract happens. So after the read, per column, dBLB = nibble(D) + nibble(Q) and
// dBL = 15 - nibble(D) + 15 - nibble(Q) (Q = what the replica read), in unit swings.
// phi_pre precharges (clears the swings). Then phi_con opens to isolate 1/16 of the LSB
// bit-line capacitance and phi_merge shares the MSB bit-line charge with it, giving a
// merged swing proportional to 16*dMSB + dLSB; the model reports that integer
// (ideal: no noise, no nonlinearity). The merged values are registered at the
// phi_merge edge and held until the next precharge. PWM_UNIT cycles make one unit pulse.
module mrfr_colpair
  import dimc_pkg::*;
#(
  parameter int unsigned PWM_UNIT = 1
) (
  input  logic            clk,
  input  logic            phi_pre,    // precharge BL/BLB of both columns
  input  logic [NIB-1:0]  wl,         // data word-lines (rows 4r..4r+3)
  input  logic [NIB-1:0]  rep_wl,     // replica word-lines
  input  logic [NIB-1:0]  d_msb,      // cells of the MSB column, row i in bit i
  input  logic [NIB-1:0]  d_lsb,      // cells of the LSB column
  input  logic [NIB-1:0]  q_msb,      // replica cells, MSB column
  input  logic [NIB-1:0]  q_lsb,      // replica cells, LSB column
  input  logic            phi_con,    // 1: LSB bit-line fully connected; 0: 1/16 part isolated
  input  logic            phi_merge,  // share MSB charge with the isolated 1/16 of LSB
  output logic [BLW-1:0]  dbl,        // merged BL swing
  output logic [BLW-1:0]  dblb        // merged BLB swing
);

  localparam int unsigned SW = 8;  // raw swing counter width per column (<= 30*PWM_UNIT)

  logic [SW-1:0] bl_m, blb_m, bl_l, blb_l;

  function automatic logic [SW-1:0] ones(input logic [NIB-1:0] w, input logic [NIB-1:0] b);
    ones = '0;
    for (int i = 0; i < NIB; i++) ones += SW'(w[i] & b[i]);
  endfunction

  always_ff @(posedge clk) begin
    if (phi_pre) begin
      bl_m <= '0; blb_m <= '0; bl_l <= '0; blb_l <= '0;
      dbl  <= '0; dblb  <= '0;
    end else begin
      blb_m <= blb_m + ones(wl, d_msb)  + ones(rep_wl, q_msb);
      bl_m  <= bl_m  + ones(wl, ~d_msb) + ones(rep_wl, ~q_msb);
      blb_l <= blb_l + ones(wl, d_lsb)  + ones(rep_wl, q_lsb);
      bl_l  <= bl_l  + ones(wl, ~d_lsb) + ones(rep_wl, ~q_lsb);
      if (phi_merge && !phi_con) begin
        dbl  <= BLW'((16 * int'(bl_m)  + int'(bl_l))  / int'(PWM_UNIT));
        dblb <= BLW'((16 * int'(blb_m) + int'(blb_l)) / int'(PWM_UNIT));
      end
    end
  end

endmodule
