// fr_wl_driver: functional word-line driver producing the pulse-width-modulated
// word-line (PWM-WL) pulses of a multi-row functional read.
//
// On start, row i (i = 0..3) of the addressed word-row is driven for 2^i * PWM_UNIT
// cycles, all pulses starting together, so a cell in row i discharges its bit-line for
// a time proportional to its binary weight. When rep_en is given with start, the same
// pulses go to the replica rows (MD mode). The whole read takes 8 * PWM_UNIT cycles;
// done pulses in the last one. The 1:2:4:8 width ratio follows the chip; pulses are
// whole clock cycles here, whereas the silicon uses sub-nanosecond unit pulses.
module fr_wl_driver
  import dimc_pkg::*;
#(
  parameter int unsigned PWM_UNIT = 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           rep_en,
  output logic [NIB-1:0] wl,
  output logic [NIB-1:0] rep_wl,
  output logic           busy,
  output logic           done
);

  localparam int unsigned LEN = (1 << (NIB - 1)) * PWM_UNIT;
  localparam int unsigned CW  = $clog2(LEN + 1);

  logic [CW-1:0] cnt;
  logic          rep_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      cnt   <= '0;
      rep_q <= 1'b0;
    end else if (start && !busy) begin
      busy  <= 1'b1;
      cnt   <= '0;
      rep_q <= rep_en;
    end else if (busy) begin
      if (cnt == CW'(LEN - 1)) busy <= 1'b0;
      cnt <= cnt + 1'b1;
    end
  end

  always_comb begin
    for (int i = 0; i < NIB; i++) begin
      wl[i]     = busy && (int'(cnt) < (1 << i) * int'(PWM_UNIT));
      rep_wl[i] = wl[i] && rep_q;
    end
    done = busy && (cnt == CW'(LEN - 1));
  end

endmodule
