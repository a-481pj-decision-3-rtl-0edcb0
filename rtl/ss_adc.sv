// ss_adc: behavioural model of one 8-bit single-slope ADC (a ramp generator and an
// analog comparator in silicon, with a digital counter).
//
// start samples the input (vin) and the ramp step (2^shift input units). For the next
// 256 cycles a counter k runs 0..255 while the ramp k * 2^shift is compared with the
// sampled input; the last k at which the ramp has not yet passed the input is the code,
// so code = min(255, vin >> shift). The conversion always takes 256 cycles (slow but
// cheap, as on the chip); done pulses the cycle after the last ramp step, with code
// valid from then until the next start. Counting one ramp step per clock is this
// design's choice.
module ss_adc
  import dimc_pkg::*;
#(
  parameter int unsigned NB = ABITS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [CONVW-1:0] vin,
  input  logic [4:0]       shift,
  output logic             busy,
  output logic             done,
  output logic [NB-1:0]    code
);

  logic [CONVW-1:0] vs;
  logic [4:0]       sh;
  logic [NB-1:0]    cnt;
  logic [NB+31:0]   ramp;

  assign ramp = (NB+32)'(cnt) << sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      code <= '0;
      vs   <= '0;
      sh   <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        vs   <= vin;
        sh   <= shift;
        cnt  <= '0;
        code <= '0;
      end else if (busy) begin
        if (ramp <= (NB+32)'(vs)) code <= cnt;   // comparator: ramp still below input
        cnt <= cnt + 1'b1;
        if (cnt == '1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
