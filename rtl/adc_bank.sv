// adc_bank: four single-slope ADCs working side by side.
//
// A single-slope conversion takes 256 cycles, far longer than one access, so each new
// charge-shared CBLP output goes to the next ADC in round-robin order. ready says the
// ADC whose turn it is can take a sample; start with ready hands it vin. Since every
// conversion takes the same time, codes come out in the order the samples went in;
// code_valid pulses once per conversion. The round-robin order and the ready/start
// handshake are this design's choices.
module adc_bank
  import dimc_pkg::*;
#(
  parameter int unsigned NA = N_ADC
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             ready,
  input  logic [CONVW-1:0] vin,
  input  logic [4:0]       shift,
  output logic             code_valid,
  output logic [ABITS-1:0] code,
  output logic             busy       // any conversion in flight
);

  localparam int unsigned PW = (NA > 1) ? $clog2(NA) : 1;

  logic [PW-1:0]          wp;
  logic [NA-1:0]          a_busy, a_done, a_start;
  logic [NA-1:0][ABITS-1:0] a_code;

  for (genvar g = 0; g < NA; g++) begin : g_adc
    ss_adc u_adc (
      .clk, .rst_n, .start(a_start[g]), .vin, .shift,
      .busy(a_busy[g]), .done(a_done[g]), .code(a_code[g])
    );
    assign a_start[g] = start && ready && (int'(wp) == g);
  end

  assign ready = !a_busy[wp];
  assign busy  = |a_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wp <= '0;
    else if (start && ready) wp <= (int'(wp) == NA - 1) ? '0 : wp + 1'b1;
  end

  always_comb begin
    code_valid = |a_done;
    code = '0;
    for (int i = 0; i < NA; i++) if (a_done[i]) code = a_code[i];
  end

  // Conversions are staggered, so at most one finishes in a cycle.
  a_one_done: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(a_done));

endmodule
