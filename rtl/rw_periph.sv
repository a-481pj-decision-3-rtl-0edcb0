// rw_periph: normal read/write periphery of the array (4:1 column mux, sense
// amplifiers, write drivers).
//
// A normal access touches one physical row and one of four interleaved column groups:
// column c belongs to group c % 4 at bit position c / 4, so a 256-column row gives a
// 64-bit (eight 8-bit words' worth) access, as in a conventional SRAM read. For a
// write the 64 data bits are steered onto their columns and only those columns are
// enabled; for a read the selected group of the row is gathered back into 64 bits.
// The interleaving order is this design's choice. Purely combinational.
module rw_periph
  import dimc_pkg::*;
#(
  parameter int unsigned N_COLS = COLS,
  parameter int unsigned MUX    = COLMUX
) (
  input  logic [$clog2(MUX)-1:0]   sel,
  input  logic [N_COLS/MUX-1:0]    wdata,
  output logic [N_COLS-1:0]        row_wdata,
  output logic [N_COLS-1:0]        row_wmask,
  input  logic [N_COLS-1:0]        row_rdata,
  output logic [N_COLS/MUX-1:0]    rdata
);

  always_comb begin
    row_wdata = '0;
    row_wmask = '0;
    for (int j = 0; j < N_COLS / MUX; j++) begin
      row_wdata[j*MUX + int'(sel)] = wdata[j];
      row_wmask[j*MUX + int'(sel)] = 1'b1;
      rdata[j] = row_rdata[j*MUX + int'(sel)];
    end
  end

endmodule
