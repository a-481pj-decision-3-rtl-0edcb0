// sram_bca: the 6T SRAM bit-cell array, 512 rows x 256 columns (16 KB, one bank).
//
// Two ways in. The normal port writes one physical row under a per-column mask and
// reads one physical row back one cycle later; the 4:1 column mux, sense amplifiers
// and write drivers around it live in rw_periph. The functional port exposes the four
// rows 4r..4r+3 of word-row r to the multi-row functional read (MR-FR) models, which
// stand for the bit-lines being discharged by all four cells of a column at once.
// In silicon this is a standard 6T array with unmodified cells; here it is a
// synthesizable register/memory array. Contents are not reset, like a real SRAM.
// Timing: write at the clock edge, normal read data registered (1-cycle latency),
// functional port combinational from the stored bits.
module sram_bca
  import dimc_pkg::*;
#(
  parameter int unsigned N_ROWS = ROWS,
  parameter int unsigned N_COLS = COLS
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [$clog2(N_ROWS)-1:0]   waddr,
  input  logic [N_COLS-1:0]           wdata,
  input  logic [N_COLS-1:0]           wmask,
  input  logic                        re,
  input  logic [$clog2(N_ROWS)-1:0]   raddr,
  output logic [N_COLS-1:0]           rdata,
  input  logic [$clog2(N_ROWS/NIB)-1:0] fr_wrow,
  output logic [NIB-1:0][N_COLS-1:0]  fr_bits
);

  logic [N_COLS-1:0] mem [N_ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= (mem[waddr] & ~wmask) | (wdata & wmask);
    if (re) rdata <= mem[raddr];
  end

  always_comb begin
    for (int i = 0; i < NIB; i++) fr_bits[i] = mem[{fr_wrow, 2'(i)}];
  end

endmodule
