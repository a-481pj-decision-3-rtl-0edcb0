// dimc_pkg: constants and types shared by the deep in-memory inference processor.
//
// Geometry follows the chip: one 512 x 256 bank of 6T cells (16 KB). An 8-bit word
// is stored as two 4-bit nibbles in a column pair (MSB nibble in column 2k, LSB nibble
// in column 2k+1), bit i of each nibble in row 4r+i of word-row r. One functional
// access therefore reads 128 words (one word-row) at once, and the array holds
// 128 word-rows. The reconfiguration word (RCFG) layout, the slicer modes and all
// field widths are this design's own choices.
package dimc_pkg;

  localparam int unsigned ROWS     = 512;          // physical rows
  localparam int unsigned COLS     = 256;          // physical columns
  localparam int unsigned DBITS    = 8;            // word width of D and P
  localparam int unsigned NIB      = 4;            // sub-ranged nibble width
  localparam int unsigned WORDS    = COLS / 2;     // words per functional access (128)
  localparam int unsigned WROWS    = ROWS / NIB;   // word-rows (128)
  localparam int unsigned COLMUX   = 4;            // normal-mode column mux ratio
  localparam int unsigned NBITS_IO = COLS / COLMUX;// normal port width (64 bits = 8 words)
  localparam int unsigned N_ADC    = 4;            // parallel single-slope ADCs
  localparam int unsigned ABITS    = 8;            // ADC resolution
  localparam int unsigned P_SETS   = 4;            // 128-word query sets held in the replica array

  // Analog quantities of the behavioural models are carried as unsigned integers.
  localparam int unsigned BLW   = 10;  // merged bit-line swing, units of one unit-pulse discharge (<= 16*30+30)
  localparam int unsigned ACCW  = 16;  // BLP output (Vin * nibble, <= 255*15)
  localparam int unsigned RAILW = 23;  // CBLP merged rail output (<= 128*255*255)
  localparam int unsigned CONVW = 24;  // two charge-shared CBLP outputs (ADC input)
  localparam int unsigned SCOREW = ABITS + 2; // sum of up to 4 ADC codes

  typedef enum logic [0:0] {
    MODE_DP = 1'b0,   // dot product:        sum D*P
    MODE_MD = 1'b1    // Manhattan distance: sum |D-P|
  } mode_e;

  typedef enum logic [1:0] {
    SLICE_THRESH = 2'd0,  // binary decision: score >= threshold
    SLICE_ARGMIN = 2'd1,  // template matching: index of smallest score
    SLICE_KNN    = 2'd2   // k nearest neighbours, majority class
  } slice_e;

  // Reconfiguration word.
  typedef struct packed {
    mode_e                    mode;        // DP or MD
    logic [6:0]               base_wrow;   // first word-row of the stored vectors
    logic [6:0]               n_cand_m1;   // number of candidate vectors - 1
    logic [0:0]               n_conv_m1;   // 256-dim conversions per candidate - 1 (1 -> 512-dim)
    logic [4:0]               adc_shift;   // ADC ramp step = 2^adc_shift input units
    slice_e                   slice;       // slicer mode
    logic [SCOREW-1:0]        threshold;   // SLICE_THRESH threshold
    logic [2:0]               knn_k;       // SLICE_KNN k (1..7)
    logic [2:0]               class_shift; // SLICE_KNN: class = candidate >> class_shift
  } rcfg_t;

  // Physical location of bit b (0..7) of word k (0..127) in word-row r.
  function automatic int unsigned bit_row(int unsigned r, int unsigned b);
    return r * NIB + (b % NIB);
  endfunction
  function automatic int unsigned bit_col(int unsigned k, int unsigned b);
    return 2 * k + ((b >= NIB) ? 0 : 1);
  endfunction

endpackage
