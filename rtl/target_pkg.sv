`timescale 1ns/1ps
// target_pkg: constants, types and helper functions shared by the TARGET 1
// digitizer chip models and its companion FPGA logic.
//
// Geometry of the switched capacitor array (per channel): 8 rows x 32
// columns x 16 cells = 4096 cells. A "block" is one (row, column) group of
// 16 consecutive cells and is numbered row*32 + column (block 73 is row 2,
// column 9). The two banks of 16 Wilkinson ramps digitize one block from a
// channel pair (p, p+8) at a time, so the 16 channels form 8 pairs.
//
// Analog quantities in the behavioural models are carried as unsigned
// millivolts (mv_t) and signed microamps; this is a modelling convention of
// this design, not something the chip defines.
package target_pkg;

  localparam int NUM_CH       = 16;   // input channels
  localparam int NUM_PAIRS    = 8;    // channels digitized two at a time
  localparam int NUM_ROWS     = 8;    // capacitor rows
  localparam int NUM_COLS     = 32;   // columns (blocks) per row
  localparam int BLOCK_CELLS  = 16;   // cells per block
  localparam int ROW_CELLS    = NUM_COLS * BLOCK_CELLS;   // 512
  localparam int CH_CELLS     = NUM_ROWS * ROW_CELLS;     // 4096
  localparam int NUM_BLOCKS   = NUM_ROWS * NUM_COLS;      // 256
  localparam int ADC_BITS     = 12;   // Wilkinson counter width

  typedef logic [2:0]          row_t;
  typedef logic [4:0]          col_t;
  typedef logic [7:0]          block_id_t;   // {row, col}
  typedef logic [ADC_BITS-1:0] adc_t;
  typedef logic [15:0]         mv_t;         // voltage in mV (models only)
  typedef logic signed [15:0]  ua_t;         // current in uA (models only)

  // Run-time configuration written by data acquisition software into the FPGA.
  typedef struct packed {
    logic       multi_hit;     // 1: two 2048-cell halves in ping-pong
    logic       int_trig_en;   // accept the chip's own trigger (DHIT)
    logic       ext_trig_en;   // accept the external trigger
    logic [3:0] n_blocks;      // capture window, in 16-sample blocks (1..15)
    logic [3:0] adc_bits;      // digitization depth, 9..12 bits
    logic [7:0] lookback;      // blocks between trigger block and window start
    logic [2:0] sel_term;      // termination switches S3,S2,S1
    logic       trig_falling;  // comparators fire on signals below threshold
    logic       trig_out_inv;  // DHIT output polarity inverted
    logic [5:0] trig_width;    // DHIT width in clock cycles
    logic       freq_lock_en;  // run the sampling frequency loop
  } cfg_t;

  // One 32-bit word of an event in the FPGA buffer.
  localparam logic [3:0] HDR_TAG = 4'hA;

  function automatic adc_t bin2gray(input adc_t b);
    return b ^ (b >> 1);
  endfunction

  function automatic adc_t gray2bin(input adc_t g);
    adc_t b;
    b[ADC_BITS-1] = g[ADC_BITS-1];
    for (int i = ADC_BITS-2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // Block that follows blk in the sampling order. In multi-hit mode the
  // sequence wraps inside the 128-block half (rows 0-3 or rows 4-7).
  function automatic block_id_t block_add(input block_id_t blk, input int unsigned k,
                                          input logic multi_hit);
    block_id_t r;
    r = blk + block_id_t'(k);
    if (multi_hit) r[7] = blk[7];
    return r;
  endfunction

  function automatic block_id_t block_sub(input block_id_t blk, input int unsigned k,
                                          input logic multi_hit);
    block_id_t r;
    r = blk - block_id_t'(k);
    if (multi_hit) r[7] = blk[7];
    return r;
  endfunction

endpackage
