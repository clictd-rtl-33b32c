// clictd_pkg: constants and types shared by the CLICTD digital blocks.
//
// The matrix has 16 columns of 128 pixels; every pixel is split into 8
// sub-pixels, each with its own discriminator. A pixel records one hit flag
// per sub-pixel, an 8-bit Time of Arrival (ToA, 10 ns bins at the 100 MHz
// acquisition clock) and a 5-bit Time over Threshold (ToT). These numbers are
// the published chip's. The 13-bit photon-counting view of the same
// ToA/ToT register, the 21-bit readout word layout and the 32-bit per-pixel
// configuration word are choices of this implementation.
package clictd_pkg;

  localparam int unsigned N_COLS   = 16;   // columns of the matrix
  localparam int unsigned N_ROWS   = 128;  // pixels per column
  localparam int unsigned N_SUB    = 8;    // sub-pixels (front-ends) per pixel
  localparam int unsigned TOA_W    = 8;    // ToA bits, 10 ns bins
  localparam int unsigned TOT_W    = 5;    // ToT bits
  localparam int unsigned CNT_W    = TOA_W + TOT_W;   // photon counter bits
  localparam int unsigned TUNE_W   = 3;    // threshold tuning DAC bits
  localparam int unsigned RANGE_W  = 3;    // ToT range select bits
  localparam int unsigned DATA_W   = N_SUB + TOA_W + TOT_W;       // 21
  localparam int unsigned CFG_W    = N_SUB + N_SUB * TUNE_W;      // 32

  // Acquisition mode of the pixel logic.
  typedef enum logic {
    MODE_TOA_TOT = 1'b0,   // ToA of first hit + integral ToT
    MODE_COUNT   = 1'b1    // count of discriminator rising edges
  } acq_mode_e;

  // Data word of one hit pixel, as shifted out after its flag bit.
  // The stream sends bit 0 (ToT LSB) first.
  typedef struct packed {
    logic [N_SUB-1:0] hits;
    logic [TOA_W-1:0] toa;
    logic [TOT_W-1:0] tot;
  } pix_data_t;

  // Per-pixel configuration word.
  typedef struct packed {
    logic [N_SUB-1:0][TUNE_W-1:0] tune;   // threshold tuning DAC code
    logic [N_SUB-1:0]             mask;   // 1 = sub-pixel masked
  } pix_cfg_t;

endpackage
