// dsipm_pkg: constants and types shared by the dSiPM readout logic.
//
// The array is 32 x 32 pixels, each with a 2-bit hit counter, and four
// Time-to-Digital Converters (TDCs) with ~95 ps bins serve the array; these
// numbers follow the chip as published. The TDC code width, the frame header
// layout and the configuration address map are choices of this design.
package dsipm_pkg;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned ROWS_DEF     = 32;  // pixel rows
  localparam int unsigned COLS_DEF     = 32;  // pixel columns
  localparam int unsigned CNT_W_DEF    = 2;   // in-pixel hit counter width
  localparam int unsigned N_TDC        = 4;   // shared TDCs, one per array quarter
  localparam int unsigned TDC_BIN_PS   = 95;  // TDC bin in ps
  // 12 bits x 95 ps = 389 ns, which covers one 333 ns frame at 3 MHz.
  localparam int unsigned TDC_CODE_W   = 12;
  // Enough bits to count every pixel of the largest array (1024 -> 11 bits).
  localparam int unsigned HITCNT_W     = $clog2(ROWS_DEF * COLS_DEF + 1);
  localparam int unsigned FRAME_ID_W   = 16;
  // 96 MHz system clock / 32 cycles = 3 MHz frame rate.
  localparam int unsigned FRAME_CYCLES_DEF = 32;

  // Configuration address map.
  localparam logic [7:0] CFG_ADDR_MASK0 = 8'h00;  // 0x00..ROWS-1: mask row r
  localparam logic [7:0] CFG_ADDR_CTRL  = 8'h20;  // bit0 run, bit1 val_en
  localparam logic [7:0] CFG_ADDR_THR   = 8'h21;  // validation threshold

  typedef logic [TDC_CODE_W-1:0] tdc_code_t;

  // Header sent with each frame, valid in the first cycle of the frame's rows.
  typedef struct packed {
    logic [FRAME_ID_W-1:0]          frame_id;    // frame number since run
    logic                           valid;       // validation result
    logic [HITCNT_W-1:0]            hit_pixels;  // pixels with a nonzero count
    logic [N_TDC-1:0]               tdc_fired;   // TDC saw a hit in the frame
    logic [N_TDC-1:0][TDC_CODE_W-1:0] tdc_code;  // first-hit time, in bins
  } frame_hdr_t;

endpackage
