// dsipm_top: digital part of the DESY digital SiPM (dSiPM) prototype.
//
// The chip is a 32 x 32 array of pixels, each made of four SPADs sharing one
// set of in-pixel electronics. The analog front end of each pixel (SPADs,
// quenching transistor, digitising inverter) is outside this module: its
// digitised pulse enters on spad_in[row][col]. Inside:
//   - pixel_matrix: mask bit and 2-bit saturating hit counter per pixel, and
//     the OR of the unmasked pulses of each quarter of the array;
//   - four tdc_model instances (behavioural): each time-stamps the first hit
//     of its quarter in a frame with 95 ps bins;
//   - validation_logic: counts the hit pixels of a frame and compares the
//     count with a threshold;
//   - frame_readout: 3 MHz frame sequencer, frame buffer and row-by-row
//     hit-map readout with a frame header;
//   - config_regs: mask, control and threshold registers on a parallel bus.
//
// Timing: with a 96 MHz clock a frame lasts 32 cycles (333 ns). At the last
// cycle of frame N (frame_end high) the counters, TDC codes and validation
// result of frame N are captured; in the next 32 cycles the header (first
// cycle) and the 32 rows of frame N come out while frame N+1 is acquired.
//
// From the chip as published: array size, in-pixel mask and 2-bit counter,
// four shared TDCs with ~95 ps bins, full hit-map frame readout at 3 MHz and
// validation logic. Choices of this design: the clock rate, the TDC sharing by
// quarters, the validation criterion, the output format and the
// configuration bus (see each module).
module dsipm_top #(
  parameter int unsigned ROWS         = dsipm_pkg::ROWS_DEF,
  parameter int unsigned COLS         = dsipm_pkg::COLS_DEF,
  parameter int unsigned FRAME_CYCLES = dsipm_pkg::FRAME_CYCLES_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [ROWS-1:0][COLS-1:0]     spad_in,
  input  logic                          cfg_we,
  input  logic [7:0]                    cfg_addr,
  input  logic [31:0]                   cfg_wdata,
  output logic [31:0]                   cfg_rdata,
  output logic                          frame_end,
  output logic                          hdr_valid,
  output dsipm_pkg::frame_hdr_t         hdr,
  output logic                          row_valid,
  output logic [$clog2(ROWS)-1:0]       row_addr,
  output logic [COLS*dsipm_pkg::CNT_W_DEF-1:0] row_data,
  output logic                          frame_suppressed
);
  timeunit 1ps;
  timeprecision 1ps;
  import dsipm_pkg::*;

  localparam int unsigned CNT_W = CNT_W_DEF;

  logic [ROWS-1:0][COLS-1:0][CNT_W-1:0] counts;
  logic [ROWS-1:0][COLS-1:0]            masks;
  logic [ROWS-1:0]                      mask_row_we;
  logic [COLS-1:0]                      mask_row_d;
  logic [N_TDC-1:0]                     group_hit;
  logic [N_TDC-1:0][TDC_CODE_W-1:0]     tdc_code;
  logic [N_TDC-1:0]                     tdc_fired;
  logic                                 frame_clr;
  logic                                 run, val_en, frame_ok;
  logic [HITCNT_W-1:0]                  val_threshold, hit_pixels;

  config_regs #(.ROWS(ROWS), .COLS(COLS)) u_cfg (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .masks, .mask_row_we, .mask_row_d, .run, .val_en, .val_threshold
  );

  pixel_matrix #(.ROWS(ROWS), .COLS(COLS), .CNT_W(CNT_W)) u_matrix (
    .clk, .rst_n, .spad_in, .mask_row_we, .mask_row_d,
    .frame_clr, .counts, .masks, .group_hit
  );

  for (genvar g = 0; g < int'(N_TDC); g++) begin : g_tdc
    tdc_model #(.BIN_PS(TDC_BIN_PS), .CODE_W(TDC_CODE_W)) u_tdc (
      .clk, .rst_n, .arm(frame_clr), .start(group_hit[g]),
      .code(tdc_code[g]), .fired(tdc_fired[g])
    );
  end

  validation_logic #(.ROWS(ROWS), .COLS(COLS), .CNT_W(CNT_W)) u_val (
    .clk, .rst_n, .eval(frame_end), .counts, .threshold(val_threshold),
    .hit_pixels, .frame_ok
  );

  frame_readout #(.ROWS(ROWS), .COLS(COLS), .CNT_W(CNT_W),
                  .FRAME_CYCLES(FRAME_CYCLES)) u_ro (
    .clk, .rst_n, .run, .val_en, .counts, .tdc_code, .tdc_fired,
    .frame_ok, .hit_pixels, .frame_end, .frame_clr, .hdr_valid, .hdr,
    .row_valid, .row_addr, .row_data, .frame_suppressed
  );

endmodule
