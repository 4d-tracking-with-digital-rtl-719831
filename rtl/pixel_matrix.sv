// pixel_matrix: the 32 x 32 pixel array of the dSiPM.
//
// It instantiates one pixel_logic per pixel. Pixel (row r, column c) takes
// spad_in[r][c] and reports its counter on counts[r][c]; row and column
// indices run from 0 to 31, as in the chip's hit maps.
//
// Masks are written one row at a time: every pixel of the row selected by the
// one-hot mask_row_we loads its bit from mask_row_d. frame_clr goes to all
// pixels at once.
//
// The four shared TDCs each serve one quarter of the array (16 x 16 pixels).
// group_hit[g] is the OR of hit_raw of the pixels of quarter g, with
// g = 2*(row >= ROWS/2) + (col >= COLS/2). This OR is combinational and not
// synchronised, so the TDC sees the arrival time of the first pulse.
//
// From the chip as published: array size, four SPADs per pixel sharing one
// set of in-pixel electronics, four shared TDCs. Choices of this design: the
// quarter-to-TDC assignment and row-wise mask writes.
module pixel_matrix #(
  parameter int unsigned ROWS  = dsipm_pkg::ROWS_DEF,
  parameter int unsigned COLS  = dsipm_pkg::COLS_DEF,
  parameter int unsigned CNT_W = dsipm_pkg::CNT_W_DEF
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic [ROWS-1:0][COLS-1:0]             spad_in,
  input  logic [ROWS-1:0]                       mask_row_we,
  input  logic [COLS-1:0]                       mask_row_d,
  input  logic                                  frame_clr,
  output logic [ROWS-1:0][COLS-1:0][CNT_W-1:0]  counts,
  output logic [ROWS-1:0][COLS-1:0]             masks,
  output logic [dsipm_pkg::N_TDC-1:0]           group_hit
);
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned HR = ROWS / 2;
  localparam int unsigned HC = COLS / 2;

  logic [ROWS-1:0][COLS-1:0] hit_raw;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pixel_logic #(.CNT_W(CNT_W)) u_pix (
        .clk      (clk),
        .rst_n    (rst_n),
        .spad_in  (spad_in[r][c]),
        .mask_we  (mask_row_we[r]),
        .mask_d   (mask_row_d[c]),
        .frame_clr(frame_clr),
        .mask_q   (masks[r][c]),
        .hit_raw  (hit_raw[r][c]),
        .count    (counts[r][c])
      );
    end
  end

  // OR of the hits of each quarter.
  always_comb begin
    group_hit = '0;
    for (int r = 0; r < int'(ROWS); r++) begin
      for (int c = 0; c < int'(COLS); c++) begin
        group_hit[2 * int'(r >= int'(HR)) + int'(c >= int'(HC))] |= hit_raw[r][c];
      end
    end
  end

endmodule
