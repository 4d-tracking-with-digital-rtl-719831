// frame_readout: frame sequencer and full hit-map readout.
//
// The chip is read out frame by frame at 3 MHz and delivers its full hit map.
// This module ends a frame every FRAME_CYCLES clock cycles (32 cycles of a
// 96 MHz clock = 3 MHz) while `run` is set. At the last cycle of a frame it
// raises frame_end; at that clock edge it copies every pixel counter into a
// frame buffer, so the pixels start the next frame at once while the buffer is
// read out (double buffering). The TDCs and the validation logic publish their
// results for the ending frame at the same edge.
//
// Readout: in the ROWS cycles after the frame boundary the buffer is sent one
// row per cycle on row_data (COLS counters of CNT_W bits, column 0 in the low
// bits) with row_addr = 0, 1, ..., ROWS-1. In the first of those cycles
// hdr_valid is high and hdr carries the frame number, the validation result,
// the number of hit pixels and the four TDC codes. Since FRAME_CYCLES >= ROWS
// the readout always ends before the next frame boundary.
//
// Frame suppression: when val_en was set at the boundary and the validation
// logic rejected the frame, neither header nor rows are sent and
// frame_suppressed pulses in the first cycle instead.
//
// frame_clr (to the pixels and TDCs) is frame_end, and is held high while
// run is low so that the first frame after run starts from empty counters.
//
// From the chip as published: frame-based full hit-map readout at 3 MHz,
// validation for event discrimination. Choices of this design: clock rate,
// double buffering, row-per-cycle output format, header layout, suppression.
module frame_readout #(
  parameter int unsigned ROWS         = dsipm_pkg::ROWS_DEF,
  parameter int unsigned COLS         = dsipm_pkg::COLS_DEF,
  parameter int unsigned CNT_W        = dsipm_pkg::CNT_W_DEF,
  parameter int unsigned FRAME_CYCLES = dsipm_pkg::FRAME_CYCLES_DEF
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  input  logic                                       run,
  input  logic                                       val_en,
  input  logic [ROWS-1:0][COLS-1:0][CNT_W-1:0]       counts,
  input  logic [dsipm_pkg::N_TDC-1:0][dsipm_pkg::TDC_CODE_W-1:0] tdc_code,
  input  logic [dsipm_pkg::N_TDC-1:0]                tdc_fired,
  input  logic                                       frame_ok,
  input  logic [dsipm_pkg::HITCNT_W-1:0]             hit_pixels,
  output logic                                       frame_end,
  output logic                                       frame_clr,
  output logic                                       hdr_valid,
  output dsipm_pkg::frame_hdr_t                      hdr,
  output logic                                       row_valid,
  output logic [$clog2(ROWS)-1:0]                    row_addr,
  output logic [COLS*CNT_W-1:0]                      row_data,
  output logic                                       frame_suppressed
);
  timeunit 1ps;
  timeprecision 1ps;
  import dsipm_pkg::*;

  localparam int unsigned FC_W = $clog2(FRAME_CYCLES);
  localparam int unsigned RA_W = $clog2(ROWS);

  if (FRAME_CYCLES < ROWS) begin : g_chk
    $error("frame_readout: FRAME_CYCLES must be at least ROWS");
  end

  logic [FC_W-1:0]                      frame_cnt;
  logic [FRAME_ID_W-1:0]                frames_done;
  logic [FRAME_ID_W-1:0]                frame_id_q;
  logic [ROWS-1:0][COLS*CNT_W-1:0]      hitmap_buf;
  logic                                 rd_active;
  logic [RA_W-1:0]                      rd_row;
  logic                                 val_en_q;
  logic                                 emit;

  assign frame_end = run && (frame_cnt == FC_W'(FRAME_CYCLES - 1));
  assign frame_clr = frame_end || !run;

  // Frame timer and frame numbering.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame_cnt   <= '0;
      frames_done <= '0;
      frame_id_q  <= '0;
    end else if (!run) begin
      frame_cnt   <= '0;
      frames_done <= '0;
    end else if (frame_end) begin
      frame_cnt   <= '0;
      frames_done <= frames_done + 1'b1;
      frame_id_q  <= frames_done;
    end else begin
      frame_cnt   <= frame_cnt + 1'b1;
    end
  end

  // Frame buffer: snapshot of all counters at the frame boundary.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hitmap_buf <= '0;
    end else if (frame_end) begin
      for (int r = 0; r < int'(ROWS); r++) hitmap_buf[r] <= counts[r];
    end
  end

  // Row sequencer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_active <= 1'b0;
      rd_row    <= '0;
      val_en_q  <= 1'b0;
    end else if (frame_end) begin
      rd_active <= 1'b1;
      rd_row    <= '0;
      val_en_q  <= val_en;
    end else if (rd_active) begin
      if (rd_row == RA_W'(ROWS - 1)) begin
        rd_active <= 1'b0;
      end else begin
        rd_row <= rd_row + 1'b1;
      end
    end
  end

  assign emit             = !(val_en_q && !frame_ok);
  assign row_valid        = rd_active && emit;
  assign row_addr         = rd_row;
  assign row_data         = hitmap_buf[rd_row];
  assign hdr_valid        = row_valid && (rd_row == '0);
  assign frame_suppressed = rd_active && !emit && (rd_row == '0);

  always_comb begin
    hdr.frame_id   = frame_id_q;
    hdr.valid      = frame_ok;
    hdr.hit_pixels = hit_pixels;
    hdr.tdc_fired  = tdc_fired;
    hdr.tdc_code   = tdc_code;
  end

  // The readout of a frame must be over when the next frame ends.
  a_readout_in_time : assert property (@(posedge clk) disable iff (!rst_n)
    frame_end |-> (!rd_active || rd_row == RA_W'(ROWS - 1)));

endmodule
