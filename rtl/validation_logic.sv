// validation_logic: frame validation for event discrimination.
//
// The chip carries validation logic to tell events apart, but its criterion
// is not published. This module implements a simple multiplicity cut: at the
// frame boundary (eval high) it counts the pixels whose hit counter is
// nonzero and flags the frame valid when that number reaches `threshold`.
// With a thin scintillator on the sensor, a particle fires tens of pixels
// while dark counts fire one or two, so a threshold of a few pixels separates
// them.
//
// Interface and timing: counts are the live pixel counters; at the clock edge
// with eval high hit_pixels and frame_ok are registered, and they hold until
// the next eval. The count is a combinational population count over the
// whole array.
module validation_logic #(
  parameter int unsigned ROWS  = dsipm_pkg::ROWS_DEF,
  parameter int unsigned COLS  = dsipm_pkg::COLS_DEF,
  parameter int unsigned CNT_W = dsipm_pkg::CNT_W_DEF
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 eval,
  input  logic [ROWS-1:0][COLS-1:0][CNT_W-1:0] counts,
  input  logic [dsipm_pkg::HITCNT_W-1:0]       threshold,
  output logic [dsipm_pkg::HITCNT_W-1:0]       hit_pixels,
  output logic                                 frame_ok
);
  timeunit 1ps;
  timeprecision 1ps;
  import dsipm_pkg::*;

  logic [HITCNT_W-1:0] n_hit;

  always_comb begin
    n_hit = '0;
    for (int r = 0; r < int'(ROWS); r++) begin
      for (int c = 0; c < int'(COLS); c++) begin
        n_hit += HITCNT_W'(counts[r][c] != '0);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit_pixels <= '0;
      frame_ok   <= 1'b0;
    end else if (eval) begin
      hit_pixels <= n_hit;
      frame_ok   <= (n_hit >= threshold);
    end
  end

endmodule
