// tdc_model: behavioural model of one shared Time-to-Digital Converter.
//
// This is a behavioural model, not synthesizable logic. The chip has four
// TDCs in its periphery that time-stamp hits with ~95 ps n_bins; their circuit
// is mixed-signal and not described, so this model measures with simulation
// time instead.
//
// How it works: at a rising clock edge with arm high (the frame boundary) the
// model publishes the result of the frame that just ended on code/fired and
// starts a new measurement, taking that edge as time zero. The first rising
// edge of start (the OR of the unmasked pixel pulses of its quarter) in the
// frame is converted to floor((t_hit - t_frame) / BIN_PS), saturated at
// 2**CODE_W - 1. Later edges in the same frame are ignored.
//
// Interface and timing: code and fired change only at a clock edge with arm
// high and hold the previous frame's result for a whole frame. Time units are
// picoseconds.
//
// From the chip as published: four TDCs, ~95 ps n_bins. Choices of this model:
// the frame start as time reference, first-hit-only, 12-bit saturating code.
module tdc_model #(
  parameter int unsigned BIN_PS = dsipm_pkg::TDC_BIN_PS,
  parameter int unsigned CODE_W = dsipm_pkg::TDC_CODE_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              arm,
  input  logic              start,
  output logic [CODE_W-1:0] code,
  output logic              fired
);
  timeunit 1ps;
  timeprecision 1ps;

  localparam longint unsigned CODE_MAX = (64'd1 << CODE_W) - 1;

  realtime     t_frame;
  logic        cur_fired;
  logic [CODE_W-1:0] cur_code;

  function automatic logic [CODE_W-1:0] to_code(realtime dt);
    longint unsigned n_bins;
    n_bins = longint'($floor(dt / real'(BIN_PS)));
    if (n_bins > CODE_MAX) n_bins = CODE_MAX;
    return CODE_W'(n_bins);
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code      <= '0;
      fired     <= 1'b0;
      cur_fired = 1'b0;
      cur_code  = '0;
      t_frame   = $realtime;
    end else if (arm) begin
      code      <= cur_fired ? cur_code : '0;
      fired     <= cur_fired;
      cur_fired = 1'b0;
      cur_code  = '0;
      t_frame   = $realtime;
    end
  end

  always @(posedge start) begin
    if (rst_n && !cur_fired) begin
      cur_fired = 1'b1;
      cur_code  = to_code($realtime - t_frame);
    end
  end

endmodule
