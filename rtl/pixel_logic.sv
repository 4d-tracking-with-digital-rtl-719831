// pixel_logic: the digital part of one dSiPM pixel.
//
// Each pixel of the chip holds four SPADs in parallel, a quenching transistor
// and an inverter (analog, outside this module) followed by a masking circuit
// and a 2-bit hit counter. This module is that masking circuit and counter.
//
// How it works: the digitised pulse spad_in is asynchronous. It goes through a
// two-flop synchroniser and a rising-edge detector; each detected edge of an
// unmasked pixel adds one to the counter, which saturates at its maximum
// (3 for the 2-bit counter). frame_clr marks a frame boundary: the counter
// restarts at 0, or at 1 when an edge is detected in that same cycle. The
// frame readout samples `count` at the clock edge where frame_clr is high,
// so it sees the full count of the ending frame.
//
// hit_raw is the pulse gated by the mask, without synchronisation, for the
// shared TDC of the pixel's group, which needs the true arrival time.
//
// Interface and timing: a pulse is counted 2-3 clock cycles after its rising
// edge; pulses must be high and low for at least two clock periods each.
// mask_we/mask_d write the mask bit (1 = masked) at a clock edge.
//
// From the chip as published: the masking circuit and the 2-bit counter.
// Choices of this design: synchronous counting, saturation, mask reset to 0.
module pixel_logic #(
  parameter int unsigned CNT_W = dsipm_pkg::CNT_W_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             spad_in,
  input  logic             mask_we,
  input  logic             mask_d,
  input  logic             frame_clr,
  output logic             mask_q,
  output logic             hit_raw,
  output logic [CNT_W-1:0] count
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [2:0] sync_q;   // [0],[1] synchroniser, [2] previous value
  logic       edge_det;

  assign hit_raw  = spad_in & ~mask_q;
  assign edge_det = sync_q[1] & ~sync_q[2] & ~mask_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_q <= '0;
      mask_q <= 1'b0;
    end else begin
      sync_q <= {sync_q[1:0], spad_in};
      if (mask_we) mask_q <= mask_d;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
    end else if (frame_clr) begin
      count <= CNT_W'(edge_det);
    end else if (edge_det && count != '1) begin
      count <= count + 1'b1;
    end
  end

endmodule
