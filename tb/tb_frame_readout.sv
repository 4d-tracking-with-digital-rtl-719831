// tb_frame_readout: self-checking test of the frame sequencer and readout.
//
// The pixel counters are replaced by random values that change every cycle,
// and the TDC and validation results by random values that change at each
// frame boundary, as the real blocks do. The test keeps its own copy of the
// counters at every frame_end and checks: the frame period of FRAME_CYCLES
// cycles (3 MHz at 96 MHz), that the 32 rows of each frame come out in order in
// the 32 cycles after the boundary and equal the copy, the header fields and
// frame numbering, suppression of rejected frames when val_en is set, and
// that frame_clr is held while run is low.
module tb_frame_readout;
  timeunit 1ps;
  timeprecision 1ps;
  import dsipm_pkg::*;

  localparam int ROWS = 32, COLS = 32, CNT_W = 2, FRAME_CYCLES = 32;

  logic clk = 1'b0, rst_n = 1'b0, run = 1'b0, val_en = 1'b0;
  logic [ROWS-1:0][COLS-1:0][CNT_W-1:0] counts = '0;
  logic [N_TDC-1:0][TDC_CODE_W-1:0] tdc_code = '0;
  logic [N_TDC-1:0] tdc_fired = '0;
  logic frame_ok = 1'b0;
  logic [HITCNT_W-1:0] hit_pixels = '0;
  logic frame_end, frame_clr, hdr_valid, row_valid, frame_suppressed;
  frame_hdr_t hdr;
  logic [4:0] row_addr;
  logic [COLS*CNT_W-1:0] row_data;

  int checks = 0, failures = 0;
  logic [ROWS-1:0][COLS-1:0][CNT_W-1:0] snap;
  frame_hdr_t exp_hdr;
  logic exp_emit;
  int cyc = 0, last_end = -1, frames = 0, n_supp = 0, n_emit = 0, rows_seen = 0, exp_row = 0;
  int exp_id = 0;

  frame_readout #(.ROWS(ROWS), .COLS(COLS), .CNT_W(CNT_W), .FRAME_CYCLES(FRAME_CYCLES)) dut (.*);

  always #5208 clk = ~clk;   // ~96 MHz

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Random counters every cycle.
  always @(negedge clk) begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) counts[r][c] = CNT_W'($urandom);
  end

  // Monitor and stand-ins for the TDCs and the validation logic.
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      // Outputs of the previous frame's readout, sampled before this edge.
      if (row_valid) begin
        check("row_addr", 64'(row_addr), 64'(exp_row));
        check($sformatf("row_data row %0d", row_addr), 64'(row_data), 64'(snap[row_addr]));
        check("hdr_valid on first row", 64'(hdr_valid), 64'(row_addr == 0));
        if (hdr_valid) check("header", 64'(hdr), 64'(exp_hdr));
        check("emitted frame expected", 64'(exp_emit), 1);
        exp_row++;
        rows_seen++;
      end
      if (frame_suppressed) begin
        n_supp++;
        check("suppressed frame expected", 64'(exp_emit), 0);
      end
      check("frame_clr", 64'(frame_clr), 64'(frame_end || !run));
      if (frame_end) begin
        if (last_end >= 0) check("frame period", 64'(cyc - last_end), FRAME_CYCLES);
        if (frames > 0 && exp_emit) check("all rows of the previous frame", 64'(exp_row), ROWS);
        if (exp_emit && frames > 0) n_emit++;
        last_end = cyc;
        frames++;
        snap = counts;
        exp_row = 0;
        tdc_code  <= {$urandom, $urandom};
        tdc_fired <= N_TDC'($urandom);
        frame_ok  <= 1'($urandom);
        hit_pixels <= HITCNT_W'($urandom);
        #1;
        exp_hdr.frame_id   = FRAME_ID_W'(exp_id);
        exp_hdr.valid      = frame_ok;
        exp_hdr.hit_pixels = hit_pixels;
        exp_hdr.tdc_fired  = tdc_fired;
        exp_hdr.tdc_code   = tdc_code;
        exp_emit = !(val_en && !frame_ok);
        exp_id++;
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);
    check("no frame while stopped", 64'(frames), 0);
    run = 1'b1;
    repeat (20 * FRAME_CYCLES) @(negedge clk);
    check("frames at 1 per 32 cycles", 64'(frames), 20);
    val_en = 1'b1;
    repeat (30 * FRAME_CYCLES) @(negedge clk);
    val_en = 1'b0;
    repeat (2 * FRAME_CYCLES) @(negedge clk);
    run = 1'b0;
    repeat (2 * FRAME_CYCLES) @(negedge clk);
    check("frames suppressed", 64'(n_supp > 0), 1);
    check("frames emitted", 64'(n_emit > 20), 1);
    check("rows seen", 64'(rows_seen), 64'(n_emit * ROWS + (exp_emit ? ROWS : 0)));
    $display("frames=%0d emitted=%0d suppressed=%0d", frames, n_emit, n_supp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
