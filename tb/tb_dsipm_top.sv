// tb_dsipm_top: end-to-end test of the dSiPM digital chip at full size.
//
// The top runs with its default parameters: 32 x 32 pixels, 2-bit counters,
// four TDCs with 95 ps bins and 32-cycle frames of a ~96 MHz clock (3 MHz).
// The test stands in for the analog pixel front ends and the DAQ:
//   - it configures two masked pixels, a validation threshold and run over
//     the configuration bus, and reads the registers back;
//   - in each frame it fires, at picosecond times, a particle-like cluster of
//     about 29 pixels (a disc of radius 3, close to the 20-40 pixel clusters
//     seen with a thin scintillator) in most frames, one or two dark-count
//     pixels, sometimes a pixel with four pulses, and sometimes a masked pixel;
//   - it predicts, from the pulses it drove, the counters, the first-hit TDC
//     code of each quarter, the number of hit pixels and the validation flag,
//     and checks them against the header and the 32 rows read out one frame
//     later. With validation enabled, rejected frames must be suppressed.
// Each mechanism (masking, counter saturation, each TDC firing, an empty TDC,
// validation accept and reject, frame suppression) is counted and must occur.
module tb_dsipm_top;
  timeunit 1ps;
  timeprecision 1ps;
  import dsipm_pkg::*;

  localparam int ROWS = 32, COLS = 32, CNT_W = 2, FRAME_CYCLES = 32;
  localparam int HALF = 5208;                 // ~96 MHz clock
  localparam int THRESHOLD = 10;
  localparam int N_FRAMES = 120;

  typedef struct {
    int        cnt   [ROWS][COLS];   // pulses driven per pixel
    bit        fired [N_TDC];
    longint    first [N_TDC];        // ps from frame start of first unmasked hit
  } plan_t;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [ROWS-1:0][COLS-1:0] spad_in = '0;
  logic cfg_we = 1'b0;
  logic [7:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0, cfg_rdata;
  logic frame_end, hdr_valid, row_valid, frame_suppressed;
  frame_hdr_t hdr;
  logic [4:0] row_addr;
  logic [63:0] row_data;

  dsipm_top dut (.*);

  always #HALF clk = ~clk;

  int checks = 0, failures = 0;
  bit mask_model [ROWS][COLS];
  bit val_en_tb = 0;
  plan_t plan, rd_plan;
  int frames = 0, exp_id = 0, rd_row = 0;
  logic [63:0] rd_exp_rows [ROWS];
  frame_hdr_t rd_exp_hdr;
  bit rd_emit = 0, rd_pending = 0;
  // Mechanism counters.
  int n_masked_hits = 0, n_saturated = 0, n_tdc_fired [N_TDC], n_tdc_empty = 0;
  int n_accept = 0, n_reject = 0, n_suppressed = 0, n_frames_read = 0;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 30) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic cfg_write(logic [7:0] a, logic [31:0] d);
    @(negedge clk) begin cfg_we = 1'b1; cfg_addr = a; cfg_wdata = d; end
    @(negedge clk) cfg_we = 1'b0;
  endtask

  initial begin
    repeat (N_FRAMES * FRAME_CYCLES + 2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One pulse of 40 ns on a pixel at absolute time t.
  task automatic fire(int r, int c, time t);
    fork
      begin
        #(t - $time);
        spad_in[r][c] = 1'b1;
        #40000;
        spad_in[r][c] = 1'b0;
      end
    join_none
  endtask

  function automatic int quarter(int r, int c);
    return 2 * int'(r >= ROWS/2) + int'(c >= COLS/2);
  endfunction

  // Adds a pulse at offset off (ps) to the plan and schedules it.
  task automatic add_pulse(ref plan_t p, input int r, int c, input time t0, input longint off);
    int q;
    p.cnt[r][c]++;
    q = quarter(r, c);
    if (mask_model[r][c]) n_masked_hits++;
    else if (!p.fired[q] || off < p.first[q]) begin
      p.fired[q] = 1'b1;
      p.first[q] = off;
    end
    fire(r, c, t0 + time'(off));
  endtask

  // Builds the stimulus of the frame that starts at t0.
  task automatic make_frame(ref plan_t p, input time t0, input int f);
    bit used [ROWS][COLS];
    foreach (p.cnt[r, c]) begin p.cnt[r][c] = 0; used[r][c] = 0; end
    foreach (p.fired[q]) begin p.fired[q] = 0; p.first[q] = 0; end
    // Particle cluster in 3 frames out of 4.
    if (f % 4 != 3) begin
      int cr, cc;
      longint base;
      cr = $urandom_range(0, ROWS-1);
      cc = $urandom_range(0, COLS-1);
      base = longint'($urandom_range(20000, 250000));
      for (int r = cr - 3; r <= cr + 3; r++)
        for (int c = cc - 3; c <= cc + 3; c++)
          if (r >= 0 && r < ROWS && c >= 0 && c < COLS &&
              (r - cr) * (r - cr) + (c - cc) * (c - cc) <= 9) begin
            used[r][c] = 1;
            add_pulse(p, r, c, t0, base + longint'($urandom_range(0, 20000)));
          end
    end
    // Dark counts: one or two pixels.
    for (int k = 0; k < 1 + (f % 2); k++) begin
      int r, c;
      r = $urandom_range(0, ROWS-1);
      c = $urandom_range(0, COLS-1);
      if (!used[r][c]) begin
        used[r][c] = 1;
        add_pulse(p, r, c, t0, longint'($urandom_range(20000, 290000)));
      end
    end
    // A pixel with four pulses (counter saturates at 3).
    if (f % 3 == 0) begin
      int r, c;
      r = $urandom_range(0, ROWS-1);
      c = $urandom_range(0, COLS-1);
      if (!used[r][c]) begin
        used[r][c] = 1;
        for (int k = 0; k < 4; k++) add_pulse(p, r, c, t0, 20000 + 80000 * k);
        if (!mask_model[r][c]) n_saturated++;
      end
    end
    // A pulse on a masked pixel.
    if (f % 5 == 1 && !used[5][5]) begin
      used[5][5] = 1;
      add_pulse(p, 5, 5, t0, longint'($urandom_range(20000, 290000)));
    end
  endtask

  // Expected readout of a finished frame.
  task automatic expect_frame(const ref plan_t p, input int id);
    int nhit;
    nhit = 0;
    for (int r = 0; r < ROWS; r++) begin
      rd_exp_rows[r] = '0;
      for (int c = 0; c < COLS; c++) begin
        int e;
        e = mask_model[r][c] ? 0 : (p.cnt[r][c] > 3 ? 3 : p.cnt[r][c]);
        rd_exp_rows[r][c*CNT_W +: CNT_W] = CNT_W'(e);
        if (e != 0) nhit++;
      end
    end
    rd_exp_hdr.frame_id   = FRAME_ID_W'(id);
    rd_exp_hdr.valid      = (nhit >= THRESHOLD);
    rd_exp_hdr.hit_pixels = HITCNT_W'(nhit);
    for (int q = 0; q < N_TDC; q++) begin
      rd_exp_hdr.tdc_fired[q] = p.fired[q];
      rd_exp_hdr.tdc_code[q]  = p.fired[q] ? TDC_CODE_W'(p.first[q] / TDC_BIN_PS) : '0;
      if (p.fired[q]) n_tdc_fired[q]++; else n_tdc_empty++;
    end
    if (rd_exp_hdr.valid) n_accept++; else n_reject++;
    rd_emit = !(val_en_tb && !rd_exp_hdr.valid);
  endtask

  // Output monitor and frame scheduler.
  always @(posedge clk) begin
    if (rst_n) begin
      if (row_valid) begin
        check("row while a frame is expected", 64'(rd_pending && rd_emit), 1);
        check("row_addr", 64'(row_addr), 64'(rd_row));
        check($sformatf("row %0d data", rd_row), row_data, rd_exp_rows[rd_row]);
        check("hdr_valid only on row 0", 64'(hdr_valid), 64'(rd_row == 0));
        if (hdr_valid) begin
          check("hdr.frame_id", 64'(hdr.frame_id), 64'(rd_exp_hdr.frame_id));
          check("hdr.valid", 64'(hdr.valid), 64'(rd_exp_hdr.valid));
          check("hdr.hit_pixels", 64'(hdr.hit_pixels), 64'(rd_exp_hdr.hit_pixels));
          check("hdr.tdc_fired", 64'(hdr.tdc_fired), 64'(rd_exp_hdr.tdc_fired));
          for (int q = 0; q < N_TDC; q++)
            check($sformatf("hdr.tdc_code[%0d]", q), 64'(hdr.tdc_code[q]), 64'(rd_exp_hdr.tdc_code[q]));
        end
        rd_row++;
        if (rd_row == ROWS) n_frames_read++;
      end
      if (frame_suppressed) begin
        n_suppressed++;
        check("suppressed frame failed validation", 64'(rd_pending && !rd_emit), 1);
      end
      if (frame_end) begin
        if (rd_pending && rd_emit) check("all rows of a frame read", 64'(rd_row), ROWS);
        expect_frame(plan, exp_id);
        exp_id++;
        rd_pending = 1;
        rd_row = 0;
        frames++;
        if (frames < N_FRAMES - 2) make_frame(plan, $time, frames);
        else begin
          foreach (plan.cnt[r, c]) plan.cnt[r][c] = 0;
          foreach (plan.fired[q]) plan.fired[q] = 0;
        end
      end
    end
  end

  initial begin
    int t_run;
    foreach (mask_model[r, c]) mask_model[r][c] = 0;
    foreach (plan.cnt[r, c]) plan.cnt[r][c] = 0;
    foreach (plan.fired[q]) plan.fired[q] = 0;
    foreach (n_tdc_fired[q]) n_tdc_fired[q] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Mask pixels (5,5) and (20,27).
    mask_model[5][5] = 1;
    mask_model[20][27] = 1;
    cfg_write(8'h05, 32'h0000_0020);
    cfg_write(8'h14, 32'h0800_0000);
    cfg_write(8'h21, THRESHOLD);
    cfg_addr = 8'h05; #1 check("mask row 5 readback", 64'(cfg_rdata), 64'h20);
    cfg_addr = 8'h21; #1 check("threshold readback", 64'(cfg_rdata), THRESHOLD);
    cfg_write(8'h20, 32'h1);           // run, validation suppression off
    t_run = int'($time / (2 * HALF));
    // First half without suppression, second half with it.
    wait (frames == N_FRAMES / 2);
    @(negedge clk);
    cfg_write(8'h20, 32'h3);
    val_en_tb = 1;                     // applies from the frame ending next
    wait (frames == N_FRAMES);
    @(negedge clk);
    check("frame rate: cycles per frame",
          64'((int'($time / (2 * HALF)) - t_run) / frames), FRAME_CYCLES);
    check("masking happened", 64'(n_masked_hits > 0), 1);
    check("saturation happened", 64'(n_saturated > 0), 1);
    for (int q = 0; q < N_TDC; q++) check($sformatf("TDC %0d fired", q), 64'(n_tdc_fired[q] > 0), 1);
    check("an empty TDC frame happened", 64'(n_tdc_empty > 0), 1);
    check("validation accepted a frame", 64'(n_accept > 0), 1);
    check("validation rejected a frame", 64'(n_reject > 0), 1);
    check("a frame was suppressed", 64'(n_suppressed > 0), 1);
    $display("frames=%0d read=%0d suppressed=%0d accepted=%0d rejected=%0d masked_hits=%0d saturated=%0d tdc_fired=%0d/%0d/%0d/%0d tdc_empty=%0d",
             frames, n_frames_read, n_suppressed, n_accept, n_reject, n_masked_hits, n_saturated,
             n_tdc_fired[0], n_tdc_fired[1], n_tdc_fired[2], n_tdc_fired[3], n_tdc_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
