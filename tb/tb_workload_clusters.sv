// tb_workload_clusters: the three detector configurations run on the chip.
//
// The sensor was operated bare, where a charged particle fires about one
// pixel, and with a 100 um or 200 um thin scintillator glued on top, where it
// fires a cluster of about 20-40 pixels that grows with thickness. Dark
// counts fire one or two pixels in any configuration. This test runs the
// full-size chip with validation suppression on, once per configuration:
//   bare      particle = 1 pixel,                 threshold 1
//   100 um    particle = disc r^2 <= 5 (21 pix),  threshold 5
//   200 um    particle = disc r^2 <= 10 (37 pix), threshold 5
// Every frame's rows, header and TDC codes are predicted from the pulses
// driven and checked. For the scintillator runs it also checks the event
// selection: every frame with a particle is sent and every frame with dark
// counts only is suppressed. The bare run shows why the threshold must stay
// at 1 there: particle and noise frames look alike.
module tb_workload_clusters;
  timeunit 1ps;
  timeprecision 1ps;
  import dsipm_pkg::*;

  localparam int ROWS = 32, COLS = 32, CNT_W = 2, FRAME_CYCLES = 32;
  localparam int HALF = 5208;                 // ~96 MHz clock
  int THRESHOLD = 1;
  int R2 = 0;                          // cluster disc radius squared
  localparam int N_FRAMES = 60;         // per configuration

  typedef struct {
    int        cnt   [ROWS][COLS];   // pulses driven per pixel
    bit        fired [N_TDC];
    longint    first [N_TDC];        // ps from frame start of first unmasked hit
    bit        particle;             // frame holds a particle cluster
    int        cluster;              // unmasked pixels of the cluster
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
  bit rd_particle = 0;
  int n_particle_sent, n_particle_lost, n_noise_sent, n_noise_supp, n_cluster_min, n_cluster_max;

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
    repeat (3 * (N_FRAMES + 4) * FRAME_CYCLES + 2000) @(posedge clk);
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
    p.particle = 0;
    p.cluster = 0;
    // Particle cluster in 3 frames out of 4.
    if (f % 4 != 3) begin
      int cr, cc;
      longint base;
      cr = $urandom_range(0, ROWS-1);
      cc = $urandom_range(0, COLS-1);
      base = longint'($urandom_range(20000, 250000));
      for (int r = cr - 4; r <= cr + 4; r++)
        for (int c = cc - 4; c <= cc + 4; c++)
          if (r >= 0 && r < ROWS && c >= 0 && c < COLS &&
              (r - cr) * (r - cr) + (c - cc) * (c - cc) <= R2) begin
            used[r][c] = 1;
            p.particle = 1;
            if (!mask_model[r][c]) p.cluster++;
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
    rd_particle = p.particle;
    if (p.particle) begin
      if (p.cluster < n_cluster_min) n_cluster_min = p.cluster;
      if (p.cluster > n_cluster_max) n_cluster_max = p.cluster;
    end
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
          if (rd_particle) n_particle_sent++; else n_noise_sent++;
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
        if (rd_particle) n_particle_lost++; else n_noise_supp++;
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
          plan.particle = 0;
        end
      end
    end
  end

  initial begin
    foreach (mask_model[r, c]) mask_model[r][c] = 0;
    foreach (plan.cnt[r, c]) plan.cnt[r][c] = 0;
    foreach (plan.fired[q]) plan.fired[q] = 0;
    plan.particle = 0;
    foreach (n_tdc_fired[q]) n_tdc_fired[q] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    mask_model[5][5] = 1;
    mask_model[20][27] = 1;
    cfg_write(8'h05, 32'h0000_0020);
    cfg_write(8'h14, 32'h0800_0000);
    for (int w = 0; w < 3; w++) begin
      string name;
      name = (w == 0) ? "bare" : (w == 1) ? "100um" : "200um";
      R2 = (w == 0) ? 0 : (w == 1) ? 5 : 10;
      THRESHOLD = (w == 0) ? 1 : 5;
      n_particle_sent = 0; n_particle_lost = 0; n_noise_sent = 0; n_noise_supp = 0;
      n_cluster_min = ROWS * COLS; n_cluster_max = 0;
      cfg_write(8'h21, 32'(THRESHOLD));
      cfg_write(8'h20, 32'h3);         // run with suppression of invalid frames
      val_en_tb = 1;
      wait (frames == N_FRAMES);
      @(negedge clk);
      cfg_write(8'h20, 32'h0);
      repeat (2 * FRAME_CYCLES) @(negedge clk);
      $display("%s: particle frames sent=%0d lost=%0d, noise-only frames sent=%0d suppressed=%0d, particle cluster size %0d..%0d pixels",
               name, n_particle_sent, n_particle_lost, n_noise_sent, n_noise_supp, n_cluster_min, n_cluster_max);
      check({name, ": particle frames sent"}, 64'(n_particle_sent > 20), 1);
      check({name, ": no particle frame lost"}, 64'(n_particle_lost), 0);
      if (w == 0) begin
        check("bare: noise-only frames pass a 1-pixel cut", 64'(n_noise_sent > 0), 1);
        check("bare: cluster size 1", 64'(n_cluster_max), 1);
      end else begin
        check({name, ": noise-only frames suppressed"}, 64'(n_noise_supp > 0), 1);
        check({name, ": no noise-only frame sent"}, 64'(n_noise_sent), 0);
      end
      // Restart the bookkeeping for the next configuration.
      frames = 0;
      exp_id = 0;
      rd_pending = 0;
      plan.particle = 0;
      foreach (plan.cnt[r, c]) plan.cnt[r][c] = 0;
      foreach (plan.fired[q]) plan.fired[q] = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
