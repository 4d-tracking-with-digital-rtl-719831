// tb_pixel_matrix: self-checking test of the 32 x 32 pixel array.
//
// Writes a random mask row by row, then gives every pixel a random number of
// pulses (0..5) in parallel and compares each counter with min(n, 3), or 0
// for a masked pixel. It also drives random static patterns and checks the
// four quarter ORs that start the TDCs, and that masks and frame_clr act on
// every pixel.
module tb_pixel_matrix;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int ROWS = 32, COLS = 32, CNT_W = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [ROWS-1:0][COLS-1:0] spad_in = '0;
  logic [ROWS-1:0] mask_row_we = '0;
  logic [COLS-1:0] mask_row_d = '0;
  logic frame_clr = 1'b0;
  logic [ROWS-1:0][COLS-1:0][CNT_W-1:0] counts;
  logic [ROWS-1:0][COLS-1:0] masks;
  logic [3:0] group_hit;

  int checks = 0, failures = 0;
  logic [ROWS-1:0][COLS-1:0] mask_model;
  int npulse [ROWS][COLS];

  pixel_matrix #(.ROWS(ROWS), .COLS(COLS), .CNT_W(CNT_W)) dut (.*);

  always #5000 clk = ~clk;

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frame();
    // Frame boundary first.
    @(negedge clk) frame_clr = 1'b1;
    @(negedge clk) frame_clr = 1'b0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) npulse[r][c] = $urandom_range(0, 5);
    for (int slot = 0; slot < 5; slot++) begin
      @(negedge clk);
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) spad_in[r][c] = (slot < npulse[r][c]);
      repeat (3) @(negedge clk);
      spad_in = '0;
      repeat (3) @(negedge clk);
    end
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        int e;
        e = mask_model[r][c] ? 0 : (npulse[r][c] > 3 ? 3 : npulse[r][c]);
        check($sformatf("count[%0d][%0d]", r, c), 32'(counts[r][c]), e);
      end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Random mask, written one row per cycle.
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      mask_model[r] = COLS'($urandom) & COLS'($urandom);  // about 1 in 4 masked
      mask_row_we = '0;
      mask_row_we[r] = 1'b1;
      mask_row_d = mask_model[r];
    end
    @(negedge clk) mask_row_we = '0;
    for (int r = 0; r < ROWS; r++) check($sformatf("mask row %0d", r), 32'(masks[r]), 32'(mask_model[r]));

    run_frame();
    run_frame();

    // Quarter ORs for random sparse patterns, including single-pixel hits.
    for (int t = 0; t < 200; t++) begin
      logic [3:0] exp;
      @(negedge clk);
      spad_in = '0;
      exp = '0;
      for (int k = 0; k < (t % 4) + 1; k++) begin
        int r, c;
        r = $urandom_range(0, ROWS-1);
        c = $urandom_range(0, COLS-1);
        spad_in[r][c] = 1'b1;
        if (!mask_model[r][c]) exp[2 * (r >= ROWS/2) + (c >= COLS/2)] = 1'b1;
      end
      #1;
      check("group_hit", 32'(group_hit), 32'(exp));
    end
    spad_in = '0;

    // Clear all masks and check every pixel now counts.
    @(negedge clk) begin mask_row_we = '1; mask_row_d = '0; end
    @(negedge clk) mask_row_we = '0;
    mask_model = '0;
    run_frame();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
