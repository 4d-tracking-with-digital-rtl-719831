// tb_validation_logic: self-checking test of the hit-multiplicity validation.
//
// Applies random hit maps of chosen density (from empty to full) and random
// thresholds, pulses eval, and checks hit_pixels against a count of nonzero
// counters made by the test, and frame_ok against hit_pixels >= threshold.
// Also checks that the outputs hold while eval is low.
module tb_validation_logic;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int ROWS = 32, COLS = 32, CNT_W = 2;

  logic clk = 1'b0, rst_n = 1'b0, eval = 1'b0;
  logic [ROWS-1:0][COLS-1:0][CNT_W-1:0] counts = '0;
  logic [10:0] threshold = '0, hit_pixels;
  logic frame_ok;
  int checks = 0, failures = 0;

  validation_logic #(.ROWS(ROWS), .COLS(COLS), .CNT_W(CNT_W)) dut (.*);

  always #5000 clk = ~clk;

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, pct, nok = 0, nrej = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      pct = (t == 0) ? 0 : (t == 1) ? 100 : $urandom_range(0, 10) * (t % 3 == 0 ? 10 : 1);
      n = 0;
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          if ($urandom_range(0, 99) < pct) begin
            counts[r][c] = CNT_W'($urandom_range(1, 3));
            n++;
          end else counts[r][c] = '0;
        end
      threshold = 11'($urandom_range(0, 60));
      eval = 1'b1;
      @(negedge clk) eval = 1'b0;
      check("hit_pixels", 32'(hit_pixels), n);
      check("frame_ok", 32'(frame_ok), (n >= threshold) ? 1 : 0);
      if (n >= threshold) nok++; else nrej++;
      // Outputs hold without eval.
      counts = '0;
      @(negedge clk);
      check("hit_pixels holds", 32'(hit_pixels), n);
    end
    check("both outcomes seen", 32'(nok > 0 && nrej > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
