// tb_pixel_logic: self-checking test of one pixel's mask and hit counter.
//
// Drives pulses on spad_in (3 cycles high, 3 low) and checks against an
// independent count of the pulses driven: counting up to saturation at 3,
// restart at frame_clr (with and without a coincident edge), masking of both
// the counter and hit_raw, and the 2..3-cycle counting latency.
module tb_pixel_logic;
  timeunit 1ps;
  timeprecision 1ps;

  logic clk = 1'b0, rst_n = 1'b0;
  logic spad_in = 1'b0, mask_we = 1'b0, mask_d = 1'b0, frame_clr = 1'b0;
  logic mask_q, hit_raw;
  logic [1:0] count;
  int checks = 0, failures = 0;

  pixel_logic #(.CNT_W(2)) dut (.*);

  always #5000 clk = ~clk;

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic pulse();
    @(negedge clk) spad_in = 1'b1;
    repeat (3) @(negedge clk);
    spad_in = 1'b0;
    repeat (3) @(negedge clk);
  endtask

  task automatic clear_frame();
    @(negedge clk) frame_clr = 1'b1;
    @(negedge clk) frame_clr = 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    check("count after reset", 32'(count), 0);
    check("mask after reset", 32'(mask_q), 0);

    // Counting and saturation.
    for (int k = 1; k <= 6; k++) begin
      pulse();
      check($sformatf("count after %0d pulses", k), 32'(count), (k > 3) ? 3 : k);
    end

    // Frame restart.
    clear_frame();
    check("count after frame_clr", 32'(count), 0);
    pulse();
    check("count in new frame", 32'(count), 1);

    // Latency of counting: rising edge at a negedge, count visible within 3 posedges.
    clear_frame();
    @(negedge clk) spad_in = 1'b1;
    lat = 0;
    while (count == 0 && lat < 10) begin
      @(posedge clk); #1; lat++;
    end
    check("counting latency in cycles", 32'(lat), 3);
    repeat (3) @(negedge clk) spad_in = 1'b0;
    repeat (3) @(negedge clk);

    // Edge in the frame_clr cycle counts into the new frame.
    clear_frame();
    pulse(); pulse();
    check("count before boundary", 32'(count), 2);
    @(negedge clk) spad_in = 1'b1;      // edge_det high after the 2nd posedge
    @(negedge clk);
    @(negedge clk);
    frame_clr = 1'b1;                   // the 3rd posedge counts and clears
    @(negedge clk) frame_clr = 1'b0;
    check("coincident edge counted in new frame", 32'(count), 1);
    repeat (3) @(negedge clk) spad_in = 1'b0;

    // Masking.
    clear_frame();
    @(negedge clk) begin mask_we = 1'b1; mask_d = 1'b1; end
    @(negedge clk) mask_we = 1'b0;
    check("mask set", 32'(mask_q), 1);
    spad_in = 1'b1; #1;
    check("hit_raw masked", 32'(hit_raw), 0);
    spad_in = 1'b0;
    pulse(); pulse();
    check("masked pixel does not count", 32'(count), 0);
    @(negedge clk) begin mask_we = 1'b1; mask_d = 1'b0; end
    @(negedge clk) mask_we = 1'b0;
    check("mask cleared", 32'(mask_q), 0);
    spad_in = 1'b1; #1;
    check("hit_raw follows pulse", 32'(hit_raw), 1);
    spad_in = 1'b0;
    pulse();
    check("unmasked pixel counts again", 32'(count), 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
