// tb_tdc_model: self-checking test of the behavioural TDC model.
//
// Frames are marked by a one-cycle arm pulse. In each frame the test drives
// one or more rising edges of start at random picosecond offsets from the
// frame start and, after the next arm, checks code = floor(offset / 95 ps) of
// the first edge and fired = 1. It also checks an empty frame (fired = 0) and
// saturation at 4095 for a hit later than 4096 bins.
module tb_tdc_model;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int PERIOD = 10000;   // ps

  logic clk = 1'b0, rst_n = 1'b0, arm = 1'b0, start = 1'b0;
  logic [11:0] code;
  logic fired;
  int checks = 0, failures = 0;

  tdc_model #(.BIN_PS(95), .CODE_W(12)) dut (.*);

  always #(PERIOD/2) clk = ~clk;

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Arms at the next posedge; returns the time of that edge.
  task automatic do_arm(output time t_edge);
    @(negedge clk) arm = 1'b1;
    @(posedge clk) t_edge = $time;
    @(negedge clk) arm = 1'b0;
  endtask

  initial begin
    time t0, t_hit, dummy;
    int off, nh;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    do_arm(t0);
    for (int f = 0; f < 300; f++) begin
      // First hit between 6 ns and 300 ns after the frame start, off the clock edges.
      off = $urandom_range(6000, 300000);
      if ((off % PERIOD) < 50) off += 100;
      if ((off % PERIOD) > PERIOD/2 - 50 && (off % PERIOD) < PERIOD/2 + 50) off += 200;
      nh = (f % 5 == 4) ? 0 : 1 + (f % 3);
      fork
        begin
          if (nh > 0) begin
            #(t0 + off - $time);
            start = 1'b1;
            #700 start = 1'b0;
            for (int k = 1; k < nh; k++) begin
              #(1000 + 100 * k) start = 1'b1;
              #700 start = 1'b0;
            end
          end
        end
      join
      // Frame of 32 cycles from t0.
      #(t0 + 32 * PERIOD - PERIOD/2 - $time);
      arm = 1'b1;
      @(posedge clk) t_hit = $time;
      #1;
      check("fired", 32'(fired), (nh > 0) ? 1 : 0);
      check("code", 32'(code), (nh > 0) ? off / 95 : 0);
      t0 = t_hit;
      @(negedge clk) arm = 1'b0;
    end
    // Saturation: hit 450 ns after the frame start.
    #(t0 + 450000 - $time) start = 1'b1;
    #700 start = 1'b0;
    do_arm(dummy);
    #1;
    check("saturated code", 32'(code), 4095);
    check("saturated fired", 32'(fired), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
