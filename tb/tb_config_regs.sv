// tb_config_regs: self-checking test of the configuration registers.
//
// Writes the control and threshold registers and reads them back, checks the
// one-hot mask row strobes and mask data for every row address, checks that
// mask rows read back from the `masks` input, and that unknown addresses read
// as zero and change nothing.
module tb_config_regs;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int ROWS = 32, COLS = 32;

  logic clk = 1'b0, rst_n = 1'b0, cfg_we = 1'b0;
  logic [7:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0, cfg_rdata;
  logic [ROWS-1:0][COLS-1:0] masks;
  logic [ROWS-1:0] mask_row_we;
  logic [COLS-1:0] mask_row_d;
  logic run, val_en;
  logic [10:0] val_threshold;
  int checks = 0, failures = 0;

  config_regs #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5000 clk = ~clk;

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk) begin cfg_we = 1'b1; cfg_addr = a; cfg_wdata = d; end
    @(negedge clk) cfg_we = 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) masks[r] = $urandom;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check("run reset", 32'(run), 0);
    check("val_en reset", 32'(val_en), 0);
    check("threshold reset", 32'(val_threshold), 0);

    wr(8'h20, 32'h1);
    check("run set", 32'(run), 1);
    check("val_en clear", 32'(val_en), 0);
    wr(8'h20, 32'h3);
    check("val_en set", 32'(val_en), 1);
    wr(8'h21, 32'd17);
    check("threshold", 32'(val_threshold), 17);
    cfg_addr = 8'h20; #1 check("read ctrl", cfg_rdata, 32'h3);
    cfg_addr = 8'h21; #1 check("read threshold", cfg_rdata, 32'd17);
    wr(8'h55, 32'hffff_ffff);
    check("unknown addr keeps threshold", 32'(val_threshold), 17);
    check("unknown addr keeps ctrl", 32'({val_en, run}), 3);
    cfg_addr = 8'h55; #1 check("read unknown", cfg_rdata, 0);

    // Mask strobes, one-hot per row address.
    for (int r = 0; r < ROWS; r++) begin
      logic [31:0] d;
      d = $urandom;
      @(negedge clk) begin cfg_we = 1'b1; cfg_addr = 8'(r); cfg_wdata = d; end
      #1;
      check($sformatf("mask_row_we for row %0d", r), 32'(mask_row_we), 32'(1) << r);
      check($sformatf("mask_row_d for row %0d", r), 32'(mask_row_d), d);
      check($sformatf("mask readback row %0d", r), cfg_rdata, 32'(masks[r]));
    end
    @(negedge clk) cfg_we = 1'b0;
    #1 check("no strobe without write", 32'(mask_row_we), 0);
    cfg_we = 1'b1; cfg_addr = 8'h20; cfg_wdata = 32'h0; #1;
    check("no strobe for ctrl write", 32'(mask_row_we), 0);
    @(negedge clk) cfg_we = 1'b0;
    check("run cleared", 32'(run), 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
