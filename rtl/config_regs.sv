// config_regs: configuration registers of the dSiPM.
//
// The DAQ configures the chip; the published description does not give the
// protocol, so this design uses a simple synchronous parallel bus: cfg_we with
// cfg_addr and cfg_wdata writes one register at a rising clock edge, and
// cfg_rdata returns the register at cfg_addr combinationally.
//
// Address map:
//   0x00 .. ROWS-1  pixel mask of row r, bit c = column c (1 = masked). The
//                   bits are stored in the pixels themselves: a write drives
//                   mask_row_we[r] and mask_row_d for one cycle, and a read
//                   returns the row from the pixels' mask bits.
//   0x20            control: bit 0 run (frame sequencer on), bit 1 val_en
//                   (suppress frames that fail validation).
//   0x21            validation threshold (minimum number of hit pixels).
// Other addresses read as 0 and ignore writes. All registers reset to 0.
module config_regs #(
  parameter int unsigned ROWS = dsipm_pkg::ROWS_DEF,
  parameter int unsigned COLS = dsipm_pkg::COLS_DEF
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             cfg_we,
  input  logic [7:0]                       cfg_addr,
  input  logic [31:0]                      cfg_wdata,
  output logic [31:0]                      cfg_rdata,
  input  logic [ROWS-1:0][COLS-1:0]        masks,
  output logic [ROWS-1:0]                  mask_row_we,
  output logic [COLS-1:0]                  mask_row_d,
  output logic                             run,
  output logic                             val_en,
  output logic [dsipm_pkg::HITCNT_W-1:0]   val_threshold
);
  timeunit 1ps;
  timeprecision 1ps;
  import dsipm_pkg::*;

  if (ROWS > 32 || COLS > 32) begin : g_chk
    $error("config_regs: the address map holds at most 32 rows of 32 columns");
  end

  always_comb begin
    for (int r = 0; r < int'(ROWS); r++) begin
      mask_row_we[r] = cfg_we && (cfg_addr == CFG_ADDR_MASK0 + 8'(r));
    end
  end
  assign mask_row_d = cfg_wdata[COLS-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run           <= 1'b0;
      val_en        <= 1'b0;
      val_threshold <= '0;
    end else if (cfg_we) begin
      if (cfg_addr == CFG_ADDR_CTRL) begin
        run    <= cfg_wdata[0];
        val_en <= cfg_wdata[1];
      end
      if (cfg_addr == CFG_ADDR_THR) val_threshold <= cfg_wdata[HITCNT_W-1:0];
    end
  end

  always_comb begin
    cfg_rdata = '0;
    if (cfg_addr < 8'(ROWS)) begin
      cfg_rdata[COLS-1:0] = masks[cfg_addr[$clog2(ROWS+1)-1:0]];
    end else if (cfg_addr == CFG_ADDR_CTRL) begin
      cfg_rdata[1:0] = {val_en, run};
    end else if (cfg_addr == CFG_ADDR_THR) begin
      cfg_rdata[HITCNT_W-1:0] = val_threshold;
    end
  end

endmodule
