// uctm_pkg -- constants and types shared by the trigger/scaler/delay firmware.
//
// The sizes follow the module description: 8 discriminator inputs, a
// duplication memory of 2^8 x 10 bits feeding 10 delay/shaping channels,
// a truth-table memory of 2^10 x 8 bits giving 8 trigger equations of which
// 4 leave the chip, 24-bit scalers, 13-bit delays and widths, a 32-bit run
// duration in 1 ms steps and a 100 MHz trigger clock.
//
// The register map (REG_* / region constants below) is this design's own:
// the micro-controller bus of the module is not documented, so a simple
// word-addressed bus with 32-bit data is used.
package uctm_pkg;

  // ---- sizes -----------------------------------------------------------
  localparam int unsigned N_IN      = 8;    // discriminator inputs
  localparam int unsigned N_DUP     = 10;   // duplicated signals / operands i0..i9
  localparam int unsigned N_EQ      = 8;    // trigger equations (S0..S3, C0..C3)
  localparam int unsigned N_OUT     = 4;    // equations routed to NIM outputs
  localparam int unsigned CNT_W     = 24;   // scaler width
  localparam int unsigned DLY_W     = 13;   // delay and width settings, in clock cycles
  localparam int unsigned DUR_W     = 32;   // run duration, in ms
  localparam int unsigned CLK_HZ    = 100_000_000;
  localparam int unsigned CYCLES_PER_MS = CLK_HZ / 1000;

  // ---- bus ---------------------------------------------------------------
  localparam int unsigned BUS_AW = 12;      // word address
  localparam int unsigned BUS_DW = 32;

  typedef logic [DLY_W-1:0] dly_t;

  // One delay/shaping channel setting.
  typedef struct packed {
    dly_t delay;  // 0 .. 2^13-1 clock cycles
    dly_t width;  // 1 .. 2^13-1 clock cycles (0 is treated as 1)
  } shape_cfg_t;

  // ---- register map (word addresses) ------------------------------------
  // 0x000-0x0FF  duplication matrix, one 10-bit word per input pattern
  // 0x400-0x7FF  trigger truth table, one 8-bit word per operand pattern
  // 0x800+ch     delay of channel ch (ch = 0..9)
  // 0x810+ch     width of channel ch
  // 0x820        control (write): bit0 start, bit1 stop, bit2 clear counters,
  //                               bit3 periodic 1 s counter reset enable (level)
  //              (read): bit3 periodic enable
  // 0x821        run duration in ms, 0 = free running
  // 0x822        status (read): bit0 run, bit1 dead time (any channel busy),
  //              bits 11:2 busy flag of channels 0..9
  // 0x823        elapsed run time in ms (read)
  // 0x830+i      input scaler i  (i = 0..7)
  // 0x838+i      output scaler i (i = 0..7)
  localparam logic [BUS_AW-1:0] DUP_BASE   = 12'h000;
  localparam logic [BUS_AW-1:0] LUT_BASE   = 12'h400;
  localparam logic [BUS_AW-1:0] DLY_BASE   = 12'h800;
  localparam logic [BUS_AW-1:0] WID_BASE   = 12'h810;
  localparam logic [BUS_AW-1:0] REG_CTRL   = 12'h820;
  localparam logic [BUS_AW-1:0] REG_DUR    = 12'h821;
  localparam logic [BUS_AW-1:0] REG_STAT   = 12'h822;
  localparam logic [BUS_AW-1:0] REG_ELAPS  = 12'h823;
  localparam logic [BUS_AW-1:0] CNT_IN_BASE  = 12'h830;
  localparam logic [BUS_AW-1:0] CNT_OUT_BASE = 12'h838;

  localparam int unsigned CTRL_START    = 0;
  localparam int unsigned CTRL_STOP     = 1;
  localparam int unsigned CTRL_CLEAR    = 2;
  localparam int unsigned CTRL_PERIODIC = 3;

endpackage
