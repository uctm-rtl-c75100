// uctm_regs -- register interface between the USB micro-controller and the
// trigger firmware.
//
// The micro-controller configures every block and reads the scalers through
// this memory map (word addresses, 32-bit data; see uctm_pkg for the map):
// the duplication matrix and the truth table are written through the B ports
// of their memories, the ten delay/width pairs and the run duration are held
// here, and writes to the control word give one-clock start, stop and
// clear-counters pulses plus the periodic-reset enable. Reads return the
// memories, settings, run status, elapsed time and the 16 scalers; while the
// periodic reset is enabled the scalers read back the total of the last full
// second instead of the running count.
//
// Bus timing: a write is taken on the clock edge where bus_we is high. A
// read is requested with bus_re for one clock; bus_rdata is valid, with
// bus_rvalid high, during the next clock. bus_we and bus_re must not be high
// together.
//
// The paper names this interface and what it configures, but not its bus,
// its address map or its reset values: all three are this design's choices.
// After reset every channel has delay 0 and width 1 cycle and the run
// duration is 0 (free running).
module uctm_regs
  import uctm_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  // micro-controller bus
  input  logic [BUS_AW-1:0]          bus_addr,
  input  logic [BUS_DW-1:0]          bus_wdata,
  input  logic                       bus_we,
  input  logic                       bus_re,
  output logic [BUS_DW-1:0]          bus_rdata,
  output logic                       bus_rvalid,
  // duplication memory, port B
  output logic [N_IN-1:0]            dup_addr,
  output logic [N_DUP-1:0]           dup_wdata,
  output logic                       dup_we,
  input  logic [N_DUP-1:0]           dup_q,
  // truth-table memory, port B
  output logic [N_DUP-1:0]           lut_addr,
  output logic [N_EQ-1:0]            lut_wdata,
  output logic                       lut_we,
  input  logic [N_EQ-1:0]            lut_q,
  // delay/shaping settings
  output shape_cfg_t [N_DUP-1:0]     shape_cfg,
  // run control
  output logic                       start,
  output logic                       stop,
  output logic                       clear,
  output logic                       periodic_en,
  output logic [DUR_W-1:0]           duration_ms,
  // status
  input  logic                       run,
  input  logic                       dead,
  input  logic [N_DUP-1:0]           busy,
  input  logic [DUR_W-1:0]           elapsed_ms,
  input  logic [N_IN-1:0][CNT_W-1:0] cnt_in,
  input  logic [N_IN-1:0][CNT_W-1:0] held_in,
  input  logic [N_EQ-1:0][CNT_W-1:0] cnt_out,
  input  logic [N_EQ-1:0][CNT_W-1:0] held_out
);

  typedef enum logic [1:0] {RD_REG, RD_DUP, RD_LUT} rsel_t;

  logic is_dup, is_lut, is_reg;
  rsel_t            rsel_q;
  logic [BUS_DW-1:0] reg_rdata_q;

  assign is_dup = (bus_addr[BUS_AW-1:N_IN] == '0);            // 0x000-0x0FF
  assign is_lut = (bus_addr[BUS_AW-1:N_DUP] == 2'b01);        // 0x400-0x7FF
  assign is_reg = bus_addr[BUS_AW-1];                         // 0x800-0xFFF

  // memory B ports take the bus directly
  assign dup_addr  = bus_addr[N_IN-1:0];
  assign dup_wdata = bus_wdata[N_DUP-1:0];
  assign dup_we    = bus_we && is_dup;
  assign lut_addr  = bus_addr[N_DUP-1:0];
  assign lut_wdata = bus_wdata[N_EQ-1:0];
  assign lut_we    = bus_we && is_lut;

  // ---- writes -------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_DUP; k++) begin
        shape_cfg[k].delay <= '0;
        shape_cfg[k].width <= dly_t'(1);
      end
      start       <= 1'b0;
      stop        <= 1'b0;
      clear       <= 1'b0;
      periodic_en <= 1'b0;
      duration_ms <= '0;
    end else begin
      start <= 1'b0;
      stop  <= 1'b0;
      clear <= 1'b0;
      if (bus_we && is_reg) begin
        for (int k = 0; k < N_DUP; k++) begin
          if (bus_addr == DLY_BASE + BUS_AW'(k)) shape_cfg[k].delay <= bus_wdata[DLY_W-1:0];
          if (bus_addr == WID_BASE + BUS_AW'(k)) shape_cfg[k].width <= bus_wdata[DLY_W-1:0];
        end
        if (bus_addr == REG_CTRL) begin
          start       <= bus_wdata[CTRL_START];
          stop        <= bus_wdata[CTRL_STOP];
          clear       <= bus_wdata[CTRL_CLEAR];
          periodic_en <= bus_wdata[CTRL_PERIODIC];
        end
        if (bus_addr == REG_DUR) duration_ms <= bus_wdata[DUR_W-1:0];
      end
    end
  end

  // ---- reads --------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsel_q      <= RD_REG;
      reg_rdata_q <= '0;
      bus_rvalid  <= 1'b0;
    end else begin
      bus_rvalid  <= bus_re;
      rsel_q      <= is_dup ? RD_DUP : (is_lut ? RD_LUT : RD_REG);
      reg_rdata_q <= '0;
      if (is_reg) begin
        for (int k = 0; k < N_DUP; k++) begin
          if (bus_addr == DLY_BASE + BUS_AW'(k)) reg_rdata_q <= BUS_DW'(shape_cfg[k].delay);
          if (bus_addr == WID_BASE + BUS_AW'(k)) reg_rdata_q <= BUS_DW'(shape_cfg[k].width);
        end
        for (int i = 0; i < N_IN; i++)
          if (bus_addr == CNT_IN_BASE + BUS_AW'(i))
            reg_rdata_q <= BUS_DW'(periodic_en ? held_in[i] : cnt_in[i]);
        for (int i = 0; i < N_EQ; i++)
          if (bus_addr == CNT_OUT_BASE + BUS_AW'(i))
            reg_rdata_q <= BUS_DW'(periodic_en ? held_out[i] : cnt_out[i]);
        if (bus_addr == REG_CTRL)  reg_rdata_q <= BUS_DW'(periodic_en) << CTRL_PERIODIC;
        if (bus_addr == REG_DUR)   reg_rdata_q <= BUS_DW'(duration_ms);
        if (bus_addr == REG_STAT)  reg_rdata_q <= BUS_DW'({busy, dead, run});
        if (bus_addr == REG_ELAPS) reg_rdata_q <= BUS_DW'(elapsed_ms);
      end
    end
  end

  always_comb begin
    unique case (rsel_q)
      RD_DUP:  bus_rdata = BUS_DW'(dup_q);
      RD_LUT:  bus_rdata = BUS_DW'(lut_q);
      default: bus_rdata = reg_rdata_q;
    endcase
  end

  a_no_rw: assert property (@(posedge clk) disable iff (!rst_n) !(bus_we && bus_re))
    else $error("uctm_regs: read and write in the same cycle");

endmodule
