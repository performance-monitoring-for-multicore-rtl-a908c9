// abacus_ctrl: the ABACUS core control logic.
//
// Holds every software-visible setting and routes register reads:
//   * global control: arm (enable) the monitor, clear all units, start and
//     stop by command, per-CPU monitor enable, watch address;
//   * the trigger (abacus_trigger, instantiated here) that opens and closes
//     the monitoring window on cycles, a data access, an executed
//     instruction or a command;
//   * the time stamp: cycles since the monitor was armed, zeroed by a clear;
//   * DMA settings (enable, buffer base and size) and the interrupt mask;
//   * the configuration of each unit (abacus_pkg::unit_cfg_t: enable, CPU
//     mask, process filter, address window, bin shift), so that units can be
//     set up and restarted at run time without touching the hardware.
// Register writes take effect on the next clock edge. CTRL bits 1..3 (clear,
// start, stop) are commands: they produce a one-cycle pulse and read back 0.
// Reads are combinational from reg_addr; unit results are read through
// unit_rd_addr (= reg_addr[11:2]) from the unit selected by reg_addr[15:12].
// Register map (byte addresses) is listed in abacus_pkg.
// The kinds of setting (reset, enable, disable per process or address range,
// start/stop conditions, time stamps, per-unit CPU subsets) follow the
// published description; the map, encodings and reset values are this
// design's own. Reset: every unit with every CPU in its mask and the full
// address window, all CPUs enabled, DMA off, trigger modes IMMEDIATE. By
// default the monitor is disarmed and all units disabled; the parameters
// BOOT_ARM and BOOT_UNIT_EN give a boot-time configuration instead, so that
// monitoring starts by itself two cycles after reset (the published design
// can be booted with a set configuration and run from power-up). ID reads
// {16'hABAC, UNIT_PRESENT, N_UNITS, N_CPUS} so a driver can see which units
// were built.
module abacus_ctrl
  import abacus_pkg::*;
#(
  parameter int unsigned     N_CPUS       = 4,
  parameter logic [N_UNITS-1:0] UNIT_PRESENT = '1,  // units built into this instance
  parameter bit              BOOT_ARM     = 1'b0, // armed straight out of reset
  parameter logic [N_UNITS-1:0] BOOT_UNIT_EN = '0   // units enabled out of reset
) (
  input  logic                clk,
  input  logic                rst_n,
  // register access from the bus interface
  input  logic                reg_wr,
  input  logic [REG_AW-1:0]   reg_addr,
  input  logic [31:0]         reg_wdata,
  output logic [31:0]         reg_rdata,
  // probes (registered, from abacus_cpu_snoop) for the trigger
  input  cpu_dbg_t            dbg [N_CPUS],
  // monitoring window and time stamp
  output logic                running,
  output logic                clr,
  output logic [TS_W-1:0]     ts,
  output logic                start_pulse,
  output logic                stop_pulse,
  output logic [N_CPUS-1:0]   cpu_en,
  output logic [ADDR_W-1:0]   watch_addr,
  // unit configuration and result read port
  output unit_cfg_t           unit_cfg [N_UNITS],
  output logic [9:0]          unit_rd_addr,
  input  logic [31:0]         unit_rd_data [N_UNITS],
  // DMA
  output logic                dma_en,
  output logic [31:0]         dma_base,
  output logic [31:0]         dma_size,
  input  logic [31:0]         dma_wptr,
  // interrupt system
  output logic [N_IRQ-1:0]    irq_mask,
  output logic [N_IRQ-1:0]    irq_clr,
  input  logic [N_IRQ-1:0]    irq_status
);

  logic        arm, cmd_start, cmd_stop;
  trig_mode_e  start_mode, stop_mode;
  logic [31:0] start_val, stop_val;
  logic [1:0]  trig_state;

  // unit configuration window 0x100..0x17F, 0x20 bytes per unit
  wire       is_cfg = (reg_addr[15:8] == 8'd1) && (32'(reg_addr[7:5]) < N_UNITS);
  wire [2:0] cfg_u  = reg_addr[7:5];
  wire [1:0] cfg_f = reg_addr[3:2];

  // ---------------------------------------------------------------- writes
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      arm        <= BOOT_ARM;
      clr        <= 1'b0;
      cmd_start  <= 1'b0;
      cmd_stop   <= 1'b0;
      start_mode <= TRIG_IMMEDIATE;
      stop_mode  <= TRIG_IMMEDIATE;
      start_val  <= '0;
      stop_val   <= '0;
      irq_mask   <= '0;
      watch_addr <= '0;
      cpu_en     <= '1;
      dma_en     <= 1'b0;
      dma_base   <= '0;
      dma_size   <= 32'd4096;
      for (int u = 0; u < N_UNITS; u++) begin
        unit_cfg[u]          <= '0;
        unit_cfg[u].en       <= BOOT_UNIT_EN[u] & UNIT_PRESENT[u];
        unit_cfg[u].cpu_mask <= '1;
        unit_cfg[u].addr_hi  <= '1;
      end
    end else begin
      clr       <= 1'b0;
      cmd_start <= 1'b0;
      cmd_stop  <= 1'b0;
      if (reg_wr) begin
        if (is_cfg) begin
          unique case (cfg_f)
            2'd0: begin
              unit_cfg[cfg_u].en       <= reg_wdata[0];
              unit_cfg[cfg_u].pid_en   <= reg_wdata[1];
              unit_cfg[cfg_u].cpu_mask <= reg_wdata[15:8];
              unit_cfg[cfg_u].shift    <= reg_wdata[20:16];
            end
            2'd1: unit_cfg[cfg_u].pid     <= reg_wdata[PID_W-1:0];
            2'd2: unit_cfg[cfg_u].addr_lo <= reg_wdata;
            2'd3: unit_cfg[cfg_u].addr_hi <= reg_wdata;
          endcase
        end else begin
          unique case (reg_addr)
            R_CTRL: begin
              arm       <= reg_wdata[0];
              clr       <= reg_wdata[1];
              cmd_start <= reg_wdata[2];
              cmd_stop  <= reg_wdata[3];
            end
            R_START_MODE: start_mode <= trig_mode_e'(reg_wdata[2:0]);
            R_START_VAL:  start_val  <= reg_wdata;
            R_STOP_MODE:  stop_mode  <= trig_mode_e'(reg_wdata[2:0]);
            R_STOP_VAL:   stop_val   <= reg_wdata;
            R_IRQ_MASK:   irq_mask   <= reg_wdata[N_IRQ-1:0];
            R_WATCH_ADDR: watch_addr <= reg_wdata;
            R_CPU_EN:     cpu_en     <= reg_wdata[N_CPUS-1:0];
            R_DMA_CTRL:   dma_en     <= reg_wdata[0];
            R_DMA_BASE:   dma_base   <= reg_wdata;
            R_DMA_SIZE:   dma_size   <= reg_wdata;
            default: ;
          endcase
        end
      end
    end
  end

  assign irq_clr = (reg_wr && reg_addr == R_IRQ_STATUS) ? reg_wdata[N_IRQ-1:0] : '0;

  // ------------------------------------------------------------ time stamp
  always_ff @(posedge clk) begin
    if (!rst_n || clr || !arm) ts <= '0;
    else                       ts <= ts + 1'b1;
  end

  // ---------------------------------------------------------------- trigger
  abacus_trigger #(.N_CPUS(N_CPUS)) u_trigger (
    .clk, .rst_n, .arm, .clr,
    .start_mode, .start_val, .stop_mode, .stop_val,
    .cmd_start, .cmd_stop, .dbg,
    .running, .state_o(trig_state), .start_pulse, .stop_pulse
  );

  // ------------------------------------------------------------------ reads
  assign unit_rd_addr = reg_addr[11:2];

  always_comb begin
    reg_rdata = '0;
    if (reg_addr[15:12] != 4'd0) begin
      for (int u = 0; u < N_UNITS; u++)
        if (32'(reg_addr[15:12]) == u + 1) reg_rdata = unit_rd_data[u];
    end else if (is_cfg) begin
      unique case (cfg_f)
        2'd0: reg_rdata = {11'b0, unit_cfg[cfg_u].shift, unit_cfg[cfg_u].cpu_mask,
                           6'b0, unit_cfg[cfg_u].pid_en, unit_cfg[cfg_u].en};
        2'd1: reg_rdata = 32'(unit_cfg[cfg_u].pid);
        2'd2: reg_rdata = unit_cfg[cfg_u].addr_lo;
        2'd3: reg_rdata = unit_cfg[cfg_u].addr_hi;
      endcase
    end else begin
      unique case (reg_addr)
        R_CTRL:       reg_rdata = {31'b0, arm};
        R_STATUS:     reg_rdata = {28'b0, trig_state, arm, running};
        R_TS_LO:      reg_rdata = ts[31:0];
        R_TS_HI:      reg_rdata = ts[63:32];
        R_START_MODE: reg_rdata = 32'(start_mode);
        R_START_VAL:  reg_rdata = start_val;
        R_STOP_MODE:  reg_rdata = 32'(stop_mode);
        R_STOP_VAL:   reg_rdata = stop_val;
        R_IRQ_STATUS: reg_rdata = 32'(irq_status);
        R_IRQ_MASK:   reg_rdata = 32'(irq_mask);
        R_WATCH_ADDR: reg_rdata = watch_addr;
        R_CPU_EN:     reg_rdata = 32'(cpu_en);
        R_DMA_CTRL:   reg_rdata = {31'b0, dma_en};
        R_DMA_BASE:   reg_rdata = dma_base;
        R_DMA_SIZE:   reg_rdata = dma_size;
        R_DMA_WPTR:   reg_rdata = dma_wptr;
        R_ID:         reg_rdata = {16'hABAC, 5'(UNIT_PRESENT), 3'(N_UNITS), 8'(N_CPUS)};
        default:      reg_rdata = '0;
      endcase
    end
  end

endmodule
