// abacus_top: ABACUS, a hardware performance monitor for multicore systems.
//
// ABACUS sits beside the processors on the system bus and watches probe
// signals of every CPU without any help from the software being measured.
// Three layers, as in the published architecture:
//   External interfaces  abacus_bus_if (AXI4-Lite register slave),
//                        abacus_dma (writes trace records to a kernel page
//                        in main memory), abacus_irq (interrupt line),
//                        abacus_cpu_snoop (registered CPU probes)
//   Control logic        abacus_ctrl (registers, trigger, time stamp)
//   Monitoring units     0 abacus_trace_unit    time-stamped access trace
//                        1 abacus_latency_unit  access latency histogram
//                        2 abacus_stall_unit    stall cycles per CPU
//                        3 abacus_mem_hist_unit accesses per address region
//                        4 abacus_mem_hist_unit code profile: instructions
//                                               executed per code region
// Each unit has its own abacus_event_filter, so each can listen to its own
// subset of CPUs, one process and one address window. Events reach the units
// one cycle after they occur on the CPU probes (snoop register).
// Ports: clk/rst_n (synchronous, active-low reset; the monitor runs on the
// processors' clock), the AXI4-Lite slave, one cpu_dbg_t probe bundle per
// CPU, the DMA word-write port towards the memory controller and irq towards
// the system interrupt controller. N_CPUS may be 1..8.
// The block structure and the unit functions follow the published design;
// the memory reuse and instruction mix units it lists as examples are not
// included because their function is not described. The code profile as an
// instruction-address histogram is this design's reading of a unit the
// published design only names.
module abacus_top
  import abacus_pkg::*;
#(
  parameter int unsigned        N_CPUS       = 4,
  parameter int unsigned        TRACE_DEPTH  = 512,
  parameter int unsigned        LAT_BINS     = 32,
  parameter int unsigned        HIST_BINS    = 64,
  parameter int unsigned        PROF_BINS    = 64,
  parameter logic [N_UNITS-1:0] UNIT_PRESENT = '1,   // bit u: build unit u
  parameter bit                 BOOT_ARM     = 1'b0, // see abacus_ctrl
  parameter logic [N_UNITS-1:0] BOOT_UNIT_EN = '0
) (
  input  logic         clk,
  input  logic         rst_n,
  // system bus slave (AXI4-Lite)
  input  logic [31:0]  s_awaddr,
  input  logic         s_awvalid,
  output logic         s_awready,
  input  logic [31:0]  s_wdata,
  input  logic [3:0]   s_wstrb,
  input  logic         s_wvalid,
  output logic         s_wready,
  output logic [1:0]   s_bresp,
  output logic         s_bvalid,
  input  logic         s_bready,
  input  logic [31:0]  s_araddr,
  input  logic         s_arvalid,
  output logic         s_arready,
  output logic [31:0]  s_rdata,
  output logic [1:0]   s_rresp,
  output logic         s_rvalid,
  input  logic         s_rready,
  // CPU probes
  input  cpu_dbg_t     cpu_dbg_i [N_CPUS],
  // DMA write port to the memory controller
  output logic         m_wr_valid,
  output logic [31:0]  m_wr_addr,
  output logic [31:0]  m_wr_data,
  input  logic         m_wr_ready,
  // interrupt to the system interrupt controller
  output logic         irq
);

  // register port
  logic              reg_wr;
  logic [REG_AW-1:0] reg_addr;
  logic [31:0]       reg_wdata, reg_rdata;

  // control
  cpu_dbg_t          dbg [N_CPUS];
  logic [N_CPUS-1:0] cpu_en, watch_hit;
  logic [ADDR_W-1:0] watch_addr;
  logic              running, clr, start_pulse, stop_pulse;
  logic [TS_W-1:0]   ts;
  unit_cfg_t         unit_cfg     [N_UNITS];
  logic [9:0]        unit_rd_addr;
  logic [31:0]       unit_rd_data [N_UNITS];
  logic [N_CPUS-1:0] cpu_ok [N_UNITS];
  logic [N_CPUS-1:0] mem_ok [N_UNITS];
  logic [N_CPUS-1:0] ins_ok [N_UNITS];
  cpu_dbg_t          dbg_ins [N_CPUS];

  // DMA and interrupts
  logic              dma_en, dma_wrap;
  logic [31:0]       dma_base, dma_size, dma_wptr;
  logic              rec_valid, rec_ready, trace_drop;
  trace_rec_t        rec;
  logic [N_IRQ-1:0]  irq_mask, irq_clr, irq_status, irq_src;

  logic [N_CPUS-1:0] req_all, done_all, stall_all;

  abacus_bus_if u_bus (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .reg_wr, .reg_addr, .reg_wdata, .reg_rdata
  );

  abacus_cpu_snoop #(.N_CPUS(N_CPUS)) u_snoop (
    .clk, .rst_n, .cpu_en, .watch_addr, .dbg_i(cpu_dbg_i), .dbg_o(dbg), .watch_hit
  );

  abacus_ctrl #(
    .N_CPUS(N_CPUS), .UNIT_PRESENT(UNIT_PRESENT),
    .BOOT_ARM(BOOT_ARM), .BOOT_UNIT_EN(BOOT_UNIT_EN)
  ) u_ctrl (
    .clk, .rst_n,
    .reg_wr, .reg_addr, .reg_wdata, .reg_rdata,
    .dbg, .running, .clr, .ts, .start_pulse, .stop_pulse, .cpu_en, .watch_addr,
    .unit_cfg, .unit_rd_addr, .unit_rd_data,
    .dma_en, .dma_base, .dma_size, .dma_wptr,
    .irq_mask, .irq_clr, .irq_status
  );

  for (genvar u = 0; u < N_UNITS; u++) begin : g_filter
    abacus_event_filter #(.N_CPUS(N_CPUS)) u_filter (
      .running, .cfg(unit_cfg[u]), .dbg, .cpu_ok(cpu_ok[u]), .mem_ok(mem_ok[u]),
      .ins_ok(ins_ok[u])
    );
  end

  always_comb begin
    for (int c = 0; c < N_CPUS; c++) begin
      req_all[c]   = dbg[c].mem_req;
      done_all[c]  = dbg[c].mem_done;
      stall_all[c] = dbg[c].stall;
      // the code profile is an address histogram over instruction addresses
      dbg_ins[c]          = dbg[c];
      dbg_ins[c].mem_addr = dbg[c].ins_addr;
    end
  end

  // A unit left out by UNIT_PRESENT is not built: its window reads 0 and it
  // produces no events.
  if (UNIT_PRESENT[UNIT_TRACE]) begin : g_trace
    abacus_trace_unit #(.N_CPUS(N_CPUS), .DEPTH(TRACE_DEPTH)) u_trace (
      .clk, .rst_n, .clr, .mem_ok(mem_ok[UNIT_TRACE]), .dbg, .ts,
      .rec_valid, .rec, .rec_ready, .drop(trace_drop),
      .rd_addr(unit_rd_addr), .rd_data(unit_rd_data[UNIT_TRACE])
    );
  end else begin : g_no_trace
    assign rec_valid  = 1'b0;
    assign rec        = '0;
    assign trace_drop = 1'b0;
    assign unit_rd_data[UNIT_TRACE] = '0;
  end

  if (UNIT_PRESENT[UNIT_LAT]) begin : g_latency
    abacus_latency_unit #(.N_CPUS(N_CPUS), .BINS(LAT_BINS)) u_latency (
      .clk, .rst_n, .clr, .shift(unit_cfg[UNIT_LAT].shift),
      .req(req_all), .req_ok(mem_ok[UNIT_LAT]), .done(done_all),
      .rd_addr(unit_rd_addr), .rd_data(unit_rd_data[UNIT_LAT])
    );
  end else begin : g_no_latency
    assign unit_rd_data[UNIT_LAT] = '0;
  end

  if (UNIT_PRESENT[UNIT_STALL]) begin : g_stall
    abacus_stall_unit #(.N_CPUS(N_CPUS)) u_stall (
      .clk, .rst_n, .clr, .active(running && unit_cfg[UNIT_STALL].en),
      .cpu_ok(cpu_ok[UNIT_STALL]), .stall(stall_all),
      .rd_addr(unit_rd_addr), .rd_data(unit_rd_data[UNIT_STALL])
    );
  end else begin : g_no_stall
    assign unit_rd_data[UNIT_STALL] = '0;
  end

  if (UNIT_PRESENT[UNIT_HIST]) begin : g_hist
    abacus_mem_hist_unit #(.N_CPUS(N_CPUS), .BINS(HIST_BINS)) u_hist (
      .clk, .rst_n, .clr, .addr_lo(unit_cfg[UNIT_HIST].addr_lo),
      .shift(unit_cfg[UNIT_HIST].shift), .mem_ok(mem_ok[UNIT_HIST]), .dbg,
      .rd_addr(unit_rd_addr), .rd_data(unit_rd_data[UNIT_HIST])
    );
  end else begin : g_no_hist
    assign unit_rd_data[UNIT_HIST] = '0;
  end

  if (UNIT_PRESENT[UNIT_PROF]) begin : g_prof
    abacus_mem_hist_unit #(.N_CPUS(N_CPUS), .BINS(PROF_BINS)) u_prof (
      .clk, .rst_n, .clr, .addr_lo(unit_cfg[UNIT_PROF].addr_lo),
      .shift(unit_cfg[UNIT_PROF].shift), .mem_ok(ins_ok[UNIT_PROF]), .dbg(dbg_ins),
      .rd_addr(unit_rd_addr), .rd_data(unit_rd_data[UNIT_PROF])
    );
  end else begin : g_no_prof
    assign unit_rd_data[UNIT_PROF] = '0;
  end

  abacus_dma u_dma (
    .clk, .rst_n, .clr, .en(dma_en), .base(dma_base), .size(dma_size),
    .rec_valid, .rec, .rec_ready,
    .m_wr_valid, .m_wr_addr, .m_wr_data, .m_wr_ready,
    .wptr(dma_wptr), .wrap(dma_wrap)
  );

  always_comb begin
    irq_src            = '0;
    irq_src[IRQ_START] = start_pulse;
    irq_src[IRQ_STOP]  = stop_pulse;
    irq_src[IRQ_WRAP]  = dma_wrap;
    irq_src[IRQ_DROP]  = trace_drop;
    irq_src[IRQ_WATCH] = |watch_hit;
  end

  abacus_irq #(.N_SRC(N_IRQ)) u_irq (
    .clk, .rst_n, .src(irq_src), .mask(irq_mask), .clr(irq_clr),
    .status(irq_status), .irq
  );

endmodule
