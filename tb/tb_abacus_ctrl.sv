// tb_abacus_ctrl: exercises the control register file directly on its
// register port: write/read-back of every read-write register and of each
// unit's configuration (and the matching configuration outputs), the reset
// values, the command bits (one-cycle clear/start/stop pulses), the time
// stamp, the trigger window through registers, the unit result read
// multiplexer and the write-1-to-clear strobe of the interrupt status.
module tb_abacus_ctrl;
  import abacus_pkg::*;
  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic reg_wr;
  logic [REG_AW-1:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  cpu_dbg_t dbg [N];
  logic running, clr, start_pulse, stop_pulse;
  logic [TS_W-1:0] ts;
  logic [N-1:0] cpu_en;
  logic [ADDR_W-1:0] watch_addr;
  unit_cfg_t unit_cfg [N_UNITS];
  logic [9:0] unit_rd_addr;
  logic [31:0] unit_rd_data [N_UNITS];
  logic dma_en;
  logic [31:0] dma_base, dma_size, dma_wptr;
  logic [N_IRQ-1:0] irq_mask, irq_clr, irq_status;
  int checks = 0, failures = 0, n_clr = 0, n_irq_clr = 0;

  abacus_ctrl #(.N_CPUS(N)) dut (.*);

  // second instance: boot-time configuration, units 3 and 4 not built
  logic running_b, clr_b, sp_b, tp_b, dma_en_b;
  logic [TS_W-1:0] ts_b;
  logic [N-1:0] cpu_en_b;
  logic [ADDR_W-1:0] watch_b;
  unit_cfg_t cfg_b [N_UNITS];
  logic [9:0] urd_b;
  logic [31:0] rdata_b, base_b, size_b;
  logic [N_IRQ-1:0] mask_b, iclr_b;
  abacus_ctrl #(.N_CPUS(N), .UNIT_PRESENT(5'b00111), .BOOT_ARM(1'b1), .BOOT_UNIT_EN(5'b01010)) dut_boot (
    .clk, .rst_n, .reg_wr(1'b0), .reg_addr(R_ID), .reg_wdata('0), .reg_rdata(rdata_b), .dbg,
    .running(running_b), .clr(clr_b), .ts(ts_b), .start_pulse(sp_b), .stop_pulse(tp_b),
    .cpu_en(cpu_en_b), .watch_addr(watch_b), .unit_cfg(cfg_b), .unit_rd_addr(urd_b),
    .unit_rd_data, .dma_en(dma_en_b), .dma_base(base_b), .dma_size(size_b), .dma_wptr,
    .irq_mask(mask_b), .irq_clr(iclr_b), .irq_status);

  always #5 clk = ~clk;

  // unit results: a recognisable function of unit number and word index
  always_comb
    for (int u = 0; u < N_UNITS; u++) unit_rd_data[u] = {8'(u + 1), 14'h0, unit_rd_addr};

  always @(posedge clk) if (rst_n && clr) n_clr++;
  always @(posedge clk) if (rst_n && irq_clr != 0) n_irq_clr++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input logic [REG_AW-1:0] a, input logic [31:0] d);
    @(negedge clk);
    reg_wr = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk);
    reg_wr = 0;
  endtask

  task automatic rd(input logic [REG_AW-1:0] a, output logic [31:0] d);
    @(negedge clk);
    reg_addr = a; #1;
    d = reg_rdata;
  endtask

  task automatic rw_check(input logic [REG_AW-1:0] a, input logic [31:0] d, input logic [31:0] m);
    logic [31:0] v;
    wr(a, d);
    rd(a, v);
    check((v & m) == (d & m), $sformatf("reg %h read %h want %h", a, v, d & m));
  endtask

  initial begin
    logic [31:0] v, v2;
    reg_wr = 0; reg_addr = '0; reg_wdata = '0; dma_wptr = 32'h1230; irq_status = 5'h15;
    for (int c = 0; c < N; c++) dbg[c] = '0;
    repeat (3) @(posedge clk);
    #1 check(!running_b && cfg_b[1].en && cfg_b[3].en == 0 && cfg_b[0].en == 0 && cfg_b[2].en == 0 &&
             cfg_b[4].en == 0,
             "boot configuration: units 1 enabled, 3 not built");
    @(negedge clk) rst_n = 1;
    @(posedge clk); #1 check(!running_b, "boot: waiting one cycle");
    @(posedge clk); #1 check(running_b, "boot: running two cycles after reset");
    check(rdata_b == 32'hABAC_3D04, $sformatf("boot instance ID %h", rdata_b));

    // reset values
    rd(R_ID, v);       check(v == {16'hABAC, 5'h1F, 3'(N_UNITS), 8'(N)}, "ID");
    rd(R_DMA_SIZE, v); check(v == 4096, "DMA size resets to one page");
    rd(R_CPU_EN, v);   check(v == 32'hF, "all CPUs enabled at reset");
    check(unit_cfg[2].en == 0 && unit_cfg[2].cpu_mask == '1 && unit_cfg[2].addr_hi == '1,
          "unit reset configuration");
    check(!running && ts == 0, "idle at reset");

    // read-write registers
    rw_check(R_START_MODE, 32'h4, 32'h7);
    rw_check(R_START_MODE, 32'h2, 32'h7);
    rw_check(R_START_VAL, 32'hDEAD_BEEF, '1);
    rw_check(R_STOP_MODE, 32'h1, 32'h7);
    rw_check(R_STOP_VAL, 32'h0BAD_F00D, '1);
    rw_check(R_IRQ_MASK, 32'h1B, 32'h1F);
    check(irq_mask == 5'h1B, "irq_mask output");
    rw_check(R_WATCH_ADDR, 32'h4000_0010, '1);
    check(watch_addr == 32'h4000_0010, "watch_addr output");
    rw_check(R_CPU_EN, 32'h5, 32'hF);
    check(cpu_en == 4'h5, "cpu_en output");
    rw_check(R_DMA_BASE, 32'h3000_0000, '1);
    rw_check(R_DMA_SIZE, 32'h2000, '1);
    rw_check(R_DMA_CTRL, 32'h1, 32'h1);
    check(dma_en && dma_base == 32'h3000_0000 && dma_size == 32'h2000, "DMA outputs");
    rd(R_DMA_WPTR, v);   check(v == 32'h1230, "DMA pointer readable");
    rd(R_IRQ_STATUS, v); check(v == 32'h15, "irq status readable");

    // unit configuration
    for (int u = 0; u < N_UNITS; u++) begin
      logic [REG_AW-1:0] b;
      b = R_UNIT_CFG + REG_AW'(32 * u);
      rw_check(b + 0, {11'b0, 5'(u + 3), 8'(8'hA0 | u), 6'b0, 1'b1, 1'(u % 2)}, 32'h001F_FF03);
      rw_check(b + 4, 32'(8'h40 + u), 32'hFF);
      rw_check(b + 8, 32'h1000_0000 * u, '1);
      rw_check(b + 12, 32'h1000_0000 * u + 32'hFFF, '1);
    end
    for (int u = 0; u < N_UNITS; u++)
      check(unit_cfg[u].en == 1'(u % 2) && unit_cfg[u].pid_en && unit_cfg[u].shift == 5'(u + 3) &&
            unit_cfg[u].cpu_mask == 8'(8'hA0 | u) && unit_cfg[u].pid == 8'(8'h40 + u) &&
            unit_cfg[u].addr_lo == 32'h1000_0000 * u &&
            unit_cfg[u].addr_hi == 32'h1000_0000 * u + 32'hFFF, $sformatf("unit %0d cfg outputs", u));

    // unit result windows
    for (int u = 0; u < N_UNITS; u++)
      for (int w = 0; w < 1024; w += 341) begin
        rd(REG_AW'(32'h1000 * (u + 1) + 4 * w), v);
        check(v == {8'(u + 1), 14'h0, 10'(w)}, $sformatf("unit %0d word %0d read %h", u, w, v));
      end

    // interrupt clear strobe
    wr(R_IRQ_STATUS, 32'h5);
    check(n_irq_clr == 1, "one irq clear strobe");

    // trigger through registers: start after 20 cycles, stop after 30
    wr(R_START_MODE, TRIG_CYCLES); wr(R_START_VAL, 20);
    wr(R_STOP_MODE, TRIG_CYCLES);  wr(R_STOP_VAL, 30);
    wr(R_CTRL, 32'h1);
    begin
      int n_run = 0;
      repeat (80) begin @(posedge clk); #1; if (running) n_run++; end
      check(n_run == 30, $sformatf("window %0d cycles, want 30", n_run));
    end
    rd(R_STATUS, v); check(v == 32'hE, $sformatf("status DONE+armed, got %h", v));
    rd(R_TS_LO, v);  check(v > 80 && v < 100, $sformatf("time stamp %0d", v));
    rd(R_TS_HI, v);  check(v == 0, "time stamp high word");
    // clear command: one pulse, time stamp restarts, reads back 0
    wr(R_CTRL, 32'h3);
    repeat (3) @(posedge clk); #1;
    check(n_clr == 1, "one clear pulse");
    rd(R_TS_LO, v);
    check(v < 4, $sformatf("time stamp restarted: %0d", v));
    rd(R_CTRL, v); check(v == 1, "command bits read back 0");
    // manual start/stop commands
    wr(R_START_MODE, TRIG_MANUAL); wr(R_STOP_MODE, TRIG_MANUAL);
    wr(R_CTRL, 32'h3);
    repeat (5) @(posedge clk); #1;
    check(!running, "manual waits");
    wr(R_CTRL, 32'h5);
    @(posedge clk); #1;
    check(running, "start command");
    wr(R_CTRL, 32'h9);
    @(posedge clk); #1;
    check(!running, "stop command");
    // disarm zeroes the time stamp
    wr(R_CTRL, 32'h0);
    rd(R_TS_LO, v); rd(R_TS_LO, v2);
    check(v == 0 && v2 == 0, "time stamp held at 0 while disarmed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
