// tb_abacus_top: end-to-end run of ABACUS at its default parameters
// (4 CPUs, 512-entry trace FIFO, 32 latency bins, 64 address and 64 code
// profile bins).
//
// Four CPU models issue data accesses with random latencies, stall while
// they wait and switch process IDs now and then. Software is modelled by an
// AXI4-Lite master that configures all five units, the DMA buffer, the
// interrupt mask and the trigger (start on an access to START_ADDR, stop
// after WINDOW cycles), arms the monitor and, after the window, reads every
// result register. A memory model takes the DMA writes with random
// back-pressure.
// The testbench keeps its own reference of every unit's result from the
// probes it drove: stall counts under a process filter, address histogram
// with overflow, code profile over instruction addresses, latency histogram with max/count/sum, and the trace records
// (CPU, PID, address, write flag, time-stamp spacing) as they arrive in
// memory in order, wrapping in the circular buffer. It counts each mechanism
// (trigger start/stop, PID rejection, address-window rejection, trace loss
// on a collision, DMA wrap, watch-address interrupt, interrupt clear) and
// fails if one never happened.
module tb_abacus_top;
  import abacus_pkg::*;
  localparam int N = 4;
  localparam int WINDOW = 6000;
  localparam logic [31:0] START_ADDR = 32'h9000_0000;
  localparam logic [31:0] WATCH = 32'h9000_0100;
  localparam logic [31:0] DBASE = 32'h1F00_0000;
  localparam int DSIZE = 1024;
  localparam int STALL_PID = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] s_awaddr, s_wdata, s_araddr, s_rdata;
  logic [3:0]  s_wstrb;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [1:0] s_bresp, s_rresp;
  cpu_dbg_t cpu_dbg_i [N];
  logic m_wr_valid, m_wr_ready, irq;
  logic [31:0] m_wr_addr, m_wr_data;

  abacus_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ AXI master
  task automatic axi_write(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awaddr = a; s_wdata = d; s_wstrb = 4'hF; s_awvalid = 1; s_wvalid = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0; s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    @(negedge clk) s_bready = 0;
  endtask

  task automatic axi_read(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 0; s_rready = 1;
    do @(posedge clk); while (!s_rvalid);
    d = s_rdata;
    @(negedge clk) s_rready = 0;
  endtask

  // ------------------------------------------------------------- CPU models
  int  cyc = 0;                 // probe cycle number
  bit  cpus_on = 0, force_start = 0, force_watch = 0, force_collide = 0;
  int  remaining [N];           // -1 idle, else cycles to completion
  int  lat_of [N];
  bit  sel_of [N];
  cpu_dbg_t prev [N];           // probes of the previous cycle
  bit  prev_valid = 0;

  // reference results
  longint unsigned r_stall [N];
  longint unsigned r_active = 0;
  int unsigned r_hist [64];
  int unsigned r_ovf = 0, r_hist_total = 0;
  int unsigned r_prof [64];
  int unsigned r_prof_ovf = 0, r_prof_total = 0;
  int unsigned r_lat [32];
  int unsigned r_lat_max = 0, r_lat_cnt = 0, r_lat_sum = 0;
  typedef struct { trace_rec_t r; int cyc; } exp_rec_t;
  exp_rec_t r_trace [$];
  int unsigned r_trace_lost = 0;

  // mechanism counters
  int n_start_probe = -1, n_run_rise = -1, n_run_cycles = 0;
  int n_pid_reject = 0, n_addr_reject = 0, n_collide = 0, n_watch = 0, n_wrap_seen = 0;

  logic run_q = 0;

  // evaluate the previous cycle's probes against the window they fell in
  // (the unit sees a probe one cycle later, when dut.running applies)
  task automatic account(input logic running);
    int n_tr, first;
    if (running) r_active++;
    n_tr = 0; first = -1;
    for (int c = 0; c < N; c++) begin
      cpu_dbg_t p;
      p = prev[c];
      // latency unit: all CPUs, whole address space; a request is selected
      // if the window is open when the unit sees it
      if (p.mem_req) begin
        if (p.mem_done) begin
          if (running) lat_record(0);
        end else sel_of[c] = running;
      end
      // stall unit: CPUs 1..3, process STALL_PID
      if (running && c != 0 && p.pid == STALL_PID && p.stall) r_stall[c]++;
      if (running && c != 0 && p.pid != STALL_PID && p.stall) n_pid_reject++;
      // code profile: CPUs 0 and 2, code at 0x1000..0x27FF, 64-byte bins
      if (running && (c == 0 || c == 2) && p.ins_valid &&
          p.ins_addr >= 32'h1000 && p.ins_addr <= 32'h27FF) begin
        r_prof_total++;
        if (p.ins_addr < 32'h2000) r_prof[(p.ins_addr - 32'h1000) >> 6]++;
        else r_prof_ovf++;
      end
      if (p.mem_req && running) begin
        // histogram: all CPUs, 0x8000_0000..0x8000_1FFF, 64-byte bins
        if (p.mem_addr >= 32'h8000_0000 && p.mem_addr <= 32'h8000_1FFF) begin
          r_hist_total++;
          if (p.mem_addr - 32'h8000_0000 < 32'h1000) r_hist[(p.mem_addr - 32'h8000_0000) >> 6]++;
          else r_ovf++;
        end
        // trace: CPUs 0 and 1, 0x8000_0000..0x8000_03FF
        if (c < 2) begin
          if (p.mem_addr <= 32'h8000_03FF && p.mem_addr >= 32'h8000_0000) begin
            n_tr++;
            if (first < 0) first = c;
          end else n_addr_reject++;
        end
      end
    end
    if (n_tr > 0) begin
      exp_rec_t e;
      e.r.ts = '0; e.r.we = prev[first].mem_we; e.r.cpu = CPU_ID_W'(first);
      e.r.pid = prev[first].pid; e.r.addr = prev[first].mem_addr; e.cyc = cyc - 1;
      r_trace.push_back(e);
      r_trace_lost += n_tr - 1;
      if (n_tr > 1) n_collide++;
    end
  endtask

  function automatic void lat_record(int lat);
    int b;
    b = (lat > 31) ? 31 : lat;   // latency unit shift 0
    r_lat[b]++;
    r_lat_cnt++;
    r_lat_sum += lat;
    if (lat > r_lat_max) r_lat_max = lat;
  endfunction

  bit coll;
  always @(negedge clk) begin
    if (rst_n) begin
      if (prev_valid) account(dut.running);
      if (dut.running && !run_q) n_run_rise = cyc;
      if (dut.running) n_run_cycles++;
      run_q = dut.running;
      cyc++;
      coll = force_collide && remaining[0] == -1 && remaining[1] == -1;
      if (coll) force_collide = 0;
      for (int c = 0; c < N; c++) begin
        cpu_dbg_i[c].mem_req = 0; cpu_dbg_i[c].mem_done = 0;
        if (!cpus_on) begin
          cpu_dbg_i[c].stall = 0;
          cpu_dbg_i[c].ins_valid = 0;
          continue;
        end
        if ($urandom % 200 == 0) cpu_dbg_i[c].pid = PID_W'(1 + $urandom % 3);
        if (remaining[c] == 0) begin
          cpu_dbg_i[c].mem_done = 1;
          if (sel_of[c]) lat_record(lat_of[c]);
          remaining[c] = -1;
        end else if (remaining[c] > 0) begin
          remaining[c]--;
        end else begin
          bit go, fs;
          logic [31:0] a;
          go = ($urandom % 3 == 0);
          a = 32'h8000_0000 + (($urandom % 8192) & ~32'h3);
          fs = 0;
          if (c == 2 && force_start) begin go = 1; a = START_ADDR; force_start = 0; fs = 1; end
          if (c == 3 && force_watch) begin go = 1; a = WATCH; force_watch = 0; end
          if (c < 2 && coll) begin go = 1; a = 32'h8000_0010 + 32'(c * 4); end
          if (go) begin
            cpu_dbg_i[c].mem_req  = 1;
            cpu_dbg_i[c].mem_we   = 1'($urandom);
            cpu_dbg_i[c].mem_addr = a;
            lat_of[c] = ($urandom % 8 == 0) ? 0 : 1 + $urandom % 12;
            if ($urandom % 50 == 0) lat_of[c] = 40;
            sel_of[c] = 0;
            if (fs) n_start_probe = cyc;
            if (lat_of[c] == 0) cpu_dbg_i[c].mem_done = 1;
            else remaining[c] = lat_of[c] - 1;
          end
        end
        cpu_dbg_i[c].stall = (remaining[c] >= 0) || ($urandom % 10 == 0);
        // an instruction completes in every cycle without a stall
        cpu_dbg_i[c].ins_valid = !cpu_dbg_i[c].stall;
        cpu_dbg_i[c].ins_addr  = 32'h0C00 + 32'($urandom % 2048) * 4;
      end
    end
  end

  // capture this cycle's probes for next cycle's accounting and settle
  // latency selections
  always @(posedge clk) begin
    if (rst_n) begin
      for (int c = 0; c < N; c++) prev[c] = cpu_dbg_i[c];
      prev_valid = 1;
    end
  end

  // ---------------------------------------------------------- memory model
  int unsigned dma_words = 0, dma_off = 0;
  logic [31:0] dma_log [$];
  bit wrap_pending = 0;
  always @(negedge clk) m_wr_ready = rst_n && ($urandom % 4 != 0);
  always @(posedge clk) begin
    if (rst_n && m_wr_valid && m_wr_ready) begin
      checks++;
      if (m_wr_addr != DBASE + dma_off) begin
        failures++; $display("DMA address %h want %h", m_wr_addr, DBASE + dma_off);
      end
      dma_log.push_back(m_wr_data);
      dma_off = (dma_off + 4 >= DSIZE) ? 0 : dma_off + 4;
      if (dma_off == 0) n_wrap_seen++;
      dma_words++;
    end
  end

  // ------------------------------------------------------------------- test
  initial begin
    logic [31:0] v, lo, hi;
    s_awaddr = 0; s_wdata = 0; s_araddr = 0; s_wstrb = 0;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    for (int c = 0; c < N; c++) begin
      cpu_dbg_i[c] = '0; cpu_dbg_i[c].pid = PID_W'(1 + c % 3);
      remaining[c] = -1; r_stall[c] = 0; sel_of[c] = 0;
    end
    for (int b = 0; b < 64; b++) begin r_hist[b] = 0; r_prof[b] = 0; end
    for (int b = 0; b < 32; b++) r_lat[b] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1;

    axi_read(R_ID, v);
    check(v == 32'hABAC_FD04, "ID register");
    // units
    axi_write(R_UNIT_CFG + 32'h00, {11'b0, 5'd0, 8'b0000_0011, 6'b0, 1'b0, 1'b1}); // trace
    axi_write(R_UNIT_CFG + 32'h08, 32'h8000_0000);
    axi_write(R_UNIT_CFG + 32'h0C, 32'h8000_03FF);
    axi_write(R_UNIT_CFG + 32'h20, {11'b0, 5'd0, 8'b0000_1111, 6'b0, 1'b0, 1'b1}); // latency
    axi_write(R_UNIT_CFG + 32'h40, {11'b0, 5'd0, 8'b0000_1110, 6'b0, 1'b1, 1'b1}); // stall, PID
    axi_write(R_UNIT_CFG + 32'h44, STALL_PID);
    axi_write(R_UNIT_CFG + 32'h60, {11'b0, 5'd6, 8'b0000_1111, 6'b0, 1'b0, 1'b1}); // histogram
    axi_write(R_UNIT_CFG + 32'h68, 32'h8000_0000);
    axi_write(R_UNIT_CFG + 32'h6C, 32'h8000_1FFF);
    axi_write(R_UNIT_CFG + 32'h80, {11'b0, 5'd6, 8'b0000_0101, 6'b0, 1'b0, 1'b1}); // code profile
    axi_write(R_UNIT_CFG + 32'h88, 32'h0000_1000);
    axi_write(R_UNIT_CFG + 32'h8C, 32'h0000_27FF);
    // DMA, interrupts, watch address, trigger
    axi_write(R_DMA_BASE, DBASE);
    axi_write(R_DMA_SIZE, DSIZE);
    axi_write(R_DMA_CTRL, 1);
    axi_write(R_IRQ_MASK, 32'h1F);
    axi_write(R_WATCH_ADDR, WATCH);
    axi_write(R_START_MODE, TRIG_ADDR);
    axi_write(R_START_VAL, START_ADDR);
    axi_write(R_STOP_MODE, TRIG_CYCLES);
    axi_write(R_STOP_VAL, WINDOW);
    axi_write(R_CTRL, 1);  // arm
    cpus_on = 1;
    repeat (500) @(posedge clk);
    check(!dut.running, "no window before the start access");
    force_start = 1;
    repeat (1000) @(posedge clk);
    force_collide = 1;
    repeat (1000) @(posedge clk);
    force_watch = 1;
    while (run_q || n_run_rise < 0) @(posedge clk);
    cpus_on = 0;
    // let outstanding accesses finish and the DMA drain
    repeat (2000) @(posedge clk);

    // probes of cycle k are registered at edge k, the trigger acts at edge
    // k+1: the window is open from the cycle after the access onwards
    check(n_run_rise == n_start_probe + 1,
          $sformatf("window opened at %0d, start access at %0d", n_run_rise, n_start_probe));
    check(n_run_cycles == WINDOW, $sformatf("window %0d cycles, want %0d", n_run_cycles, WINDOW));
    axi_read(R_STATUS, v);
    check(v[3:2] == 2'd3 && !v[0], "trigger stopped");

    // stall unit
    axi_read(32'h3000, lo); axi_read(32'h3004, hi);
    check({hi, lo} == r_active, $sformatf("active cycles %0d want %0d", {hi, lo}, r_active));
    for (int c = 0; c < N; c++) begin
      axi_read(32'h3008 + 8 * c, lo); axi_read(32'h300C + 8 * c, hi);
      check({hi, lo} == r_stall[c], $sformatf("cpu %0d stalls %0d want %0d", c, {hi, lo}, r_stall[c]));
    end
    // histogram
    for (int b = 0; b < 64; b++) begin
      axi_read(32'h4000 + 4 * b, v);
      check(v == r_hist[b], $sformatf("hist bin %0d = %0d want %0d", b, v, r_hist[b]));
    end
    axi_read(32'h4000 + 4 * 64, v); check(v == r_ovf, $sformatf("hist overflow %0d want %0d", v, r_ovf));
    axi_read(32'h4000 + 4 * 65, v); check(v == r_hist_total, $sformatf("hist total %0d want %0d", v, r_hist_total));
    // code profile
    for (int b = 0; b < 64; b++) begin
      axi_read(32'h5000 + 4 * b, v);
      check(v == r_prof[b], $sformatf("profile bin %0d = %0d want %0d", b, v, r_prof[b]));
    end
    axi_read(32'h5000 + 4 * 64, v); check(v == r_prof_ovf, $sformatf("profile overflow %0d want %0d", v, r_prof_ovf));
    axi_read(32'h5000 + 4 * 65, v); check(v == r_prof_total, $sformatf("profile total %0d want %0d", v, r_prof_total));
    // latency
    for (int b = 0; b < 32; b++) begin
      axi_read(32'h2000 + 4 * b, v);
      check(v == r_lat[b], $sformatf("latency bin %0d = %0d want %0d", b, v, r_lat[b]));
    end
    axi_read(32'h2000 + 4 * 32, v); check(v == r_lat_max, $sformatf("latency max %0d want %0d", v, r_lat_max));
    axi_read(32'h2000 + 4 * 33, v); check(v == r_lat_cnt, $sformatf("latency count %0d want %0d", v, r_lat_cnt));
    axi_read(32'h2000 + 4 * 34, v); check(v == r_lat_sum, "latency sum");
    // trace counters and the records in memory
    axi_read(32'h1000, v); check(v == r_trace.size(), $sformatf("trace written %0d want %0d", v, r_trace.size()));
    axi_read(32'h1004, v); check(v == r_trace_lost, $sformatf("trace lost %0d want %0d", v, r_trace_lost));
    axi_read(32'h1008, v); check(v == 0, "trace FIFO drained");
    axi_read(R_DMA_WPTR, v); check(v == dma_off, "DMA write pointer");
    check(dma_log.size() == 4 * r_trace.size(), $sformatf("%0d DMA words for %0d records", dma_log.size(), r_trace.size()));
    if (dma_log.size() == 4 * r_trace.size() && r_trace.size() > 0) begin
      longint unsigned ts0;
      ts0 = {dma_log[3], dma_log[2]};
      for (int i = 0; i < r_trace.size(); i++) begin
        exp_rec_t e;
        longint unsigned t;
        e = r_trace[i];
        t = {dma_log[4 * i + 3], dma_log[4 * i + 2]};
        check(dma_log[4 * i] == e.r.addr &&
              dma_log[4 * i + 1] == {e.r.we, 7'b0, e.r.cpu, 8'b0, e.r.pid} &&
              t - ts0 == longint'(e.cyc - r_trace[0].cyc),
              $sformatf("trace record %0d", i));
      end
    end
    // interrupts: every source has fired
    check(irq, "interrupt line raised");
    axi_read(R_IRQ_STATUS, v);
    check(v[4:0] == 5'h1F, $sformatf("irq status %b, want all sources", v[4:0]));
    if (v[IRQ_WATCH]) n_watch++;
    axi_write(R_IRQ_STATUS, 32'h1F);
    repeat (3) @(posedge clk);
    check(!irq, "interrupt cleared");
    // clear command zeroes the units
    axi_write(R_CTRL, 32'h3);
    axi_read(32'h4000 + 4 * 65, v); check(v == 0, "histogram cleared");
    axi_read(32'h3000, v); check(v == 0, "stall unit cleared");

    $display("window %0d cycles; trace records %0d (lost %0d, collisions %0d); DMA words %0d, wraps %0d",
             n_run_cycles, r_trace.size(), r_trace_lost, n_collide, dma_words, n_wrap_seen);
    $display("latency samples %0d; histogram total %0d, overflow %0d; PID rejections %0d; address rejections %0d",
             r_lat_cnt, r_hist_total, r_ovf, n_pid_reject, n_addr_reject);
    check(n_collide > 0, "trace collision loss happened");
    check(n_wrap_seen > 0, "DMA buffer wrapped");
    check(n_pid_reject > 0, "PID filter rejected events");
    check(n_addr_reject > 0, "address window rejected events");
    check(r_ovf > 0, "histogram overflow bin used");
    check(r_prof_ovf > 0 && r_prof[0] > 0, "code profile bins and overflow used");
    check(n_watch > 0, "watch address interrupt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
