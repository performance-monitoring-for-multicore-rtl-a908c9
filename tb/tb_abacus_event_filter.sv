// tb_abacus_event_filter: random unit configurations and probe bundles,
// compared with the selection rules (enable, running, CPU mask, PID, address
// window, for data accesses and for executed instructions) evaluated
// independently in the testbench.
module tb_abacus_event_filter;
  import abacus_pkg::*;
  localparam int N = 4;
  logic running;
  unit_cfg_t cfg;
  cpu_dbg_t dbg [N];
  logic [N-1:0] cpu_ok, mem_ok, ins_ok;
  logic [N-1:0] e_cpu, e_mem, e_ins;
  int checks = 0, failures = 0, n_sel = 0, n_rej_addr = 0, n_rej_pid = 0;
  logic clk = 1'b0;

  abacus_event_filter #(.N_CPUS(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      running      = ($urandom % 8) != 0;
      cfg          = '0;
      cfg.en       = ($urandom % 8) != 0;
      cfg.pid_en   = 1'($urandom);
      cfg.pid      = PID_W'($urandom % 4);
      cfg.cpu_mask = MAX_CPUS'($urandom);
      cfg.addr_lo  = 32'($urandom % 200);
      cfg.addr_hi  = cfg.addr_lo + 32'($urandom % 200);
      for (int c = 0; c < N; c++) begin
        dbg[c]          = '0;
        dbg[c].mem_req  = 1'($urandom);
        dbg[c].mem_addr = 32'($urandom % 500);
        dbg[c].pid      = PID_W'($urandom % 4);
        dbg[c].ins_valid = 1'($urandom);
        dbg[c].ins_addr = 32'($urandom % 500);
        e_cpu[c] = running & cfg.en & cfg.cpu_mask[c] & (!cfg.pid_en | (dbg[c].pid == cfg.pid));
        e_mem[c] = e_cpu[c] & dbg[c].mem_req &
                   !(dbg[c].mem_addr < cfg.addr_lo) & !(dbg[c].mem_addr > cfg.addr_hi);
        e_ins[c] = e_cpu[c] & dbg[c].ins_valid &
                   !(dbg[c].ins_addr < cfg.addr_lo) & !(dbg[c].ins_addr > cfg.addr_hi);
        if (e_mem[c]) n_sel++;
        if (e_cpu[c] && dbg[c].mem_req && !e_mem[c]) n_rej_addr++;
        if (running && cfg.en && cfg.cpu_mask[c] && cfg.pid_en && dbg[c].pid != cfg.pid) n_rej_pid++;
      end
      #1;
      checks++;
      if (cpu_ok !== e_cpu || mem_ok !== e_mem || ins_ok !== e_ins) begin
        failures++;
        $display("mismatch %0d: cpu_ok %b/%b mem_ok %b/%b ins_ok %b/%b", i, cpu_ok, e_cpu,
                 mem_ok, e_mem, ins_ok, e_ins);
      end
      @(posedge clk);
    end
    checks++;
    if (n_sel == 0 || n_rej_addr == 0 || n_rej_pid == 0) failures++;
    $display("selected %0d, rejected by address %0d, by pid %0d", n_sel, n_rej_addr, n_rej_pid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
