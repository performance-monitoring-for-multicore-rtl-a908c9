// tb_abacus_cpu_snoop: drives random probe bundles and per-CPU enables and
// checks that the registered outputs carry the previous cycle's probes with
// the event flags of disabled CPUs cleared, and that watch_hit flags exactly
// the enabled CPUs that accessed the watch address.
module tb_abacus_cpu_snoop;
  import abacus_pkg::*;
  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] cpu_en, watch_hit;
  logic [ADDR_W-1:0] watch_addr;
  cpu_dbg_t dbg_i [N];
  cpu_dbg_t dbg_o [N];
  cpu_dbg_t exp_d [N];
  logic [N-1:0] exp_w;
  int checks = 0, failures = 0, n_watch = 0;

  abacus_cpu_snoop #(.N_CPUS(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cpu_en = '0; watch_addr = 32'h100;
    for (int c = 0; c < N; c++) dbg_i[c] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    checks++;
    if (dbg_o[0] != '0 || watch_hit != '0) begin failures++; $display("reset state wrong"); end
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      cpu_en = N'($urandom);
      for (int c = 0; c < N; c++) begin
        dbg_i[c].mem_req  = 1'($urandom);
        dbg_i[c].mem_we   = 1'($urandom);
        dbg_i[c].mem_addr = ($urandom % 2) ? watch_addr : 32'($urandom % 512);
        dbg_i[c].mem_done = 1'($urandom);
        dbg_i[c].stall    = 1'($urandom);
        dbg_i[c].pid      = PID_W'($urandom);
        dbg_i[c].ins_valid = 1'($urandom);
        dbg_i[c].ins_addr = $urandom;
        exp_d[c]          = dbg_i[c];
        exp_d[c].mem_req  = dbg_i[c].mem_req  & cpu_en[c];
        exp_d[c].mem_done = dbg_i[c].mem_done & cpu_en[c];
        exp_d[c].stall    = dbg_i[c].stall    & cpu_en[c];
        exp_d[c].ins_valid = dbg_i[c].ins_valid & cpu_en[c];
        exp_w[c] = dbg_i[c].mem_req & cpu_en[c] & (dbg_i[c].mem_addr == watch_addr);
      end
      @(posedge clk); #1;
      for (int c = 0; c < N; c++) begin
        checks++;
        if (dbg_o[c] != exp_d[c]) begin failures++; $display("cpu %0d probe mismatch", c); end
      end
      checks++;
      if (watch_hit != exp_w) begin failures++; $display("watch mismatch %b %b", watch_hit, exp_w); end
      if (|exp_w) n_watch++;
    end
    checks++;
    if (n_watch == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
