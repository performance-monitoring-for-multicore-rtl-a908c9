// tb_abacus_mem_hist_unit: random multi-CPU accesses around a region base;
// the testbench bins every selected access itself and compares all bin
// counters, the overflow counter and the total. Several CPUs often hit the
// same bin in one cycle, which must count each of them.
module tb_abacus_mem_hist_unit;
  import abacus_pkg::*;
  localparam int N = 4;
  localparam int B = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic clr;
  logic [ADDR_W-1:0] addr_lo;
  logic [4:0] shift;
  logic [N-1:0] mem_ok;
  cpu_dbg_t dbg [N];
  logic [9:0] rd_addr;
  logic [31:0] rd_data;
  int unsigned m_hist [B];
  int unsigned m_ovf, m_total, n_same = 0;
  int checks = 0, failures = 0;

  abacus_mem_hist_unit #(.N_CPUS(N), .BINS(B)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(input string tag);
    @(negedge clk);
    mem_ok = '0;
    for (int b = 0; b < B + 2; b++) begin
      int unsigned want;
      want = (b < B) ? m_hist[b] : (b == B) ? m_ovf : m_total;
      rd_addr = 10'(b); #1;
      checks++;
      if (rd_data != want) begin failures++; $display("%s: word %0d = %0d want %0d", tag, b, rd_data, want); end
    end
  endtask

  task automatic run(input int cycles, input logic [31:0] base, input int sh);
    addr_lo = base; shift = 5'(sh);
    for (int i = 0; i < cycles; i++) begin
      int hit_bins [N];
      @(negedge clk);
      for (int c = 0; c < N; c++) begin
        int unsigned off;
        dbg[c] = '0;
        mem_ok[c] = 1'($urandom);
        dbg[c].mem_req  = mem_ok[c];
        off = $urandom % ((B + 2) << sh);
        dbg[c].mem_addr = base + off;
        hit_bins[c] = -1;
        if (mem_ok[c]) begin
          m_total++;
          if ((off >> sh) < B) begin m_hist[off >> sh]++; hit_bins[c] = off >> sh; end
          else m_ovf++;
        end
      end
      for (int c = 1; c < N; c++)
        if (hit_bins[c] >= 0 && hit_bins[c] == hit_bins[0]) n_same++;
    end
  endtask

  initial begin
    clr = 0; mem_ok = '0; rd_addr = '0; addr_lo = '0; shift = '0;
    for (int c = 0; c < N; c++) dbg[c] = '0;
    for (int b = 0; b < B; b++) m_hist[b] = 0;
    m_ovf = 0; m_total = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(3000, 32'h8000_0000, 2);
    compare("shift 2");
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    for (int b = 0; b < B; b++) m_hist[b] = 0;
    m_ovf = 0; m_total = 0;
    compare("after clear");
    run(3000, 32'h0001_2340, 8);
    compare("shift 8");
    checks++;
    if (n_same == 0) begin failures++; $display("no same-bin collision exercised"); end
    $display("same-bin hits in one cycle: %0d", n_same);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
