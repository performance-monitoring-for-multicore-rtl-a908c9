// tb_abacus_stall_unit: random stall flags, CPU selections and active
// periods; the testbench keeps its own counts and compares every 64-bit
// counter, read through the word port, at the end of each phase. A clear
// between phases must zero everything.
module tb_abacus_stall_unit;
  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic clr, active;
  logic [N-1:0] cpu_ok, stall;
  logic [9:0] rd_addr;
  logic [31:0] rd_data;
  longint unsigned m_cycles, m_stalls [N];
  int checks = 0, failures = 0;

  abacus_stall_unit #(.N_CPUS(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd64(input int w, output longint unsigned v);
    logic [31:0] lo, hi;
    rd_addr = 10'(w);     #1;
    lo = rd_data;
    rd_addr = 10'(w + 1); #1;
    hi = rd_data;
    v = {hi, lo};
  endtask

  task automatic compare(input string tag);
    longint unsigned v;
    @(negedge clk);
    active = 0; cpu_ok = '0; stall = '0;
    rd64(0, v);
    checks++;
    if (v != m_cycles) begin failures++; $display("%s: cycles %0d want %0d", tag, v, m_cycles); end
    for (int c = 0; c < N; c++) begin
      rd64(2 + 2 * c, v);
      checks++;
      if (v != m_stalls[c]) begin failures++; $display("%s: cpu %0d stalls %0d want %0d", tag, c, v, m_stalls[c]); end
    end
  endtask

  initial begin
    clr = 0; active = 0; cpu_ok = '0; stall = '0; rd_addr = '0;
    m_cycles = 0;
    for (int c = 0; c < N; c++) m_stalls[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 4; phase++) begin
      for (int i = 0; i < 3000; i++) begin
        @(negedge clk);
        active = ($urandom % 5) != 0;
        cpu_ok = active ? N'($urandom | $urandom) : '0;
        stall  = N'($urandom);
        if (active) m_cycles++;
        for (int c = 0; c < N; c++) if (cpu_ok[c] && stall[c]) m_stalls[c]++;
      end
      compare($sformatf("phase %0d", phase));
      if (phase == 1) begin
        @(negedge clk) clr = 1;
        @(negedge clk) clr = 0;
        m_cycles = 0;
        for (int c = 0; c < N; c++) m_stalls[c] = 0;
        compare("after clear");
      end
    end
    // reading past the last counter returns 0
    @(negedge clk);
    rd_addr = 10'(2 + 2 * N); #1;
    checks++;
    if (rd_data != 0) begin failures++; $display("unused word not 0"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
