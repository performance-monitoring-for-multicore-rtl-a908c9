// tb_abacus_trace_unit: random accesses from several CPUs into a small FIFO
// with a randomly stalling consumer. The testbench predicts every record
// (lowest-numbered CPU wins a cycle, time stamp of the access cycle) and
// every loss (collisions and a full FIFO), checks each popped record in
// order, and compares the written/lost counters and the drop pulses.
module tb_abacus_trace_unit;
  import abacus_pkg::*;
  localparam int N = 3;
  localparam int D = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic clr;
  logic [N-1:0] mem_ok;
  cpu_dbg_t dbg [N];
  logic [TS_W-1:0] ts;
  logic rec_valid, rec_ready, drop;
  trace_rec_t rec;
  logic [9:0] rd_addr;
  logic [31:0] rd_data;
  trace_rec_t q [$];
  int m_level = 0;
  int unsigned m_rec = 0, m_drop = 0, n_drop_pulse = 0, m_drop_cycles = 0;
  int n_full = 0, n_coll = 0, n_pop = 0;
  int checks = 0, failures = 0;

  abacus_trace_unit #(.N_CPUS(N), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && !clr && drop) n_drop_pulse++;

  initial begin
    clr = 0; mem_ok = '0; ts = 64'h1_0000_0000; rec_ready = 0; rd_addr = '0;
    for (int c = 0; c < N; c++) dbg[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      int n_ev, first;
      @(negedge clk);
      // consumer side: check and pop
      rec_ready = (i % 1000 < 200) ? 1'b0 : 1'($urandom % 3 != 0);
      checks++;
      if (rec_valid != (m_level > 0)) begin failures++; $display("rec_valid %b level %0d", rec_valid, m_level); end
      if (rec_valid && rec_ready) begin
        trace_rec_t e;
        e = q.pop_front();
        checks++;
        if (rec != e) begin failures++; $display("record mismatch at %0d: %h want %h", i, rec, e); end
        m_level--;
        n_pop++;
      end
      // producer side
      ts = ts + 64'd1;
      n_ev = 0; first = -1;
      for (int c = 0; c < N; c++) begin
        dbg[c] = '0;
        mem_ok[c] = ($urandom % 4 == 0);
        dbg[c].mem_req  = mem_ok[c];
        dbg[c].mem_we   = 1'($urandom);
        dbg[c].mem_addr = $urandom;
        dbg[c].pid      = PID_W'($urandom);
        if (mem_ok[c]) begin n_ev++; if (first < 0) first = c; end
      end
      if (n_ev > 0) begin
        // level before this cycle's pop decides whether the push fits
        if (m_level + ((rec_valid && rec_ready) ? 1 : 0) < D) begin
          trace_rec_t r;
          r.ts = ts; r.we = dbg[first].mem_we; r.cpu = CPU_ID_W'(first);
          r.pid = dbg[first].pid; r.addr = dbg[first].mem_addr;
          q.push_back(r);
          m_level++;
          m_rec++;
          m_drop += n_ev - 1;
          if (n_ev > 1) begin n_coll++; m_drop_cycles++; end
        end else begin
          m_drop += n_ev;
          m_drop_cycles++;
          n_full++;
        end
      end
    end
    @(negedge clk);
    mem_ok = '0; rec_ready = 0;
    @(negedge clk);
    rd_addr = 0; #1; checks++;
    if (rd_data != m_rec)  begin failures++; $display("written %0d want %0d", rd_data, m_rec); end
    rd_addr = 1; #1; checks++;
    if (rd_data != m_drop) begin failures++; $display("lost %0d want %0d", rd_data, m_drop); end
    rd_addr = 2; #1; checks++;
    if (rd_data != 32'(m_level)) begin failures++; $display("level %0d want %0d", rd_data, m_level); end
    checks++;
    if (n_drop_pulse != m_drop_cycles) begin failures++; $display("drop pulses %0d want %0d", n_drop_pulse, m_drop_cycles); end
    checks++;
    if (n_full == 0 || n_coll == 0) begin failures++; $display("full %0d collisions %0d", n_full, n_coll); end
    // clear empties the FIFO
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    #1 checks++;
    if (rec_valid) begin failures++; $display("FIFO not empty after clear"); end
    $display("records %0d popped %0d lost %0d (full %0d, collisions %0d)", m_rec, n_pop, m_drop, n_full, n_coll);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
