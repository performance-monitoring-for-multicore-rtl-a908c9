// tb_abacus_dma: feeds random trace records into the DMA controller while a
// memory model accepts word writes with random back-pressure. The testbench
// predicts the address and data of every word (four words per record, in a
// circular buffer of BUF bytes at BASE), checks the write pointer, the wrap
// pulses, the hold rule of the write port, and the best-case rate of one
// record per five cycles.
module tb_abacus_dma;
  import abacus_pkg::*;
  localparam logic [31:0] BASE = 32'h1F00_0000;
  localparam int BUF = 256;  // bytes: 16 records
  logic clk = 1'b0, rst_n = 1'b0;
  logic clr, en;
  logic [31:0] base, size;
  logic rec_valid, rec_ready;
  trace_rec_t rec;
  logic m_wr_valid, m_wr_ready, wrap;
  logic [31:0] m_wr_addr, m_wr_data, wptr;
  trace_rec_t sent [$];
  int unsigned exp_off = 0, n_words = 0, n_wrap = 0, exp_wrap = 0;
  int checks = 0, failures = 0;
  int rand_ready = 1;

  abacus_dma dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic trace_rec_t rand_rec();
    trace_rec_t r;
    r.ts = {$urandom, $urandom}; r.we = 1'($urandom); r.cpu = CPU_ID_W'($urandom);
    r.pid = PID_W'($urandom); r.addr = $urandom;
    return r;
  endfunction

  // memory side: check each accepted word
  trace_rec_t cur;
  int widx = 0;
  always @(posedge clk) begin
    if (rst_n && !clr) begin
      if (wrap) n_wrap++;
      if (m_wr_valid && m_wr_ready) begin
        logic [31:0] want;
        if (widx == 0) cur = sent.pop_front();
        want = rec_word(cur, 2'(widx));
        checks++;
        if (m_wr_addr != BASE + exp_off || m_wr_data != want) begin
          failures++;
          $display("word %0d: addr %h data %h want %h %h", n_words, m_wr_addr, m_wr_data, BASE + exp_off, want);
        end
        exp_off = (exp_off + 4 >= BUF) ? 0 : exp_off + 4;
        if (exp_off == 0) exp_wrap++;
        widx = (widx + 1) % 4;
        n_words++;
      end
    end
  end

  // producer: record stream with random gaps
  always @(negedge clk) begin
    if (!rst_n) begin
      rec_valid <= 1'b0;
    end else begin
      if (rec_valid && rec_ready) rec_valid = 1'b0;
      if (!rec_valid && ($urandom % 3 != 0 || !rand_ready)) begin
        rec = rand_rec();
        rec_valid = 1'b1;
      end
      m_wr_ready = rand_ready ? 1'($urandom % 3 != 0) : 1'b1;
    end
  end
  always @(posedge clk) if (rec_valid && rec_ready) sent.push_back(rec);

  initial begin
    int t0, words0;
    clr = 0; en = 0; base = BASE; size = BUF; rec = '0; m_wr_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);
    checks++;
    if (n_words != 0) begin failures++; $display("wrote while disabled"); end
    en = 1;
    repeat (4000) @(posedge clk);
    // full rate: memory always ready, source always valid
    rand_ready = 0;
    repeat (10) @(posedge clk);
    words0 = n_words;
    repeat (500) @(posedge clk);
    checks++;
    if (n_words - words0 != 400) begin failures++; $display("rate: %0d words in 500 cycles, want 400", n_words - words0); end
    en = 0;
    repeat (20) @(posedge clk);
    #1;
    checks++;
    if (wptr != exp_off) begin failures++; $display("wptr %0d want %0d", wptr, exp_off); end
    checks++;
    if (n_wrap != exp_wrap || n_wrap == 0) begin failures++; $display("wraps %0d want %0d", n_wrap, exp_wrap); end
    checks++;
    if (sent.size() != 0) begin failures++; $display("%0d records not written", sent.size()); end
    $display("words %0d wraps %0d", n_words, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
