// tb_abacus_latency_unit: each CPU model issues data accesses with random
// latencies (including zero-wait accesses and a new request in the cycle the
// previous one completes). The testbench knows every latency it produced,
// bins the selected ones itself and compares all bins, the maximum, the count
// and the sum of latencies.
module tb_abacus_latency_unit;
  localparam int N = 3;
  localparam int B = 8;
  localparam int SH = 1;
  logic clk = 1'b0, rst_n = 1'b0;
  logic clr;
  logic [4:0] shift;
  logic [N-1:0] req, req_ok, done;
  logic [9:0] rd_addr;
  logic [31:0] rd_data;
  int unsigned m_hist [B];
  int unsigned m_max, m_cnt, m_sum;
  int n_zero = 0, n_b2b = 0, n_sat = 0;
  int checks = 0, failures = 0;

  // per-CPU access model state
  int remaining [N];   // cycles until done; -1 = idle
  int lat_of    [N];
  logic sel_of  [N];

  abacus_latency_unit #(.N_CPUS(N), .BINS(B)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void record(int lat);
    int b;
    b = lat >> SH;
    if (b > B - 1) begin b = B - 1; n_sat++; end
    m_hist[b]++;
    m_cnt++;
    m_sum += lat;
    if (lat > m_max) m_max = lat;
  endfunction

  function automatic int pick_lat();
    int r;
    r = $urandom % 10;
    if (r == 0) return 0;
    if (r == 1) return 15 + $urandom % 10;  // long: saturating bins
    return 1 + $urandom % 8;
  endfunction

  initial begin
    clr = 0; shift = 5'(SH); req = '0; req_ok = '0; done = '0; rd_addr = '0;
    for (int b = 0; b < B; b++) m_hist[b] = 0;
    m_max = 0; m_cnt = 0; m_sum = 0;
    for (int c = 0; c < N; c++) remaining[c] = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      for (int c = 0; c < N; c++) begin
        req[c] = 0; req_ok[c] = 0; done[c] = 0;
        if (remaining[c] == 0) begin
          done[c] = 1;
          if (sel_of[c]) record(lat_of[c]);
          remaining[c] = -1;
          // sometimes issue the next access in the completion cycle
          if ($urandom % 4 == 0) begin
            req[c] = 1; req_ok[c] = 1'($urandom % 4 != 0);
            lat_of[c] = 1 + $urandom % 8; sel_of[c] = req_ok[c];
            remaining[c] = lat_of[c];
            n_b2b++;
          end
        end else if (remaining[c] > 0) begin
          remaining[c]--;
        end else if ($urandom % 3 == 0) begin
          req[c] = 1; req_ok[c] = 1'($urandom % 4 != 0);
          lat_of[c] = pick_lat(); sel_of[c] = req_ok[c];
          if (lat_of[c] == 0) begin
            done[c] = 1;
            if (sel_of[c]) record(0);
            n_zero++;
          end else remaining[c] = lat_of[c];
        end
        // the model decrements after the request cycle
        if (req[c] && remaining[c] > 0) remaining[c]--;
      end
    end
    // drain
    for (int k = 0; k < 40; k++) begin
      @(negedge clk);
      for (int c = 0; c < N; c++) begin
        done[c] = 0; req[c] = 0; req_ok[c] = 0;
        if (remaining[c] == 0) begin
          done[c] = 1;
          if (sel_of[c]) record(lat_of[c]);
          remaining[c] = -1;
        end else if (remaining[c] > 0) remaining[c]--;
      end
    end
    @(negedge clk) done = '0;
    for (int w = 0; w < B + 3; w++) begin
      int unsigned want;
      want = (w < B) ? m_hist[w] : (w == B) ? m_max : (w == B + 1) ? m_cnt : m_sum;
      rd_addr = 10'(w); #1;
      checks++;
      if (rd_data != want) begin failures++; $display("word %0d = %0d want %0d", w, rd_data, want); end
    end
    checks++;
    if (n_zero == 0 || n_b2b == 0 || n_sat == 0) begin
      failures++; $display("corner cases not reached: zero %0d b2b %0d sat %0d", n_zero, n_b2b, n_sat);
    end
    $display("accesses %0d, zero-wait %0d, back-to-back %0d, saturated %0d", m_cnt, n_zero, n_b2b, n_sat);
    // clear
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    for (int w = 0; w < B + 3; w++) begin
      rd_addr = 10'(w); #1;
      checks++;
      if (rd_data != 0) begin failures++; $display("word %0d not cleared", w); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
