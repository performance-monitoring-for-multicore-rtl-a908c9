// abacus_latency_unit: histogram of data memory access latencies.
//
// Each CPU has at most one data access outstanding (an in-order core with a
// blocking data port). The unit times every access from the cycle its
// request is seen (req) to the cycle its completion is seen (done):
//   latency = cycle(done) - cycle(req)      (0 if both fall in one cycle)
// and, if the access was selected when it was issued (req_ok from
// abacus_event_filter: unit active, CPU mask, process ID, address window),
// adds one to bin min(latency >> shift, BINS-1). If a new request arrives in
// the cycle the previous access completes, the completion belongs to the
// previous access. The per-access timer saturates at 2**LAT_W-1.
// Read port (combinational, rd_addr = word index): 0..BINS-1 hist, BINS the
// largest latency seen, BINS+1 number of accesses timed, BINS+2 sum of their
// latencies (low 32 bits), so software can form the mean.
// Several CPUs may complete in one cycle; each bin adds all of them.
// The latency histogram follows the published description; the timing
// points, binning and the extra max/count/sum words are this design's own.
module abacus_latency_unit #(
  parameter int unsigned N_CPUS = 4,
  parameter int unsigned BINS   = 32,
  parameter int unsigned CNT_W  = 32,
  parameter int unsigned LAT_W  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic [4:0]        shift,
  input  logic [N_CPUS-1:0] req,
  input  logic [N_CPUS-1:0] req_ok,
  input  logic [N_CPUS-1:0] done,
  input  logic [9:0]        rd_addr,
  output logic [31:0]       rd_data
);

  localparam int unsigned IW = $clog2(N_CPUS + 1);
  localparam int unsigned BW = $clog2(BINS);

  logic [N_CPUS-1:0] busy, sel;
  logic [LAT_W-1:0]  timer [N_CPUS];
  logic [N_CPUS-1:0] rec;           // a selected access completes
  logic [LAT_W-1:0]  lat   [N_CPUS];
  logic [BW-1:0]     bin   [N_CPUS];
  logic [IW-1:0]     inc   [BINS];
  logic [IW-1:0]     inc_all;
  logic [LAT_W-1:0]  lat_max_n;
  logic [31:0]       lat_sum_n;

  logic [CNT_W-1:0]  hist [BINS];
  logic [LAT_W-1:0]  lat_max;
  logic [CNT_W-1:0]  n_acc;
  logic [31:0]       lat_sum;

  always_comb begin
    inc_all   = '0;
    lat_max_n = lat_max;
    lat_sum_n = lat_sum;
    for (int c = 0; c < N_CPUS; c++) begin
      if (busy[c]) begin
        rec[c] = done[c] && sel[c];
        lat[c] = timer[c];
      end else begin
        rec[c] = done[c] && req[c] && req_ok[c];
        lat[c] = '0;
      end
      bin[c] = ((lat[c] >> shift) >= LAT_W'(BINS - 1)) ? BW'(BINS - 1)
                                                        : BW'(lat[c] >> shift);
      inc_all += IW'(rec[c]);
      if (rec[c]) begin
        if (lat[c] > lat_max_n) lat_max_n = lat[c];
        lat_sum_n = lat_sum_n + 32'(lat[c]);
      end
    end
    for (int b = 0; b < BINS; b++) begin
      inc[b] = '0;
      for (int c = 0; c < N_CPUS; c++)
        inc[b] += IW'(rec[c] && (bin[c] == BW'(b)));
    end
  end

  // Per-CPU access timers.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= '0;
      sel  <= '0;
      for (int c = 0; c < N_CPUS; c++) timer[c] <= '0;
    end else begin
      for (int c = 0; c < N_CPUS; c++) begin
        if (req[c] && (busy[c] || !done[c])) begin
          // a new access stays outstanding (a completion this cycle, if any,
          // closes the previous one)
          busy[c]  <= 1'b1;
          sel[c]   <= req_ok[c];
          timer[c] <= LAT_W'(1);
        end else if (busy[c] && done[c]) begin
          busy[c] <= 1'b0;
        end else if (busy[c] && timer[c] != '1) begin
          timer[c] <= timer[c] + 1'b1;
        end
      end
    end
  end

  // Histogram and statistics.
  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      for (int b = 0; b < BINS; b++) hist[b] <= '0;
      lat_max <= '0;
      n_acc   <= '0;
      lat_sum <= '0;
    end else begin
      for (int b = 0; b < BINS; b++) hist[b] <= hist[b] + CNT_W'(inc[b]);
      lat_max <= lat_max_n;
      n_acc   <= n_acc + CNT_W'(inc_all);
      lat_sum <= lat_sum_n;
    end
  end

  always_comb begin
    rd_data = '0;
    if (32'(rd_addr) < BINS)         rd_data = 32'(hist[rd_addr[BW-1:0]]);
    else if (32'(rd_addr) == BINS)   rd_data = 32'(lat_max);
    else if (32'(rd_addr) == BINS+1) rd_data = 32'(n_acc);
    else if (32'(rd_addr) == BINS+2) rd_data = lat_sum;
  end

endmodule
