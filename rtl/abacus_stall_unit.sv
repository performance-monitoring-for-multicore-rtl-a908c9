// abacus_stall_unit: counts the clock cycles each processor is stalled.
//
// While the unit is active (monitoring running and the unit enabled), every
// cycle in which a selected CPU reports a pipeline stall adds one to that
// CPU's stall counter; a second counter holds the number of active cycles,
// so software can form the stall ratio. The per-CPU selection (CPU mask and
// process ID) arrives as cpu_ok from abacus_event_filter. clr zeroes all
// counters.
// Read port (combinational, 32-bit words, rd_addr = word index):
//   0/1 active cycles lo/hi, 2+2c / 3+2c stall cycles of CPU c lo/hi,
//   anything else reads 0.
// Counters are CNT_W-bit flip-flop counters updated every cycle, so the unit
// has no rate limit. Measuring stall cycles follows the published
// description; the counter width and the active-cycle counter are this
// design's choices.
module abacus_stall_unit #(
  parameter int unsigned N_CPUS = 4,
  parameter int unsigned CNT_W  = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              active,
  input  logic [N_CPUS-1:0] cpu_ok,
  input  logic [N_CPUS-1:0] stall,
  input  logic [9:0]        rd_addr,
  output logic [31:0]       rd_data
);

  logic [CNT_W-1:0] cycles;
  logic [CNT_W-1:0] stalls [N_CPUS];
  logic [63:0]      rd_word;

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      cycles <= '0;
      for (int c = 0; c < N_CPUS; c++) stalls[c] <= '0;
    end else begin
      if (active) cycles <= cycles + 1'b1;
      for (int c = 0; c < N_CPUS; c++)
        if (cpu_ok[c] && stall[c]) stalls[c] <= stalls[c] + 1'b1;
    end
  end

  always_comb begin
    rd_word = '0;
    if (rd_addr[9:1] == 9'd0)
      rd_word = 64'(cycles);
    for (int c = 0; c < N_CPUS; c++)
      if (32'(rd_addr[9:1]) == c + 1) rd_word = 64'(stalls[c]);
    rd_data = rd_addr[0] ? rd_word[63:32] : rd_word[31:0];
  end

endmodule
