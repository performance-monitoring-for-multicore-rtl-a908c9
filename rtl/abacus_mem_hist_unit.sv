// abacus_mem_hist_unit: histogram of data memory accesses by address region.
//
// The address space above the unit's addr_lo is cut into BINS regions of
// 2**shift bytes each; every selected access (mem_ok from
// abacus_event_filter, which already applies the address window, CPU mask
// and process ID) adds one to the counter of its region:
//   bin = (addr - addr_lo) >> shift
// Accesses past the last region go to an overflow counter. All CPUs may
// access in the same cycle: each bin adds the number of CPUs that hit it, so
// no access is lost. clr zeroes all counters.
// Read port (combinational, rd_addr = word index): 0..BINS-1 bin counters,
// BINS overflow counter, BINS+1 total of all selected accesses.
// The region histogram follows the published description; equal power-of-two
// regions and flip-flop counters (instead of a block RAM) are this design's
// choices: a block RAM could take only one update per cycle.
module abacus_mem_hist_unit
  import abacus_pkg::*;
#(
  parameter int unsigned N_CPUS = 4,
  parameter int unsigned BINS   = 64,
  parameter int unsigned CNT_W  = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic [ADDR_W-1:0] addr_lo,
  input  logic [4:0]        shift,
  input  logic [N_CPUS-1:0] mem_ok,
  input  cpu_dbg_t          dbg [N_CPUS],
  input  logic [9:0]        rd_addr,
  output logic [31:0]       rd_data
);

  localparam int unsigned IW = $clog2(N_CPUS + 1);

  logic [CNT_W-1:0]  hist [BINS];
  logic [CNT_W-1:0]  ovf, total;
  logic [ADDR_W-1:0] off  [N_CPUS];
  logic [N_CPUS-1:0] in_range;
  logic [IW-1:0]     inc  [BINS];
  logic [IW-1:0]     inc_ovf, inc_all;

  always_comb begin
    for (int c = 0; c < N_CPUS; c++) begin
      off[c]      = (dbg[c].mem_addr - addr_lo) >> shift;
      in_range[c] = off[c] < ADDR_W'(BINS);
    end
    inc_ovf = '0;
    inc_all = '0;
    for (int c = 0; c < N_CPUS; c++) begin
      inc_all += IW'(mem_ok[c]);
      inc_ovf += IW'(mem_ok[c] && !in_range[c]);
    end
    for (int b = 0; b < BINS; b++) begin
      inc[b] = '0;
      for (int c = 0; c < N_CPUS; c++)
        inc[b] += IW'(mem_ok[c] && in_range[c] && (off[c] == ADDR_W'(b)));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      for (int b = 0; b < BINS; b++) hist[b] <= '0;
      ovf   <= '0;
      total <= '0;
    end else begin
      for (int b = 0; b < BINS; b++) hist[b] <= hist[b] + CNT_W'(inc[b]);
      ovf   <= ovf + CNT_W'(inc_ovf);
      total <= total + CNT_W'(inc_all);
    end
  end

  always_comb begin
    rd_data = '0;
    if (32'(rd_addr) < BINS)         rd_data = 32'(hist[rd_addr[$clog2(BINS)-1:0]]);
    else if (32'(rd_addr) == BINS)   rd_data = 32'(ovf);
    else if (32'(rd_addr) == BINS+1) rd_data = 32'(total);
  end

endmodule
