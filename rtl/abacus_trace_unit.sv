// abacus_trace_unit: time-stamped trace of data memory accesses.
//
// Every selected access (mem_ok from abacus_event_filter) becomes a record
// {time stamp, write flag, CPU number, process ID, address}
// (abacus_pkg::trace_rec_t) that is pushed into a DEPTH-entry FIFO. The DMA
// controller pops records through a valid/ready stream (rec_valid, rec,
// rec_ready; rec is read combinationally from the FIFO head) and writes them
// to main memory.
// One record is written per cycle. If several CPUs access in one cycle the
// lowest-numbered CPU is recorded and the others are lost; a full FIFO also
// loses the record. Every lost access is counted and pulses drop, which can
// raise an interrupt. clr empties the FIFO and zeroes the counters.
// Read port (combinational, rd_addr = word index): 0 records written,
// 1 accesses lost, 2 FIFO fill level.
// A time-stamped data-access trace follows the published description; the
// record layout, FIFO and loss policy are this design's own.
module abacus_trace_unit
  import abacus_pkg::*;
#(
  parameter int unsigned N_CPUS = 4,
  parameter int unsigned DEPTH  = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic [N_CPUS-1:0] mem_ok,
  input  cpu_dbg_t          dbg [N_CPUS],
  input  logic [TS_W-1:0]   ts,
  output logic              rec_valid,
  output trace_rec_t        rec,
  input  logic              rec_ready,
  output logic              drop,
  input  logic [9:0]        rd_addr,
  output logic [31:0]       rd_data
);

  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned IW = $clog2(N_CPUS + 1);

  trace_rec_t        mem [DEPTH];
  logic [PW-1:0]     wptr, rptr;
  logic [PW:0]       level;
  logic [31:0]       n_rec, n_drop;

  logic              any, push, pop, full;
  trace_rec_t        new_rec;
  logic [IW-1:0]     n_ev;

  always_comb begin
    any     = 1'b0;
    new_rec = '0;
    n_ev    = '0;
    for (int c = N_CPUS - 1; c >= 0; c--) begin
      n_ev += IW'(mem_ok[c]);
      if (mem_ok[c]) begin
        any         = 1'b1;
        new_rec.ts  = ts;
        new_rec.we  = dbg[c].mem_we;
        new_rec.cpu = CPU_ID_W'(c);
        new_rec.pid = dbg[c].pid;
        new_rec.addr = dbg[c].mem_addr;
      end
    end
    full      = (level == (PW+1)'(DEPTH));
    rec_valid = (level != '0);
    pop       = rec_valid && rec_ready;
    push      = any && !full;
  end

  assign rec = mem[rptr];

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= new_rec;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      wptr   <= '0;
      rptr   <= '0;
      level  <= '0;
      n_rec  <= '0;
      n_drop <= '0;
      drop   <= 1'b0;
    end else begin
      if (push) wptr <= (wptr == PW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == PW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      level  <= level + (PW+1)'(push) - (PW+1)'(pop);
      n_rec  <= n_rec + 32'(push);
      n_drop <= n_drop + 32'(n_ev) - 32'(push);
      drop   <= (32'(n_ev) - 32'(push)) != 0;
    end
  end

  always_comb begin
    unique case (rd_addr)
      10'd0:   rd_data = n_rec;
      10'd1:   rd_data = n_drop;
      10'd2:   rd_data = 32'(level);
      default: rd_data = '0;
    endcase
  end

endmodule
