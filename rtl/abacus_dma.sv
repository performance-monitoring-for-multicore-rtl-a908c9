// abacus_dma: copies trace records into a buffer in main memory.
//
// The operating system gives ABACUS a page of kernel memory; this controller
// fills it with trace records while the system runs, so software reads the
// data from memory instead of polling registers. The buffer is circular: it
// starts at base and holds size bytes (a non-zero multiple of 16, e.g. one
// 4096-byte page = 256 records). Each record is four 32-bit words written to
// consecutive addresses (layout in abacus_pkg::rec_word). wptr is the byte
// offset of the next word; software reads it to find the newest data. When
// the pointer returns to 0 the controller pulses wrap (an interrupt source).
// clr sets the pointer back to 0 (and drops a record in flight).
// Interfaces: record stream in (rec_valid/rec/rec_ready, a record is taken
// when both are 1), word-write port out to the memory controller
// (m_wr_valid/m_wr_addr/m_wr_data, accepted when m_wr_ready is 1; the
// address and data hold while valid waits).
// Timing: a record is popped in one cycle and each of its words takes at
// least one cycle, so the best rate is one record per five cycles.
// Copying collected data to a kernel page by DMA follows the published
// description; the circular layout and the write port are this design's own.
module abacus_dma
  import abacus_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              en,
  input  logic [31:0]       base,
  input  logic [31:0]       size,
  input  logic              rec_valid,
  input  trace_rec_t        rec,
  output logic              rec_ready,
  output logic              m_wr_valid,
  output logic [31:0]       m_wr_addr,
  output logic [31:0]       m_wr_data,
  input  logic              m_wr_ready,
  output logic [31:0]       wptr,
  output logic              wrap
);

  typedef enum logic {D_IDLE = 1'b0, D_WRITE = 1'b1} dma_state_e;

  dma_state_e  state;
  trace_rec_t  hold;
  logic [1:0]  idx;
  logic [31:0] wptr_next;

  assign rec_ready  = (state == D_IDLE) && en && !clr;
  assign m_wr_valid = (state == D_WRITE);
  assign m_wr_addr  = base + wptr;
  assign m_wr_data  = rec_word(hold, idx);
  assign wptr_next  = (wptr + 32'd4 >= size) ? 32'd0 : wptr + 32'd4;

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      state <= D_IDLE;
      hold  <= '0;
      idx   <= '0;
      wptr  <= '0;
      wrap  <= 1'b0;
    end else begin
      wrap <= 1'b0;
      unique case (state)
        D_IDLE: if (rec_valid && rec_ready) begin
          hold  <= rec;
          idx   <= '0;
          state <= D_WRITE;
        end
        D_WRITE: if (m_wr_ready) begin
          wptr <= wptr_next;
          wrap <= (wptr_next == 32'd0);
          idx  <= idx + 1'b1;
          if (idx == 2'd3) state <= D_IDLE;
        end
      endcase
    end
  end

  // The write port must hold its request until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n || clr)
      m_wr_valid && !m_wr_ready |=> m_wr_valid && $stable(m_wr_addr) && $stable(m_wr_data);
  endproperty
  a_hold: assert property (p_hold);

endmodule
