// abacus_irq: the interrupt system of ABACUS.
//
// Each source bit is an event pulse (monitoring started or stopped, DMA
// buffer wrapped, trace record dropped, watch address touched; bit numbers in
// abacus_pkg). A pulse sets a sticky status bit; software clears status bits
// by writing 1s (clr). The single interrupt line to the system interrupt
// controller is the OR of the status bits that are enabled in mask, and is
// registered. A source pulse and a clear of the same bit in one cycle leave
// the bit set, so no event is lost.
// Timing: status changes the cycle after src/clr; irq follows one cycle later.
// Raising an interrupt when a configured situation is detected follows the
// published description; the sources, the W1C status and the mask are this
// design's choices.
module abacus_irq #(
  parameter int unsigned N_SRC = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_SRC-1:0] src,
  input  logic [N_SRC-1:0] mask,
  input  logic [N_SRC-1:0] clr,
  output logic [N_SRC-1:0] status,
  output logic             irq
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      status <= '0;
      irq    <= 1'b0;
    end else begin
      status <= (status & ~clr) | src;
      irq    <= |(status & mask);
    end
  end

endmodule
