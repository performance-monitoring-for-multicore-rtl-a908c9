// tb_abacus_irq: random event pulses, masks and write-1-to-clear operations
// against a cycle-accurate reference model of the sticky status register and
// the registered interrupt line.
module tb_abacus_irq;
  localparam int N = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] src, mask, clr, status;
  logic irq;
  logic [N-1:0] m_status;
  logic m_irq;
  int checks = 0, failures = 0;
  int n_irq = 0;

  abacus_irq #(.N_SRC(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    src = '0; mask = '0; clr = '0;
    m_status = '0; m_irq = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      src  = N'($urandom) & N'($urandom) & N'($urandom);
      clr  = ($urandom % 4 == 0) ? N'($urandom) : '0;
      if (i % 100 == 0) mask = N'($urandom);
      @(posedge clk);
      m_irq    = |(m_status & mask);
      m_status = (m_status & ~clr) | src;
      #1;
      checks++;
      if (status !== m_status || irq !== m_irq) begin
        failures++;
        $display("mismatch at %0d: status %b/%b irq %b/%b", i, status, m_status, irq, m_irq);
      end
      if (irq) n_irq++;
    end
    checks++;
    if (n_irq == 0) begin failures++; $display("irq never asserted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
