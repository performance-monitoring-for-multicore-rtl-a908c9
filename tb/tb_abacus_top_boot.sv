// tb_abacus_top_boot: ABACUS built with a subset of its units and a boot
// configuration, used without any software set-up. Only the latency and
// stall units are built (UNIT_PRESENT = 5'b00110) and the stall unit is
// enabled and armed from reset (BOOT_ARM, BOOT_UNIT_EN = 4'b0100). The four
// CPU models stall at random; the testbench counts the stall cycles itself
// and, after the run, reads them over the bus. It also checks the ID
// register and that the windows of the units not built read 0.
module tb_abacus_top_boot;
  import abacus_pkg::*;
  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] s_awaddr, s_wdata, s_araddr, s_rdata;
  logic [3:0]  s_wstrb;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [1:0] s_bresp, s_rresp;
  cpu_dbg_t cpu_dbg_i [N];
  logic m_wr_valid, m_wr_ready, irq;
  logic [31:0] m_wr_addr, m_wr_data;
  longint unsigned r_stall [N];
  int checks = 0, failures = 0;
  bit on = 0;

  abacus_top #(.UNIT_PRESENT(5'b00110), .BOOT_ARM(1'b1), .BOOT_UNIT_EN(5'b00100)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic axi_read(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 0; s_rready = 1;
    do @(posedge clk); while (!s_rvalid);
    d = s_rdata;
    @(negedge clk) s_rready = 0;
  endtask

  // stall probes; monitoring runs from the second cycle after reset, so
  // stalls driven from then on are all counted
  always @(negedge clk) begin
    for (int c = 0; c < N; c++) begin
      cpu_dbg_i[c].stall = on && ($urandom % (c + 2) == 0);
      if (cpu_dbg_i[c].stall) r_stall[c]++;
    end
  end

  initial begin
    logic [31:0] v, lo, hi;
    s_awaddr = 0; s_wdata = 0; s_araddr = 0; s_wstrb = 0;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    m_wr_ready = 1;
    for (int c = 0; c < N; c++) begin cpu_dbg_i[c] = '0; r_stall[c] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (2) @(posedge clk);
    on = 1;
    repeat (3000) @(posedge clk);
    on = 0;
    repeat (3) @(posedge clk);
    axi_read(R_ID, v);
    check(v == 32'hABAC_3504, $sformatf("ID %h", v));
    axi_read(R_STATUS, v);
    check(v[0] && v[1], "armed and running from reset");
    for (int c = 0; c < N; c++) begin
      axi_read(32'h3008 + 8 * c, lo); axi_read(32'h300C + 8 * c, hi);
      check({hi, lo} == r_stall[c] && r_stall[c] > 0,
            $sformatf("cpu %0d stalls %0d want %0d", c, {hi, lo}, r_stall[c]));
    end
    axi_read(32'h1000, v); check(v == 0, "trace unit not built reads 0");
    axi_read(32'h4000 + 4 * 65, v); check(v == 0, "histogram unit not built reads 0");
    check(!m_wr_valid, "no DMA traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
