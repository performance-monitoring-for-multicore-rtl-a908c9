// tb_abacus_bus_if: an AXI4-Lite master drives random writes and reads into
// the bus interface, with address and data offered in either order or
// together and with random delays on BREADY and RREADY. Behind the register
// port sits a small register array. Checks: read data equals the last value
// written, exactly one write strobe per write, OKAY responses, and the read
// latency of one cycle from the AR handshake to RVALID.
module tb_abacus_bus_if;
  import abacus_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] s_awaddr, s_wdata, s_araddr, s_rdata;
  logic [3:0]  s_wstrb;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [1:0] s_bresp, s_rresp;
  logic reg_wr;
  logic [REG_AW-1:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic [31:0] regs [64];
  logic [31:0] model [64];
  int n_strobe = 0, n_writes = 0, n_reads = 0;
  int n_aw_first = 0, n_w_first = 0, n_both = 0;
  int checks = 0, failures = 0;

  abacus_bus_if dut (.*);

  always #5 clk = ~clk;

  // register array behind the port
  assign reg_rdata = regs[reg_addr[7:2]];
  always @(posedge clk) if (rst_n && reg_wr) begin
    regs[reg_addr[7:2]] <= reg_wdata;
    n_strobe++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axi_write(input logic [31:0] a, input logic [31:0] d);
    int order;
    bit aw_done = 0, w_done = 0;
    order = $urandom % 3;
    @(negedge clk);
    if (order == 0) n_both++; else if (order == 1) n_aw_first++; else n_w_first++;
    s_awaddr = a; s_wdata = d; s_wstrb = 4'hF;
    s_awvalid = (order != 2);
    s_wvalid  = (order != 1);
    while (!(aw_done && w_done)) begin
      @(posedge clk);
      if (s_awvalid && s_awready) aw_done = 1;
      if (s_wvalid && s_wready) w_done = 1;
      @(negedge clk);
      if (aw_done) s_awvalid = 0;
      if (w_done)  s_wvalid  = 0;
      if (!aw_done) s_awvalid = 1;
      if (!w_done)  s_wvalid  = 1;
    end
    s_awvalid = 0; s_wvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    checks++;
    if (s_bresp != 2'b00) begin failures++; $display("BRESP not OKAY"); end
    @(negedge clk) s_bready = 0;
    n_writes++;
  endtask

  task automatic axi_read(input logic [31:0] a, output logic [31:0] d);
    int lat;
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk) s_arvalid = 0;
    lat = 1;
    checks++;
    if (!s_rvalid) begin failures++; $display("RVALID not one cycle after AR"); end
    repeat ($urandom % 3) @(negedge clk);
    checks++;
    if (!s_rvalid) begin failures++; $display("RVALID dropped before RREADY"); end
    s_rready = 1;
    @(posedge clk);
    d = s_rdata;
    checks++;
    if (s_rresp != 2'b00) begin failures++; $display("RRESP not OKAY"); end
    @(negedge clk) s_rready = 0;
    n_reads++;
  endtask

  initial begin
    logic [31:0] v;
    s_awaddr = 0; s_wdata = 0; s_araddr = 0; s_wstrb = 0;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    for (int i = 0; i < 64; i++) begin regs[i] = 0; model[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      int idx;
      idx = $urandom % 64;
      if ($urandom % 2) begin
        v = $urandom;
        axi_write(32'h8000_0000 | 32'(idx * 4), v);
        model[idx] = v;
      end else begin
        axi_read(32'h8000_0000 | 32'(idx * 4), v);
        checks++;
        if (v != model[idx]) begin failures++; $display("read %0d: %h want %h", idx, v, model[idx]); end
      end
    end
    repeat (3) @(posedge clk);
    checks++;
    if (n_strobe != n_writes) begin failures++; $display("%0d strobes for %0d writes", n_strobe, n_writes); end
    checks++;
    if (n_aw_first == 0 || n_w_first == 0 || n_both == 0) begin failures++; $display("orderings not covered"); end
    $display("writes %0d reads %0d", n_writes, n_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
