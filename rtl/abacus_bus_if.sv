// abacus_bus_if: the system bus interface of ABACUS, an AXI4-Lite slave.
//
// ABACUS occupies an address range on the system bus, so the operating
// system (through its driver) reads and writes status and configuration
// registers and reads unit results with ordinary loads and stores. This
// block turns AXI4-Lite transactions into a simple register port:
//   reg_wr    one-cycle write strobe with reg_addr / reg_wdata
//   reg_addr  byte address (low REG_AW bits of the bus address)
//   reg_rdata read data, combinational from reg_addr, sampled on the cycle
//             the read is accepted
// One transaction at a time. A write is accepted when both its address and
// its data have arrived (either may come first); the write strobe fires on
// the cycle after both handshakes, and BVALID follows together with it.
// A read address is accepted when no write is pending; RDATA is registered
// and RVALID rises on the next cycle. Responses are always OKAY; WSTRB is
// ignored (registers are written whole). Reads take priority only when no
// write half is waiting.
// Timing: write 2 cycles from the last of AW/W to BVALID (if BREADY), read
// 1 cycle from AR to RVALID.
// The bus (PLB or AXI) and memory mapping follow the published description;
// the choice of AXI4-Lite and this handshake detail are this design's own.
module abacus_bus_if
  import abacus_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [31:0]       s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic [31:0]       s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready,
  // register port
  output logic              reg_wr,
  output logic [REG_AW-1:0] reg_addr,
  output logic [31:0]       reg_wdata,
  input  logic [31:0]       reg_rdata
);

  logic              aw_have, w_have;
  logic [REG_AW-1:0] aw_q;
  logic [31:0]       w_q;
  logic              rd_sel;

  assign s_awready = !aw_have && !s_bvalid && !reg_wr;
  assign s_wready  = !w_have  && !s_bvalid && !reg_wr;
  assign s_arready = !aw_have && !w_have && !s_awvalid && !s_wvalid &&
                     !s_rvalid && !s_bvalid && !reg_wr;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign rd_sel    = s_arvalid && s_arready;

  // The register port carries the write address when a write fires and the
  // read address otherwise.
  assign reg_addr  = reg_wr ? aw_q : s_araddr[REG_AW-1:0];
  assign reg_wdata = w_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      aw_have  <= 1'b0;
      w_have   <= 1'b0;
      aw_q     <= '0;
      w_q      <= '0;
      reg_wr   <= 1'b0;
      s_bvalid <= 1'b0;
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      reg_wr <= 1'b0;
      if (s_awvalid && s_awready) begin
        aw_have <= 1'b1;
        aw_q    <= s_awaddr[REG_AW-1:0];
      end
      if (s_wvalid && s_wready) begin
        w_have <= 1'b1;
        w_q    <= s_wdata;
      end
      if ((aw_have || (s_awvalid && s_awready)) && (w_have || (s_wvalid && s_wready))) begin
        aw_have  <= 1'b0;
        w_have   <= 1'b0;
        reg_wr   <= 1'b1;
        s_bvalid <= 1'b1;
      end else if (s_bvalid && s_bready) begin
        s_bvalid <= 1'b0;
      end
      if (rd_sel) begin
        s_rvalid <= 1'b1;
        s_rdata  <= reg_rdata;
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response, once valid, holds until it is taken.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

  logic [3:0] unused_strb;
  assign unused_strb = s_wstrb;

endmodule
