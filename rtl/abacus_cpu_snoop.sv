// abacus_cpu_snoop: the "CPU debug signals" interface of ABACUS.
//
// Every CPU exposes a probe bundle (abacus_pkg::cpu_dbg_t): the strobe,
// address and direction of a data memory access, the cycle in which that
// access completes, a pipeline-stall flag, the ID of the running process and
// the address of each instruction as it completes (for instruction triggers).
// This block samples all bundles into one register stage, so the monitor
// only loads the processor's nets with flip-flop inputs and never adds logic
// on the processor's own paths; all monitoring logic works on dbg_o, one
// cycle after the event.
//
// CPUs whose bit in cpu_en is 0 are left out of monitoring altogether: their
// event flags (mem_req, mem_done, stall, ins_valid) are cleared; the
// addresses and PID still pass so that debug reads stay meaningful. The block also compares every
// monitored access with a watch address and reports the CPUs that hit it,
// which the interrupt system turns into a "situation detected" interrupt.
//
// Timing: dbg_o and watch_hit are registered, one cycle after dbg_i.
// The probe set and the register stage are this design's choices; the
// published architecture only says that signals are snooped from the CPUs.
module abacus_cpu_snoop
  import abacus_pkg::*;
#(
  parameter int unsigned N_CPUS = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_CPUS-1:0]    cpu_en,
  input  logic [ADDR_W-1:0]    watch_addr,
  input  cpu_dbg_t             dbg_i [N_CPUS],
  output cpu_dbg_t             dbg_o [N_CPUS],
  output logic [N_CPUS-1:0]    watch_hit
);

  for (genvar c = 0; c < N_CPUS; c++) begin : g_cpu
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        dbg_o[c]     <= '0;
        watch_hit[c] <= 1'b0;
      end else begin
        dbg_o[c].mem_we    <= dbg_i[c].mem_we;
        dbg_o[c].mem_addr  <= dbg_i[c].mem_addr;
        dbg_o[c].pid       <= dbg_i[c].pid;
        dbg_o[c].ins_addr  <= dbg_i[c].ins_addr;
        dbg_o[c].mem_req   <= dbg_i[c].mem_req   & cpu_en[c];
        dbg_o[c].mem_done  <= dbg_i[c].mem_done  & cpu_en[c];
        dbg_o[c].stall     <= dbg_i[c].stall     & cpu_en[c];
        dbg_o[c].ins_valid <= dbg_i[c].ins_valid & cpu_en[c];
        watch_hit[c]      <= dbg_i[c].mem_req & cpu_en[c] &
                             (dbg_i[c].mem_addr == watch_addr);
      end
    end
  end

endmodule
