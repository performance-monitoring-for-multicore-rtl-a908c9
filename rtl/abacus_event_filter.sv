// abacus_event_filter: selects, for one monitoring unit, which CPU events
// the unit may record.
//
// A unit is configured on its own (abacus_pkg::unit_cfg_t): it can be
// enabled or not, listen to any subset of the CPUs, be restricted to one
// process ID and to an inclusive physical address window [addr_lo, addr_hi].
// Nothing is selected while the monitoring window (running) is closed.
//   cpu_ok[c] : unit enabled, running, CPU c in the mask and PID matching
//   mem_ok[c] : cpu_ok[c], CPU c issues a data access, address in the window
//   ins_ok[c] : cpu_ok[c], CPU c completes an instruction whose address is
//               in the window (used by the code profiling unit)
// Purely combinational. Restricting units to processes, address ranges and
// CPU subsets follows the published description; the exact set of filters
// is this design's own choice.
module abacus_event_filter
  import abacus_pkg::*;
#(
  parameter int unsigned N_CPUS = 4
) (
  input  logic              running,
  input  unit_cfg_t         cfg,
  input  cpu_dbg_t          dbg [N_CPUS],
  output logic [N_CPUS-1:0] cpu_ok,
  output logic [N_CPUS-1:0] mem_ok,
  output logic [N_CPUS-1:0] ins_ok
);

  always_comb begin
    for (int c = 0; c < N_CPUS; c++) begin
      cpu_ok[c] = running && cfg.en && cfg.cpu_mask[c] &&
                  (!cfg.pid_en || (dbg[c].pid == cfg.pid));
      mem_ok[c] = cpu_ok[c] && dbg[c].mem_req &&
                  (dbg[c].mem_addr >= cfg.addr_lo) &&
                  (dbg[c].mem_addr <= cfg.addr_hi);
      ins_ok[c] = cpu_ok[c] && dbg[c].ins_valid &&
                  (dbg[c].ins_addr >= cfg.addr_lo) &&
                  (dbg[c].ins_addr <= cfg.addr_hi);
    end
  end

endmodule
