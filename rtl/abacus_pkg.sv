// abacus_pkg: types, widths and the register map shared by the ABACUS
// performance-monitoring hardware.
//
// ABACUS snoops a bundle of probe signals from every processor core
// (cpu_dbg_t), qualifies them per monitoring unit (unit_cfg_t) and stores
// what the units measure. Software reaches everything through a 32-bit
// register window on the system bus; trace records (trace_rec_t) are also
// copied to main memory by DMA.
//
// All widths and the register map are this design's own choices: the
// published description gives the architecture and the functions of the
// blocks but no encodings. PID_W = 8 matches the process-ID register of a
// MicroBlaze MMU.
package abacus_pkg;

  parameter int unsigned ADDR_W   = 32;  // monitored physical address width
  parameter int unsigned DATA_W   = 32;  // register and DMA word width
  parameter int unsigned PID_W    = 8;   // process/thread ID probed from a CPU
  parameter int unsigned TS_W     = 64;  // time stamp width
  parameter int unsigned CPU_ID_W = 8;   // CPU number field in a trace record
  parameter int unsigned MAX_CPUS = 8;   // width of a unit's CPU mask
  parameter int unsigned N_UNITS  = 5;   // monitoring units in this build
  parameter int unsigned N_IRQ    = 5;   // interrupt sources
  parameter int unsigned REG_AW   = 16;  // byte address bits of the register window

  // Probe bundle of one CPU, sampled every clock cycle.
  typedef struct packed {
    logic              mem_req;   // data memory access issued this cycle
    logic              mem_we;    // ... and it is a write
    logic [ADDR_W-1:0] mem_addr;  // ... to this physical address
    logic              mem_done;  // the outstanding data access completes
    logic              stall;     // pipeline stalled this cycle
    logic [PID_W-1:0]  pid;       // process/thread running on the CPU
    logic              ins_valid; // an instruction completes this cycle
    logic [ADDR_W-1:0] ins_addr;  // ... at this instruction address
  } cpu_dbg_t;

  // Configuration of one monitoring unit.
  typedef struct packed {
    logic                en;        // unit active while monitoring runs
    logic                pid_en;    // only count events of process `pid`
    logic [PID_W-1:0]    pid;
    logic [MAX_CPUS-1:0] cpu_mask;  // CPUs this unit listens to
    logic [ADDR_W-1:0]   addr_lo;   // address window, inclusive
    logic [ADDR_W-1:0]   addr_hi;
    logic [4:0]          shift;     // histogram bin = value >> shift
  } unit_cfg_t;

  // One time-stamped data memory access; four 32-bit words in memory:
  // word 0 addr, word 1 {we, 7'b0, cpu, 8'b0, pid}, word 2/3 time stamp lo/hi.
  typedef struct packed {
    logic [TS_W-1:0]     ts;
    logic                we;
    logic [CPU_ID_W-1:0] cpu;
    logic [PID_W-1:0]    pid;
    logic [ADDR_W-1:0]   addr;
  } trace_rec_t;

  function automatic logic [DATA_W-1:0] rec_word(trace_rec_t r, logic [1:0] idx);
    case (idx)
      2'd0:    return r.addr;
      2'd1:    return {r.we, 7'b0, r.cpu, 8'b0, r.pid};
      2'd2:    return r.ts[31:0];
      default: return r.ts[63:32];
    endcase
  endfunction

  // Trigger modes for the start and the stop condition.
  typedef enum logic [2:0] {
    TRIG_IMMEDIATE = 3'd0,  // start: as soon as armed; stop: never by itself
    TRIG_CYCLES    = 3'd1,  // after `val` clock cycles
    TRIG_ADDR      = 3'd2,  // on an access to address `val` by a CPU in CPU_EN
    TRIG_MANUAL    = 3'd3,  // only by the START/STOP command bits
    TRIG_INSTR     = 3'd4   // when a CPU in CPU_EN executes the instruction at
                            // `val`; as a start mode it reopens the window
                            // each time (e.g. every call of a function)
  } trig_mode_e;

  // Unit numbers.
  typedef enum logic [2:0] {
    UNIT_TRACE = 3'd0,
    UNIT_LAT   = 3'd1,
    UNIT_STALL = 3'd2,
    UNIT_HIST  = 3'd3,
    UNIT_PROF  = 3'd4
  } unit_e;

  // Interrupt source bits.
  localparam int IRQ_START = 0;  // monitoring window opened
  localparam int IRQ_STOP  = 1;  // monitoring window closed
  localparam int IRQ_WRAP  = 2;  // DMA buffer wrapped
  localparam int IRQ_DROP  = 3;  // a trace record was lost
  localparam int IRQ_WATCH = 4;  // a monitored CPU touched the watch address

  // Register map, byte addresses.
  localparam logic [REG_AW-1:0] R_CTRL       = 16'h000; // [0] arm [1] clear* [2] start* [3] stop*  (* self-clearing)
  localparam logic [REG_AW-1:0] R_STATUS     = 16'h004; // [0] running [1] armed [3:2] trigger state
  localparam logic [REG_AW-1:0] R_TS_LO      = 16'h008;
  localparam logic [REG_AW-1:0] R_TS_HI      = 16'h00C;
  localparam logic [REG_AW-1:0] R_START_MODE = 16'h010;
  localparam logic [REG_AW-1:0] R_START_VAL  = 16'h014;
  localparam logic [REG_AW-1:0] R_STOP_MODE  = 16'h018;
  localparam logic [REG_AW-1:0] R_STOP_VAL   = 16'h01C;
  localparam logic [REG_AW-1:0] R_IRQ_STATUS = 16'h020; // write 1 to clear
  localparam logic [REG_AW-1:0] R_IRQ_MASK   = 16'h024;
  localparam logic [REG_AW-1:0] R_WATCH_ADDR = 16'h028;
  localparam logic [REG_AW-1:0] R_CPU_EN     = 16'h02C;
  localparam logic [REG_AW-1:0] R_DMA_CTRL   = 16'h030; // [0] enable
  localparam logic [REG_AW-1:0] R_DMA_BASE   = 16'h034;
  localparam logic [REG_AW-1:0] R_DMA_SIZE   = 16'h038; // bytes, multiple of 16
  localparam logic [REG_AW-1:0] R_DMA_WPTR   = 16'h03C; // read only
  localparam logic [REG_AW-1:0] R_ID         = 16'h040; // read only {16'hABAC, UNIT_PRESENT[4:0], N_UNITS[2:0], N_CPUS[7:0]}
  // Unit u configuration at 0x100 + 0x20*u: +0 {shift[20:16], cpu_mask[15:8], pid_en[1], en[0]}
  // +4 pid, +8 addr_lo, +C addr_hi.
  localparam logic [REG_AW-1:0] R_UNIT_CFG   = 16'h100;
  // Unit u results at 0x1000*(u+1): a 4 KiB window, word index = addr[11:2].
  localparam logic [REG_AW-1:0] R_UNIT_DATA  = 16'h1000;

endpackage
