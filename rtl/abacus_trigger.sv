// abacus_trigger: opens and closes the monitoring window of ABACUS.
//
// Monitoring can start and stop on a number of clock cycles, on an access to
// a given memory address, or on command from software. The trigger is a
// four-state machine:
//   IDLE  not armed (CTRL.arm = 0); any state returns here when disarmed
//   WAIT  armed, waiting for the start condition
//   RUN   monitoring window open: running = 1
//   DONE  stop condition seen; stays here until disarmed or cleared
// Start condition (in WAIT), by start_mode:
//   TRIG_IMMEDIATE  at once: WAIT lasts one cycle
//   TRIG_CYCLES     after max(start_val,1) cycles in WAIT
//   TRIG_ADDR       a monitored CPU issues an access to address start_val
//   TRIG_MANUAL     only cmd_start
//   TRIG_INSTR      a monitored CPU executes the instruction at start_val;
//                   in this mode DONE also reopens the window on the next
//                   such instruction, so a function can be measured every
//                   time it runs (start_val = its entry, stop_val = its
//                   return instruction)
// cmd_start also starts in the other modes. Stop condition (in RUN), by
// stop_mode: TRIG_IMMEDIATE never stops by itself; TRIG_CYCLES closes the
// window after max(stop_val,1) cycles in RUN; TRIG_ADDR closes it after an
// access to stop_val (that access is still inside the window); TRIG_INSTR
// after the instruction at stop_val; cmd_stop always stops. clr (the soft reset of the units) sends an armed trigger
// back to WAIT.
// start_pulse and stop_pulse are one-cycle flags on the clock edge that
// enters RUN / leaves RUN, used as interrupt sources. All inputs are
// synchronous; dbg is the registered probe bundle from abacus_cpu_snoop.
// The conditions follow the published description; the modes, their
// encoding and the exact cycle counts are this design's own.
module abacus_trigger
  import abacus_pkg::*;
#(
  parameter int unsigned N_CPUS = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              arm,
  input  logic              clr,
  input  trig_mode_e        start_mode,
  input  logic [31:0]       start_val,
  input  trig_mode_e        stop_mode,
  input  logic [31:0]       stop_val,
  input  logic              cmd_start,
  input  logic              cmd_stop,
  input  cpu_dbg_t          dbg [N_CPUS],
  output logic              running,
  output logic [1:0]        state_o,
  output logic              start_pulse,
  output logic              stop_pulse
);

  typedef enum logic [1:0] {S_IDLE = 2'd0, S_WAIT = 2'd1, S_RUN = 2'd2, S_DONE = 2'd3} state_e;

  state_e      state, state_n;
  logic [31:0] cnt;
  logic        hit_start, hit_stop, ins_start, ins_stop, go, halt;

  always_comb begin
    hit_start = 1'b0;
    hit_stop  = 1'b0;
    ins_start = 1'b0;
    ins_stop  = 1'b0;
    for (int c = 0; c < N_CPUS; c++) begin
      hit_start |= dbg[c].mem_req && (dbg[c].mem_addr == start_val);
      hit_stop  |= dbg[c].mem_req && (dbg[c].mem_addr == stop_val);
      ins_start |= dbg[c].ins_valid && (dbg[c].ins_addr == start_val);
      ins_stop  |= dbg[c].ins_valid && (dbg[c].ins_addr == stop_val);
    end
    unique case (start_mode)
      TRIG_IMMEDIATE: go = 1'b1;
      TRIG_CYCLES:    go = (cnt + 32'd1 >= start_val);
      TRIG_ADDR:      go = hit_start;
      TRIG_INSTR:     go = ins_start;
      default:        go = 1'b0;
    endcase
    go |= cmd_start;
    unique case (stop_mode)
      TRIG_CYCLES: halt = (cnt + 32'd1 >= stop_val);
      TRIG_ADDR:   halt = hit_stop;
      TRIG_INSTR:  halt = ins_stop;
      default:     halt = 1'b0;
    endcase
    halt |= cmd_stop;

    state_n = state;
    if (!arm)
      state_n = S_IDLE;
    else if (clr)
      state_n = S_WAIT;
    else begin
      unique case (state)
        S_IDLE: state_n = S_WAIT;
        S_WAIT: if (go)   state_n = S_RUN;
        S_RUN:  if (halt) state_n = S_DONE;
        S_DONE: if (start_mode == TRIG_INSTR && go) state_n = S_RUN;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cnt         <= '0;
      start_pulse <= 1'b0;
      stop_pulse  <= 1'b0;
    end else begin
      state       <= state_n;
      cnt         <= (state_n != state) ? 32'd0 : cnt + 32'd1;
      start_pulse <= (state != S_RUN) && (state_n == S_RUN);
      stop_pulse  <= (state == S_RUN) && (state_n != S_RUN);
    end
  end

  assign running = (state == S_RUN);
  assign state_o = state;

endmodule
