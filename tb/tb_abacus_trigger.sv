// tb_abacus_trigger: takes the trigger through each start and stop mode and
// checks the exact cycle on which the monitoring window opens and closes,
// the one-cycle start/stop pulses, disarming and clearing.
module tb_abacus_trigger;
  import abacus_pkg::*;
  localparam int N = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic arm, clr, cmd_start, cmd_stop;
  trig_mode_e start_mode, stop_mode;
  logic [31:0] start_val, stop_val;
  cpu_dbg_t dbg [N];
  logic running, start_pulse, stop_pulse;
  logic [1:0] state_o;
  int checks = 0, failures = 0;
  int n_start = 0, n_stop = 0;

  abacus_trigger #(.N_CPUS(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (rst_n && start_pulse) n_start++;
    if (rst_n && stop_pulse)  n_stop++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  task automatic idle_dbg();
    for (int c = 0; c < N; c++) dbg[c] = '0;
  endtask

  // arm the trigger and return the number of cycles until running
  task automatic arm_and_wait(output int cyc);
    @(negedge clk) arm = 1'b1;
    cyc = 0;
    do begin @(posedge clk); #1; cyc++; end while (!running && cyc < 1000);
  endtask

  task automatic run_length(output int cyc);
    cyc = 0;
    while (running && cyc < 1000) begin @(posedge clk); #1; cyc++; end
  endtask

  task automatic disarm();
    @(negedge clk) arm = 1'b0;
    @(posedge clk); #1;
    check(!running && state_o == 2'd0, "disarm returns to IDLE");
  endtask

  initial begin
    int cyc;
    arm = 0; clr = 0; cmd_start = 0; cmd_stop = 0;
    start_mode = TRIG_IMMEDIATE; stop_mode = TRIG_IMMEDIATE;
    start_val = 0; stop_val = 0;
    idle_dbg();
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk); #1;
    check(!running, "not running while disarmed");

    // immediate start: IDLE -> WAIT -> RUN, two edges after arm
    arm_and_wait(cyc);
    check(cyc == 2, $sformatf("immediate start after %0d cycles, want 2", cyc));
    repeat (50) @(posedge clk); #1;
    check(running, "immediate stop mode never stops");
    disarm();

    // start after 10 cycles, stop after 7 cycles
    start_mode = TRIG_CYCLES; start_val = 10;
    stop_mode  = TRIG_CYCLES; stop_val  = 7;
    arm_and_wait(cyc);
    check(cyc == 11, $sformatf("cycle start after %0d cycles, want 11", cyc));
    run_length(cyc);
    check(cyc == 7, $sformatf("window %0d cycles, want 7", cyc));
    check(state_o == 2'd3, "DONE after stop");
    repeat (20) @(posedge clk); #1;
    check(!running, "stays stopped");
    // clear re-arms the cycle start
    @(negedge clk) clr = 1; @(negedge clk) clr = 0;
    cyc = 0;
    do begin @(posedge clk); #1; cyc++; end while (!running && cyc < 1000);
    check(cyc == 10, $sformatf("restart after clear %0d cycles, want 10", cyc));
    disarm();

    // start on an address access by CPU 1, stop on another address by CPU 0
    start_mode = TRIG_ADDR; start_val = 32'h8000_0040;
    stop_mode  = TRIG_ADDR; stop_val  = 32'h8000_0080;
    @(negedge clk) arm = 1;
    repeat (30) begin
      @(negedge clk);
      idle_dbg();
      dbg[0].mem_req = 1; dbg[0].mem_addr = 32'h8000_0044;
      dbg[1].mem_addr = 32'h8000_0040; // address matches but no request
    end
    #1 check(!running, "no start without a matching access");
    @(negedge clk);
    idle_dbg();
    dbg[1].mem_req = 1; dbg[1].mem_addr = 32'h8000_0040;
    @(posedge clk); #1;
    check(running, "start on the cycle after the matching access");
    @(negedge clk) idle_dbg();
    repeat (25) @(posedge clk); #1;
    check(running, "still running");
    @(negedge clk);
    dbg[0].mem_req = 1; dbg[0].mem_addr = 32'h8000_0080;
    #1 check(running, "window includes the stop access");
    @(posedge clk); #1;
    check(!running, "stop after the stop access");
    @(negedge clk) idle_dbg();
    disarm();

    // instruction trigger: a window for every execution of a "function"
    // entered at 0x100 and left through its return at 0x13C; data accesses
    // to those addresses do not count
    start_mode = TRIG_INSTR; start_val = 32'h0000_0100;
    stop_mode  = TRIG_INSTR; stop_val  = 32'h0000_013C;
    @(negedge clk) arm = 1;
    repeat (10) begin
      @(negedge clk);
      idle_dbg();
      dbg[0].mem_req = 1; dbg[0].mem_addr = 32'h0000_0100;
      dbg[1].ins_valid = 1; dbg[1].ins_addr = 32'h0000_00FC;
    end
    #1 check(!running, "no start on a data access or another instruction");
    for (int call = 0; call < 3; call++) begin
      int n_run;
      n_run = 0;
      @(negedge clk);
      idle_dbg();
      dbg[call % N].ins_valid = 1; dbg[call % N].ins_addr = 32'h0000_0100;
      @(posedge clk); #1;
      check(running, $sformatf("call %0d opens the window", call));
      @(negedge clk) idle_dbg();
      repeat (12 + call) begin @(posedge clk); #1; if (running) n_run++; end
      @(negedge clk);
      dbg[(call + 1) % N].ins_valid = 1; dbg[(call + 1) % N].ins_addr = 32'h0000_013C;
      @(posedge clk); #1;
      check(!running && n_run == 12 + call, $sformatf("call %0d: window closes at the return (%0d)", call, n_run));
      @(negedge clk) idle_dbg();
      repeat (8) @(posedge clk);
    end
    disarm();

    // manual start and stop
    start_mode = TRIG_MANUAL; stop_mode = TRIG_MANUAL;
    @(negedge clk) arm = 1;
    repeat (40) @(posedge clk); #1;
    check(!running, "manual mode waits for the command");
    @(negedge clk) cmd_start = 1; @(negedge clk) cmd_start = 0;
    #1 check(running, "manual start");
    repeat (15) @(posedge clk); #1;
    check(running, "manual keeps running");
    @(negedge clk) cmd_stop = 1; @(negedge clk) cmd_stop = 0;
    #1 check(!running, "manual stop");
    disarm();

    check(n_start == 8, $sformatf("%0d start pulses, want 8", n_start));
    check(n_stop == 8, $sformatf("%0d stop pulses, want 8", n_stop));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
