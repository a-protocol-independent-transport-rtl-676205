// tb_timer_module: self-checking test of the per-flow timers.
//
// 8 flows x 2 timers, 4-cycle ticks, so the scanner visits every timer each
// 16 cycles (4 ticks). Timers are started with random durations, some are
// stopped, some restarted with a longer duration before expiry. Each
// timeout must come for an armed timer, not before its deadline and not
// later than one scan period (plus the output handshake) after it; stopped
// timers must never fire and every armed timer must fire exactly once. The
// output is randomly stalled.
module tb_timer_module;
  import pita_pkg::*;
  localparam int FLOWS = 8, TIMERS = 2, TICK = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic instr_valid, instr_ready, to_valid, to_ready;
  logic [2:0] instr_flow, to_flow;
  tm_instr_t instr;
  logic [7:0] to_tid;
  timer_module #(.FLOWS(FLOWS), .TIMERS(TIMERS), .TICK_CYCLES(TICK)) dut (.*);

  int checks = 0, failures = 0, fired = 0;
  longint cyc = 0;
  bit     armed [FLOWS*TIMERS];
  longint due   [FLOWS*TIMERS];   // earliest cycle of expiry
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && to_valid && to_ready) begin
    automatic int k = int'(to_flow) * TIMERS + int'(to_tid);
    checks++;
    if (!armed[k]) begin failures++; $display("FAIL timeout of unarmed timer %0d", k); end
    else if (cyc < due[k] || cyc > due[k] + FLOWS*TIMERS + 2*TICK + 40) begin
      failures++; $display("FAIL timer %0d fired at %0d, due %0d", k, cyc, due[k]);
    end
    armed[k] = 0;
    fired++;
  end

  always @(negedge clk) to_ready = ($urandom % 4) != 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input int f, input int t, input tm_op_e op, input int dur);
    @(negedge clk);
    instr_valid = 1; instr_flow = 3'(f); instr.op = op; instr.tid = 8'(t); instr.duration = TICK_W'(dur);
    @(posedge clk);
    // the tick counter may advance in this edge: allow the deadline one tick early
    armed[f*TIMERS+t] = (op == TM_START);
    due[f*TIMERS+t]   = cyc + (dur - 1) * TICK;
    @(negedge clk); instr_valid = 0;
  endtask

  initial begin
    int started = 0;
    instr_valid = 0; instr_flow = 0; instr = '0;
    for (int k = 0; k < FLOWS*TIMERS; k++) armed[k] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      for (int k = 0; k < FLOWS*TIMERS; k++) if (!armed[k] && $urandom % 2) begin
        issue(k / TIMERS, k % TIMERS, TM_START, 5 + $urandom % 60);
        started++;
      end
      // stop a few, restart a few
      for (int k = 0; k < FLOWS*TIMERS; k++) begin
        if (armed[k] && $urandom % 6 == 0) issue(k / TIMERS, k % TIMERS, TM_STOP, 0);
        else if (armed[k] && $urandom % 6 == 0) issue(k / TIMERS, k % TIMERS, TM_START, 80);
      end
      repeat (200) @(negedge clk);
    end
    repeat (600) @(negedge clk);
    for (int k = 0; k < FLOWS*TIMERS; k++) begin checks++; if (armed[k]) begin failures++; $display("FAIL timer %0d never fired", k); end end
    checks++; if (fired < 20) failures++;
    $display("started=%0d fired=%0d", started, fired);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
