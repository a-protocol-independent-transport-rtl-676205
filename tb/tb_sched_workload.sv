// tb_sched_workload: the scheduler workloads of the evaluation, at the
// default size (1024 flows, 16-deep per-flow event buffers).
//
// Events arrive one per cycle. Each flow in turn sends a burst of B
// consecutive events (flow 0 B times, then flow 1, ...). A PLE stand-in of
// depth D returns every event D cycles after it entered, with its last-event
// bit. The runs are:
//   * D = 3, 10 and 100 with bursts of 10 over 1024 flows: the dispatch rate,
//     measured over windows of 50 cycles, must reach 90 % of one event per
//     cycle; the cycle at which it does so is printed (deeper PLEs keep
//     flows ineligible longer, so concurrency builds up later);
//   * bursts of 1 with D = 3: the rate must be at line rate from the first
//     window on;
//   * bursts of 100 with D = 3 over 64 flows: a burst is larger than the
//     16-entry flow buffer, so the input stalls on the bursting flow and the
//     rate is bounded by one event per PLE round trip of that flow; only
//     correctness is checked and the rate is printed.
// Every run checks that each event is dispatched once, in per-flow order,
// and that no flow ever has two events in the PLE.
module tb_sched_workload;
  localparam int FLOWS = 1024, FW = 10, W = 66, WIN = 50;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, ple_ready, dispatch, ev_valid, ev_last, ret_valid, ret_last;
  logic withhold, reinsert;
  logic [FW-1:0] in_flow, dispatch_flow, ev_flow, ret_flow;
  logic [W-1:0] in_event, ev_event;
  logic [FLOWS-1:0] bp;

  event_scheduler dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // PLE stand-in: an event entering in cycle c returns in cycle c + D
  int D = 3;
  int cyc = 0;
  logic          rg_v [256];
  logic [FW-1:0] rg_f [256];
  logic          rg_l [256];
  assign ret_valid = rg_v[cyc % 256];
  assign ret_flow  = rg_f[cyc % 256];
  assign ret_last  = rg_l[cyc % 256];
  always @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < 256; i++) begin rg_v[i] <= 0; rg_f[i] <= '0; rg_l[i] <= 0; end
    end else begin
      rg_v[cyc % 256] <= 0;
      if (ev_valid) begin
        rg_v[(cyc + D) % 256] <= 1; rg_f[(cyc + D) % 256] <= ev_flow; rg_l[(cyc + D) % 256] <= ev_last;
      end
    end
    cyc <= cyc + 1;
  end

  // scoreboard
  int  got_seq [FLOWS];
  bit  inflight [FLOWS];
  int  n_out = 0, win_cnt = 0, win_pos = 0, first_full = -1, first_win = -1, t0 = 0;
  bit  feeding = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_valid) begin
      check(!inflight[ev_flow], "two events of one flow in the PLE");
      check(int'(ev_event[FW +: 32]) == got_seq[ev_flow] && int'(ev_event[FW-1:0]) == int'(ev_flow),
            $sformatf("flow %0d order", ev_flow));
      got_seq[ev_flow]++;
      inflight[ev_flow] = 1;
      n_out++;
    end
    if (ret_valid) inflight[ret_flow] = 0;
    if (feeding) begin
      win_cnt += dispatch;
      win_pos++;
      if (win_pos == WIN) begin
        if (first_win < 0) first_win = win_cnt;
        if (first_full < 0 && win_cnt >= WIN * 9 / 10) first_full = cyc - t0;
        win_cnt = 0; win_pos = 0;
      end
    end
  end

  task automatic run(input int depth, input int burst, input int flows, input int rounds,
                     input bit need_line_rate, input bit need_immediate);
    int total = burst * flows * rounds, t_start, t_end, idx = 0;
    rst_n = 0; D = depth;
    in_valid = 0; in_flow = 0; in_event = '0;
    for (int f = 0; f < FLOWS; f++) begin got_seq[f] = 0; inflight[f] = 0; end
    n_out = 0; win_cnt = 0; win_pos = 0; first_full = -1; first_win = -1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    t0 = cyc; t_start = cyc; feeding = 1;
    for (int r = 0; r < rounds; r++)
      for (int f = 0; f < flows; f++)
        for (int b = 0; b < burst; b++) begin
          in_valid = 1; in_flow = FW'(f);
          in_event = {24'd0, 32'(r * burst + b), FW'(f)};
          #1;
          while (!in_ready) begin @(negedge clk); #1; end
          @(negedge clk);
        end
    in_valid = 0;
    feeding = 0;
    t_end = cyc;
    while (n_out != total) @(negedge clk);
    repeat (depth + 5) @(negedge clk);
    for (int f = 0; f < flows; f++) check(got_seq[f] == burst * rounds, $sformatf("flow %0d count", f));
    $display("depth %0d burst %0d flows %0d: %0d events, %0d input cycles (%0.3f events/cycle), 90%% of line rate after %0d cycles, first window %0d/%0d",
             depth, burst, flows, total, t_end - t_start, real'(total) / real'(t_end - t_start), first_full, first_win, WIN);
    if (need_line_rate) check(first_full >= 0, $sformatf("depth %0d burst %0d never reached line rate", depth, burst));
    if (need_immediate) check(first_win >= WIN * 9 / 10, $sformatf("burst %0d not at line rate from the start", burst));
  endtask

  initial begin
    ple_ready = 1; bp = '0; in_valid = 0; in_flow = 0; in_event = '0;
    run(3,   10, 1024, 1, 1, 0);
    run(10,  10, 1024, 1, 1, 0);
    run(100, 10, 1024, 1, 1, 0);
    run(3,    1, 1024, 10, 1, 1);
    run(3,  100,   64, 1, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
