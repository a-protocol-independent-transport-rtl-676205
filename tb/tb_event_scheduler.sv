// tb_event_scheduler: self-checking test of event ingestion and scheduling.
//
// A PLE stand-in with a fixed pipeline depth returns every dispatched event
// PLE_DEPTH cycles after it arrives, with the last-event bit it carried.
// Each event holds (flow, per-flow sequence number). The test checks that
// every event is dispatched exactly once and in per-flow order, that no
// flow ever has two events in the PLE, that no back-pressured flow is
// dispatched, and that the steady-state rate reaches one event per cycle
// when many flows are active (phase 1: 64 flows, bursts of 4). Phase 2
// applies back-pressure to half of the flows for a while and checks that
// their events are withheld and later delivered. Phase 3 keeps feeding one
// flow so that events arrive while it is in flight (reinsertion through the
// per-flow flags).
module tb_event_scheduler;
  localparam int FLOWS = 64, DEPTH = 16, W = 32, PLE_DEPTH = 3;
  localparam int FW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, ple_ready, dispatch, ev_valid, ev_last, ret_valid, ret_last;
  logic withhold, reinsert;
  logic [FW-1:0] in_flow, dispatch_flow, ev_flow, ret_flow;
  logic [W-1:0] in_event, ev_event;
  logic [FLOWS-1:0] bp;

  event_scheduler #(.FLOWS(FLOWS), .DEPTH(DEPTH), .EVENT_W(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // PLE stand-in: delay line
  logic          dl_v [PLE_DEPTH];
  logic [FW-1:0] dl_f [PLE_DEPTH];
  logic          dl_l [PLE_DEPTH];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < PLE_DEPTH; i++) dl_v[i] <= 0;
    else begin
      dl_v[0] <= ev_valid; dl_f[0] <= ev_flow; dl_l[0] <= ev_last;
      for (int i = 1; i < PLE_DEPTH; i++) begin dl_v[i] <= dl_v[i-1]; dl_f[i] <= dl_f[i-1]; dl_l[i] <= dl_l[i-1]; end
    end
  end
  assign ret_valid = dl_v[PLE_DEPTH-1];
  assign ret_flow  = dl_f[PLE_DEPTH-1];
  assign ret_last  = dl_l[PLE_DEPTH-1];

  // scoreboard
  int sent_seq [FLOWS], got_seq [FLOWS];
  bit inflight [FLOWS];
  int total_in = 0, total_out = 0, withholds = 0, reinserts = 0, bp_violations = 0;
  int win_disp = 0;
  bit count_win = 0;

  always @(posedge clk) if (rst_n) begin
    if (dispatch) begin
      check(!bp[dispatch_flow], "dispatched a back-pressured flow");
      check(!inflight[dispatch_flow], $sformatf("flow %0d dispatched twice", dispatch_flow));
      inflight[dispatch_flow] = 1;
      if (count_win) win_disp++;
    end
    if (ev_valid) begin
      check(ev_event[31:24] == 8'(ev_flow), "event flow tag");
      check(int'(ev_event[23:0]) == got_seq[ev_flow], $sformatf("flow %0d order: got %0d want %0d",
            ev_flow, ev_event[23:0], got_seq[ev_flow]));
      got_seq[ev_flow]++;
      total_out++;
    end
    if (ret_valid) inflight[ret_flow] = 0;
    if (withhold) withholds++;
    if (reinsert) reinserts++;
  end

  task automatic send(input int f);
    in_valid = 1; in_flow = FW'(f); in_event = {8'(f), 24'(sent_seq[f])};
    @(posedge clk); #1;
    while (!in_ready) begin @(posedge clk); #1; end
    sent_seq[f]++; total_in++;
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic send_nowait(input int f, output bit ok);
    in_valid = 1; in_flow = FW'(f); in_event = {8'(f), 24'(sent_seq[f])};
    #1 ok = in_ready;
    @(posedge clk);
    if (ok) begin sent_seq[f]++; total_in++; end
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    bit ok;
    in_valid = 0; in_flow = 0; in_event = 0; ple_ready = 1; bp = '0;
    for (int f = 0; f < FLOWS; f++) begin sent_seq[f] = 0; got_seq[f] = 0; inflight[f] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // phase 1: 64 flows, bursts of 4 back to back, one event per cycle
    for (int r = 0; r < 8; r++)
      for (int f = 0; f < FLOWS; f++)
        for (int b = 0; b < 4; b++) begin
          if (r == 2 && f == 0 && b == 0) count_win = 1;
          if (r == 6 && f == 0 && b == 0) count_win = 0;
          send_nowait(f, ok);
          check(ok, "in_ready in phase 1");
        end
    repeat (100) @(negedge clk);
    check(total_out == total_in, $sformatf("phase 1 drained %0d/%0d", total_out, total_in));
    // 4 rounds x 64 flows x 4 = 1024 insert cycles in the window
    check(win_disp >= 1000, $sformatf("steady-state dispatch %0d of 1024 cycles", win_disp));
    $display("phase1 window dispatches=%0d / 1024", win_disp);
    // phase 2: back-pressure on even flows
    bp = {FLOWS/2{2'b01}};
    for (int f = 0; f < FLOWS; f++) begin send(f); send(f); end
    repeat (300) @(negedge clk);
    check(withholds > 0, "flows withheld under back-pressure");
    check(total_out == total_in - FLOWS, $sformatf("only odd flows delivered: %0d vs %0d", total_out, total_in - FLOWS));
    bp = '0;
    repeat (300) @(negedge clk);
    check(total_out == total_in, "withheld flows delivered after release");
    // phase 3: one flow fed while its events are in flight
    for (int i = 0; i < 40; i++) begin send(5); if (i % 3 == 0) @(negedge clk); end
    repeat (300) @(negedge clk);
    check(total_out == total_in, "single-flow stream drained");
    // PLE not ready for a while: nothing dispatched
    ple_ready = 0;
    for (int f = 0; f < 4; f++) send(f);
    repeat (20) @(negedge clk);
    check(total_out == total_in - 4, "ple_ready low holds dispatch");
    ple_ready = 1;
    repeat (200) @(negedge clk);
    check(total_out == total_in, $sformatf("final drain %0d/%0d", total_out, total_in));
    check(reinserts > 0, "flows re-inserted on return");
    for (int f = 0; f < FLOWS; f++) check(got_seq[f] == sent_seq[f], "per-flow count");
    $display("in=%0d out=%0d withholds=%0d reinserts=%0d", total_in, total_out, withholds, reinserts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
