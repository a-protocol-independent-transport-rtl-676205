// tb_event_store: self-checking test of the per-flow event FIFOs.
//
// A reference model keeps one queue per flow. Random insertions (including
// ones to full queues, which must be refused) and dequeues of random
// non-empty flows run concurrently, with extra same-flow insert/dequeue
// collisions. Every dequeued event and its last-event bit are compared with
// the model one cycle after the request, as is in_ready.
module tb_event_store;
  localparam int FLOWS = 8, DEPTH = 4, W = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, deq_valid, out_valid, out_last;
  logic [2:0] in_flow, deq_flow, out_flow;
  logic [W-1:0] in_event, out_event;

  event_store #(.FLOWS(FLOWS), .DEPTH(DEPTH), .EVENT_W(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] q [FLOWS][$];
  logic exp_valid, exp_last; logic [2:0] exp_flow; logic [W-1:0] exp_ev;
  int refused = 0, lasts = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; deq_valid = 0; in_flow = 0; deq_flow = 0; in_event = 0; exp_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // check the response to last cycle's dequeue
      if (exp_valid) begin
        check(out_valid && out_flow == exp_flow && out_event == exp_ev && out_last == exp_last,
              $sformatf("deq flow %0d ev %h/%h last %0d/%0d", exp_flow, out_event, exp_ev, out_last, exp_last));
        if (exp_last) lasts++;
      end else check(!out_valid, "spurious out_valid");
      // drive this cycle
      in_valid = ($urandom % 3) != 0;
      in_flow  = 3'($urandom % (cyc < 2000 ? 3 : FLOWS));
      in_event = W'($urandom);
      deq_valid = 0;
      begin
        int f = $urandom % FLOWS;
        if ($urandom % 4 == 0) f = in_flow;
        if (q[f].size() > 0 && ($urandom % 2)) begin deq_valid = 1; deq_flow = 3'(f); end
      end
      #1;
      check(in_ready == (q[in_flow].size() < DEPTH), "in_ready");
      if (in_valid && q[in_flow].size() == DEPTH) refused++;
      exp_valid = deq_valid;
      if (deq_valid) begin
        exp_flow = deq_flow;
        exp_ev   = q[deq_flow].pop_front();
      end
      if (in_valid && in_ready) q[in_flow].push_back(in_event);
      if (deq_valid) exp_last = (q[deq_flow].size() == 0);
    end
    check(refused > 0, "full queue refusals exercised");
    check(lasts > 0, "last-event bits exercised");
    $display("refused=%0d lasts=%0d", refused, lasts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
