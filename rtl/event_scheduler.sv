// event_scheduler: event ingestion and scheduling in front of the protocol
// logic engine (PLE).
//
// It accepts one event per cycle into the per-flow FIFOs of an event_store
// and dispatches at most one event per cycle from a flow that is eligible:
// its FIFO is non-empty and none of its events is inside the PLE. Instead of
// counting pipeline depth, it learns that a flow's event has left the PLE
// when that event returns (ret_valid) carrying the last-event bit that the
// store attached at dequeue. Two per-flow flag registers complete the
// picture (as in the paper):
//   active[f]  - f sits in an eligible-flow queue or has an event in the PLE,
//                so a new arrival must not enqueue it again;
//   arrived[f] - an event for f arrived after its last dispatch, which makes
//                the returned last-event bit stale.
// On return, f is queued again if the bit says more events wait, or if
// arrived[f] is set (or an event for f arrives in that same cycle);
// otherwise f becomes idle.
//
// Eligible flows wait in two FIFOs, one fed by arrivals to idle flows and
// one fed by returns, so that both can enqueue in the same cycle; a
// round-robin choice between them feeds the dispatcher. This reading of the
// two queues and the multiplexer drawn in the paper's scheduler figure is
// this design's. Back-pressure (paper, practical considerations): a flow
// whose bp bit is set when it is picked is moved to a third, withheld queue
// instead of being dispatched; the withheld queue has priority once its head
// is no longer back-pressured, and rotates when nothing else is eligible.
// Each queue holds at most every flow once, so FLOWS entries suffice.
//
// Timing: a dispatch in cycle t dequeues from the store; the event, its flow
// and last bit are presented to the PLE in cycle t+1 (ev_valid). dispatch /
// dispatch_flow show the dequeue cycle so that a context read can be issued
// in parallel. ple_ready low holds dispatch.
module event_scheduler #(
  parameter int unsigned FLOWS   = 1024,
  parameter int unsigned DEPTH   = 16,
  parameter int unsigned EVENT_W = 66
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // new events
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [$clog2(FLOWS)-1:0] in_flow,
  input  logic [EVENT_W-1:0]       in_event,
  // dispatch (dequeue cycle)
  input  logic                     ple_ready,
  output logic                     dispatch,
  output logic [$clog2(FLOWS)-1:0] dispatch_flow,
  // event to the PLE, one cycle after dispatch
  output logic                     ev_valid,
  output logic [$clog2(FLOWS)-1:0] ev_flow,
  output logic [EVENT_W-1:0]       ev_event,
  output logic                     ev_last,
  // returning event from the PLE
  input  logic                     ret_valid,
  input  logic [$clog2(FLOWS)-1:0] ret_flow,
  input  logic                     ret_last,
  // per-flow back-pressure from instruction execution
  input  logic [FLOWS-1:0]         bp,
  // observation
  output logic                     withhold,   // a picked flow was withheld this cycle
  output logic                     reinsert    // a returning flow was queued again
);
  localparam int unsigned FW = $clog2(FLOWS);
  localparam int unsigned CW = $clog2(FLOWS + 1);

  logic [FLOWS-1:0] active, arrived;

  // eligible-flow queues
  logic          nq_wr, nq_rd, nq_empty, nq_full;
  logic [FW-1:0] nq_wdata, nq_head;
  logic          rq_wr, rq_rd, rq_empty, rq_full;
  logic [FW-1:0] rq_wdata, rq_head;
  logic          wq_wr, wq_rd, wq_empty, wq_full;
  logic [FW-1:0] wq_wdata, wq_head;
  logic [CW-1:0] nq_cnt, rq_cnt, wq_cnt;

  sync_fifo #(.WIDTH(FW), .DEPTH(FLOWS)) u_new_q (
    .clk, .rst_n, .wr_en(nq_wr), .wr_data(nq_wdata), .rd_en(nq_rd), .rd_data(nq_head),
    .empty(nq_empty), .full(nq_full), .count(nq_cnt));
  sync_fifo #(.WIDTH(FW), .DEPTH(FLOWS)) u_ret_q (
    .clk, .rst_n, .wr_en(rq_wr), .wr_data(rq_wdata), .rd_en(rq_rd), .rd_data(rq_head),
    .empty(rq_empty), .full(rq_full), .count(rq_cnt));
  sync_fifo #(.WIDTH(FW), .DEPTH(FLOWS)) u_withheld_q (
    .clk, .rst_n, .wr_en(wq_wr), .wr_data(wq_wdata), .rd_en(wq_rd), .rd_data(wq_head),
    .empty(wq_empty), .full(wq_full), .count(wq_cnt));

  // event store
  logic ins;
  event_store #(.FLOWS(FLOWS), .DEPTH(DEPTH), .EVENT_W(EVENT_W)) u_store (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_flow, .in_event,
    .deq_valid(dispatch), .deq_flow(dispatch_flow),
    .out_valid(ev_valid), .out_flow(ev_flow), .out_event(ev_event), .out_last(ev_last));

  assign ins = in_valid && in_ready;

  // ---------------- selection ----------------
  logic prefer_ret;   // round-robin between the arrival and return queues
  logic pick_ret, pick_new;
  logic [FW-1:0] picked;

  always_comb begin
    nq_rd = 1'b0; rq_rd = 1'b0; wq_rd = 1'b0; wq_wr = 1'b0; wq_wdata = '0;
    dispatch = 1'b0; dispatch_flow = '0; withhold = 1'b0;
    pick_ret = !rq_empty && (prefer_ret || nq_empty);
    pick_new = !nq_empty && !pick_ret;
    picked   = pick_ret ? rq_head : nq_head;
    if (ple_ready) begin
      if (!wq_empty && !bp[wq_head]) begin
        wq_rd = 1'b1;
        dispatch = 1'b1;
        dispatch_flow = wq_head;
      end else if (pick_ret || pick_new) begin
        rq_rd = pick_ret;
        nq_rd = pick_new;
        if (bp[picked]) begin
          wq_wr    = 1'b1;
          wq_wdata = picked;
          withhold = 1'b1;
        end else begin
          dispatch      = 1'b1;
          dispatch_flow = picked;
        end
      end else if (!wq_empty) begin
        // only back-pressured flows wait: rotate so one blocked head does not hide the others
        wq_rd    = 1'b1;
        wq_wr    = 1'b1;
        wq_wdata = wq_head;
      end
    end
  end

  // ---------------- flag updates and re-insertion ----------------
  logic ret_more;
  always_comb begin
    ret_more = ret_valid && (!ret_last || arrived[ret_flow] || (ins && in_flow == ret_flow));
    rq_wr    = ret_more;
    rq_wdata = ret_flow;
    reinsert = ret_more;
    // a new event makes an idle flow eligible
    nq_wr    = ins && !active[in_flow] && !(ret_valid && ret_flow == in_flow);
    nq_wdata = in_flow;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active     <= '0;
      arrived    <= '0;
      prefer_ret <= 1'b0;
    end else begin
      if (rq_rd || nq_rd) prefer_ret <= !rq_rd;
      // arrival to a flow that is queued or in flight; an arrival in the
      // dispatch cycle is already counted in the dequeued last-event bit
      if (ins && active[in_flow] && !(dispatch && dispatch_flow == in_flow)
          && !(ret_valid && ret_flow == in_flow))
        arrived[in_flow] <= 1'b1;
      if (nq_wr) active[in_flow] <= 1'b1;
      if (dispatch) arrived[dispatch_flow] <= 1'b0;
      if (ret_valid) begin
        arrived[ret_flow] <= 1'b0;
        if (!ret_more) active[ret_flow] <= 1'b0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) ret_valid |-> active[ret_flow]);
  assert property (@(posedge clk) disable iff (!rst_n) !(nq_wr && nq_full));
  assert property (@(posedge clk) disable iff (!rst_n) !(rq_wr && rq_full));
endmodule
