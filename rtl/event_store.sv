// event_store: per-flow event FIFOs for the event scheduler.
//
// Events are kept in a pool of ring buffers, one of DEPTH entries per flow,
// held in one buffer RAM. Two more RAMs hold each flow's tail pointer (used
// only by insertion) and head pointer (used only by dequeue), so that one
// insertion and one dequeue can proceed in the same cycle without touching
// the same pointer memory. Occupancy is kept in per-flow counters that are
// incremented on insertion and decremented on dequeue rather than derived
// from the pointers; the counters detect full queues and produce the
// last-event bit that is attached to every dequeued event (1 = the queue is
// empty after this dequeue, counting an insertion to the same flow in the
// same cycle). These structures follow the paper.
//
// Interface and timing (this design's choices): insertion is a valid/ready
// handshake, with in_ready low while the addressed flow's queue is full. A
// dequeue request (deq_valid, deq_flow) must name a non-empty flow; the event
// appears on out_* one cycle later (the buffer RAM has a registered read).
// The pointer RAMs are read combinationally. DEPTH must be a power of two.
module event_store #(
  parameter int unsigned FLOWS   = 1024,
  parameter int unsigned DEPTH   = 16,
  parameter int unsigned EVENT_W = 66
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // insertion
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [$clog2(FLOWS)-1:0] in_flow,
  input  logic [EVENT_W-1:0]       in_event,
  // dequeue request
  input  logic                     deq_valid,
  input  logic [$clog2(FLOWS)-1:0] deq_flow,
  // dequeued event, one cycle after the request
  output logic                     out_valid,
  output logic [$clog2(FLOWS)-1:0] out_flow,
  output logic [EVENT_W-1:0]       out_event,
  output logic                     out_last
);
  localparam int unsigned FW = $clog2(FLOWS);
  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [EVENT_W-1:0] buf_mem  [FLOWS*DEPTH];
  logic [PW-1:0]      tail_mem [FLOWS];
  logic [PW-1:0]      head_mem [FLOWS];
  logic [CW-1:0]      cnt      [FLOWS];

  logic ins, same;
  logic [CW-1:0] deq_cnt_after;

  assign in_ready      = (cnt[in_flow] != CW'(DEPTH));
  assign ins           = in_valid && in_ready;
  assign same          = ins && deq_valid && (in_flow == deq_flow);
  assign deq_cnt_after = cnt[deq_flow] - 1'b1 + $bits(deq_cnt_after)'(same);

  // buffer RAM: write port for insertion, registered read port for dequeue
  always_ff @(posedge clk) begin
    if (ins) buf_mem[{in_flow, tail_mem[in_flow]}] <= in_event;
    if (deq_valid) out_event <= buf_mem[{deq_flow, head_mem[deq_flow]}];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int f = 0; f < FLOWS; f++) begin
        tail_mem[f] <= '0;
        head_mem[f] <= '0;
        cnt[f]      <= '0;
      end
      out_valid <= 1'b0;
      out_flow  <= '0;
      out_last  <= 1'b0;
    end else begin
      if (ins)       tail_mem[in_flow]  <= tail_mem[in_flow] + 1'b1;
      if (deq_valid) head_mem[deq_flow] <= head_mem[deq_flow] + 1'b1;
      if (same) begin
        cnt[in_flow] <= cnt[in_flow];
      end else begin
        if (ins)       cnt[in_flow]  <= cnt[in_flow] + 1'b1;
        if (deq_valid) cnt[deq_flow] <= cnt[deq_flow] - 1'b1;
      end
      out_valid <= deq_valid;
      if (deq_valid) begin
        out_flow <= deq_flow;
        out_last <= (deq_cnt_after == '0);
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) deq_valid |-> (cnt[deq_flow] != '0));
  initial assert ((1 << PW) == DEPTH) else $error("event_store: DEPTH must be a power of two");
endmodule
