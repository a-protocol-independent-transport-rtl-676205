// timer_module: per-flow protocol timers driven by timer instructions.
//
// Each flow has TIMERS timers (the number is set per protocol). A timer
// instruction starts (or restarts) timer tid of a flow with a duration in
// ticks, or stops it. A tick is TICK_CYCLES clock cycles; the paper notes
// that transport timers rarely need a resolution finer than a few
// microseconds. Expiry is found by a scanner that visits one (flow, timer)
// entry per cycle and compares its deadline with the tick counter, so with
// the default 1024 flows x 2 timers every timer is looked at every 2048
// cycles (8.2 us at 250 MHz): the timeout fires at most one scan period
// late. An expired timer is disarmed and produces a timeout event (flow,
// tid) on a valid/ready output that feeds the event scheduler. The scan
// design and its sizes are this design's choices; the paper only says the
// module follows prior work.
//
// Instructions are always accepted (instr_ready is high); an instruction
// write to the entry under the scanner holds the scanner for that cycle.
// Deadlines are compared with wrap-around arithmetic, so durations must be
// below 2^(TICK_W-1) ticks.
// Two kinds of outputs are constant by design. instr_ready is tied high,
// since a timer instruction only writes one table entry and there is
// nothing to queue. to_tid is 8 bits wide, the width of the instruction's
// tid field, but only its low $clog2(TIMERS) bits can be non-zero.
module timer_module
  import pita_pkg::*;
#(
  parameter int unsigned FLOWS       = 1024,
  parameter int unsigned TIMERS      = 2,
  parameter int unsigned TICK_CYCLES = 250
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     instr_valid,
  output logic                     instr_ready,
  input  logic [$clog2(FLOWS)-1:0] instr_flow,
  input  tm_instr_t                instr,
  output logic                     to_valid,
  input  logic                     to_ready,
  output logic [$clog2(FLOWS)-1:0] to_flow,
  output logic [7:0]               to_tid
);
  localparam int unsigned FW = $clog2(FLOWS);
  localparam int unsigned TW = (TIMERS > 1) ? $clog2(TIMERS) : 1;
  localparam int unsigned N  = FLOWS * TIMERS;
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned PW = (TICK_CYCLES > 1) ? $clog2(TICK_CYCLES) : 1;

  logic [N-1:0]      armed;
  logic [TICK_W-1:0] deadline [N];
  logic [TICK_W-1:0] now;
  logic [PW-1:0]     pre;
  logic [NW-1:0]     scan;

  logic [NW-1:0] widx;
  logic          wr, hit, expired, out_free;

  assign instr_ready = 1'b1;
  assign widx     = NW'(instr_flow) * NW'(TIMERS) + NW'(instr.tid[TW-1:0]);
  assign wr       = instr_valid;
  assign out_free = !to_valid || to_ready;
  assign hit      = wr && (widx == scan);
  assign expired  = armed[scan] && ($signed(now - deadline[scan]) >= 0);

  always_ff @(posedge clk) begin
    if (wr && instr.op == TM_START) deadline[widx] <= now + instr.duration;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed    <= '0;
      now      <= '0;
      pre      <= '0;
      scan     <= '0;
      to_valid <= 1'b0;
      to_flow  <= '0;
      to_tid   <= '0;
    end else begin
      if (pre == PW'(TICK_CYCLES - 1)) begin
        pre <= '0;
        now <= now + 1'b1;
      end else begin
        pre <= pre + 1'b1;
      end
      if (to_valid && to_ready) to_valid <= 1'b0;
      if (wr) armed[widx] <= (instr.op == TM_START);
      if (!hit) begin
        if (expired) begin
          if (out_free) begin
            armed[scan] <= 1'b0;
            to_valid    <= 1'b1;
            to_flow     <= FW'(scan / NW'(TIMERS));
            to_tid      <= 8'(scan % NW'(TIMERS));
            scan        <= (scan == NW'(N - 1)) ? '0 : scan + 1'b1;
          end
        end else begin
          scan <= (scan == NW'(N - 1)) ? '0 : scan + 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) instr_valid |-> (32'(instr.tid) < TIMERS));
endmodule
