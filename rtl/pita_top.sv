// pita_top: the protocol-independent transport datapath.
//
// Events (parsed packets and application requests) enter the event
// scheduler, which keeps them in per-flow FIFOs and hands one event per
// cycle, from a flow with no event in flight, to the protocol logic engine
// (PLE) together with that flow's context from the context table. The PLE
// is the user's protocol program and sits outside this module: it writes
// the updated context back, returns the event (with its last-event bit) to
// the scheduler, and emits three instruction streams that this module
// executes protocol-agnostically: packet generation (pkt_generator),
// reassembly (reassembly) and timers (timer_module). Timer expiries come
// back in as events. Per-flow back-pressure from the packet generator's
// instruction queues, and global back-pressure from the reassembly
// instruction FIFO, make the scheduler withhold flows whose instructions
// could not be accepted, so an event that has left the scheduler never loses
// an instruction. This structure follows the paper; the arbitration at the
// event input (timeouts first) and the event encoding are this design's.
//
// An event is EVENT_W bits of protocol data plus an EVT_TYPE_W-bit type.
// A timeout event carries type cfg_timeout_type and the timer index in its
// low data byte. Timing: an event accepted in cycle t can be dispatched at
// t+1 and reaches the PLE (ple_ev_valid, with ple_ctx) at t+2.
module pita_top
  import pita_pkg::*;
#(
  parameter int unsigned FLOWS        = 1024,
  parameter int unsigned EVENT_DEPTH  = 16,
  parameter int unsigned EVENT_W      = 64,
  parameter int unsigned EVT_TYPE_W   = 2,
  parameter int unsigned CTX_W        = 938,
  parameter int unsigned PG_IQ_DEPTH  = 8,
  parameter int unsigned PG_PF_CHUNKS = 64,
  parameter int unsigned PG_BP_THRESH = 6,
  parameter int unsigned RA_BUF_CHUNKS = 256,
  parameter int unsigned RA_IQ_DEPTH  = 8,
  parameter int unsigned RA_BP_THRESH = 4,
  parameter int unsigned TIMERS       = 2,
  parameter int unsigned TICK_CYCLES  = 250
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration
  input  hu_cfg_t                  cfg_hu,
  input  logic [7:0]               cfg_preempt_pkts,
  input  logic [EVT_TYPE_W-1:0]    cfg_timeout_type,
  // context initialisation
  input  logic                     ctx_init_en,
  input  logic [$clog2(FLOWS)-1:0] ctx_init_flow,
  // parsed events
  input  logic                     ev_in_valid,
  output logic                     ev_in_ready,
  input  logic [$clog2(FLOWS)-1:0] ev_in_flow,
  input  logic [EVT_TYPE_W-1:0]    ev_in_type,
  input  logic [EVENT_W-1:0]       ev_in_data,
  // to the PLE
  input  logic                     ple_ready,
  output logic                     ple_ev_valid,
  output logic [$clog2(FLOWS)-1:0] ple_ev_flow,
  output logic [EVT_TYPE_W-1:0]    ple_ev_type,
  output logic [EVENT_W-1:0]       ple_ev_data,
  output logic                     ple_ev_last,
  output logic [CTX_W-1:0]         ple_ctx,
  // from the PLE: updated context and returning event
  input  logic                     ple_ctx_wr_valid,
  input  logic [$clog2(FLOWS)-1:0] ple_ctx_wr_flow,
  input  logic [CTX_W-1:0]         ple_ctx_wr_data,
  input  logic                     ple_ret_valid,
  input  logic [$clog2(FLOWS)-1:0] ple_ret_flow,
  input  logic                     ple_ret_last,
  // from the PLE: instruction streams
  input  logic                     pg_instr_valid,
  output logic                     pg_instr_ready,
  input  logic [$clog2(FLOWS)-1:0] pg_instr_flow,
  input  pg_instr_t                pg_instr,
  input  logic                     ra_instr_valid,
  output logic                     ra_instr_ready,
  input  logic [$clog2(FLOWS)-1:0] ra_instr_flow,
  input  ra_instr_t                ra_instr,
  input  logic                     tm_instr_valid,
  output logic                     tm_instr_ready,
  input  logic [$clog2(FLOWS)-1:0] tm_instr_flow,
  input  tm_instr_t                tm_instr,
  // external memory (payload pre-fetch)
  output logic                     mem_req_valid,
  input  logic                     mem_req_ready,
  output logic [MADDR_W-1:0]       mem_req_addr,
  output logic [$clog2(FLOWS)+$clog2(PG_PF_CHUNKS)-1:0] mem_req_tag,
  input  logic                     mem_rsp_valid,
  input  logic [$clog2(FLOWS)+$clog2(PG_PF_CHUNKS)-1:0] mem_rsp_tag,
  input  chunk_t                   mem_rsp_data,
  // packets to the network
  output logic                     pkt_valid,
  input  logic                     pkt_ready,
  output logic                     pkt_sop,
  output logic                     pkt_eop,
  output logic [6:0]               pkt_bytes,
  output logic [HDR_W-1:0]         pkt_hdr,
  output logic [$clog2(FLOWS)-1:0] pkt_flow,
  output chunk_t                   pkt_data,
  // temporary payload memory (read side)
  output logic                     tmem_req_valid,
  input  logic                     tmem_req_ready,
  output logic [MADDR_W-1:0]       tmem_req_addr,
  input  logic                     tmem_rsp_valid,
  input  chunk_t                   tmem_rsp_data,
  // reassembled data to the application
  output logic                     app_valid,
  input  logic                     app_ready,
  output logic [$clog2(FLOWS)-1:0] app_flow,
  output logic [MADDR_W-1:0]       app_addr,
  output chunk_t                   app_data,
  output logic                     app_sop,
  output logic                     app_eop,
  output logic [5:0]               app_start,
  output logic [RLEN_W-1:0]        app_len,
  // observation
  output logic                     stat_dispatch,
  output logic                     stat_withhold,
  output logic                     stat_reinsert,
  output logic                     stat_timeout
);
  localparam int unsigned FW = $clog2(FLOWS);
  localparam int unsigned SW = EVT_TYPE_W + EVENT_W;   // stored event width

  // ---------------- event input: timeouts first, then parsed events ----------------
  logic          to_valid, to_ready;
  logic [FW-1:0] to_flow;
  logic [7:0]    to_tid;
  logic          s_in_valid, s_in_ready;
  logic [FW-1:0] s_in_flow;
  logic [SW-1:0] s_in_event;

  always_comb begin
    if (to_valid) begin
      s_in_valid = 1'b1;
      s_in_flow  = to_flow;
      s_in_event = {cfg_timeout_type, EVENT_W'(to_tid)};
    end else begin
      s_in_valid = ev_in_valid;
      s_in_flow  = ev_in_flow;
      s_in_event = {ev_in_type, ev_in_data};
    end
    to_ready    = s_in_ready;
    ev_in_ready = !to_valid && s_in_ready;
  end

  // ---------------- event scheduler ----------------
  logic             dispatch;
  logic [FW-1:0]    dispatch_flow;
  logic [SW-1:0]    ev_word;
  logic [FLOWS-1:0] pg_bp, bp_all;
  logic             ra_bp;

  assign bp_all = pg_bp | {FLOWS{ra_bp}};

  event_scheduler #(.FLOWS(FLOWS), .DEPTH(EVENT_DEPTH), .EVENT_W(SW)) u_sched (
    .clk, .rst_n,
    .in_valid(s_in_valid), .in_ready(s_in_ready), .in_flow(s_in_flow), .in_event(s_in_event),
    .ple_ready, .dispatch, .dispatch_flow,
    .ev_valid(ple_ev_valid), .ev_flow(ple_ev_flow), .ev_event(ev_word), .ev_last(ple_ev_last),
    .ret_valid(ple_ret_valid), .ret_flow(ple_ret_flow), .ret_last(ple_ret_last),
    .bp(bp_all), .withhold(stat_withhold), .reinsert(stat_reinsert));

  assign {ple_ev_type, ple_ev_data} = ev_word;
  assign stat_dispatch = dispatch;
  assign stat_timeout  = to_valid && to_ready;

  // ---------------- context table ----------------
  logic ctx_rd_valid;
  context_table #(.FLOWS(FLOWS), .CTX_W(CTX_W)) u_ctx (
    .clk, .rst_n,
    .rd_en(dispatch), .rd_flow(dispatch_flow), .rd_valid(ctx_rd_valid), .rd_data(ple_ctx),
    .wr_en(ple_ctx_wr_valid), .wr_flow(ple_ctx_wr_flow), .wr_data(ple_ctx_wr_data),
    .init_en(ctx_init_en), .init_flow(ctx_init_flow));

  // ---------------- instruction execution ----------------
  pkt_generator #(.FLOWS(FLOWS), .IQ_DEPTH(PG_IQ_DEPTH), .PF_CHUNKS(PG_PF_CHUNKS),
                  .BP_THRESH(PG_BP_THRESH), .FETCH_THRESH(PG_PF_CHUNKS)) u_pg (
    .clk, .rst_n, .cfg_hu, .cfg_preempt_pkts,
    .instr_valid(pg_instr_valid), .instr_ready(pg_instr_ready), .instr_flow(pg_instr_flow),
    .instr(pg_instr), .bp(pg_bp),
    .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_req_tag,
    .mem_rsp_valid, .mem_rsp_tag, .mem_rsp_data,
    .pkt_valid, .pkt_ready, .pkt_sop, .pkt_eop, .pkt_bytes, .pkt_hdr, .pkt_flow, .pkt_data);

  reassembly #(.FLOWS(FLOWS), .BUF_CHUNKS(RA_BUF_CHUNKS), .IQ_DEPTH(RA_IQ_DEPTH),
               .BP_THRESH(RA_BP_THRESH)) u_ra (
    .clk, .rst_n,
    .instr_valid(ra_instr_valid), .instr_ready(ra_instr_ready), .instr_flow(ra_instr_flow),
    .instr(ra_instr), .bp(ra_bp),
    .tmem_req_valid, .tmem_req_ready, .tmem_req_addr, .tmem_rsp_valid, .tmem_rsp_data,
    .out_valid(app_valid), .out_ready(app_ready), .out_flow(app_flow), .out_addr(app_addr),
    .out_data(app_data), .out_sop(app_sop), .out_eop(app_eop), .out_start(app_start),
    .out_len(app_len));

  timer_module #(.FLOWS(FLOWS), .TIMERS(TIMERS), .TICK_CYCLES(TICK_CYCLES)) u_tm (
    .clk, .rst_n,
    .instr_valid(tm_instr_valid), .instr_ready(tm_instr_ready), .instr_flow(tm_instr_flow),
    .instr(tm_instr), .to_valid, .to_ready, .to_flow, .to_tid);

  // the event and its context reach the PLE in the same cycle
  assert property (@(posedge clk) disable iff (!rst_n) ple_ev_valid == ctx_rd_valid);
endmodule
