// ple_model: behavioural stand-in for a protocol logic engine (PLE), for
// testbenches only. The real PLE is the user's protocol program compiled by
// high-level synthesis; this model is a fixed-latency pipeline of DEPTH
// stages implementing a toy protocol with four event types:
//   0 send request: data = {seq16, len16, seg16, unused}: packet-generation
//     instruction for len bytes from the flow's send area at the flow's
//     current send offset (kept in the context), header = {flow, offset};
//   1 data segment: data = {seq16, tmp_addr24, off16, len8}: add-data-seg;
//   2 deliver: data = {seq16, dur16, unused, len16}: flush-and-notify of len
//     bytes and, if dur != 0, start timer 0 of the flow for dur ticks;
//   3 timeout: counted in the context.
// Context bits: [31:0] events seen, [63:32] send offset, [95:64] timeouts.
// The updated context is written back and the event returned to the
// scheduler in the same cycle, DEPTH cycles after the event entered.
module ple_model
  import pita_pkg::*;
#(
  parameter int unsigned FLOWS = 8,
  parameter int unsigned CTX_W = 938,
  parameter int unsigned DEPTH = 3
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     ev_valid,
  input  logic [$clog2(FLOWS)-1:0] ev_flow,
  input  logic [1:0]               ev_type,
  input  logic [63:0]              ev_data,
  input  logic                     ev_last,
  input  logic [CTX_W-1:0]         ctx_in,
  output logic                     ctx_wr_valid,
  output logic [$clog2(FLOWS)-1:0] ctx_wr_flow,
  output logic [CTX_W-1:0]         ctx_wr_data,
  output logic                     ret_valid,
  output logic [$clog2(FLOWS)-1:0] ret_flow,
  output logic                     ret_last,
  output logic                     pg_valid,
  output logic [$clog2(FLOWS)-1:0] pg_flow,
  output pg_instr_t                pg,
  output logic                     ra_valid,
  output logic [$clog2(FLOWS)-1:0] ra_flow,
  output ra_instr_t                ra,
  output logic                     tm_valid,
  output logic [$clog2(FLOWS)-1:0] tm_flow,
  output tm_instr_t                tm
);
  localparam int unsigned FW = $clog2(FLOWS);
  typedef struct packed {
    logic v; logic [FW-1:0] flow; logic last; logic [CTX_W-1:0] ctx;
    logic pgv; pg_instr_t pg; logic rav; ra_instr_t ra; logic tmv; tm_instr_t tm;
  } st_t;
  st_t pipe [DEPTH];
  st_t s0;

  always_comb begin
    s0 = '0;
    s0.v    = ev_valid;
    s0.flow = ev_flow;
    s0.last = ev_last;
    s0.ctx  = ctx_in;
    s0.ctx[31:0] = ctx_in[31:0] + 1;
    case (ev_type)
      2'd0: begin
        s0.pgv = 1'b1;
        s0.pg.header = HDR_W'({8'(ev_flow), ctx_in[63:32]});
        s0.pg.addr   = MADDR_W'(ev_flow) * 64'h10_0000 + MADDR_W'(ctx_in[63:32]);
        s0.pg.len    = LEN_W'(ev_data[47:32]);
        s0.pg.seg    = ev_data[31:16];
        s0.pg.gap    = '0;
        s0.ctx[63:32] = ctx_in[63:32] + 32'(ev_data[47:32]);
      end
      2'd1: begin
        s0.rav = 1'b1;
        s0.ra.op = RA_ADD_SEG; s0.ra.addr = MADDR_W'(ev_data[47:24]);
        s0.ra.offset = LEN_W'(ev_data[23:8]); s0.ra.len = RLEN_W'(ev_data[7:0]) + 16'd1;
      end
      2'd2: begin
        s0.rav = 1'b1;
        s0.ra.op = RA_FLUSH; s0.ra.addr = 64'hA000_0000 + MADDR_W'(ev_flow) * 64'h1_0000;
        s0.ra.offset = '0; s0.ra.len = ev_data[15:0];
        s0.tmv = (ev_data[47:32] != 0);
        s0.tm.op = TM_START; s0.tm.tid = 8'd0; s0.tm.duration = ev_data[47:32];
      end
      default: s0.ctx[95:64] = ctx_in[95:64] + 1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < DEPTH; i++) pipe[i] <= '0;
    else begin
      pipe[0] <= s0;
      for (int i = 1; i < DEPTH; i++) pipe[i] <= pipe[i-1];
    end
  end

  st_t o;
  assign o = pipe[DEPTH-1];
  assign ctx_wr_valid = o.v;
  assign ctx_wr_flow  = o.flow;
  assign ctx_wr_data  = o.ctx;
  assign ret_valid    = o.v;
  assign ret_flow     = o.flow;
  assign ret_last     = o.last;
  assign pg_valid     = o.v && o.pgv;
  assign pg_flow      = o.flow;
  assign pg           = o.pg;
  assign ra_valid     = o.v && o.rav;
  assign ra_flow      = o.flow;
  assign ra           = o.ra;
  assign tm_valid     = o.v && o.tmv;
  assign tm_flow      = o.flow;
  assign tm           = o.tm;
endmodule
