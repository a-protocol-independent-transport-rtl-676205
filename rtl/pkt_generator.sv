// pkt_generator: instruction-driven packet generation.
//
// Every packet-generation instruction says where the payload is (addr,
// len), how to cut it (seg bytes per packet), the header of the first
// packet, and a pacing gap. The module keeps, per flow (paper):
//   * an instruction queue: a ring buffer of IQ_DEPTH entries per flow in a
//     RAM, with per-flow head/tail pointers and counts; its fill level gives
//     the per-flow back-pressure bit bp[f] (set at BP_THRESH entries);
//   * a pre-fetch data buffer of PF_CHUNKS 64-byte chunks, filled by a fetch
//     engine that starts reading an instruction's payload as soon as the
//     instruction arrives and keeps topping the buffer up while the flow's
//     fill level (landed + in-flight chunks) is below FETCH_THRESH;
//   * the state of the active instruction (the queue head): current header,
//     bytes already sent, earliest start time of its next packet, and the
//     chunk count its next packet needs.
// A flow is ready when it has an instruction, the chunks of its next packet
// have landed, and its pacing time has come. Ready flows are served
// round-robin. The constructor emits one packet at a time as 64-byte beats:
// a packet of b payload bytes takes ceil(b/64) beats, the header travels on
// pkt_hdr with the first beat. After each packet the last-packet check
// either retires the instruction or computes the next header with the
// header_update rule. A flow keeps the constructor for up to
// cfg_preempt_pkts packets of one instruction while other flows wait (then
// it is preempted and rescheduled); when no other flow is ready it simply
// continues. The next flow is chosen during the last beat of a packet, so
// packets of different flows follow each other without idle cycles; a flow
// that finishes an instruction rejoins arbitration one cycle later.
//
// This design's choices: the fetch engine reads each packet's payload as
// separate chunk reads starting at addr + k*seg, so every packet starts on a
// chunk boundary of the buffer (the memory returns 64 bytes from any byte
// address, in request order, tagged with flow and buffer slot); one chunk
// request per cycle is issued, round-robin over flows; pacing is a per-
// instruction minimum gap between packet starts (gap = 0 disables it); the
// per-flow state arrays are read combinationally. Window-based pacing is
// left to the protocol logic engine, which simply withholds instructions.
module pkt_generator
  import pita_pkg::*;
#(
  parameter int unsigned FLOWS        = 1024,
  parameter int unsigned IQ_DEPTH     = 8,
  parameter int unsigned PF_CHUNKS    = 64,
  parameter int unsigned BP_THRESH    = 6,
  parameter int unsigned FETCH_THRESH = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration
  input  hu_cfg_t                  cfg_hu,
  input  logic [7:0]               cfg_preempt_pkts,
  // instructions
  input  logic                     instr_valid,
  output logic                     instr_ready,
  input  logic [$clog2(FLOWS)-1:0] instr_flow,
  input  pg_instr_t                instr,
  output logic [FLOWS-1:0]         bp,
  // external memory reads
  output logic                     mem_req_valid,
  input  logic                     mem_req_ready,
  output logic [MADDR_W-1:0]       mem_req_addr,
  output logic [$clog2(FLOWS)+$clog2(PF_CHUNKS)-1:0] mem_req_tag,
  input  logic                     mem_rsp_valid,
  input  logic [$clog2(FLOWS)+$clog2(PF_CHUNKS)-1:0] mem_rsp_tag,
  input  chunk_t                   mem_rsp_data,
  // packets
  output logic                     pkt_valid,
  input  logic                     pkt_ready,
  output logic                     pkt_sop,
  output logic                     pkt_eop,
  output logic [6:0]               pkt_bytes,  // valid bytes in this beat (1..64)
  output logic [HDR_W-1:0]         pkt_hdr,    // valid with pkt_sop
  output logic [$clog2(FLOWS)-1:0] pkt_flow,
  output chunk_t                   pkt_data
);
  localparam int unsigned FW = $clog2(FLOWS);
  localparam int unsigned QW = $clog2(IQ_DEPTH);
  localparam int unsigned QC = $clog2(IQ_DEPTH + 1);
  localparam int unsigned BW = $clog2(PF_CHUNKS);
  localparam int unsigned BC = $clog2(PF_CHUNKS + 1);

  function automatic logic [LEN_W-1:0] min_len(input logic [LEN_W-1:0] a, input logic [LEN_W-1:0] b);
    return (a < b) ? a : b;
  endfunction
  function automatic logic [BC-1:0] chunks_of(input logic [LEN_W-1:0] bytes);
    return BC'((bytes + 32'd63) >> 6);
  endfunction

  // ---------------- per-flow state ----------------
  pg_instr_t        iq_mem [FLOWS*IQ_DEPTH];
  logic [QW-1:0]    iq_head [FLOWS], iq_tail [FLOWS], fptr [FLOWS];
  logic [QC-1:0]    iq_cnt [FLOWS], fq_cnt [FLOWS];
  // fetch engine
  logic [FLOWS-1:0] f_valid;
  logic [MADDR_W-1:0] f_addr [FLOWS];   // start of the segment being fetched
  logic [SEG_W:0]   f_off  [FLOWS];     // bytes of that segment already requested
  logic [SEG_W:0]   f_segb [FLOWS];     // bytes of that segment
  logic [LEN_W-1:0] f_rem  [FLOWS];     // bytes of the instruction after that segment
  logic [SEG_W-1:0] f_seg  [FLOWS];
  // pre-fetch buffers
  chunk_t           pf_buf [FLOWS*PF_CHUNKS];
  logic [BW-1:0]    pf_wp [FLOWS], pf_rp [FLOWS];
  logic [BC-1:0]    pf_arr [FLOWS], pf_inf [FLOWS];
  // active instruction
  logic [FLOWS-1:0] a_valid;
  logic [HDR_W-1:0] a_hdr  [FLOWS];
  logic [LEN_W-1:0] a_sent [FLOWS];
  logic [TIME_W-1:0] a_next [FLOWS];
  logic [BC-1:0]    a_need [FLOWS];

  logic [TIME_W-1:0] now;

  // ---------------- instruction enqueue ----------------
  logic enq;
  assign instr_ready = (iq_cnt[instr_flow] != QC'(IQ_DEPTH));
  assign enq = instr_valid && instr_ready;
  always_comb for (int f = 0; f < FLOWS; f++) bp[f] = (iq_cnt[f] >= QC'(BP_THRESH));

  // ---------------- fetch engine ----------------
  logic [FLOWS-1:0] fetch_req;
  logic             fg_valid, f_fire, f_load, f_seg_done, f_instr_done;
  logic [FW-1:0]    fg;
  pg_instr_t        f_ins;
  logic [MADDR_W-1:0] fc_addr;
  logic [SEG_W:0]   fc_off, fc_segb, fn_off, fn_segb;
  logic [LEN_W-1:0] fc_rem, fn_rem;
  logic [SEG_W-1:0] fc_seg;

  always_comb
    for (int f = 0; f < FLOWS; f++)
      fetch_req[f] = (f_valid[f] || fq_cnt[f] != '0) &&
                     ((32'(pf_arr[f]) + 32'(pf_inf[f])) < FETCH_THRESH);

  rr_arbiter #(.N(FLOWS)) u_fetch_arb (
    .clk, .rst_n, .req(fetch_req), .take(f_fire), .gnt_valid(fg_valid), .gnt_idx(fg));

  always_comb begin
    f_ins   = iq_mem[{fg, fptr[fg]}];
    f_load  = !f_valid[fg];
    fc_addr = f_load ? f_ins.addr : f_addr[fg];
    fc_off  = f_load ? '0 : f_off[fg];
    fc_segb = f_load ? (SEG_W+1)'(min_len(f_ins.len, LEN_W'(f_ins.seg))) : f_segb[fg];
    fc_rem  = f_load ? (f_ins.len - min_len(f_ins.len, LEN_W'(f_ins.seg))) : f_rem[fg];
    fc_seg  = f_load ? f_ins.seg : f_seg[fg];
    mem_req_valid = fg_valid;
    mem_req_addr  = fc_addr + MADDR_W'(fc_off);
    mem_req_tag   = {fg, pf_wp[fg]};
    f_fire        = fg_valid && mem_req_ready;
    fn_off        = fc_off + (SEG_W+1)'(64);
    f_seg_done    = (fn_off >= fc_segb);
    f_instr_done  = f_seg_done && (fc_rem == '0);
    fn_segb       = (SEG_W+1)'(min_len(fc_rem, LEN_W'(fc_seg)));
    fn_rem        = fc_rem - min_len(fc_rem, LEN_W'(fc_seg));
  end

  // ---------------- pacing and flow selection ----------------
  logic [FLOWS-1:0] ready;
  logic             busy;
  logic [FW-1:0]    c_flow;
  logic             sg_valid, s_take;
  logic [FW-1:0]    sg;

  always_comb
    for (int f = 0; f < FLOWS; f++)
      ready[f] = (iq_cnt[f] != '0) && (pf_arr[f] >= a_need[f]) &&
                 ($signed(now - a_next[f]) >= 0) && !(busy && c_flow == FW'(f));

  rr_arbiter #(.N(FLOWS)) u_pace_arb (
    .clk, .rst_n, .req(ready), .take(s_take), .gnt_valid(sg_valid), .gnt_idx(sg));

  // ---------------- packet constructor ----------------
  logic [HDR_W-1:0] c_hdr;
  logic [LEN_W-1:0] c_sent, c_bytes, c_len;
  logic [SEG_W-1:0] c_seg;
  logic [BC-1:0]    c_nb, c_beat;
  logic [7:0]       c_turn;
  logic             stall, emit, pkt_end, done;
  logic [LEN_W-1:0] sent_after, nxt_bytes;
  logic [HDR_W-1:0] nxt_hdr;
  pg_instr_t        s_ins, q_next;
  logic [LEN_W-1:0] s_sent, s_bytes;
  logic [HDR_W-1:0] s_hdr;
  logic             rsp_same, cont, preempt, load_new;
  logic [BC-1:0]    arr_after, need_after;
  logic [FW-1:0]    rsp_flow;
  logic [BW-1:0]    rsp_slot;

  assign {rsp_flow, rsp_slot} = mem_rsp_tag;
  assign stall   = pkt_valid && !pkt_ready;
  assign emit    = busy && !stall;
  assign pkt_end = emit && (c_beat + 1'b1 == c_nb);

  header_update u_hu (
    .cfg(cfg_hu), .cur_hdr(c_hdr), .sent(sent_after), .len(c_len), .seg(c_seg),
    .next_hdr(nxt_hdr));

  always_comb begin
    // last-packet check
    sent_after = c_sent + c_bytes;
    done       = (sent_after >= c_len);
    nxt_bytes  = min_len(c_len - sent_after, LEN_W'(c_seg));
    q_next     = iq_mem[{c_flow, iq_head[c_flow] + 1'b1}];
    rsp_same   = mem_rsp_valid && rsp_flow == c_flow;
    arr_after  = pf_arr[c_flow] - c_nb + $bits(arr_after)'(rsp_same);
    if (!done)                        need_after = chunks_of(nxt_bytes);
    else if (iq_cnt[c_flow] > 1)      need_after = chunks_of(min_len(q_next.len, LEN_W'(q_next.seg)));
    else if (enq && instr_flow == c_flow) need_after = chunks_of(min_len(instr.len, LEN_W'(instr.seg)));
    else                              need_after = '0;
    preempt    = (c_turn + 1'b1 >= ((cfg_preempt_pkts == 0) ? 8'd1 : cfg_preempt_pkts)) && sg_valid;
    cont       = pkt_end && !done && !preempt && (pacing_gap() == 0) && (arr_after >= need_after);
    load_new   = (!busy || (pkt_end && !cont)) && sg_valid;
    s_take     = load_new && !stall;
    // state of the newly selected flow
    s_ins      = iq_mem[{sg, iq_head[sg]}];
    s_hdr      = a_valid[sg] ? a_hdr[sg] : s_ins.header;
    s_sent     = a_valid[sg] ? a_sent[sg] : '0;
    s_bytes    = min_len(s_ins.len - s_sent, LEN_W'(s_ins.seg));
  end

  function automatic logic [GAP_W-1:0] pacing_gap();
    return iq_mem[{c_flow, iq_head[c_flow]}].gap;
  endfunction

  // payload RAM: write port for memory responses, registered read port for the constructor
  always_ff @(posedge clk) begin
    if (mem_rsp_valid) pf_buf[mem_rsp_tag] <= mem_rsp_data;
    if (emit) pkt_data <= pf_buf[{c_flow, pf_rp[c_flow] + BW'(c_beat)}];
  end

  always_ff @(posedge clk) begin
    if (enq) iq_mem[{instr_flow, iq_tail[instr_flow]}] <= instr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int f = 0; f < FLOWS; f++) begin
        iq_head[f] <= '0; iq_tail[f] <= '0; fptr[f] <= '0;
        iq_cnt[f] <= '0; fq_cnt[f] <= '0;
        f_addr[f] <= '0; f_off[f] <= '0; f_segb[f] <= '0; f_rem[f] <= '0; f_seg[f] <= '0;
        pf_wp[f] <= '0; pf_rp[f] <= '0; pf_arr[f] <= '0; pf_inf[f] <= '0;
        a_hdr[f] <= '0; a_sent[f] <= '0; a_next[f] <= '0; a_need[f] <= '0;
      end
      f_valid <= '0; a_valid <= '0; now <= '0;
      busy <= 1'b0; c_flow <= '0; c_hdr <= '0; c_sent <= '0; c_bytes <= '0; c_len <= '0;
      c_seg <= '0; c_nb <= '0; c_beat <= '0; c_turn <= '0;
      pkt_valid <= 1'b0; pkt_sop <= 1'b0; pkt_eop <= 1'b0; pkt_bytes <= '0;
      pkt_hdr <= '0; pkt_flow <= '0;
    end else begin
      now <= now + 1'b1;

      // ---- enqueue ----
      if (enq) begin
        iq_tail[instr_flow] <= iq_tail[instr_flow] + 1'b1;
        if (iq_cnt[instr_flow] == '0)
          a_need[instr_flow] <= chunks_of(min_len(instr.len, LEN_W'(instr.seg)));
      end
      // iq_cnt: +1 on enqueue, -1 when an instruction retires
      if (enq && pkt_end && done && instr_flow == c_flow) begin
        iq_cnt[c_flow] <= iq_cnt[c_flow];
      end else begin
        if (enq) iq_cnt[instr_flow] <= iq_cnt[instr_flow] + 1'b1;
        if (pkt_end && done) iq_cnt[c_flow] <= iq_cnt[c_flow] - 1'b1;
      end
      // fq_cnt: instructions whose fetch has not started
      if (enq && f_fire && f_load && instr_flow == fg) begin
        fq_cnt[fg] <= fq_cnt[fg];
      end else begin
        if (enq) fq_cnt[instr_flow] <= fq_cnt[instr_flow] + 1'b1;
        if (f_fire && f_load) fq_cnt[fg] <= fq_cnt[fg] - 1'b1;
      end

      // ---- fetch ----
      if (f_fire) begin
        pf_wp[fg]   <= pf_wp[fg] + 1'b1;
        f_seg[fg]   <= fc_seg;
        if (f_instr_done) begin
          f_valid[fg] <= 1'b0;
          fptr[fg]    <= fptr[fg] + 1'b1;
        end else if (f_seg_done) begin
          f_valid[fg] <= 1'b1;
          f_addr[fg]  <= fc_addr + MADDR_W'(fc_seg);
          f_off[fg]   <= '0;
          f_segb[fg]  <= fn_segb;
          f_rem[fg]   <= fn_rem;
        end else begin
          f_valid[fg] <= 1'b1;
          f_addr[fg]  <= fc_addr;
          f_off[fg]   <= fn_off;
          f_segb[fg]  <= fc_segb;
          f_rem[fg]   <= fc_rem;
        end
      end
      // in-flight chunks: +1 on request, -1 on response
      if (f_fire && mem_rsp_valid && fg == rsp_flow) begin
        pf_inf[fg] <= pf_inf[fg];
      end else begin
        if (f_fire) pf_inf[fg] <= pf_inf[fg] + 1'b1;
        if (mem_rsp_valid) pf_inf[rsp_flow] <= pf_inf[rsp_flow] - 1'b1;
      end
      // landed chunks: +1 on response, -beats when a packet is sent
      if (pkt_end && mem_rsp_valid && rsp_flow == c_flow) begin
        pf_arr[c_flow] <= arr_after;
      end else begin
        if (mem_rsp_valid) pf_arr[rsp_flow] <= pf_arr[rsp_flow] + 1'b1;
        if (pkt_end) pf_arr[c_flow] <= pf_arr[c_flow] - c_nb;
      end

      // ---- output stage ----
      if (!stall) begin
        pkt_valid <= emit;
        if (emit) begin
          pkt_sop   <= (c_beat == '0);
          pkt_eop   <= pkt_end;
          pkt_flow  <= c_flow;
          pkt_hdr   <= c_hdr;
          pkt_bytes <= pkt_end ? 7'(c_bytes - LEN_W'({c_beat, 6'b0})) : 7'd64;
        end
      end

      // ---- constructor ----
      if (emit && !pkt_end) c_beat <= c_beat + 1'b1;
      if (pkt_end) begin
        pf_rp[c_flow]  <= pf_rp[c_flow] + BW'(c_nb);
        a_need[c_flow] <= need_after;
        if (done) begin
          iq_head[c_flow] <= iq_head[c_flow] + 1'b1;
          a_valid[c_flow] <= 1'b0;
        end else begin
          a_valid[c_flow] <= 1'b1;
          a_hdr[c_flow]   <= nxt_hdr;
          a_sent[c_flow]  <= sent_after;
        end
        if (cont) begin
          c_hdr   <= nxt_hdr;
          c_sent  <= sent_after;
          c_bytes <= nxt_bytes;
          c_nb    <= chunks_of(nxt_bytes);
          c_beat  <= '0;
          c_turn  <= c_turn + 1'b1;
        end else if (!load_new) begin
          busy <= 1'b0;
        end
      end
      if (s_take) begin
        busy    <= 1'b1;
        c_flow  <= sg;
        c_hdr   <= s_hdr;
        c_sent  <= s_sent;
        c_bytes <= s_bytes;
        c_len   <= s_ins.len;
        c_seg   <= s_ins.seg;
        c_nb    <= chunks_of(s_bytes);
        c_beat  <= '0;
        c_turn  <= '0;
        a_next[sg] <= now + TIME_W'(s_ins.gap);
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   instr_valid && instr_ready |-> (instr.len != 0 && instr.seg != 0 &&
                                                   32'(instr.seg) <= PF_CHUNKS * 64));
  assert property (@(posedge clk) disable iff (!rst_n) pkt_end && !done |-> !s_take || sg != c_flow);
endmodule
