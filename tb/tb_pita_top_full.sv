// tb_pita_top_full: end-to-end test of the datapath at its full default size
// (1024 flows, 16-deep event buffers, 938-bit contexts, 8-deep instruction
// queues, 64-chunk pre-fetch buffers, 16 KB reassembly buffers, 1 us timer
// ticks at 250 MHz); no parameter of the top is overridden. Traffic runs on
// four flows spread over the flow range (0, 3, 513, 1023) so that indexing at
// the top of every per-flow table is exercised.
//
// The datapath runs
// with a behavioural PLE (ple_model, a toy protocol, 3-stage pipeline) and
// behavioural memories for payload pre-fetch and for the temporary payload
// store. The test injects events and checks, independently of the RTL:
//   * per-flow event order and the context seen by every event (the PLE
//     counts events in the context, so each event must see exactly the
//     number of earlier events of its flow: state consistency);
//   * every packet's header and payload bytes, per flow;
//   * every byte handed to the application by flush-and-notify;
//   * one timeout event per armed timer;
//   * that no instruction is ever refused by an execution module (atomic
//     event processing under back-pressure).
// It counts how often each mechanism happened and fails if one never did:
// dispatch, flow re-insertion, back-pressure withholding, multi-packet
// instructions, interleaving of flows on the packet output, pre-emption,
// unaligned add-data-seg (read-modify-write), flush, timeout.
module tb_pita_top_full;
  import pita_pkg::*;
  localparam int FLOWS = 1024, FW = 10, BUFC = 256, BUFB = BUFC * 64, PFC = 64;
  localparam int CTX_W = 938;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  hu_cfg_t cfg_hu;
  logic [7:0] cfg_preempt_pkts;
  logic [1:0] cfg_timeout_type;
  logic ctx_init_en; logic [FW-1:0] ctx_init_flow;
  logic ev_in_valid, ev_in_ready; logic [FW-1:0] ev_in_flow; logic [1:0] ev_in_type; logic [63:0] ev_in_data;
  logic ple_ready, ple_ev_valid, ple_ev_last; logic [FW-1:0] ple_ev_flow; logic [1:0] ple_ev_type;
  logic [63:0] ple_ev_data; logic [CTX_W-1:0] ple_ctx;
  logic ple_ctx_wr_valid; logic [FW-1:0] ple_ctx_wr_flow; logic [CTX_W-1:0] ple_ctx_wr_data;
  logic ple_ret_valid, ple_ret_last; logic [FW-1:0] ple_ret_flow;
  logic pg_instr_valid, pg_instr_ready; logic [FW-1:0] pg_instr_flow; pg_instr_t pg_instr;
  logic ra_instr_valid, ra_instr_ready; logic [FW-1:0] ra_instr_flow; ra_instr_t ra_instr;
  logic tm_instr_valid, tm_instr_ready; logic [FW-1:0] tm_instr_flow; tm_instr_t tm_instr;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid; logic [MADDR_W-1:0] mem_req_addr;
  logic [FW+6-1:0] mem_req_tag, mem_rsp_tag; chunk_t mem_rsp_data;
  logic pkt_valid, pkt_ready, pkt_sop, pkt_eop; logic [6:0] pkt_bytes; logic [HDR_W-1:0] pkt_hdr;
  logic [FW-1:0] pkt_flow; chunk_t pkt_data;
  logic tmem_req_valid, tmem_req_ready, tmem_rsp_valid; logic [MADDR_W-1:0] tmem_req_addr; chunk_t tmem_rsp_data;
  logic [7:0] tmem_tag_unused;
  logic app_valid, app_ready, app_sop, app_eop; logic [FW-1:0] app_flow; logic [MADDR_W-1:0] app_addr;
  chunk_t app_data; logic [5:0] app_start; logic [RLEN_W-1:0] app_len;
  logic stat_dispatch, stat_withhold, stat_reinsert, stat_timeout;

  pita_top dut (.*);

  ple_model #(.FLOWS(FLOWS), .CTX_W(CTX_W), .DEPTH(3)) u_ple (
    .clk, .rst_n, .ev_valid(ple_ev_valid), .ev_flow(ple_ev_flow), .ev_type(ple_ev_type),
    .ev_data(ple_ev_data), .ev_last(ple_ev_last), .ctx_in(ple_ctx),
    .ctx_wr_valid(ple_ctx_wr_valid), .ctx_wr_flow(ple_ctx_wr_flow), .ctx_wr_data(ple_ctx_wr_data),
    .ret_valid(ple_ret_valid), .ret_flow(ple_ret_flow), .ret_last(ple_ret_last),
    .pg_valid(pg_instr_valid), .pg_flow(pg_instr_flow), .pg(pg_instr),
    .ra_valid(ra_instr_valid), .ra_flow(ra_instr_flow), .ra(ra_instr),
    .tm_valid(tm_instr_valid), .tm_flow(tm_instr_flow), .tm(tm_instr));

  mem_model #(.TAG_W(FW + 6), .LAT(12)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .req_tag(mem_req_tag), .rsp_valid(mem_rsp_valid), .rsp_tag(mem_rsp_tag), .rsp_data(mem_rsp_data));
  mem_model #(.TAG_W(8), .LAT(6), .STALLS(1'b1)) u_tmem (
    .clk, .rst_n, .req_valid(tmem_req_valid), .req_ready(tmem_req_ready), .req_addr(tmem_req_addr),
    .req_tag(8'd0), .rsp_valid(tmem_rsp_valid), .rsp_tag(tmem_tag_unused), .rsp_data(tmem_rsp_data));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  function automatic logic [7:0] mbyte(input longint a);
    return 8'((a * 37) ^ (a >> 7) ^ 8'h5a);
  endfunction

  // ---------------- mechanism counters ----------------
  int n_dispatch = 0, n_withhold = 0, n_reinsert = 0, n_timeout = 0, n_multi = 0, n_switch = 0;
  int n_preempt = 0, n_rmw = 0, n_flush = 0, n_pkts = 0;
  always @(posedge clk) if (rst_n) begin
    if (stat_dispatch) n_dispatch++;
    if (stat_withhold) n_withhold++;
    if (stat_reinsert) n_reinsert++;
    if (stat_timeout)  n_timeout++;
    if (dut.u_ra.e_go && dut.u_ra.e_rd && dut.u_ra.job.op == RA_ADD_SEG) n_rmw++;
    if (dut.u_pg.pkt_end && !dut.u_pg.done && dut.u_pg.preempt && !dut.u_pg.cont) n_preempt++;
    check(!(pg_instr_valid && !pg_instr_ready), "packet instruction refused");
    check(!(ra_instr_valid && !ra_instr_ready), "reassembly instruction refused");
    check(!(tm_instr_valid && !tm_instr_ready), "timer instruction refused");
  end

  // ---------------- timers: each start arms one deadline per flow, a start
  // while armed restarts it; every timeout must match an armed deadline ----
  longint cyc = 0, deadline [FLOWS];
  bit     tarmed [FLOWS];
  int     n_restart = 0;
  localparam int TICK = 250, SLACK = FLOWS * 2 + 3 * TICK + 8;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (stat_timeout) begin
      check(tarmed[dut.to_flow], $sformatf("timeout on flow %0d with no timer armed", dut.to_flow));
      check(cyc >= deadline[dut.to_flow] - TICK && cyc <= deadline[dut.to_flow] + SLACK,
            $sformatf("flow %0d timeout at cycle %0d, deadline %0d", dut.to_flow, cyc, deadline[dut.to_flow]));
      tarmed[dut.to_flow] = 0;
    end
    if (tm_instr_valid && tm_instr_ready) begin
      if (tarmed[tm_instr_flow]) n_restart++;
      tarmed[tm_instr_flow] = 1;
      deadline[tm_instr_flow] = cyc + longint'(tm_instr.duration) * TICK;
    end
  end

  // ---------------- events: order and context ----------------
  int ev_sent [FLOWS], ev_seen [FLOWS], seq_sent [FLOWS], seq_seen [FLOWS];
  always @(posedge clk) if (rst_n && ple_ev_valid) begin
    check(int'(ple_ctx[31:0]) == ev_seen[ple_ev_flow],
          $sformatf("flow %0d context count %0d want %0d", ple_ev_flow, ple_ctx[31:0], ev_seen[ple_ev_flow]));
    if (ple_ev_type != 2'd3) begin
      check(int'(ple_ev_data[63:48]) == seq_seen[ple_ev_flow], $sformatf("flow %0d event order got %0d want %0d t=%0t type %0d", ple_ev_flow, ple_ev_data[63:48], seq_seen[ple_ev_flow], $time, ple_ev_type));
      seq_seen[ple_ev_flow]++;
    end
    ev_seen[ple_ev_flow]++;
  end

  // ---------------- packets ----------------
  typedef struct { logic [HDR_W-1:0] hdr; longint addr; int bytes; } pkt_t;
  pkt_t exp_pkt [FLOWS][$];
  pkt_t cur; int beat = 0, last_flow = -1;
  int send_off [FLOWS];
  always @(negedge clk) pkt_ready = hold_pkts ? 1'b0 : ($urandom % 8 != 0);
  bit hold_pkts = 0;
  always @(posedge clk) if (rst_n && pkt_valid && pkt_ready) begin
    if (pkt_sop) begin
      if (exp_pkt[pkt_flow].size() == 0) check(0, "unexpected packet");
      else begin
        cur = exp_pkt[pkt_flow].pop_front();
        check(pkt_hdr == cur.hdr, $sformatf("flow %0d packet header", pkt_flow));
      end
      beat = 0; n_pkts++;
      if (last_flow >= 0 && last_flow != int'(pkt_flow)) n_switch++;
      last_flow = pkt_flow;
    end
    for (int b = 0; b < 64; b++)
      if (beat * 64 + b < cur.bytes)
        check(pkt_data[8*b +: 8] == mbyte(cur.addr + beat * 64 + b), "packet payload");
    if (pkt_eop) check(beat == (cur.bytes + 63) / 64 - 1 && int'(pkt_bytes) == cur.bytes - beat * 64, "packet length");
    beat++;
  end

  // ---------------- reassembly reference ----------------
  logic [7:0] rbuf [FLOWS][BUFB];
  int rp [FLOWS];
  typedef struct { int len; int start; byte unsigned data[]; } fl_t;
  fl_t exp_fl [FLOWS][$];
  fl_t fcur; int fbeat = 0;
  always @(negedge clk) app_ready = ($urandom % 5 != 0);
  always @(posedge clk) if (rst_n && app_valid && app_ready) begin
    if (app_sop) begin
      if (exp_fl[app_flow].size() == 0) check(0, "unexpected flush");
      else fcur = exp_fl[app_flow].pop_front();
      fbeat = 0;
      check(app_addr == 64'hA000_0000 + MADDR_W'(app_flow) * 64'h1_0000, "flush address");
    end
    check(int'(app_len) == fcur.len && int'(app_start) == fcur.start, "flush length/start");
    for (int b = 0; b < 64; b++) begin
      automatic int pos = fbeat * 64 + b - fcur.start;
      if (pos >= 0 && pos < fcur.len) check(app_data[8*b +: 8] == fcur.data[pos], $sformatf("flow %0d flushed byte %0d", app_flow, pos));
    end
    if (app_eop) n_flush++;
    fbeat++;
  end

  // ---------------- stimulus ----------------
  task automatic put(input int f, input logic [1:0] t, input logic [63:0] d);
    @(negedge clk);
    ev_in_valid = 1; ev_in_flow = FW'(f); ev_in_type = t; ev_in_data = d;
    #1;
    while (!ev_in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    ev_sent[f]++;
    @(negedge clk); ev_in_valid = 0;
  endtask

  task automatic send_req(input int f, input int len, input int seg);
    for (int k = 0; k * seg < len; k++) begin
      pkt_t p;
      p.hdr = HDR_W'({8'(f), 32'(send_off[f] + k * seg)});
      p.addr = longint'(f) * 64'h10_0000 + send_off[f] + k * seg;
      p.bytes = (len - k * seg < seg) ? len - k * seg : seg;
      exp_pkt[f].push_back(p);
    end
    if (len > seg) n_multi++;
    send_off[f] += len;
    put(f, 2'd0, {16'(seq_sent[f]++), 16'(len), 16'(seg), 16'd0});
  endtask

  task automatic data_seg(input int f, input int tmp, input int off, input int len);
    for (int k = 0; k < len; k++) rbuf[f][(off + k) % BUFB] = mbyte(tmp + k);
    put(f, 2'd1, {16'(seq_sent[f]++), 24'(tmp), 16'(off), 8'(len - 1)});
  endtask

  int armed = 0;
  task automatic deliver(input int f, input int len, input int dur);
    fl_t e;
    e.len = len; e.start = rp[f] % 64; e.data = new[len];
    for (int k = 0; k < len; k++) e.data[k] = rbuf[f][(rp[f] + k) % BUFB];
    rp[f] = (rp[f] + len) % BUFB;
    exp_fl[f].push_back(e);
    if (dur != 0) armed++;
    put(f, 2'd2, {16'(seq_sent[f]++), 16'(dur), 16'd0, 16'(len)});
  endtask

  function automatic int pending();
    int n = 0;
    for (int f = 0; f < FLOWS; f++) n += exp_pkt[f].size() + exp_fl[f].size();
    return n;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: %0d packets/flushes pending", pending());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int fl [4] = '{0, 3, 513, 1023};
  initial begin
    ev_in_valid = 0; ev_in_flow = 0; ev_in_type = 0; ev_in_data = 0; ple_ready = 1;
    cfg_hu = '0; cfg_hu.add_en = 1; cfg_hu.add_lsb = 0; cfg_hu.add_w = 32;
    cfg_preempt_pkts = 2; cfg_timeout_type = 2'd3;
    ctx_init_en = 0; ctx_init_flow = 0;
    for (int f = 0; f < FLOWS; f++) begin
      ev_sent[f] = 0; ev_seen[f] = 0; tarmed[f] = 0; deadline[f] = 0;
      seq_sent[f] = 0; seq_seen[f] = 0; send_off[f] = 0; rp[f] = 0;
    end
    foreach (fl[i]) for (int b = 0; b < BUFB; b++) rbuf[fl[i]][b] = 8'h00;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (fl[i]) begin
      @(negedge clk); ctx_init_en = 1; ctx_init_flow = FW'(fl[i]);
    end
    @(negedge clk); ctx_init_en = 0;
    // give the used reassembly buffers a known content through the datapath
    foreach (fl[i])
      for (int o = 0; o < BUFB; o += 256) data_seg(fl[i], 24'h40_0000 + i * BUFB + o, o, 256);
    for (int r = 0; r < 3; r++)
      foreach (fl[i]) send_req(fl[i], 200 + $urandom % 3000, 256 + 64 * ($urandom % 20));
    hold_pkts = 1;
    for (int k = 0; k < 10; k++) send_req(3, 128, 128);
    repeat (100) @(negedge clk);
    hold_pkts = 0;
    for (int r = 0; r < 6; r++)
      foreach (fl[i]) begin
        automatic int f = fl[i];
        automatic int base = rp[f];
        data_seg(f, $urandom % 100000, (base + 37 * r) % BUFB, 1 + $urandom % 256);
        data_seg(f, $urandom % 100000, (base + 300) % BUFB, 1 + $urandom % 200);
        deliver(f, 1 + $urandom % 400, (r % 2 == 0) ? 3 + $urandom % 4 : 0);
      end
    // let the timers of even rounds run out (ticks of 250 cycles, scan of 2048 timers)
    for (int r = 0; r < 2; r++) repeat (4000) @(negedge clk);
    while (pending() != 0) @(negedge clk);
    repeat (6000) @(negedge clk);
    for (int f = 0; f < FLOWS; f++)
      check(seq_seen[f] == seq_sent[f], $sformatf("flow %0d events delivered", f));
    check(n_timeout + n_restart == armed, $sformatf("timeouts %0d + restarts %0d != %0d armed", n_timeout, n_restart, armed));
    foreach (fl[i]) check(!tarmed[fl[i]], $sformatf("flow %0d timer never fired", fl[i]));
    check(n_dispatch > 0,  "mechanism: dispatch");
    check(n_reinsert > 0,  "mechanism: re-insertion of a returning flow");
    check(n_withhold > 0,  "mechanism: back-pressure withholding");
    check(n_multi > 0,     "mechanism: multi-packet instruction");
    check(n_switch > 0,    "mechanism: flow interleaving");
    check(n_preempt > 0,   "mechanism: pre-emption");
    check(n_rmw > 0,       "mechanism: read-modify-write of partial chunks");
    check(n_flush > 0,     "mechanism: flush-and-notify");
    check(n_timeout > 0,   "mechanism: timeout event");
    $display("dispatch=%0d reinsert=%0d withhold=%0d packets=%0d multi=%0d switch=%0d preempt=%0d rmw=%0d flush=%0d timeout=%0d/%0d restart=%0d",
             n_dispatch, n_reinsert, n_withhold, n_pkts, n_multi, n_switch, n_preempt, n_rmw, n_flush, n_timeout, armed, n_restart);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
