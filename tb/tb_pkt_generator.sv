// tb_pkt_generator: self-checking test of instruction-driven packet
// generation.
//
// External memory is modelled with byte b at address a equal to a hash of
// a, answering 64-byte reads in order after MEM_LAT cycles. For every
// instruction the test predicts each packet: its payload (bytes addr+k*seg
// onward), its length and its header (a 32-bit sequence field at bit 0
// grown by seg per packet). Packets are compared per flow, in order.
// Rates and mechanisms checked:
//   1. one flow, one 15000-byte instruction cut into 1500-byte packets:
//      after the first packet, 1 beat per cycle with no idle cycle;
//   2. four flows with long instructions and preemption after 1 packet:
//      packets of different flows interleave, 1 beat per cycle;
//   3. back-to-back single-packet instructions (128 B) over four flows:
//      1 beat per cycle;
//   4. a paced instruction (gap 200): packet starts at least 200 cycles apart;
//   5. per-flow back-pressure rises at BP_THRESH queued instructions;
//   6. random instructions and output stalls.
module tb_pkt_generator;
  import pita_pkg::*;
  localparam int FLOWS = 4, PFC = 64, MEM_LAT = 10;
  localparam int TW = 2 + 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  hu_cfg_t cfg_hu;
  logic [7:0] cfg_preempt_pkts;
  logic instr_valid, instr_ready;
  logic [1:0] instr_flow, pkt_flow;
  pg_instr_t instr;
  logic [FLOWS-1:0] bp;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [MADDR_W-1:0] mem_req_addr;
  logic [TW-1:0] mem_req_tag, mem_rsp_tag;
  chunk_t mem_rsp_data, pkt_data;
  logic pkt_valid, pkt_ready, pkt_sop, pkt_eop;
  logic [6:0] pkt_bytes;
  logic [HDR_W-1:0] pkt_hdr;

  pkt_generator #(.FLOWS(FLOWS), .PF_CHUNKS(PFC)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic logic [7:0] mbyte(input longint a);
    return 8'((a * 37) ^ (a >> 7) ^ 8'h5a);
  endfunction

  // memory model
  logic   mv [MEM_LAT];
  longint ma [MEM_LAT];
  logic [TW-1:0] mt [MEM_LAT];
  assign mem_req_ready = 1'b1;
  always_ff @(posedge clk) begin
    if (!rst_n) for (int i = 0; i < MEM_LAT; i++) mv[i] <= 1'b0;
    else begin
    mv[0] <= mem_req_valid; ma[0] <= longint'(mem_req_addr); mt[0] <= mem_req_tag;
    for (int i = 1; i < MEM_LAT; i++) begin mv[i] <= mv[i-1]; ma[i] <= ma[i-1]; mt[i] <= mt[i-1]; end
    end
  end
  assign mem_rsp_valid = rst_n && mv[MEM_LAT-1];
  assign mem_rsp_tag   = mt[MEM_LAT-1];
  always_comb for (int b = 0; b < 64; b++) mem_rsp_data[8*b +: 8] = mbyte(ma[MEM_LAT-1] + b);

  // expected packets
  typedef struct { logic [HDR_W-1:0] hdr; longint addr; int bytes; int gap; } pkt_t;
  pkt_t exp_q [FLOWS][$];
  int   beat = 0, cyc = 0;
  pkt_t cur;
  int   beats_total = 0, sops = 0, last_flow = -1, switches = 0;
  longint last_start [FLOWS];
  int   min_gap_seen [FLOWS];
  bit   rnd_out = 0;

  always @(negedge clk) pkt_ready = rnd_out ? ($urandom % 4 != 0) : 1'b1;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && pkt_valid && pkt_ready) begin
    beats_total++;
    if (pkt_sop) begin
      if (exp_q[pkt_flow].size() == 0) check(0, $sformatf("unexpected packet on flow %0d", pkt_flow));
      else begin
        cur = exp_q[pkt_flow].pop_front();
        check(pkt_hdr == cur.hdr, $sformatf("flow %0d header %h want %h", pkt_flow, pkt_hdr[31:0], cur.hdr[31:0]));
      end
      beat = 0; sops++;
      if (last_flow >= 0 && last_flow != int'(pkt_flow)) switches++;
      last_flow = pkt_flow;
      if (last_start[pkt_flow] >= 0 && cyc - last_start[pkt_flow] < min_gap_seen[pkt_flow])
        min_gap_seen[pkt_flow] = cyc - last_start[pkt_flow];
      last_start[pkt_flow] = cyc;
    end
    for (int b = 0; b < 64; b++)
      if (beat * 64 + b < cur.bytes)
        check(pkt_data[8*b +: 8] == mbyte(cur.addr + beat * 64 + b), $sformatf("flow %0d payload byte %0d", pkt_flow, beat*64+b));
    if (pkt_eop) begin
      check(beat == (cur.bytes + 63) / 64 - 1, "beats per packet");
      check(int'(pkt_bytes) == cur.bytes - beat * 64, "bytes in last beat");
    end else check(pkt_bytes == 64, "full beat");
    beat++;
  end

  task automatic send(input int f, input longint a, input int len, input int seg, input int gap, input logic [31:0] seq);
    pg_instr_t i;
    i.header = {HDR_W'(f) << 160} | HDR_W'(seq);
    i.addr = MADDR_W'(a); i.len = LEN_W'(len); i.seg = SEG_W'(seg); i.gap = GAP_W'(gap);
    for (int k = 0; k * seg < len; k++) begin
      pkt_t p;
      p.hdr = i.header; p.hdr[31:0] = seq + 32'(k * seg);
      p.addr = a + k * seg;
      p.bytes = (len - k * seg < seg) ? len - k * seg : seg;
      exp_q[f].push_back(p);
    end
    @(negedge clk);
    instr_valid = 1; instr_flow = 2'(f); instr = i;
    @(posedge clk); #1;
    while (!instr_ready) begin @(posedge clk); #1; end
    @(negedge clk); instr_valid = 0;
  endtask

  task automatic wait_drain();
    int n;
    do begin
      n = 0; for (int f = 0; f < FLOWS; f++) n += exp_q[f].size();
      @(negedge clk);
    end while (n != 0);
    repeat (5) @(negedge clk);
  endtask

  // count busy beats in a window
  task automatic window(input int from_beats, input int n_beats, output int cycles);
    int b0, c0;
    while (beats_total < from_beats) @(posedge clk);
    c0 = cyc; b0 = beats_total;
    while (beats_total < b0 + n_beats) @(posedge clk);
    cycles = cyc - c0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    for (int f = 0; f < FLOWS; f++)
      $display("watchdog: flow %0d expects %0d packets; queue %0d arr %0d inf %0d need %0d fval %0d fq %0d", f, exp_q[f].size(),
               dut.iq_cnt[f], dut.pf_arr[f], dut.pf_inf[f], dut.a_need[f], dut.f_valid[f], dut.fq_cnt[f]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cycles, b0;
    instr_valid = 0; instr_flow = 0; instr = '0;
    cfg_hu = '0; cfg_hu.add_en = 1; cfg_hu.add_lsb = 0; cfg_hu.add_w = 32;
    cfg_preempt_pkts = 1;
    for (int f = 0; f < FLOWS; f++) begin last_start[f] = -1; min_gap_seen[f] = 1 << 30; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. one flow, 10 x 1500 B
    b0 = beats_total;
    send(0, 64'h10000, 15000, 1500, 0, 32'hFFFF_F000);
    fork window(b0 + 24, 9 * 24, cycles); join
    check(cycles == 9 * 24, $sformatf("single flow: %0d cycles for %0d beats", cycles, 9 * 24));
    $display("single flow 1500B: %0d beats in %0d cycles", 9 * 24, cycles);
    wait_drain();

    // 2. four flows, long instructions, preempt after 1 packet
    b0 = beats_total; switches = 0;
    for (int f = 0; f < FLOWS; f++) send(f, 64'h20000 * (f + 1), 8 * 1024, 1024, 0, 32'(f * 1000));
    fork window(b0 + 32, 16 * 16, cycles); join
    check(cycles == 16 * 16, $sformatf("interleaved: %0d cycles for 256 beats", cycles));
    wait_drain();
    check(switches >= 24, $sformatf("flows interleaved per packet (%0d switches)", switches));
    $display("four flows interleaved: 256 beats in %0d cycles, %0d flow switches", cycles, switches);

    // 3. back-to-back single-packet 128 B instructions on four flows, queued
    //    while the output is held, then released
    force pkt_ready = 1'b0;
    for (int k = 0; k < 24; k++) send(k % FLOWS, 64'h90000 + 4096 * k, 128, 128, 0, 32'(k));
    repeat (60) @(negedge clk);
    b0 = beats_total;
    release pkt_ready;
    window(b0 + 1, 46, cycles);
    wait_drain();
    check(cycles == 46, $sformatf("b2b 128B: %0d cycles for 46 beats", cycles));
    $display("b2b single-packet 128B instructions: 46 beats in %0d cycles", cycles);

    // 4. pacing
    for (int f = 0; f < FLOWS; f++) begin last_start[f] = -1; min_gap_seen[f] = 1 << 30; end
    send(2, 64'h40000, 6 * 256, 256, 200, 0);
    wait_drain();
    check(min_gap_seen[2] >= 200, $sformatf("paced flow packet spacing %0d", min_gap_seen[2]));
    $display("paced flow minimum packet spacing %0d cycles", min_gap_seen[2]);

    // 5. back-pressure threshold (6 queued instructions)
    rnd_out = 0;
    force pkt_ready = 1'b0;
    for (int k = 0; k < 6; k++) begin
      check(!bp[1], "bp low below threshold");
      send(1, 64'h50000 + 4096 * k, 256, 256, 0, 0);
    end
    @(negedge clk);
    check(bp[1], "bp high at threshold");
    check(!bp[0] && !bp[2] && !bp[3], "bp only on the filled flow");
    release pkt_ready;
    wait_drain();
    check(!bp[1], "bp released");

    // 6. random
    rnd_out = 1; cfg_preempt_pkts = 3;
    for (int k = 0; k < 120; k++) begin
      int len = 1 + $urandom % 5000;
      int seg = 64 + $urandom % 1500;
      send($urandom % FLOWS, longint'($urandom % 1000000), len, seg, ($urandom % 4 == 0) ? $urandom % 50 : 0, $urandom);
    end
    wait_drain();
    $display("packets=%0d beats=%0d", sops, beats_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
