// tb_pktgen_workload: the packet-generation workloads of the evaluation, on
// the packet generator at its default size (1024 flows, 8-deep instruction
// queues, 64-chunk pre-fetch buffers).
//
// Back-to-back instructions of one packet each (no pacing), spread round-
// robin over 16 flows, are issued as fast as the generator accepts them;
// the output is always ready and payload memory answers after 20 cycles.
// Runs: random packet sizes 64..1500 B, then fixed sizes 64, 128, 256, 512,
// 1024 and 1500 B. Each run checks every header and payload byte and
// measures payload bytes per cycle from the first to the last beat. At
// 250 MHz, 100 Gb/s is 50 bytes per cycle: the random run and every fixed
// size from 128 B up must reach it; the 64 B rate is only printed.
module tb_pktgen_workload;
  import pita_pkg::*;
  localparam int FLOWS = 1024, FW = 10, NF = 16, N = 600;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  hu_cfg_t cfg_hu;
  logic [7:0] cfg_preempt_pkts;
  logic instr_valid, instr_ready; logic [FW-1:0] instr_flow; pg_instr_t instr;
  logic [FLOWS-1:0] bp;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid; logic [MADDR_W-1:0] mem_req_addr;
  logic [FW+6-1:0] mem_req_tag, mem_rsp_tag; chunk_t mem_rsp_data;
  logic pkt_valid, pkt_ready, pkt_sop, pkt_eop; logic [6:0] pkt_bytes; logic [HDR_W-1:0] pkt_hdr;
  logic [FW-1:0] pkt_flow; chunk_t pkt_data;

  pkt_generator dut (.*);
  mem_model #(.TAG_W(FW + 6), .LAT(20)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .req_tag(mem_req_tag), .rsp_valid(mem_rsp_valid), .rsp_tag(mem_rsp_tag), .rsp_data(mem_rsp_data));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  function automatic logic [7:0] mbyte(input longint a);
    return 8'((a * 37) ^ (a >> 7) ^ 8'h5a);
  endfunction

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { longint addr; int bytes; logic [HDR_W-1:0] hdr; } pkt_t;
  pkt_t exp_q [NF][$];
  pkt_t cur;
  int beat = 0, n_pkts = 0, cyc = 0, t_first = -1, t_last = 0;
  longint n_bytes = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (pkt_valid && pkt_ready) begin
      if (t_first < 0) t_first = cyc;
      t_last = cyc;
      if (pkt_sop) begin
        if (exp_q[pkt_flow / (FLOWS / NF)].size() == 0) check(0, "unexpected packet");
        else cur = exp_q[pkt_flow / (FLOWS / NF)].pop_front();
        check(pkt_hdr == cur.hdr, "header");
        beat = 0;
      end
      for (int b = 0; b < 64; b++)
        if (beat * 64 + b < cur.bytes) check(pkt_data[8*b +: 8] == mbyte(cur.addr + beat * 64 + b), "payload");
      n_bytes += pkt_bytes;
      if (pkt_eop) begin
        check(beat * 64 + int'(pkt_bytes) == cur.bytes, "packet length");
        n_pkts++;
      end
      beat++;
    end
  end

  task automatic run(input int fixed);
    int k = 0;
    real rate;
    n_pkts = 0; n_bytes = 0; t_first = -1;
    while (k < N) begin
      automatic int f = (k % NF) * (FLOWS / NF);
      automatic int sz = fixed ? fixed : 64 + $urandom % 1437;
      pkt_t p;
      @(negedge clk);
      instr_valid = 1; instr_flow = FW'(f);
      instr.addr = 64'h100_0000 + 64'($urandom % 1000000);
      instr.len = LEN_W'(sz); instr.seg = SEG_W'(sz); instr.gap = '0;
      instr.header = HDR_W'({16'(f), 32'(k)});
      #1;
      while (!instr_ready) begin @(negedge clk); #1; end
      p.addr = instr.addr; p.bytes = sz; p.hdr = instr.header;
      exp_q[f / (FLOWS / NF)].push_back(p);
      @(posedge clk);
      k++;
    end
    @(negedge clk); instr_valid = 0;
    while (n_pkts != N) @(negedge clk);
    rate = real'(n_bytes) / real'(t_last - t_first + 1);
    $display("%s packets: %0d bytes in %0d cycles = %0.1f B/cycle = %0.1f Gb/s at 250 MHz",
             fixed ? $sformatf("%0d B", fixed) : "random 64-1500 B", n_bytes, t_last - t_first + 1, rate, rate * 2.0);
    if (fixed == 0 || fixed >= 128) check(rate >= 50.0, $sformatf("size %0d below 100 Gb/s", fixed));
  endtask

  initial begin
    cfg_hu = '0; cfg_preempt_pkts = 8'd4;
    instr_valid = 0; instr_flow = 0; instr = '0; pkt_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0);
    run(64); run(128); run(256); run(512); run(1024); run(1500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
