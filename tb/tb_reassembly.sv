// tb_reassembly: self-checking test of add-data-seg and flush-and-notify.
//
// The temporary payload memory is modelled with byte b at address a equal
// to a hash of a, returned 64 bytes per request after a fixed latency. A
// byte-level reference of every flow's buffer and read pointer predicts
// the bytes each flush must deliver.
//   Part 1: back-to-back 256-byte segments at byte offset 71 (mod 64 = 7)
//           must take 5 cycles each, aligned ones 4 cycles each, 64-byte
//           unaligned ones 2 cycles (N+1 for a segment of N chunks).
//   Part 2: random segments (1..300 bytes, random offsets, four flows) and
//           random flushes, with random output and memory stalls; every
//           delivered byte, start offset, length, flow and address is
//           compared with the reference.
module tb_reassembly;
  import pita_pkg::*;
  localparam int FLOWS = 4, BUFC = 8, BUFB = BUFC * 64, LAT = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic instr_valid, instr_ready, bp;
  logic [1:0] instr_flow, out_flow;
  ra_instr_t instr;
  logic tmem_req_valid, tmem_req_ready, tmem_rsp_valid;
  logic [MADDR_W-1:0] tmem_req_addr, out_addr;
  chunk_t tmem_rsp_data, out_data;
  logic out_valid, out_ready, out_sop, out_eop;
  logic [5:0] out_start;
  logic [RLEN_W-1:0] out_len;

  reassembly #(.FLOWS(FLOWS), .BUF_CHUNKS(BUFC)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic logic [7:0] mbyte(input longint a);
    return 8'((a * 37) ^ (a >> 7) ^ 8'h5a);
  endfunction

  // temporary memory: fixed latency pipe
  logic        pv [LAT];
  longint      pa [LAT];
  bit mem_stall = 0, rnd_mem = 0;
  always @(negedge clk) mem_stall = rnd_mem && ($urandom % 4 == 0);
  assign tmem_req_ready = !mem_stall;
  always_ff @(posedge clk) begin
    if (!rst_n) for (int i = 0; i < LAT; i++) pv[i] <= 1'b0;
    else begin
      pv[0] <= tmem_req_valid && tmem_req_ready; pa[0] <= longint'(tmem_req_addr);
      for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pa[i] <= pa[i-1]; end
    end
  end
  assign tmem_rsp_valid = rst_n && pv[LAT-1];
  always_comb for (int b = 0; b < 64; b++) tmem_rsp_data[8*b +: 8] = mbyte(pa[LAT-1] + b);

  // reference
  logic [7:0] refb [FLOWS][BUFB];
  int rp [FLOWS];
  typedef struct { int flow; longint addr; int len; int start; byte unsigned data[]; } flush_t;
  flush_t fq[$];

  // output checker
  int beat_k = 0; int flushes_done = 0; bit rnd_out = 0;
  always @(negedge clk) out_ready = rnd_out ? ($urandom % 3 != 0) : 1'b1;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (fq.size() == 0) check(0, "unexpected output");
    else begin
      automatic flush_t e = fq[0];
      if (beat_k == 0) check(out_sop, "sop");
      check(out_flow == 2'(e.flow) && out_addr == MADDR_W'(e.addr) && out_len == RLEN_W'(e.len)
            && out_start == 6'(e.start), "flush fields");
      for (int b = 0; b < 64; b++) begin
        automatic int pos = beat_k * 64 + b - e.start;
        if (pos >= 0 && pos < e.len)
          check(out_data[8*b +: 8] == e.data[pos], $sformatf("flush flow %0d byte %0d", e.flow, pos));
      end
      if (out_eop) begin
        check(beat_k == (e.start + e.len + 63) / 64 - 1, "beat count");
        void'(fq.pop_front()); beat_k = 0; flushes_done++;
      end else beat_k++;
    end
  end

  task automatic send(input int f, input ra_instr_t i);
    @(negedge clk);
    instr_valid = 1; instr_flow = 2'(f); instr = i;
    @(posedge clk); #1;
    while (!instr_ready) begin @(posedge clk); #1; end
    @(negedge clk); instr_valid = 0;
  endtask

  task automatic add(input int f, input longint a, input int off, input int len);
    ra_instr_t i;
    i.op = RA_ADD_SEG; i.addr = MADDR_W'(a); i.offset = LEN_W'(off); i.len = RLEN_W'(len);
    for (int k = 0; k < len; k++) refb[f][(off + k) % BUFB] = mbyte(a + k);
    send(f, i);
  endtask

  task automatic flush(input int f, input longint app, input int len);
    ra_instr_t i; flush_t e;
    i.op = RA_FLUSH; i.addr = MADDR_W'(app); i.offset = 0; i.len = RLEN_W'(len);
    e.flow = f; e.addr = app; e.len = len; e.start = rp[f] % 64;
    e.data = new[len];
    for (int k = 0; k < len; k++) e.data[k] = refb[f][(rp[f] + k) % BUFB];
    rp[f] = (rp[f] + len) % BUFB;
    fq.push_back(e);
    send(f, i);
  endtask

  // count executor write cycles
  int writes = 0, cyc = 0, first_w = -1, last_w = -1;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && dut.s1_write) begin
      writes++;
      if (first_w < 0) first_w = cyc;
      last_w = cyc;
    end
  end

  task automatic timing(input int off, input int len, input int cyc_each, input string name);
    int w0, first, last, n;
    n = 6;
    w0 = writes;
    first_w = -1;
    // queue the instructions back to back; the FIFO holds 8
    for (int k = 0; k < n; k++) add(0, 4096 + 512 * k, off, len);
    repeat (100) @(posedge clk);
    first = first_w; last = last_w;
    check(writes - w0 == n * cyc_each, $sformatf("%s: %0d chunk writes, want %0d", name, writes - w0, n * cyc_each));
    check(last - first + 1 == n * cyc_each, $sformatf("%s: %0d cycles for %0d segments, want %0d",
          name, last - first + 1, n, n * cyc_each));
    $display("%s: %0d segments in %0d cycles", name, n, last - first + 1);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: %0d flushes pending, %0d done", fq.size(), flushes_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_valid = 0; instr_flow = 0; instr = '0;
    for (int f = 0; f < FLOWS; f++) begin rp[f] = 0; for (int b = 0; b < BUFB; b++) refb[f][b] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // zero the buffers through the datapath so the reference is exact
    for (int f = 0; f < FLOWS; f++) begin
      ra_instr_t i; i.op = RA_ADD_SEG; i.addr = 64'h100000; i.offset = 0; i.len = RLEN_W'(BUFB);
      for (int k = 0; k < BUFB; k++) refb[f][k] = mbyte(64'h100000 + k);
      send(f, i);
    end
    repeat (200) @(negedge clk);
    // part 1: N+1 cycles for unaligned segments, back to back
    timing(71, 256, 5, "256B at offset 71");
    timing(128, 256, 4, "256B aligned");
    timing(7, 64, 2, "64B at offset 7");
    flush(0, 64'hA000, 200);
    repeat (50) @(negedge clk);
    // part 2: random
    rnd_out = 1; rnd_mem = 1;
    for (int t = 0; t < 400; t++) begin
      int f = $urandom % FLOWS;
      if ($urandom % 3 == 0) flush(f, 64'h8000_0000 + t * 4096, 1 + $urandom % 300);
      else add(f, $urandom % 100000, $urandom % 4096, 1 + $urandom % 300);
    end
    rnd_mem = 0;
    repeat (2000) @(negedge clk);
    check(fq.size() == 0, "all flushes delivered");
    $display("flushes=%0d", flushes_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
