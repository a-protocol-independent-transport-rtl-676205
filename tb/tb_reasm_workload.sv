// tb_reasm_workload: the reassembly workload of the evaluation, on the
// reassembly unit at its default size (1024 flows, 256 x 64 B buffers).
//
// Streams of add-data-seg instructions with a fixed segment size (64, 128,
// 256, 512, 1024 and 1500 B) place consecutive segments of 16 flows, round-
// robin, each flow's segments back to back in its buffer (offsets follow
// on, so sizes that are not a multiple of 64 land unaligned). The temporary
// memory answers after 20 cycles and never stalls. The rate is the segment
// bytes divided by the cycles from the first to the last buffer write. At
// 250 MHz, 100 Gb/s is 50 bytes per cycle: sizes of 256 B and more must
// reach it. After each stream every flow flushes what it received, and
// every flushed byte is compared with the temporary memory contents.
module tb_reasm_workload;
  import pita_pkg::*;
  localparam int FLOWS = 1024, FW = 10, NF = 16, SEGS = 160, BUFB = 256 * 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic instr_valid, instr_ready, bp; logic [FW-1:0] instr_flow; ra_instr_t instr;
  logic tmem_req_valid, tmem_req_ready, tmem_rsp_valid; logic [MADDR_W-1:0] tmem_req_addr; chunk_t tmem_rsp_data;
  logic [7:0] tag_unused;
  logic out_valid, out_ready, out_sop, out_eop; logic [FW-1:0] out_flow; logic [MADDR_W-1:0] out_addr;
  chunk_t out_data; logic [5:0] out_start; logic [RLEN_W-1:0] out_len;

  reassembly dut (.*);
  mem_model #(.TAG_W(8), .LAT(20)) u_tmem (
    .clk, .rst_n, .req_valid(tmem_req_valid), .req_ready(tmem_req_ready), .req_addr(tmem_req_addr),
    .req_tag(8'd0), .rsp_valid(tmem_rsp_valid), .rsp_tag(tag_unused), .rsp_data(tmem_rsp_data));

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

  // write activity of the buffer RAM
  int cyc = 0, t_first = -1, t_last = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.s1_write) begin
      if (t_first < 0) t_first = cyc;
      t_last = cyc;
    end
  end

  // expected bytes per flow, in stream order
  byte unsigned exp_b [NF][$];
  int pos [NF];
  int fl_idx, fl_beat, fl_start, fl_len, n_flushed = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    fl_idx = int'(out_flow) / (FLOWS / NF);
    if (out_sop) begin fl_beat = 0; fl_start = out_start; fl_len = out_len; end
    for (int b = 0; b < 64; b++) begin
      automatic int p = fl_beat * 64 + b - fl_start;
      if (p >= 0 && p < fl_len) begin
        check(exp_b[fl_idx].size() != 0 && out_data[8*b +: 8] == exp_b[fl_idx][0], $sformatf("flow %0d flushed byte", out_flow));
        if (exp_b[fl_idx].size() != 0) void'(exp_b[fl_idx].pop_front());
      end
    end
    if (out_eop) n_flushed++;
    fl_beat++;
  end

  task automatic issue(input int f, input ra_op_e op, input longint addr, input int off, input int len);
    @(negedge clk);
    instr_valid = 1; instr_flow = FW'(f * (FLOWS / NF));
    instr.op = op; instr.addr = addr; instr.offset = LEN_W'(off); instr.len = RLEN_W'(len);
    #1;
    while (!instr_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk); instr_valid = 0;
  endtask

  longint tmp = 0;
  task automatic run(input int size);
    real rate;
    t_first = -1;
    fork
      begin
        for (int k = 0; k < SEGS; k++) begin
          automatic int f = k % NF;
          @(negedge clk);
          instr_valid = 1; instr_flow = FW'(f * (FLOWS / NF));
          instr.op = RA_ADD_SEG; instr.addr = 64'h200_0000 + tmp;
          instr.offset = LEN_W'(pos[f] % BUFB); instr.len = RLEN_W'(size);
          for (int b = 0; b < size; b++) exp_b[f].push_back(mbyte(64'h200_0000 + tmp + b));
          #1;
          while (!instr_ready) begin @(negedge clk); #1; end
          @(posedge clk);
          pos[f] += size; tmp += size;
        end
        @(negedge clk); instr_valid = 0;
      end
    join
    repeat (200) @(negedge clk);
    rate = real'(SEGS * size) / real'(t_last - t_first + 1);
    $display("%0d B segments: %0d bytes written in %0d cycles = %0.1f B/cycle = %0.1f Gb/s at 250 MHz",
             size, SEGS * size, t_last - t_first + 1, rate, rate * 2.0);
    if (size >= 256) check(rate >= 50.0, $sformatf("%0d B segments below 100 Gb/s", size));
    n_flushed = 0;
    for (int f = 0; f < NF; f++) issue(f, RA_FLUSH, 64'hA000_0000, 0, (SEGS / NF) * size);
    while (n_flushed != NF) @(negedge clk);
    for (int f = 0; f < NF; f++) check(exp_b[f].size() == 0, "bytes left after flush");
  endtask

  initial begin
    instr_valid = 0; instr_flow = 0; instr = '0; out_ready = 1;
    for (int f = 0; f < NF; f++) pos[f] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(64); run(128); run(256); run(512); run(1024); run(1500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
