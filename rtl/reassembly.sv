// reassembly: instruction-driven data reassembly into per-flow buffers.
//
// Incoming payloads sit in a temporary payload memory in arrival order. The
// protocol logic engine decides where each segment belongs and issues
//   add-data-seg (addr = temporary address, offset, len): copy len bytes to
//     byte offset `offset` of the flow's reassembly buffer;
//   flush-and-notify (addr = application address, len = X): hand the next X
//     bytes of the flow's buffer to the application and advance the flow's
//     read pointer past them.
// The module keeps no segment state and infers no ordering (paper).
//
// Each flow's buffer is BUF_CHUNKS chunks of 64 bytes in one dual-ported
// RAM; offsets and the read pointer wrap modulo the buffer size. A segment
// at byte offset o is aligned by a shifter that, for destination chunk j,
// concatenates source chunks j and j-1 and shifts them left by o mod 64 bytes
// in six steps of 1, 2, 4, 8, 16 and 32 bytes selected by the bits of the
// shift amount, keeping the upper 64 bytes (paper). Destination chunks that
// the segment covers only in part are read, merged under a byte mask and
// written back (read-modify-write); full chunks are written directly. A
// segment touching M destination chunks takes M cycles, so an unaligned
// segment of N chunks takes N+1 and back-to-back instructions follow without
// bubbles. A flush of X bytes from read pointer r streams the chunks that
// hold bytes r..r+X-1, one per cycle; the first beat carries r mod 64 as the
// start byte, the last beat is the notification.
//
// Structure (this design's choices): an instruction FIFO (its fill level is
// the back-pressure signal bp), an issuer that requests the source chunks
// of add-data-seg from the temporary memory (64 bytes from any byte address,
// responses in request order) under a credit limit of DFIFO outstanding
// chunks, a job FIFO of DFIFO entries (each job holds at least one
// credit), and a two-stage executor (align/read, merge/write) with
// write-to-read forwarding so that adjacent segments that share a chunk
// merge correctly. The application output is a valid/ready stream; when it
// stalls the executor stalls.
module reassembly
  import pita_pkg::*;
#(
  parameter int unsigned FLOWS      = 1024,
  parameter int unsigned BUF_CHUNKS = 256,
  parameter int unsigned IQ_DEPTH   = 8,
  parameter int unsigned BP_THRESH  = 4,
  parameter int unsigned DFIFO      = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // instructions
  input  logic                     instr_valid,
  output logic                     instr_ready,
  input  logic [$clog2(FLOWS)-1:0] instr_flow,
  input  ra_instr_t                instr,
  output logic                     bp,
  // temporary payload memory (read side)
  output logic                     tmem_req_valid,
  input  logic                     tmem_req_ready,
  output logic [MADDR_W-1:0]       tmem_req_addr,
  input  logic                     tmem_rsp_valid,
  input  chunk_t                   tmem_rsp_data,
  // data to the application
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [$clog2(FLOWS)-1:0] out_flow,
  output logic [MADDR_W-1:0]       out_addr,   // application address of the flush
  output chunk_t                   out_data,
  output logic                     out_sop,
  output logic                     out_eop,    // last chunk: notification
  output logic [5:0]               out_start,  // first valid byte in the first chunk
  output logic [RLEN_W-1:0]        out_len     // bytes exposed by this flush
);
  localparam int unsigned FW   = $clog2(FLOWS);
  localparam int unsigned BW   = $clog2(BUF_CHUNKS);      // chunk index in a buffer
  localparam int unsigned OW   = BW + 6;                   // byte offset in a buffer
  localparam int unsigned AW   = FW + BW;                  // RAM address
  localparam int unsigned DCW  = $clog2(DFIFO + 1);
  localparam int unsigned CNTW = RLEN_W;

  typedef struct packed {
    logic [FW-1:0]      flow;
    ra_op_e             op;
    logic [MADDR_W-1:0] addr;
    logic [OW-1:0]      off;
    logic [RLEN_W-1:0]  len;
  } job_t;

  // ---------------- instruction FIFO ----------------
  localparam int unsigned IW = FW + $bits(ra_instr_t);
  logic          iq_rd, iq_empty, iq_full;
  logic [IW-1:0] iq_head;
  logic [$clog2(IQ_DEPTH+1)-1:0] iq_cnt;
  logic [FW-1:0] i_flow;
  ra_instr_t     i_ins;

  sync_fifo #(.WIDTH(IW), .DEPTH(IQ_DEPTH)) u_iq (
    .clk, .rst_n, .wr_en(instr_valid && instr_ready), .wr_data({instr_flow, instr}),
    .rd_en(iq_rd), .rd_data(iq_head), .empty(iq_empty), .full(iq_full), .count(iq_cnt));

  assign instr_ready = !iq_full;
  assign bp          = (32'(iq_cnt) >= BP_THRESH);
  assign {i_flow, i_ins} = iq_head;

  // ---------------- issuer ----------------
  logic [CNTW-1:0] iss_i;         // source chunks already requested for the head
  logic [CNTW-1:0] iss_n;         // source chunks of the head
  logic [DCW-1:0]  outstanding;   // requested, not yet returned
  logic [DCW-1:0]  df_cnt;
  logic            jq_wr, jq_rd, jq_empty, jq_full;
  job_t            jq_wdata, job;
  logic [$clog2(DFIFO+1)-1:0] jq_cnt;
  logic            credit, iss_fire, iss_last;

  assign iss_n    = CNTW'((32'(i_ins.len) + 32'd63) >> 6);
  assign credit   = (32'(outstanding) + 32'(df_cnt)) < DFIFO;
  assign iss_last = (i_ins.op == RA_FLUSH) || (iss_i + 1'b1 >= iss_n);

  always_comb begin
    tmem_req_valid = 1'b0;
    tmem_req_addr  = i_ins.addr + MADDR_W'({iss_i, 6'b0});
    iss_fire       = 1'b0;
    iq_rd          = 1'b0;
    jq_wr          = 1'b0;
    // The job enters the executor's queue with its first source request,
    // so the executor drains the data FIFO while later chunks of a long
    // segment are still being requested (a segment may exceed DFIFO chunks).
    if (!iq_empty) begin
      if (i_ins.op == RA_FLUSH) begin
        iq_rd = !jq_full;
        jq_wr = !jq_full;
      end else begin
        tmem_req_valid = credit && (iss_i != '0 || !jq_full);
        iss_fire       = tmem_req_valid && tmem_req_ready;
        iq_rd          = iss_fire && iss_last;
        jq_wr          = iss_fire && (iss_i == '0);
      end
    end
    jq_wdata = '{flow: i_flow, op: i_ins.op, addr: i_ins.addr,
                 off: i_ins.offset[OW-1:0], len: i_ins.len};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iss_i       <= '0;
      outstanding <= '0;
    end else begin
      if (iq_rd) iss_i <= '0;
      else if (iss_fire) iss_i <= iss_i + 1'b1;
      outstanding <= outstanding + $bits(outstanding)'(iss_fire) - $bits(outstanding)'(tmem_rsp_valid);
    end
  end

  sync_fifo #(.WIDTH($bits(job_t)), .DEPTH(DFIFO)) u_jq (
    .clk, .rst_n, .wr_en(jq_wr), .wr_data(jq_wdata), .rd_en(jq_rd), .rd_data(job),
    .empty(jq_empty), .full(jq_full), .count(jq_cnt));

  // source data returned by the temporary memory
  logic   df_rd, df_empty, df_full;
  chunk_t df_head;
  sync_fifo #(.WIDTH(CHUNK_W), .DEPTH(DFIFO)) u_df (
    .clk, .rst_n, .wr_en(tmem_rsp_valid), .wr_data(tmem_rsp_data), .rd_en(df_rd),
    .rd_data(df_head), .empty(df_empty), .full(df_full), .count(df_cnt));

  // ---------------- reassembly buffers and read pointers ----------------
  chunk_t        ra_mem [FLOWS*BUF_CHUNKS];
  logic [OW-1:0] rptr   [FLOWS];

  // ---------------- executor stage E: align / read ----------------
  logic            stall;
  logic [CNTW-1:0] j;            // destination chunk index within the job
  chunk_t          prev;         // previous source chunk
  logic [5:0]      s;
  logic [CNTW-1:0] n_src, m_dst;
  logic            need_src, e_go, e_last;
  logic [BW-1:0]   cidx;
  logic [AW-1:0]   e_addr;
  chunk_t          e_cur, e_data;
  logic [CHUNK_BYTES-1:0] e_mask;
  logic            e_rd;         // RAM read this cycle
  logic [OW-1:0]   f_rp;

  function automatic chunk_t align(input chunk_t cur, input chunk_t prv, input logic [5:0] sh);
    logic [2*CHUNK_W-1:0] x;
    x = {cur, prv};
    for (int b = 0; b < 6; b++)
      if (sh[b]) x = x << (8 * (1 << b));
    return x[2*CHUNK_W-1:CHUNK_W];
  endfunction

  always_comb begin
    f_rp     = rptr[job.flow];
    s        = (job.op == RA_FLUSH) ? f_rp[5:0] : job.off[5:0];
    n_src    = CNTW'((32'(job.len) + 32'd63) >> 6);
    m_dst    = CNTW'((32'(s) + 32'(job.len) + 32'd63) >> 6);
    need_src = (job.op == RA_ADD_SEG) && (j < n_src);
    e_go     = !jq_empty && !stall && !(need_src && df_empty);
    e_last   = (j + 1'b1 >= m_dst);
    jq_rd    = e_go && e_last;
    df_rd    = e_go && need_src;
    cidx     = ((job.op == RA_FLUSH) ? f_rp[OW-1:6] : job.off[OW-1:6]) + BW'(j);
    e_addr   = {job.flow, cidx};
    e_cur    = need_src ? df_head : '0;
    e_data   = align(e_cur, (j == 0) ? '0 : prev, s);
    for (int b = 0; b < CHUNK_BYTES; b++)
      e_mask[b] = ((32'(j) * 64 + 32'(b)) >= 32'(s)) &&
                  ((32'(j) * 64 + 32'(b)) < (32'(s) + 32'(job.len)));
    e_rd     = e_go && ((job.op == RA_FLUSH) || !(&e_mask));
  end

  // ---------------- stage S1: merge / write, or flush output ----------------
  logic            s1_valid, s1_flush, s1_sop, s1_eop;
  logic [AW-1:0]   s1_addr;
  chunk_t          s1_data, s1_merged, ram_q, fwd_q, old;
  logic [CHUNK_BYTES-1:0] s1_mask;
  logic            s1_fwd;
  logic [FW-1:0]   s1_flow;
  logic [MADDR_W-1:0] s1_app;
  logic [5:0]      s1_start;
  logic [RLEN_W-1:0] s1_len;
  logic            s1_write;

  always_comb begin
    old = s1_fwd ? fwd_q : ram_q;
    for (int b = 0; b < CHUNK_BYTES; b++)
      s1_merged[8*b +: 8] = s1_mask[b] ? s1_data[8*b +: 8] : old[8*b +: 8];
    s1_write = s1_valid && !s1_flush && !stall;
  end

  always_ff @(posedge clk) begin
    if (s1_write) ra_mem[s1_addr] <= s1_merged;
    if (e_rd) ram_q <= ra_mem[e_addr];
  end

  assign stall = out_valid && !out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int f = 0; f < FLOWS; f++) rptr[f] <= '0;
      j <= '0; prev <= '0;
      s1_valid <= 1'b0; s1_flush <= 1'b0; s1_sop <= 1'b0; s1_eop <= 1'b0;
      s1_addr <= '0; s1_data <= '0; s1_mask <= '0; s1_fwd <= 1'b0; fwd_q <= '0;
      s1_flow <= '0; s1_app <= '0; s1_start <= '0; s1_len <= '0;
      out_valid <= 1'b0; out_flow <= '0; out_addr <= '0; out_data <= '0;
      out_sop <= 1'b0; out_eop <= 1'b0; out_start <= '0; out_len <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (!stall) begin
        // S1 -> output
        if (s1_valid && s1_flush) begin
          out_valid <= 1'b1;
          out_flow  <= s1_flow;
          out_addr  <= s1_app;
          out_data  <= old;
          out_sop   <= s1_sop;
          out_eop   <= s1_eop;
          out_start <= s1_start;
          out_len   <= s1_len;
        end
        // E -> S1
        s1_valid <= e_go;
        if (e_go) begin
          s1_flush <= (job.op == RA_FLUSH);
          s1_sop   <= (j == 0);
          s1_eop   <= e_last;
          s1_addr  <= e_addr;
          s1_data  <= e_data;
          s1_mask  <= e_mask;
          s1_flow  <= job.flow;
          s1_app   <= job.addr;
          s1_start <= s;
          s1_len   <= job.len;
          // the chunk S1 writes now is what a read of the same address must see
          s1_fwd   <= s1_write && (s1_addr == e_addr);
          fwd_q    <= s1_merged;
          if (need_src) prev <= df_head;
          j <= e_last ? '0 : j + 1'b1;
          if (e_last && job.op == RA_FLUSH) rptr[job.flow] <= f_rp + OW'(job.len);
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) tmem_rsp_valid |-> !df_full);
  assert property (@(posedge clk) disable iff (!rst_n)
                   instr_valid && instr_ready |-> (instr.len != 0));
endmodule
