// sync_fifo: single-clock first-word-fall-through FIFO.
//
// A ring buffer with separate read and write pointers and an occupancy
// count. The head word is visible on rd_data whenever empty is low; rd_en
// pops it. A push and a pop may happen in the same cycle, including when
// full (the pop frees the slot). Used for the scheduler's eligible-flow
// queues and for instruction and data staging buffers.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [WIDTH-1:0]           wr_data,
  input  logic                       rd_en,
  output logic [WIDTH-1:0]           rd_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  assign empty   = (count == 0);
  assign full    = (count == CW'(DEPTH));
  assign rd_data = mem[rp];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (wr_en) wp <= inc(wp);
      if (rd_en) rp <= inc(rp);
      count <= count + CW'(wr_en) - CW'(rd_en);
    end
  end

  // A pop from an empty FIFO or a push into a full one without a pop is a bug upstream.
  assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty);
  assert property (@(posedge clk) disable iff (!rst_n) (wr_en && full) |-> rd_en);
endmodule
