// context_table: per-flow protocol state (the flow "context").
//
// A dual-ported RAM of FLOWS words of CTX_W bits: one port reads the context
// of the flow whose event is being dispatched, the other writes back the
// context updated by the protocol logic engine. The table does not interpret
// the bits; only their width is configured (paper). The read is registered:
// rd_data is valid one cycle after rd_en, aligned with the event that the
// event store returns one cycle after its dequeue. A write and a read of the
// same flow in the same cycle return the newly written context (write-first
// forwarding, this design's choice). Contents are cleared to zero by
// init_flow, one flow per cycle, so that software can start a flow from a
// known state; the table is not reset as a whole.
module context_table #(
  parameter int unsigned FLOWS = 1024,
  parameter int unsigned CTX_W = 938
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     rd_en,
  input  logic [$clog2(FLOWS)-1:0] rd_flow,
  output logic                     rd_valid,
  output logic [CTX_W-1:0]         rd_data,
  input  logic                     wr_en,
  input  logic [$clog2(FLOWS)-1:0] wr_flow,
  input  logic [CTX_W-1:0]         wr_data,
  input  logic                     init_en,
  input  logic [$clog2(FLOWS)-1:0] init_flow
);
  logic [CTX_W-1:0] mem [FLOWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_flow] <= wr_data;
    else if (init_en) mem[init_flow] <= '0;
    if (rd_en) begin
      if (wr_en && wr_flow == rd_flow) rd_data <= wr_data;
      else if (!wr_en && init_en && init_flow == rd_flow) rd_data <= '0;
      else rd_data <= mem[rd_flow];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end
endmodule
