// rr_arbiter: round-robin arbiter over N request lines.
//
// The grant goes to the first requester at or after the pointer, wrapping
// around. When `take` is asserted the pointer moves to one past the granted
// index, so every requester is served within N grants. The grant is
// combinational from req; the pointer changes on the clock edge.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N-1:0]                 req,
  input  logic                         take,
  output logic                         gnt_valid,
  output logic [$clog2(N > 1 ? N : 2)-1:0] gnt_idx
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);

  logic [IW-1:0] ptr;
  logic [N-1:0]  upper;  // requesters at or after the pointer
  logic [IW-1:0] idx_upper, idx_all;
  logic          any_upper, any_all;

  always_comb begin
    for (int i = 0; i < N; i++) upper[i] = req[i] && (IW'(i) >= ptr);
    any_upper = 1'b0;
    any_all   = 1'b0;
    idx_upper = '0;
    idx_all   = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (upper[i]) begin any_upper = 1'b1; idx_upper = IW'(i); end
      if (req[i])   begin any_all   = 1'b1; idx_all   = IW'(i); end
    end
    gnt_valid = any_all;
    gnt_idx   = any_upper ? idx_upper : idx_all;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (take && gnt_valid) ptr <= (gnt_idx == IW'(N - 1)) ? '0 : gnt_idx + 1'b1;
  end
endmodule
