// mem_model: behavioural read-only memory for testbenches. Byte b at
// address a has the value mem_byte(a) (a fixed hash); a request returns the
// 64 bytes starting at its address, with its tag, LAT cycles later, in
// request order. req_ready is low on a pseudo-random quarter of the cycles
// when STALLS is set.
module mem_model
  import pita_pkg::*;
#(
  parameter int unsigned TAG_W  = 8,
  parameter int unsigned LAT    = 8,
  parameter bit          STALLS = 1'b0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  logic [MADDR_W-1:0] req_addr,
  input  logic [TAG_W-1:0]   req_tag,
  output logic               rsp_valid,
  output logic [TAG_W-1:0]   rsp_tag,
  output chunk_t             rsp_data
);
  logic               v [LAT];
  logic [MADDR_W-1:0] a [LAT];
  logic [TAG_W-1:0]   t [LAT];

  function automatic logic [7:0] mem_byte(input logic [MADDR_W-1:0] addr);
    return 8'((addr * 37) ^ (addr >> 7) ^ 8'h5a);
  endfunction

  always @(negedge clk) req_ready <= STALLS ? ($urandom % 4 != 0) : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < LAT; i++) v[i] <= 1'b0;
    else begin
      v[0] <= req_valid && req_ready; a[0] <= req_addr; t[0] <= req_tag;
      for (int i = 1; i < LAT; i++) begin v[i] <= v[i-1]; a[i] <= a[i-1]; t[i] <= t[i-1]; end
    end
  end
  assign rsp_valid = v[LAT-1];
  assign rsp_tag   = t[LAT-1];
  always_comb for (int b = 0; b < 64; b++) rsp_data[8*b +: 8] = mem_byte(a[LAT-1] + MADDR_W'(b));
endmodule
