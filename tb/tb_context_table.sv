// tb_context_table: self-checking test of the per-flow context RAM.
//
// Random reads, writes and clears against a reference array, including a
// read and a write of the same flow in the same cycle (the read must return
// the new context). Data is checked one cycle after each read.
module tb_context_table;
  localparam int FLOWS = 16, W = 938;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_en, rd_valid, wr_en, init_en;
  logic [3:0] rd_flow, wr_flow, init_flow;
  logic [W-1:0] rd_data, wr_data;
  context_table #(.FLOWS(FLOWS), .CTX_W(W)) dut (.*);

  int checks = 0, failures = 0, collisions = 0;
  logic [W-1:0] ref_mem [FLOWS];
  logic exp_v; logic [W-1:0] exp_d;

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; wr_en = 0; init_en = 0; rd_flow = 0; wr_flow = 0; init_flow = 0; wr_data = 0; exp_v = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // clear all flows
    for (int f = 0; f < FLOWS; f++) begin
      @(negedge clk); init_en = 1; init_flow = 4'(f); ref_mem[f] = '0;
    end
    @(negedge clk); init_en = 0;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      if (exp_v) begin
        checks++;
        if (!(rd_valid && rd_data == exp_d)) begin failures++; $display("FAIL read at %0d", c); end
      end else begin
        checks++; if (rd_valid) failures++;
      end
      rd_en = $urandom % 2; rd_flow = 4'($urandom);
      wr_en = $urandom % 2; wr_flow = ($urandom % 3 == 0) ? rd_flow : 4'($urandom); wr_data = rnd();
      init_en = ($urandom % 16 == 0); init_flow = 4'($urandom);
      exp_v = rd_en;
      if (wr_en && wr_flow == rd_flow && rd_en) collisions++;
      if (wr_en) ref_mem[wr_flow] = wr_data;
      else if (init_en) ref_mem[init_flow] = '0;
      exp_d = ref_mem[rd_flow];
    end
    checks++; if (collisions == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
