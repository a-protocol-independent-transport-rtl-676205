// tb_header_update: checks the configurable next-header rule.
//
// Case 1 (byte stream): a 32-bit sequence field at bit 32 grows by the
// segment size and wraps at 2^32. Case 2 (message, packet sequence): a
// 24-bit field at bit 100 grows by one and an opcode at bit 8 becomes the
// middle or last code depending on the bytes left. Case 3: rules disabled
// leave the header unchanged. Expected headers are built field by field.
module tb_header_update;
  import pita_pkg::*;
  hu_cfg_t cfg;
  logic [HDR_W-1:0] cur_hdr, next_hdr, expv;
  logic [LEN_W-1:0] sent, len;
  logic [SEG_W-1:0] seg;
  header_update dut (.*);
  int checks = 0, failures = 0;

  function automatic logic [HDR_W-1:0] rnd_hdr();
    logic [HDR_W-1:0] v;
    for (int i = 0; i < HDR_W; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      cfg = '0; cfg.add_en = 1; cfg.add_lsb = 32; cfg.add_w = 32;
      cur_hdr = rnd_hdr(); seg = SEG_W'(1 + $urandom % 1500); len = 100000; sent = $urandom % 100000;
      if (t < 5) cur_hdr[63:32] = 32'hFFFF_FFFF - t;   // wrap
      #1;
      expv = cur_hdr; expv[63:32] = cur_hdr[63:32] + 32'(seg);
      checks++; if (next_hdr !== expv) begin failures++; $display("FAIL seq add t=%0d", t); end

      cfg = '0; cfg.add_en = 1; cfg.add_one = 1; cfg.add_lsb = 100; cfg.add_w = 24;
      cfg.op_en = 1; cfg.op_lsb = 8; cfg.op_middle = 8'h07; cfg.op_last = 8'h08;
      cur_hdr = rnd_hdr(); seg = 1024; len = 10 * 1024; sent = LEN_W'(($urandom % 10) * 1024);
      if (t < 3) cur_hdr[123:100] = 24'hFFFFFF;
      #1;
      expv = cur_hdr; expv[123:100] = cur_hdr[123:100] + 24'd1;
      expv[15:8] = (len - sent <= 1024) ? 8'h08 : 8'h07;
      checks++; if (next_hdr !== expv) begin failures++; $display("FAIL psn/opcode t=%0d", t); end

      cfg = '0; cur_hdr = rnd_hdr(); #1;
      checks++; if (next_hdr !== cur_hdr) begin failures++; $display("FAIL passthrough t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
