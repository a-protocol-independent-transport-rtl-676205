// header_update: configurable rule that turns the header of the packet just
// sent into the header of the next packet of the same instruction.
//
// As in the paper, the rule sees the current header, the bytes of this
// instruction sent so far, and the instruction parameters, and is set per
// protocol rather than fixed. Two rules are provided and may be combined:
//  * counter add: a field of add_w bits at add_lsb is increased by the
//    segment size (byte sequence numbers, e.g. TCP) or by one (packet
//    sequence numbers, e.g. RoCE PSN), wrapping within the field;
//  * opcode: an 8-bit field at op_lsb is set to op_middle or op_last
//    depending on whether the next packet is the last of the instruction
//    (e.g. RoCE first/middle/last opcodes; the first packet's opcode comes
//    with the instruction's header).
// The field layout of the configuration is this design's choice. Purely
// combinational.
module header_update
  import pita_pkg::*;
(
  input  hu_cfg_t          cfg,
  input  logic [HDR_W-1:0] cur_hdr,
  input  logic [LEN_W-1:0] sent,     // bytes of the instruction sent, including this packet
  input  logic [LEN_W-1:0] len,      // instruction total bytes
  input  logic [SEG_W-1:0] seg,      // instruction segment size
  output logic [HDR_W-1:0] next_hdr
);
  logic [HDR_W-1:0] add_mask, op_mask, hdr1;
  logic [31:0]      field, inc, fmask;
  logic [LEN_W-1:0] left;

  always_comb begin
    fmask    = (cfg.add_w >= 6'd32) ? 32'hFFFF_FFFF : ((32'd1 << cfg.add_w) - 32'd1);
    add_mask = HDR_W'(fmask) << cfg.add_lsb;
    field    = 32'(cur_hdr >> cfg.add_lsb) & fmask;
    inc      = cfg.add_one ? 32'd1 : 32'(seg);
    hdr1     = cur_hdr;
    if (cfg.add_en)
      hdr1 = (cur_hdr & ~add_mask) | ((HDR_W'(32'(field + inc) & fmask)) << cfg.add_lsb);
    left     = len - sent;
    op_mask  = HDR_W'(8'hFF) << cfg.op_lsb;
    next_hdr = hdr1;
    if (cfg.op_en)
      next_hdr = (hdr1 & ~op_mask)
               | (HDR_W'((left <= LEN_W'(seg)) ? cfg.op_last : cfg.op_middle) << cfg.op_lsb);
  end
endmodule
