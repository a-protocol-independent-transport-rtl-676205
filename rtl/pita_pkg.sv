// pita_pkg: types and constants shared by the transport datapath.
//
// The datapath moves data in 64-byte chunks (the serialized data and packet
// width of the design). Instruction formats for the three execution modules
// (packet generation, reassembly, timers) are fixed-width packed structs so
// that any protocol program can drive them without the modules knowing the
// protocol. Field widths other than the 168-bit header and 64-byte chunk are
// this design's own choice.
package pita_pkg;

  localparam int unsigned CHUNK_BYTES = 64;              // serialized data width
  localparam int unsigned CHUNK_W     = CHUNK_BYTES * 8;
  localparam int unsigned HDR_W       = 168;             // packet header width
  localparam int unsigned MADDR_W     = 64;              // memory byte address
  localparam int unsigned LEN_W       = 32;              // instruction byte count
  localparam int unsigned SEG_W       = 16;              // segment size
  localparam int unsigned GAP_W       = 16;              // pacing gap in cycles
  localparam int unsigned TIME_W      = 32;              // free-running cycle time
  localparam int unsigned TICK_W      = 16;              // timer deadline in ticks
  localparam int unsigned RLEN_W      = 16;              // reassembly byte count

  typedef logic [CHUNK_W-1:0] chunk_t;

  // Packet-generation instruction: where the payload is, how much of it,
  // how to cut it into packets, the first header, and pacing.
  typedef struct packed {
    logic [HDR_W-1:0]   header;  // header of the first packet
    logic [MADDR_W-1:0] addr;    // payload start address in external memory
    logic [LEN_W-1:0]   len;     // total payload bytes (>0)
    logic [SEG_W-1:0]   seg;     // payload bytes per packet (1..4096)
    logic [GAP_W-1:0]   gap;     // minimum cycles between packet starts, 0 = unpaced
  } pg_instr_t;

  // Configuration of the header update rule (programmed per protocol).
  typedef struct packed {
    logic       add_en;     // add to a counter field after each packet
    logic       add_one;    // add 1 (packet sequence) instead of the segment size (byte sequence)
    logic [7:0] add_lsb;    // counter field position in the header
    logic [5:0] add_w;      // counter field width, 1..32
    logic       op_en;      // rewrite an 8-bit opcode field for the next packet
    logic [7:0] op_lsb;     // opcode field position
    logic [7:0] op_middle;  // opcode of a middle packet
    logic [7:0] op_last;    // opcode of the last packet
  } hu_cfg_t;

  typedef enum logic {RA_ADD_SEG = 1'b0, RA_FLUSH = 1'b1} ra_op_e;

  // Reassembly instruction: add-data-seg or flush-and-notify.
  typedef struct packed {
    ra_op_e             op;
    logic [MADDR_W-1:0] addr;    // add: temporary payload address; flush: application address
    logic [LEN_W-1:0]   offset;  // add: byte offset in the flow's reassembly buffer
    logic [RLEN_W-1:0]  len;     // add: segment bytes; flush: bytes to expose (>0)
  } ra_instr_t;

  typedef enum logic {TM_START = 1'b0, TM_STOP = 1'b1} tm_op_e;

  // Timer instruction: (re)start a flow's timer with a duration, or stop it.
  typedef struct packed {
    tm_op_e            op;
    logic [7:0]        tid;       // timer index within the flow
    logic [TICK_W-1:0] duration;  // in timer ticks
  } tm_instr_t;

endpackage
