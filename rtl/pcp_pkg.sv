// pcp_pkg: message formats and type codes shared by the processor-side
// caches, the pointer-chase prefetcher and the memory.
//
// Four messages travel over val/rdy channels:
//   cachereq  (77 bits)  type[76:74] opaque[73:66] addr[65:34] len[33:32] data[31:0]
//   cacheresp (45 bits)  type[44:42] opaque[41:34] len[33:32]  data[31:0]
//   memreq   (175 bits)  type[174:172] opaque[171:164] addr[163:132] len[131:128] data[127:0]
//   memresp  (143 bits)  type[142:140] opaque[139:132] len[131:128]  data[127:0]
// The field order and bit positions are the published message layout; the
// packed structs below reproduce them exactly (first member = most
// significant bits). The processor side moves 32-bit words, the memory side
// moves whole 16-byte lines.
//
// The numeric type codes are this design's choice: read, write and init keep
// the usual 0/1/2 order, and the pointer-chase read (issued by lw.cp) takes
// the next free code, 3.
package pcp_pkg;

  localparam int unsigned ADDR_W   = 32;
  localparam int unsigned WORD_W   = 32;
  localparam int unsigned LINE_W   = 128;  // one cache line, 16 bytes
  localparam int unsigned OPQ_W    = 8;
  localparam int unsigned TYPE_W   = 3;
  localparam int unsigned OFF_W    = 4;    // byte offset inside a line

  typedef enum logic [TYPE_W-1:0] {
    MSG_READ    = 3'd0,
    MSG_WRITE   = 3'd1,
    MSG_INIT    = 3'd2,
    MSG_READ_CP = 3'd3
  } msg_type_e;

  typedef struct packed {
    msg_type_e           mtype;
    logic [OPQ_W-1:0]    opaque;
    logic [ADDR_W-1:0]   addr;
    logic [1:0]          len;
    logic [WORD_W-1:0]   data;
  } cachereq_t;

  typedef struct packed {
    msg_type_e           mtype;
    logic [OPQ_W-1:0]    opaque;
    logic [1:0]          len;
    logic [WORD_W-1:0]   data;
  } cacheresp_t;

  typedef struct packed {
    msg_type_e           mtype;
    logic [OPQ_W-1:0]    opaque;
    logic [ADDR_W-1:0]   addr;
    logic [3:0]          len;
    logic [LINE_W-1:0]   data;
  } memreq_t;

  typedef struct packed {
    msg_type_e           mtype;
    logic [OPQ_W-1:0]    opaque;
    logic [3:0]          len;
    logic [LINE_W-1:0]   data;
  } memresp_t;

  // Opaque values the prefetcher puts on its own memory requests: demand
  // traffic forwarded for the cache, and next-node prefetches.
  localparam logic [OPQ_W-1:0] OPQ_DEMAND   = 8'd0;
  localparam logic [OPQ_W-1:0] OPQ_PREFETCH = 8'd1;

endpackage
