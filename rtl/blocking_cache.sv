// blocking_cache: direct-mapped, blocking, write-back / write-allocate cache.
//
// The processor side moves 32-bit words (cachereq/cacheresp), the memory
// side whole 16-byte lines (memreq/memresp). With the default 256 bytes and
// 16-byte lines there are 16 lines: index = addr[7:4], tag = addr[31:8],
// word = addr[3:2]. Tags, valid and dirty bits and the lines are registers.
//
// One request is handled at a time by an FSM with the published states:
//   I  idle           -> TC on cachereq_val
//   TC tag check      -> IN (init), RD (read hit), WD (write hit),
//                        EP (miss & dirty), RR (miss & clean)
//   IN / RD / WD      init / read / write data access -> W
//   EP evict prepare  -> ER;  ER evict request (memreq write) -> EW on rdy
//   EW evict wait     -> RR on memresp_val
//   RR refill request -> RW on memreq_rdy;  RW refill wait -> RU on memresp_val
//   RU refill update  -> RD (read) or WD (write)
//   W  wait           -> I once the response is taken
// A read-cp request (from lw.cp) is a read for the cache itself, but a
// read-cp miss is refilled with a read-cp memory request carrying the full
// word address (tag, index and offset), so that the prefetcher below can
// find the pointer word in the line. Evictions are line-aligned writes.
//
// Timing: a hit is answered three cycles after it is accepted (TC, RD, W).
//
// Follows the paper: size, line size, direct mapping, write-back
// write-allocate, the FSM states and their transitions, and forwarding the
// offset. This design's choices: only whole-word accesses (len is echoed,
// not used), an init transaction writes one word and marks the line valid
// and clean, responses echo type, opaque and len, memory requests carry
// opaque 0, and every response is sent from W.
module blocking_cache
  import pcp_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 256,
  parameter int unsigned LINE_BYTES  = 16,
  localparam int unsigned NLINES     = CACHE_BYTES / LINE_BYTES,
  localparam int unsigned IDX_W      = (NLINES > 1) ? $clog2(NLINES) : 1,
  localparam int unsigned TAG_W      = ADDR_W - OFF_W - IDX_W
) (
  input  logic       clk,
  input  logic       reset,

  input  logic       cachereq_val,
  output logic       cachereq_rdy,
  input  cachereq_t  cachereq_msg,

  output logic       cacheresp_val,
  input  logic       cacheresp_rdy,
  output cacheresp_t cacheresp_msg,

  output logic       memreq_val,
  input  logic       memreq_rdy,
  output memreq_t    memreq_msg,

  input  logic       memresp_val,
  output logic       memresp_rdy,
  input  memresp_t   memresp_msg
);

  typedef enum logic [3:0] {
    C_I, C_TC, C_IN, C_RD, C_WD, C_W, C_EP, C_ER, C_EW, C_RR, C_RW, C_RU
  } cache_state_e;

  cache_state_e state, state_next;

  cachereq_t req_r;
  always_ff @(posedge clk) begin
    if (cachereq_val && cachereq_rdy) req_r <= cachereq_msg;
  end

  logic [TAG_W-1:0] req_tag;
  logic [IDX_W-1:0] req_idx;
  logic [1:0]       req_word;
  assign req_tag  = req_r.addr[ADDR_W-1 -: TAG_W];
  assign req_idx  = req_r.addr[OFF_W +: IDX_W];
  assign req_word = req_r.addr[3:2];

  logic [TAG_W-1:0]  tags  [NLINES];
  logic [LINE_W-1:0] lines [NLINES];
  logic [NLINES-1:0] valid, dirty;

  logic hit;
  assign hit = valid[req_idx] && (tags[req_idx] == req_tag);

  logic [WORD_W-1:0]  rdata_r;     // read word held for W
  logic [LINE_W-1:0]  refill_r;    // line captured in RW
  logic [LINE_W-1:0]  evict_r;     // victim line captured in EP
  logic [TAG_W-1:0]   evict_tag_r;

  logic is_read, is_write, is_init;
  assign is_read  = (req_r.mtype == MSG_READ) || (req_r.mtype == MSG_READ_CP);
  assign is_write = (req_r.mtype == MSG_WRITE);
  assign is_init  = (req_r.mtype == MSG_INIT);

  always_comb begin
    state_next    = state;
    cachereq_rdy  = 1'b0;
    cacheresp_val = 1'b0;
    memreq_val    = 1'b0;
    memresp_rdy   = 1'b0;

    cacheresp_msg.mtype  = req_r.mtype;
    cacheresp_msg.opaque = req_r.opaque;
    cacheresp_msg.len    = req_r.len;
    cacheresp_msg.data   = is_read ? rdata_r : '0;

    memreq_msg.mtype  = (req_r.mtype == MSG_READ_CP) ? MSG_READ_CP : MSG_READ;
    memreq_msg.opaque = '0;
    memreq_msg.addr   = req_r.addr;     // tag, index and offset
    memreq_msg.len    = '0;
    memreq_msg.data   = '0;

    unique case (state)
      C_I:  begin
        cachereq_rdy = 1'b1;
        if (cachereq_val) state_next = C_TC;
      end
      C_TC: begin
        if (is_init)                   state_next = C_IN;
        else if (hit && is_read)       state_next = C_RD;
        else if (hit && is_write)      state_next = C_WD;
        else if (dirty[req_idx] && valid[req_idx]) state_next = C_EP;
        else                           state_next = C_RR;
      end
      C_IN, C_RD, C_WD: state_next = C_W;
      C_W:  begin
        cacheresp_val = 1'b1;
        if (cacheresp_rdy) state_next = C_I;
      end
      C_EP: state_next = C_ER;
      C_ER: begin
        memreq_val        = 1'b1;
        memreq_msg.mtype  = MSG_WRITE;
        memreq_msg.addr   = {evict_tag_r, req_idx, {OFF_W{1'b0}}};
        memreq_msg.data   = evict_r;
        if (memreq_rdy) state_next = C_EW;
      end
      C_EW: begin
        memresp_rdy = 1'b1;
        if (memresp_val) state_next = C_RR;
      end
      C_RR: begin
        memreq_val = 1'b1;
        if (memreq_rdy) state_next = C_RW;
      end
      C_RW: begin
        memresp_rdy = 1'b1;
        if (memresp_val) state_next = C_RU;
      end
      C_RU: state_next = is_write ? C_WD : C_RD;
      default: state_next = C_I;
    endcase
  end

  always_ff @(posedge clk) begin
    if (reset) state <= C_I;
    else       state <= state_next;
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      valid <= '0;
      dirty <= '0;
    end else begin
      unique case (state)
        C_IN: begin
          valid[req_idx] <= 1'b1;
          dirty[req_idx] <= 1'b0;
        end
        C_WD: dirty[req_idx] <= 1'b1;
        C_RU: begin
          valid[req_idx] <= 1'b1;
          dirty[req_idx] <= 1'b0;
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    unique case (state)
      C_IN, C_WD: begin
        lines[req_idx][req_word*WORD_W +: WORD_W] <= req_r.data;
        if (state == C_IN) tags[req_idx] <= req_tag;
      end
      C_RD: rdata_r <= lines[req_idx][req_word*WORD_W +: WORD_W];
      C_EP: begin
        evict_r     <= lines[req_idx];
        evict_tag_r <= tags[req_idx];
      end
      C_RW: if (memresp_val) refill_r <= memresp_msg.data;
      C_RU: begin
        lines[req_idx] <= refill_r;
        tags[req_idx]  <= req_tag;
      end
      default: ;
    endcase
  end

endmodule
