// prefetcher: pointer-chase prefetcher placed between a blocking cache and a
// pipelined memory.
//
// The cache sends its misses here as memreq messages of type read, write,
// init or read-cp (a read issued by the lw.cp instruction, whose loaded
// word is a pointer to the next node of a linked structure). The
// prefetcher keeps a 4-entry, direct-mapped buffer of 16-byte lines
// (pf_tag_array + pf_data_array, index = addr[5:4], tag = addr[31:6]).
//
//   read     hit:  the line is returned from the data array in the
//                  tag-check cycle (one-cycle hit latency).
//            miss: the request goes to memory, the answer is passed back.
//   read-cp  as read, and afterwards the word at the request's offset in
//                  the returned line (array on a hit, memory response on a
//                  miss) is taken as the next node's address, latched in the
//                  buffer address register and sent to memory as a prefetch.
//   write    forwarded to memory; a hit invalidates the entry's tag.
//   init     writes tag and data into the arrays (test loading).
//
// Control is one FSM (states I, TC, IN, DI, PN, BM, WR, SM):
//   I   idle, req_rdy=1, the incoming request is latched;
//   TC  tag check and data access; a ready, valid hit answers here;
//   IN  init write;  DI  tag hit whose data is still in flight: wait;
//   PN  push-next: load buffer_addr_reg from the data array;
//   BM  buffer to memory: send the prefetch (opaque=1), write the tag with
//       tag-valid=1 and clear data-valid, accept the next request;
//   WR  wait for the demand memory response (opaque=0) and forward it;
//       on read-cp the pointer is latched from the response, then BM;
//   SM  stall memory: response waiting for the cache to become ready.
// Only one prefetch is in flight at a time (in_fly). A new pointer found
// while one is in flight is dropped. Prefetch responses (opaque=1) are
// accepted by a path parallel to the FSM at any time and written into the
// data array at the buffered index.
//
// Interfaces: four val/rdy channels (cache request/response, memory
// request/response); resp_hit is a side-band flag, valid with resp_val,
// that tells whether the response came from the prefetch buffer.
//
// Follows the published design: array sizes, the state names, the mux
// structure, one-cycle hit, opaque 1 for prefetches and 0 for demand
// requests, dropping a pointer when a prefetch is in flight. This design's
// own choices: memory requests use the line address (offset zeroed), a
// read-cp miss is sent to memory as a plain read, responses echo the
// request's type, opaque and len, an init waits until no prefetch is in
// flight, and a hit whose response cannot be sent waits in DI.
module prefetcher
  import pcp_pkg::*;
#(
  parameter int unsigned ENTRIES = 4,
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1,
  localparam int unsigned TAG_W  = ADDR_W - OFF_W - IDX_W
) (
  input  logic     clk,
  input  logic     reset,

  input  logic     req_val,
  output logic     req_rdy,
  input  memreq_t  req_msg,

  output logic     resp_val,
  input  logic     resp_rdy,
  output memresp_t resp_msg,
  output logic     resp_hit,

  output logic     memreq_val,
  input  logic     memreq_rdy,
  output memreq_t  memreq_msg,

  input  logic     memresp_val,
  output logic     memresp_rdy,
  input  memresp_t memresp_msg
);

  typedef enum logic [2:0] {
    ST_I, ST_TC, ST_IN, ST_DI, ST_PN, ST_BM, ST_WR, ST_SM
  } pf_state_e;

  pf_state_e state, state_next;

  // ---------------------------------------------------------------- unpack
  memreq_t req_r;
  always_ff @(posedge clk) begin
    if (req_val && req_rdy) req_r <= req_msg;
  end

  logic [TAG_W-1:0] req_tag;
  logic [IDX_W-1:0] req_idx;
  logic [OFF_W-1:0] req_off;
  assign req_tag = req_r.addr[ADDR_W-1 -: TAG_W];
  assign req_idx = req_r.addr[OFF_W +: IDX_W];
  assign req_off = req_r.addr[OFF_W-1:0];

  logic is_read, is_cp, is_write, is_init;
  assign is_cp    = (req_r.mtype == MSG_READ_CP);
  assign is_read  = (req_r.mtype == MSG_READ) || is_cp;
  assign is_write = (req_r.mtype == MSG_WRITE);
  assign is_init  = (req_r.mtype == MSG_INIT);

  // ------------------------------------------------- buffer address register
  logic [TAG_W-1:0] buf_tag;
  logic [IDX_W-1:0] buf_idx;
  logic             buf_en;
  logic             in_fly;
  logic             buf_sel_memresp;
  logic [WORD_W-1:0] next_addr;

  // ---------------------------------------------------------------- arrays
  logic             tag_hit;
  logic             tag_wen, tag_wvalid;
  logic [IDX_W-1:0] tag_widx;       // iinit_addr_mux
  logic [TAG_W-1:0] tag_wtag;       // init_tag_mux

  logic [LINE_W-1:0] data_rd;
  logic              data_rd_valid;
  logic              data_wen, data_wvalid;
  logic [IDX_W-1:0]  data_widx;
  logic [LINE_W-1:0] data_wdata;    // init_data_mux

  pf_tag_array #(.ENTRIES(ENTRIES), .TAG_W(TAG_W)) u_tag_array (
    .clk, .reset,
    .rd_idx (req_idx), .rd_tag (req_tag), .hit (tag_hit), .rd_data (),
    .wen (tag_wen), .widx (tag_widx), .wtag (tag_wtag), .wvalid (tag_wvalid)
  );

  pf_data_array #(.ENTRIES(ENTRIES), .LINE_W(LINE_W)) u_data_array (
    .clk, .reset,
    .rd_idx (req_idx), .rd_data (data_rd), .rd_valid (data_rd_valid),
    .wen (data_wen), .widx (data_widx), .wdata (data_wdata), .wvalid (data_wvalid)
  );

  pf_addr_gen u_addr_gen (
    .array_line   (data_rd),
    .memresp_line (memresp_msg.data),
    .offset       (req_off),
    .sel_memresp  (buf_sel_memresp),
    .next_addr    (next_addr)
  );

  // Memory responses: prefetch returns (opaque 1) are always taken; demand
  // returns (opaque 0) belong to the FSM.
  logic pf_ret, dem_ret;
  assign pf_ret  = memresp_val && (memresp_msg.opaque == OPQ_PREFETCH);
  assign dem_ret = memresp_val && (memresp_msg.opaque == OPQ_DEMAND);

  logic hit_ready;      // a hit whose line is present
  assign hit_ready = tag_hit && data_rd_valid;

  // ----------------------------------------------------------- control unit
  always_comb begin
    state_next      = state;
    req_rdy         = 1'b0;
    resp_val        = 1'b0;
    resp_hit        = 1'b0;
    memreq_val      = 1'b0;
    memresp_rdy     = pf_ret;
    buf_en          = 1'b0;
    buf_sel_memresp = 1'b0;

    tag_wen    = 1'b0;
    tag_widx   = req_idx;
    tag_wtag   = req_tag;
    tag_wvalid = 1'b0;
    data_wen    = 1'b0;
    data_widx   = req_idx;
    data_wdata  = req_r.data;
    data_wvalid = 1'b0;

    // pack: response to the cache
    resp_msg.mtype  = req_r.mtype;
    resp_msg.opaque = req_r.opaque;
    resp_msg.len    = req_r.len;
    resp_msg.data   = data_rd;        // prefetchresp_mux: data array

    // pack: request to memory (mk_addr gives the line address)
    memreq_msg.mtype  = is_write ? MSG_WRITE : MSG_READ;
    memreq_msg.opaque = OPQ_DEMAND;
    memreq_msg.addr   = {req_tag, req_idx, {OFF_W{1'b0}}};
    memreq_msg.len    = '0;
    memreq_msg.data   = req_r.data;

    unique case (state)
      ST_I: begin
        req_rdy = 1'b1;
        if (req_val) state_next = ST_TC;
      end

      ST_TC: begin
        if (is_init) begin
          state_next = ST_IN;
        end else if (is_read && tag_hit) begin
          if (hit_ready && resp_rdy) begin
            resp_val = 1'b1;
            resp_hit = 1'b1;
            if (is_cp) begin
              state_next = ST_PN;
            end else begin
              req_rdy    = 1'b1;
              state_next = req_val ? ST_TC : ST_I;
            end
          end else begin
            state_next = ST_DI;
          end
        end else begin
          // read miss, read-cp miss, write hit or write miss
          memreq_val = 1'b1;
          if (is_write && tag_hit) begin
            tag_wen    = 1'b1;          // invalidate the stale prefetched line
            tag_wvalid = 1'b0;
          end
          if (memreq_rdy) state_next = ST_WR;
        end
      end

      ST_IN: begin
        // the array write port is shared with prefetch returns, and a
        // return must not overwrite an entry that init has just written
        if (!in_fly) begin
          resp_val = 1'b1;
          if (resp_rdy) begin
            tag_wen     = 1'b1;
            tag_wvalid  = 1'b1;
            data_wen    = 1'b1;
            data_wvalid = 1'b1;
            data_wdata  = req_r.data;
            req_rdy     = 1'b1;
            state_next  = req_val ? ST_TC : ST_I;
          end
        end
      end

      ST_DI: begin
        if (hit_ready && resp_rdy) begin
          resp_val = 1'b1;
          resp_hit = 1'b1;
          if (is_cp) begin
            state_next = ST_PN;
          end else begin
            req_rdy    = 1'b1;
            state_next = req_val ? ST_TC : ST_I;
          end
        end
      end

      ST_PN: begin
        if (!in_fly) begin
          buf_en     = 1'b1;
          state_next = ST_BM;
        end else begin
          state_next = ST_I;          // pointer dropped
        end
      end

      ST_BM: begin
        memreq_val        = 1'b1;
        memreq_msg.mtype  = MSG_READ;
        memreq_msg.opaque = OPQ_PREFETCH;
        memreq_msg.addr   = {buf_tag, buf_idx, {OFF_W{1'b0}}};
        if (memreq_rdy) begin
          tag_wen     = 1'b1;
          tag_widx    = buf_idx;
          tag_wtag    = buf_tag;
          tag_wvalid  = 1'b1;
          data_wen    = 1'b1;
          data_widx   = buf_idx;
          data_wvalid = 1'b0;
          req_rdy     = 1'b1;
          state_next  = req_val ? ST_TC : ST_I;
        end
      end

      ST_WR, ST_SM: begin
        if (dem_ret) begin
          resp_msg.data = memresp_msg.data;   // prefetchresp_mux: memory
          if (resp_rdy) begin
            resp_val    = 1'b1;
            memresp_rdy = 1'b1;
            if (is_cp && !in_fly) begin
              buf_en          = 1'b1;
              buf_sel_memresp = 1'b1;
              state_next      = ST_BM;
            end else begin
              req_rdy    = 1'b1;
              state_next = req_val ? ST_TC : ST_I;
            end
          end else begin
            state_next = ST_SM;
          end
        end
      end

      default: state_next = ST_I;
    endcase

    // parallel path: a returning prefetch fills the data array
    if (pf_ret) begin
      data_wen    = 1'b1;
      data_widx   = buf_idx;
      data_wdata  = memresp_msg.data;
      data_wvalid = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (reset) state <= ST_I;
    else       state <= state_next;
  end

  always_ff @(posedge clk) begin
    if (buf_en) begin
      buf_tag <= next_addr[ADDR_W-1 -: TAG_W];
      buf_idx <= next_addr[OFF_W +: IDX_W];
    end
  end

  always_ff @(posedge clk) begin
    if (reset)                               in_fly <= 1'b0;
    else if (state == ST_BM && memreq_rdy)   in_fly <= 1'b1;
    else if (pf_ret)                         in_fly <= 1'b0;
  end

  // A demand response can only arrive while the FSM waits for one, and a
  // prefetch response only while one is in flight.
  a_dem_ret_expected: assert property (@(posedge clk) disable iff (reset)
    dem_ret |-> (state == ST_WR || state == ST_SM));
  a_pf_ret_expected: assert property (@(posedge clk) disable iff (reset)
    pf_ret |-> in_fly);
  // The array write port is never claimed twice in one cycle.
  a_no_bm_during_ret: assert property (@(posedge clk) disable iff (reset)
    (state == ST_BM) |-> !pf_ret);

endmodule
