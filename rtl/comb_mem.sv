// comb_mem: two-port combinational test memory.
//
// Each port is a val/rdy request channel and a val/rdy response channel.
// A request is answered in the same cycle it is presented: resp_val
// follows req_val and req_rdy follows resp_rdy, so the pipeline stages
// placed after this memory (mem_pipe) alone set the latency. Reads (type
// read or read-cp) return the 16-byte line holding addr; writes and init
// transactions store data at the next clock edge, the whole line when len
// is 0, otherwise len bytes starting at the byte offset of addr.
// Responses echo type, opaque and len; a write's response carries zero data.
// Port 0 serves the instruction side, port 1 the data side; if both write
// the same line in one cycle, port 1's data is kept.
//
// The memory holds MEM_LINES lines; address bits above that wrap around.
// Same-cycle response and two ports follow the paper's test memory; the
// size, the partial-write rule and the write-collision rule are this
// design's choices. Contents are not reset; a testbench loads them
// through the array 'mem'.
module comb_mem
  import pcp_pkg::*;
#(
  parameter int unsigned NPORTS    = 2,
  parameter int unsigned MEM_LINES = 4096,
  localparam int unsigned LIDX_W   = (MEM_LINES > 1) ? $clog2(MEM_LINES) : 1
) (
  input  logic     clk,
  input  logic     [NPORTS-1:0] memreq_val,
  output logic     [NPORTS-1:0] memreq_rdy,
  input  memreq_t  memreq_msg  [NPORTS],
  output logic     [NPORTS-1:0] memresp_val,
  input  logic     [NPORTS-1:0] memresp_rdy,
  output memresp_t memresp_msg [NPORTS]
);

  logic [LINE_W-1:0] mem [MEM_LINES];

  function automatic logic [LIDX_W-1:0] line_of(logic [ADDR_W-1:0] a);
    return a[OFF_W +: LIDX_W];
  endfunction

  function automatic logic is_wr(msg_type_e t);
    return (t == MSG_WRITE) || (t == MSG_INIT);
  endfunction

  // byte-write mask of a request inside its line
  function automatic logic [LINE_W/8-1:0] byte_mask(logic [OFF_W-1:0] off,
                                                    logic [3:0] len);
    logic [LINE_W/8-1:0] m;
    m = '0;
    for (int b = 0; b < LINE_W/8; b++) begin
      if (len == 4'd0) m[b] = 1'b1;
      else if (b >= int'(off) && b < int'(off) + int'(len)) m[b] = 1'b1;
    end
    return m;
  endfunction

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      memreq_rdy[p]         = memresp_rdy[p];
      memresp_val[p]        = memreq_val[p];
      memresp_msg[p].mtype  = memreq_msg[p].mtype;
      memresp_msg[p].opaque = memreq_msg[p].opaque;
      memresp_msg[p].len    = memreq_msg[p].len;
      memresp_msg[p].data   = is_wr(memreq_msg[p].mtype) ? '0
                              : mem[line_of(memreq_msg[p].addr)];
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORTS; p++) begin
      if (memreq_val[p] && memreq_rdy[p] && is_wr(memreq_msg[p].mtype)) begin
        // a partial write keeps the data's byte lanes aligned to the offset
        // of the line, as the sender places them
        for (int b = 0; b < LINE_W/8; b++) begin
          if (byte_mask(memreq_msg[p].addr[OFF_W-1:0], memreq_msg[p].len)[b])
            mem[line_of(memreq_msg[p].addr)][b*8 +: 8] <= memreq_msg[p].data[b*8 +: 8];
        end
      end
    end
  end

endmodule
