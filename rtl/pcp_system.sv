// pcp_system: processor-side memory system with the pointer-chase
// prefetcher -- instruction cache, data cache, prefetcher and a two-port
// pipelined memory.
//
//   imemreq/imemresp --> icache --------------------------> mem port 0
//   dmemreq/dmemresp --> dcache --> prefetcher -----------> mem port 1
//                                                 (comb_mem + mem_pipe)
//
// The processor itself is not part of this RTL: its instruction and data
// ports are the ports of this module (32-bit cachereq/cacheresp messages,
// val/rdy). A data access of type read-cp (lw.cp) that misses in the data
// cache reaches the prefetcher with its full address; the prefetcher
// returns the line and fetches the line of the node the loaded word points
// to, so that the next lw.cp along a linked list misses in the cache but
// hits in the prefetcher. Each memory port has an inelastic response
// pipeline of MEM_STAGES cycles.
//
// pf_hit pulses for one cycle when the prefetcher answers the data cache
// from its buffer; it is an observation output.
//
// The placement of the prefetcher between data cache and memory, the two
// direct-mapped 256-byte caches and the pipelined two-port memory follow
// the paper. Its block diagram draws the prefetcher across both cache-
// memory channels; here only the data side has one, since only data
// accesses can be read-cp requests (this design's choice).
module pcp_system
  import pcp_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 256,
  parameter int unsigned PF_ENTRIES  = 4,
  parameter int unsigned MEM_LINES   = 4096,
  parameter int unsigned MEM_STAGES  = 6
) (
  input  logic       clk,
  input  logic       reset,

  input  logic       imemreq_val,
  output logic       imemreq_rdy,
  input  cachereq_t  imemreq_msg,
  output logic       imemresp_val,
  input  logic       imemresp_rdy,
  output cacheresp_t imemresp_msg,

  input  logic       dmemreq_val,
  output logic       dmemreq_rdy,
  input  cachereq_t  dmemreq_msg,
  output logic       dmemresp_val,
  input  logic       dmemresp_rdy,
  output cacheresp_t dmemresp_msg,

  output logic       pf_hit
);

  // icache <-> memory port 0
  logic     ic_memreq_val, ic_memreq_rdy, ic_memresp_val, ic_memresp_rdy;
  memreq_t  ic_memreq_msg;
  memresp_t ic_memresp_msg;

  // dcache <-> prefetcher
  logic     dc_memreq_val, dc_memreq_rdy, dc_memresp_val, dc_memresp_rdy;
  memreq_t  dc_memreq_msg;
  memresp_t dc_memresp_msg;
  logic     pf_resp_hit;

  // prefetcher <-> memory port 1
  logic     pf_memreq_val, pf_memreq_rdy, pf_memresp_val, pf_memresp_rdy;
  memreq_t  pf_memreq_msg;
  memresp_t pf_memresp_msg;

  // memory <-> pipeline stages
  logic     [1:0] m_req_val, m_req_rdy, m_resp_val, m_resp_rdy;
  memreq_t  m_req_msg  [2];
  memresp_t m_resp_msg [2];

  blocking_cache #(.CACHE_BYTES(CACHE_BYTES)) u_icache (
    .clk, .reset,
    .cachereq_val (imemreq_val),  .cachereq_rdy (imemreq_rdy),  .cachereq_msg (imemreq_msg),
    .cacheresp_val(imemresp_val), .cacheresp_rdy(imemresp_rdy), .cacheresp_msg(imemresp_msg),
    .memreq_val   (ic_memreq_val),  .memreq_rdy (ic_memreq_rdy),  .memreq_msg (ic_memreq_msg),
    .memresp_val  (ic_memresp_val), .memresp_rdy(ic_memresp_rdy), .memresp_msg(ic_memresp_msg)
  );

  blocking_cache #(.CACHE_BYTES(CACHE_BYTES)) u_dcache (
    .clk, .reset,
    .cachereq_val (dmemreq_val),  .cachereq_rdy (dmemreq_rdy),  .cachereq_msg (dmemreq_msg),
    .cacheresp_val(dmemresp_val), .cacheresp_rdy(dmemresp_rdy), .cacheresp_msg(dmemresp_msg),
    .memreq_val   (dc_memreq_val),  .memreq_rdy (dc_memreq_rdy),  .memreq_msg (dc_memreq_msg),
    .memresp_val  (dc_memresp_val), .memresp_rdy(dc_memresp_rdy), .memresp_msg(dc_memresp_msg)
  );

  prefetcher #(.ENTRIES(PF_ENTRIES)) u_prefetcher (
    .clk, .reset,
    .req_val    (dc_memreq_val),  .req_rdy  (dc_memreq_rdy),  .req_msg  (dc_memreq_msg),
    .resp_val   (dc_memresp_val), .resp_rdy (dc_memresp_rdy), .resp_msg (dc_memresp_msg),
    .resp_hit   (pf_resp_hit),
    .memreq_val (pf_memreq_val),  .memreq_rdy (pf_memreq_rdy),  .memreq_msg (pf_memreq_msg),
    .memresp_val(pf_memresp_val), .memresp_rdy(pf_memresp_rdy), .memresp_msg(pf_memresp_msg)
  );

  assign pf_hit = dc_memresp_val && dc_memresp_rdy && pf_resp_hit;

  assign m_req_val[0]  = ic_memreq_val;
  assign m_req_msg[0]  = ic_memreq_msg;
  assign ic_memreq_rdy = m_req_rdy[0];
  assign m_req_val[1]  = pf_memreq_val;
  assign m_req_msg[1]  = pf_memreq_msg;
  assign pf_memreq_rdy = m_req_rdy[1];

  comb_mem #(.NPORTS(2), .MEM_LINES(MEM_LINES)) u_mem (
    .clk,
    .memreq_val (m_req_val),  .memreq_rdy (m_req_rdy),  .memreq_msg (m_req_msg),
    .memresp_val(m_resp_val), .memresp_rdy(m_resp_rdy), .memresp_msg(m_resp_msg)
  );

  mem_pipe #(.STAGES(MEM_STAGES)) u_pipe0 (
    .clk, .reset,
    .in_val (m_resp_val[0]), .in_rdy (m_resp_rdy[0]), .in_msg (m_resp_msg[0]),
    .out_val(ic_memresp_val), .out_rdy(ic_memresp_rdy), .out_msg(ic_memresp_msg)
  );

  mem_pipe #(.STAGES(MEM_STAGES)) u_pipe1 (
    .clk, .reset,
    .in_val (m_resp_val[1]), .in_rdy (m_resp_rdy[1]), .in_msg (m_resp_msg[1]),
    .out_val(pf_memresp_val), .out_rdy(pf_memresp_rdy), .out_msg(pf_memresp_msg)
  );

endmodule
