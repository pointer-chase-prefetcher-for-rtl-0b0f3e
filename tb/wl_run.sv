// wl_run: one run of a small pointer-chasing or streaming kernel on the
// memory system, used by tb_workloads to compare the system with and
// without the prefetcher.
//
// With BASELINE=0 the run drives the data port of pcp_system: data cache,
// prefetcher and pipelined memory, with the chasing load issued as READ_CP.
// With BASELINE=1 it drives the same data cache connected straight to the
// same memory (comb_mem with one port plus mem_pipe), which is the machine
// without a prefetcher, and every load is a plain READ. The instruction
// side is idle in both.
//
// The module stands in for the processor's data side. It issues one
// request at a time, waits for the response and, between two list nodes,
// spends WORK idle cycles for the non-memory instructions of the loop
// body. Kernels:
//   KIND 0, linked-list walk. NODES nodes, each {next, value}, walked REPS
//     times. For each node the walk does a chasing load of next, a load of
//     value, and sums the values. LAYOUT 0 places one node per line, on
//     scattered lines; LAYOUT 1 places two consecutive nodes in one line.
//   KIND 1, vector add c[i] = a[i] + b[i] over NODES words. a, b and c map
//     to the same cache lines, so every access misses and c lines are
//     written back.
//   KIND 2, list insertion. Into the NODES-node list of KIND 0, REPS new
//     nodes are inserted one by one. Each insertion walks from the head to
//     a position that moves around the list, then stores the new node and
//     relinks its predecessor. The whole list is walked once at the end.
//   KIND 3, hash-table lookup. NODES nodes {next, key} in HT_BUCKETS
//     chains, with the chain heads in a table. Each of NODES lookups reads
//     the head from the table and walks the chain until the key matches.
//     The keys are spread so that every chain is searched.
// The memory image is built at time 0 from these formulas. When the kernel
// ends, the run counts value errors (the list sum, or c read back), then
// raises done. cycles covers the kernel only. n_memreq counts the data
// cache's requests to the level below it, and n_pf_hit the loads answered
// from the prefetch buffer.
//
// Interface: clk and reset in. done, cycles, errors, n_memreq and n_pf_hit
// out, valid once done is high.
module wl_run #(
  parameter int unsigned STAGES   = 6,
  parameter bit          BASELINE = 0,
  parameter int unsigned KIND     = 0,
  parameter int unsigned LAYOUT   = 0,
  parameter int unsigned NODES    = 64,
  parameter int unsigned REPS     = 1,
  parameter int unsigned WORK     = 4
) (
  input  logic clk,
  input  logic reset,
  output logic done,
  output int   cycles,
  output int   errors,
  output int   n_memreq,
  output int   n_pf_hit
);
  import pcp_pkg::*;

  localparam int unsigned MEM_LINES = 4096;

  logic       req_val, req_rdy, resp_val, resp_rdy;
  cachereq_t  req_msg;
  cacheresp_t resp_msg;
  logic       pf_hit;
  logic       dc_req_fire;

  // ---- memory image ----------------------------------------------------

  // Line of list node i (LAYOUT 0) or of node pair i/2 (LAYOUT 1): an odd
  // stride modulo 1024 gives distinct lines spread over the first 16 KiB.
  function automatic logic [ADDR_W-1:0] node_addr(int unsigned i);
    if (LAYOUT == 0) return ADDR_W'((((i * 97) + 13) % 1024) * 16);
    else             return ADDR_W'((((i / 2) * 97 + 13) % 1024) * 16 + (i % 2) * 8);
  endfunction

  function automatic logic [WORD_W-1:0] node_value(int unsigned i);
    return WORD_W'(i * 32'h9e37 + 32'h11);
  endfunction

  localparam int unsigned HT_BUCKETS = 8;
  localparam int unsigned HT_CHAIN   = NODES / HT_BUCKETS;
  localparam int unsigned INS_STEP   = 7;
  localparam logic [ADDR_W-1:0] VT = 32'h0000_7000;

  // new nodes of the insertion kernel, on lines of their own
  function automatic logic [ADDR_W-1:0] new_addr(int unsigned j);
    return ADDR_W'(32'h0000_8000 + ((j * 53) % 1024) * 16);
  endfunction

  localparam logic [ADDR_W-1:0] VA = 32'h0000_4000;
  localparam logic [ADDR_W-1:0] VB = 32'h0000_5000;
  localparam logic [ADDR_W-1:0] VC = 32'h0000_6000;

  function automatic logic [WORD_W-1:0] vec_a(int unsigned i);
    return WORD_W'(i * 3 + 7);
  endfunction
  function automatic logic [WORD_W-1:0] vec_b(int unsigned i);
    return WORD_W'(i * 32'h101 + 32'h55);
  endfunction

  task automatic put_word(ref logic [LINE_W-1:0] m [MEM_LINES],
                          input logic [ADDR_W-1:0] a, input logic [WORD_W-1:0] d);
    m[a[OFF_W+11:OFF_W]][a[3:2]*32 +: 32] = d;
  endtask

  task automatic build_image(ref logic [LINE_W-1:0] m [MEM_LINES]);
    for (int unsigned l = 0; l < MEM_LINES; l++) m[l] = '0;
    if (KIND == 0 || KIND == 2) begin
      for (int unsigned i = 0; i < NODES; i++) begin
        put_word(m, node_addr(i), (i + 1 < NODES) ? node_addr(i + 1) : '0);
        put_word(m, node_addr(i) + 4, node_value(i));
      end
    end else if (KIND == 3) begin
      // node n = bucket * HT_CHAIN + position holds key bucket + 8 * position
      for (int unsigned b = 0; b < HT_BUCKETS; b++) begin
        put_word(m, VT + ADDR_W'(b * 4), node_addr(b * HT_CHAIN));
        for (int unsigned q = 0; q < HT_CHAIN; q++) begin
          int unsigned n = b * HT_CHAIN + q;
          put_word(m, node_addr(n), (q + 1 < HT_CHAIN) ? node_addr(n + 1) : '0);
          put_word(m, node_addr(n) + 4, WORD_W'(b + HT_BUCKETS * q));
        end
      end
    end else begin
      for (int unsigned i = 0; i < NODES; i++) begin
        put_word(m, VA + ADDR_W'(i * 4), vec_a(i));
        put_word(m, VB + ADDR_W'(i * 4), vec_b(i));
      end
    end
  endtask

  // ---- system under test ------------------------------------------------

  if (BASELINE) begin : g_base
    logic       [0:0] m_req_val, m_req_rdy, m_resp_val, m_resp_rdy;
    memreq_t    m_req_msg  [1];
    memresp_t   m_resp_msg [1];
    logic       dc_memreq_val, dc_memreq_rdy, dc_memresp_val, dc_memresp_rdy;
    memreq_t    dc_memreq_msg;
    memresp_t   dc_memresp_msg;

    blocking_cache u_dcache (
      .clk, .reset,
      .cachereq_val(req_val), .cachereq_rdy(req_rdy), .cachereq_msg(req_msg),
      .cacheresp_val(resp_val), .cacheresp_rdy(resp_rdy), .cacheresp_msg(resp_msg),
      .memreq_val(dc_memreq_val), .memreq_rdy(dc_memreq_rdy), .memreq_msg(dc_memreq_msg),
      .memresp_val(dc_memresp_val), .memresp_rdy(dc_memresp_rdy), .memresp_msg(dc_memresp_msg)
    );

    assign m_req_val[0]  = dc_memreq_val;
    assign m_req_msg[0]  = dc_memreq_msg;
    assign dc_memreq_rdy = m_req_rdy[0];

    comb_mem #(.NPORTS(1), .MEM_LINES(MEM_LINES)) u_mem (
      .clk,
      .memreq_val(m_req_val), .memreq_rdy(m_req_rdy), .memreq_msg(m_req_msg),
      .memresp_val(m_resp_val), .memresp_rdy(m_resp_rdy), .memresp_msg(m_resp_msg)
    );

    mem_pipe #(.STAGES(STAGES)) u_pipe (
      .clk, .reset,
      .in_val(m_resp_val[0]), .in_rdy(m_resp_rdy[0]), .in_msg(m_resp_msg[0]),
      .out_val(dc_memresp_val), .out_rdy(dc_memresp_rdy), .out_msg(dc_memresp_msg)
    );

    assign pf_hit      = 1'b0;
    assign dc_req_fire = dc_memreq_val && dc_memreq_rdy;
    initial build_image(u_mem.mem);
  end else begin : g_alt
    logic       ireq_rdy, iresp_val;
    cacheresp_t iresp_msg;

    pcp_system #(.MEM_STAGES(STAGES)) u_sys (
      .clk, .reset,
      .imemreq_val(1'b0), .imemreq_rdy(ireq_rdy), .imemreq_msg('0),
      .imemresp_val(iresp_val), .imemresp_rdy(1'b1), .imemresp_msg(iresp_msg),
      .dmemreq_val(req_val), .dmemreq_rdy(req_rdy), .dmemreq_msg(req_msg),
      .dmemresp_val(resp_val), .dmemresp_rdy(resp_rdy), .dmemresp_msg(resp_msg),
      .pf_hit
    );

    assign dc_req_fire = u_sys.dc_memreq_val && u_sys.dc_memreq_rdy;
    initial build_image(u_sys.u_mem.mem);
  end

  // ---- counters -----------------------------------------------------------

  logic counting;
  always_ff @(posedge clk) begin
    if (reset) begin
      cycles <= 0; n_memreq <= 0; n_pf_hit <= 0;
    end else if (counting) begin
      cycles <= cycles + 1;
      if (dc_req_fire) n_memreq <= n_memreq + 1;
      if (pf_hit)      n_pf_hit <= n_pf_hit + 1;
    end
  end

  // ---- processor stand-in -------------------------------------------------

  // Handshakes are sampled at the clock edge into registers and looked at
  // one time step later, so the stimulus never races the design.
  logic       req_fire_q, resp_fire_q;
  cacheresp_t resp_q;
  always @(posedge clk) begin
    req_fire_q  <= req_val && req_rdy;
    resp_fire_q <= resp_val && resp_rdy;
    resp_q      <= resp_msg;
  end

  task automatic access(input msg_type_e t, input logic [ADDR_W-1:0] a,
                        input logic [WORD_W-1:0] d, output logic [WORD_W-1:0] r);
    req_val = 1'b1;
    req_msg = '{mtype: t, opaque: 8'd0, addr: a, len: 2'd0, data: d};
    do begin @(posedge clk); #1; end while (!req_fire_q);
    req_val  = 1'b0;
    resp_rdy = 1'b1;
    do begin @(posedge clk); #1; end while (!resp_fire_q);
    resp_rdy = 1'b0;
    r = resp_q.data;
  endtask

  initial begin
    logic [WORD_W-1:0] r, nxt, sum, exp_sum;
    logic [ADDR_W-1:0] p;
    done = 1'b0; errors = 0; counting = 1'b0;
    req_val = 1'b0; resp_rdy = 1'b0; req_msg = '0;
    do @(posedge clk); while (reset);
    #1 counting = 1'b1;

    if (KIND == 0) begin
      sum = '0; exp_sum = '0;
      for (int unsigned k = 0; k < REPS; k++) begin
        p = node_addr(0);
        for (int unsigned i = 0; i < NODES; i++) begin
          access(BASELINE ? MSG_READ : MSG_READ_CP, p, '0, nxt);
          access(MSG_READ, p + 4, '0, r);
          sum += r;
          exp_sum += node_value(i);
          repeat (WORK) @(posedge clk);
          #1;
          p = nxt;
        end
        if (p != '0) errors++;
      end
      counting = 1'b0;
      if (sum != exp_sum) errors++;
    end else if (KIND == 2) begin
      int unsigned len, pos, cnt;
      sum = '0; exp_sum = '0;
      for (int unsigned i = 0; i < NODES; i++) exp_sum += node_value(i);
      len = NODES;
      for (int unsigned j = 0; j < REPS; j++) begin
        pos = (j * INS_STEP + 3) % len;
        p = node_addr(0);
        for (int unsigned i = 0; i < pos; i++) begin
          access(BASELINE ? MSG_READ : MSG_READ_CP, p, '0, nxt);
          repeat (WORK) @(posedge clk);
          #1;
          p = nxt;
        end
        access(BASELINE ? MSG_READ : MSG_READ_CP, p, '0, nxt);
        access(MSG_WRITE, new_addr(j), nxt, r);
        access(MSG_WRITE, new_addr(j) + 4, node_value(1000 + j), r);
        access(MSG_WRITE, p, new_addr(j), r);
        exp_sum += node_value(1000 + j);
        len++;
      end
      p = node_addr(0); cnt = 0;
      while (p != '0 && cnt <= len) begin
        access(BASELINE ? MSG_READ : MSG_READ_CP, p, '0, nxt);
        access(MSG_READ, p + 4, '0, r);
        sum += r; cnt++;
        repeat (WORK) @(posedge clk);
        #1;
        p = nxt;
      end
      counting = 1'b0;
      if (cnt != len || sum != exp_sum) errors++;
    end else if (KIND == 3) begin
      for (int unsigned i = 0; i < NODES; i++) begin
        logic [WORD_W-1:0] key;
        logic found;
        key = WORD_W'((i * 29 + 5) % NODES);
        access(MSG_READ, VT + ADDR_W'((key % HT_BUCKETS) * 4), '0, p);
        found = 1'b0;
        while (p != '0 && !found) begin
          access(BASELINE ? MSG_READ : MSG_READ_CP, p, '0, nxt);
          access(MSG_READ, p + 4, '0, r);
          repeat (WORK) @(posedge clk);
          #1;
          found = (r == key);
          p = nxt;
        end
        if (!found) errors++;
      end
      counting = 1'b0;
    end else begin
      logic [WORD_W-1:0] a, b;
      for (int unsigned i = 0; i < NODES; i++) begin
        access(MSG_READ, VA + ADDR_W'(i * 4), '0, a);
        access(MSG_READ, VB + ADDR_W'(i * 4), '0, b);
        access(MSG_WRITE, VC + ADDR_W'(i * 4), a + b, r);
        repeat (WORK) @(posedge clk);
        #1;
      end
      counting = 1'b0;
      for (int unsigned i = 0; i < NODES; i++) begin
        access(MSG_READ, VC + ADDR_W'(i * 4), '0, r);
        if (r != vec_a(i) + vec_b(i)) errors++;
      end
    end
    done = 1'b1;
  end
endmodule
