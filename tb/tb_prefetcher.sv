// tb_prefetcher: self-checking test of the pointer-chase prefetcher.
//
// Harness: a test source and a test sink drive the cache-side channels of
// the prefetcher; its memory side is a one-port comb_mem followed by a
// mem_pipe of STAGES cycles. Memory contents are written directly.
//
// Directed tests mirror the six basic paths (read hit, read-cp hit, read
// miss, read-cp miss, write hit, write miss) and check data, the hit flag,
// the opaque value of the prefetch request and the cycle counts: a hit is
// answered one cycle after the request is taken, a miss 1+STAGES cycles
// after. Then: a read to a line whose prefetch is still in flight (data
// invalid wait), a long linked-list traversal with lw.cp requests in which
// every node after the first must hit, and a random mix of reads, read-cps
// and writes with random sink back-pressure, checked against a reference
// memory. Counters make sure each mechanism (DI wait, stall-memory, dropped
// pointer, prefetch launched, prefetch return) happened at least once.
module tb_prefetcher;
  import pcp_pkg::*;

  localparam int STAGES    = 6;
  localparam int MEM_LINES = 256;

  logic clk = 0, reset;
  always #5 clk = ~clk;

  logic     req_val, req_rdy, resp_val, resp_rdy, resp_hit;
  memreq_t  req_msg;
  memresp_t resp_msg;
  logic     memreq_val, memreq_rdy, memresp_val, memresp_rdy;
  memreq_t  memreq_msg;
  memresp_t memresp_msg;
  logic     [0:0] m_req_val, m_req_rdy, m_resp_val, m_resp_rdy;
  memreq_t  m_req_msg [1];
  memresp_t m_resp_msg [1];

  prefetcher dut (
    .clk, .reset,
    .req_val, .req_rdy, .req_msg,
    .resp_val, .resp_rdy, .resp_msg, .resp_hit,
    .memreq_val, .memreq_rdy, .memreq_msg,
    .memresp_val, .memresp_rdy, .memresp_msg
  );

  assign m_req_val[0]  = memreq_val;
  assign m_req_msg[0]  = memreq_msg;
  assign memreq_rdy    = m_req_rdy[0];

  comb_mem #(.NPORTS(1), .MEM_LINES(MEM_LINES)) u_mem (
    .clk,
    .memreq_val(m_req_val), .memreq_rdy(m_req_rdy), .memreq_msg(m_req_msg),
    .memresp_val(m_resp_val), .memresp_rdy(m_resp_rdy), .memresp_msg(m_resp_msg)
  );

  mem_pipe #(.STAGES(STAGES)) u_pipe (
    .clk, .reset,
    .in_val(m_resp_val[0]), .in_rdy(m_resp_rdy[0]), .in_msg(m_resp_msg[0]),
    .out_val(memresp_val), .out_rdy(memresp_rdy), .out_msg(memresp_msg)
  );

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------- observation
  int n_di = 0, n_sm = 0, n_drop = 0, n_pf_sent = 0, n_pf_ret = 0;
  logic [ADDR_W-1:0] last_pf_addr;
  logic [OPQ_W-1:0]  last_pf_opq;
  always @(posedge clk) if (!reset) begin
    if (dut.state == dut.ST_DI) n_di++;
    if (dut.state == dut.ST_SM) n_sm++;
    if (dut.state == dut.ST_PN && dut.in_fly) n_drop++;
    if (dut.state == dut.ST_BM && memreq_val && memreq_rdy) begin
      n_pf_sent++;
      last_pf_addr = memreq_msg.addr;
      last_pf_opq  = memreq_msg.opaque;
    end
    if (memresp_val && memresp_rdy && memresp_msg.opaque == OPQ_PREFETCH) n_pf_ret++;
  end

  // ------------------------------------------------------ reference memory
  logic [LINE_W-1:0] ref_mem [MEM_LINES];

  function automatic int lidx(logic [ADDR_W-1:0] a);
    return int'(a[OFF_W +: $clog2(MEM_LINES)]);
  endfunction

  task automatic mem_load(input logic [ADDR_W-1:0] a, input logic [LINE_W-1:0] d);
    u_mem.mem[lidx(a)] = d;
    ref_mem[lidx(a)]   = d;
  endtask

  function automatic logic [LINE_W-1:0] rline();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  // ------------------------------------------------------ source and sink
  int sink_delay_max = 0;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (cycle %0d)", what, cycle);
    end
  endtask

  // Sends one request and waits for its response; returns the response
  // and the number of cycles from acceptance to response.
  task automatic xact(input msg_type_e t, input logic [ADDR_W-1:0] a,
                      input logic [LINE_W-1:0] d, input logic [OPQ_W-1:0] opq,
                      output memresp_t r, output logic h, output int lat);
    int t0;
    @(negedge clk);
    req_val = 1;
    req_msg = '{mtype: t, opaque: opq, addr: a, len: 4'd0, data: d};
    forever begin
      @(posedge clk); #1;
      if (req_rdy_q) break;
    end
    t0 = cycle - 1;
    req_val = 0;
    forever begin
      if (sink_delay_max > 0) begin
        resp_rdy = 0;
        repeat ($urandom % (sink_delay_max + 1)) @(negedge clk);
      end
      @(negedge clk);
      resp_rdy = 1;
      @(posedge clk); #1;
      if (resp_val_q) break;
    end
    r = resp_q; h = hit_q; lat = cycle - 1 - t0;
    @(negedge clk);
    resp_rdy = 0;
  endtask

  // Signals sampled at the clock edge, before any update.
  logic req_rdy_q, resp_val_q, hit_q;
  memresp_t resp_q;
  always @(posedge clk) begin
    req_rdy_q  <= req_val && req_rdy;
    resp_val_q <= resp_val && resp_rdy;
    hit_q      <= resp_hit;
    resp_q     <= resp_msg;
  end
  // The xact task reads the *_q copies one step after the edge, so they
  // describe the cycle that just ended.

  task automatic do_read(input msg_type_e t, input logic [ADDR_W-1:0] a,
                         input logic exp_hit, input logic chk_hit,
                         input int exp_lat, input string name);
    memresp_t r; logic h; int lat; logic [OPQ_W-1:0] opq;
    opq = OPQ_W'($urandom);
    xact(t, a, '0, opq, r, h, lat);
    check({name, " data"}, r.data == ref_mem[lidx(a)]);
    check({name, " type/opaque"}, r.mtype == t && r.opaque == opq);
    if (chk_hit) check({name, " hit flag"}, h == exp_hit);
    if (exp_lat >= 0) begin
      check({name, " latency"}, lat == exp_lat);
      if (lat != exp_lat) $display("  latency %0d expected %0d", lat, exp_lat);
    end
  endtask

  task automatic do_write(input logic [ADDR_W-1:0] a, input logic [LINE_W-1:0] d,
                          input string name);
    memresp_t r; logic h; int lat;
    xact(MSG_WRITE, a, d, 8'h02, r, h, lat);
    ref_mem[lidx(a)] = d;
    check({name, " write resp"}, r.mtype == MSG_WRITE && h == 1'b0);
  endtask

  task automatic do_init(input logic [ADDR_W-1:0] a, input logic [LINE_W-1:0] d);
    memresp_t r; logic h; int lat;
    xact(MSG_INIT, a, d, 8'h02, r, h, lat);
    mem_load(a, d);   // the prefetcher and memory agree after an init
    check("init resp", r.mtype == MSG_INIT);
  endtask

  task automatic wait_idle();
    repeat (STAGES + 4) @(negedge clk);
  endtask

  // ---------------------------------------------------------------- tests
  initial begin
    logic [ADDR_W-1:0] nodes [32];
    reset = 1; req_val = 0; resp_rdy = 0; req_msg = '0;
    for (int i = 0; i < MEM_LINES; i++) mem_load(ADDR_W'(i * 16), rline());
    repeat (3) @(negedge clk);
    reset = 0;

    // read hit: init line 0 (addr 8), read addr 4 -> one-cycle hit
    do_init(32'h8, {4{32'habababab}});
    do_read(MSG_READ, 32'h4, 1'b1, 1'b1, 1, "read hit");

    // read miss: addr 0x34 -> memory, 1+STAGES cycles
    do_read(MSG_READ, 32'h34, 1'b0, 1'b1, 1 + STAGES, "read miss");
    do_read(MSG_READ, 32'h34, 1'b0, 1'b1, 1 + STAGES, "read miss no fill");

    // read-cp hit: line 0 holds pointers 0x10..0x1c; cp to addr 4 finds 0x14,
    // so line 0x10 is prefetched with opaque 1; a read of 0x18 then waits in
    // DI for it and hits.
    mem_load(32'h10, 128'h00000020_00c0ffee_00c0ffef_deadbeef);
    do_init(32'h0, 128'h0000001c_00000018_00000014_00000010);
    do_read(MSG_READ_CP, 32'h4, 1'b1, 1'b1, 1, "cp hit");
    do_read(MSG_READ, 32'h18, 1'b1, 1'b1, -1, "read of prefetched line");
    check("prefetch addr/opaque", last_pf_addr == 32'h10 && last_pf_opq == OPQ_PREFETCH);
    check("DI wait seen", n_di > 0);

    // read-cp miss: line 0x100 word 2 points to 0x208 -> line 0x200 prefetched
    mem_load(32'h100, {32'h0, 32'h208, 32'h0, 32'h0});
    do_read(MSG_READ_CP, 32'h108, 1'b0, 1'b1, 1 + STAGES, "cp miss");
    wait_idle();
    check("cp miss prefetch addr", last_pf_addr == 32'h200);
    do_read(MSG_READ, 32'h20c, 1'b1, 1'b1, 1, "read of cp-miss prefetch");

    // write hit: the line of 0x200 is in the prefetcher; a write invalidates
    // it, the next read misses and sees the new data
    do_write(32'h200, {4{32'hefefefef}}, "write hit");
    do_read(MSG_READ, 32'h204, 1'b0, 1'b1, 1 + STAGES, "read after write hit");

    // write miss
    do_write(32'h0c0, {4{32'h12345678}}, "write miss");
    do_read(MSG_READ, 32'h0c4, 1'b0, 1'b1, 1 + STAGES, "read after write miss");

    // linked-list traversal with lw.cp: nodes on distinct lines, the next
    // pointer is the first word of each node
    for (int i = 0; i < 32; i++) nodes[i] = ADDR_W'((16 + i * 7) % MEM_LINES * 16);
    for (int i = 0; i < 32; i++)
      mem_load(nodes[i], {$urandom, $urandom, $urandom, (i < 31) ? nodes[i+1] : 32'h0});
    for (int i = 0; i < 32; i++)
      do_read(MSG_READ_CP, nodes[i], (i != 0), 1'b1, -1, $sformatf("traverse %0d", i));

    // dropped pointer: two cp hits back to back while the first prefetch is
    // in flight -- the second pointer is dropped
    do_init(32'h340, {96'h0, 32'h400});
    do_init(32'h370, {96'h0, 32'h480});
    do_read(MSG_READ_CP, 32'h340, 1'b1, 1'b1, 1, "cp hit A");
    do_read(MSG_READ_CP, 32'h370, 1'b1, 1'b1, 1, "cp hit B (pointer dropped)");
    wait_idle();
    check("pointer dropped", n_drop > 0);

    // random mix with sink back-pressure
    sink_delay_max = 3;
    for (int n = 0; n < 400; n++) begin
      int k;
      logic [ADDR_W-1:0] a;
      a = ADDR_W'(($urandom % 24) * 16 + ($urandom % 4) * 4);
      k = $urandom % 10;
      if (k < 2) begin
        logic [LINE_W-1:0] d;
        // keep pointers inside the small random region
        d = {$urandom, $urandom, $urandom, 32'(($urandom % 24) * 16)};
        do_write(a, d, "random write");
      end else if (k < 6) begin
        do_read(MSG_READ_CP, a, 1'b0, 1'b0, -1, "random cp");
      end else begin
        do_read(MSG_READ, a, 1'b0, 1'b0, -1, "random read");
      end
    end

    check("stall-memory state seen", n_sm > 0);
    check("prefetches sent", n_pf_sent > 0);
    check("prefetches returned", n_pf_ret > 0);
    $display("mechanisms: di=%0d sm=%0d drop=%0d pf_sent=%0d pf_ret=%0d",
             n_di, n_sm, n_drop, n_pf_sent, n_pf_ret);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
