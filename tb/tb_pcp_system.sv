// tb_pcp_system: end-to-end test of the memory system with the
// pointer-chase prefetcher, at the top's default parameters.
//
// The testbench plays the processor. An instruction-fetch thread reads
// consecutive words through the instruction cache while a data thread runs
// linked-data-structure kernels through the data cache:
//   traversal  walk a 64-node singly linked list with lw.cp (read-cp) on
//              the next pointer (first word of the node) and lw on the
//              payload;
//   insertion  walk the list and splice a new node after every 4th node
//              (stores), then walk the longer list again;
//   hashtable  8 bucket lists; lookups walk a bucket with lw.cp, then
//              pairs of buckets are walked side by side;
//   random     reads, read-cps and stores over a small region.
// Every value returned is checked against a word-level reference memory,
// and each list walk must visit the expected number of nodes. Nodes sit on
// distinct 16-byte lines spread over memory, so consecutive nodes miss in
// the 256-byte cache. The test counts, and requires at least once: hits in
// the prefetch buffer, prefetches sent and returned, a demand that waited
// for an in-flight prefetch (DI), a pointer dropped because a prefetch was
// in flight, a store invalidating a prefetched line, a dirty eviction in
// the data cache and instruction-cache refills. It also reports how many
// lw.cp cache misses were served by the prefetcher.
module tb_pcp_system;
  import pcp_pkg::*;

  localparam int MEM_LINES = 4096;   // the top's default memory size

  logic clk = 0, reset;
  always #5 clk = ~clk;

  logic       imemreq_val, imemreq_rdy, imemresp_val, imemresp_rdy;
  cachereq_t  imemreq_msg;
  cacheresp_t imemresp_msg;
  logic       dmemreq_val, dmemreq_rdy, dmemresp_val, dmemresp_rdy;
  cachereq_t  dmemreq_msg;
  cacheresp_t dmemresp_msg;
  logic       pf_hit;

  pcp_system dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cycle); end
  endtask

  // ------------------------------------------------------------ counters
  int n_pf_hit = 0, n_pf_sent = 0, n_pf_ret = 0, n_di = 0, n_drop = 0;
  int n_wr_inval = 0, n_evict = 0, n_irefill = 0, n_cp_to_pf = 0;
  always @(posedge clk) if (!reset) begin
    if (pf_hit) n_pf_hit++;
    if (dut.u_prefetcher.state == dut.u_prefetcher.ST_BM && dut.pf_memreq_rdy) n_pf_sent++;
    if (dut.u_prefetcher.pf_ret) n_pf_ret++;
    if (dut.u_prefetcher.state == dut.u_prefetcher.ST_DI) n_di++;
    if (dut.u_prefetcher.state == dut.u_prefetcher.ST_PN && dut.u_prefetcher.in_fly) n_drop++;
    if (dut.u_prefetcher.state == dut.u_prefetcher.ST_TC && dut.u_prefetcher.is_write
        && dut.u_prefetcher.tag_hit && dut.pf_memreq_rdy) n_wr_inval++;
    if (dut.u_dcache.state == dut.u_dcache.C_EP) n_evict++;
    if (dut.u_icache.state == dut.u_icache.C_RU) n_irefill++;
    if (dut.dc_memreq_val && dut.dc_memreq_rdy && dut.dc_memreq_msg.mtype == MSG_READ_CP) n_cp_to_pf++;
  end

  // ---------------------------------------------------- reference memory
  logic [WORD_W-1:0] ref_mem [MEM_LINES*4];

  function automatic int widx(logic [ADDR_W-1:0] a);
    return int'(a[OFF_W-2 +: $clog2(MEM_LINES*4)]);
  endfunction

  task automatic load_word(input logic [ADDR_W-1:0] a, input logic [WORD_W-1:0] d);
    ref_mem[widx(a)] = d;
    dut.u_mem.mem[widx(a) / 4][(widx(a) % 4) * 32 +: 32] = d;
  endtask

  // --------------------------------------------------------- data port
  logic d_req_acc_q, d_resp_acc_q;
  cacheresp_t d_resp_q;
  always @(posedge clk) begin
    d_req_acc_q  <= dmemreq_val && dmemreq_rdy;
    d_resp_acc_q <= dmemresp_val && dmemresp_rdy;
    d_resp_q     <= dmemresp_msg;
  end

  task automatic dxact(input msg_type_e t, input logic [ADDR_W-1:0] a,
                       input logic [WORD_W-1:0] d, output logic [WORD_W-1:0] r);
    @(negedge clk);
    dmemreq_val = 1;
    dmemreq_msg = '{mtype: t, opaque: 8'h0, addr: a, len: 2'd0, data: d};
    forever begin @(posedge clk); #1; if (d_req_acc_q) break; end
    dmemreq_val = 0;
    dmemresp_rdy = 1;
    forever begin @(posedge clk); #1; if (d_resp_acc_q) break; end
    r = d_resp_q.data;
    check("data response type", d_resp_q.mtype == t);
  endtask

  // lw / lw.cp: check against the reference and return the word
  task automatic load(input msg_type_e t, input logic [ADDR_W-1:0] a,
                      output logic [WORD_W-1:0] r);
    dxact(t, a, '0, r);
    check($sformatf("load @%h", a), r == ref_mem[widx(a)]);
    if (r != ref_mem[widx(a)]) $display("  got %h expected %h", r, ref_mem[widx(a)]);
  endtask

  task automatic store(input logic [ADDR_W-1:0] a, input logic [WORD_W-1:0] d);
    logic [WORD_W-1:0] r;
    dxact(MSG_WRITE, a, d, r);
    ref_mem[widx(a)] = d;
  endtask

  // walk a list from head with lw.cp, touching the payload; returns length
  task automatic walk(input logic [ADDR_W-1:0] head, output int len);
    logic [WORD_W-1:0] p, v, nx;
    len = 0;
    p = head;
    while (p != 0 && len < 1000) begin
      load(MSG_READ_CP, p, nx);          // nx = p->next, a pointer-chase load
      load(MSG_READ, p + 4, v);          // payload
      p = nx;
      len++;
    end
  endtask

  // walk two lists alternately, one node of each per step
  task automatic walk2(input logic [ADDR_W-1:0] ha, input logic [ADDR_W-1:0] hb,
                       output int len);
    logic [WORD_W-1:0] pa, pb, v;
    len = 0;
    pa = ha; pb = hb;
    while ((pa != 0 || pb != 0) && len < 1000) begin
      if (pa != 0) begin load(MSG_READ_CP, pa, v); pa = v; len++; end
      if (pb != 0) begin load(MSG_READ_CP, pb, v); pb = v; len++; end
    end
  endtask

  // ------------------------------------------------------ instruction port
  logic i_req_acc_q, i_resp_acc_q;
  cacheresp_t i_resp_q;
  always @(posedge clk) begin
    i_req_acc_q  <= imemreq_val && imemreq_rdy;
    i_resp_acc_q <= imemresp_val && imemresp_rdy;
    i_resp_q     <= imemresp_msg;
  end
  bit data_done = 0;

  initial begin : ifetch
    logic [ADDR_W-1:0] pc;
    imemreq_val = 0; imemresp_rdy = 0; imemreq_msg = '0;
    @(negedge clk);
    wait (!reset);
    pc = 32'h0;
    while (!data_done) begin
      @(negedge clk);
      imemreq_val = 1;
      imemreq_msg = '{mtype: MSG_READ, opaque: 8'h0, addr: pc, len: 2'd0, data: '0};
      forever begin @(posedge clk); #1; if (i_req_acc_q) break; end
      imemreq_val = 0;
      imemresp_rdy = 1;
      forever begin @(posedge clk); #1; if (i_resp_acc_q) break; end
      check($sformatf("fetch @%h", pc), i_resp_q.data == ref_mem[widx(pc)]);
      // a loop body of 64 words, with a jump every 16 words
      pc = ((pc + 4) % 256 == 0) ? 32'h0 : pc + 4;
      if (pc[5:0] == 6'h0) pc = pc + 32'h100 * ($urandom % 2);
      pc = pc % 32'h400;
    end
  end

  // ------------------------------------------------------------- program
  int node_line [200];
  int used [int];

  function automatic int fresh_line();
    int l;
    do l = 256 + ($urandom % (MEM_LINES - 256)); while (used.exists(l));
    used[l] = 1;
    return l;
  endfunction

  initial begin : data_thread
    int len, n;
    logic [WORD_W-1:0] v, p, nn;
    logic [ADDR_W-1:0] heads [8];
    reset = 1; dmemreq_val = 0; dmemresp_rdy = 0; dmemreq_msg = '0;
    for (int i = 0; i < MEM_LINES * 4; i++) load_word(ADDR_W'(i * 4), $urandom);
    repeat (4) @(negedge clk);
    reset = 0;

    // ---- traversal: 64 nodes on distinct random lines
    for (int i = 0; i < 64; i++) node_line[i] = fresh_line();
    for (int i = 0; i < 64; i++) begin
      load_word(ADDR_W'(node_line[i] * 16), (i < 63) ? ADDR_W'(node_line[i+1] * 16) : 32'h0);
      load_word(ADDR_W'(node_line[i] * 16 + 4), 32'h1000 + i);
    end
    walk(ADDR_W'(node_line[0] * 16), len);
    check("traversal length", len == 64);
    $display("traversal: %0d nodes, %0d prefetch hits", len, n_pf_hit);
    check("prefetcher served most node misses", n_pf_hit >= 48);

    // ---- insertion: a new node after every 4th node, then walk again
    p = ADDR_W'(node_line[0] * 16);
    n = 0;
    while (p != 0) begin
      load(MSG_READ_CP, p, nn);
      if (n % 4 == 0) begin
        logic [ADDR_W-1:0] a;
        a = ADDR_W'(fresh_line() * 16);
        store(a, nn);                    // new->next = p->next
        store(a + 4, 32'h2000 + n);      // new->payload
        store(p, a);                     // p->next = new
        load(MSG_READ_CP, p, v);         // re-read the pointer just stored
      end
      p = nn;
      n++;
    end
    walk(ADDR_W'(node_line[0] * 16), len);
    check("list length after insertion", len == 64 + 16);

    // ---- hashtable: 8 buckets of 6..13 nodes each, lookups per bucket
    for (int b = 0; b < 8; b++) begin
      int cnt;
      logic [ADDR_W-1:0] prev;
      cnt = 6 + b;
      prev = 0;
      for (int k = 0; k < cnt; k++) begin
        logic [ADDR_W-1:0] a;
        a = ADDR_W'(fresh_line() * 16);
        load_word(a, prev);
        load_word(a + 4, 32'h3000 + b * 16 + k);
        prev = a;
      end
      heads[b] = prev;
    end
    for (int r = 0; r < 3; r++)
      for (int b = 0; b < 8; b++) begin
        walk(heads[b], len);
        check("bucket length", len == 6 + b);
      end
    // two buckets searched side by side
    for (int b = 0; b < 8; b += 2) begin
      walk2(heads[b], heads[b+1], len);
      check("paired bucket length", len == 12 + 2 * b + 1);
    end

    // ---- random loads, pointer-chase loads and stores near the start
    for (int k = 0; k < 600; k++) begin
      logic [ADDR_W-1:0] a;
      a = ADDR_W'(32'h2000 + ($urandom % 40) * 16 + ($urandom % 4) * 4);
      case ($urandom % 3)
        0: store(a, 32'h2000 + ($urandom % 40) * 16);
        1: load(MSG_READ, a, v);
        default: load(MSG_READ_CP, a, v);
      endcase
    end

    data_done = 1;
    repeat (20) @(negedge clk);
    $display("pf_hit=%0d pf_sent=%0d pf_ret=%0d di=%0d drop=%0d wr_inval=%0d evict=%0d irefill=%0d cp_to_pf=%0d",
             n_pf_hit, n_pf_sent, n_pf_ret, n_di, n_drop, n_wr_inval, n_evict, n_irefill, n_cp_to_pf);
    check("prefetch hits happened", n_pf_hit > 0);
    check("prefetches sent", n_pf_sent > 0);
    check("prefetches returned", n_pf_ret > 0);
    check("demand waited for in-flight prefetch", n_di > 0);
    check("pointer dropped while prefetch in flight", n_drop > 0);
    check("store invalidated a prefetched line", n_wr_inval > 0);
    check("dirty eviction", n_evict > 0);
    check("instruction refills", n_irefill > 0);
    $display("cycles=%0d", cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
