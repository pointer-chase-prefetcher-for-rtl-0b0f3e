// tb_blocking_cache: self-checking test of the direct-mapped write-back
// cache.
//
// The cache's memory side goes to a one-port comb_mem behind a mem_pipe.
// The test checks: init transactions followed by read hits (no memory
// traffic, three-cycle hit latency), a read-cp miss whose refill request
// keeps type read-cp and the full word address, write-allocate on a write
// miss, write-back of a dirty victim on a conflict miss (the memory line is
// checked directly), and a random mix of reads, read-cps and writes with
// conflicting addresses and sink back-pressure against a word-level
// reference memory. The evict and refill paths must each be exercised.
module tb_blocking_cache;
  import pcp_pkg::*;

  localparam int STAGES    = 3;
  localparam int MEM_LINES = 256;

  logic clk = 0, reset;
  always #5 clk = ~clk;

  logic       creq_val, creq_rdy, cresp_val, cresp_rdy;
  cachereq_t  creq_msg;
  cacheresp_t cresp_msg;
  logic       memreq_val, memreq_rdy, memresp_val, memresp_rdy;
  memreq_t    memreq_msg;
  memresp_t   memresp_msg;
  logic       [0:0] m_req_val, m_req_rdy, m_resp_val, m_resp_rdy;
  memreq_t    m_req_msg [1];
  memresp_t   m_resp_msg [1];

  blocking_cache dut (
    .clk, .reset,
    .cachereq_val(creq_val), .cachereq_rdy(creq_rdy), .cachereq_msg(creq_msg),
    .cacheresp_val(cresp_val), .cacheresp_rdy(cresp_rdy), .cacheresp_msg(cresp_msg),
    .memreq_val, .memreq_rdy, .memreq_msg,
    .memresp_val, .memresp_rdy, .memresp_msg
  );

  assign m_req_val[0] = memreq_val;
  assign m_req_msg[0] = memreq_msg;
  assign memreq_rdy   = m_req_rdy[0];

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
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // observation
  int n_evict = 0, n_refill = 0, n_memreq = 0;
  memreq_t last_refill;
  always @(posedge clk) if (!reset) begin
    if (memreq_val && memreq_rdy) begin
      n_memreq++;
      if (memreq_msg.mtype == MSG_WRITE) n_evict++;
      else begin n_refill++; last_refill = memreq_msg; end
    end
  end

  logic [WORD_W-1:0] ref_mem [MEM_LINES*4];

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cycle); end
  endtask

  logic req_acc_q, resp_acc_q;
  cacheresp_t resp_q;
  always @(posedge clk) begin
    req_acc_q  <= creq_val && creq_rdy;
    resp_acc_q <= cresp_val && cresp_rdy;
    resp_q     <= cresp_msg;
  end

  int sink_delay_max = 0;

  task automatic xact(input msg_type_e t, input logic [ADDR_W-1:0] a,
                      input logic [WORD_W-1:0] d, output cacheresp_t r, output int lat);
    int t0;
    @(negedge clk);
    creq_val = 1;
    creq_msg = '{mtype: t, opaque: 8'($urandom), addr: a, len: 2'd0, data: d};
    forever begin @(posedge clk); #1; if (req_acc_q) break; end
    t0 = cycle - 1;
    creq_val = 0;
    forever begin
      if (sink_delay_max > 0) begin
        cresp_rdy = 0;
        repeat ($urandom % (sink_delay_max + 1)) @(negedge clk);
      end
      @(negedge clk);
      cresp_rdy = 1;
      @(posedge clk); #1;
      if (resp_acc_q) break;
    end
    r = resp_q; lat = cycle - 1 - t0;
    check("opaque/type echo", r.opaque == creq_msg.opaque && r.mtype == t);
    @(negedge clk);
    cresp_rdy = 0;
  endtask

  task automatic rd(input msg_type_e t, input logic [ADDR_W-1:0] a, input int exp_lat);
    cacheresp_t r; int lat;
    xact(t, a, '0, r, lat);
    check($sformatf("read data @%h", a), r.data == ref_mem[a[OFF_W+7:2]]);
    if (exp_lat >= 0) begin
      check($sformatf("hit latency @%h (%0d)", a, lat), lat == exp_lat);
    end
  endtask

  task automatic wr(input msg_type_e t, input logic [ADDR_W-1:0] a, input logic [WORD_W-1:0] d);
    cacheresp_t r; int lat;
    xact(t, a, d, r, lat);
    ref_mem[a[OFF_W+7:2]] = d;
  endtask

  initial begin
    int m0;
    reset = 1; creq_val = 0; cresp_rdy = 0; creq_msg = '0;
    for (int i = 0; i < MEM_LINES; i++) begin
      logic [LINE_W-1:0] l;
      l = {$urandom, $urandom, $urandom, $urandom};
      u_mem.mem[i] = l;
      for (int k = 0; k < 4; k++) ref_mem[i*4+k] = l[k*32 +: 32];
    end
    repeat (3) @(negedge clk);
    reset = 0;

    // init a whole line (memory gets the same words), then read hits
    for (int k = 0; k < 4; k++) begin
      wr(MSG_INIT, ADDR_W'(32'h40 + k*4), 32'h1000 + k);
      u_mem.mem[4][k*32 +: 32] = 32'h1000 + k;
    end
    m0 = n_memreq;
    for (int k = 0; k < 4; k++) rd(MSG_READ, ADDR_W'(32'h40 + k*4), 3);
    check("init + hits need no memory", n_memreq == m0);

    // read-cp miss: refill request keeps read-cp type and full address
    rd(MSG_READ_CP, 32'h000000a8, -1);
    check("refill is read-cp", last_refill.mtype == MSG_READ_CP);
    check("refill carries offset", last_refill.addr == 32'h000000a8);
    rd(MSG_READ, 32'h000000ac, 3);

    // write miss allocates; line becomes dirty; conflict miss writes back
    wr(MSG_WRITE, 32'h00000124, 32'hcafef00d);
    rd(MSG_READ, 32'h00000124, 3);
    m0 = n_evict;
    rd(MSG_READ, 32'h00000224, -1);          // same index 2, other tag
    check("dirty victim written back", n_evict == m0 + 1);
    check("memory holds written word", u_mem.mem[32'h124 >> 4][32 +: 32] == 32'hcafef00d);
    rd(MSG_READ, 32'h00000124, -1);

    // random mix over 64 lines (4 tags per index)
    sink_delay_max = 2;
    for (int n = 0; n < 1500; n++) begin
      logic [ADDR_W-1:0] a;
      int k;
      a = ADDR_W'(($urandom % 64) * 16 + ($urandom % 4) * 4);
      k = $urandom % 3;
      if (k == 0) wr(MSG_WRITE, a, $urandom);
      else rd((k == 1) ? MSG_READ : MSG_READ_CP, a, -1);
    end

    check("evictions seen", n_evict > 10);
    check("refills seen", n_refill > 10);
    $display("evict=%0d refill=%0d", n_evict, n_refill);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
