// tb_comb_mem: self-checking test of the two-port combinational memory.
// Checks that a response appears in the same cycle as its request and that
// rdy follows the response side, full-line and partial (len bytes at an
// offset) writes, read-cp reads, echo of type/opaque/len, and random
// traffic on both ports against a byte-level reference model.
module tb_comb_mem;
  import pcp_pkg::*;
  localparam int MEM_LINES = 64;

  logic clk = 0;
  always #5 clk = ~clk;

  logic     [1:0] req_val, req_rdy, resp_val, resp_rdy;
  memreq_t  req_msg  [2];
  memresp_t resp_msg [2];
  int checks = 0, failures = 0;

  comb_mem #(.NPORTS(2), .MEM_LINES(MEM_LINES)) dut (
    .clk, .memreq_val(req_val), .memreq_rdy(req_rdy), .memreq_msg(req_msg),
    .memresp_val(resp_val), .memresp_rdy(resp_rdy), .memresp_msg(resp_msg)
  );

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [LINE_W-1:0] ref_mem [MEM_LINES];

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [LINE_W-1:0] apply(logic [LINE_W-1:0] old, memreq_t m);
    logic [LINE_W-1:0] n;
    n = old;
    for (int b = 0; b < 16; b++)
      if (m.len == 0 || (b >= int'(m.addr[3:0]) && b < int'(m.addr[3:0]) + int'(m.len)))
        n[b*8 +: 8] = m.data[b*8 +: 8];
    return n;
  endfunction

  initial begin
    req_val = '0; resp_rdy = '1;
    for (int p = 0; p < 2; p++) req_msg[p] = '0;
    for (int i = 0; i < MEM_LINES; i++) begin
      ref_mem[i] = {$urandom, $urandom, $urandom, $urandom};
      dut.mem[i] = ref_mem[i];
    end
    // a response has no latency; rdy follows the response side
    @(negedge clk);
    req_val[0] = 1; req_msg[0] = '{mtype: MSG_READ_CP, opaque: 8'h5a, addr: 32'h1234, len: 4'd0, data: '0};
    resp_rdy[0] = 0;
    #1;
    check("same-cycle response", resp_val[0] == 1'b1);
    check("rdy follows resp_rdy", req_rdy[0] == 1'b0);
    check("read-cp data", resp_msg[0].data == ref_mem[(32'h1234 >> 4) % MEM_LINES]);
    check("echo", resp_msg[0].opaque == 8'h5a && resp_msg[0].mtype == MSG_READ_CP);
    resp_rdy[0] = 1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        req_val[p] = 1'($urandom);
        req_msg[p].mtype  = msg_type_e'($urandom % 4);
        req_msg[p].opaque = 8'($urandom);
        req_msg[p].addr   = 32'($urandom % (MEM_LINES * 16));
        req_msg[p].len    = ($urandom % 2) ? 4'd0 : 4'($urandom);
        req_msg[p].data   = {$urandom, $urandom, $urandom, $urandom};
      end
      // keep the two ports off the same line when both write
      if (req_msg[1].addr[9:4] == req_msg[0].addr[9:4]) req_msg[1].addr[4] = ~req_msg[0].addr[4];
      #1;
      for (int p = 0; p < 2; p++) if (req_val[p]) begin
        logic wr;
        wr = (req_msg[p].mtype == MSG_WRITE || req_msg[p].mtype == MSG_INIT);
        check("val", resp_val[p]);
        check("len echo", resp_msg[p].len == req_msg[p].len);
        if (!wr) check($sformatf("read data p%0d", p), resp_msg[p].data == ref_mem[req_msg[p].addr[9:4]]);
      end
      @(posedge clk);
      for (int p = 0; p < 2; p++)
        if (req_val[p] && (req_msg[p].mtype == MSG_WRITE || req_msg[p].mtype == MSG_INIT))
          ref_mem[req_msg[p].addr[9:4]] = apply(ref_mem[req_msg[p].addr[9:4]], req_msg[p]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
