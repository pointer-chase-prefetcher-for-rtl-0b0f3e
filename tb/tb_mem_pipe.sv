// tb_mem_pipe: self-checking test of the inelastic memory pipeline.
// A source offers numbered messages with random gaps and a sink takes them
// with random back-pressure. Checks: messages leave in order and none is
// lost or duplicated; with the sink always ready each message leaves
// exactly STAGES cycles after it entered; and while the last stage is
// stalled in_rdy is low.
module tb_mem_pipe;
  import pcp_pkg::*;
  localparam int STAGES = 6;

  logic clk = 0, reset;
  always #5 clk = ~clk;
  logic in_val, in_rdy, out_val, out_rdy;
  memresp_t in_msg, out_msg;
  int checks = 0, failures = 0;

  mem_pipe #(.STAGES(STAGES)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cycle = 0;
  int sent = 0, recv = 0;
  int t_in [int];
  bit backpressure = 0;
  bit acc = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!reset) begin
      acc = in_val && in_rdy;
      if (in_val && in_rdy) begin
        t_in[sent] = cycle;
        sent++;
      end
      if (out_val && out_rdy) begin
        checks++;
        if (out_msg.data != LINE_W'(recv)) begin
          failures++; $display("FAIL order: got %0d expected %0d", out_msg.data, recv);
        end
        if (!backpressure) begin
          checks++;
          if (cycle - t_in[recv] != STAGES) begin
            failures++; $display("FAIL latency %0d", cycle - t_in[recv]);
          end
        end
        recv++;
      end
      if (out_val && !out_rdy) begin
        checks++;
        if (in_rdy) begin failures++; $display("FAIL in_rdy high while stalled"); end
      end
    end
  end

  initial begin
    reset = 1; in_val = 0; out_rdy = 1; in_msg = '0;
    repeat (3) @(negedge clk);
    reset = 0;
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk);
      if (n == 500) backpressure = 1;
      if (!in_val || acc) begin
        in_val = 1'($urandom % 3 != 0);
        in_msg = '0;
        in_msg.data = LINE_W'(sent);
      end
      out_rdy = backpressure ? 1'($urandom % 2) : 1'b1;
    end
    @(negedge clk); in_val = 0; out_rdy = 1;
    repeat (STAGES + 2) @(negedge clk);
    checks++;
    if (sent != recv || sent < 500) begin failures++; $display("FAIL sent %0d recv %0d", sent, recv); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
