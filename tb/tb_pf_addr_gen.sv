// tb_pf_addr_gen: self-checking test of the next-node address generation.
// For every word offset and both sources it checks that the selected
// 32-bit word is the one at bits [32k+31:32k] of the chosen line, first on
// the line of the published read-cp trace, then on random lines.
module tb_pf_addr_gen;
  import pcp_pkg::*;
  logic [LINE_W-1:0] array_line, memresp_line;
  logic [OFF_W-1:0]  offset;
  logic              sel_memresp;
  logic [WORD_W-1:0] next_addr;
  int checks = 0, failures = 0;

  pf_addr_gen dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [WORD_W-1:0] exp);
    #1;
    checks++;
    if (next_addr !== exp) begin
      failures++;
      $display("FAIL off=%0d sel=%0b got=%h exp=%h", offset, sel_memresp, next_addr, exp);
    end
  endtask

  initial begin
    logic [WORD_W-1:0] w [4];
    array_line   = 128'h0000001c_00000018_00000014_00000010;
    memresp_line = 128'h00000020_00c0ffee_00c0ffef_deadbeef;
    // offset 4 of the array line is the pointer 0x14
    offset = 4'h4; sel_memresp = 0; check(32'h14);
    offset = 4'h0; sel_memresp = 1; check(32'hdeadbeef);
    offset = 4'hc; sel_memresp = 1; check(32'h00000020);
    offset = 4'h8; sel_memresp = 0; check(32'h18);
    for (int n = 0; n < 200; n++) begin
      for (int k = 0; k < 4; k++) w[k] = $urandom;
      array_line   = {w[3], w[2], w[1], w[0]};
      memresp_line = ~array_line;
      offset       = 4'($urandom);
      sel_memresp  = 1'($urandom);
      check(sel_memresp ? ~w[offset[3:2]] : w[offset[3:2]]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
