// tb_pf_tag_array: self-checking test of the prefetcher tag array.
// Checks that reset leaves every entry invalid, that a written tag hits
// only at its own index and only for its own tag, that a write with
// wvalid=0 invalidates the entry, and a random sequence against a
// reference model kept in the testbench.
module tb_pf_tag_array;
  localparam int ENTRIES = 4;
  localparam int TAG_W   = 26;

  logic clk = 0, reset;
  logic [1:0] rd_idx, widx;
  logic [TAG_W-1:0] rd_tag, wtag, rd_data;
  logic hit, wen, wvalid;
  int checks = 0, failures = 0;

  pf_tag_array #(.ENTRIES(ENTRIES), .TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [TAG_W-1:0] mtag [ENTRIES];
  logic [ENTRIES-1:0] mvld;

  task automatic check_read(input logic [1:0] i, input logic [TAG_W-1:0] t);
    logic exp;
    rd_idx = i; rd_tag = t; #1;
    exp = mvld[i] && (mtag[i] == t);
    checks++;
    if (hit !== exp) begin
      failures++;
      $display("FAIL idx=%0d tag=%h hit=%0b exp=%0b", i, t, hit, exp);
    end
    if (mvld[i]) begin
      checks++;
      if (rd_data !== mtag[i]) begin failures++; $display("FAIL rd_data"); end
    end
  endtask

  task automatic write(input logic [1:0] i, input logic [TAG_W-1:0] t, input logic v);
    @(negedge clk);
    wen = 1; widx = i; wtag = t; wvalid = v;
    @(negedge clk);
    wen = 0;
    mtag[i] = t; mvld[i] = v;
  endtask

  initial begin
    reset = 1; wen = 0; widx = 0; wtag = 0; wvalid = 0; rd_idx = 0; rd_tag = 0;
    mvld = '0;
    repeat (2) @(negedge clk);
    reset = 0;
    for (int i = 0; i < ENTRIES; i++) check_read(i[1:0], '0);
    write(2'd1, 26'h123_4567, 1'b1);
    check_read(2'd1, 26'h123_4567);
    check_read(2'd1, 26'h123_4566);
    check_read(2'd0, 26'h123_4567);
    write(2'd1, 26'h123_4567, 1'b0);
    check_read(2'd1, 26'h123_4567);
    for (int n = 0; n < 300; n++) begin
      logic [1:0] i;
      i = 2'($urandom);
      if ($urandom % 2) write(i, TAG_W'($urandom % 8), 1'($urandom % 4 != 0));
      check_read(2'($urandom), TAG_W'($urandom % 8));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
