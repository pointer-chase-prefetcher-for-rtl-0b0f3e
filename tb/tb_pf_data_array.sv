// tb_pf_data_array: self-checking test of the prefetcher data array.
// Checks reset invalidation, that a line written with wvalid=1 reads back
// with its valid bit, that a wvalid=0 write clears the valid bit (as when a
// prefetch is launched), and a random sequence against a reference model.
module tb_pf_data_array;
  localparam int ENTRIES = 4;
  localparam int LINE_W  = 128;

  logic clk = 0, reset;
  logic [1:0] rd_idx, widx;
  logic [LINE_W-1:0] rd_data, wdata;
  logic rd_valid, wen, wvalid;
  int checks = 0, failures = 0;

  pf_data_array #(.ENTRIES(ENTRIES), .LINE_W(LINE_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [LINE_W-1:0] mline [ENTRIES];
  logic [ENTRIES-1:0] mvld;

  task automatic check_read(input logic [1:0] i);
    rd_idx = i; #1;
    checks++;
    if (rd_valid !== mvld[i]) begin
      failures++; $display("FAIL valid idx=%0d", i);
    end
    if (mvld[i]) begin
      checks++;
      if (rd_data !== mline[i]) begin failures++; $display("FAIL data idx=%0d", i); end
    end
  endtask

  function automatic logic [LINE_W-1:0] rline();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic write(input logic [1:0] i, input logic [LINE_W-1:0] d, input logic v);
    @(negedge clk);
    wen = 1; widx = i; wdata = d; wvalid = v;
    @(negedge clk);
    wen = 0;
    mline[i] = d; mvld[i] = v;
  endtask

  initial begin
    reset = 1; wen = 0; widx = 0; wdata = 0; wvalid = 0; rd_idx = 0;
    mvld = '0;
    repeat (2) @(negedge clk);
    reset = 0;
    for (int i = 0; i < ENTRIES; i++) check_read(i[1:0]);
    write(2'd3, 128'h0000001c_00000018_00000014_00000010, 1'b1);
    check_read(2'd3);
    write(2'd3, '0, 1'b0);
    check_read(2'd3);
    for (int n = 0; n < 300; n++) begin
      if ($urandom % 2) write(2'($urandom), rline(), 1'($urandom % 4 != 0));
      check_read(2'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
