// pf_data_array: line store of the pointer-chase prefetcher.
//
// ENTRIES lines of LINE_W bits held in registers, each with a data-valid
// bit that is separate from the tag-valid bit of pf_tag_array. The read
// port is combinational (rd_idx -> rd_data, rd_valid), so a hit can be
// answered in the tag-check cycle. The single write port writes a line and
// its valid bit at the next rising edge: the controller writes wvalid=0
// when it sends a next-node prefetch to memory (the line is now "in
// flight"), and wvalid=1 with the returned line when the prefetch comes
// back, or with the data of an init transaction. Reset clears all valid bits.
//
// Size (4 lines of 128 bits) follows the published prefetcher.
module pf_data_array #(
  parameter int unsigned ENTRIES = 4,
  parameter int unsigned LINE_W  = 128,
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic              clk,
  input  logic              reset,
  input  logic [IDX_W-1:0]  rd_idx,
  output logic [LINE_W-1:0] rd_data,
  output logic              rd_valid,
  input  logic              wen,
  input  logic [IDX_W-1:0]  widx,
  input  logic [LINE_W-1:0] wdata,
  input  logic              wvalid
);

  logic [LINE_W-1:0]  lines [ENTRIES];
  logic [ENTRIES-1:0] valid;

  always_ff @(posedge clk) begin
    if (reset) begin
      valid <= '0;
    end else if (wen) begin
      valid[widx] <= wvalid;
    end
  end

  always_ff @(posedge clk) begin
    if (wen) lines[widx] <= wdata;
  end

  assign rd_data  = lines[rd_idx];
  assign rd_valid = valid[rd_idx];

endmodule
