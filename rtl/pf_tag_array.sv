// pf_tag_array: tag store of the pointer-chase prefetcher.
//
// A small register file of ENTRIES tags, each with its own tag-valid bit,
// read combinationally at rd_idx and compared with rd_tag; hit is high when
// the entry is valid and its tag equals rd_tag. Being registers rather than
// an SRAM, the array can be read and written in the same cycle, so the
// controller never meets a structural hazard on it. One write port sets an
// entry's tag and its valid bit together: writing wvalid=1 installs a
// prefetched (or init) line's tag, writing wvalid=0 invalidates the entry
// (a write from the cache hitting a prefetched line). The write takes
// effect at the next rising clock edge; reset clears every valid bit.
//
// Size (4 entries of 26 bits) follows the published prefetcher; the port
// grouping is this design's own.
module pf_tag_array #(
  parameter int unsigned ENTRIES = 4,
  parameter int unsigned TAG_W   = 26,
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic             clk,
  input  logic             reset,
  // read / compare port
  input  logic [IDX_W-1:0] rd_idx,
  input  logic [TAG_W-1:0] rd_tag,
  output logic             hit,
  output logic [TAG_W-1:0] rd_data,
  // write port
  input  logic             wen,
  input  logic [IDX_W-1:0] widx,
  input  logic [TAG_W-1:0] wtag,
  input  logic             wvalid
);

  logic [TAG_W-1:0] tags  [ENTRIES];
  logic [ENTRIES-1:0] valid;

  always_ff @(posedge clk) begin
    if (reset) begin
      valid <= '0;
    end else if (wen) begin
      valid[widx] <= wvalid;
    end
  end

  always_ff @(posedge clk) begin
    if (wen) tags[widx] <= wtag;
  end

  assign rd_data = tags[rd_idx];
  assign hit     = valid[rd_idx] && (tags[rd_idx] == rd_tag);

endmodule
