// pf_addr_gen: next-node address generation of the pointer-chase prefetcher.
//
// A lw.cp load returns a word that is itself the address of the next node
// of a linked structure. This unit finds that word inside a 128-bit line:
// datanext_mux picks word offset[3:2] of the line read from the prefetcher
// data array (used on a read-cp hit), memresp_mux picks the same word of the
// line arriving from memory (used on a read-cp miss), and buffer_mux chooses
// between the two with sel_memresp. The result is loaded by the controller
// into the buffer address register. Purely combinational.
//
// The three multiplexers and their names are those of the published
// datapath; word k of a line is bits [32k+31:32k].
module pf_addr_gen
  import pcp_pkg::*;
(
  input  logic [LINE_W-1:0] array_line,
  input  logic [LINE_W-1:0] memresp_line,
  input  logic [OFF_W-1:0]  offset,
  input  logic              sel_memresp,
  output logic [WORD_W-1:0] next_addr
);

  logic [WORD_W-1:0] datanext_word;
  logic [WORD_W-1:0] memresp_word;

  always_comb begin
    datanext_word = array_line  [offset[3:2]*WORD_W +: WORD_W];
    memresp_word  = memresp_line[offset[3:2]*WORD_W +: WORD_W];
    next_addr     = sel_memresp ? memresp_word : datanext_word;
  end

endmodule
