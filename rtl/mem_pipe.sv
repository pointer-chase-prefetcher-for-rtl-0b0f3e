// mem_pipe: inelastic pipeline stages that give the test memory a fixed
// latency.
//
// STAGES registers carry memory responses from the combinational memory
// (in_*) to the rest of the system (out_*). The whole pipe advances
// together unless its last stage holds a valid response that the receiver
// does not take (out_val && !out_rdy); then every stage holds and in_rdy
// drops, which in turn stalls the memory's request port. A request
// accepted by the memory in cycle t therefore appears at out_* in cycle
// t+STAGES when nothing stalls, and back-to-back requests are accepted
// every cycle.
//
// The stages are a module of their own outside the memory, and inelastic,
// as in the paper. STAGES=6 is the latency seen in the published prefetcher
// traces (request in cycle 2, response in cycle 8); the paper's evaluation
// sweeps it from 2 to 40.
module mem_pipe
  import pcp_pkg::*;
#(
  parameter int unsigned STAGES = 6
) (
  input  logic     clk,
  input  logic     reset,
  input  logic     in_val,
  output logic     in_rdy,
  input  memresp_t in_msg,
  output logic     out_val,
  input  logic     out_rdy,
  output memresp_t out_msg
);

  logic     [STAGES-1:0] vld;
  memresp_t              msg [STAGES];
  logic                  advance;

  assign advance = !(vld[STAGES-1] && !out_rdy);
  assign in_rdy  = advance;
  assign out_val = vld[STAGES-1];
  assign out_msg = msg[STAGES-1];

  always_ff @(posedge clk) begin
    if (reset) begin
      vld <= '0;
    end else if (advance) begin
      vld <= {vld[STAGES-2:0], in_val};
    end
  end

  always_ff @(posedge clk) begin
    if (advance) begin
      msg[0] <= in_msg;
      for (int s = 1; s < STAGES; s++) msg[s] <= msg[s-1];
    end
  end

  initial assert (STAGES >= 2) else $error("mem_pipe needs STAGES >= 2");

endmodule
