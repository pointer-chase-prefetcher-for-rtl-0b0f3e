// tb_workloads: runs the linked-data-structure evaluation kernels on the
// system with the prefetcher and on the same cache and memory without it
// (the baseline), and checks how the prefetcher changes the cycle count.
//
// Every run is a wl_run instance. All runs go at once, each with its own
// memory, and the test waits until all are done. Cycle counts are for the
// data side only; a processor would add its own instruction cycles to
// both machines alike. Runs:
//   * Memory-latency sweep: a 64-node list with one node per line on
//     scattered lines, walked once, at memory latencies 2, 5, 7, 10, 20 and
//     40 cycles. Every node after the first must be served by the
//     prefetcher (63 hits), and the prefetcher machine must be faster at
//     every latency. The improvement in percent is printed.
//   * Node layout, at the default latency of 6: the scattered list above,
//     and a 64-node list with two consecutive nodes per line. With two
//     nodes per line the second node is already in the cache when it is
//     loaded, so the prefetcher cannot help. The prefetcher machine must
//     then be no faster than the baseline.
//   * Small list: 6 nodes walked 16 times. Only the first walk misses in
//     the cache, so there must be exactly 5 prefetcher hits.
//   * Insertion (16 nodes into a 64-node list, each after a walk from the
//     head) and hash-table lookup (64 lookups over 8 chains of 8 nodes), at
//     latency 6: the prefetcher must hit and the machine must be faster.
//   * Vector add with no pointers, at latencies 6 and 40. Every request
//     from the cache to memory takes one cycle more through the prefetcher,
//     so the cycle difference must equal the number of such requests, and
//     no load may hit in the prefetcher.
// All runs also check their data. The parameters of wl_run select the
// kernel; pcp_system itself runs with its defaults except MEM_STAGES.
module tb_workloads;
  import pcp_pkg::*;

  logic clk = 1'b0, reset;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  localparam int NLAT = 6;
  localparam int LAT [NLAT] = '{2, 5, 7, 10, 20, 40};

  logic done_a [NLAT], done_b [NLAT];
  int   cyc_a  [NLAT], cyc_b  [NLAT];
  int   err_a  [NLAT], err_b  [NLAT];
  int   mrq_a  [NLAT], mrq_b  [NLAT];
  int   hit_a  [NLAT], hit_b  [NLAT];

  for (genvar g = 0; g < NLAT; g++) begin : g_lat
    wl_run #(.STAGES(LAT[g]), .BASELINE(1'b0)) u_alt (
      .clk, .reset, .done(done_a[g]), .cycles(cyc_a[g]), .errors(err_a[g]),
      .n_memreq(mrq_a[g]), .n_pf_hit(hit_a[g]));
    wl_run #(.STAGES(LAT[g]), .BASELINE(1'b1)) u_base (
      .clk, .reset, .done(done_b[g]), .cycles(cyc_b[g]), .errors(err_b[g]),
      .n_memreq(mrq_b[g]), .n_pf_hit(hit_b[g]));
  end

  // other runs: 0 scattered list, 1 two nodes per line, 2 small list,
  // 3 vector add at latency 6, 4 vector add at latency 40, 5 insertion,
  // 6 hash table
  localparam int NRUN = 7;
  localparam int RUN_STAGES [NRUN] = '{6, 6, 6, 6, 40, 6, 6};
  localparam int RUN_KIND   [NRUN] = '{0, 0, 0, 1, 1, 2, 3};
  localparam int RUN_LAYOUT [NRUN] = '{0, 1, 0, 0, 0, 0, 0};
  localparam int RUN_NODES  [NRUN] = '{64, 64, 6, 64, 64, 64, 64};
  localparam int RUN_REPS   [NRUN] = '{1, 1, 16, 1, 1, 16, 1};
  localparam string RUN_NAME [NRUN] = '{"scattered list", "two nodes per line",
                                        "small list x16", "vector add lat 6",
                                        "vector add lat 40", "insertion x16",
                                        "hash table"};

  logic done_ra [NRUN], done_rb [NRUN];
  int   cyc_ra  [NRUN], cyc_rb  [NRUN];
  int   err_ra  [NRUN], err_rb  [NRUN];
  int   mrq_ra  [NRUN], mrq_rb  [NRUN];
  int   hit_ra  [NRUN], hit_rb  [NRUN];

  for (genvar g = 0; g < NRUN; g++) begin : g_run
    wl_run #(.STAGES(RUN_STAGES[g]), .BASELINE(1'b0), .KIND(RUN_KIND[g]),
             .LAYOUT(RUN_LAYOUT[g]), .NODES(RUN_NODES[g]), .REPS(RUN_REPS[g])) u_alt (
      .clk, .reset, .done(done_ra[g]), .cycles(cyc_ra[g]), .errors(err_ra[g]),
      .n_memreq(mrq_ra[g]), .n_pf_hit(hit_ra[g]));
    wl_run #(.STAGES(RUN_STAGES[g]), .BASELINE(1'b1), .KIND(RUN_KIND[g]),
             .LAYOUT(RUN_LAYOUT[g]), .NODES(RUN_NODES[g]), .REPS(RUN_REPS[g])) u_base (
      .clk, .reset, .done(done_rb[g]), .cycles(cyc_rb[g]), .errors(err_rb[g]),
      .n_memreq(mrq_rb[g]), .n_pf_hit(hit_rb[g]));
  end

  function automatic logic all_done();
    for (int i = 0; i < NLAT; i++) if (!done_a[i] || !done_b[i]) return 1'b0;
    for (int i = 0; i < NRUN; i++) if (!done_ra[i] || !done_rb[i]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset = 1'b1;
    repeat (4) @(posedge clk);
    #1 reset = 1'b0;
    do @(posedge clk); while (!all_done());
    #1;

    $display("latency  baseline  prefetcher  improvement  pf hits");
    for (int i = 0; i < NLAT; i++) begin
      $display("%7d  %8d  %10d  %10.1f%%  %7d", LAT[i], cyc_b[i], cyc_a[i],
               100.0 * real'(cyc_b[i] - cyc_a[i]) / real'(cyc_a[i]), hit_a[i]);
      check($sformatf("latency %0d data", LAT[i]), err_a[i] == 0 && err_b[i] == 0);
      check($sformatf("latency %0d: 63 prefetcher hits", LAT[i]), hit_a[i] == 63);
      check($sformatf("latency %0d: prefetcher faster", LAT[i]), cyc_a[i] < cyc_b[i]);
      check($sformatf("latency %0d: same memory requests", LAT[i]), mrq_a[i] == mrq_b[i]);
    end

    $display("run                  baseline  prefetcher  pf hits  cache misses");
    for (int i = 0; i < NRUN; i++) begin
      $display("%-20s %8d  %10d  %7d  %12d", RUN_NAME[i], cyc_rb[i], cyc_ra[i],
               hit_ra[i], mrq_ra[i]);
      check($sformatf("%s data", RUN_NAME[i]), err_ra[i] == 0 && err_rb[i] == 0);
      check($sformatf("%s same memory requests", RUN_NAME[i]), mrq_ra[i] == mrq_rb[i]);
    end
    check("scattered list: 63 hits", hit_ra[0] == 63);
    check("scattered list: prefetcher faster", cyc_ra[0] < cyc_rb[0]);
    check("two per line: no useful prefetch", hit_ra[1] == 0);
    check("two per line: prefetcher not faster", cyc_ra[1] >= cyc_rb[1]);
    check("small list: hits only on first walk", hit_ra[2] == 5);
    for (int i = 3; i < 5; i++) begin
      check($sformatf("%s: no prefetcher hits", RUN_NAME[i]), hit_ra[i] == 0);
      check($sformatf("%s: one extra cycle per memory request", RUN_NAME[i]),
            cyc_ra[i] - cyc_rb[i] == mrq_ra[i]);
    end

    for (int i = 5; i < 7; i++) begin
      check($sformatf("%s: prefetcher hits", RUN_NAME[i]), hit_ra[i] > 0);
      check($sformatf("%s: prefetcher faster", RUN_NAME[i]), cyc_ra[i] < cyc_rb[i]);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
