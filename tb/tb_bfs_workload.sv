// tb_bfs_workload: BFS on a graph the size of the smallest social-network
// benchmark commonly used with this engine (soc-Epinions: 80,000 vertices,
// 510,000 directed edges), run on the engine at its default parameters.
//
// The real data set is not read from a file; a graph of the same vertex and
// edge count and a similar shape is generated: a random tree that makes
// every vertex reachable from vertex 0 with a small diameter, plus edges
// whose destinations follow a steep power law (d = N * u^3 for uniform u),
// so a few vertices get very large in-degree and form large edge-blocks
// while most blocks stay small. The testbench builds CSR and edge-block
// arrays, runs one BFS from vertex 0 with ordinary thresholds, checks every
// depth against a reference BFS and that both processing modules and all
// three block classes were used, and prints the level, cycle and switch
// counts.
// The expected values come from models written independently of the RTL;
// the stimulus, models and coverage targets are this testbench's own and
// are not taken from the published description of the engine.
module tb_bfs_workload;
  import graph_pkg::*;
  import tb_graph_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     start, start_high, busy, done;
  vid_t     root, num_vertices, num_blocks, hub_degree;
  logic [TUNE_W-1:0] alpha, beta, gamma;
  addr_t    base_addr [NUM_ARR];
  mode_e    mode;
  logic [DEPTH_W-1:0] level;
  logic     ddr_req_valid, ddr_req_ready, ddr_rsp_valid;
  ddr_req_t ddr_req;
  word_t    ddr_rsp_data;
  engine_stats_t stats;
  logic [31:0] acc_count [NUM_ARR];

  graph_engine_top dut (
    .clk, .rst_n, .start, .root, .num_vertices, .num_blocks, .start_high,
    .alpha, .beta, .gamma, .hub_degree, .base_addr, .busy, .done, .mode, .level,
    .ddr_req_valid, .ddr_req_ready, .ddr_req, .ddr_rsp_valid, .ddr_rsp_data,
    .stats, .acc_count
  );

  ddr_model #(.LATENCY(6), .STALL_PCT(10)) u_ddr (
    .clk, .rst_n, .req_valid(ddr_req_valid), .req_ready(ddr_req_ready), .req(ddr_req),
    .rsp_valid(ddr_rsp_valid), .rsp_data(ddr_rsp_data)
  );

  localparam int unsigned NV = 80_000, NE = 510_000;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200_000_000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    graph_c g;
    longint t0;
    int unsigned bad, maxd;
    g = new(NV, 8);
    for (int unsigned v = 1; v < NV; v++) g.add($urandom_range(v / 8, v - 1), v);
    while (g.src.size() < NE) begin
      real u;
      u = real'($urandom) / 4294967296.0;
      g.add($urandom_range(0, NV - 1), int'(real'(NV) * u * u * u));
    end
    g.build();
    g.bfs(0);
    for (int a = 0; a < NUM_ARR; a++) base_addr[a] = addr_t'(a) << 22;
    foreach (g.offset[i]) u_ddr.poke(base_addr[ARR_OFFSET] + i, g.offset[i]);
    foreach (g.neigh[i])  u_ddr.poke(base_addr[ARR_NEIGH]  + i, g.neigh[i]);
    foreach (g.bstart[i]) u_ddr.poke(base_addr[ARR_BSTART] + i, g.bstart[i]);
    foreach (g.bcount[i]) u_ddr.poke(base_addr[ARR_BCOUNT] + i, g.bcount[i]);
    foreach (g.esrc[i])   u_ddr.poke(base_addr[ARR_ESRC]   + i, g.esrc[i]);
    foreach (g.edst[i])   u_ddr.poke(base_addr[ARR_EDST]   + i, g.edst[i]);
    for (int unsigned v = 0; v < NV; v++) u_ddr.poke(base_addr[ARR_DEPTH] + v, 32'd255);

    start = 0; start_high = 0; root = 0; num_vertices = NV; num_blocks = g.num_blocks();
    alpha = 16'h0010; beta = 16'h0040; gamma = 16'h0020; hub_degree = 1024;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    t0 = cycle;
    while (!done) @(posedge clk);
    bad = 0; maxd = 0;
    for (int unsigned v = 0; v < NV; v++) begin
      word_t d;
      d = u_ddr.peek(base_addr[ARR_DEPTH] + v);
      if (g.depth[v] != 255 && g.depth[v] > maxd) maxd = g.depth[v];
      checks++;
      if (d != word_t'(g.depth[v])) begin
        failures++; bad++;
        if (bad < 5) $display("FAIL depth[%0d] = %0d, expected %0d", v, d, g.depth[v]);
      end
    end
    $display("%0d vertices, %0d edges, %0d blocks, depth %0d: %0d cycles, %0d low / %0d high levels, switches hub %0d alpha %0d now %0d defer %0d deferred %0d",
             NV, g.src.size(), g.num_blocks(), maxd, cycle - t0, stats.iter_low, stats.iter_high,
             stats.ev_hub, stats.ev_alpha, stats.ev_now, stats.ev_defer, stats.ev_deferred);
    $display("block loops small %0d middle %0d large %0d", stats.blk_loops[0], stats.blk_loops[1], stats.blk_loops[2]);
    check(stats.iter_low > 0 && stats.iter_high > 0, "both modules used");
    check(stats.blk_loops[0] > 0 && stats.blk_loops[1] > 0 && stats.blk_loops[2] > 0, "all block classes used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
