// tb_graph_engine_top: end-to-end test of the whole engine at its default
// parameters (MAX_V = 2^23 vertices, 8 destinations per block, 16-thread
// vertex groups, 16/64/256-thread block pipelines).
//
// The testbench plays the host: it builds a graph in software, lays out the
// CSR and edge-block arrays in the DDR model, sets the DEPTH array to 255,
// starts a BFS and, when done rises, compares every vertex's depth with a
// reference BFS computed independently in the testbench. Four runs, chosen to
// drive every mechanism of the engine at least once:
//   R1  the 9-vertex example graph, starting in the low unit
//   R2  a skewed 4096-vertex graph, hub trigger moves it to the high unit,
//       the immediate high -> low switch brings it back
//   R3  the same graph, switch by the active-vertex ratio (alpha)
//   R4  the same graph starting in the high unit; the large-block condition
//       fails so the low switch is deferred by one iteration
// Each mechanism (both modules, every switch rule, each block class, the
// multi-loop thread groups, full pipes, DDR backpressure) is counted and a
// mechanism that never happened counts as a failure.
module tb_graph_engine_top;
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

  int checks = 0, failures = 0;
  localparam longint WATCHDOG = 40_000_000;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // watchdog
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters, accumulated over the runs
  longint m_low, m_high, m_hub, m_alpha, m_now, m_defer, m_deferred;
  longint m_small, m_middle, m_large, m_vloop, m_lloop, m_vfull, m_bfull, m_halt;
  int unsigned vpb = 8;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic load(graph_c g);
    for (int a = 0; a < NUM_ARR; a++) base_addr[a] = addr_t'(a) << 22;
    foreach (g.offset[i]) u_ddr.poke(base_addr[ARR_OFFSET] + i, g.offset[i]);
    foreach (g.neigh[i])  u_ddr.poke(base_addr[ARR_NEIGH]  + i, g.neigh[i]);
    foreach (g.bstart[i]) u_ddr.poke(base_addr[ARR_BSTART] + i, g.bstart[i]);
    foreach (g.bcount[i]) u_ddr.poke(base_addr[ARR_BCOUNT] + i, g.bcount[i]);
    foreach (g.esrc[i])   u_ddr.poke(base_addr[ARR_ESRC]   + i, g.esrc[i]);
    foreach (g.edst[i])   u_ddr.poke(base_addr[ARR_EDST]   + i, g.edst[i]);
    for (int unsigned v = 0; v < g.n; v++) u_ddr.poke(base_addr[ARR_DEPTH] + v, 32'd255);
  endtask

  task automatic run(string name, graph_c g, int unsigned r, bit hi,
                     int unsigned a, int unsigned b, int unsigned c, int unsigned hub);
    engine_stats_t s0;
    longint t0;
    int unsigned bad;
    load(g);
    g.bfs(r);
    s0 = stats;
    root = r; num_vertices = g.n; num_blocks = g.num_blocks();
    start_high = hi; alpha = TUNE_W'(a); beta = TUNE_W'(b); gamma = TUNE_W'(c); hub_degree = hub;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    t0 = cycle;
    while (!done) @(posedge clk);
    bad = 0;
    for (int unsigned v = 0; v < g.n; v++) begin
      word_t d;
      d = u_ddr.peek(base_addr[ARR_DEPTH] + v);
      checks++;
      if (d != word_t'(g.depth[v])) begin
        failures++;
        bad++;
        if (bad < 5) $display("FAIL %s: depth[%0d] = %0d, expected %0d", name, v, d, g.depth[v]);
      end
    end
    $display("%s: %0d vertices, %0d edges, %0d cycles, low it %0d, high it %0d, hub %0d alpha %0d now %0d defer %0d deferred %0d, mismatches %0d",
             name, g.n, g.src.size(), cycle - t0, stats.iter_low, stats.iter_high, stats.ev_hub,
             stats.ev_alpha, stats.ev_now, stats.ev_defer, stats.ev_deferred, bad);
    m_low      += stats.iter_low;
    m_high     += stats.iter_high;
    m_hub      += stats.ev_hub;
    m_alpha    += stats.ev_alpha;
    m_now      += stats.ev_now;
    m_defer    += stats.ev_defer;
    m_deferred += stats.ev_deferred;
    m_small    += stats.blk_loops[0] - s0.blk_loops[0];
    m_middle   += stats.blk_loops[1] - s0.blk_loops[1];
    m_large    += stats.blk_loops[2] - s0.blk_loops[2];
    m_halt     += stats.blk_halts[0] - s0.blk_halts[0];
    m_vloop    += stats.vp_multi - s0.vp_multi;
    m_vfull    += stats.vpipe_full - s0.vpipe_full;
    m_bfull    += stats.bpipe_full[0] - s0.bpipe_full[0];
    // every iteration is either low or high, and a halt ends each high one
    check(stats.blk_halts[0] - s0.blk_halts[0] == stats.iter_high, {name, ": one halt per high iteration"});
    check(mode == MODE_LOW || mode == MODE_HIGH, {name, ": mode valid"});
    repeat (5) @(posedge clk);
  endtask

  graph_c g1, g2;
  initial begin
    m_low = 0; m_high = 0; m_hub = 0; m_alpha = 0; m_now = 0; m_defer = 0; m_deferred = 0;
    m_small = 0; m_middle = 0; m_large = 0; m_vloop = 0; m_lloop = 0; m_vfull = 0; m_bfull = 0; m_halt = 0;
    start = 1'b0; start_high = 1'b0; root = '0; num_vertices = '0; num_blocks = '0;
    alpha = '0; beta = '0; gamma = '0; hub_degree = '0;
    for (int a = 0; a < NUM_ARR; a++) base_addr[a] = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (4) @(posedge clk);

    g1 = example_graph(vpb);
    run("R1 example graph", g1, 0, 1'b0, 16'h0080, 16'h0080, 16'h0000, 0);

    g2 = skewed_graph(4096, vpb, 40, 2400, 300, 1500);
    run("R2 skewed, hub switch", g2, 0, 1'b0, 16'hFFFF, 16'h0080, 16'h0000, 32);
    run("R3 skewed, alpha switch", g2, 5, 1'b0, 16'h0001, 16'h0100, 16'h0000, 0);
    run("R4 skewed, start high, deferred switch", g2, 0, 1'b1, 16'hFFFF, 16'h0200, 16'hFFFF, 0);

    // large blocks take ceil(count / 256) loops: at least 9 for > 2048 edges
    check(m_large >= 9, "large pipeline loops per block");
    check(u_ddr.n_stalls > 0, "DDR backpressure seen");
    check(m_low > 0,      "low parallel unit used");
    check(m_high > 0,     "high parallel unit used");
    check(m_hub > 0,      "hub switch happened");
    check(m_alpha > 0,    "alpha switch happened");
    check(m_now > 0,      "immediate low switch happened");
    check(m_defer > 0,    "deferred low switch decided");
    check(m_deferred > 0, "deferred low switch carried out");
    check(m_small > 0,    "small pipeline used");
    check(m_middle > 0,   "middle pipeline used");
    check(m_large > 0,    "large pipeline used");
    check(m_vloop > 0,    "vertex thread group looped");
    check(m_vfull > 0,    "active-vertex pipe filled");
    check(m_bfull > 0,    "small-block pipe filled");
    check(m_halt > 0,     "halt descriptors delivered");
    $display("mechanisms: low %0d high %0d hub %0d alpha %0d now %0d defer %0d deferred %0d small %0d middle %0d large %0d vloop %0d vfull %0d bfull %0d halt %0d ddr_stall %0d",
             m_low, m_high, m_hub, m_alpha, m_now, m_defer, m_deferred, m_small, m_middle, m_large,
             m_vloop, m_vfull, m_bfull, m_halt, u_ddr.n_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
