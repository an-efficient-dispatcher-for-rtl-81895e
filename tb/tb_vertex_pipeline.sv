// tb_vertex_pipeline: self-checking test of the vertex-centric push pipeline.
// A random 1000-vertex CSR graph (degrees 0..40, so some vertices need
// several 16-thread loops) sits in a behavioural memory (tb_mem_model) and
// the bitmaps in tb_bm_model. Each round feeds a random set of active
// vertices followed by a halt token, with random gaps. The testbench
// predicts the visited set and checks: the done pulse after the halt, new
// depths (level + 1) in DDR and no others, the next-frontier bits, the
// vertex / edge / loop / update / multi-loop counters, and that hub_seen is
// raised exactly when an active vertex has degree >= hub_degree and is
// cleared by iter_start.
// The expected values come from models written independently of the RTL;
// the stimulus, models and coverage targets are this testbench's own and
// are not taken from the published description of the engine.
module tb_vertex_pipeline;
  import graph_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  localparam int NV = 1024, N = 1000, T = 16;
  logic iter_start, in_valid, in_ready, done, hub_seen;
  logic [DEPTH_W-1:0] level;
  vid_t hub_degree;
  vtx_tok_t in_tok;
  logic mem_valid, mem_ready, mem_rsp_valid, bm_valid, bm_ready, bm_rsp_valid;
  mem_req_t mem_req;
  word_t mem_rsp_data;
  bm_req_t bm_req;
  bm_rsp_t bm_rsp;
  logic [31:0] n_vertices, n_edges, n_loops, n_updates, n_multi;

  vertex_pipeline #(.THREADS(T)) dut (.*);
  tb_mem_model #(.LATENCY(4), .STALL_PCT(20)) u_mem (.clk, .rst_n, .mem_valid, .mem_ready,
    .mem_req, .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));
  tb_bm_model #(.NV(NV)) u_bm (.clk, .rst_n, .bm_valid, .bm_ready, .bm_req,
    .rsp_valid(bm_rsp_valid), .rsp(bm_rsp));

  int off [N + 1];
  int nb [$];
  int n_done;
  always @(posedge clk) if (done) n_done++;

  task automatic send(vtx_tok_t t);
    #1 in_tok = t; in_valid = 1;
    do @(negedge clk); while (!in_ready);
    @(posedge clk); #1 in_valid = 0;
  endtask

  initial begin
    #500_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int hubs_seen = 0;
    iter_start = 0; in_valid = 0; in_tok = '0; level = 0; hub_degree = 32;
    // graph
    off[0] = 0;
    for (int v = 0; v < N; v++) begin
      int d;
      d = ($urandom_range(0, 9) == 0) ? $urandom_range(17, 40) : $urandom_range(0, 8);
      for (int k = 0; k < d; k++) nb.push_back($urandom_range(0, N - 1));
      off[v + 1] = off[v] + d;
    end
    for (int v = 0; v <= N; v++) u_mem.put(ARR_OFFSET, v, off[v]);
    foreach (nb[i]) u_mem.put(ARR_NEIGH, i, nb[i]);
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int r = 0; r < 30; r++) begin
      bit act [N], exp_vis [N], old_vis [N];
      int e_v, e_e, e_l, e_u, e_m, v0, ed0, l0, u0, m0, d0, bad;
      bit e_hub;
      level = 8'(r);
      e_v = 0; e_e = 0; e_l = 0; e_u = 0; e_m = 0; e_hub = 0;
      for (int i = 0; i < N; i++) begin
        act[i] = ($urandom_range(0, 99) < 5);
        u_bm.vis[i] = act[i] || ($urandom_range(0, 99) < 40);
        u_bm.cur[i] = act[i];
        u_bm.nxt[i] = 0;
        exp_vis[i] = u_bm.vis[i];
        old_vis[i] = u_bm.vis[i];
        u_mem.put(ARR_DEPTH, i, 255);
      end
      for (int v = 0; v < N; v++) if (act[v]) begin
        int d;
        d = off[v + 1] - off[v];
        e_v++; e_e += d; e_l += (d + T - 1) / T;
        if (d > T) e_m++;
        if (d >= int'(hub_degree)) e_hub = 1;
        for (int k = off[v]; k < off[v + 1]; k++)
          if (!exp_vis[nb[k]]) begin exp_vis[nb[k]] = 1; e_u++; end
      end
      v0 = n_vertices; ed0 = n_edges; l0 = n_loops; u0 = n_updates; m0 = n_multi; d0 = n_done;
      #1 iter_start = 1;
      @(posedge clk); #1 iter_start = 0;
      check(!hub_seen, "hub_seen cleared by iter_start");
      for (int v = 0; v < N; v++) if (act[v]) begin
        send('{halt: 1'b0, v: vid_t'(v)});
        repeat ($urandom_range(0, 3)) @(posedge clk);
      end
      send('{halt: 1'b1, v: '0});
      repeat (5) @(posedge clk);
      check(n_done == d0 + 1, "one done pulse per halt");
      check(n_vertices - v0 == e_v, "vertex count");
      check(n_edges - ed0 == e_e, "edge count");
      check(n_loops - l0 == e_l, $sformatf("loops %0d exp %0d", n_loops - l0, e_l));
      check(n_updates - u0 == e_u, $sformatf("updates %0d exp %0d", n_updates - u0, e_u));
      check(n_multi - m0 == e_m, "multi-loop vertices");
      check(hub_seen == e_hub, $sformatf("hub_seen %0d exp %0d", hub_seen, e_hub));
      hubs_seen += e_hub;
      bad = 0;
      for (int i = 0; i < N; i++) begin
        if (u_bm.vis[i] != exp_vis[i]) bad++;
        if (u_bm.nxt[i] != (exp_vis[i] && !old_vis[i])) bad++;
        if (u_mem.get(ARR_DEPTH, i) != ((exp_vis[i] && !old_vis[i]) ? word_t'(level) + 1 : 255)) bad++;
      end
      check(bad == 0, $sformatf("round %0d: %0d state mismatches", r, bad));
    end
    check(hubs_seen > 0 && hubs_seen < 30, "hub rounds both seen and not seen");
    $display("loops=%0d multi=%0d updates=%0d hub rounds=%0d", n_loops, n_multi, n_updates, hubs_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
