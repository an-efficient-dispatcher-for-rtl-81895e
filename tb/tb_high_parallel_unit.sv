// tb_high_parallel_unit: self-checking test of the high parallel unit
// (edge-block dispatcher, three pipes and the 16/64/256-thread pipelines).
// A skewed 4096-vertex graph with small, middle and large edge-blocks sits in
// the behavioural DDR behind a real data analyzer; the bitmaps are a real
// bitmap unit whose fourth client belongs to the testbench. Starting from
// root 0, the unit alone runs pull iterations until the frontier is empty.
// After each iteration the testbench checks the new frontier against a
// one-step pull computed on the graph, the per-class loop counts
// (sum of ceil(count / threads) over the blocks still active), the block
// statistics Nb, Na, Nl, Fl and that each class got one halt. The final
// depths are compared with a reference BFS.
// The expected values come from models written independently of the RTL;
// the stimulus, models and coverage targets are this testbench's own and
// are not taken from the published description of the engine.
module tb_high_parallel_unit;
  import graph_pkg::*;
  import tb_graph_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  localparam int NV = 4096, VPB = 8;
  localparam int THR [3] = '{16, 64, 256};

  logic init, start, busy, done, swap;
  vid_t num_blocks, num_vertices;
  logic [DEPTH_W-1:0] level;
  logic [3:0] hmem_valid, hmem_ready, hmem_rsp_valid;
  mem_req_t hmem_req [4];
  word_t mem_rsp_data;
  logic [3:0] bm_valid, bm_ready, bm_rsp_valid;
  bm_req_t bm_req [4];
  bm_rsp_t bm_rsp;
  vid_t nb, na_b, nl, fl, n_disp [3];
  logic [31:0] n_loops [3], n_edges [3], n_updates [3], n_halts [3], pipe_full [3];
  addr_t base_addr [NUM_ARR];
  logic ddr_req_valid, ddr_req_ready, ddr_rsp_valid;
  ddr_req_t ddr_req;
  word_t ddr_rsp_data;
  logic [31:0] acc_count [NUM_ARR];
  logic sel_bank;

  high_parallel_unit #(.MAX_BLOCKS(NV / VPB), .VPB(VPB)) dut (
    .clk, .rst_n, .init, .start, .num_blocks, .num_vertices, .level, .busy, .done,
    .mem_valid(hmem_valid), .mem_ready(hmem_ready), .mem_req(hmem_req),
    .mem_rsp_valid(hmem_rsp_valid), .mem_rsp_data,
    .bm_valid(bm_valid[2:0]), .bm_ready(bm_ready[2:0]), .bm_req(bm_req[0:2]),
    .bm_rsp_valid(bm_rsp_valid[2:0]), .bm_rsp,
    .nb, .na_b, .nl, .fl, .n_disp, .n_loops, .n_edges, .n_updates, .n_halts, .pipe_full);
  data_analyzer #(.NCLI(4)) u_da (.clk, .rst_n, .base_addr, .req_valid(hmem_valid),
    .req_ready(hmem_ready), .req(hmem_req), .rsp_valid(hmem_rsp_valid), .rsp_data(mem_rsp_data),
    .ddr_req_valid, .ddr_req_ready, .ddr_req, .ddr_rsp_valid, .ddr_rsp_data, .acc_count);
  ddr_model #(.LATENCY(6), .STALL_PCT(10)) u_ddr (.clk, .rst_n, .req_valid(ddr_req_valid),
    .req_ready(ddr_req_ready), .req(ddr_req), .rsp_valid(ddr_rsp_valid), .rsp_data(ddr_rsp_data));
  bitmap_unit #(.MAX_V(NV), .NCLI(4)) u_bm (.clk, .rst_n, .swap, .req_valid(bm_valid),
    .req_ready(bm_ready), .req(bm_req), .rsp_valid(bm_rsp_valid), .rsp(bm_rsp), .sel_bank);

  task automatic bm_op(bm_op_e op, vid_t a, vid_t b, output bm_rsp_t r);
    #1 bm_req[3] = '{op: op, a: a, b: b}; bm_valid[3] = 1;
    do @(negedge clk); while (!bm_ready[3]);
    @(posedge clk); #1 bm_valid[3] = 0;
    do @(negedge clk); while (!bm_rsp_valid[3]);
    r = bm_rsp;
  endtask

  initial begin
    #900_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    graph_c g;
    bit vis [], cur [];
    bit blk_act [];
    bm_rsp_t r;
    int it;
    init = 0; start = 0; swap = 0; level = 0; bm_valid[3] = 0; bm_req[3] = '0;
    g = skewed_graph(NV, VPB, 40, 2400, 300, 1500);
    g.bfs(0);
    num_vertices = g.n;
    num_blocks = g.num_blocks();
    for (int a = 0; a < NUM_ARR; a++) base_addr[a] = addr_t'(a) << 22;
    foreach (g.bstart[i]) u_ddr.poke(base_addr[ARR_BSTART] + i, g.bstart[i]);
    foreach (g.bcount[i]) u_ddr.poke(base_addr[ARR_BCOUNT] + i, g.bcount[i]);
    foreach (g.esrc[i])   u_ddr.poke(base_addr[ARR_ESRC]   + i, g.esrc[i]);
    foreach (g.edst[i])   u_ddr.poke(base_addr[ARR_EDST]   + i, g.edst[i]);
    for (int v = 0; v < NV; v++) u_ddr.poke(base_addr[ARR_DEPTH] + v, 32'd255);
    u_ddr.poke(base_addr[ARR_DEPTH], 32'd0);
    vis = new[NV]; cur = new[NV]; blk_act = new[num_blocks];
    foreach (blk_act[b]) blk_act[b] = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < NV / 32; w++) bm_op(BM_CLEAR, w, 0, r);
    bm_op(BM_ROOT, 0, 0, r);
    vis[0] = 1; cur[0] = 1;
    #1 init = 1;
    @(posedge clk); #1 init = 0;
    while (busy) begin @(posedge clk); #1; end
    it = 0;
    while (1) begin
      bit nxt [];
      int e_loops [3], e_nb, e_na, e_nl, e_fl, n_front, l0 [3], h0 [3], bad;
      nxt = new[NV];
      e_nb = 0; e_na = 0; e_nl = 0; e_fl = 0;
      for (int k = 0; k < 3; k++) begin e_loops[k] = 0; l0[k] = n_loops[k]; h0[k] = n_halts[k]; end
      // reference: one pull step over the active blocks
      for (int b = 0; b < int'(num_blocks); b++) if (blk_act[b]) begin
        int c, gr;
        bit acc, still;
        c = g.bcount[b];
        gr = int'(classify(c));
        e_loops[gr] += (c + THR[gr] - 1) / THR[gr];
        acc = 0;
        for (int e = g.bstart[b]; e < g.bstart[b] + c; e++)
          if (cur[g.esrc[e]] && !vis[g.edst[e]] && !nxt[g.edst[e]]) begin nxt[g.edst[e]] = 1; acc = 1; end
        still = 0;
        for (int k = 0; k < VPB; k++) if (b * VPB + k < NV && !vis[b * VPB + k] && !nxt[b * VPB + k]) still = 1;
        blk_act[b] = still;
        if (gr == 2) begin e_nl++; e_fl += acc; end
        else begin e_nb++; e_na += still; end
      end
      level = 8'(it);
      #1 start = 1;
      @(posedge clk); #1 start = 0;
      while (!done) begin @(posedge clk); #1; end
      for (int k = 0; k < 3; k++) begin
        check(n_loops[k] - l0[k] == e_loops[k], $sformatf("it %0d class %0d loops %0d exp %0d",
              it, k, n_loops[k] - l0[k], e_loops[k]));
        check(n_halts[k] - h0[k] == 1, "one halt per class");
      end
      check(nb == vid_t'(e_nb) && na_b == vid_t'(e_na), $sformatf("it %0d nb/na %0d/%0d exp %0d/%0d", it, nb, na_b, e_nb, e_na));
      check(nl == vid_t'(e_nl) && fl == vid_t'(e_fl), $sformatf("it %0d nl/fl %0d/%0d exp %0d/%0d", it, nl, fl, e_nl, e_fl));
      // new frontier, then clear the old one and swap
      bad = 0; n_front = 0;
      for (int w = 0; w < NV / 32; w++) begin
        bm_op(BM_SCAN, w, 0, r);
        for (int k = 0; k < 32; k++) begin
          if (r.nxt[k] != nxt[w * 32 + k]) bad++;
          n_front += nxt[w * 32 + k];
        end
      end
      check(bad == 0, $sformatf("it %0d: %0d frontier mismatches", it, bad));
      repeat (2) @(posedge clk);
      #1 swap = 1;
      @(posedge clk); #1 swap = 0;
      for (int v = 0; v < NV; v++) begin
        cur[v] = nxt[v];
        if (nxt[v]) vis[v] = 1;
      end
      $display("iteration %0d: new frontier %0d, loops %0d/%0d/%0d", it, n_front, e_loops[0], e_loops[1], e_loops[2]);
      it++;
      if (n_front == 0 || it > 40) break;
    end
    begin
      int bad;
      bad = 0;
      for (int v = 0; v < NV; v++) if (u_ddr.peek(base_addr[ARR_DEPTH] + v) != g.depth[v]) bad++;
      check(bad == 0, $sformatf("%0d depth mismatches against BFS", bad));
    end
    for (int k = 0; k < 3; k++) check(n_loops[k] > 0, $sformatf("class %0d never ran", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
