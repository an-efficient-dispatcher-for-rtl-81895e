// tb_edge_pipeline: self-checking test of the edge-block pipeline.
// Three instances run in parallel, one per block group: 16 threads (small
// blocks, 1..63 edges), 64 threads (middle, 64..2048) and 256 threads
// (large, over 2048). Each has its own behavioural memory (tb_mem_model)
// and bitmap (tb_bm_model). For every random block the testbench writes
// the block's edges, random frontier / visited bits, and predicts which
// destinations get updated. It checks the new depths in DDR (level + 1, and
// no other depth touched), the bitmap state, the returned active / accessed
// flags, the loop count ceil(count / THREADS) and the edge count. A halt
// descriptor at the end must be counted and produce no result.
// The expected values come from models written independently of the RTL;
// the stimulus, models and coverage targets are this testbench's own and
// are not taken from the published description of the engine.
module tb_edge_pipeline;
  import graph_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  localparam int NV = 1024, VPB = 8, NUMV = 1000;
  localparam int   THR [3] = '{16, 64, 256};
  localparam grp_e GRP [3] = '{GRP_SMALL, GRP_MIDDLE, GRP_LARGE};
  localparam int   LO  [3] = '{1, SMALL_LIMIT, MIDDLE_LIMIT + 1};
  localparam int   HI  [3] = '{SMALL_LIMIT - 1, MIDDLE_LIMIT, 3000};

  logic [DEPTH_W-1:0] level;
  int lanes_done = 0;

  initial begin
    #200_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  for (genvar g = 0; g < 3; g++) begin : g_lane
    logic desc_valid, desc_ready, res_valid, res_ready;
    blk_desc_t desc;
    blk_res_t res;
    logic mem_valid, mem_ready, mem_rsp_valid, bm_valid, bm_ready, bm_rsp_valid;
    mem_req_t mem_req;
    word_t mem_rsp_data;
    bm_req_t bm_req;
    bm_rsp_t bm_rsp;
    logic [31:0] n_blocks, n_edges, n_loops, n_updates, n_halts;

    edge_pipeline #(.THREADS(THR[g]), .VPB(VPB), .GROUP(GRP[g])) dut (
      .clk, .rst_n, .level, .num_vertices(NUMV),
      .desc_valid, .desc_ready, .desc, .res_valid, .res_ready, .res,
      .mem_valid, .mem_ready, .mem_req, .mem_rsp_valid, .mem_rsp_data,
      .bm_valid, .bm_ready, .bm_req, .bm_rsp_valid, .bm_rsp,
      .n_blocks, .n_edges, .n_loops, .n_updates, .n_halts);
    tb_mem_model #(.LATENCY(3 + g), .STALL_PCT(20)) u_mem (.clk, .rst_n, .mem_valid, .mem_ready,
      .mem_req, .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));
    tb_bm_model #(.NV(NV)) u_bm (.clk, .rst_n, .bm_valid, .bm_ready, .bm_req,
      .rsp_valid(bm_rsp_valid), .rsp(bm_rsp));

    always @(posedge clk) res_ready <= ($urandom_range(0, 99) < 70);

    task automatic send(blk_desc_t d);
      #1 desc = d; desc_valid = 1;
      do @(negedge clk); while (!desc_ready);
      @(posedge clk); #1 desc_valid = 0;
    endtask

    initial begin
      desc_valid = 0; desc = '0;
      wait (rst_n);
      repeat (2) @(posedge clk);
      for (int t = 0; t < 12; t++) begin
        int c, b, start, exp_upd, l0, e0, u0, b0;
        bit exp_vis [NV], old_vis [NV];
        bit exp_act, exp_acc;
        c = (t == 0) ? LO[g] : (t == 1) ? HI[g] : $urandom_range(LO[g], HI[g]);
        b = $urandom_range(0, NUMV / VPB);          // last block is partly past NUMV
        start = $urandom_range(0, 5000);
        // bitmap state: current frontier bits are always visited
        for (int i = 0; i < NV; i++) begin
          u_bm.cur[i] = (i < NUMV) && ($urandom_range(0, 99) < 30);
          u_bm.vis[i] = u_bm.cur[i] || ((i < NUMV) && ($urandom_range(0, 99) < 30));
          u_bm.nxt[i] = 0;
          exp_vis[i] = u_bm.vis[i];
          old_vis[i] = u_bm.vis[i];
          u_mem.put(ARR_DEPTH, i, 255);
        end
        exp_upd = 0;
        for (int e = 0; e < c; e++) begin
          int s, d;
          s = $urandom_range(0, NUMV - 1);
          do d = b * VPB + $urandom_range(0, VPB - 1); while (d >= NUMV);
          u_mem.put(ARR_ESRC, start + e, s);
          u_mem.put(ARR_EDST, start + e, d);
          if (u_bm.cur[s] && !exp_vis[d]) begin exp_vis[d] = 1; exp_upd++; end
        end
        exp_acc = exp_upd > 0;
        exp_act = 0;
        for (int k = 0; k < VPB; k++) if (b * VPB + k < NUMV && !exp_vis[b * VPB + k]) exp_act = 1;
        l0 = n_loops; e0 = n_edges; u0 = n_updates; b0 = n_blocks;
        fork
          send('{halt: 1'b0, blk: b, start: start, count: c});
          begin
            do @(negedge clk); while (!(res_valid && res_ready));
            check(res.blk == vid_t'(b) && res.grp == GRP[g], "result id");
            check(res.active == exp_act, $sformatf("g%0d active %0d exp %0d", g, res.active, exp_act));
            check(res.accessed == exp_acc, $sformatf("g%0d accessed", g));
          end
        join
        repeat (2) @(posedge clk);
        check(n_loops - l0 == (c + THR[g] - 1) / THR[g],
              $sformatf("g%0d c=%0d loops %0d exp %0d", g, c, n_loops - l0, (c + THR[g] - 1) / THR[g]));
        check(n_edges - e0 == c, "edge count");
        check(n_updates - u0 == exp_upd, $sformatf("g%0d updates %0d exp %0d", g, n_updates - u0, exp_upd));
        check(n_blocks - b0 == 1, "block count");
        begin
          int bad;
          bad = 0;
          for (int i = 0; i < NV; i++) begin
            bit newly;
            newly = exp_vis[i] && !old_vis[i];
            if (u_bm.vis[i] != exp_vis[i]) bad++;
            if (u_bm.nxt[i] != newly) bad++;
            if (u_mem.get(ARR_DEPTH, i) != (u_bm.nxt[i] ? word_t'(level) + 1 : 255)) bad++;
          end
          check(bad == 0, $sformatf("g%0d %0d state mismatches", g, bad));
        end
      end
      // halt descriptor: counted, no result
      begin
        int h0;
        h0 = n_halts;
        send('{halt: 1'b1, blk: 0, start: 0, count: 0});
        repeat (30) begin
          @(posedge clk);
          check(!res_valid, "halt produced a result");
        end
        check(n_halts == h0 + 1, "halt counted");
      end
      lanes_done++;
    end
  end

  initial begin
    level = 8'd3;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (lanes_done == 3);
    $display("loops small=%0d middle=%0d large=%0d", g_lane[0].n_loops, g_lane[1].n_loops, g_lane[2].n_loops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
