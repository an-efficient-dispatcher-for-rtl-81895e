// tb_processing_dispatcher: self-checking test of the processing dispatcher
// (the iteration controller with its switch policy).
// The bitmap is tb_bm_model; the low unit, high unit and state analyzer are
// stand-ins written in the testbench. At the end of each iteration the
// stand-in of the running module marks a random set of unvisited vertices
// as the next frontier and, for the high module, returns random block
// statistics; the low stand-in raises hub_seen at random. The state
// analyzer stand-in counts Na and Ni on the bitmap model. The testbench
// keeps its own model of the switch rules and checks: bitmap clearing and
// root set-up, the root depth write, that each iteration runs in the
// predicted module, that the low module receives exactly the current
// frontier in increasing order followed by one halt, the level count, the
// iteration counters and the end of the run when no vertex is active.
// The expected values come from models written independently of the RTL;
// the stimulus, models and coverage targets are this testbench's own and
// are not taken from the published description of the engine.
module tb_processing_dispatcher;
  import graph_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  localparam int NV = 1024, N = 1000;
  logic start, start_high, busy, done;
  vid_t root, num_vertices;
  logic [TUNE_W-1:0] alpha, beta, gamma;
  mode_e mode;
  logic [DEPTH_W-1:0] level;
  logic bm_valid, bm_ready, bm_rsp_valid, bm_swap;
  bm_req_t bm_req;
  bm_rsp_t bm_rsp;
  logic mem_valid, mem_ready;
  mem_req_t mem_req;
  logic iter_start, vtx_valid, vtx_ready, vp_done, hub_seen;
  vtx_tok_t vtx_tok;
  logic hp_init, hp_start, hp_busy, hp_done;
  vid_t na_b, nb, fl, nl;
  logic sa_start, sa_done;
  vid_t na_v, ni_v;
  logic [31:0] n_iter_low, n_iter_high, n_ev_hub, n_ev_alpha, n_ev_now, n_ev_defer, n_ev_deferred;

  processing_dispatcher dut (.*);
  tb_bm_model #(.NV(NV)) u_bm (.clk, .rst_n, .bm_valid, .bm_ready, .bm_req,
    .rsp_valid(bm_rsp_valid), .rsp(bm_rsp));

  always @(posedge clk) if (bm_swap) u_bm.swap_banks();

  // ---- DDR write port ----
  int root_writes;
  always @(posedge clk) begin
    mem_ready <= ($urandom_range(0, 99) < 70);
    if (mem_valid && mem_ready) begin
      check(mem_req.we && mem_req.arr == ARR_DEPTH && mem_req.idx == root && mem_req.wdata == 0,
            "root depth write");
      root_writes++;
    end
  end

  // ---- reference ----
  mode_e r_mode;
  bit    r_pend;
  int    iter, n_low, n_high, n_halt;
  bit    in_low, in_high;
  int    tokens [$];
  int    n_hub, n_alpha, n_now, n_defer, n_deferred;

  function automatic void grow(int k);
    for (int i = 0; i < k; i++) begin
      int v;
      v = $urandom_range(0, N - 1);
      if (!u_bm.vis[v]) begin u_bm.vis[v] = 1; u_bm.nxt[v] = 1; end
    end
  endfunction

  function automatic int grow_size();
    return (iter >= 14) ? 0 : (iter < 10) ? $urandom_range(1, 80) : $urandom_range(0, 20);
  endfunction

  // ---- low unit stand-in ----
  always @(posedge clk) begin
    vp_done <= 1'b0;
    vtx_ready <= ($urandom_range(0, 99) < 75);
    if (iter_start) begin
      hub_seen <= 1'b0;
      tokens.delete();
    end
    if (vtx_valid && vtx_ready) begin
      check(in_low, "token outside a low iteration");
      check(level == DEPTH_W'(iter), "level during low iteration");
      if (vtx_tok.halt) begin
        n_halt++;
        grow(grow_size());
        hub_seen <= ($urandom_range(0, 4) == 0);
        vp_done <= 1'b1;
      end else tokens.push_back(vtx_tok.v);
    end
  end

  // ---- high unit stand-in ----
  int hp_busy_cnt;
  assign hp_busy = hp_busy_cnt != 0;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hp_busy_cnt <= 0; hp_done <= 0; nb <= 0; na_b <= 0; nl <= 0; fl <= 0;
    end else begin
      hp_done <= 1'b0;
      if (hp_init) hp_busy_cnt <= 4;
      else if (hp_start) begin
        check(in_high, "hp_start outside a high iteration");
        hp_busy_cnt <= $urandom_range(3, 30);
      end else if (hp_busy_cnt == 1 && in_high) begin
        vid_t b, l;
        grow(grow_size());
        b = $urandom_range(0, 200); l = $urandom_range(0, 20);
        nb <= b; na_b <= (b == 0) ? 0 : $urandom_range(0, b);
        nl <= l; fl <= (l == 0) ? 0 : $urandom_range(0, l);
        hp_done <= 1'b1;
        hp_busy_cnt <= 0;
      end else if (hp_busy_cnt != 0) hp_busy_cnt <= hp_busy_cnt - 1;
    end
  end

  // ---- state analyzer stand-in ----
  int sa_cnt;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin sa_cnt <= 0; sa_done <= 0; na_v <= 0; ni_v <= 0; end
    else begin
      sa_done <= 1'b0;
      if (sa_start) sa_cnt <= $urandom_range(2, 10);
      else if (sa_cnt == 1) begin
        int a, vis;
        a = 0; vis = 0;
        for (int v = 0; v < N; v++) begin a += u_bm.nxt[v]; vis += u_bm.vis[v]; u_bm.cur[v] = 0; end
        na_v <= a; ni_v <= N - vis;
        sa_done <= 1'b1;
        sa_cnt <= 0;
      end else if (sa_cnt != 0) sa_cnt <= sa_cnt - 1;
    end
  end

  initial begin
    #900_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic run(int unsigned rt, bit sh, logic [TUNE_W-1:0] a, b, c);
    int ops0;
    root = rt; start_high = sh; alpha = a; beta = b; gamma = c; num_vertices = N;
    for (int v = 0; v < NV; v++) begin u_bm.vis[v] = 1; u_bm.cur[v] = 1; u_bm.nxt[v] = 1; end
    r_mode = sh ? MODE_HIGH : MODE_LOW; r_pend = 0;
    iter = 0; n_low = 0; n_high = 0; n_halt = 0; root_writes = 0;
    n_hub = 0; n_alpha = 0; n_now = 0; n_defer = 0; n_deferred = 0;
    ops0 = u_bm.n_ops;
    #1 start = 1;
    @(posedge clk); #1 start = 0;
    // wait for the first iteration
    while (!iter_start) begin @(posedge clk); #1; end
    begin
      int set;
      set = 0;
      for (int v = 0; v < NV; v++) set += u_bm.vis[v] + u_bm.nxt[v];
      check(set == 1 && u_bm.vis[rt] && u_bm.cur[rt], "bitmap cleared and root set");
      check(u_bm.n_ops - ops0 == (N + 31) / 32 + 1, "clear + root operations");
      check(root_writes == 1, "one root depth write");
    end
    while (1) begin
      int exp_tok [$];
      bit f1, f2, f3, ended;
      mode_e ran;
      for (int v = 0; v < N; v++) if (u_bm.cur[v]) exp_tok.push_back(v);
      ran = r_mode;
      check(mode == r_mode, $sformatf("iteration %0d mode %s exp %s", iter, mode.name(), r_mode.name()));
      check(level == DEPTH_W'(iter), "level");
      in_low = (r_mode == MODE_LOW); in_high = (r_mode == MODE_HIGH);
      if (in_low) n_low++; else n_high++;
      // wait for policy evaluation (bm_swap marks it)
      while (!bm_swap) begin @(posedge clk); #1; end
      if (ran == MODE_LOW) check(tokens == exp_tok && n_halt == n_low,
                                 $sformatf("iteration %0d: %0d tokens exp %0d", iter, tokens.size(), exp_tok.size()));
      // reference policy with the statistics just produced
      f1 = (ni_v == 0) ? (na_v != 0) : (longint'(na_v) * 256 > longint'(alpha) * longint'(ni_v));
      f2 = (nb == 0) || (longint'(na_b) * 256 < longint'(beta) * longint'(nb));
      f3 = (nl == 0) || (longint'(fl) * 256 > longint'(gamma) * longint'(nl));
      if (r_mode == MODE_LOW) begin
        if (hub_seen) begin r_mode = MODE_HIGH; n_hub++; end
        else if (f1) begin r_mode = MODE_HIGH; n_alpha++; end
      end else begin
        if (r_pend) begin r_mode = MODE_LOW; r_pend = 0; n_deferred++; end
        else if (f2 && f3) begin r_mode = MODE_LOW; n_now++; end
        else if (f2) begin r_pend = 1; n_defer++; end
      end
      ended = (na_v == 0);
      in_low = 0; in_high = 0;
      iter++;
      if (ended) begin
        while (!done) begin @(posedge clk); #1; end
        break;
      end
      while (!iter_start) begin @(posedge clk); #1; end
    end
    check(n_iter_low == n_low && n_iter_high == n_high, "iteration counters");
    check(n_ev_hub == n_hub && n_ev_alpha == n_alpha && n_ev_now == n_now &&
          n_ev_defer == n_defer && n_ev_deferred == n_deferred, "event counters");
    $display("run root %0d: %0d iterations (%0d low, %0d high) hub %0d alpha %0d now %0d defer %0d deferred %0d",
             rt, iter, n_low, n_high, n_hub, n_alpha, n_now, n_defer, n_deferred);
    repeat (3) @(posedge clk);
    #1 check(!busy, "idle after done");
  endtask

  initial begin
    int tot_low, tot_high;
    start = 0; hub_seen = 0; vtx_ready = 0; mem_ready = 0;
    root = 0; start_high = 0; alpha = 0; beta = 0; gamma = 0; num_vertices = N;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    tot_low = 0; tot_high = 0;
    for (int r = 0; r < 12; r++) begin
      run($urandom_range(0, N - 1), r % 3 == 2, 16'($urandom_range(4, 64)),
          16'($urandom_range(32, 256)), 16'($urandom_range(16, 256)));
      tot_low += n_low; tot_high += n_high;
    end
    check(tot_low > 0 && tot_high > 0, "both modules used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
