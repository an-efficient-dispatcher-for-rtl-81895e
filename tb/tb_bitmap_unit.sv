// tb_bitmap_unit: self-checking test of the on-chip bitmap unit.
// A 1024-vertex, 3-client instance receives random operations from all
// clients at once. Each accepted operation is applied to a bit-array
// reference in acceptance order, and the reply (pre-operation words and the
// updated flag) is compared on the client's rsp_valid. Frontier banks are
// swapped between rounds while idle. It also checks that two clients
// pushing the same vertex in the same round produce exactly one update,
// and that a default-size (2^23-vertex) instance handles the top vertex.
// The expected values come from models written independently of the RTL;
// the stimulus, models and coverage targets are this testbench's own and
// are not taken from the published description of the engine.
module tb_bitmap_unit;
  import graph_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  localparam int NV = 1024, NC = 3;
  logic swap;
  logic [NC-1:0] req_valid, req_ready, rsp_valid;
  bm_req_t req [NC];
  bm_rsp_t rsp;
  logic sel_bank;

  bitmap_unit #(.MAX_V(NV), .NCLI(NC)) dut (.*);

  bit vis [NV], cur [NV], nxt [NV];
  bm_rsp_t exp_q [NC][$];
  int n_upd, n_op [8];
  bit gen_on, clr_on, chk_on;
  int clr_w;

  function automatic word_t wd(ref bit m [NV], input int w);
    word_t r;
    for (int k = 0; k < 32; k++) r[k] = m[w * 32 + k];
    return r;
  endfunction

  function automatic bm_rsp_t apply(bm_req_t q);
    bm_rsp_t r;
    int w;
    r = '0;
    w = (q.op == BM_PUSH || q.op == BM_PULL || q.op == BM_ROOT) ? int'(q.b) / 32 : int'(q.a);
    r.vis = wd(vis, w); r.cur = wd(cur, w); r.nxt = wd(nxt, w);
    case (q.op)
      BM_CLEAR: for (int k = 0; k < 32; k++) begin vis[w*32+k] = 0; cur[w*32+k] = 0; nxt[w*32+k] = 0; end
      BM_ROOT:  begin vis[q.b] = 1; cur[q.b] = 1; end
      BM_PUSH:  if (!vis[q.b]) begin vis[q.b] = 1; nxt[q.b] = 1; r.updated = 1; end
      BM_PULL:  if (cur[q.a] && !vis[q.b]) begin vis[q.b] = 1; nxt[q.b] = 1; r.updated = 1; end
      BM_SCAN:  for (int k = 0; k < 32; k++) cur[w*32+k] = 0;
      default:  ;
    endcase
    return r;
  endfunction

  function automatic bm_req_t rand_req();
    bm_req_t q;
    int p;
    q = '0;
    p = $urandom_range(0, 99);
    if (p < 2)       begin q.op = BM_CLEAR; q.a = $urandom_range(0, NV/32 - 1); end
    else if (p < 10) begin q.op = BM_ROOT;  q.b = $urandom_range(0, NV - 1); end
    else if (p < 45) begin q.op = BM_PUSH;  q.b = $urandom_range(0, NV - 1); end
    else if (p < 80) begin q.op = BM_PULL;  q.a = $urandom_range(0, NV - 1); q.b = $urandom_range(0, NV - 1); end
    else if (p < 88) begin q.op = BM_SCAN;  q.a = $urandom_range(0, NV/32 - 1); end
    else             begin q.op = BM_READ;  q.a = $urandom_range(0, NV/32 - 1); end
    return q;
  endfunction

  // clients and scoreboard
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) begin
      if (rsp_valid[c]) begin
        if (exp_q[c].size() == 0) check(0, $sformatf("unexpected reply client %0d at %0t clr_w %0d", c, $time, clr_w));
        else begin
          if (chk_on) check(rsp == exp_q[c][0], $sformatf("client %0d reply %h exp %h", c, rsp, exp_q[c][0]));
          if (rsp.updated) n_upd++;
          void'(exp_q[c].pop_front());
        end
      end
    end
    for (int c = 0; c < NC; c++) if (req_valid[c] && req_ready[c]) begin
      exp_q[c].push_back(apply(req[c]));
      n_op[req[c].op]++;
      req_valid[c] <= 1'b0;
    end
    for (int c = 0; c < NC; c++)
      if ((!req_valid[c] || req_ready[c]) && c == 0 && clr_on && clr_w < NV / 32) begin
        req[c] <= '{op: BM_CLEAR, a: clr_w, b: 0};
        req_valid[c] <= 1'b1;
        clr_w++;
      end else if ((!req_valid[c] || req_ready[c]) && gen_on && $urandom_range(0, 99) < 60) begin
        req[c] <= rand_req();
        req_valid[c] <= 1'b1;
      end
  end

  // default-size instance
  logic [0:0] b_rv, b_rr, b_sv;
  bm_req_t b_req [1];
  bm_rsp_t b_rsp;
  logic b_bank;
  bitmap_unit #(.NCLI(1)) big (.clk, .rst_n, .swap(1'b0), .req_valid(b_rv), .req_ready(b_rr),
    .req(b_req), .rsp_valid(b_sv), .rsp(b_rsp), .sel_bank(b_bank));

  task automatic big_op(bm_op_e op, vid_t a, vid_t b, output bm_rsp_t r);
    b_req[0] = '{op: op, a: a, b: b};
    b_rv = 1;
    do @(posedge clk); while (!b_rr);
    #1 b_rv = 0;
    do @(posedge clk); while (!b_sv);
    #1 r = b_rsp;
  endtask

  initial begin
    #50_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    bm_rsp_t r;
    swap = 0; gen_on = 0; clr_on = 0; chk_on = 0; clr_w = 0; req_valid = '0; b_rv = 0; b_req[0] = '0;
    for (int c = 0; c < NC; c++) req[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // clear everything first (memories start undefined)
    chk_on = 0; clr_w = 0; clr_on = 1;
    wait (clr_w == NV / 32);
    clr_on = 0;
    repeat (10) @(posedge clk);
    for (int c = 0; c < NC; c++) exp_q[c].delete();
    for (int i = 0; i < NV; i++) begin vis[i] = 0; cur[i] = 0; nxt[i] = 0; end
    chk_on = 1;
    #1;

    // same vertex pushed by all clients in the same cycle: one update
    n_upd = 0;
    for (int c = 0; c < NC; c++) begin req[c] = '{op: BM_PUSH, a: 0, b: 77}; end
    req_valid = '1;
    repeat (12) @(posedge clk);
    check(n_upd == 1, $sformatf("concurrent push updates %0d", n_upd));

    for (int round = 0; round < 40; round++) begin
      gen_on = 1;
      repeat (400) @(posedge clk);
      gen_on = 0;
      repeat (12) @(posedge clk);
      #1;
      check(req_valid == 0, "clients idle");
      begin
        bit was;
        was = sel_bank;
        swap = 1;
        @(posedge clk); #1;
        swap = 0;
        check(sel_bank != was, "bank toggles");
        for (int i = 0; i < NV; i++) begin bit t; t = cur[i]; cur[i] = nxt[i]; nxt[i] = t; end
      end
    end
    for (int c = 0; c < NC; c++) check(exp_q[c].size() == 0, "replies outstanding");
    $display("ops clear=%0d root=%0d push=%0d pull=%0d scan=%0d read=%0d updates=%0d",
             n_op[0], n_op[1], n_op[2], n_op[3], n_op[4], n_op[5], n_upd);

    // full size
    big_op(BM_CLEAR, (1 << 18) - 1, 0, r);
    big_op(BM_PUSH, 0, (1 << 23) - 1, r); check(r.updated, "top vertex push");
    big_op(BM_PUSH, 0, (1 << 23) - 1, r); check(!r.updated && r.vis[31], "top vertex visited");
    big_op(BM_READ, (1 << 18) - 1, 0, r); check(r.nxt == 32'h8000_0000, "top vertex next");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
