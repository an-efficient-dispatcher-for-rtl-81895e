// tb_state_analyzer: self-checking test of the state analyzer.
// The bitmap is the behavioural tb_bm_model. For random vertex counts
// (including 0 and non-multiples of 32) random visited / next-frontier bits
// are set below the count; after start the testbench waits for done and
// compares Na (next-frontier population) and Ni (unvisited vertices) with
// counts made directly on the model. It also checks that every scanned word
// had its current-frontier bits cleared and that exactly ceil(N/32) scan
// operations were issued.
// The expected values come from models written independently of the RTL;
// the stimulus, models and coverage targets are this testbench's own and
// are not taken from the published description of the engine.
module tb_state_analyzer;
  import graph_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  localparam int NV = 1024;
  logic start, done, bm_valid, bm_ready, bm_rsp_valid;
  vid_t num_vertices, na, ni;
  bm_req_t bm_req;
  bm_rsp_t bm_rsp;

  state_analyzer dut (.*);
  tb_bm_model #(.NV(NV)) u_bm (.clk, .rst_n, .bm_valid, .bm_ready, .bm_req,
    .rsp_valid(bm_rsp_valid), .rsp(bm_rsp));

  initial begin
    #50_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    start = 0; num_vertices = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int n, e_na, e_vis, ops0, dens;
      n = (t == 0) ? 0 : (t == 1) ? NV : (t == 2) ? 1 : $urandom_range(1, NV);
      dens = $urandom_range(0, 100);
      e_na = 0; e_vis = 0;
      for (int i = 0; i < NV; i++) begin
        bit v, x;
        v = (i < n) && ($urandom_range(0, 99) < dens);
        x = v && ($urandom_range(0, 1) == 1);
        u_bm.vis[i] = v; u_bm.nxt[i] = x; u_bm.cur[i] = (i < n) && $urandom_range(0, 1);
        e_vis += v; e_na += x;
      end
      ops0 = u_bm.n_ops;
      num_vertices = n;
      @(posedge clk); #1 start = 1;
      @(posedge clk); #1 start = 0;
      while (!done) begin @(posedge clk); #1; end
      check(na == vid_t'(e_na), $sformatf("n=%0d na %0d exp %0d", n, na, e_na));
      check(ni == vid_t'(n - e_vis), $sformatf("n=%0d ni %0d exp %0d", n, ni, n - e_vis));
      check(int'(u_bm.n_ops) - ops0 == (n + 31) / 32, $sformatf("scan ops %0d", int'(u_bm.n_ops) - ops0));
      begin
        int left;
        left = 0;
        for (int i = 0; i < n; i++) left += u_bm.cur[i];
        check(left == 0, "current frontier not cleared by scan");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
