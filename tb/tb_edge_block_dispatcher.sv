// tb_edge_block_dispatcher: self-checking test of the edge-block dispatcher.
// 300 blocks with random edge counts across the three classes (including
// the 63/64 and 2048/2049 boundaries) are placed in a behavioural memory.
// Three stand-in pipelines accept descriptors with random back-pressure and
// return results after random delays with random active / accessed flags.
// Over eight iterations the testbench checks: only blocks still active are
// dispatched, in increasing order per class, with the right class, first
// edge and count; one halt per class closes each stream; done comes after
// the last result; and the statistics Nb, Na, Nl, Fl and per-class counts
// match. A block reported inactive must never be dispatched again.
// The expected values come from models written independently of the RTL;
// the stimulus, models and coverage targets are this testbench's own and
// are not taken from the published description of the engine.
module tb_edge_block_dispatcher;
  import graph_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  localparam int MB = 512, NBLK = 300;
  logic init, start, busy, done;
  vid_t num_blocks;
  logic mem_valid, mem_ready, mem_rsp_valid;
  mem_req_t mem_req;
  word_t mem_rsp_data;
  logic [2:0] out_valid, out_ready, res_valid, res_ready;
  blk_desc_t out_desc;
  blk_res_t res [3];
  vid_t nb, na_b, nl, fl, n_disp [3];

  edge_block_dispatcher #(.MAX_BLOCKS(MB)) dut (.*);
  tb_mem_model #(.LATENCY(4), .STALL_PCT(25)) u_mem (.clk, .rst_n, .mem_valid, .mem_ready,
    .mem_req, .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  int   cnt [NBLK], st [NBLK];
  bit   act [NBLK];
  bit   running;
  int   e_nb, e_na, e_nl, e_fl, e_disp [3], halts [3], last_blk [3], n_res_pending;
  blk_res_t pend [3][$];
  int   pend_due [3][$];
  int   cyc;
  bit   act_next [NBLK];

  always @(posedge clk) cyc++;

  // stand-in pipelines
  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < 3; g++) begin
      if (out_valid[g] && out_ready[g]) begin
        check(running, "descriptor outside an iteration");
        if (out_desc.halt) begin
          halts[g]++;
        end else begin
          int b;
          blk_res_t r;
          b = out_desc.blk;
          check(halts[g] == 0, "descriptor after halt");
          check(b < NBLK && act[b], $sformatf("inactive block %0d dispatched", b));
          check(b > last_blk[g], "increasing block order");
          last_blk[g] = b;
          check(int'(classify(out_desc.count)) == g, $sformatf("block %0d count %0d sent to %0d", b, out_desc.count, g));
          check(out_desc.count == vid_t'(cnt[b]) && out_desc.start == vid_t'(st[b]), "descriptor fields");
          r.blk = b; r.grp = grp_e'(g);
          r.active = ($urandom_range(0, 99) < 70);
          r.accessed = ($urandom_range(0, 1) == 1);
          act_next[b] = r.active;
          e_disp[g]++;
          if (g == 2) begin e_nl++; e_fl += r.accessed; end
          else begin e_nb++; e_na += r.active; end
          pend[g].push_back(r);
          pend_due[g].push_back(cyc + $urandom_range(1, 40));
          n_res_pending++;
        end
      end
      if (res_valid[g] && res_ready[g]) begin
        void'(pend[g].pop_front());
        void'(pend_due[g].pop_front());
        n_res_pending--;
      end
      out_ready[g] <= ($urandom_range(0, 99) < 60);
    end
  end
  for (genvar g = 0; g < 3; g++) begin : g_res
    assign res_valid[g] = (pend[g].size() > 0) && (pend_due[g][0] <= cyc);
    assign res[g] = (pend[g].size() > 0) ? pend[g][0] : '0;
  end

  initial begin
    #500_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int s;
    init = 0; start = 0; num_blocks = NBLK; running = 0; cyc = 0;
    s = 0;
    for (int b = 0; b < NBLK; b++) begin
      case (b)
        3: cnt[b] = SMALL_LIMIT - 1;
        4: cnt[b] = SMALL_LIMIT;
        5: cnt[b] = MIDDLE_LIMIT;
        6: cnt[b] = MIDDLE_LIMIT + 1;
        default: cnt[b] = ($urandom_range(0, 9) < 6) ? $urandom_range(1, 63) :
                          ($urandom_range(0, 2) < 2) ? $urandom_range(64, 2048) : $urandom_range(2049, 5000);
      endcase
      st[b] = s; s += cnt[b];
      u_mem.put(ARR_BSTART, b, st[b]);
      u_mem.put(ARR_BCOUNT, b, cnt[b]);
      act[b] = 1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1 init = 1;
    @(posedge clk); #1 init = 0;
    while (busy) begin @(posedge clk); #1; end
    for (int it = 0; it < 8; it++) begin
      int n_act, n_done;
      e_nb = 0; e_na = 0; e_nl = 0; e_fl = 0; n_res_pending = 0;
      n_act = 0;
      for (int g = 0; g < 3; g++) begin e_disp[g] = 0; halts[g] = 0; last_blk[g] = -1; end
      for (int b = 0; b < NBLK; b++) begin act_next[b] = act[b]; n_act += act[b]; end
      running = 1;
      start = 1;
      @(posedge clk); #1 start = 0;
      n_done = 0;
      while (!done) begin @(posedge clk); #1; end
      check(n_res_pending == 0, "done before all results");
      for (int g = 0; g < 3; g++) check(halts[g] == 1, $sformatf("class %0d halts %0d", g, halts[g]));
      check(e_disp[0] + e_disp[1] + e_disp[2] == n_act, $sformatf("dispatched %0d of %0d active",
            e_disp[0] + e_disp[1] + e_disp[2], n_act));
      check(nb == vid_t'(e_nb) && na_b == vid_t'(e_na), $sformatf("nb/na %0d/%0d exp %0d/%0d", nb, na_b, e_nb, e_na));
      check(nl == vid_t'(e_nl) && fl == vid_t'(e_fl), $sformatf("nl/fl %0d/%0d exp %0d/%0d", nl, fl, e_nl, e_fl));
      for (int g = 0; g < 3; g++) check(n_disp[g] == vid_t'(e_disp[g]), "n_disp");
      $display("iteration %0d: active %0d, small %0d middle %0d large %0d", it, n_act, e_disp[0], e_disp[1], e_disp[2]);
      running = 0;
      for (int b = 0; b < NBLK; b++) act[b] = act_next[b];
      repeat ($urandom_range(1, 5)) @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
