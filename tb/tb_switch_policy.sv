// tb_switch_policy: self-checking test of the module-switch policy.
// Directed cases first exercise every rule once (hub, eq. (1), eqs. (2)+(3)
// switch now, eq. (2) alone deferred, deferred switch carried out, no
// switch, empty denominators). Then 20000 random evaluations are compared
// with a reference model written with real-valued ratios. Thresholds are
// 8.8 fixed point.
// The expected values come from models written independently of the RTL;
// the stimulus, models and coverage targets are this testbench's own and
// are not taken from the published description of the engine.
module tb_switch_policy;
  import graph_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic init, eval, hub_seen;
  mode_e init_mode, mode;
  logic [TUNE_W-1:0] alpha, beta, gamma;
  vid_t na_v, ni_v, na_b, nb, fl, nl;
  logic pending, ev_hub, ev_alpha, ev_now, ev_defer, ev_deferred;

  switch_policy dut (.*);

  // reference state
  mode_e r_mode;
  bit    r_pend;
  int    n_ev [5];

  function automatic bit gt(real num, real den, logic [TUNE_W-1:0] t);
    return num / den > real'(t) / 256.0;
  endfunction
  function automatic bit lt(real num, real den, logic [TUNE_W-1:0] t);
    return num / den < real'(t) / 256.0;
  endfunction

  task automatic do_eval(output bit [4:0] exp_ev);
    bit f1, f2, f3;
    exp_ev = '0;
    f1 = (ni_v == 0) ? (na_v != 0) : gt(real'(na_v), real'(ni_v), alpha);
    f2 = (nb == 0) || lt(real'(na_b), real'(nb), beta);
    f3 = (nl == 0) || gt(real'(fl), real'(nl), gamma);
    if (r_mode == MODE_LOW) begin
      if (hub_seen) begin r_mode = MODE_HIGH; exp_ev[0] = 1; end
      else if (f1)  begin r_mode = MODE_HIGH; exp_ev[1] = 1; end
    end else begin
      if (r_pend)        begin r_mode = MODE_LOW; r_pend = 0; exp_ev[4] = 1; end
      else if (f2 && f3) begin r_mode = MODE_LOW; exp_ev[2] = 1; end
      else if (f2)       begin r_pend = 1; exp_ev[3] = 1; end
    end
    eval = 1;
    @(posedge clk); #1;
    eval = 0;
    for (int k = 0; k < 5; k++) if (exp_ev[k]) n_ev[k]++;
    check(mode == r_mode, $sformatf("mode %s exp %s", mode.name(), r_mode.name()));
    check(pending == r_pend, "pending");
    check({ev_deferred, ev_defer, ev_now, ev_alpha, ev_hub} == exp_ev,
          $sformatf("events %b exp %b", {ev_deferred, ev_defer, ev_now, ev_alpha, ev_hub}, exp_ev));
  endtask

  task automatic do_init(mode_e m);
    init = 1; init_mode = m;
    @(posedge clk); #1;
    init = 0;
    r_mode = m; r_pend = 0;
    check(mode == m && !pending, "init");
  endtask

  initial begin
    #5_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    bit [4:0] e;
    init = 0; eval = 0; hub_seen = 0; init_mode = MODE_LOW;
    alpha = 16'h0100; beta = 16'h0080; gamma = 16'h0040;
    {na_v, ni_v, na_b, nb, fl, nl} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    check(mode == MODE_LOW, "reset mode");
    r_mode = MODE_LOW; r_pend = 0;

    // low, nothing holds: stays low
    na_v = 10; ni_v = 100; do_eval(e); check(e == 0 && mode == MODE_LOW, "stay low");
    // hub forces high
    hub_seen = 1; do_eval(e); check(e[0], "hub"); hub_seen = 0;
    // high: Na/Nb = 0.75 > beta 0.5 -> stay high
    na_b = 75; nb = 100; fl = 1; nl = 100; do_eval(e); check(e == 0 && mode == MODE_HIGH, "stay high");
    // Na/Nb = 0.25 < 0.5, Fl/Nl = 0.01 < 0.25 -> deferred
    na_b = 25; do_eval(e); check(e[3] && pending, "defer");
    // next evaluation carries it out regardless of the statistics
    na_b = 99; do_eval(e); check(e[4] && mode == MODE_LOW, "deferred");
    // low: Na/Ni = 2 > alpha 1.0 -> high
    na_v = 200; ni_v = 100; do_eval(e); check(e[1], "alpha");
    // high: both hold -> low now
    na_b = 10; fl = 50; do_eval(e); check(e[2], "now");
    // empty denominators
    do_init(MODE_LOW); na_v = 1; ni_v = 0; do_eval(e); check(e[1], "ni=0");
    nb = 0; nl = 0; na_b = 0; do_eval(e); check(e[2], "nb=nl=0");
    do_init(MODE_HIGH); check(mode == MODE_HIGH, "init high");

    for (int i = 0; i < 20000; i++) begin
      if ($urandom_range(0, 199) == 0) do_init(mode_e'($urandom_range(0, 1)));
      alpha = 16'($urandom_range(1, 1024));
      beta  = 16'($urandom_range(1, 512));
      gamma = 16'($urandom_range(1, 512));
      hub_seen = ($urandom_range(0, 9) == 0);
      nb   = $urandom_range(0, 2000);
      na_b = (nb == 0) ? 0 : $urandom_range(0, nb);
      nl   = $urandom_range(0, 300);
      fl   = (nl == 0) ? 0 : $urandom_range(0, nl);
      ni_v = $urandom_range(0, 100000);
      na_v = $urandom_range(0, 100000);
      do_eval(e);
    end
    $display("events hub=%0d alpha=%0d now=%0d defer=%0d deferred=%0d",
             n_ev[0], n_ev[1], n_ev[2], n_ev[3], n_ev[4]);
    for (int k = 0; k < 5; k++) check(n_ev[k] > 0, $sformatf("event %0d never seen", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
