// tb_pipe_fifo: self-checking test of the pipe FIFO.
// A DEPTH=4 instance is driven with random pushes and pops. A queue
// scoreboard checks data order, that in_ready drops exactly when the FIFO is
// full and not being read, that out_valid matches non-empty, that count
// equals the scoreboard size, and that full_events counts refused pushes.
// A second instance at the default depth (64) is filled and drained once.
// The expected values come from models written independently of the RTL;
// the stimulus, models and coverage targets are this testbench's own and
// are not taken from the published description of the engine.
module tb_pipe_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  localparam int D = 4;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  logic [31:0] full_events;

  pipe_fifo #(.T(logic [15:0]), .DEPTH(D)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .count, .full_events);

  logic d_iv, d_ir, d_ov, d_or;
  logic [31:0] d_id, d_od;
  logic [6:0] d_cnt;
  logic [31:0] d_full;
  pipe_fifo dut64 (
    .clk, .rst_n, .in_valid(d_iv), .in_ready(d_ir), .in_data(d_id),
    .out_valid(d_ov), .out_ready(d_or), .out_data(d_od), .count(d_cnt), .full_events(d_full));

  logic [15:0] sb [$];
  int refused = 0;
  int pushes = 0, pops = 0;

  initial begin
    #2_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    d_iv = 0; d_or = 0; d_id = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      // phase-dependent bias so the FIFO runs both full and empty
      int pin, pout;
      pin  = ((cyc / 500) % 2) ? 80 : 30;
      pout = ((cyc / 500) % 2) ? 30 : 80;
      in_valid  = ($urandom_range(0, 99) < pin);
      in_data   = 16'($urandom);
      out_ready = ($urandom_range(0, 99) < pout);
      #1;
      check(count == sb.size(), $sformatf("count %0d vs %0d", count, sb.size()));
      check(out_valid == (sb.size() > 0), "out_valid");
      check(in_ready == (sb.size() < D || out_ready), "in_ready");
      if (out_valid && sb.size() > 0) check(out_data == sb[0], "data order");
      @(posedge clk);
      if (out_valid && out_ready) begin void'(sb.pop_front()); pops++; end
      if (in_valid && in_ready) begin sb.push_back(in_data); pushes++; end
      if (in_valid && !in_ready) refused++;
      #1;
      check(full_events == refused, "full_events");
    end
    $display("pushes=%0d pops=%0d refused=%0d", pushes, pops, refused);
    check(refused > 0, "FIFO never ran full");

    // default-depth instance: fill to 64, then drain
    for (int i = 0; i < 70; i++) begin
      d_iv = 1; d_id = 32'(i * 7);
      @(posedge clk); #1;
    end
    d_iv = 0;
    check(d_cnt == 64, $sformatf("default depth fill %0d", d_cnt));
    check(d_full == 6, $sformatf("default depth refused %0d", d_full));
    for (int i = 0; i < 64; i++) begin
      d_or = 1;
      check(d_ov && d_od == 32'(i * 7), "default depth order");
      @(posedge clk); #1;
    end
    d_or = 0;
    check(!d_ov && d_cnt == 0, "default depth empty");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
