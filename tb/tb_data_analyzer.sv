// tb_data_analyzer: self-checking test of the DDR data analyzer.
// Six clients issue random reads and writes to random arrays. The DDR side
// is the behavioural ddr_model (random latency-free stalls, in-order
// replies). The testbench checks that every DDR address equals
// base_addr[array] + index, that each read reply reaches the client that
// issued it with the data stored at that address, that replies per client
// come back in issue order, and that acc_count counts accesses per array.
// A second phase holds all clients valid to check round-robin fairness.
// The expected values come from models written independently of the RTL;
// the stimulus, models and coverage targets are this testbench's own and
// are not taken from the published description of the engine.
module tb_data_analyzer;
  import graph_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  localparam int NC = 6;
  addr_t    base_addr [NUM_ARR];
  logic     [NC-1:0] req_valid, req_ready, rsp_valid;
  mem_req_t req [NC];
  word_t    rsp_data;
  logic     ddr_req_valid, ddr_req_ready, ddr_rsp_valid;
  ddr_req_t ddr_req;
  word_t    ddr_rsp_data;
  logic [31:0] acc_count [NUM_ARR];

  data_analyzer dut (.*);
  ddr_model #(.LATENCY(5), .STALL_PCT(25)) u_ddr (
    .clk, .rst_n, .req_valid(ddr_req_valid), .req_ready(ddr_req_ready), .req(ddr_req),
    .rsp_valid(ddr_rsp_valid), .rsp_data(ddr_rsp_data));

  word_t shadow [addr_t];      // expected DDR contents
  word_t exp_q [NC][$];        // expected read data per client
  int    exp_acc [NUM_ARR];
  int    n_rsp [NC];
  int    grants [NC];
  bit    measure;

  initial begin
    #20_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // DDR-side check: the request is forwarded in the cycle it is granted
  always @(posedge clk) if (rst_n) begin
    check($countones(req_ready) <= 1, "one grant per cycle");
    for (int c = 0; c < NC; c++) if (req_valid[c] && req_ready[c]) begin
      check(ddr_req_valid && ddr_req_ready, "grant without DDR accept");
      check(ddr_req.addr == base_addr[req[c].arr] + req[c].idx, $sformatf("ddr addr %h", ddr_req.addr));
      check(ddr_req.we == req[c].we && (!req[c].we || ddr_req.wdata == req[c].wdata), "ddr we/wdata");
    end
  end

  // reply check
  always @(posedge clk) if (rst_n) begin
    check($countones(rsp_valid) <= 1, "rsp_valid one-hot");
    for (int c = 0; c < NC; c++) if (rsp_valid[c]) begin
      n_rsp[c]++;
      if (exp_q[c].size() == 0) check(0, $sformatf("unexpected reply to %0d", c));
      else begin
        check(rsp_data == exp_q[c][0], $sformatf("client %0d data %h exp %h", c, rsp_data, exp_q[c][0]));
        void'(exp_q[c].pop_front());
      end
    end
  end

  // client drivers
  for (genvar c = 0; c < NC; c++) begin : g_cli
    always @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        req_valid[c] <= 1'b0;
        req[c] <= '0;
      end else begin
        if (req_valid[c] && req_ready[c]) begin
          addr_t a;
          a = base_addr[req[c].arr] + req[c].idx;
          exp_acc[req[c].arr]++;
          if (measure) grants[c]++;
          if (req[c].we) shadow[a] = req[c].wdata;
          else exp_q[c].push_back(shadow.exists(a) ? shadow[a] : u_ddr.peek(a));
          req_valid[c] <= 1'b0;
        end
        if ((!req_valid[c] || req_ready[c]) && (measure || $urandom_range(0, 99) < 40)) begin
          mem_req_t r;
          r.arr   = arr_e'($urandom_range(0, NUM_ARR - 1));
          r.we    = ($urandom_range(0, 3) == 0);
          r.idx   = $urandom_range(0, 63);
          r.wdata = $urandom;
          req[c] <= r;
          req_valid[c] <= 1'b1;
        end
      end
    end
  end

  initial begin
    for (int a = 0; a < NUM_ARR; a++) base_addr[a] = addr_t'(a) << 22;
    for (int a = 0; a < NUM_ARR; a++)
      for (int i = 0; i < 64; i++) u_ddr.poke((addr_t'(a) << 22) + addr_t'(i), $urandom);
    measure = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20000) @(posedge clk);
    measure = 1;
    repeat (6000) @(posedge clk);
    measure = 0;
    force req_valid = '0;
    repeat (200) @(posedge clk);
    for (int c = 0; c < NC; c++) begin
      check(exp_q[c].size() == 0, $sformatf("client %0d missing %0d replies", c, exp_q[c].size()));
      check(n_rsp[c] > 100, $sformatf("client %0d only %0d replies", c, n_rsp[c]));
    end
    for (int a = 0; a < NUM_ARR; a++)
      check(acc_count[a] == 32'(exp_acc[a]), $sformatf("acc_count[%0d] %0d exp %0d", a, acc_count[a], exp_acc[a]));
    for (int c = 1; c < NC; c++)
      check(grants[c] - grants[0] <= 2 && grants[0] - grants[c] <= 2,
            $sformatf("round robin: %0d vs %0d grants", grants[c], grants[0]));
    check(u_ddr.n_stalls > 0, "DDR never stalled");
    $display("grants under full load: %p  ddr stalls %0d", grants, u_ddr.n_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
