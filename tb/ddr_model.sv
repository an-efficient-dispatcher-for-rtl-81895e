// ddr_model: behavioural model of the off-chip DDR memory (not synthesizable).
//
// Word-addressed 32-bit memory held in an associative array, so only the
// words a test writes take space; unwritten words read as zero. Requests are
// accepted when req_ready is high; req_ready drops at random in STALL_PCT
// percent of cycles to exercise backpressure. Read data returns in request
// order, LATENCY cycles or more after acceptance. Testbenches load and
// inspect the contents with poke() and peek().
module ddr_model
  import graph_pkg::*;
#(
  parameter int LATENCY   = 6,
  parameter int STALL_PCT = 10
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  ddr_req_t req,
  output logic     rsp_valid,
  output word_t    rsp_data
);
  word_t mem [addr_t];
  longint unsigned cyc;
  longint unsigned due_q [$];
  word_t           dat_q [$];
  longint unsigned n_stalls;

  function automatic void poke(addr_t a, word_t d);
    mem[a] = d;
  endfunction

  function automatic word_t peek(addr_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc       <= 0;
      req_ready <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
      n_stalls  <= 0;
      due_q.delete();
      dat_q.delete();
    end else begin
      cyc <= cyc + 1;
      if (req_valid && req_ready) begin
        if (req.we) mem[req.addr] = req.wdata;
        else begin
          due_q.push_back(cyc + LATENCY + $urandom_range(0, 3));
          dat_q.push_back(peek(req.addr));
        end
      end
      if (req_valid && !req_ready) n_stalls <= n_stalls + 1;
      req_ready <= ($urandom_range(0, 99) >= STALL_PCT);
      rsp_valid <= 1'b0;
      if (due_q.size() > 0 && due_q[0] <= cyc) begin
        rsp_valid <= 1'b1;
        rsp_data  <= dat_q[0];
        void'(due_q.pop_front());
        void'(dat_q.pop_front());
      end
    end
  end
endmodule
