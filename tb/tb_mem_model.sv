// tb_mem_model: behavioural stand-in for the data analyzer plus DDR, seen from
// one client (not synthesizable). It holds each graph array as an
// associative array indexed by element, answers reads in order after
// LATENCY cycles, drops mem_ready at random in STALL_PCT percent of cycles,
// and applies writes at once. Testbenches fill arrays with put() and read
// results with get(); writes are also counted.
module tb_mem_model
  import graph_pkg::*;
#(
  parameter int LATENCY   = 3,
  parameter int STALL_PCT = 20
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     mem_valid,
  output logic     mem_ready,
  input  mem_req_t mem_req,
  output logic     rsp_valid,
  output word_t    rsp_data
);
  word_t arr [NUM_ARR][vid_t];
  longint unsigned cyc;
  longint unsigned due_q [$];
  word_t           dat_q [$];
  int unsigned     n_reads, n_writes;

  function automatic void put(arr_e a, vid_t i, word_t d);
    arr[a][i] = d;
  endfunction

  function automatic word_t get(arr_e a, vid_t i);
    return arr[a].exists(i) ? arr[a][i] : '0;
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc <= 0; mem_ready <= 1'b0; rsp_valid <= 1'b0; rsp_data <= '0;
      n_reads = 0; n_writes = 0;
      due_q.delete(); dat_q.delete();
    end else begin
      cyc <= cyc + 1;
      if (mem_valid && mem_ready) begin
        if (mem_req.we) begin
          arr[mem_req.arr][mem_req.idx] = mem_req.wdata;
          n_writes++;
        end else begin
          n_reads++;
          due_q.push_back(cyc + LATENCY);
          dat_q.push_back(get(mem_req.arr, mem_req.idx));
        end
      end
      mem_ready <= ($urandom_range(0, 99) >= STALL_PCT);
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
