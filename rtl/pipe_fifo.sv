// pipe_fifo: the on-chip pipe that links two units of the engine.
//
// Kernels of the engine pass edge-blocks, active vertices and block results
// to each other through first-in first-out buffers held in on-chip RAM
// instead of through DDR; one pipe has exactly one writer and one reader.
// This module is that buffer: a circular array of DEPTH entries of type T
// with a write pointer, a read pointer and an occupancy count.
//
// Interface: valid/ready on both sides. A record is written when
// in_valid && in_ready and read when out_valid && out_ready. The head record
// is presented on out_data directly from the array (first-word fall-through),
// so a record written in cycle t can be read in cycle t+1. Both sides may move
// in the same cycle, also when the pipe is full. in_ready is low while full:
// that is the backpressure that stalls a producer.
//
// The FIFO discipline and its use between units follow the reference design;
// the depth (not given there) and the fall-through timing are this design's
// choice. full_events counts cycles in which a writer was stalled.
module pipe_fifo #(
  parameter type T     = logic [31:0],
  parameter int  DEPTH = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic [31:0] full_events
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic do_wr, do_rd;

  assign in_ready  = (count < DEPTH[$bits(count)-1:0]) || out_ready && out_valid;
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];
  assign do_wr = in_valid && in_ready;
  assign do_rd = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
      count <= '0;
      full_events <= '0;
    end else begin
      if (do_wr) wptr <= inc(wptr);
      if (do_rd) rptr <= inc(rptr);
      case ({do_wr, do_rd})
        2'b10: count <= count + 1'b1;
        2'b01: count <= count - 1'b1;
        default: ;
      endcase
      if (in_valid && !in_ready) full_events <= full_events + 1;
    end
  end

  // A pipe never holds more than DEPTH records.
  assert property (@(posedge clk) disable iff (!rst_n) count <= DEPTH);

endmodule
