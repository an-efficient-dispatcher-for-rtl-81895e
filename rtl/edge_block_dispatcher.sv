// edge_block_dispatcher: feeds the three edge-block pipelines.
//
// The edge-block structure is fixed for a run, but the set of blocks worth
// processing shrinks as blocks go inactive. The dispatcher keeps one
// activity bit per block (the block bitmap, MAX_BLOCKS entries of on-chip
// RAM). init marks blocks 0 .. num_blocks-1 active. On start it walks the
// bitmap; for every active block it reads the block's edge count and first
// edge from the edge-block index arrays in DDR, classifies the block by its
// count (small < 64, middle 64..2048, large > 2048) and writes a descriptor
// into that class's pipe. After the last block a halt descriptor goes to
// each pipe. Results come back from the pipelines concurrently: a block
// reported inactive has its bit cleared, and the statistics for the switch
// rule are gathered. done pulses once every dispatched block has reported.
//
// Statistics of the iteration (valid from done until the next start):
//   nb   small + middle blocks dispatched     na_b  of those, still active
//   nl   large blocks dispatched              fl    of those, accessed
//   n_disp[g]  blocks sent to group g
//
// Interface: one data-analyzer client; three descriptor outputs
// (valid/ready, blk_desc_t) toward the pipes; three result inputs
// (valid/ready, blk_res_t), taken one per cycle with small first.
// Timing: 2 cycles per inactive block, 2 reads plus the push per active one.
//
// From the reference design: classification by edge count with the 64 and
// 2048 limits, one pipe per class, halt at the end of the stream, the block
// activity state and the large-block access flags. The walk order and the
// sequential reads are this design's own.
module edge_block_dispatcher
  import graph_pkg::*;
#(
  parameter int MAX_BLOCKS = 1 << 20
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      init,
  input  logic      start,
  input  vid_t      num_blocks,
  output logic      busy,
  output logic      done,
  // data analyzer client
  output logic      mem_valid,
  input  logic      mem_ready,
  output mem_req_t  mem_req,
  input  logic      mem_rsp_valid,
  input  word_t     mem_rsp_data,
  // descriptors to the pipes, index = grp_e
  output logic      [2:0] out_valid,
  input  logic      [2:0] out_ready,
  output blk_desc_t out_desc,
  // results from the pipelines
  input  logic      [2:0] res_valid,
  output logic      [2:0] res_ready,
  input  blk_res_t  res [3],
  // statistics
  output vid_t      nb,
  output vid_t      na_b,
  output vid_t      nl,
  output vid_t      fl,
  output vid_t      n_disp [3]
);
  localparam int BA = $clog2(MAX_BLOCKS);

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_RD, S_CHK, S_MREQ, S_PUSH, S_HALT, S_DRAIN} state_e;
  state_e state;

  logic bb_mem [MAX_BLOCKS];   // block bitmap
  logic bb_rd;
  vid_t b, cnt, st, dispatched, returned;
  logic [1:0] iss, rcv;
  logic [1:0] hg;
  grp_e g;

  assign g    = classify(cnt);
  assign busy = (state != S_IDLE);

  // result intake, small group first
  logic     r_fire;
  blk_res_t r;
  always_comb begin
    res_ready = '0;
    r_fire    = 1'b0;
    r         = res[0];
    for (int k = 2; k >= 0; k--) begin
      if (res_valid[k]) begin
        r = res[k];
      end
    end
    if (res_valid[0])      res_ready = 3'b001;
    else if (res_valid[1]) res_ready = 3'b010;
    else if (res_valid[2]) res_ready = 3'b100;
    r_fire = |res_valid;
  end

  always_ff @(posedge clk) begin
    if (state == S_INIT && b < num_blocks) bb_mem[b[BA-1:0]] <= 1'b1;
    else if (r_fire && !r.active)          bb_mem[r.blk[BA-1:0]] <= 1'b0;
    if (state == S_RD) bb_rd <= bb_mem[b[BA-1:0]];
  end

  always_comb begin
    mem_valid = (state == S_MREQ) && (iss < 2);
    mem_req   = '{arr: (iss == 0) ? ARR_BCOUNT : ARR_BSTART, we: 1'b0, idx: b, wdata: '0};
  end

  always_comb begin
    out_valid = '0;
    out_desc  = '{halt: 1'b0, blk: b, start: st, count: cnt};
    if (state == S_PUSH) out_valid[g] = 1'b1;
    if (state == S_HALT) begin
      out_valid[hg] = 1'b1;
      out_desc.halt = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      b <= '0; cnt <= '0; st <= '0; iss <= '0; rcv <= '0; hg <= '0;
      dispatched <= '0; returned <= '0;
      nb <= '0; na_b <= '0; nl <= '0; fl <= '0;
      for (int k = 0; k < 3; k++) n_disp[k] <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (r_fire) begin
        returned <= returned + 1;
        if (r.grp != GRP_LARGE && r.active)  na_b <= na_b + 1;
        if (r.grp == GRP_LARGE && r.accessed) fl  <= fl + 1;
      end
      case (state)
        S_IDLE: begin
          if (init) begin
            b     <= '0;
            state <= S_INIT;
          end else if (start) begin
            b <= '0;
            dispatched <= '0; returned <= '0;
            nb <= '0; na_b <= '0; nl <= '0; fl <= '0;
            for (int k = 0; k < 3; k++) n_disp[k] <= '0;
            state <= S_RD;
          end
        end
        S_INIT: begin
          if (b >= num_blocks) state <= S_IDLE;
          b <= b + 1;
        end
        S_RD: begin
          if (b >= num_blocks) begin
            hg    <= '0;
            state <= S_HALT;
          end else state <= S_CHK;
        end
        S_CHK: begin
          if (bb_rd) begin
            iss <= '0; rcv <= '0;
            state <= S_MREQ;
          end else begin
            b     <= b + 1;
            state <= S_RD;
          end
        end
        S_MREQ: begin
          if (mem_valid && mem_ready) iss <= iss + 1'b1;
          if (mem_rsp_valid) begin
            rcv <= rcv + 1'b1;
            if (rcv == 0) cnt <= mem_rsp_data;
            else begin
              st    <= mem_rsp_data;
              state <= S_PUSH;
            end
          end
        end
        S_PUSH: if (out_ready[g]) begin
          dispatched <= dispatched + 1;
          n_disp[g]  <= n_disp[g] + 1;
          if (g == GRP_LARGE) nl <= nl + 1;
          else                nb <= nb + 1;
          b     <= b + 1;
          state <= S_RD;
        end
        S_HALT: if (out_ready[hg]) begin
          if (hg == 2'd2) state <= S_DRAIN;
          hg <= hg + 1'b1;
        end
        S_DRAIN: if (returned == dispatched) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(res_ready));

endmodule
