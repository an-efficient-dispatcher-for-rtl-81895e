// state_analyzer: end-of-iteration census of the vertex bitmaps.
//
// Between two iterations the dispatcher needs the number of vertices that
// will be active in the next iteration (Na) and the number still inactive,
// i.e. not yet reached (Ni), to choose the processing module. On start the
// analyzer walks the bitmap words 0 .. ceil(num_vertices/32)-1, issuing one
// BM_SCAN per word to the bitmap unit, and adds up the population counts of
// the next-frontier word (Na) and of the visited word. BM_SCAN also clears
// the current-frontier word, so after the walk the retired frontier is empty
// and the banks can be swapped. Ni = num_vertices - visited.
//
// Interface: start pulse; done pulses for one cycle when na/ni are valid;
// they then hold until the next start. One bitmap-unit client port.
// Timing: one word per bitmap operation, about 3 cycles per 32 vertices.
//
// The role (a state analyzer beside the processing dispatcher) and the
// quantities Na and Ni follow the reference design; the word-serial walk
// is this design's own.
module state_analyzer
  import graph_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  vid_t    num_vertices,
  output logic    done,
  output vid_t    na,
  output vid_t    ni,
  // bitmap unit client
  output logic    bm_valid,
  input  logic    bm_ready,
  output bm_req_t bm_req,
  input  logic    bm_rsp_valid,
  input  bm_rsp_t bm_rsp
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT, S_DONE} state_e;
  state_e state;
  vid_t   w, nwords, vis_cnt, na_cnt;

  assign nwords   = (num_vertices + 31) >> 5;
  assign bm_valid = (state == S_REQ);
  assign bm_req   = '{op: BM_SCAN, a: w, b: '0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      w       <= '0;
      vis_cnt <= '0;
      na_cnt  <= '0;
      na      <= '0;
      ni      <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          w <= '0; vis_cnt <= '0; na_cnt <= '0;
          state <= (nwords == 0) ? S_DONE : S_REQ;
        end
        S_REQ: if (bm_ready) state <= S_WAIT;
        S_WAIT: if (bm_rsp_valid) begin
          na_cnt  <= na_cnt  + vid_t'($countones(bm_rsp.nxt));
          vis_cnt <= vis_cnt + vid_t'($countones(bm_rsp.vis));
          w       <= w + 1;
          state   <= (w + 1 == nwords) ? S_DONE : S_REQ;
        end
        S_DONE: begin
          na    <= na_cnt;
          ni    <= num_vertices - vis_cnt;
          done  <= 1'b1;
          state <= S_IDLE;
        end
      endcase
    end
  end
endmodule
