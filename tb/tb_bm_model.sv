// tb_bm_model: behavioural stand-in for the bitmap unit, seen from one
// client (not synthesizable). Visited, current- and next-frontier bits are
// kept as bit arrays of NV entries; each bm_req_t operation is answered
// after a random delay of 1 to 3 cycles, with the semantics given in
// graph_pkg::bm_op_e; the returned words are those before the operation. swap_banks() exchanges the frontiers.
module tb_bm_model
  import graph_pkg::*;
#(
  parameter int NV = 4096
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    bm_valid,
  output logic    bm_ready,
  input  bm_req_t bm_req,
  output logic    rsp_valid,
  output bm_rsp_t rsp
);
  bit vis [NV];
  bit cur [NV];
  bit nxt [NV];
  int unsigned n_ops;
  int          wait_cnt;
  bm_req_t     held;

  function automatic void swap_banks();
    for (int i = 0; i < NV; i++) begin
      cur[i] = nxt[i];
      nxt[i] = 1'b0;
    end
  endfunction

  function automatic word_t word_of(ref bit m [NV], input int unsigned w);
    word_t r;
    for (int k = 0; k < 32; k++) r[k] = (w * 32 + k < NV) ? m[w * 32 + k] : 1'b0;
    return r;
  endfunction

  assign bm_ready = (wait_cnt < 0);

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_cnt = -1; rsp_valid <= 1'b0; rsp <= '0; n_ops = 0;
    end else begin
      rsp_valid <= 1'b0;
      if (wait_cnt > 0) wait_cnt--;
      else if (wait_cnt == 0) begin
        bm_rsp_t r;
        int unsigned w;
        r = '0;
        w = (held.op == BM_PUSH || held.op == BM_PULL || held.op == BM_ROOT) ? held.b / 32 : held.a;
        r.vis = word_of(vis, w);
        r.cur = word_of(cur, w);
        r.nxt = word_of(nxt, w);
        case (held.op)
          BM_PUSH: if (!vis[held.b]) begin r.updated = 1; vis[held.b] = 1; nxt[held.b] = 1; end
          BM_PULL: if (cur[held.a] && !vis[held.b]) begin r.updated = 1; vis[held.b] = 1; nxt[held.b] = 1; end
          BM_ROOT: begin vis[held.b] = 1; cur[held.b] = 1; end
          default: ;
        endcase
        if (held.op == BM_CLEAR)
          for (int k = 0; k < 32; k++) if (w * 32 + k < NV) begin
            vis[w*32+k] = 0; cur[w*32+k] = 0; nxt[w*32+k] = 0;
          end
        if (held.op == BM_SCAN)
          for (int k = 0; k < 32; k++) if (w * 32 + k < NV) cur[w*32+k] = 0;
        rsp <= r;
        rsp_valid <= 1'b1;
        n_ops++;
        wait_cnt = -1;
      end else if (bm_valid) begin
        held = bm_req;
        wait_cnt = $urandom_range(0, 2);
      end
    end
  end
endmodule
