// bitmap_unit: the on-chip valid-data bitmaps of the BFS engine.
//
// One bit per vertex records the state that decides whether the vertex takes
// part in the next iteration, so that only valid data is fetched from DDR.
// Three bitmaps of MAX_V bits each are kept as arrays of 32-bit words:
// visited, and two frontier banks that alternate as the current frontier
// (vertices found in the previous level) and the next frontier (vertices
// found in this level). A swap pulse exchanges the two banks between
// iterations.
//
// Up to NCLI clients send bm_req_t operations (see graph_pkg::bm_op_e); they
// are served one at a time in round-robin order. Each operation takes two
// cycles: in the accept cycle the three words are read from block RAM
// (registered read), in the second cycle the result is computed, written
// back and returned. Serving one operation at a time makes the
// test-and-set of BM_PUSH/BM_PULL atomic, so a vertex is claimed by exactly
// one edge even when several pipelines reach it in the same level.
//
// Interface: per-client req_valid/req_ready with req[]; rsp_valid one-hot
// and rsp shared, valid two cycles after acceptance. swap must only be
// pulsed while no operation is in flight.
//
// Following the reference design: one bit per vertex, on chip, to mark
// valid data. This design's own choices: three bitmaps, the word width, the
// operation set and the two-cycle read-modify-write.
module bitmap_unit
  import graph_pkg::*;
#(
  parameter int MAX_V = 1 << 23,
  parameter int NCLI  = 6
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    swap,
  input  logic    [NCLI-1:0] req_valid,
  output logic    [NCLI-1:0] req_ready,
  input  bm_req_t req [NCLI],
  output logic    [NCLI-1:0] rsp_valid,
  output bm_rsp_t rsp,
  output logic    sel_bank
);
  localparam int W  = MAX_V / 32;
  localparam int WA = $clog2(W);
  localparam int CW = (NCLI > 1) ? $clog2(NCLI) : 1;

  word_t vis_mem [W];
  word_t f0_mem  [W];
  word_t f1_mem  [W];

  logic          busy;
  logic [CW-1:0] rr_ptr, grant, cli;
  logic          any_req;
  bm_req_t       cur_req;
  word_t         rd_vis, rd_f0, rd_f1, rd_fa;   // rd_fa: frontier word at src
  logic          bank;                          // 0: f0 is current, 1: f1 is current

  always_comb begin
    any_req = 1'b0;
    grant   = '0;
    for (int k = 0; k < NCLI; k++) begin
      int c;
      c = (int'(rr_ptr) + k) % NCLI;
      if (!any_req && req_valid[c]) begin
        any_req = 1'b1;
        grant   = CW'(c);
      end
    end
  end

  logic accept;
  assign accept = any_req && !busy;
  always_comb begin
    req_ready = '0;
    if (accept) req_ready[grant] = 1'b1;
  end

  // word addresses of the incoming request
  bm_req_t       nreq;
  logic [WA-1:0] wa_b, wa_a;
  assign nreq = req[grant];
  always_comb begin
    wa_b = nreq.b[WA+4:5];
    wa_a = (nreq.op == BM_PULL) ? nreq.a[WA+4:5] : nreq.a[WA-1:0];
    if (nreq.op == BM_CLEAR || nreq.op == BM_SCAN || nreq.op == BM_READ) wa_b = nreq.a[WA-1:0];
  end

  // registered reads (block RAM)
  always_ff @(posedge clk) begin
    if (accept) begin
      rd_vis <= vis_mem[wa_b];
      rd_f0  <= f0_mem[wa_b];
      rd_f1  <= f1_mem[wa_b];
      rd_fa  <= bank ? f1_mem[wa_a] : f0_mem[wa_a];
    end
  end

  // second cycle: compute
  logic [WA-1:0] x_wa;
  logic [4:0]    x_bit_b, x_bit_a;
  word_t         cur_w, nxt_w, new_vis, new_cur, new_nxt;
  logic          upd;
  assign x_wa    = (cur_req.op == BM_CLEAR || cur_req.op == BM_SCAN || cur_req.op == BM_READ)
                 ? cur_req.a[WA-1:0] : cur_req.b[WA+4:5];
  assign x_bit_b = cur_req.b[4:0];
  assign x_bit_a = cur_req.a[4:0];
  assign cur_w   = bank ? rd_f1 : rd_f0;
  assign nxt_w   = bank ? rd_f0 : rd_f1;

  always_comb begin
    new_vis = rd_vis;
    new_cur = cur_w;
    new_nxt = nxt_w;
    upd     = 1'b0;
    case (cur_req.op)
      BM_CLEAR: begin new_vis = '0; new_cur = '0; new_nxt = '0; end
      BM_ROOT:  begin new_vis[x_bit_b] = 1'b1; new_cur[x_bit_b] = 1'b1; end
      BM_PUSH:  if (!rd_vis[x_bit_b]) begin
                  upd = 1'b1; new_vis[x_bit_b] = 1'b1; new_nxt[x_bit_b] = 1'b1;
                end
      BM_PULL:  if (rd_fa[x_bit_a] && !rd_vis[x_bit_b]) begin
                  upd = 1'b1; new_vis[x_bit_b] = 1'b1; new_nxt[x_bit_b] = 1'b1;
                end
      BM_SCAN:  new_cur = '0;
      default:  ;
    endcase
  end

  // write back
  always_ff @(posedge clk) begin
    if (busy && cur_req.op != BM_READ) begin
      vis_mem[x_wa] <= new_vis;
      f0_mem[x_wa]  <= bank ? new_nxt : new_cur;
      f1_mem[x_wa]  <= bank ? new_cur : new_nxt;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      rr_ptr    <= '0;
      cli       <= '0;
      cur_req   <= '0;
      bank      <= 1'b0;
      rsp_valid <= '0;
      rsp       <= '0;
    end else begin
      rsp_valid <= '0;
      if (swap) bank <= ~bank;
      if (accept) begin
        busy    <= 1'b1;
        cur_req <= nreq;
        cli     <= grant;
        rr_ptr  <= (grant == CW'(NCLI-1)) ? '0 : grant + 1'b1;
      end else if (busy) begin
        busy           <= 1'b0;
        rsp_valid[cli] <= 1'b1;
        rsp.updated    <= upd;
        rsp.cur        <= cur_w;
        rsp.nxt        <= nxt_w;
        rsp.vis        <= rd_vis;
      end
    end
  end

  assign sel_bank = bank;

  assert property (@(posedge clk) disable iff (!rst_n) swap |-> !busy);

endmodule
