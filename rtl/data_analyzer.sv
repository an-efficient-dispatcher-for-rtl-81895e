// data_analyzer: the engine's single gateway to the graph arrays in DDR.
//
// Every unit that touches DDR names the array it wants (CSR index, CSR
// edges, edge-block start and size, edge-block source and destination
// lists, vertex depth) and an element index; the analyzer adds that array's
// base address, so the units never handle raw addresses and cannot reach the
// wrong array. Requests from NCLI clients are served one per cycle in
// round-robin order. The client number of each read is kept in a tag FIFO of
// OUTSTANDING entries, and since DDR answers reads in order, each returning
// word is sent back to the client at the head of that FIFO.
//
// Interface: per-client valid/ready request of type mem_req_t; read data is
// returned on rsp_data with a one-hot rsp_valid, one cycle after DDR returns
// it, and cannot be refused (a client only asks for what it can hold).
// Writes get no response. DDR side: ddr_req_valid/ready with ddr_req_t,
// and ddr_rsp_valid/ddr_rsp_data for read data, in request order.
//
// The reference design gives only the role (load graph data, pick the right
// array for each access); the base-address table, the round-robin arbiter
// and the in-order tag FIFO are this design's own. acc_count counts the
// accesses made to each array.
module data_analyzer
  import graph_pkg::*;
#(
  parameter int NCLI        = 6,
  parameter int OUTSTANDING = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  input  addr_t    base_addr [NUM_ARR],
  // clients
  input  logic     [NCLI-1:0] req_valid,
  output logic     [NCLI-1:0] req_ready,
  input  mem_req_t req [NCLI],
  output logic     [NCLI-1:0] rsp_valid,
  output word_t    rsp_data,
  // DDR
  output logic     ddr_req_valid,
  input  logic     ddr_req_ready,
  output ddr_req_t ddr_req,
  input  logic     ddr_rsp_valid,
  input  word_t    ddr_rsp_data,
  // statistics
  output logic [31:0] acc_count [NUM_ARR]
);
  localparam int CW = (NCLI > 1) ? $clog2(NCLI) : 1;
  localparam int TW = $clog2(OUTSTANDING);

  logic [CW-1:0] rr_ptr, grant;
  logic          any_req;

  // tag FIFO
  logic [CW-1:0] tag_mem [OUTSTANDING];
  logic [TW-1:0] tag_w, tag_r;
  logic [TW:0]   tag_cnt;
  logic          tag_full;

  assign tag_full = (tag_cnt == (TW+1)'(OUTSTANDING));

  // Round-robin pick: first requesting client at or after rr_ptr.
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

  mem_req_t sel;
  logic     can_issue;
  assign sel       = req[grant];
  assign can_issue = any_req && ddr_req_ready && (sel.we || !tag_full);

  assign ddr_req_valid = any_req && (sel.we || !tag_full);
  assign ddr_req.we    = sel.we;
  assign ddr_req.addr  = base_addr[sel.arr] + addr_t'(sel.idx);
  assign ddr_req.wdata = sel.wdata;

  always_comb begin
    req_ready = '0;
    if (can_issue) req_ready[grant] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (can_issue && !sel.we) tag_mem[tag_w] <= grant;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_ptr   <= '0;
      tag_w    <= '0;
      tag_r    <= '0;
      tag_cnt  <= '0;
      rsp_valid <= '0;
      rsp_data <= '0;
      for (int a = 0; a < NUM_ARR; a++) acc_count[a] <= '0;
    end else begin
      rsp_valid <= '0;
      if (can_issue) begin
        rr_ptr <= (grant == CW'(NCLI-1)) ? '0 : grant + 1'b1;
        acc_count[sel.arr] <= acc_count[sel.arr] + 1;
      end
      if (can_issue && !sel.we) tag_w <= tag_w + 1'b1;
      if (ddr_rsp_valid) begin
        tag_r <= tag_r + 1'b1;
        rsp_valid[tag_mem[tag_r]] <= 1'b1;
        rsp_data <= ddr_rsp_data;
      end
      case ({can_issue && !sel.we, ddr_rsp_valid})
        2'b10: tag_cnt <= tag_cnt + 1'b1;
        2'b01: tag_cnt <= tag_cnt - 1'b1;
        default: ;
      endcase
    end
  end

  // DDR only answers reads that were asked for.
  assert property (@(posedge clk) disable iff (!rst_n) ddr_rsp_valid |-> tag_cnt != 0);

endmodule
