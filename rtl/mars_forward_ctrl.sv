// mars_forward_ctrl: the MARS forwarding algorithm.
//
// Holds the current page (CurrPhyPage): an index into the page table and a
// valid flag. While a current page is held, its head request is offered to
// the memory side (out_valid); when it is taken (out_valid && out_ready) in
// the same edge the request's slot is released in the request buffer, the
// page's count drops by one and its head moves to the request's NxtPtr. When
// that was the page's last request the entry is freed and the next page is
// popped from the page order FIFO, which holds pages in order of creation,
// so the page with the oldest waiting request is always served next. With
// no current page the FIFO head is taken as soon as there is one (one idle
// cycle). Every request of a page therefore leaves back to back.
// One request can leave per cycle. The steps follow the paper's forwarding
// flowchart; the valid/ready output handshake and the idle-cycle reload are
// this design's own.
module mars_forward_ctrl
  import mars_pkg::*;
#(
  parameter int unsigned N      = 512,
  parameter int unsigned M      = 128,
  parameter int unsigned SLOT_W = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned ENT_W  = (M > 1) ? $clog2(M) : 1,
  parameter int unsigned CNT_W  = $clog2(N + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // page order FIFO
  input  logic              oq_empty,
  input  logic [ENT_W-1:0]  oq_head,
  output logic              oq_pop,
  // page table read and update
  output logic [ENT_W-1:0]  pl_rd_idx,
  input  logic [SLOT_W-1:0] pl_head,
  input  logic [CNT_W-1:0]  pl_count,
  output logic              fwd_en,
  output logic [ENT_W-1:0]  fwd_idx,
  output logic [SLOT_W-1:0] fwd_next_head,
  output logic              fwd_last,
  // request buffer read and release
  output logic [SLOT_W-1:0] rq_rd_idx,
  input  mars_req_t         rq_pkt,
  input  logic [SLOT_W-1:0] rq_nxt,
  output logic              rel_en,
  output logic [SLOT_W-1:0] rel_idx,
  // to the memory side (valid/ready)
  output logic              out_valid,
  input  logic              out_ready,
  output mars_req_t         out_req,
  // event: a new current page was loaded
  output logic              ev_page_switch
);

  logic             cur_vld;
  logic [ENT_W-1:0] cur_idx;
  logic             fire, need_page;

  assign pl_rd_idx     = cur_idx;
  assign rq_rd_idx     = pl_head;
  assign out_valid     = cur_vld;
  assign out_req       = rq_pkt;
  assign fire          = cur_vld && out_ready;
  assign rel_en        = fire;
  assign rel_idx       = pl_head;
  assign fwd_en        = fire;
  assign fwd_idx       = cur_idx;
  assign fwd_next_head = rq_nxt;
  assign fwd_last      = fire && (pl_count == CNT_W'(1));
  assign need_page     = !cur_vld || fwd_last;
  assign oq_pop        = need_page && !oq_empty;
  assign ev_page_switch = oq_pop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_vld <= 1'b0;
      cur_idx <= '0;
    end else if (need_page) begin
      cur_vld <= !oq_empty;
      if (!oq_empty) cur_idx <= oq_head;
    end
  end

  a_cnt_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
                                  cur_vld |-> pl_count != '0);

endmodule
