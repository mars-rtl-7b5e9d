// mars_top: MARS (Memory Aware Reordered Source) request reorderer with its
// in-order buffer toward the memory controller.
//
// Sits between the last arbitration point of a GPU (or any many-stream
// client) and the memory controller. Requests enter on in_* and are kept in a
// large out-of-order request buffer (N slots). A set-associative page table
// (M entries, WAYS ways) records, for every 4 KB physical page present, a
// linked list through the buffer of that page's requests. A FIFO of page
// entries (the page order queue) remembers in which order pages first
// appeared. The forwarding side always drains one page completely, oldest
// page first, so requests to one DRAM row reach the controller back to back.
// Requests whose page finds its table set full wait in a pending queue.
// Forwarded requests pass through an in-order FIFO to out_*.
//
//   in_valid/in_ready/in_req     request from the GPU side, valid/ready.
//   out_valid/out_ready/out_req  request to the memory controller.
// One request can enter and one can leave per cycle. A request reaches
// out_* at the earliest three edges after it was accepted (buffer write,
// page load into the forwarding side, in-order FIFO).
// The insertion and forwarding controllers also give one-cycle event pulses
// (ev_*: page hit, new page, pending in/out, buffer full, ...). They are left
// unconnected here, ready for performance counters; testbenches read them
// hierarchically.
// Sizes default to the configuration the paper evaluates (512-entry request
// buffer, 128-entry 2-way page table, page order FIFO as deep as the page
// table); the pending and in-order queue depths are this design's own.
module mars_top
  import mars_pkg::*;
#(
  parameter int unsigned N            = 512,
  parameter int unsigned M            = 128,
  parameter int unsigned WAYS         = 2,
  parameter int unsigned PEND_DEPTH   = 16,
  parameter int unsigned MEMBUF_DEPTH = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  mars_req_t in_req,
  output logic      out_valid,
  input  logic      out_ready,
  output mars_req_t out_req
);

  localparam int unsigned SLOT_W = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned ENT_W  = (M > 1) ? $clog2(M) : 1;
  localparam int unsigned CNT_W  = $clog2(N + 1);

  // request buffer
  logic [N-1:0]      rq_occ;
  logic              rq_free_vld;
  logic [SLOT_W-1:0] rq_free_idx;
  logic              rq_wr_en, rq_link_en, rq_rel_en;
  logic [SLOT_W-1:0] rq_wr_idx, rq_link_idx, rq_link_ptr, rq_rel_idx, rq_rd_idx;
  mars_req_t         rq_wr_pkt, rq_rd_pkt;
  logic [SLOT_W-1:0] rq_rd_nxt;
  logic              rq_rd_nxt_null, rq_rd_valid;

  // page table
  page_t             lk_page, alloc_page, pl_rd_page;
  logic              lk_hit, lk_set_full;
  logic [ENT_W-1:0]  lk_hit_idx, lk_free_idx;
  logic [SLOT_W-1:0] lk_hit_tail;
  logic              hit_en, alloc_en, fwd_en, fwd_last;
  logic [ENT_W-1:0]  hit_idx, alloc_idx, fwd_idx, pl_rd_idx;
  logic [SLOT_W-1:0] hit_slot, alloc_slot, fwd_next_head, pl_head;
  logic [CNT_W-1:0]  pl_count;
  logic              pl_rd_valid;
  logic [ENT_W:0]    pl_n_valid;

  // page order FIFO
  logic              oq_push, oq_pop, oq_empty, oq_full;
  logic [ENT_W-1:0]  oq_push_data, oq_head;
  logic [ENT_W:0]    oq_count;

  // pending queue
  logic              pq_push, pq_pop, pq_empty, pq_full;
  mars_req_t         pq_push_data, pq_head;
  logic [$clog2(PEND_DEPTH):0] pq_count;

  // forwarding output to the in-order buffer
  logic              fw_valid, fw_ready;
  mars_req_t         fw_req;
  logic              mb_empty, mb_full;
  logic [$clog2(MEMBUF_DEPTH):0] mb_count;

  // statistics events
  logic ev_hit, ev_alloc, ev_to_pend, ev_from_pend, ev_pend_bypass, ev_rq_full;
  logic ev_drain_wait;
  logic ev_page_switch;

  mars_request_q #(.N(N)) u_requestq (
    .clk, .rst_n,
    .occ        (rq_occ),
    .free_vld   (rq_free_vld),
    .free_idx   (rq_free_idx),
    .wr_en      (rq_wr_en),
    .wr_idx     (rq_wr_idx),
    .wr_pkt     (rq_wr_pkt),
    .link_en    (rq_link_en),
    .link_idx   (rq_link_idx),
    .link_ptr   (rq_link_ptr),
    .rel_en     (rq_rel_en),
    .rel_idx    (rq_rel_idx),
    .rd_idx     (rq_rd_idx),
    .rd_pkt     (rq_rd_pkt),
    .rd_nxt     (rq_rd_nxt),
    .rd_nxt_null(rq_rd_nxt_null),
    .rd_valid   (rq_rd_valid)
  );

  mars_page_list #(.M(M), .WAYS(WAYS), .N(N)) u_phypagelist (
    .clk, .rst_n,
    .lk_page      (lk_page),
    .lk_hit       (lk_hit),
    .lk_hit_idx   (lk_hit_idx),
    .lk_hit_tail  (lk_hit_tail),
    .lk_set_full  (lk_set_full),
    .lk_free_idx  (lk_free_idx),
    .hit_en       (hit_en),
    .hit_idx      (hit_idx),
    .hit_slot     (hit_slot),
    .alloc_en     (alloc_en),
    .alloc_idx    (alloc_idx),
    .alloc_page   (alloc_page),
    .alloc_slot   (alloc_slot),
    .fwd_en       (fwd_en),
    .fwd_idx      (fwd_idx),
    .fwd_next_head(fwd_next_head),
    .rd_idx       (pl_rd_idx),
    .rd_valid     (pl_rd_valid),
    .rd_page      (pl_rd_page),
    .rd_head      (pl_head),
    .rd_count     (pl_count),
    .n_valid      (pl_n_valid)
  );

  mars_fifo #(.WIDTH(ENT_W), .DEPTH(M)) u_phypageorderq (
    .clk, .rst_n,
    .push     (oq_push),
    .push_data(oq_push_data),
    .pop      (oq_pop),
    .pop_data (oq_head),
    .empty    (oq_empty),
    .full     (oq_full),
    .count    (oq_count)
  );

  mars_fifo #(.WIDTH(REQ_W), .DEPTH(PEND_DEPTH)) u_pendingq (
    .clk, .rst_n,
    .push     (pq_push),
    .push_data(pq_push_data),
    .pop      (pq_pop),
    .pop_data (pq_head),
    .empty    (pq_empty),
    .full     (pq_full),
    .count    (pq_count)
  );

  mars_insert_ctrl #(.N(N), .M(M), .WAYS(WAYS), .PEND_DEPTH(PEND_DEPTH)) u_insert (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_req,
    .pend_empty    (pq_empty),
    .pend_full     (pq_full),
    .pend_head     (pq_head),
    .pend_push     (pq_push),
    .pend_push_data(pq_push_data),
    .pend_pop      (pq_pop),
    .lk_page, .lk_hit, .lk_hit_idx, .lk_hit_tail, .lk_set_full, .lk_free_idx,
    .hit_en, .hit_idx, .hit_slot,
    .alloc_en, .alloc_idx, .alloc_page, .alloc_slot,
    .free_vld      (rq_free_vld),
    .free_idx      (rq_free_idx),
    .wr_en         (rq_wr_en),
    .wr_idx        (rq_wr_idx),
    .wr_pkt        (rq_wr_pkt),
    .link_en       (rq_link_en),
    .link_idx      (rq_link_idx),
    .link_ptr      (rq_link_ptr),
    .oq_full       (oq_full),
    .oq_push       (oq_push),
    .oq_data       (oq_push_data),
    .fwd_last      (fwd_last),
    .fwd_idx       (fwd_idx),
    .ev_hit, .ev_alloc, .ev_to_pend, .ev_from_pend, .ev_pend_bypass, .ev_rq_full,
    .ev_drain_wait
  );

  mars_forward_ctrl #(.N(N), .M(M)) u_forward (
    .clk, .rst_n,
    .oq_empty      (oq_empty),
    .oq_head       (oq_head),
    .oq_pop        (oq_pop),
    .pl_rd_idx     (pl_rd_idx),
    .pl_head       (pl_head),
    .pl_count      (pl_count),
    .fwd_en, .fwd_idx, .fwd_next_head, .fwd_last,
    .rq_rd_idx     (rq_rd_idx),
    .rq_pkt        (rq_rd_pkt),
    .rq_nxt        (rq_rd_nxt),
    .rel_en        (rq_rel_en),
    .rel_idx       (rq_rel_idx),
    .out_valid     (fw_valid),
    .out_ready     (fw_ready),
    .out_req       (fw_req),
    .ev_page_switch(ev_page_switch)
  );

  // In-order buffer toward the memory controller.
  assign fw_ready = !mb_full;

  mars_fifo #(.WIDTH(REQ_W), .DEPTH(MEMBUF_DEPTH)) u_membuf (
    .clk, .rst_n,
    .push     (fw_valid && fw_ready),
    .push_data(fw_req),
    .pop      (out_valid && out_ready),
    .pop_data (out_req),
    .empty    (mb_empty),
    .full     (mb_full),
    .count    (mb_count)
  );

  assign out_valid = !mb_empty;

  // The page being forwarded is always a live entry whose head slot holds a
  // request of that page.
  a_fwd_consistent: assert property (@(posedge clk) disable iff (!rst_n)
      fw_valid |-> pl_rd_valid && rq_rd_valid && page_of(rq_rd_pkt) == pl_rd_page);
  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid && !in_ready |=> in_valid);

endmodule
