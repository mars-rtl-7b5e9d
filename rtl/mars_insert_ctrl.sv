// mars_insert_ctrl: the MARS insertion algorithm.
//
// Each cycle one request is looked up in the page table (mars_page_list) by
// its 4 KB page and, in the same cycle, handled as follows:
//   hit              -> write it into an empty request-buffer slot n, link
//                       the page's old tail slot to n, count+1, tail = n.
//   miss, free way   -> write it into slot n and create a page entry
//                       (count 1, head = tail = n); push the entry index into
//                       the page order FIFO.
//   miss, set full   -> put it in the pending queue.
// This three-way decision follows the paper's insertion flowchart. How the
// pending queue is drained is this design's own, since the paper only names
// the queue:
//   * The head of the pending queue is retried with priority. If it fails
//     because its set is still full it is marked blocked and is not retried
//     until some page entry is freed; meanwhile new requests are served.
//   * A new request goes straight to the pending queue if any pending request
//     maps to the same table set (one counter per set). Requests of one page
//     always map to one set, so a request can never overtake an older
//     request to the same page; requests to other sets are not held up.
// A request waits (in_ready low) when the request buffer has no empty slot,
// when it must go to a full pending queue, while the pending head is being
// retried, or for one cycle when its page entry is being drained of its last
// request by the forwarding side in that cycle. "Set full" is the paper's
// "PhyPageList full" applied to the set the page maps to.
module mars_insert_ctrl
  import mars_pkg::*;
#(
  parameter int unsigned N          = 512,
  parameter int unsigned M          = 128,
  parameter int unsigned WAYS       = 2,
  parameter int unsigned PEND_DEPTH = 16,
  parameter int unsigned SLOT_W     = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned ENT_W      = (M > 1) ? $clog2(M) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // new request from the GPU side (valid/ready)
  input  logic              in_valid,
  output logic              in_ready,
  input  mars_req_t         in_req,
  // pending queue
  input  logic              pend_empty,
  input  logic              pend_full,
  input  mars_req_t         pend_head,
  output logic              pend_push,
  output mars_req_t         pend_push_data,
  output logic              pend_pop,
  // page table lookup
  output page_t             lk_page,
  input  logic              lk_hit,
  input  logic [ENT_W-1:0]  lk_hit_idx,
  input  logic [SLOT_W-1:0] lk_hit_tail,
  input  logic              lk_set_full,
  input  logic [ENT_W-1:0]  lk_free_idx,
  // page table updates
  output logic              hit_en,
  output logic [ENT_W-1:0]  hit_idx,
  output logic [SLOT_W-1:0] hit_slot,
  output logic              alloc_en,
  output logic [ENT_W-1:0]  alloc_idx,
  output page_t             alloc_page,
  output logic [SLOT_W-1:0] alloc_slot,
  // request buffer
  input  logic              free_vld,
  input  logic [SLOT_W-1:0] free_idx,
  output logic              wr_en,
  output logic [SLOT_W-1:0] wr_idx,
  output mars_req_t         wr_pkt,
  output logic              link_en,
  output logic [SLOT_W-1:0] link_idx,
  output logic [SLOT_W-1:0] link_ptr,
  // page order FIFO
  input  logic              oq_full,
  output logic              oq_push,
  output logic [ENT_W-1:0]  oq_data,
  // forwarding side: entry drained of its last request (freed) this cycle
  input  logic              fwd_last,
  input  logic [ENT_W-1:0]  fwd_idx,
  // events (one-cycle pulses) for statistics
  output logic              ev_hit,
  output logic              ev_alloc,
  output logic              ev_to_pend,
  output logic              ev_from_pend,
  output logic              ev_pend_bypass,
  output logic              ev_rq_full,
  output logic              ev_drain_wait
);

  localparam int unsigned SETS  = M / WAYS;
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned PC_W  = $clog2(PEND_DEPTH + 1);

  function automatic logic [SET_W-1:0] set_of(input mars_req_t r);
    return (SETS > 1) ? SET_W'(page_of(r)) : '0;
  endfunction

  logic                       pend_blocked;
  logic [SETS-1:0][PC_W-1:0]  pend_in_set;

  mars_req_t cand;
  logic      cand_vld, pend_try, in_set_pending;
  logic      drain_wait, can_hit, can_alloc, do_ins, go_pend, try_failed_full;

  always_comb begin
    pend_try = !pend_empty && !pend_blocked;
    cand     = pend_try ? pend_head : in_req;
    cand_vld = pend_try || in_valid;
    lk_page  = page_of(cand);
    in_set_pending = pend_in_set[set_of(in_req)] != '0;

    drain_wait = lk_hit && fwd_last && (fwd_idx == lk_hit_idx);
    can_hit    = lk_hit && free_vld && !drain_wait;
    can_alloc  = !lk_hit && !lk_set_full && free_vld && !oq_full;

    if (pend_try) begin
      do_ins   = can_hit || can_alloc;
      go_pend  = 1'b0;
      in_ready = 1'b0;
    end else begin
      do_ins   = in_valid && !in_set_pending && (can_hit || can_alloc);
      go_pend  = in_valid && !pend_full &&
                 (in_set_pending || (!lk_hit && lk_set_full));
      in_ready = do_ins || go_pend;
    end
    try_failed_full = pend_try && !lk_hit && lk_set_full;

    // request buffer write of the chosen request
    wr_en    = do_ins;
    wr_idx   = free_idx;
    wr_pkt   = cand;
    link_en  = do_ins && lk_hit;
    link_idx = lk_hit_tail;
    link_ptr = free_idx;

    hit_en     = do_ins && lk_hit;
    hit_idx    = lk_hit_idx;
    hit_slot   = free_idx;
    alloc_en   = do_ins && !lk_hit;
    alloc_idx  = lk_free_idx;
    alloc_page = lk_page;
    alloc_slot = free_idx;
    oq_push    = alloc_en;
    oq_data    = lk_free_idx;

    pend_pop       = pend_try && do_ins;
    pend_push      = go_pend;
    pend_push_data = in_req;

    ev_hit         = hit_en;
    ev_alloc       = alloc_en;
    ev_to_pend     = pend_push;
    ev_from_pend   = pend_pop;
    ev_pend_bypass = !pend_empty && !pend_try && do_ins;
    ev_rq_full     = cand_vld && !free_vld;
    ev_drain_wait  = cand_vld && drain_wait;
  end

  // Blocked flag of the pending head, and pending requests per table set.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_blocked <= 1'b0;
      pend_in_set  <= '0;
    end else begin
      if (fwd_last || pend_pop || pend_empty) pend_blocked <= 1'b0;
      else if (try_failed_full)               pend_blocked <= 1'b1;
      for (int s = 0; s < SETS; s++) begin
        logic inc, dec;
        inc = pend_push && set_of(in_req) == SET_W'(s);
        dec = pend_pop && set_of(pend_head) == SET_W'(s);
        if (inc && !dec) pend_in_set[s] <= pend_in_set[s] + 1'b1;
        else if (dec && !inc) pend_in_set[s] <= pend_in_set[s] - 1'b1;
      end
    end
  end

endmodule
