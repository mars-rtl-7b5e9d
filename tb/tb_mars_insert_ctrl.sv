// tb_mars_insert_ctrl: self-checking test of the insertion decision.
//
// The test bench plays the pending queue (a SystemVerilog queue, 16 deep)
// and gives random page-table lookup results, free-slot state and
// forwarding events every cycle. New requests are drawn from pages that
// crowd onto four table sets, so pending requests often share a set with
// new ones. Every output is compared with the expected action worked out
// here from the insertion rules:
//   * source: pending head, unless the queue is empty or its head is blocked
//     (it failed on a full set and no page entry has been freed since);
//   * hit -> write slot, link old tail, count+1; miss with a free way ->
//     write slot, create entry, push order queue; miss with a full set ->
//     pending queue;
//   * a new request whose table set has a pending request goes to the
//     pending queue, whatever the lookup says;
//   * wait when there is no empty slot, or on a hit whose entry is losing its
//     last request this cycle.
// Counts how often each case happens and fails if one never does.
module tb_mars_insert_ctrl;
  import mars_pkg::*;
  localparam int SW = 9, EW = 7, PD = 16;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  initial begin
    rst_n = 1;
    #2 rst_n = 0;  // a falling edge, so the asynchronous reset acts
  end
  int checks = 0, failures = 0;

  logic in_valid, in_ready, pend_empty, pend_full, pend_push, pend_pop;
  mars_req_t in_req, pend_head, pend_push_data, wr_pkt;
  page_t lk_page, alloc_page;
  logic lk_hit, lk_set_full, hit_en, alloc_en, free_vld, wr_en, link_en;
  logic [EW-1:0] lk_hit_idx, lk_free_idx, hit_idx, alloc_idx, oq_data, fwd_idx;
  logic [SW-1:0] lk_hit_tail, hit_slot, alloc_slot, free_idx, wr_idx, link_idx, link_ptr;
  logic oq_full, oq_push, fwd_last;
  logic ev_hit, ev_alloc, ev_to_pend, ev_from_pend, ev_pend_bypass, ev_rq_full, ev_drain_wait;

  mars_insert_ctrl #(.N(512), .M(128), .WAYS(2), .PEND_DEPTH(PD)) dut (.*);

  mars_req_t pq[$];
  bit blk;
  int n_case [8];  // hit, alloc, to_pend(full), from_pend, wait_slot, wait_drain, set_pending, blocked

  assign pend_empty = pq.size() == 0;
  assign pend_full  = pq.size() == PD;
  assign pend_head  = pq.size() == 0 ? '0 : pq[0];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic mars_req_t rnd_req();
    mars_req_t r;
    r.addr = {$urandom_range(0, 15) == 0 ? 30'($urandom) : 30'($urandom_range(0, 3)),
              6'($urandom_range(0, 3)), 12'($urandom)};
    r.write = 1'($urandom);
    r.id = 8'($urandom);
    return r;
  endfunction

  initial begin
    for (int k = 0; k < 8; k++) n_case[k] = 0;
    blk = 0;
    in_valid = 0; in_req = '0; lk_hit = 0; lk_hit_idx = 0; lk_hit_tail = 0;
    lk_set_full = 0; lk_free_idx = 0; free_vld = 1; free_idx = 0; oq_full = 0;
    fwd_last = 0; fwd_idx = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      mars_req_t src;
      bit ptry, ins, hit, alloc, topend, exp_ready, drain, setpend, failfull;
      @(negedge clk);
      in_valid    = $urandom_range(0, 4) != 0;
      in_req      = rnd_req();
      lk_hit      = $urandom_range(0, 2) == 0;
      lk_hit_idx  = EW'($urandom);
      lk_hit_tail = SW'($urandom);
      lk_set_full = $urandom_range(0, 2) == 0;
      lk_free_idx = EW'($urandom);
      free_vld    = $urandom_range(0, 7) != 0;
      free_idx    = SW'($urandom);
      oq_full     = 1'b0;
      fwd_last    = $urandom_range(0, 5) == 0;
      fwd_idx     = ($urandom_range(0, 1) == 0) ? lk_hit_idx : EW'($urandom);
      #1;
      ptry  = pq.size() > 0 && !blk;
      src   = ptry ? pq[0] : in_req;
      setpend = 0;
      foreach (pq[i]) if (pq[i].addr[17:12] == in_req.addr[17:12]) setpend = 1;
      drain = lk_hit && fwd_last && fwd_idx == lk_hit_idx;
      hit   = lk_hit && free_vld && !drain;
      alloc = !lk_hit && !lk_set_full && free_vld;
      if (ptry) begin
        ins = hit || alloc;
        topend = 0;
        exp_ready = 0;
      end else begin
        ins = in_valid && !setpend && (hit || alloc);
        topend = in_valid && pq.size() < PD && (setpend || (!lk_hit && lk_set_full));
        exp_ready = ins || topend;
      end
      hit = hit && ins;
      alloc = alloc && ins;
      failfull = ptry && !lk_hit && lk_set_full;
      check(lk_page == src.addr[47:12], "lookup page is the source's page");
      check(wr_en == ins, "wr_en");
      if (ins) begin
        check(wr_idx == free_idx, "wr_idx");
        check(wr_pkt == src, "wr_pkt");
      end
      check(link_en == hit, "link_en");
      if (hit) begin
        check(link_idx == lk_hit_tail && link_ptr == free_idx, "link");
        check(hit_idx == lk_hit_idx && hit_slot == free_idx, "hit update");
      end
      check(hit_en == hit, "hit_en");
      check(alloc_en == alloc, "alloc_en");
      if (alloc) begin
        check(alloc_idx == lk_free_idx && alloc_slot == free_idx &&
              alloc_page == src.addr[47:12], "alloc fields");
        check(oq_data == lk_free_idx, "order queue data");
      end
      check(oq_push == alloc, "oq_push");
      check(pend_pop == (ptry && ins), "pend_pop");
      check(pend_push == topend, "pend_push");
      if (topend) check(pend_push_data == in_req, "pend_push_data");
      check(in_ready == exp_ready, "in_ready");
      if (hit) n_case[0]++;
      if (alloc) n_case[1]++;
      if (topend && !setpend) n_case[2]++;
      if (ptry && ins) n_case[3]++;
      if ((ptry || in_valid) && !free_vld) n_case[4]++;
      if ((ptry || in_valid) && drain && free_vld) n_case[5]++;
      if (!ptry && in_valid && setpend) n_case[6]++;
      if (pq.size() > 0 && blk && ins) n_case[7]++;
      // model update at the edge
      @(posedge clk);
      #1;
      if (ptry && ins) void'(pq.pop_front());
      if (topend) pq.push_back(in_req);
      if (fwd_last || (ptry && ins) || (pq.size() == 0 && !topend)) blk = 0;
      else if (failfull) blk = 1;
      if (fwd_last || (ptry && ins)) blk = 0;
    end
    for (int k = 0; k < 8; k++) check(n_case[k] > 0, "case exercised");
    $display("hit=%0d alloc=%0d to_pend=%0d from_pend=%0d wait_slot=%0d wait_drain=%0d set_pending=%0d bypass_blocked=%0d",
             n_case[0], n_case[1], n_case[2], n_case[3], n_case[4], n_case[5], n_case[6], n_case[7]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
