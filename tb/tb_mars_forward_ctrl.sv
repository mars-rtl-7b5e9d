// tb_mars_forward_ctrl: self-checking test of the forwarding side.
//
// The test bench plays the page table, the request buffer and the page order
// queue as plain arrays and answers the block's read ports combinationally.
// It builds P pages, each a linked list of requests scattered over random
// buffer slots, and queues the pages in a known order. Expected output: the
// pages in queue order, each page's requests in list order, back to back.
// Checked per request: packet, released slot, page-table update (entry,
// next head, last flag). Also checked: with out_ready always high one
// request leaves per cycle plus one cycle to load the first page; with
// random out_ready nothing leaves while out_ready is low. Pages queued while
// the block is idle and while it is busy are both covered.
module tb_mars_forward_ctrl;
  import mars_pkg::*;
  localparam int N = 512, M = 128, SW = 9, EW = 7, CW = 10;
  logic clk = 0, rst_n;
  initial begin
    rst_n = 1;
    #2 rst_n = 0;  // a falling edge, so the asynchronous reset acts
  end
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic oq_empty, oq_pop, fwd_en, fwd_last, rel_en, out_valid, out_ready, ev_page_switch;
  logic [EW-1:0] oq_head, pl_rd_idx, fwd_idx;
  logic [SW-1:0] pl_head, fwd_next_head, rq_rd_idx, rq_nxt, rel_idx;
  logic [CW-1:0] pl_count;
  mars_req_t rq_pkt, out_req;

  mars_forward_ctrl #(.N(N), .M(M)) dut (.*);

  // environment state
  int e_head [M], e_cnt [M];
  bit e_vld [M];
  mars_req_t s_pkt [N];
  int s_nxt [N];
  bit s_used [N];
  int oq [1024];
  int oq_rd = 0, oq_wr = 0;
  mars_req_t exp_q[$];
  int exp_slot[$], exp_ent[$], exp_last[$];

  assign oq_empty = (oq_rd == oq_wr);
  assign oq_head  = EW'(oq[oq_rd % 1024]);
  assign pl_head  = SW'(e_head[pl_rd_idx]);
  assign pl_count = CW'(e_cnt[pl_rd_idx]);
  assign rq_pkt   = s_pkt[rq_rd_idx];
  assign rq_nxt   = SW'(s_nxt[rq_rd_idx]);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic int free_slot();
    int s;
    do s = $urandom_range(0, N - 1); while (s_used[s]);
    return s;
  endfunction

  // create page entry e with k requests and queue it
  task automatic make_page(input int e, input int k);
    int prev, s;
    mars_req_t r;
    prev = -1;
    for (int j = 0; j < k; j++) begin
      s = free_slot();
      s_used[s] = 1;
      r.addr = {12'h0, 24'(e * 1000 + 7), 12'(j * 64)};
      r.write = 1'(j & 1);
      r.id = 8'(j);
      s_pkt[s] = r;
      s_nxt[s] = 0;
      if (prev < 0) e_head[e] = s; else s_nxt[prev] = s;
      prev = s;
      exp_q.push_back(r); exp_slot.push_back(s); exp_ent.push_back(e);
      exp_last.push_back(j == k - 1);
    end
    e_cnt[e] = k;
    e_vld[e] = 1;
    oq[oq_wr % 1024] = e;
    oq_wr++;
  endtask

  int sent, cyc_first, cyc_last, cyc, npages;
  bit random_ready;

  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  // monitor: check at the falling edge, when everything is settled, and
  // apply the transfer to the environment just after the next rising edge
  always @(negedge clk) begin
    if (rst_n) begin
      automatic bit do_pop = oq_pop;
      automatic bit fire = out_valid && out_ready;
      automatic int ent = int'(pl_rd_idx), slot = int'(rq_rd_idx);
      if (fire) begin
        check(exp_q.size() > 0, "unexpected request");
        if (exp_q.size() > 0) begin
          check(out_req == exp_q[0], "request order/packet");
          check(rel_en && rel_idx == SW'(exp_slot[0]), "released slot");
          check(fwd_en && fwd_idx == EW'(exp_ent[0]), "page-table entry updated");
          check(fwd_last == 1'(exp_last[0]), "last-request flag");
          if (!exp_last[0]) check(fwd_next_head == SW'(s_nxt[exp_slot[0]]), "next head");
          s_used[exp_slot[0]] = 0;
          void'(exp_q.pop_front()); void'(exp_slot.pop_front());
          void'(exp_ent.pop_front()); void'(exp_last.pop_front());
        end
        if (sent == 0) cyc_first = cyc;
        cyc_last = cyc;
        sent++;
      end else begin
        check(!rel_en && !fwd_en, "no update without a transfer");
      end
      @(posedge clk);
      #1;
      if (do_pop) oq_rd++;
      if (fire) begin
        e_head[ent] = s_nxt[slot];
        e_cnt[ent]--;
        if (e_cnt[ent] == 0) e_vld[ent] = 0;
      end
    end
  end

  initial begin
    for (int i = 0; i < M; i++) begin e_head[i] = 0; e_cnt[i] = 0; e_vld[i] = 0; end
    for (int i = 0; i < 1024; i++) oq[i] = 0;
    for (int i = 0; i < N; i++) begin s_used[i] = 0; s_nxt[i] = 0; s_pkt[i] = '0; end
    cyc = 0; sent = 0; out_ready = 1;
    // phase 1: 20 pages queued before start, out_ready always high
    npages = 0;
    for (int p = 0; p < 20; p++) begin
      make_page(p * 5 % M, 1 + $urandom_range(0, 11));
      npages++;
    end
    begin
      automatic int total = exp_q.size();
      repeat (2) @(posedge clk);
      #1 rst_n = 1;
      wait (exp_q.size() == 0);
      @(posedge clk);
      check(sent == total, "all phase-1 requests sent");
      // one request per cycle, pages back to back
      check(cyc_last - cyc_first + 1 == total, "one request per cycle");
      $display("phase1: %0d requests in %0d cycles", total, cyc_last - cyc_first + 1);
    end
    // phase 2: pages added while running, random out_ready
    random_ready = 1;
    fork
      begin
        for (int p = 0; p < 60; p++) begin
          @(posedge clk);
          #2;
          begin
            automatic int e;
            do e = $urandom_range(0, M - 1); while (e_vld[e]);
            make_page(e, 1 + $urandom_range(0, 6));
          end
          repeat ($urandom_range(0, 8)) @(posedge clk);
        end
      end
      begin
        repeat (1500) begin
          @(posedge clk);
          #2 out_ready = $urandom_range(0, 2) != 0;
        end
      end
    join
    out_ready = 1;
    repeat (200) @(posedge clk);
    check(exp_q.size() == 0, "all phase-2 requests sent");
    check(!out_valid, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
