// tb_mars_top: end-to-end test of the MARS reorderer at its default size
// (512-slot request buffer, 128-entry 2-way page table).
//
// Phase 1 (latency): one request into an idle unit must appear at out_*
//   three clock edges after it was accepted.
// Phase 2 (exact reorder): with the memory side stalled, a burst of requests
//   from 8 interleaved streams is loaded (first 40 requests of one page fill
//   the in-order buffer and become the page being forwarded). The memory side
//   is then released. The expected output is worked out here: pages in the
//   order they first arrived, each page's requests back to back in arrival
//   order. Output rate must be one request per cycle.
// Phase 3 (stress): 16 streams jump between random pages (often crowded onto
//   a few table sets) under random memory back-pressure. Checked: every
//   request leaves exactly once and requests of one page leave in arrival
//   order. Page runs (consecutive requests to one page) are counted at the
//   input and the output; the output runs must be longer.
// Every mechanism is counted and must have happened: page hit, new page,
// pending queue in and out, new request passing a blocked pending request,
// request buffer full, wait on a page being
// drained, page switch, input stall, memory back-pressure.
module tb_mars_top;
  import mars_pkg::*;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  mars_req_t in_req, out_req;

  mars_top dut (.*);

  initial begin
    rst_n = 1;
    #2 rst_n = 0;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- mechanism counters (internal events) ----------------
  int c_hit, c_alloc, c_to_pend, c_from_pend, c_rq_full, c_drain_wait, c_switch;
  int c_in_stall, c_out_stall, c_bypass;
  always @(negedge clk) if (rst_n) begin
    c_hit        += int'(dut.ev_hit);
    c_alloc      += int'(dut.ev_alloc);
    c_to_pend    += int'(dut.ev_to_pend);
    c_from_pend  += int'(dut.ev_from_pend);
    c_rq_full    += int'(dut.ev_rq_full);
    c_drain_wait += int'(dut.ev_drain_wait);
    c_switch     += int'(dut.ev_page_switch);
    c_bypass     += int'(dut.ev_pend_bypass);
    c_in_stall   += int'(in_valid && !in_ready);
    c_out_stall  += int'(dut.fw_valid && !dut.fw_ready);
  end

  // ---------------- scoreboard ----------------
  // expected: for exact phase a global queue; otherwise per-page queues
  mars_req_t exact_q[$];
  bit exact_mode;
  mars_req_t page_q[page_t][$];
  int n_in, n_out, runs_in, runs_out;
  page_t last_in_pg, last_out_pg;
  int cyc, first_out_cyc, last_out_cyc;

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      page_t p;
      p = page_of(in_req);
      page_q[p].push_back(in_req);
      if (n_in == 0 || p != last_in_pg) runs_in++;
      last_in_pg = p;
      n_in++;
    end
    if (out_valid && out_ready) begin
      page_t p;
      p = page_of(out_req);
      if (exact_mode) begin
        check(exact_q.size() > 0 && out_req == exact_q[0], "exact reorder sequence");
        if (exact_q.size() > 0) void'(exact_q.pop_front());
      end
      check(page_q.exists(p) && page_q[p].size() > 0 && page_q[p][0] == out_req,
            "same-page order / no spurious request");
      if (page_q.exists(p) && page_q[p].size() > 0) begin
        void'(page_q[p].pop_front());
        if (page_q[p].size() == 0) page_q.delete(p);
      end
      if (n_out == 0 || p != last_out_pg) runs_out++;
      last_out_pg = p;
      if (n_out == 0) first_out_cyc = cyc;
      last_out_cyc = cyc;
      n_out++;
    end
  end

  // ---------------- driving ----------------
  // all driving happens just after a rising edge
  task automatic send(input mars_req_t r);
    in_valid = 1;
    in_req = r;
    do @(posedge clk); while (!in_ready_at_edge);
    #1;
    in_valid = 0;
  endtask

  // in_ready as seen just before the edge
  bit in_ready_at_edge;
  always @(negedge clk) in_ready_at_edge = in_ready;

  function automatic mars_req_t mk(input logic [35:0] page, input int line,
                                   input bit wr, input int id);
    mars_req_t r;
    r.addr = {page, 12'(line * 64)};
    r.write = wr;
    r.id = 8'(id);
    return r;
  endfunction

  task automatic wait_drained(input int max_cycles);
    int k;
    k = 0;
    while ((n_out != n_in || in_valid) && k < max_cycles) begin
      @(posedge clk);
      k++;
    end
    #1;
  endtask

  initial begin
    cyc = 0; n_in = 0; n_out = 0; runs_in = 0; runs_out = 0;
    c_hit = 0; c_alloc = 0; c_to_pend = 0; c_from_pend = 0; c_rq_full = 0;
    c_drain_wait = 0; c_switch = 0; c_in_stall = 0; c_out_stall = 0;
    c_bypass = 0;
    exact_mode = 0;
    in_valid = 0; in_req = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (2) @(posedge clk);
    #1;

    // ---------- phase 1: latency ----------
    begin
      int t0;
      t0 = cyc;
      in_valid = 1;
      in_req = mk(36'h12345, 3, 0, 1);
      @(posedge clk);       // accepted at this edge (unit is idle)
      #1 in_valid = 0;
      t0 = cyc;
      while (!out_valid) begin
        @(posedge clk);
        #1;
      end
      // accepted at edge 1, in the forwarding side after edge 2, in the
      // in-order buffer after edge 3
      check(cyc - t0 == 2, "latency: output after three edges");
      $display("phase1: output %0d edges after acceptance", cyc - t0 + 1);
      repeat (3) @(posedge clk);
      #1;
    end

    // ---------- phase 2: exact reorder ----------
    begin
      mars_req_t stream_reqs [8][$];
      mars_req_t burst[$];
      page_t order[$];
      mars_req_t by_page[page_t][$];
      int t_start, out_before;
      out_ready = 0;
      out_before = n_out;
      exact_mode = 1;
      // page A: 40 requests, fills the 32-deep in-order buffer
      for (int j = 0; j < 40; j++) burst.push_back(mk(36'h0A0000 + 36'd63, j, 0, j));
      // 8 streams, stream s walks pages 8s..8s+3 (distinct table sets),
      // 16 requests of 256 B stride per page; interleaved round robin;
      // some requests for page A mixed in late.
      for (int j = 0; j < 56; j++)
        for (int s = 0; s < 8; s++)
          burst.push_back(mk(36'h100000 + 36'(s * 8 + j / 16), (j % 16) * 4, (s % 3) == 0, j));
      for (int j = 40; j < 44; j++) burst.push_back(mk(36'h0A0000 + 36'd63, j, 1, j));
      // expected: pages in first-arrival order, each in arrival order
      foreach (burst[i]) begin
        page_t p;
        p = page_of(burst[i]);
        if (!by_page.exists(p)) order.push_back(p);
        by_page[p].push_back(burst[i]);
      end
      foreach (order[i]) foreach (by_page[order[i]][j]) exact_q.push_back(by_page[order[i]][j]);
      foreach (burst[i]) send(burst[i]);
      repeat (5) @(posedge clk);
      #1;
      check(n_out == out_before, "nothing leaves while memory is stalled");
      t_start = cyc;
      out_ready = 1;
      wait_drained(2000);
      check(exact_q.size() == 0, "exact phase: all requests out");
      check(n_out == n_in, "exact phase: counts match");
      // first output is taken at the first edge after release
      check(last_out_cyc - t_start + 1 == burst.size(), "one request per cycle");
      $display("phase2: %0d requests, %0d output cycles",
               burst.size(), last_out_cyc - t_start + 1);
      exact_mode = 0;
    end

    // ---------- phase 2b: request buffer full ----------
    // memory stalled; 64 pages (one per table set) get 10 requests each,
    // round robin: 640 requests are more than the buffer and the in-order
    // queue hold, so the input must stall until the memory side resumes.
    begin
      int out_before;
      out_before = n_out;
      out_ready = 0;
      fork
        begin
          for (int j = 0; j < 10; j++)
            for (int p = 0; p < 64; p++)
              send(mk(36'h200000 + 36'(p), j, 0, j));
        end
        begin
          repeat (1500) @(posedge clk);
          #1;
          check(n_in - out_before >= 512 + 32 - 1, "buffer filled before input stalled");
          check(c_rq_full > 0, "input held while buffer full");
          out_ready = 1;
        end
      join
      wait_drained(3000);
      check(n_out == n_in, "fill phase: every request left");
      $display("phase2b: 640 requests, runs out so far %0d", runs_out);
    end

    // ---------- phase 3: random stress ----------
    begin
      logic [35:0] st_page [16];
      int st_line [16], st_left [16];
      int in0, out0, rin0, rout0;
      in0 = n_in; out0 = n_out; rin0 = runs_in; rout0 = runs_out;
      for (int s = 0; s < 16; s++) begin
        st_page[s] = 36'($urandom); st_line[s] = 0; st_left[s] = 8;
      end
      fork
        begin
          for (int k = 0; k < 20000; k++) begin
            int s;
            s = $urandom_range(0, 15);
            if (st_left[s] == 0) begin
              // new page: a third of the time crowded onto sets 0..3
              if ($urandom_range(0, 2) == 0)
                st_page[s] = {30'($urandom), 6'($urandom_range(0, 3))};
              else
                st_page[s] = {4'h0, 32'($urandom)};
              st_line[s] = 0;
              st_left[s] = $urandom_range(2, 40);
            end
            send(mk(st_page[s], st_line[s] % 64, $urandom_range(0, 3) == 0, k));
            st_line[s]++;
            st_left[s]--;
            if ($urandom_range(0, 7) == 0) repeat ($urandom_range(1, 4)) @(posedge clk);
            #0;
          end
        end
        begin
          for (int k = 0; k < 40000; k++) begin
            @(posedge clk);
            #1;
            // alternate periods of slow and fast memory
            if (((k / 2000) % 2) == 0) out_ready = $urandom_range(0, 3) == 0;
            else out_ready = $urandom_range(0, 7) != 0;
          end
        end
      join_any
      out_ready = 1;
      wait_drained(5000);
      check(n_out == n_in, "stress: every request left");
      check(page_q.num() == 0, "stress: nothing left in scoreboard");
      $display("phase3: %0d requests, page runs in=%0d out=%0d (avg run in %0.2f, out %0.2f)",
               n_in - in0, runs_in - rin0, runs_out - rout0,
               real'(n_in - in0) / real'(runs_in - rin0),
               real'(n_out - out0) / real'(runs_out - rout0));
      check(runs_out - rout0 < runs_in - rin0, "output runs longer than input runs");
    end

    $display("events: hit=%0d new_page=%0d to_pending=%0d from_pending=%0d bypass_blocked_pending=%0d rq_full=%0d drain_wait=%0d page_switch=%0d in_stall=%0d mem_backpressure=%0d",
             c_hit, c_alloc, c_to_pend, c_from_pend, c_bypass, c_rq_full, c_drain_wait, c_switch,
             c_in_stall, c_out_stall);
    check(c_hit > 0, "mechanism: page hit");
    check(c_alloc > 0, "mechanism: new page entry");
    check(c_to_pend > 0, "mechanism: pending queue insert");
    check(c_from_pend > 0, "mechanism: pending queue retry");
    check(c_bypass > 0, "mechanism: new request passes a blocked pending head");
    check(c_rq_full > 0, "mechanism: request buffer full");
    check(c_drain_wait > 0, "mechanism: wait on draining page");
    check(c_switch > 0, "mechanism: page switch");
    check(c_in_stall > 0, "mechanism: input stall");
    check(c_out_stall > 0, "mechanism: memory back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
