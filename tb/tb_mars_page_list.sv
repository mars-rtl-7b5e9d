// tb_mars_page_list: self-checking test of the page table.
//
// Full size: 128 entries, 2 ways, 512-slot request buffer. Each cycle a page
// is drawn from a pool crowded onto a few sets (so sets fill up) and looked
// up; the result (hit and hit entry / tail, free way, set full) is checked
// against a model. The test then appends to the hit entry or creates an
// entry in the free way, and in the same cycle "forwards" the head of a
// random live entry (count-1, head moves; the entry is freed at count 0),
// sometimes the same entry that is being appended to. A read of a random
// entry is checked every cycle, as is the count of live entries.
module tb_mars_page_list;
  import mars_pkg::*;
  localparam int M = 128, WAYS = 2, N = 512;
  localparam int SW = 9, EW = 7, CW = 10;
  logic clk = 0, rst_n;
  initial begin
    rst_n = 1;
    #2 rst_n = 0;  // a falling edge, so the asynchronous reset acts
  end
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  page_t lk_page, alloc_page, rd_page;
  logic lk_hit, lk_set_full, hit_en, alloc_en, fwd_en, rd_valid;
  logic [EW-1:0] lk_hit_idx, lk_free_idx, hit_idx, alloc_idx, fwd_idx, rd_idx;
  logic [SW-1:0] lk_hit_tail, hit_slot, alloc_slot, fwd_next_head, rd_head;
  logic [CW-1:0] rd_count;
  logic [EW:0] n_valid;

  mars_page_list #(.M(M), .WAYS(WAYS), .N(N)) dut (.*);

  bit m_v [M];
  page_t m_pg [M];
  int m_head [M], m_tail [M], m_cnt [M];
  int n_hits = 0, n_allocs = 0, n_full = 0, n_frees = 0, n_same = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic page_t pick_page();
    page_t p;
    // 4 crowded sets with 4 candidate pages each, plus random pages
    if ($urandom_range(0, 3) != 0)
      p = page_t'({$urandom_range(0, 3), 6'($urandom_range(0, 3))});
    else
      p = page_t'({$urandom, $urandom});
    return p;
  endfunction

  initial begin
    int set, hit_e, free_e, fe, nv;
    for (int i = 0; i < M; i++) begin
      m_v[i] = 0; m_pg[i] = '0; m_head[i] = 0; m_tail[i] = 0; m_cnt[i] = 0;
    end
    hit_en = 0; alloc_en = 0; fwd_en = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    hit_en = 0; alloc_en = 0; fwd_en = 0;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      @(negedge clk);
      lk_page = pick_page();
      rd_idx = EW'($urandom_range(0, M - 1));
      hit_en = 0; alloc_en = 0; fwd_en = 0;
      #1;
      set = int'(lk_page[5:0]);
      hit_e = -1; free_e = -1;
      for (int w = 0; w < WAYS; w++) begin
        automatic int e = set * WAYS + w;
        if (m_v[e] && m_pg[e] == lk_page && hit_e < 0) hit_e = e;
        if (!m_v[e] && free_e < 0) free_e = e;
      end
      check(lk_hit == (hit_e >= 0), "lk_hit");
      if (hit_e >= 0) begin
        check(lk_hit_idx == EW'(hit_e), "lk_hit_idx");
        check(lk_hit_tail == SW'(m_tail[hit_e]), "lk_hit_tail");
      end
      check(lk_set_full == (free_e < 0), "lk_set_full");
      if (free_e >= 0) check(lk_free_idx == EW'(free_e), "lk_free_idx");
      check(rd_valid == m_v[rd_idx], "rd_valid");
      if (m_v[rd_idx]) begin
        check(rd_page == m_pg[rd_idx], "rd_page");
        check(rd_head == SW'(m_head[rd_idx]), "rd_head");
        check(rd_count == CW'(m_cnt[rd_idx]), "rd_count");
      end
      nv = 0;
      for (int i = 0; i < M; i++) nv += int'(m_v[i]);
      check(n_valid == (EW + 1)'(nv), "n_valid");
      // forward from a random live entry (or the hit entry)
      fe = -1;
      if (hit_e >= 0 && m_cnt[hit_e] > 1 && $urandom_range(0, 3) == 0) fe = hit_e;
      else
        for (int t = 0; t < 30 && fe < 0; t++) begin
          automatic int e = $urandom_range(0, M - 1);
          if (m_v[e] && !(e == hit_e && m_cnt[e] == 1)) fe = e;
        end
      fwd_en = fe >= 0 && $urandom_range(0, 9) < 4;
      fwd_idx = EW'(fe < 0 ? 0 : fe);
      fwd_next_head = SW'($urandom);
      if (hit_e >= 0 && !(fwd_en && fe == hit_e && m_cnt[hit_e] == 1)) begin
        hit_en = 1; hit_idx = EW'(hit_e); hit_slot = SW'($urandom);
      end else if (hit_e < 0 && free_e >= 0 && $urandom_range(0, 9) < 7) begin
        alloc_en = 1; alloc_idx = EW'(free_e); alloc_page = lk_page; alloc_slot = SW'($urandom);
      end
      if (hit_e < 0 && free_e < 0) n_full++;
      @(posedge clk);
      #1;
      if (hit_en && fwd_en && hit_idx == fwd_idx) n_same++;
      if (alloc_en) begin
        m_v[alloc_idx] = 1; m_pg[alloc_idx] = alloc_page; m_cnt[alloc_idx] = 1;
        m_head[alloc_idx] = alloc_slot; m_tail[alloc_idx] = alloc_slot; n_allocs++;
      end
      if (hit_en) begin m_tail[hit_idx] = hit_slot; m_cnt[hit_idx]++; n_hits++; end
      if (fwd_en) begin
        m_head[fwd_idx] = fwd_next_head; m_cnt[fwd_idx]--;
        if (m_cnt[fwd_idx] == 0) begin m_v[fwd_idx] = 0; n_frees++; end
      end
      hit_en = 0; alloc_en = 0; fwd_en = 0;
    end
    $display("hits=%0d allocs=%0d set_full=%0d frees=%0d same_entry=%0d",
             n_hits, n_allocs, n_full, n_frees, n_same);
    check(n_hits > 0 && n_allocs > 0 && n_full > 0 && n_frees > 0 && n_same > 0,
          "all cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
