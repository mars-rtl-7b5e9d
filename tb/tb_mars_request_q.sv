// tb_mars_request_q: self-checking test of the request buffer.
//
// Runs the buffer at its full 512-slot size. Random cycles insert a request
// into the offered empty slot (optionally linking a random occupied slot to
// it, as a page-tail link), release random occupied slots and read random
// slots. A model keeps packet, next pointer, NULL flag and valid bit per slot
// and predicts the offered empty slot (the lowest free one), the occupancy
// map and every read. Phases bias toward filling the buffer completely
// (free_vld must drop) and toward emptying it.
module tb_mars_request_q;
  import mars_pkg::*;
  localparam int N = 512;
  localparam int W = 9;
  logic clk = 0, rst_n;
  initial begin
    rst_n = 1;
    #2 rst_n = 0;  // a falling edge, so the asynchronous reset acts
  end
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] occ;
  logic free_vld, wr_en, link_en, rel_en, rd_nxt_null, rd_valid;
  logic [W-1:0] free_idx, wr_idx, link_idx, link_ptr, rel_idx, rd_idx, rd_nxt;
  mars_req_t wr_pkt, rd_pkt;

  mars_request_q #(.N(N)) dut (.*);

  mars_req_t m_pkt [N];
  logic [W-1:0] m_nxt [N];
  bit m_null [N], m_val [N];
  int fulls = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic int lowest_free();
    for (int i = 0; i < N; i++) if (!m_val[i]) return i;
    return -1;
  endfunction

  function automatic int rand_valid(input int exclude);
    int s;
    for (int t = 0; t < 40; t++) begin
      s = $urandom_range(0, N - 1);
      if (m_val[s] && s != exclude) return s;
    end
    for (int i = 0; i < N; i++) if (m_val[i] && i != exclude) return i;
    return -1;
  endfunction

  initial begin
    int lf, lk, rl;
    wr_en = 0; link_en = 0; rel_en = 0; wr_idx = 0; link_idx = 0;
    link_ptr = 0; rel_idx = 0; rd_idx = 0; wr_pkt = '0;
    for (int i = 0; i < N; i++) begin m_val[i] = 0; m_null[i] = 1; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 8000; cyc++) begin
      int phase;
      phase = (cyc / 1500) % 2;   // 0: fill, 1: drain
      @(negedge clk);
      lf = lowest_free();
      check(free_vld == (lf >= 0), "free_vld");
      if (lf >= 0) check(free_idx == W'(lf), "free_idx lowest");
      else fulls++;
      begin
        automatic bit ok = 1;
        for (int i = 0; i < N; i++) if (occ[i] != m_val[i]) ok = 0;
        check(ok, "occupancy map");
      end
      // read a random slot, occupied most of the time
      rd_idx = W'($urandom_range(0, N - 1));
      if ($urandom_range(0, 3) != 0) begin
        automatic int s = rand_valid(-1);
        if (s >= 0) rd_idx = W'(s);
      end
      #1;
      check(rd_valid == m_val[rd_idx], "rd_valid");
      if (m_val[rd_idx]) begin
        check(rd_pkt == m_pkt[rd_idx], "rd_pkt");
        check(rd_nxt_null == m_null[rd_idx], "rd_nxt_null");
        if (!m_null[rd_idx]) check(rd_nxt == m_nxt[rd_idx], "rd_nxt");
      end
      // choose operations
      wr_en   = (lf >= 0) && ($urandom_range(0, 9) < (phase == 0 ? 8 : 3));
      wr_idx  = free_idx;
      wr_pkt  = {48'($urandom) << 16 | 48'($urandom), 1'($urandom), 8'($urandom)};
      lk = rand_valid(-1);
      link_en = wr_en && lk >= 0 && $urandom_range(0, 1) == 1;
      link_idx = W'(lk < 0 ? 0 : lk);
      link_ptr = free_idx;
      rl = rand_valid(link_en ? lk : -1);
      rel_en  = rl >= 0 && ($urandom_range(0, 9) < (phase == 0 ? 3 : 8));
      rel_idx = W'(rl < 0 ? 0 : rl);
      @(posedge clk);
      #1;
      if (rel_en) m_val[rel_idx] = 0;
      if (wr_en) begin
        m_val[wr_idx] = 1; m_pkt[wr_idx] = wr_pkt; m_null[wr_idx] = 1;
      end
      if (link_en) begin m_nxt[link_idx] = link_ptr; m_null[link_idx] = 0; end
      wr_en = 0; link_en = 0; rel_en = 0;
    end
    check(fulls > 0, "buffer reached full");
    $display("full cycles seen: %0d", fulls);
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
