// tb_mars_workloads: synthetic request streams shaped after five GPU
// micro-benchmarks, run through the MARS reorderer at its default size.
//
//   WL1  read only, one texture stream
//   WL2  read + write, stencil and colour streams
//   WL3  write only, one stream
//   WL4  read only, hierarchical-Z and depth streams
//   WL5  read + write, one hierarchical-Z stream
//
// Each "stream" is walked by 16 independent sources (shader cores), each
// sweeping its own region of memory line by line in 64-byte steps; the
// sources are merged by a random arbiter, which destroys the page locality
// each source has on its own. The memory side accepts a request on half of
// the cycles (random), so requests pile up and MARS has lookahead. The sizes
// (16 sources, 3000 requests, 50 % memory acceptance) are this test's own.
//
// Two measures are taken on the order of requests at the unit's input (the
// order memory would see without MARS) and at its output:
//   * average page run: consecutive requests to one 4 KB page;
//   * CAS/ACT of a trace-level DRAM row model: 2 channels of 8 banks, each
//     bank with one open row; address bit 8 selects the channel, bits 15:13
//     the bank, bits 47:16 the row. A request to a bank whose open row
//     differs counts one activation; every request is one column access.
//     There is no timing and no controller reordering in this model; the
//     address map is this test's own.
// Checked per workload: every request leaves exactly once, same-page order
// is kept, and both measures are better at the output than at the input.
module tb_mars_workloads;
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

  mars_req_t page_q[page_t][$];
  int n_in, n_out, runs_in, runs_out;
  page_t last_in_pg, last_out_pg;
  bit in_ready_at_edge;

  int c_pend, c_rq_full;
  int act_in, act_out;
  logic [31:0] row_in [2][8], row_out [2][8];
  bit open_in [2][8], open_out [2][8];

  // one request seen by the row model; returns 1 when it needs an activation
  function automatic bit row_miss(input mars_req_t r, ref logic [31:0] rows [2][8],
                                  ref bit open [2][8]);
    int ch, bk;
    ch = int'(r.addr[8]);
    bk = int'(r.addr[15:13]);
    if (open[ch][bk] && rows[ch][bk] == r.addr[47:16]) return 1'b0;
    open[ch][bk] = 1'b1;
    rows[ch][bk] = r.addr[47:16];
    return 1'b1;
  endfunction

  always @(negedge clk) begin
    in_ready_at_edge = in_ready;
    if (rst_n) begin
      c_pend    += int'(dut.ev_to_pend);
      c_rq_full += int'(dut.ev_rq_full);
      if (in_valid && in_ready) begin
        page_t p;
        p = page_of(in_req);
        page_q[p].push_back(in_req);
        if (n_in == 0 || p != last_in_pg) runs_in++;
        act_in += int'(row_miss(in_req, row_in, open_in));
        last_in_pg = p;
        n_in++;
      end
      if (out_valid && out_ready) begin
        page_t p;
        p = page_of(out_req);
        check(page_q.exists(p) && page_q[p].size() > 0 && page_q[p][0] == out_req,
              "same-page order / no spurious request");
        if (page_q.exists(p) && page_q[p].size() > 0) begin
          void'(page_q[p].pop_front());
          if (page_q[p].size() == 0) page_q.delete(p);
        end
        if (n_out == 0 || p != last_out_pg) runs_out++;
        act_out += int'(row_miss(out_req, row_out, open_out));
        last_out_pg = p;
        n_out++;
      end
    end
  end

  task automatic send(input mars_req_t r);
    in_valid = 1;
    in_req = r;
    do @(posedge clk); while (!in_ready_at_edge);
    #1;
    in_valid = 0;
  endtask

  // wl: 1..5. Stream kinds: number of streams and write behaviour.
  task automatic run_workload(input int wl, input int nreq);
    int nstreams;
    logic [47:0] cur [2][16];
    bit stream_write [2];
    bit mixed_rw;
    int done;
    case (wl)
      1: begin nstreams = 1; stream_write[0] = 0; mixed_rw = 0; end
      2: begin nstreams = 2; stream_write[0] = 0; stream_write[1] = 1; mixed_rw = 0; end
      3: begin nstreams = 1; stream_write[0] = 1; mixed_rw = 0; end
      4: begin nstreams = 2; stream_write[0] = 0; stream_write[1] = 0; mixed_rw = 0; end
      default: begin nstreams = 1; stream_write[0] = 0; mixed_rw = 1; end
    endcase
    for (int st = 0; st < 2; st++)
      for (int s = 0; s < 16; s++)
        cur[st][s] = {8'(wl), 4'(st), 4'(s), 20'($urandom), 12'h000};
    n_in = 0; n_out = 0; runs_in = 0; runs_out = 0;
    c_pend = 0; c_rq_full = 0;
    act_in = 0; act_out = 0;
    for (int c = 0; c < 2; c++)
      for (int k = 0; k < 8; k++) begin
        open_in[c][k] = 0; open_out[c][k] = 0; row_in[c][k] = '0; row_out[c][k] = '0;
      end
    done = 0;
    fork
      begin
        for (int k = 0; k < nreq; k++) begin
          int st, s;
          mars_req_t r;
          st = $urandom_range(0, nstreams - 1);
          s = $urandom_range(0, 15);
          r.addr = cur[st][s];
          r.write = mixed_rw ? 1'($urandom_range(0, 1)) : stream_write[st];
          r.id = 8'(k);
          cur[st][s] = cur[st][s] + 48'd64;
          send(r);
        end
        done = 1;
      end
      begin
        while (!done || n_out != n_in) begin
          @(posedge clk);
          #1 out_ready = done ? 1'b1 : 1'($urandom_range(0, 1));
        end
      end
    join
    repeat (2) @(posedge clk);
    #1;
    check(n_out == n_in && n_in == nreq, "every request left once");
    check(page_q.num() == 0, "scoreboard empty");
    $display("WL%0d: %0d requests, avg page run in %0.2f, out %0.2f; CAS/ACT in %0.2f, out %0.2f (x%0.2f); pending inserts %0d, buffer-full cycles %0d",
             wl, nreq, real'(n_in) / real'(runs_in), real'(n_out) / real'(runs_out),
             real'(n_in) / real'(act_in), real'(n_out) / real'(act_out),
             real'(act_in) / real'(act_out), c_pend, c_rq_full);
    check(runs_out < runs_in, "page runs longer after MARS");
    check(act_out < act_in, "fewer row activations after MARS");
  endtask

  initial begin
    in_valid = 0; in_req = '0; out_ready = 0; c_pend = 0; c_rq_full = 0;
    act_in = 0; act_out = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int wl = 1; wl <= 5; wl++) run_workload(wl, 3000);
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
