// tb_mars_fifo: self-checking test of the FIFO used as page order queue,
// pending queue and in-order memory buffer.
//
// Two instances: one at the page order queue's size (7-bit entries, 128 deep)
// and one small (16-bit, 5 deep, a depth that is not a power of two). Random
// push/pop traffic, with bursts that fill and empty each queue, is compared
// every cycle against a SystemVerilog queue model: head data, empty, full
// and count. Simultaneous push and pop on a full queue is exercised.
module tb_mars_fifo;
  logic clk = 0, rst_n;
  initial begin
    rst_n = 1;
    #2 rst_n = 0;  // a falling edge, so the asynchronous reset acts
  end
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // instance A: page order queue size
  logic       a_push, a_pop, a_empty, a_full;
  logic [6:0] a_din, a_dout;
  logic [7:0] a_count;
  mars_fifo #(.WIDTH(7), .DEPTH(128)) dut_a (
    .clk, .rst_n, .push(a_push), .push_data(a_din), .pop(a_pop),
    .pop_data(a_dout), .empty(a_empty), .full(a_full), .count(a_count));

  // instance B: small odd depth
  logic        b_push, b_pop, b_empty, b_full;
  logic [15:0] b_din, b_dout;
  logic [3:0]  b_count;
  mars_fifo #(.WIDTH(16), .DEPTH(5)) dut_b (
    .clk, .rst_n, .push(b_push), .push_data(b_din), .pop(b_pop),
    .pop_data(b_dout), .empty(b_empty), .full(b_full), .count(b_count));

  logic [6:0]  qa[$];
  logic [15:0] qb[$];
  int full_pushpop = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    a_push = 0; a_pop = 0; a_din = 0; b_push = 0; b_pop = 0; b_din = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      int mode;
      mode = (cyc / 400) % 3;  // 0: fill-biased, 1: drain-biased, 2: balanced
      @(negedge clk);
      // compare state with model
      check(a_empty == (qa.size() == 0), "A empty");
      check(a_full == (qa.size() == 128), "A full");
      check(a_count == 8'(qa.size()), "A count");
      if (qa.size() != 0) check(a_dout == qa[0], "A data");
      check(b_empty == (qb.size() == 0), "B empty");
      check(b_full == (qb.size() == 5), "B full");
      check(b_count == 4'(qb.size()), "B count");
      if (qb.size() != 0) check(b_dout == qb[0], "B data");
      // drive
      a_pop  = (qa.size() != 0) && ($urandom_range(0, 9) < (mode == 0 ? 2 : mode == 1 ? 8 : 5));
      a_push = ((qa.size() < 128) || a_pop) && ($urandom_range(0, 9) < (mode == 0 ? 8 : mode == 1 ? 2 : 5));
      a_din  = 7'($urandom);
      b_pop  = (qb.size() != 0) && ($urandom_range(0, 9) < (mode == 1 ? 8 : 4));
      b_push = ((qb.size() < 5) || b_pop) && ($urandom_range(0, 9) < 6);
      b_din  = 16'($urandom);
      if (b_push && b_pop && qb.size() == 5) full_pushpop++;
      @(posedge clk);
      #1;
      if (a_pop) void'(qa.pop_front());
      if (a_push) qa.push_back(a_din);
      if (b_pop) void'(qb.pop_front());
      if (b_push) qb.push_back(b_din);
      a_push = 0; a_pop = 0; b_push = 0; b_pop = 0;
    end
    check(full_pushpop > 0, "push+pop on full queue exercised");
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
