// mars_page_list: the MARS physical page table (PhyPageList).
//
// M entries organised as M/WAYS sets of WAYS ways. Each entry describes one
// 4 KB physical page that has requests waiting in the request buffer: its
// page number, the slots of the oldest (head) and newest (tail) of those
// requests, how many there are (count) and a valid bit. The set is chosen by
// the low bits of the page number; the full page number is kept in the entry
// and compared in every way of the set.
//
// An entry is named by its index set*WAYS + way, which is what the page
// order FIFO stores and what the forwarding side uses.
//
//   lookup  (combinational) lk_page -> hit / hit entry and its tail, or the
//           first free way of the set, or set_full when every way is valid.
//   hit_*   one more request on an entry: count+1, tail = new slot.
//   alloc_* create an entry: page, count = 1, head = tail = new slot.
//   fwd_*   the head request of an entry was forwarded: count-1 and
//           head = that request's NxtPtr; an entry whose count reaches 0 is
//           freed in the same edge.
//   rd_*    combinational read of one entry for the forwarding side.
// hit_* and fwd_* may name the same entry in one cycle (count stays, tail
// and head both move) as long as that entry's count is above 1; the
// insertion side holds off that one case.
// Fields and algorithm follow the paper; the set index taken from the low
// page-number bits, the "full" test applied to the indexed set and the
// asynchronous read ports are this design's own.
module mars_page_list
  import mars_pkg::*;
#(
  parameter int unsigned M      = 128,
  parameter int unsigned WAYS   = 2,
  parameter int unsigned N      = 512,
  parameter int unsigned SLOT_W = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned ENT_W  = (M > 1) ? $clog2(M) : 1,
  parameter int unsigned CNT_W  = $clog2(N + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // lookup
  input  page_t             lk_page,
  output logic              lk_hit,
  output logic [ENT_W-1:0]  lk_hit_idx,
  output logic [SLOT_W-1:0] lk_hit_tail,
  output logic              lk_set_full,
  output logic [ENT_W-1:0]  lk_free_idx,
  // append to an existing entry
  input  logic              hit_en,
  input  logic [ENT_W-1:0]  hit_idx,
  input  logic [SLOT_W-1:0] hit_slot,
  // create an entry
  input  logic              alloc_en,
  input  logic [ENT_W-1:0]  alloc_idx,
  input  page_t             alloc_page,
  input  logic [SLOT_W-1:0] alloc_slot,
  // head request forwarded
  input  logic              fwd_en,
  input  logic [ENT_W-1:0]  fwd_idx,
  input  logic [SLOT_W-1:0] fwd_next_head,
  // read for forwarding
  input  logic [ENT_W-1:0]  rd_idx,
  output logic              rd_valid,
  output page_t             rd_page,
  output logic [SLOT_W-1:0] rd_head,
  output logic [CNT_W-1:0]  rd_count,
  // number of valid entries
  output logic [ENT_W:0]    n_valid
);

  localparam int unsigned SETS  = M / WAYS;
  localparam int unsigned SET_W = (SETS > 1) ? $clog2(SETS) : 1;

  typedef struct packed {
    page_t             page;
    logic [SLOT_W-1:0] head;
    logic [SLOT_W-1:0] tail;
    logic [CNT_W-1:0]  count;
  } ent_t;

  ent_t         ent [M];
  logic [M-1:0] vld;

  // ---------------- lookup ----------------
  logic [SET_W-1:0] set_sel;
  assign set_sel = (SETS > 1) ? SET_W'(lk_page) : '0;

  always_comb begin
    logic [ENT_W-1:0] e;
    logic             found_free;
    lk_hit      = 1'b0;
    lk_hit_idx  = '0;
    lk_hit_tail = '0;
    lk_free_idx = '0;
    found_free  = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      e = ENT_W'(int'(set_sel) * WAYS + w);
      if (vld[e] && ent[e].page == lk_page && !lk_hit) begin
        lk_hit      = 1'b1;
        lk_hit_idx  = e;
        lk_hit_tail = ent[e].tail;
      end
      if (!vld[e] && !found_free) begin
        found_free  = 1'b1;
        lk_free_idx = e;
      end
    end
    lk_set_full = !found_free;
  end

  // ---------------- update ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      for (int i = 0; i < M; i++) ent[i] <= '0;
    end else begin
      for (int i = 0; i < M; i++) begin
        logic inc, dec;
        inc = hit_en && hit_idx == ENT_W'(i);
        dec = fwd_en && fwd_idx == ENT_W'(i);
        if (alloc_en && alloc_idx == ENT_W'(i)) begin
          vld[i]       <= 1'b1;
          ent[i].page  <= alloc_page;
          ent[i].head  <= alloc_slot;
          ent[i].tail  <= alloc_slot;
          ent[i].count <= CNT_W'(1);
        end else begin
          if (inc) ent[i].tail <= hit_slot;
          if (dec) ent[i].head <= fwd_next_head;
          if (inc && !dec) ent[i].count <= ent[i].count + 1'b1;
          if (dec && !inc) begin
            ent[i].count <= ent[i].count - 1'b1;
            if (ent[i].count == CNT_W'(1)) vld[i] <= 1'b0;
          end
        end
      end
    end
  end

  assign rd_valid = vld[rd_idx];
  assign rd_page  = ent[rd_idx].page;
  assign rd_head  = ent[rd_idx].head;
  assign rd_count = ent[rd_idx].count;

  always_comb begin
    n_valid = '0;
    for (int i = 0; i < M; i++) n_valid += (ENT_W + 1)'(vld[i]);
  end

  // Rules of use.
  a_alloc_free: assert property (@(posedge clk) disable iff (!rst_n)
                                 alloc_en |-> !vld[alloc_idx]);
  a_hit_valid:  assert property (@(posedge clk) disable iff (!rst_n)
                                 hit_en |-> vld[hit_idx]);
  a_fwd_valid:  assert property (@(posedge clk) disable iff (!rst_n)
                                 fwd_en |-> vld[fwd_idx]);
  a_no_last_hit: assert property (@(posedge clk) disable iff (!rst_n)
                                  (hit_en && fwd_en && hit_idx == fwd_idx)
                                  |-> ent[fwd_idx].count > CNT_W'(1));

endmodule
