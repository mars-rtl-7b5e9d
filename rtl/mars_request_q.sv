// mars_request_q: the MARS request buffer (RequestQ) with its occupancy map.
//
// N slots, any of which can be filled or emptied in any order. Each slot
// holds a request packet, a next pointer (NxtPtr) to the chronologically next
// slot holding a request to the same 4 KB page, and a valid bit; the N valid
// bits form the occupancy map from which the lowest empty slot is offered
// for the next insertion. Per-page chains are kept by the page table
// (mars_page_list), which stores only the head and tail slot of each chain.
//
// Ports, all acting at the rising clock edge:
//   wr_*   fill an empty slot: packet stored, valid set, NxtPtr = NULL.
//   link_* set NxtPtr of a slot (the old tail of a page) to a new slot.
//   rel_*  clear the valid bit of a slot (request forwarded).
//   rd_*   combinational read of one slot (packet, NxtPtr, NULL flag, valid).
// The three write ports may act in the same cycle on different slots.
// The slot layout, the occupancy map and the NULL pointer follow the paper's
// RequestQ; the asynchronous read port (register-file style rather than an
// SRAM with a clocked read) and the lowest-free-slot choice are this
// design's own. Only the valid bits are reset; the payload is not.
module mars_request_q
  import mars_pkg::*;
#(
  parameter int unsigned N     = 512,
  parameter int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // occupancy map and empty-slot search
  output logic [N-1:0]     occ,
  output logic             free_vld,
  output logic [IDX_W-1:0] free_idx,
  // insert
  input  logic             wr_en,
  input  logic [IDX_W-1:0] wr_idx,
  input  mars_req_t        wr_pkt,
  // link previous tail to new slot
  input  logic             link_en,
  input  logic [IDX_W-1:0] link_idx,
  input  logic [IDX_W-1:0] link_ptr,
  // release a forwarded slot
  input  logic             rel_en,
  input  logic [IDX_W-1:0] rel_idx,
  // read
  input  logic [IDX_W-1:0] rd_idx,
  output mars_req_t        rd_pkt,
  output logic [IDX_W-1:0] rd_nxt,
  output logic             rd_nxt_null,
  output logic             rd_valid
);

  mars_req_t        pkt_mem [N];
  logic [IDX_W-1:0] nxt_mem [N];
  logic [N-1:0]     nxt_null;
  logic [N-1:0]     valid;

  assign occ = valid;

  mars_free_slot #(.N(N), .IDX_W(IDX_W)) u_free (
    .occ     (valid),
    .free_vld(free_vld),
    .free_idx(free_idx)
  );

  always_ff @(posedge clk) begin
    if (wr_en) pkt_mem[wr_idx] <= wr_pkt;
    if (link_en) nxt_mem[link_idx] <= link_ptr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid    <= '0;
      nxt_null <= '1;
    end else begin
      if (rel_en) valid[rel_idx] <= 1'b0;
      if (wr_en) begin
        valid[wr_idx]    <= 1'b1;
        nxt_null[wr_idx] <= 1'b1;
      end
      if (link_en) nxt_null[link_idx] <= 1'b0;
    end
  end

  assign rd_pkt      = pkt_mem[rd_idx];
  assign rd_nxt      = nxt_mem[rd_idx];
  assign rd_nxt_null = nxt_null[rd_idx];
  assign rd_valid    = valid[rd_idx];

  // Rules of use.
  a_wr_empty: assert property (@(posedge clk) disable iff (!rst_n)
                               wr_en |-> !valid[wr_idx]);
  a_rel_full: assert property (@(posedge clk) disable iff (!rst_n)
                               rel_en |-> valid[rel_idx]);
  a_link_ok:  assert property (@(posedge clk) disable iff (!rst_n)
                               link_en |-> valid[link_idx] && (wr_en && wr_idx == link_ptr));

endmodule
