// mars_free_slot: finds the lowest-numbered free entry in an occupancy map.
//
// Combinational priority encoder over an N-bit occupancy vector (1 = slot
// in use). free_vld is high when at least one bit is 0 and free_idx is then
// the index of the lowest such bit; when every slot is used free_vld is low
// and free_idx is 0. Picking the lowest free slot is this design's choice:
// the reorder scheme only needs some empty slot.
module mars_free_slot #(
  parameter int unsigned N     = 512,
  parameter int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic [N-1:0]     occ,
  output logic             free_vld,
  output logic [IDX_W-1:0] free_idx
);

  always_comb begin
    free_vld = 1'b0;
    free_idx = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (!occ[i]) begin
        free_vld = 1'b1;
        free_idx = IDX_W'(i);
      end
    end
  end

endmodule
