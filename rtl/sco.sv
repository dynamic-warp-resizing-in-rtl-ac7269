// sco - Sub-warp Combiner.
//
// Builds the warp that is issued once the scheduler has picked a sub-warp. If
// the picked sub-warp is not combine-ready it is issued alone, as an
// SIMD-wide warp. If it is combine-ready (its partner group was released by a
// LAT barrier) the combiner gathers every combine-ready, issuable sub-warp of
// the same partner group and merges their active masks into one large warp,
// which carries its size (number of sub-warps) down the pipeline.
//
// From the paper: only sub-warps within the limited ID distance of one group
// (i*GSIZE .. (i+1)*GSIZE-1) are searched, and the active masks are merged.
// The paper also notes that partners released at different PCs cannot form one
// warp and are regrouped; here that is done by combining only partners whose
// PC equals that of the picked sub-warp (this design's rule; the others are
// issued by later picks).
//
// Purely combinational.
module sco #(
  parameter int unsigned GSIZE = 8,   // largest warp in sub-warps (DWR-64)
  parameter int unsigned SIMD  = 8,   // threads per sub-warp
  parameter int unsigned PC_W  = 32
) (
  input  logic [$clog2(GSIZE > 1 ? GSIZE : 2)-1:0] sel_lane,
  input  logic [GSIZE-1:0]                         combine_ready,
  input  logic [GSIZE-1:0]                         issuable,
  input  logic [GSIZE-1:0][PC_W-1:0]               pc,
  input  logic [GSIZE-1:0][SIMD-1:0]               active,
  output logic [GSIZE-1:0]                         sw_mask,     // sub-warps in the warp
  output logic [GSIZE-1:0][SIMD-1:0]               warp_active, // merged active mask
  output logic [$clog2(GSIZE+1)-1:0]               warp_size    // sub-warps in the warp
);
  always_comb begin
    sw_mask = '0;
    if (combine_ready[sel_lane]) begin
      for (int l = 0; l < GSIZE; l++)
        sw_mask[l] = combine_ready[l] && issuable[l] && (pc[l] == pc[sel_lane]);
    end
    sw_mask[sel_lane] = 1'b1;
    warp_size = '0;
    for (int l = 0; l < GSIZE; l++) begin
      warp_active[l] = sw_mask[l] ? active[l] : '0;
      warp_size      = warp_size + ($clog2(GSIZE+1))'(sw_mask[l]);
    end
  end
endmodule
