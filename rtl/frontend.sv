// frontend - fetch and decode stages of the DWR SM.
//
// A warp issued by the scheduler arrives with its partner group, the mask of
// the sub-warps it is made of, their active masks, its size and its PC. Since
// all sub-warps of a warp share the PC, the instruction is fetched once (fetch
// stage: imem_addr is driven from the fetch register and imem_rdata is taken
// combinationally in the same cycle) and decoded once. The decode stage then
// hands the warp's sub-warps to the back-end one per cycle, lowest first,
// because the back-end needs only the sub-warp identifier and active mask
// (paper, Sec. IV.E). Each sub-warp record also carries the warp's sub-warp
// mask and a tail flag so that the memory stage can coalesce a whole large
// warp. A warp of k sub-warps therefore occupies decode for k cycles.
//
// Stall: a LAT waits in decode, before its first sub-warp leaves, while
// mem_busy says an earlier LAT is still in the pipeline or being coalesced
// (this design's memory unit takes one warp at a time).
//
// Timing: issue is accepted when issue_valid && issue_ready; its first
// sub-warp appears on out_* two cycles later at the earliest.
module frontend #(
  parameter int unsigned NUM_SW = 128,
  parameter int unsigned GSIZE  = 8,
  parameter int unsigned SIMD   = 8,
  parameter int unsigned PC_W   = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // from the scheduler / combiner
  input  logic                        issue_valid,
  output logic                        issue_ready,
  input  logic [$clog2(NUM_SW/GSIZE > 1 ? NUM_SW/GSIZE : 2)-1:0] issue_group,
  input  logic [GSIZE-1:0]            issue_sw_mask,
  input  logic [GSIZE-1:0][SIMD-1:0]  issue_active,
  input  logic [$clog2(GSIZE+1)-1:0]  issue_size,
  input  logic [PC_W-1:0]             issue_pc,
  // instruction memory
  output logic [PC_W-1:0]             imem_addr,
  input  logic [31:0]                 imem_rdata,
  // memory unit
  input  logic                        mem_busy,
  output logic                        lat_stall,
  // one sub-warp per cycle to the back-end
  output logic                        out_valid,
  output logic [$clog2(NUM_SW)-1:0]   out_swid,
  output logic [PC_W-1:0]             out_pc,
  output logic [31:0]                 out_insn,
  output dwr_pkg::op_e                out_op,
  output logic [SIMD-1:0]             out_active,
  output logic [GSIZE-1:0]            out_warp_mask,
  output logic [$clog2(GSIZE+1)-1:0]  out_warp_size,
  output logic                        out_tail
);
  import dwr_pkg::*;

  localparam int unsigned GW = $clog2(NUM_SW/GSIZE > 1 ? NUM_SW/GSIZE : 2);
  localparam int unsigned LW = $clog2(GSIZE > 1 ? GSIZE : 2);
  localparam int unsigned SZW = $clog2(GSIZE+1);

  // fetch register
  logic                       f_valid;
  logic [GW-1:0]              f_group;
  logic [GSIZE-1:0]           f_mask;
  logic [GSIZE-1:0][SIMD-1:0] f_active;
  logic [SZW-1:0]             f_size;
  logic [PC_W-1:0]            f_pc;
  // decode register
  logic                       d_valid;
  logic                       d_started;
  logic [GW-1:0]              d_group;
  logic [GSIZE-1:0]           d_mask;     // whole warp
  logic [GSIZE-1:0]           d_left;     // sub-warps still to send
  logic [GSIZE-1:0][SIMD-1:0] d_active;
  logic [SZW-1:0]             d_size;
  logic [PC_W-1:0]            d_pc;
  logic [31:0]                d_insn;
  op_e                        d_op;

  // next sub-warp of the decode register
  logic [LW-1:0]    d_lane;
  logic [GSIZE-1:0] d_left_next;
  always_comb begin
    d_lane = '0;
    for (int l = GSIZE - 1; l >= 0; l--)
      if (d_left[l]) d_lane = LW'(l);
    d_left_next = d_left & ~(GSIZE'(1) << d_lane);
  end

  logic d_hold, d_send, d_done, f_move;
  assign d_hold      = d_valid && !d_started && d_op == OP_LAT && mem_busy;
  assign d_send      = d_valid && !d_hold;
  assign d_done      = d_send && d_left_next == '0;
  assign f_move      = f_valid && (!d_valid || d_done);
  assign issue_ready = !f_valid || f_move;
  assign lat_stall   = d_hold;
  assign imem_addr   = f_pc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_valid   <= 1'b0;
      d_valid   <= 1'b0;
      d_started <= 1'b0;
      f_group <= '0; f_mask <= '0; f_active <= '0; f_size <= '0; f_pc <= '0;
      d_group <= '0; d_mask <= '0; d_left <= '0; d_active <= '0; d_size <= '0;
      d_pc <= '0; d_insn <= '0; d_op <= OP_ALU;
    end else begin
      // decode register
      if (f_move) begin
        d_valid   <= 1'b1;
        d_started <= 1'b0;
        d_group   <= f_group;
        d_mask    <= f_mask;
        d_left    <= f_mask;
        d_active  <= f_active;
        d_size    <= f_size;
        d_pc      <= f_pc;
        d_insn    <= imem_rdata;
        d_op      <= decode_op(imem_rdata);
      end else if (d_send) begin
        d_left    <= d_left_next;
        d_started <= 1'b1;
        if (d_done) d_valid <= 1'b0;
      end
      // fetch register
      if (issue_valid && issue_ready) begin
        f_valid  <= 1'b1;
        f_group  <= issue_group;
        f_mask   <= issue_sw_mask;
        f_active <= issue_active;
        f_size   <= issue_size;
        f_pc     <= issue_pc;
      end else if (f_move) begin
        f_valid <= 1'b0;
      end
    end
  end

  assign out_valid     = d_send;
  assign out_swid      = ($clog2(NUM_SW))'(32'(d_group) * GSIZE + 32'(d_lane));
  assign out_pc        = d_pc;
  assign out_insn      = d_insn;
  assign out_op        = d_op;
  assign out_active    = d_active[d_lane];
  assign out_warp_mask = d_mask;
  assign out_warp_size = d_size;
  assign out_tail      = d_done;

  // A warp always holds at least one sub-warp and its size matches its mask.
  a_issue_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
    (issue_valid && issue_ready) |-> (issue_sw_mask != '0 && 32'(issue_size) == 32'($countones(issue_sw_mask))));

endmodule
