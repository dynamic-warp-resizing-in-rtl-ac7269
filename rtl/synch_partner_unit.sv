// synch_partner_unit - executes bar.synch_partner, the LAT barrier instruction.
//
// The instruction takes a sub-warp identifier and a PC. If the PC is in the
// Ignore List Table (ilt) nothing else happens and the sub-warp continues
// unlocked (SP_IGNORED). Otherwise the Partner-Synch Table (pst) of the
// sub-warp's partner group is updated (step 1, which may insert the PC into the
// ILT when partners are at different PCs) and checked (step 2): the sub-warp is
// either locked (SP_WAIT) or completes the barrier and releases all partners
// (SP_RELEASE), which the scheduler then marks combine-ready.
//
// Arrivals of a partner at __syncthreads() or exit (op_kind = 1) bypass the ILT
// and only re-check the group's entry (deadlock freedom, see pst).
//
// Partner groups are fixed: sub-warps g*GSIZE .. (g+1)*GSIZE-1 form group g,
// the limited ID distance the paper gives for the combiner.
//
// Timing: combinational result in the cycle of the operation, tables written
// on the next edge; one operation per cycle. The paper's 24-cycle pipelined
// latency of the operation is provided by the pipeline in front of this unit
// (see dwr_sm), not inside it.
module synch_partner_unit #(
  parameter int unsigned NUM_SW   = 128,
  parameter int unsigned GSIZE    = 8,
  parameter int unsigned ILT_SETS = 4,
  parameter int unsigned ILT_WAYS = 8,
  parameter int unsigned PC_W     = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      flush,          // empty the ILT
  input  logic                      op_valid,
  input  logic                      op_kind,        // 0: bar.synch_partner, 1: sync/exit arrival
  input  logic [$clog2(NUM_SW)-1:0] op_swid,
  input  logic [PC_W-1:0]           op_pc,
  input  logic [GSIZE-1:0]          other_arrived,  // partners of op_swid at sync/exit/unlaunched
  output dwr_pkg::sp_result_e       result,         // for op_kind = 0
  output logic                      release_o,      // group of op_swid released
  output logic                      ilt_inserted    // a PC went into the ILT
);
  import dwr_pkg::*;

  localparam int unsigned GROUPS = NUM_SW / GSIZE;
  localparam int unsigned LW     = $clog2(GSIZE > 1 ? GSIZE : 2);
  localparam int unsigned GW     = $clog2(GROUPS > 1 ? GROUPS : 2);

  logic            ilt_hit;
  logic            pst_valid;
  logic            pst_release, pst_wait;
  logic            ins_valid;
  logic [PC_W-1:0] ins_pc;
  logic [GW-1:0]   grp;
  logic [LW-1:0]   lane;

  assign grp  = GW'(op_swid / GSIZE);
  assign lane = LW'(op_swid % GSIZE);

  ilt #(.SETS(ILT_SETS), .WAYS(ILT_WAYS), .PC_W(PC_W)) u_ilt (
    .clk, .rst_n, .flush,
    .lookup_pc (op_pc),
    .lookup_hit(ilt_hit),
    .ins_valid (ins_valid),
    .ins_pc    (ins_pc)
  );

  assign pst_valid = op_valid && (op_kind || !ilt_hit);

  pst #(.GROUPS(GROUPS), .GSIZE(GSIZE), .PC_W(PC_W)) u_pst (
    .clk, .rst_n,
    .op_valid     (pst_valid),
    .op_kind      (op_kind),
    .op_group     (grp),
    .op_lane      (lane),
    .op_pc        (op_pc),
    .other_arrived(other_arrived),
    .release_o    (pst_release),
    .wait_o       (pst_wait),
    .ilt_ins_valid(ins_valid),
    .ilt_ins_pc   (ins_pc)
  );

  always_comb begin
    if (pst_release)   result = SP_RELEASE;
    else if (pst_wait) result = SP_WAIT;
    else               result = SP_IGNORED;
  end
  assign release_o    = pst_release;
  assign ilt_inserted = ins_valid;

endmodule
