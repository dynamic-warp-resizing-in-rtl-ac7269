// pst - Partner-Synch Table.
//
// One entry per partner sub-warp group (16 groups of 8 sub-warps in the main
// configuration), each a valid bit, the PC of the first LAT barrier reached and
// a lock bit vector with one bit per partner sub-warp (1 + 32 + 8 bits, 82 bytes
// for 16 entries, as the paper sizes it).
//
// A bar.synch_partner arrival (op_kind = 0) performs the paper's two steps:
//   Step 1  entry invalid            -> store PC, set the sub-warp's lock bit
//           entry valid, PC equal    -> set the lock bit
//           entry valid, PC differs  -> set the lock bit and ask for the
//                                       sub-warp's PC to be put into the ILT
//   Step 2  lock vector complete     -> release the group (entry cleared)
//           otherwise                -> the sub-warp waits
// Whether the PC is already in the ILT is decided before this table is used
// (see synch_partner_unit).
//
// Deadlock freedom: a LAT barrier only locks a sub-warp until each partner has
// reached a LAT barrier, __syncthreads() or exit. The partners that sit at
// __syncthreads(), have exited or were never launched are given on
// `other_arrived` and count as set when the vector is checked. When such a
// partner arrives (op_kind = 1) the entry is checked again and released if now
// complete; the arriving partner's own bit is counted even if `other_arrived`
// does not show it yet. Passing these partners on a mask rather than setting
// their lock bits is this design's choice.
//
// Timing: results are combinational in the cycle of the operation; the table
// is updated on the next rising edge. One operation per cycle.
module pst #(
  parameter int unsigned GROUPS = 16,
  parameter int unsigned GSIZE  = 8,
  parameter int unsigned PC_W   = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   op_valid,
  input  logic                   op_kind,        // 0: bar.synch_partner, 1: other arrival
  input  logic [$clog2(GROUPS > 1 ? GROUPS : 2)-1:0] op_group,
  input  logic [$clog2(GSIZE  > 1 ? GSIZE  : 2)-1:0] op_lane,
  input  logic [PC_W-1:0]        op_pc,
  input  logic [GSIZE-1:0]       other_arrived,  // of op_group's partners
  output logic                   release_o,      // op completes op_group's barrier
  output logic                   wait_o,         // bar.synch_partner: sub-warp locked
  output logic                   ilt_ins_valid,
  output logic [PC_W-1:0]        ilt_ins_pc
);
  logic             valid_q [GROUPS];
  logic [PC_W-1:0]  pc_q    [GROUPS];
  logic [GSIZE-1:0] lock_q  [GROUPS];

  logic [GSIZE-1:0] lane_bit;
  logic [GSIZE-1:0] lock_next;
  logic             complete;

  always_comb begin
    lane_bit      = GSIZE'(1) << op_lane;
    lock_next     = lock_q[op_group] | lane_bit;
    complete      = &(lock_next | other_arrived);
    ilt_ins_valid = 1'b0;
    ilt_ins_pc    = op_pc;
    release_o     = 1'b0;
    wait_o        = 1'b0;
    if (op_valid) begin
      if (op_kind == 1'b0) begin
        ilt_ins_valid = valid_q[op_group] && (pc_q[op_group] != op_pc);
        release_o     = complete;
        wait_o        = !complete;
      end else begin
        // a partner at __syncthreads()/exit only matters if someone is locked
        release_o = valid_q[op_group] && complete;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < GROUPS; g++) begin
        valid_q[g] <= 1'b0;
        lock_q[g]  <= '0;
        pc_q[g]    <= '0;
      end
    end else if (op_valid) begin
      if (release_o) begin
        valid_q[op_group] <= 1'b0;
        lock_q[op_group]  <= '0;
      end else if (op_kind == 1'b0) begin
        lock_q[op_group] <= lock_next;
        if (!valid_q[op_group]) begin
          valid_q[op_group] <= 1'b1;
          pc_q[op_group]    <= op_pc;
        end
      end
    end
  end

  // Only bar.synch_partner arrivals may add to the vector; a sub-warp locks once.
  property p_no_double_lock;
    @(posedge clk) disable iff (!rst_n)
      (op_valid && op_kind == 1'b0) |-> ((lock_q[op_group] & lane_bit) == '0);
  endproperty
  a_no_double_lock: assert property (p_no_double_lock);

endmodule
