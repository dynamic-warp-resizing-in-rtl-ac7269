// dwr_pkg - shared constants and types of the Dynamic Warp Resizing (DWR) SM.
//
// The SM holds 1024 thread contexts split into sub-warps as wide as the 8-lane
// SIMD group, so 128 sub-warps. Partner groups of 8 sub-warps (DWR-64, the
// largest warp size evaluated) synchronise on LAT barriers and may be issued as
// one 64-thread warp. These numbers follow the paper's main configuration.
//
// The 3-bit sub-warp status (the paper widens a 2-bit status to 3 bits to add
// combine-ready) is encoded here as an enum; combine-ready itself is kept as a
// separate bit next to the status, as drawn in the scheduler table. The status
// values and the instruction format below are this design's own choice: the
// paper gives neither.
//
// Instruction word (32 bits, PC counts instructions, not bytes):
//   [31:28] opcode (op_e)
//   [27:20] BRA only: taken mask, bit k = branch taken by the sub-warp whose
//           index inside its partner group is k (a stand-in for data-dependent
//           divergence between sub-warps)
//   [19:0]  BRA only: absolute branch target
package dwr_pkg;

  parameter int unsigned STRIDE_BYTES = 64; // coalescing stride / cache block

  typedef enum logic [2:0] {
    ST_READY     = 3'd0,  // may be selected for issue
    ST_INFLIGHT  = 3'd1,  // an instruction of it is in the pipeline
    ST_WAIT_SP   = 3'd2,  // locked at bar.synch_partner
    ST_WAIT_SYNC = 3'd3,  // locked at __syncthreads()
    ST_WAIT_MEM  = 3'd4,  // its LAT is being coalesced / sent
    ST_EXITED    = 3'd5   // reached program exit (or never launched)
  } sw_status_e;

  typedef enum logic [3:0] {
    OP_ALU    = 4'd0,   // any non-LAT instruction
    OP_LAT    = 4'd1,   // ld/st global/local/param
    OP_BAR_SP = 4'd2,   // bar.synch_partner
    OP_SYNC   = 4'd3,   // __syncthreads()
    OP_BRA    = 4'd4,   // branch, taken per sub-warp by mask
    OP_EXIT   = 4'd5    // program exit
  } op_e;

  // Result of one bar.synch_partner operation.
  typedef enum logic [1:0] {
    SP_IGNORED = 2'd0,  // PC found in ILT: no lock
    SP_WAIT    = 2'd1,  // sub-warp stays locked
    SP_RELEASE = 2'd2   // lock vector complete: release the group
  } sp_result_e;

  function automatic op_e decode_op(input logic [31:0] insn);
    case (insn[31:28])
      4'd1:    return OP_LAT;
      4'd2:    return OP_BAR_SP;
      4'd3:    return OP_SYNC;
      4'd4:    return OP_BRA;
      4'd5:    return OP_EXIT;
      default: return OP_ALU;
    endcase
  endfunction

  // Event pulses of the SM, one bit per mechanism, for counters and testing.
  typedef struct packed {
    logic issue_combined;   // a warp of more than one sub-warp was issued
    logic issue_single;     // a single sub-warp was issued
    logic sp_wait;          // a sub-warp was locked at a LAT barrier
    logic sp_release;       // a LAT barrier released its partner group
    logic sp_ignored;       // a LAT barrier PC hit in the ILT
    logic ilt_insert;       // a NB-LAT PC was inserted into the ILT
    logic rel_by_other;     // a release completed by __syncthreads()/exit
    logic sync_release;     // a __syncthreads() barrier released its block
    logic lat_stall;        // decode held a LAT while the memory unit was busy
    logic mem_req;          // one coalesced request left the SM
    logic idle;             // the scheduler found no ready sub-warp
  } dwr_events_t;

endpackage
