// dwr_sm - issue and execute path of one SM with Dynamic Warp Resizing.
//
// Threads run as SIMD-wide sub-warps (8 threads). Ordinary instructions are
// issued per sub-warp, which keeps branch and memory divergence cheap. Before
// each memory instruction (LAT: load/store to global/local/param space) the
// compiler places a LAT barrier, bar.synch_partner; when all partner sub-warps
// of a group (8 sub-warps, DWR-64) have reached it, they are marked
// combine-ready and the sub-warp combiner issues them as one 64-thread warp, so
// the LAT is coalesced as a large warp. Barriers whose partners arrive at
// different PCs are recorded in the Ignore List Table and stop locking.
//
// Structure (paper Fig. 3):
//   subwarp_scheduler (+ sco)  -> frontend (fetch, decode)  -> execute pipe
//   -> writeback, which for bar.synch_partner consults synch_partner_unit
//   (PST + ILT), for LATs starts the coalescer, for __syncthreads()/exit
//   re-checks the partner group's barrier (deadlock freedom).
// The execute pipe is a delay line sized so that an instruction takes
// PIPE_DEPTH cycles from issue to writeback (24, the paper's pipeline depth,
// which is also the latency the paper gives bar.synch_partner). The paper's
// register file, SIMD lanes, caches and memory are not modelled: per-thread
// addresses of a LAT come in on lat_addr, and coalesced requests leave on
// mem_req_*. A LAT completes when its last request has been accepted, this
// design's simplification of the memory system. Branches are resolved per
// sub-warp from a mask in the instruction (see dwr_pkg); the reconvergence
// stack inside a sub-warp is not modelled.
//
// Interface timing: launch loads one sub-warp per cycle, with the slot of its
// thread block (launch_cta) for __syncthreads(). imem_rdata must
// answer imem_addr in the same cycle. lat_addr must answer lat_addr_req in the
// same cycle (addresses of the 64 threads of group lat_addr_group; inactive
// threads are ignored). mem_req_* is a valid/ready handshake.
module dwr_sm #(
  parameter int unsigned SIMD       = 8,    // sub-warp size = SIMD width
  parameter int unsigned GSIZE      = 8,    // sub-warps per largest warp (DWR-64)
  parameter int unsigned NUM_SW     = 128,  // 1024 threads / 8
  parameter int unsigned MAX_CTA    = 8,    // resident thread blocks
  parameter int unsigned ILT_SETS   = 4,
  parameter int unsigned ILT_WAYS   = 8,
  parameter int unsigned PIPE_DEPTH = 24
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                ilt_flush,
  // sub-warp launch
  input  logic                                launch_valid,
  input  logic [$clog2(NUM_SW)-1:0]           launch_swid,
  input  logic [31:0]                         launch_pc,
  input  logic [SIMD-1:0]                     launch_active,
  input  logic [$clog2(MAX_CTA > 1 ? MAX_CTA : 2)-1:0] launch_cta,
  // instruction memory
  output logic [31:0]                         imem_addr,
  input  logic [31:0]                         imem_rdata,
  // LAT operand addresses
  output logic                                lat_addr_req,
  output logic [$clog2(NUM_SW/GSIZE > 1 ? NUM_SW/GSIZE : 2)-1:0] lat_addr_group,
  output logic [31:0]                         lat_addr_pc,
  input  logic [GSIZE*SIMD-1:0][31:0]         lat_addr,
  // coalesced memory requests
  output logic                                mem_req_valid,
  input  logic                                mem_req_ready,
  output logic [31:0]                         mem_req_addr,
  // status
  output logic                                all_exited,
  output dwr_pkg::dwr_events_t                events
);
  import dwr_pkg::*;

  localparam int unsigned GROUPS = NUM_SW / GSIZE;
  localparam int unsigned GW     = $clog2(GROUPS > 1 ? GROUPS : 2);
  localparam int unsigned SW_W   = $clog2(NUM_SW);
  localparam int unsigned LW     = $clog2(GSIZE > 1 ? GSIZE : 2);
  localparam int unsigned SZW    = $clog2(GSIZE + 1);
  localparam int unsigned THREADS = GSIZE * SIMD;
  // issue -> fetch -> decode take 2 cycles; the rest of the depth is the delay line
  localparam int unsigned EXEC_STAGES = PIPE_DEPTH - 2;

  // ---------------- scheduler ----------------
  logic                       is_valid, is_ready;
  logic [GW-1:0]              is_group;
  logic [GSIZE-1:0]           is_mask;
  logic [GSIZE-1:0][SIMD-1:0] is_active;
  logic [SZW-1:0]             is_size;
  logic [31:0]                is_pc;

  logic                       wb_valid, wb_cr;
  logic [SW_W-1:0]            wb_swid;
  logic [31:0]                wb_pc;
  sw_status_e                 wb_status;
  logic                       rel_valid;
  logic [GW-1:0]              rel_group;
  logic                       mem_done;
  logic [GW-1:0]              lat_group_q;
  logic [GSIZE-1:0]           lat_mask_q;
  logic [NUM_SW-1:0]          other_arrived;
  logic                       no_ready, sync_release;
  sw_status_e                 status_unused [NUM_SW];
  logic [NUM_SW-1:0]          cr_unused;
  logic [31:0]                pc_unused [NUM_SW];

  subwarp_scheduler #(
    .NUM_SW(NUM_SW), .GSIZE(GSIZE), .SIMD(SIMD), .MAX_CTA(MAX_CTA), .PC_W(32)
  ) u_sched (
    .clk, .rst_n,
    .launch_valid, .launch_swid, .launch_pc, .launch_active, .launch_cta,
    .issue_ready     (is_ready),
    .issue_valid     (is_valid),
    .issue_group     (is_group),
    .issue_sw_mask   (is_mask),
    .issue_active    (is_active),
    .issue_size      (is_size),
    .issue_pc        (is_pc),
    .wb_valid, .wb_swid, .wb_pc, .wb_status, .wb_cr,
    .rel_valid, .rel_group,
    .mem_done_valid  (mem_done),
    .mem_done_group  (lat_group_q),
    .mem_done_sw_mask(lat_mask_q),
    .other_arrived,
    .no_ready,
    .all_exited,
    .sync_release,
    .status_o        (status_unused),
    .cr_o            (cr_unused),
    .pc_o            (pc_unused)
  );

  // ---------------- fetch / decode ----------------
  logic                 fe_valid, fe_tail, lat_stall, mem_busy;
  logic [SW_W-1:0]      fe_swid;
  logic [31:0]          fe_pc, fe_insn;
  op_e                  fe_op;
  logic [SIMD-1:0]      fe_active;
  logic [GSIZE-1:0]     fe_wmask;
  logic [SZW-1:0]       fe_wsize;

  frontend #(.NUM_SW(NUM_SW), .GSIZE(GSIZE), .SIMD(SIMD), .PC_W(32)) u_fe (
    .clk, .rst_n,
    .issue_valid  (is_valid),
    .issue_ready  (is_ready),
    .issue_group  (is_group),
    .issue_sw_mask(is_mask),
    .issue_active (is_active),
    .issue_size   (is_size),
    .issue_pc     (is_pc),
    .imem_addr, .imem_rdata,
    .mem_busy,
    .lat_stall,
    .out_valid    (fe_valid),
    .out_swid     (fe_swid),
    .out_pc       (fe_pc),
    .out_insn     (fe_insn),
    .out_op       (fe_op),
    .out_active   (fe_active),
    .out_warp_mask(fe_wmask),
    .out_warp_size(fe_wsize),
    .out_tail     (fe_tail)
  );

  // ---------------- execute delay line ----------------
  typedef struct packed {
    logic             valid;
    logic [SW_W-1:0]  swid;
    logic [31:0]      pc;
    logic [31:0]      insn;
    op_e              op;
    logic [SIMD-1:0]  active;
    logic [GSIZE-1:0] wmask;
    logic             tail;
  } rec_t;

  rec_t pipe_q [EXEC_STAGES];
  rec_t wbr;
  assign wbr = pipe_q[EXEC_STAGES-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < EXEC_STAGES; s++) pipe_q[s] <= '0;
    end else begin
      pipe_q[0] <= '{valid: fe_valid, swid: fe_swid, pc: fe_pc, insn: fe_insn, op: fe_op,
                     active: fe_active, wmask: fe_wmask, tail: fe_tail};
      for (int s = 1; s < EXEC_STAGES; s++) pipe_q[s] <= pipe_q[s-1];
    end
  end

  logic lat_in_pipe;
  always_comb begin
    lat_in_pipe = 1'b0;
    for (int s = 0; s < EXEC_STAGES; s++)
      if (pipe_q[s].valid && pipe_q[s].op == OP_LAT) lat_in_pipe = 1'b1;
  end

  // ---------------- writeback ----------------
  logic [LW-1:0]    wb_lane;
  logic [GW-1:0]    wb_group;
  logic             sp_valid, sp_kind, sp_release, sp_ins;
  sp_result_e       sp_result;
  logic [GSIZE-1:0] sp_other;

  assign wb_lane  = LW'(wbr.swid % GSIZE);
  assign wb_group = GW'(wbr.swid / GSIZE);
  always_comb
    for (int l = 0; l < GSIZE; l++) sp_other[l] = other_arrived[32'(wb_group) * GSIZE + l];

  assign sp_valid = wbr.valid && (wbr.op == OP_BAR_SP || wbr.op == OP_SYNC || wbr.op == OP_EXIT);
  assign sp_kind  = (wbr.op != OP_BAR_SP);

  synch_partner_unit #(
    .NUM_SW(NUM_SW), .GSIZE(GSIZE), .ILT_SETS(ILT_SETS), .ILT_WAYS(ILT_WAYS), .PC_W(32)
  ) u_sp (
    .clk, .rst_n,
    .flush        (ilt_flush),
    .op_valid     (sp_valid),
    .op_kind      (sp_kind),
    .op_swid      (wbr.swid),
    .op_pc        (wbr.pc),
    .other_arrived(sp_other),
    .result       (sp_result),
    .release_o    (sp_release),
    .ilt_inserted (sp_ins)
  );

  always_comb begin
    wb_valid  = wbr.valid;
    wb_swid   = wbr.swid;
    wb_pc     = wbr.pc + 32'd1;
    wb_status = ST_READY;
    wb_cr     = 1'b0;
    case (wbr.op)
      OP_BRA:    if (wbr.insn[20 + 32'(wb_lane)]) wb_pc = {12'd0, wbr.insn[19:0]};
      OP_BAR_SP: begin
        wb_status = (sp_result == SP_WAIT) ? ST_WAIT_SP : ST_READY;
        wb_cr     = (sp_result == SP_RELEASE);
      end
      OP_SYNC:   wb_status = ST_WAIT_SYNC;
      OP_EXIT:   begin wb_status = ST_EXITED; wb_pc = wbr.pc; end
      OP_LAT:    wb_status = ST_WAIT_MEM;
      default:   ;
    endcase
  end
  assign rel_valid = sp_release;
  assign rel_group = wb_group;

  // ---------------- memory unit: gather LAT warp, coalesce ----------------
  logic [GSIZE-1:0][SIMD-1:0] lat_act_q;
  logic [GSIZE-1:0][SIMD-1:0] lat_act_all;
  logic                       lat_start;
  logic                       co_busy;
  logic [$clog2(THREADS+1)-1:0] co_count;

  always_comb begin
    lat_act_all          = lat_act_q;
    lat_act_all[wb_lane] = wbr.active;
  end
  assign lat_start      = wbr.valid && wbr.op == OP_LAT && wbr.tail;
  assign lat_addr_req   = lat_start;
  assign lat_addr_group = wb_group;
  assign lat_addr_pc    = wbr.pc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lat_act_q   <= '0;
      lat_group_q <= '0;
      lat_mask_q  <= '0;
    end else if (wbr.valid && wbr.op == OP_LAT) begin
      lat_act_q <= wbr.tail ? '0 : lat_act_all;
      if (wbr.tail) begin
        lat_group_q <= wb_group;
        lat_mask_q  <= wbr.wmask;
      end
    end
  end

  coalescer #(.THREADS(THREADS), .ADDR_W(32), .BLOCK_BYTES(STRIDE_BYTES)) u_co (
    .clk, .rst_n,
    .start    (lat_start),
    .active   (lat_act_all),
    .addr     (lat_addr),
    .busy     (co_busy),
    .req_valid(mem_req_valid),
    .req_ready(mem_req_ready),
    .req_addr (mem_req_addr),
    .done     (mem_done),
    .req_count(co_count)
  );

  assign mem_busy = lat_in_pipe || co_busy;

  // ---------------- events ----------------
  always_comb begin
    events              = '0;
    events.issue_combined = is_valid && is_ready && is_size > SZW'(1);
    events.issue_single   = is_valid && is_ready && is_size == SZW'(1);
    events.sp_wait        = sp_valid && !sp_kind && sp_result == SP_WAIT;
    events.sp_release     = sp_release;
    events.sp_ignored     = sp_valid && !sp_kind && sp_result == SP_IGNORED;
    events.ilt_insert     = sp_ins;
    events.rel_by_other   = sp_release && sp_kind;
    events.sync_release   = sync_release;
    events.lat_stall      = lat_stall;
    events.mem_req        = mem_req_valid && mem_req_ready;
    events.idle           = no_ready;
  end

  // the memory unit never gets a second warp while busy
  a_lat_single: assert property (@(posedge clk) disable iff (!rst_n) lat_start |-> !co_busy);

  logic unused_ok;
  assign unused_ok = ^{co_count, cr_unused, fe_wsize};

endmodule
