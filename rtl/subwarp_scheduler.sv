// subwarp_scheduler - sub-warp table and issue selection of the DWR SM.
//
// Each of the NUM_SW sub-warps has an entry of valid bit, PC, SIMD-bit active
// mask, 3-bit status and combine-ready bit (the table of the paper's Fig. 3).
// Every cycle in which the front-end can take a warp, the scheduler picks one
// READY sub-warp in round-robin order (the policy is this design's choice) and
// hands it, with its partner group, to the sub-warp combiner (sco). The warp
// that comes out - the picked sub-warp alone, or all its combine-ready
// partners at the same PC merged into one large warp - is issued: its entries
// go to INFLIGHT and lose combine-ready.
//
// Status updates it accepts, all on the next rising edge:
//   launch      load an entry (valid, PC, active mask), READY
//   writeback   set PC and status of one sub-warp when its instruction leaves
//               the pipeline; with wb_cr the entry is also made combine-ready
//   release     a LAT barrier released partner group rel_group: every entry of
//               it at WAIT_SP becomes READY and combine-ready
//   mem_done    the LAT of a warp has been sent: its WAIT_MEM entries -> READY
// __syncthreads() (baseline behaviour): each sub-warp is given the slot of its
// thread block at launch (up to MAX_CTA resident blocks); when every launched,
// not exited sub-warp of a block is at WAIT_SYNC, all of them become READY.
// The paper does not describe this hardware; it is the plainest form of it.
//
// other_arrived marks sub-warps at __syncthreads(), exited or never launched:
// partners that a LAT barrier must not wait for.
module subwarp_scheduler #(
  parameter int unsigned NUM_SW = 128,
  parameter int unsigned GSIZE  = 8,
  parameter int unsigned SIMD   = 8,
  parameter int unsigned MAX_CTA = 8,
  parameter int unsigned PC_W   = 32
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // launch
  input  logic                              launch_valid,
  input  logic [$clog2(NUM_SW)-1:0]         launch_swid,
  input  logic [PC_W-1:0]                   launch_pc,
  input  logic [SIMD-1:0]                   launch_active,
  input  logic [$clog2(MAX_CTA > 1 ? MAX_CTA : 2)-1:0] launch_cta,
  // issue
  input  logic                              issue_ready,
  output logic                              issue_valid,
  output logic [$clog2(NUM_SW/GSIZE > 1 ? NUM_SW/GSIZE : 2)-1:0] issue_group,
  output logic [GSIZE-1:0]                  issue_sw_mask,
  output logic [GSIZE-1:0][SIMD-1:0]        issue_active,
  output logic [$clog2(GSIZE+1)-1:0]        issue_size,
  output logic [PC_W-1:0]                   issue_pc,
  // writeback
  input  logic                              wb_valid,
  input  logic [$clog2(NUM_SW)-1:0]         wb_swid,
  input  logic [PC_W-1:0]                   wb_pc,
  input  dwr_pkg::sw_status_e               wb_status,
  input  logic                              wb_cr,
  // LAT barrier release
  input  logic                              rel_valid,
  input  logic [$clog2(NUM_SW/GSIZE > 1 ? NUM_SW/GSIZE : 2)-1:0] rel_group,
  // memory done
  input  logic                              mem_done_valid,
  input  logic [$clog2(NUM_SW/GSIZE > 1 ? NUM_SW/GSIZE : 2)-1:0] mem_done_group,
  input  logic [GSIZE-1:0]                  mem_done_sw_mask,
  // state
  output logic [NUM_SW-1:0]                 other_arrived,
  output logic                              no_ready,
  output logic                              all_exited,
  output logic                              sync_release,
  output dwr_pkg::sw_status_e               status_o [NUM_SW],
  output logic [NUM_SW-1:0]                 cr_o,
  output logic [PC_W-1:0]                   pc_o [NUM_SW]
);
  import dwr_pkg::*;

  localparam int unsigned GROUPS = NUM_SW / GSIZE;
  localparam int unsigned GW     = $clog2(GROUPS > 1 ? GROUPS : 2);
  localparam int unsigned SW_W   = $clog2(NUM_SW);
  localparam int unsigned LW     = $clog2(GSIZE > 1 ? GSIZE : 2);
  localparam int unsigned CW     = $clog2(MAX_CTA > 1 ? MAX_CTA : 2);

  logic                valid_q  [NUM_SW];
  logic [PC_W-1:0]     pc_q     [NUM_SW];
  logic [SIMD-1:0]     active_q [NUM_SW];
  sw_status_e          status_q [NUM_SW];
  logic [CW-1:0]       cta_q    [NUM_SW];
  logic [NUM_SW-1:0]   cr_q;
  logic [SW_W-1:0]     rr_q;

  // ---------------- selection (round robin from rr_q) ----------------
  logic [NUM_SW-1:0] ready_vec;
  logic              found;
  logic [SW_W-1:0]   sel;
  always_comb begin
    for (int i = 0; i < NUM_SW; i++)
      ready_vec[i] = valid_q[i] && status_q[i] == ST_READY;
    found = 1'b0;
    sel   = '0;
    for (int i = 0; i < NUM_SW; i++)
      if (!found && ready_vec[i] && SW_W'(i) >= rr_q) begin
        found = 1'b1;
        sel   = SW_W'(i);
      end
    for (int i = 0; i < NUM_SW; i++)
      if (!found && ready_vec[i]) begin
        found = 1'b1;
        sel   = SW_W'(i);
      end
  end

  // ---------------- combiner on the picked sub-warp's group ----------------
  logic [GSIZE-1:0]            g_cr, g_iss;
  logic [GSIZE-1:0][PC_W-1:0]  g_pc;
  logic [GSIZE-1:0][SIMD-1:0]  g_act;
  logic [GW-1:0]               sel_group;
  logic [LW-1:0]               sel_lane;
  always_comb begin
    sel_group = GW'(sel / GSIZE);
    sel_lane  = LW'(sel % GSIZE);
    for (int l = 0; l < GSIZE; l++) begin
      g_cr[l]  = cr_q[32'(sel_group) * GSIZE + l];
      g_iss[l] = ready_vec[32'(sel_group) * GSIZE + l];
      g_pc[l]  = pc_q[32'(sel_group) * GSIZE + l];
      g_act[l] = active_q[32'(sel_group) * GSIZE + l];
    end
  end

  sco #(.GSIZE(GSIZE), .SIMD(SIMD), .PC_W(PC_W)) u_sco (
    .sel_lane     (sel_lane),
    .combine_ready(g_cr),
    .issuable     (g_iss),
    .pc           (g_pc),
    .active       (g_act),
    .sw_mask      (issue_sw_mask),
    .warp_active  (issue_active),
    .warp_size    (issue_size)
  );

  assign issue_valid = found;
  assign issue_group = sel_group;
  assign issue_pc    = pc_q[sel];
  assign no_ready    = !found;

  logic do_issue;
  assign do_issue = found && issue_ready;

  // ---------------- arrivals elsewhere / __syncthreads() ----------------
  logic [MAX_CTA-1:0] cta_release;
  logic [NUM_SW-1:0]  sync_go;
  always_comb begin
    for (int i = 0; i < NUM_SW; i++)
      other_arrived[i] = !valid_q[i] || status_q[i] == ST_EXITED || status_q[i] == ST_WAIT_SYNC;
    all_exited = 1'b1;
    for (int i = 0; i < NUM_SW; i++)
      if (valid_q[i] && status_q[i] != ST_EXITED) all_exited = 1'b0;
    for (int c = 0; c < MAX_CTA; c++) begin
      logic any_sync, all_in;
      any_sync = 1'b0;
      all_in   = 1'b1;
      for (int i = 0; i < NUM_SW; i++)
        if (valid_q[i] && cta_q[i] == CW'(c)) begin
          if (status_q[i] == ST_WAIT_SYNC) any_sync = 1'b1;
          if (!other_arrived[i]) all_in = 1'b0;
        end
      cta_release[c] = any_sync && all_in;
    end
    sync_release = |cta_release;
    for (int i = 0; i < NUM_SW; i++) sync_go[i] = cta_release[cta_q[i]];
  end

  // ---------------- table update ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_q <= '0;
      cr_q <= '0;
      for (int i = 0; i < NUM_SW; i++) begin
        valid_q[i]  <= 1'b0;
        pc_q[i]     <= '0;
        active_q[i] <= '0;
        status_q[i] <= ST_EXITED;
        cta_q[i]    <= '0;
      end
    end else begin
      if (do_issue) rr_q <= SW_W'(32'(sel) + 1);
      for (int i = 0; i < NUM_SW; i++) begin
        if (launch_valid && launch_swid == SW_W'(i)) begin
          valid_q[i]  <= 1'b1;
          pc_q[i]     <= launch_pc;
          active_q[i] <= launch_active;
          cta_q[i]    <= launch_cta;
          status_q[i] <= ST_READY;
          cr_q[i]     <= 1'b0;
        end else if (do_issue && GW'(i / GSIZE) == sel_group && issue_sw_mask[i % GSIZE]) begin
          status_q[i] <= ST_INFLIGHT;
          cr_q[i]     <= 1'b0;
        end else if (wb_valid && wb_swid == SW_W'(i)) begin
          pc_q[i]     <= wb_pc;
          status_q[i] <= wb_status;
          cr_q[i]     <= wb_cr;
        end else if (rel_valid && GW'(i / GSIZE) == rel_group && status_q[i] == ST_WAIT_SP) begin
          status_q[i] <= ST_READY;
          cr_q[i]     <= 1'b1;
        end else if (mem_done_valid && GW'(i / GSIZE) == mem_done_group &&
                     mem_done_sw_mask[i % GSIZE] && status_q[i] == ST_WAIT_MEM) begin
          status_q[i] <= ST_READY;
        end else if (sync_go[i] && status_q[i] == ST_WAIT_SYNC) begin
          status_q[i] <= ST_READY;
        end
      end
    end
  end

  always_comb
    for (int i = 0; i < NUM_SW; i++) begin
      status_o[i] = status_q[i];
      pc_o[i]     = pc_q[i];
    end
  assign cr_o = cr_q;

  // A writeback only ever concerns a sub-warp with an instruction in flight.
  a_wb_inflight: assert property (@(posedge clk) disable iff (!rst_n)
    wb_valid |-> status_q[wb_swid] == ST_INFLIGHT);

endmodule
