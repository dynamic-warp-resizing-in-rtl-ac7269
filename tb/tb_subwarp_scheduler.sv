// tb_subwarp_scheduler - directed test of the sub-warp table and issue logic
// (128 sub-warps, partner groups of 8, up to 8 resident thread blocks).
// Covers round-robin single issue, writeback, LAT-barrier release marking a
// group combine-ready and its issue as one large warp (only partners at the
// same PC combine), memory-done wake-up, the __syncthreads() release of a
// thread block, other_arrived and all_exited. Expected values are written out.
module tb_subwarp_scheduler;
  import dwr_pkg::*;
  logic clk = 0, rst_n = 0;
  logic launch_valid = 0;
  logic [6:0] launch_swid = 0;
  logic [31:0] launch_pc = 0;
  logic [7:0] launch_active = 0;
  logic [2:0] launch_cta = 0;
  logic issue_ready = 0, issue_valid;
  logic [3:0] issue_group;
  logic [7:0] issue_sw_mask;
  logic [7:0][7:0] issue_active;
  logic [3:0] issue_size;
  logic [31:0] issue_pc;
  logic wb_valid = 0, wb_cr = 0;
  logic [6:0] wb_swid = 0;
  logic [31:0] wb_pc = 0;
  sw_status_e wb_status = ST_READY;
  logic rel_valid = 0;
  logic [3:0] rel_group = 0;
  logic mem_done_valid = 0;
  logic [3:0] mem_done_group = 0;
  logic [7:0] mem_done_sw_mask = 0;
  logic [127:0] other_arrived;
  logic no_ready, all_exited, sync_release;
  sw_status_e status_o [128];
  logic [127:0] cr_o;
  logic [31:0] pc_o [128];
  int checks = 0, failures = 0;

  subwarp_scheduler dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic launch(input int sw, input int pc);
    @(negedge clk);
    launch_valid = 1; launch_swid = 7'(sw); launch_pc = 32'(pc); launch_active = 8'(sw + 1);
    @(negedge clk);
    launch_valid = 0;
  endtask

  // take one issue; check group, mask, pc
  task automatic take(input int grp, input logic [7:0] mask, input int pc);
    @(negedge clk);
    #1;
    check(issue_valid && int'(issue_group) == grp && issue_sw_mask == mask && int'(issue_pc) == pc &&
          int'(issue_size) == $countones(mask),
          $sformatf("issue grp %0d mask %b pc %0d size %0d, expected %0d %b %0d",
                    issue_group, issue_sw_mask, issue_pc, issue_size, grp, mask, pc));
    issue_ready = 1;
    @(negedge clk);
    issue_ready = 0;
  endtask

  task automatic wb(input int sw, input int pc, input sw_status_e st, input bit cr);
    @(negedge clk);
    wb_valid = 1; wb_swid = 7'(sw); wb_pc = 32'(pc); wb_status = st; wb_cr = cr;
    @(negedge clk);
    wb_valid = 0; wb_cr = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(no_ready && all_exited && other_arrived == '1, "empty table after reset");
    for (int s = 0; s < 16; s++) launch(s, 10);           // groups 0 and 1
    check(!all_exited && other_arrived[15:0] == 0 && other_arrived[16], "other_arrived after launch");
    // round robin: singles 0,1,2,3
    take(0, 8'b0000_0001, 10);
    take(0, 8'b0000_0010, 10);
    take(0, 8'b0000_0100, 10);
    check(status_o[0] == ST_INFLIGHT && status_o[3] == ST_READY, "status after issue");
    // drain the rest of groups 0 and 1 as singles
    for (int s = 3; s < 16; s++) take(s / 8, 8'(1) << (s % 8), 10);
    @(negedge clk);
    check(no_ready, "nothing ready while all in flight");
    // group 0: all reach the LAT barrier; 0..6 wait, 7 releases
    for (int s = 0; s < 7; s++) wb(s, 11, ST_WAIT_SP, 0);
    @(negedge clk);
    check(no_ready, "waiting sub-warps not issuable");
    @(negedge clk); rel_valid = 1; rel_group = 0;
    @(negedge clk); rel_valid = 0;
    wb(7, 11, ST_READY, 1);
    check(cr_o[7:0] == 8'hFF && status_o[3] == ST_READY, "group 0 combine-ready");
    #1;
    check(issue_active == 64'h0807_0605_0403_0201, "merged active mask");
    take(0, 8'hFF, 11);                                   // one 64-thread warp
    check(cr_o[7:0] == 8'h00 && status_o[5] == ST_INFLIGHT, "combine-ready cleared at issue");
    // group 1: released at two PCs -> two warps
    for (int s = 8; s < 12; s++) wb(s, 20, ST_WAIT_SP, 0);
    for (int s = 12; s < 15; s++) wb(s, 30, ST_WAIT_SP, 0);
    @(negedge clk); rel_valid = 1; rel_group = 1;
    @(negedge clk); rel_valid = 0;
    wb(15, 30, ST_READY, 1);
    take(1, 8'b0000_1111, 20);
    take(1, 8'b1111_0000, 30);
    // group 0's LAT: to WAIT_MEM, then memory done
    for (int s = 0; s < 8; s++) wb(s, 12, ST_WAIT_MEM, 0);
    @(negedge clk); mem_done_valid = 1; mem_done_group = 0; mem_done_sw_mask = 8'h0F;
    @(negedge clk); mem_done_valid = 0;
    check(status_o[3] == ST_READY && status_o[4] == ST_WAIT_MEM, "partial mem done");
    @(negedge clk); mem_done_valid = 1; mem_done_sw_mask = 8'hF0;
    @(negedge clk); mem_done_valid = 0;
    check(status_o[4] == ST_READY && pc_o[4] == 12, "mem done");
    // every sub-warp to __syncthreads(); all launched sub-warps are in block 0
    for (int s = 0; s < 8; s++) take(0, 8'(1) << s, 12);
    for (int s = 0; s < 8; s++) wb(s, 13, ST_WAIT_SYNC, 0);
    for (int s = 8; s < 15; s++) wb(s, 40, ST_WAIT_SYNC, 0);
    @(negedge clk);
    check(!sync_release && other_arrived[14:0] == 15'h7FFF && !other_arrived[15], "block not yet at barrier");
    wb(15, 40, ST_WAIT_SYNC, 0);
    #1;
    check(sync_release, "block released");
    @(negedge clk);
    check(status_o[0] == ST_READY && status_o[15] == ST_READY, "released to ready");
    // exit all
    // round robin continues after sub-warp 7: group 1 first
    for (int k = 0; k < 16; k++) take(((k + 8) % 16) / 8, 8'(1) << (k % 8), k < 8 ? 40 : 13);
    for (int s = 0; s < 15; s++) wb(s, 50, ST_EXITED, 0);
    @(negedge clk);
    check(!all_exited, "one sub-warp still running");
    wb(15, 50, ST_EXITED, 0);
    @(negedge clk);
    check(all_exited, "all exited");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
