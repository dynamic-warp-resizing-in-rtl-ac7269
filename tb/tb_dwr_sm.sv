// tb_dwr_sm - end-to-end test of the DWR SM at its default size: 128 sub-warps
// of 8 threads (1024 threads), partner groups of 8 (DWR-64), four thread
// blocks of 256 threads, 32-entry ILT, 24-deep pipeline.
//
// Run 0: one sub-warp alone runs ALU, ALU, EXIT; the gap between its two
//        issues must be the pipeline depth plus the one scheduling cycle.
// Run 1: all 128 sub-warps run the kernel below, modelled on the paper's
//        listings: a LAT barrier before every LAT, a branch that sends the
//        two halves of each partner group to LAT barriers at different PCs
//        (non-benefiting barrier -> ILT), and a branch that leaves one
//        partner at a LAT barrier while the others wait at __syncthreads()
//        (deadlock case of Listing 2b).
// Run 2: the same kernel again without emptying the ILT, so barriers found
//        non-benefiting in run 1 are now ignored.
//
// Checks: each run finishes (all sub-warps exit); every cache block touched by
// an executing thread of a LAT is requested and no other block is; the first
// LAT of run 1 is fully combined, 4 requests per 64-thread group (64 in all,
// where 8-thread warps would need 128); each mechanism (combined issue,
// single issue, barrier wait, release, release by __syncthreads()/exit, ILT
// insert, ILT hit, __syncthreads() release, LAT stall, idle cycle) happens.
module tb_dwr_sm;
  import dwr_pkg::*;
  logic clk = 0, rst_n = 0, ilt_flush = 0;
  logic launch_valid = 0;
  logic [6:0] launch_swid = 0;
  logic [31:0] launch_pc = 0;
  logic [7:0] launch_active = 0;
  logic [2:0] launch_cta = 0;
  logic [31:0] imem_addr, imem_rdata;
  logic lat_addr_req;
  logic [3:0] lat_addr_group;
  logic [31:0] lat_addr_pc;
  logic [63:0][31:0] lat_addr;
  logic mem_req_valid, mem_req_ready = 0;
  logic [31:0] mem_req_addr;
  logic all_exited;
  dwr_events_t events;
  int checks = 0, failures = 0;

  dwr_sm dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- program ----------------
  function automatic logic [31:0] enc(input op_e op, input logic [7:0] mask = 0, input int tgt = 0);
    return {op, mask, 20'(tgt)};
  endfunction
  logic [31:0] prog [32];
  initial begin
    for (int i = 0; i < 32; i++) prog[i] = enc(OP_EXIT);
    prog[0]  = enc(OP_ALU);
    prog[1]  = enc(OP_ALU);
    prog[2]  = enc(OP_BAR_SP);
    prog[3]  = enc(OP_LAT);                 // all threads
    prog[4]  = enc(OP_BRA, 8'h0F, 8);       // lanes 0-3 -> 8, lanes 4-7 -> 5
    prog[5]  = enc(OP_BAR_SP);
    prog[6]  = enc(OP_LAT);                 // lanes 4-7
    prog[7]  = enc(OP_BRA, 8'hFF, 10);
    prog[8]  = enc(OP_BAR_SP);
    prog[9]  = enc(OP_LAT);                 // lanes 0-3
    prog[10] = enc(OP_SYNC);
    prog[11] = enc(OP_BRA, 8'h01, 16);      // lane 0 -> 16, others -> 12
    prog[12] = enc(OP_ALU);
    prog[13] = enc(OP_ALU);
    prog[14] = enc(OP_SYNC);
    prog[15] = enc(OP_BRA, 8'hFF, 19);
    prog[16] = enc(OP_BAR_SP);              // lane 0 alone at a LAT barrier
    prog[17] = enc(OP_LAT);                 // lane 0
    prog[18] = enc(OP_SYNC);
    prog[19] = enc(OP_EXIT);
    prog[20] = enc(OP_ALU);                 // run 0
    prog[21] = enc(OP_ALU);
    prog[22] = enc(OP_EXIT);
  end
  assign imem_rdata = prog[imem_addr[4:0]];

  // per-thread LAT addresses: 4-byte word per thread, a separate region per PC
  function automatic logic [31:0] taddr(input int pc, input int tid);
    return 32'(pc) * 32'h1_0000 + 32'(tid) * 4;
  endfunction
  always_comb
    for (int t = 0; t < 64; t++) lat_addr[t] = taddr(int'(lat_addr_pc), int'(lat_addr_group) * 64 + t);

  // ---------------- memory model and request bookkeeping ----------------
  int req_by_pc [int];
  bit blk_seen [int];          // key: block address (regions per PC are disjoint)
  int n_req = 0;
  always @(posedge clk) begin
    mem_req_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && mem_req_valid && mem_req_ready) begin
      int pc;
      pc = int'(mem_req_addr >> 16);
      req_by_pc[pc] = req_by_pc.exists(pc) ? req_by_pc[pc] + 1 : 1;
      blk_seen[int'(mem_req_addr)] = 1;
      n_req++;
    end
  end

  // ---------------- event counters ----------------
  int c_comb = 0, c_single = 0, c_wait = 0, c_rel = 0, c_ign = 0, c_ins = 0, c_other = 0;
  int c_sync = 0, c_stall = 0, c_idle = 0, cycles = 0;
  always @(posedge clk) if (rst_n) begin
    cycles++;
    c_comb   += int'(events.issue_combined);
    c_single += int'(events.issue_single);
    c_wait   += int'(events.sp_wait);
    c_rel    += int'(events.sp_release);
    c_ign    += int'(events.sp_ignored);
    c_ins    += int'(events.ilt_insert);
    c_other  += int'(events.rel_by_other);
    c_sync   += int'(events.sync_release);
    c_stall  += int'(events.lat_stall);
    c_idle   += int'(events.idle);
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic launch_all(input int n, input int pc);
    for (int s = 0; s < n; s++) begin
      @(negedge clk);
      launch_valid = 1; launch_swid = 7'(s); launch_pc = 32'(pc); launch_active = 8'hFF; launch_cta = 3'(s / 32);
    end
    @(negedge clk);
    launch_valid = 0;
  endtask

  task automatic wait_done(input string run);
    int t;
    t = 0;
    while (!all_exited && t < 50000) begin @(posedge clk); t++; end
    check(all_exited, {run, " finished"});
    $display("%s: %0d cycles", run, t);
  endtask

  // expected blocks of one LAT: threads of lanes in lane_mask of every group
  task automatic check_blocks(input int pc, input logic [7:0] lane_mask);
    int missing;
    missing = 0;
    for (int g = 0; g < 16; g++)
      for (int l = 0; l < 8; l++)
        if (lane_mask[l])
          for (int t = 0; t < 8; t++)
            if (!blk_seen.exists(int'(taddr(pc, g * 64 + l * 8 + t) & ~32'h3F))) missing++;
    check(missing == 0, $sformatf("PC %0d: %0d thread accesses never requested", pc, missing));
  endtask

  initial begin
    int t_first, t_second, n;
    int run1_pc3;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- run 0: lone sub-warp, issue-to-issue spacing ----
    launch_all(1, 20);
    t_first = -1; t_second = -1; n = 0;
    while (t_second < 0 && n < 500) begin
      @(posedge clk); n++;
      if (events.issue_single) begin
        if (t_first < 0) t_first = n; else t_second = n;
      end
    end
    check(t_second - t_first == 24 + 1,
          $sformatf("lone sub-warp re-issued after %0d cycles, expected 25", t_second - t_first));
    wait_done("run 0");
    // ---- run 1 ----
    launch_all(128, 0);
    wait_done("run 1");
    run1_pc3 = req_by_pc.exists(3) ? req_by_pc[3] : 0;
    check(run1_pc3 == 64, $sformatf("run 1 LAT at PC 3: %0d requests, expected 64", run1_pc3));
    check_blocks(3, 8'hFF);
    check_blocks(6, 8'hF0);
    check_blocks(9, 8'h0F);
    check_blocks(17, 8'h01);
    n = 0;
    foreach (blk_seen[b]) n++;
    // distinct blocks touched: PC 3: 64, PC 6: 32, PC 9: 32, PC 17: 16
    check(n == 144, $sformatf("%0d distinct blocks requested, expected 144", n));
    $display("run 1: requests %0d (PC3 %0d, PC6 %0d, PC9 %0d, PC17 %0d)", n_req, req_by_pc[3],
             req_by_pc.exists(6) ? req_by_pc[6] : 0, req_by_pc.exists(9) ? req_by_pc[9] : 0,
             req_by_pc.exists(17) ? req_by_pc[17] : 0);
    $display("run 1: ILT inserts %0d, barrier waits %0d, releases %0d", c_ins, c_wait, c_rel);
    // ---- run 2: ILT kept ----
    launch_all(128, 0);
    wait_done("run 2");
    $display("total: %0d cycles, requests %0d", cycles, n_req);
    $display("events: combined %0d single %0d wait %0d release %0d (by sync/exit %0d) ignored %0d",
             c_comb, c_single, c_wait, c_rel, c_other, c_ign);
    $display("        ilt insert %0d, syncthreads release %0d, LAT stall %0d, idle %0d",
             c_ins, c_sync, c_stall, c_idle);
    check(c_comb > 0, "combined issue never happened");
    check(c_single > 0, "single issue never happened");
    check(c_wait > 0, "barrier wait never happened");
    check(c_rel > 0, "barrier release never happened");
    check(c_other > 0, "release by __syncthreads()/exit never happened");
    check(c_ins > 0, "ILT insert never happened");
    check(c_ign > 0, "ILT hit never happened");
    check(c_sync > 0, "__syncthreads() release never happened");
    check(c_stall > 0, "LAT stall never happened");
    check(c_idle > 0, "idle cycle never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
