// tb_frontend - test of the fetch/decode front-end (128 sub-warps, groups of 8).
// A stream of warps with random sub-warp masks is issued whenever the
// front-end is ready; a model instruction memory answers each PC with an
// opcode derived from the PC. The expected output stream (each warp's
// sub-warps in ascending order, with PC, decoded class, active mask, warp mask
// and tail flag) is built in the testbench. Checks: every record, the rate (S
// sub-warps leave within S+2 cycles of the first issue when nothing stalls),
// and that no LAT starts while mem_busy is high in the stalled phase.
module tb_frontend;
  import dwr_pkg::*;
  logic clk = 0, rst_n = 0;
  logic issue_valid = 0, issue_ready;
  logic [3:0] issue_group = 0;
  logic [7:0] issue_sw_mask = 0;
  logic [7:0][7:0] issue_active = 0;
  logic [3:0] issue_size = 0;
  logic [31:0] issue_pc = 0;
  logic [31:0] imem_addr, imem_rdata;
  logic mem_busy = 0, lat_stall;
  logic out_valid, out_tail;
  logic [6:0] out_swid;
  logic [31:0] out_pc, out_insn;
  op_e out_op;
  logic [7:0] out_active, out_warp_mask;
  logic [3:0] out_warp_size;
  int checks = 0, failures = 0;

  frontend dut (.*);

  always #5 clk = ~clk;
  // model instruction memory: opcode = pc % 6
  assign imem_rdata = {4'(imem_addr % 6), 8'hA5, imem_addr[19:0]};

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int swid; int pc; int op; int act; int wmask; bit tail; bit first; } exp_t;
  exp_t exp_q[$];
  int n_out = 0, n_stall = 0, n_bad_start = 0;
  bit phase_stall = 0;

  // push expected records when a warp is accepted
  always @(posedge clk) if (rst_n && issue_valid && issue_ready) begin
    int last; bit first;
    last = -1;
    for (int l = 0; l < 8; l++) if (issue_sw_mask[l]) last = l;
    first = 1;
    for (int l = 0; l < 8; l++) if (issue_sw_mask[l]) begin
      exp_q.push_back('{swid: int'(issue_group) * 8 + l, pc: int'(issue_pc), op: int'(issue_pc) % 6,
                       act: int'(issue_active[l]), wmask: int'(issue_sw_mask), tail: (l == last),
                       first: first});
      first = 0;
    end
  end

  // compare output records
  always @(posedge clk) if (rst_n) begin
    if (lat_stall) n_stall++;
    if (out_valid) begin
      exp_t e;
      checks++;
      n_out++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        e = exp_q.pop_front();
        if (int'(out_swid) != e.swid || int'(out_pc) != e.pc || int'(out_op) != e.op ||
            int'(out_active) != e.act || int'(out_warp_mask) != e.wmask || out_tail != e.tail) begin
          failures++;
          if (failures < 10)
            $display("FAIL got sw %0d pc %0d op %0d tail %0b, expected sw %0d pc %0d op %0d tail %0b",
                     out_swid, out_pc, out_op, out_tail, e.swid, e.pc, e.op, e.tail);
        end
        if (phase_stall && e.first && out_op == OP_LAT && mem_busy) n_bad_start++;
      end
    end
  end

  task automatic drive_warp();
    logic [7:0] m;
    m = 8'($urandom);
    if (m == 0) m = 8'h01;
    issue_valid   = 1;
    issue_group   = 4'($urandom);
    issue_sw_mask = m;
    issue_size    = 4'($countones(m));
    issue_pc      = 32'($urandom_range(0, 1000));
    for (int l = 0; l < 8; l++) issue_active[l] = 8'($urandom);
  endtask

  initial begin
    int total, t0, t1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // phase 1: back-to-back issue, no stalls, rate check
    total = 0;
    @(negedge clk);
    drive_warp();
    t0 = -1;
    for (int w = 0; w < 40; ) begin
      @(posedge clk);
      if (issue_ready) begin
        if (t0 < 0) t0 = int'($time);
        total += $countones(issue_sw_mask);
        w++;
        @(negedge clk);
        if (w < 40) drive_warp(); else issue_valid = 0;
      end else @(negedge clk);
    end
    wait (exp_q.size() == 0);
    @(posedge clk);
    t1 = int'($time);
    checks++;
    if ((t1 - t0) / 10 > total + 2) begin
      failures++;
      $display("FAIL %0d sub-warps took %0d cycles", total, (t1 - t0) / 10);
    end
    $display("phase 1: %0d sub-warps in %0d cycles", total, (t1 - t0) / 10);
    // phase 2: random mem_busy
    phase_stall = 1;
    fork
      begin
        for (int w = 0; w < 200; ) begin
          @(negedge clk);
          drive_warp();
          @(posedge clk);
          while (!issue_ready) @(posedge clk);
          w++;
        end
        @(negedge clk) issue_valid = 0;
      end
      begin
        for (int c = 0; c < 4000; c++) begin
          @(negedge clk);
          mem_busy = ($urandom_range(0, 3) != 0);
        end
      end
    join_any
    @(negedge clk) mem_busy = 0;
    repeat (30) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n_stall == 0 || n_bad_start != 0) begin
      failures++;
      $display("FAIL left %0d, stalls %0d, LAT started while busy %0d", exp_q.size(), n_stall, n_bad_start);
    end
    $display("outputs %0d, LAT stall cycles %0d", n_out, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
