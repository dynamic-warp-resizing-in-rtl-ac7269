// tb_pst - self-checking test of the Partner-Synch Table (16 groups x 8).
// Directed sequences cover each case of step 1 (invalid entry, equal PC,
// different PC -> ILT insert), step 2 (wait / release), release by a partner
// arriving at __syncthreads()/exit, and partners counted as arrived through
// other_arrived. Expected outputs are written out per operation.
module tb_pst;
  logic clk = 0, rst_n = 0;
  logic op_valid = 0, op_kind = 0;
  logic [3:0] op_group = 0;
  logic [2:0] op_lane = 0;
  logic [31:0] op_pc = 0;
  logic [7:0] other_arrived = 0;
  logic release_o, wait_o, ilt_ins_valid;
  logic [31:0] ilt_ins_pc;
  int checks = 0, failures = 0;

  pst dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one operation; check release, wait, ILT insert
  task automatic op(input logic kind, input int g, input int l, input int pc, input logic [7:0] oth,
                    input logic e_rel, input logic e_wait, input logic e_ins);
    @(negedge clk);
    op_valid = 1; op_kind = kind; op_group = 4'(g); op_lane = 3'(l); op_pc = 32'(pc);
    other_arrived = oth;
    #1;
    checks++;
    if (release_o !== e_rel || wait_o !== e_wait || ilt_ins_valid !== e_ins ||
        (e_ins && ilt_ins_pc !== 32'(pc))) begin
      failures++;
      $display("FAIL g=%0d l=%0d pc=%0d rel=%0b wait=%0b ins=%0b, expected %0b %0b %0b",
               g, l, pc, release_o, wait_o, ilt_ins_valid, e_rel, e_wait, e_ins);
    end
    @(negedge clk); op_valid = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // all eight partners of group 3 at one PC
    for (int l = 0; l < 7; l++) op(0, 3, l, 100, 8'h00, 0, 1, 0);
    op(0, 3, 7, 100, 8'h00, 1, 0, 0);
    // entry is free again; partners at different PCs
    op(0, 3, 0, 200, 8'h00, 0, 1, 0);
    op(0, 3, 1, 300, 8'h00, 0, 1, 1);     // PC differs: insert 300
    op(0, 3, 2, 200, 8'h00, 0, 1, 0);     // same as stored PC
    // another group is independent
    op(0, 4, 1, 300, 8'h00, 0, 1, 0);
    // partners of group 3 arriving at __syncthreads()/exit
    op(1, 3, 3, 0, 8'b0000_1000, 0, 0, 0);
    op(1, 3, 7, 0, 8'b1111_1000, 1, 0, 0); // lanes 3..7 elsewhere, 0..2 locked
    // a sync arrival with nobody locked does nothing
    op(1, 3, 5, 0, 8'hFF, 0, 0, 0);
    // a barrier whose other partners are all exited releases at once
    op(0, 5, 0, 64, 8'hFE, 1, 0, 0);
    // group 4 completes with a mix of lock bits and arrived partners
    op(0, 4, 0, 300, 8'b1111_0000, 0, 1, 0);
    op(0, 4, 2, 300, 8'b1111_0000, 0, 1, 0);
    op(0, 4, 3, 300, 8'b1111_0000, 1, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
