// tb_ilt - self-checking test of the Ignore List Table at its default size
// (4 sets x 8 ways). Fills one set, checks hits, then checks round-robin
// replacement, duplicate inserts, set independence and flush against expected
// values worked out by hand.
module tb_ilt;
  logic clk = 0, rst_n = 0, flush = 0;
  logic [31:0] lookup_pc = 0, ins_pc = 0;
  logic lookup_hit, ins_valid = 0;
  int checks = 0, failures = 0;

  ilt dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic insert(input logic [31:0] pc);
    @(negedge clk); ins_valid = 1; ins_pc = pc;
    @(negedge clk); ins_valid = 0;
  endtask

  task automatic expect_hit(input logic [31:0] pc, input logic exp);
    @(negedge clk); lookup_pc = pc; #1;
    checks++;
    if (lookup_hit !== exp) begin
      failures++;
      $display("FAIL pc=%0d hit=%0b expected %0b", pc, lookup_hit, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    expect_hit(32'd1, 0);
    for (int k = 0; k < 8; k++) insert(32'(4 * k + 1));       // fills set 1
    for (int k = 0; k < 8; k++) expect_hit(32'(4 * k + 1), 1);
    expect_hit(32'd2, 0);                                      // set 2 empty
    expect_hit(32'd0, 0);
    insert(32'd33);                                            // evicts way 0 (pc 1)
    expect_hit(32'd1, 0);
    expect_hit(32'd33, 1);
    expect_hit(32'd5, 1);
    insert(32'd37);                                            // evicts way 1 (pc 5)
    expect_hit(32'd5, 0);
    insert(32'd33);                                            // already there: no change
    expect_hit(32'd9, 1);
    insert(32'd41);                                            // evicts way 2 (pc 9)
    expect_hit(32'd9, 0);
    expect_hit(32'd13, 1);
    insert(32'd2);                                             // set 2 independent
    expect_hit(32'd2, 1);
    expect_hit(32'd13, 1);
    expect_hit(32'h8000_0001, 0);                              // tag uses the high bits
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    expect_hit(32'd33, 0);
    expect_hit(32'd2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
