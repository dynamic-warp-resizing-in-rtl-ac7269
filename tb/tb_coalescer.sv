// tb_coalescer - random test of the 64-thread, 64-byte-block coalescer.
// Each trial draws addresses with a chosen amount of locality (unit-stride
// words, a few blocks, or scattered) and a random active mask. The expected
// request list - the distinct blocks in order of the lowest thread touching
// each - is built in the testbench and compared request by request. With
// req_ready held high the coalescer must send one request per cycle; other
// trials apply random back-pressure.
module tb_coalescer;
  logic clk = 0, rst_n = 0, start = 0, req_ready = 0;
  logic [63:0] active = 0;
  logic [63:0][31:0] addr;
  logic busy, req_valid, done;
  logic [31:0] req_addr;
  logic [6:0] req_count;
  int checks = 0, failures = 0;

  coalescer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp_q[$];
    bit seen;
    int got, cycles, kind;
    bit bp;
    addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 300; trial++) begin
      kind = trial % 3;
      bp   = (trial % 2 == 1);
      for (int t = 0; t < 64; t++) begin
        case (kind)
          0: addr[t] = 32'h1000 + 32'(t) * 4;                          // unit stride words
          1: addr[t] = 32'h8000 + 32'($urandom_range(0, 3)) * 64 + 32'($urandom_range(0, 63));
          default: addr[t] = $urandom;
        endcase
      end
      active = {$urandom, $urandom};
      if (trial % 10 == 0) active = '1;
      exp_q.delete();
      for (int t = 0; t < 64; t++)
        if (active[t]) begin
          seen = 0;
          foreach (exp_q[k]) if (exp_q[k] == {addr[t][31:6], 6'd0}) seen = 1;
          if (!seen) exp_q.push_back({addr[t][31:6], 6'd0});
        end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      got = 0; cycles = 0;
      while (1) begin
        req_ready = bp ? 1'($urandom) : 1'b1;
        #1;
        cycles++;
        if (req_valid && req_ready) begin
          checks++;
          if (got >= exp_q.size() || req_addr !== exp_q[got]) begin
            failures++;
            if (failures < 10) $display("FAIL trial %0d req %0d addr %h", trial, got, req_addr);
          end
          got++;
        end
        if (done) break;
        @(negedge clk);
        if (cycles > 1000) break;
      end
      @(negedge clk);
      req_ready = 0;
      checks++;
      if (got != exp_q.size() || int'(req_count) != exp_q.size() || busy) begin
        failures++;
        $display("FAIL trial %0d: %0d requests, count %0d, expected %0d", trial, got, req_count, exp_q.size());
      end
      if (!bp) begin
        checks++;
        if (cycles != exp_q.size() && exp_q.size() != 0) begin
          failures++;
          $display("FAIL trial %0d: %0d cycles for %0d requests", trial, cycles, exp_q.size());
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
