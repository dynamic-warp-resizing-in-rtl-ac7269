// tb_sco - random test of the sub-warp combiner (8 sub-warps of 8 threads).
// For random combine-ready / issuable vectors, PCs (drawn from three values so
// that partners often match) and active masks, the expected sub-warp mask,
// merged active mask and warp size are computed in the testbench.
module tb_sco;
  logic [2:0] sel_lane;
  logic [7:0] combine_ready, issuable;
  logic [7:0][31:0] pc;
  logic [7:0][7:0] active;
  logic [7:0] sw_mask;
  logic [7:0][7:0] warp_active;
  logic [3:0] warp_size;
  int checks = 0, failures = 0, n_comb = 0;

  sco dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] e_mask;
    logic [7:0][7:0] e_act;
    int e_size;
    for (int i = 0; i < 2000; i++) begin
      sel_lane      = 3'($urandom);
      combine_ready = 8'($urandom) | 8'($urandom);
      issuable      = 8'($urandom) | 8'($urandom);
      issuable[sel_lane] = 1'b1;
      for (int l = 0; l < 8; l++) begin
        pc[l]     = 32'($urandom_range(0, 2)) * 32'h100;
        active[l] = 8'($urandom);
      end
      #1;
      e_mask = '0; e_size = 0;
      for (int l = 0; l < 8; l++)
        if (l == int'(sel_lane) ||
            (combine_ready[sel_lane] && combine_ready[l] && issuable[l] && pc[l] == pc[sel_lane]))
          e_mask[l] = 1;
      for (int l = 0; l < 8; l++) begin
        e_act[l] = e_mask[l] ? active[l] : 8'h00;
        e_size  += int'(e_mask[l]);
      end
      if (e_size > 1) n_comb++;
      checks++;
      if (sw_mask !== e_mask || warp_active !== e_act || int'(warp_size) != e_size) begin
        failures++;
        if (failures < 10) $display("FAIL %0d: mask %h exp %h size %0d exp %0d", i, sw_mask, e_mask, warp_size, e_size);
      end
      #9;
    end
    checks++;
    if (n_comb == 0) begin failures++; $display("FAIL no combined warp"); end
    $display("combined warps: %0d", n_comb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
