// tb_synch_partner_unit - random test of bar.synch_partner execution (ILT +
// PST) against a reference model kept in the testbench. 3000 random
// operations on 4 partner groups, 16 PCs (few enough that the ILT never has to
// replace), random partners at __syncthreads()/exit. Checks the result
// (ignored / wait / release), the release flag and ILT inserts every cycle.
module tb_synch_partner_unit;
  import dwr_pkg::*;
  logic clk = 0, rst_n = 0, flush = 0;
  logic op_valid = 0, op_kind = 0;
  logic [6:0] op_swid = 0;
  logic [31:0] op_pc = 0;
  logic [7:0] other_arrived = 0;
  sp_result_e result;
  logic release_o, ilt_inserted;
  int checks = 0, failures = 0;
  int n_ign = 0, n_wait = 0, n_rel = 0, n_ins = 0, n_other_rel = 0;

  synch_partner_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model
  bit        m_ilt [16];
  bit        m_valid [16];
  int        m_pc [16];
  bit [7:0]  m_lock [16];

  initial begin
    sp_result_e e_res;
    bit e_rel, e_ins;
    int g, l, pc;
    bit kind;
    bit [7:0] oth;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      g    = $urandom_range(0, 3);
      kind = ($urandom_range(0, 4) == 0);
      // pick a lane that is not locked
      do l = $urandom_range(0, 7); while (m_lock[g][l]);
      pc   = ($urandom_range(0, 19) == 0) ? $urandom_range(4, 15) : g;
      oth  = 8'($urandom) & 8'($urandom) & ~m_lock[g] & ~(8'(1) << l);
      // model
      e_res = SP_IGNORED; e_rel = 0; e_ins = 0;
      if (kind == 0 && m_ilt[pc]) begin
        e_res = SP_IGNORED;
      end else if (kind == 0) begin
        e_ins = m_valid[g] && m_pc[g] != pc;
        e_rel = &(m_lock[g] | (8'(1) << l) | oth);
        e_res = e_rel ? SP_RELEASE : SP_WAIT;
      end else begin
        e_rel = m_valid[g] && &(m_lock[g] | (8'(1) << l) | oth);
        e_res = e_rel ? SP_RELEASE : SP_IGNORED;
      end
      op_valid = 1; op_kind = kind; op_swid = 7'(g * 8 + l); op_pc = 32'(pc); other_arrived = oth;
      #1;
      checks++;
      if (release_o !== e_rel || ilt_inserted !== e_ins || (kind == 0 && result !== e_res)) begin
        failures++;
        if (failures < 10)
          $display("FAIL op %0d g=%0d l=%0d pc=%0d kind=%0b: res=%0d rel=%0b ins=%0b exp %0d %0b %0b",
                   i, g, l, pc, kind, result, release_o, ilt_inserted, e_res, e_rel, e_ins);
      end
      // update the model
      if (e_ins) begin m_ilt[pc] = 1; n_ins++; end
      if (e_rel) begin
        m_valid[g] = 0; m_lock[g] = 0; n_rel++;
        if (kind) n_other_rel++;
      end else if (kind == 0 && e_res == SP_WAIT) begin
        m_lock[g][l] = 1; n_wait++;
        if (!m_valid[g]) begin m_valid[g] = 1; m_pc[g] = pc; end
      end
      if (kind == 0 && e_res == SP_IGNORED) n_ign++;
    end
    @(negedge clk); op_valid = 0;
    $display("ignored=%0d waits=%0d releases=%0d (by sync/exit %0d) ilt inserts=%0d",
             n_ign, n_wait, n_rel, n_other_rel, n_ins);
    checks++;
    if (n_ign == 0 || n_wait == 0 || n_rel == 0 || n_ins == 0 || n_other_rel == 0) begin
      failures++;
      $display("FAIL some case never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
