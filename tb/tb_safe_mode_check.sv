// tb_safe_mode_check: drives random accesses through the Safe-mode check
// stage and compares each decision (issue vs. squash/re-dispatch) with a
// reference of the rule "a shared access only issues at the ROB head in Safe
// mode", plus the address add, dequeue/re-dispatch indices and the
// back-pressure behaviour.
module tb_safe_mode_check;
  import citadel_pkg::*;
  logic clk = 0, rst_n = 1, kill = 0;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  spec_ctrl_t ctrl; logic [ROB_TAG_W-1:0] rob_head;
  logic in_valid, in_ready; mem_uop_t in_uop; logic [3:0] in_idx;
  logic [XLEN-1:0] va, out_va; logic va_private, mech_en;
  logic out_valid, out_ready, out_private; mem_uop_t out_uop;
  logic deq_valid, redisp_valid, safe, squash; logic [3:0] deq_idx, redisp_idx;
  int checks = 0, failures = 0;
  int n_squash = 0, n_issue = 0;

  safe_mode_check dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    mem_uop_t u; logic [3:0] idx; logic exp_safe;
    ctrl = '0; rob_head = 0; in_valid = 0; in_uop = '0; in_idx = 0; va_private = 0; mech_en = 0; out_ready = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      u = '0;
      u.base = {$urandom, $urandom}; u.imm = 12'($urandom); u.rob_tag = 6'($urandom);
      u.is_store = 1'($urandom);
      idx = 4'($urandom);
      in_valid = 1; in_uop = u; in_idx = idx;
      @(negedge clk); in_valid = 0;
      // access now sits in the stage: randomise the environment
      ctrl = '0;
      ctrl.delay_shared = 1'($urandom);
      ctrl.spec_disable = ($urandom % 8 == 0);
      mech_en = ($urandom % 4 != 0);
      va_private = 1'($urandom);
      rob_head = ($urandom % 3 == 0) ? u.rob_tag : 6'($urandom);
      out_ready = ($urandom % 5 != 0);
      #1;
      if (ctrl.spec_disable) exp_safe = (u.rob_tag == rob_head);
      else if (!mech_en || va_private || !ctrl.delay_shared) exp_safe = 1;
      else exp_safe = (u.rob_tag == rob_head);
      chk(va == u.base + {{52{u.imm[11]}}, u.imm}, "virtual address add");
      chk(safe == exp_safe, "safe decision");
      chk(out_valid == exp_safe && squash == !exp_safe, "issue xor squash");
      chk(redisp_valid == !exp_safe && redisp_idx == idx, "re-dispatch index");
      chk(deq_valid == (exp_safe && out_ready) && (!deq_valid || deq_idx == idx), "dequeue");
      chk(in_ready == (!exp_safe || out_ready), "stage frees on squash or issue");
      if (exp_safe) begin
        n_issue++;
        chk(out_uop == u && out_va == va, "payload");
        while (!out_ready) begin @(negedge clk); out_ready = 1'($urandom); #1 chk(out_valid, "held under back-pressure"); end
      end else n_squash++;
      @(negedge clk); out_ready = 1; #1;
      chk(!out_valid && !squash, "stage empty afterwards");
    end
    // kill empties the stage
    @(negedge clk); in_valid = 1; @(negedge clk); in_valid = 0; kill = 1; @(negedge clk); kill = 0; #1;
    chk(!out_valid && !squash, "kill");
    chk(n_squash > 100 && n_issue > 100, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
