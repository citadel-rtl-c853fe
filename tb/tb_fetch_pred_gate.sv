// tb_fetch_pred_gate: random test of next-PC selection against a reference
// model, in Safe mode (predictors on) and Burst mode (pc+4 only).
module tb_fetch_pred_gate;
  import citadel_pkg::*;
  spec_ctrl_t ctrl;
  logic [XLEN-1:0] f_pc, btb_target, f_next_pc, d_pc, d_pred_pc, d_direct_target, ras_top, d_redirect_pc;
  logic btb_hit, d_valid, d_is_branch, d_is_jal, d_is_ret, bht_taken, d_redirect;
  logic upd_btb_in, upd_bht_in, upd_ras_in, upd_btb, upd_bht, upd_ras;
  int checks = 0, failures = 0;

  fetch_pred_gate dut (.*);

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int i = 0; i < 2000; i++) begin
      logic burst, nopred, notrain;
      logic [XLEN-1:0] want_f, want_d;
      logic [1:0] kind;
      burst = $urandom_range(0,1); nopred = ($urandom_range(0,3) == 0); notrain = $urandom_range(0,1);
      ctrl = '{btb_en: !(burst||nopred), ras_en: !(burst||nopred), bht_en: !(burst||nopred),
               train_en: !notrain, delay_shared: !burst, spec_disable: 1'b0};
      f_pc = {$urandom, $urandom} & ~64'h3; btb_hit = $urandom_range(0,1);
      btb_target = {$urandom, $urandom} & ~64'h3;
      d_valid = 1; d_pc = {$urandom, $urandom} & ~64'h3;
      kind = 2'($urandom_range(0,3));
      d_is_branch = (kind == 1); d_is_jal = (kind == 2); d_is_ret = (kind == 3);
      bht_taken = $urandom_range(0,1); d_direct_target = {$urandom, $urandom} & ~64'h3;
      ras_top = {$urandom, $urandom} & ~64'h3;
      d_pred_pc = $urandom_range(0,1) ? d_pc + 4 : d_direct_target;
      {upd_btb_in, upd_bht_in, upd_ras_in} = 3'($urandom);
      #1;
      want_f = (!(burst||nopred) && btb_hit) ? btb_target : f_pc + 4;
      want_d = d_pc + 4;
      if (!(burst||nopred)) begin
        if (d_is_branch && bht_taken) want_d = d_direct_target;
        if (d_is_jal) want_d = d_direct_target;
        if (d_is_ret) want_d = ras_top;
      end
      chk(f_next_pc == want_f, "fetch next pc");
      chk(d_redirect_pc == want_d && d_redirect == (want_d != d_pred_pc), "decode redirect");
      chk({upd_btb, upd_bht, upd_ras} == ({upd_btb_in, upd_bht_in, upd_ras_in} & {3{!notrain}}), "training gate");
      if (burst) chk(f_next_pc == f_pc + 4 && want_d == d_pc + 4, "Burst: straight-line only");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
