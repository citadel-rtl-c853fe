// tb_mem_rs: checks the Safe-mode reservation station: oldest-first
// dispatch, operand wake-up, entries kept until dequeued, no second dispatch
// while in flight, re-dispatch only at the ROB head, and kill; then 6000
// cycles of random enqueue, wake-up, dispatch, dequeue and re-dispatch
// against a reference model of the station.
module tb_mem_rs;
  import citadel_pkg::*;
  logic clk = 0, rst_n = 1, kill;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  logic enq_valid, enq_ready; mem_uop_t enq_uop;
  logic [PREG_W-1:0] enq_src1, enq_src2; logic enq_src1_rdy, enq_src2_rdy;
  logic [1:0] wake_valid; logic [1:0][PREG_W-1:0] wake_tag;
  logic [ROB_TAG_W-1:0] rob_head;
  logic disp_valid, disp_ready; mem_uop_t disp_uop; logic [3:0] disp_idx; logic disp_redispatch;
  logic deq_valid, redisp_valid; logic [3:0] deq_idx, redisp_idx; logic [4:0] occupancy;
  int checks = 0, failures = 0;

  mem_rs dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic ins(input int rob, input logic r1, input int t1);
    @(negedge clk);
    enq_valid = 1; enq_uop = '0; enq_uop.rob_tag = 6'(rob); enq_uop.base = 64'(rob);
    enq_src1 = 7'(t1); enq_src1_rdy = r1; enq_src2 = 7'd0; enq_src2_rdy = 1;
    @(negedge clk); enq_valid = 0;
  endtask

  initial begin
    int idx_of [64];
    kill = 0; enq_valid = 0; enq_uop = '0; enq_src1 = 0; enq_src2 = 0; enq_src1_rdy = 0; enq_src2_rdy = 0;
    wake_valid = 0; wake_tag = '0; rob_head = 6'd10; disp_ready = 0; deq_valid = 0; redisp_valid = 0;
    deq_idx = 0; redisp_idx = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // insert out of program order: 14, 12 (waits on p5), 11, 13
    ins(14, 1, 0); ins(12, 0, 5); ins(11, 1, 0); ins(13, 1, 0);
    #1 chk(occupancy == 4, "four entries");
    chk(disp_valid && disp_uop.rob_tag == 11, "oldest ready entry (11) selected");
    // dispatch 11 and 13; 12 not ready
    @(negedge clk); disp_ready = 1; #1 idx_of[11] = int'(disp_idx);
    chk(!disp_redispatch, "first dispatch flagged as such");
    @(negedge clk); #1 chk(disp_valid && disp_uop.rob_tag == 13, "12 waits for its operand, 13 next");
    idx_of[13] = int'(disp_idx);
    @(negedge clk); #1 chk(disp_valid && disp_uop.rob_tag == 14, "then 14");
    idx_of[14] = int'(disp_idx);
    @(negedge clk); disp_ready = 0; #1;
    chk(!disp_valid, "nothing left: in-flight entries are not picked again");
    chk(occupancy == 4, "dispatch does not free entries");
    // wake-up of p5 makes 12 eligible
    wake_valid = 2'b10; wake_tag[1] = 7'd5; @(negedge clk); wake_valid = 0; #1;
    chk(disp_valid && disp_uop.rob_tag == 12, "wake-up makes 12 eligible");
    disp_ready = 1; @(negedge clk); disp_ready = 0; idx_of[12] = 0;
    // pipeline: 11 and 14 safe (dequeue), 13 and 12 squashed (re-dispatch)
    deq_valid = 1; deq_idx = 4'(idx_of[11]); @(negedge clk);
    deq_idx = 4'(idx_of[14]); @(negedge clk); deq_valid = 0;
    #1 chk(occupancy == 2, "dequeue frees entries");
    redisp_valid = 1; redisp_idx = 4'(idx_of[13]); @(negedge clk); redisp_valid = 0; #1;
    chk(!disp_valid, "re-dispatch waits: 13 not at ROB head (10)");
    rob_head = 6'd12; #1;
    chk(!disp_valid, "still waiting with head 12");
    rob_head = 6'd13; #1;
    chk(disp_valid && disp_uop.rob_tag == 13 && disp_redispatch, "re-dispatched at ROB head");
    disp_ready = 1; @(negedge clk); disp_ready = 0; #1;
    chk(!disp_valid, "re-dispatched once only");
    // fill to capacity
    for (int i = 0; i < 14; i++) ins(20 + i, 1, 0);
    #1 chk(occupancy == 16 && !enq_ready, "16 entries: full");
    kill = 1; @(negedge clk); kill = 0; #1;
    chk(occupancy == 0 && enq_ready && !disp_valid, "kill empties the station");
    // random: dispatch order always oldest-first relative to head
    rob_head = 6'd40;
    for (int i = 0; i < 8; i++) ins(40 + (i * 5) % 16, 1, 0);
    begin
      int last; last = -1;
      disp_ready = 1;
      for (int i = 0; i < 8; i++) begin
        #1; chk(disp_valid && int'(disp_uop.rob_tag - rob_head) > last, "oldest-first order");
        last = int'(disp_uop.rob_tag - rob_head);
        @(negedge clk);
      end
      disp_ready = 0;
    end


    // ---- random traffic against a reference model of the station
    kill = 1; @(negedge clk); kill = 0;
    begin
      typedef struct { int tag; int s1; bit r1; int s2; bit r2; bit td; bit tr; int idx; int dly; bit fl; } rent_t;
      rent_t m [$];
      int head, next, best, nredisp, sel; bit selr;
      head = 0; next = 0; nredisp = 0; rob_head = 0;
      for (int cyc = 0; cyc < 6000; cyc++) begin
        int ei; logic [1:0] wv; logic [1:0][6:0] wt;
        @(negedge clk);
        rob_head = 6'(head);
        wv = 2'($urandom) & {1'($urandom % 3 == 0), 1'($urandom % 3 == 0)};
        wt[0] = 7'($urandom % 8); wt[1] = 7'($urandom % 8);
        wake_valid = wv; wake_tag = wt;
        disp_ready = 1'($urandom);
        enq_valid = (m.size() < 16) && (next - head < 60) && ($urandom % 2 == 0);
        enq_uop = '0; enq_uop.rob_tag = 6'(next);
        enq_src1 = 7'($urandom % 8); enq_src1_rdy = ($urandom % 3 != 0);
        enq_src2 = 7'($urandom % 8); enq_src2_rdy = ($urandom % 2 == 0);
        // resolve one in-flight entry: dequeue (safe) or re-dispatch
        deq_valid = 0; redisp_valid = 0; ei = -1;
        foreach (m[i]) if (m[i].fl && m[i].dly == 0 && ei < 0) ei = i;
        if (ei >= 0) begin
          if (m[ei].tag != head && $urandom % 2 == 0) begin redisp_valid = 1; redisp_idx = 4'(m[ei].idx); end
          else begin deq_valid = 1; deq_idx = 4'(m[ei].idx); end
        end
        #1;
        // expected selection: oldest eligible relative to the ROB head
        best = -1;
        foreach (m[i]) if (m[i].r1 && m[i].r2 && (m[i].td || (m[i].tr && m[i].tag == head)))
          if (best < 0 || m[i].tag < m[best].tag) best = i;
        chk(disp_valid == (best >= 0), "random: dispatch valid");
        if (best >= 0) chk(int'(disp_uop.rob_tag) == m[best].tag % 64 && disp_redispatch == !m[best].td, "random: oldest eligible entry");
        chk(enq_ready == (m.size() < 16) && occupancy == 5'(m.size()), "random: occupancy");
        sel = int'(disp_idx); selr = disp_redispatch;
        // follow the station's actual pick so that one wrong pick is counted
        // once instead of derailing the model
        best = -1;
        if (disp_valid) foreach (m[i]) if (m[i].tag % 64 == int'(disp_uop.rob_tag) && !m[i].fl) best = i;
        @(posedge clk);
        // update the reference like the station does
        foreach (m[i]) begin
          for (int w = 0; w < 2; w++) if (wv[w]) begin
            if (m[i].s1 == wt[w]) m[i].r1 = 1;
            if (m[i].s2 == wt[w]) m[i].r2 = 1;
          end
          if (m[i].fl && m[i].dly > 0) m[i].dly--;
        end
        if (best >= 0 && disp_ready) begin
          m[best].td = 0; m[best].tr = 0; m[best].fl = 1; m[best].dly = $urandom % 3; m[best].idx = sel;
          if (selr) nredisp++;
        end
        if (ei >= 0) begin
          if (redisp_valid) begin m[ei].tr = 1; m[ei].fl = 0; end
          else m.delete(ei);
        end
        if (enq_valid) begin
          rent_t e;
          e.tag = next; e.s1 = int'(enq_src1); e.s2 = int'(enq_src2);
          e.r1 = enq_src1_rdy || (wv[0] && wt[0] == enq_src1) || (wv[1] && wt[1] == enq_src1);
          e.r2 = enq_src2_rdy || (wv[0] && wt[0] == enq_src2) || (wv[1] && wt[1] == enq_src2);
          e.td = 1; e.tr = 0; e.idx = -1; e.dly = 0; e.fl = 0;
          m.push_back(e); next++;
        end
        // the ROB head is the oldest instruction still in the station
        head = next;
        foreach (m[i]) if (m[i].tag < head) head = m[i].tag;
      end
      chk(nredisp > 20, "random: re-dispatches happened");
      @(negedge clk);
      enq_valid = 0; deq_valid = 0; redisp_valid = 0; wake_valid = 0; disp_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
