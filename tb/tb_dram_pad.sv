// tb_dram_pad: a behavioural DRAM answers reads after a random 3..100 cycles;
// the padding block must return every read exactly 120 cycles after it was
// sent, in order and with the right data, must limit outstanding reads to
// 24, must pass writes straight through and must flag a late response when
// the DRAM is slower than the padding.
module tb_dram_pad;
  import citadel_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  logic req_valid, req_ready, resp_valid, resp_ready, dram_req_valid, dram_req_ready, dram_resp_valid, late;
  mem_req_t req, dram_req; mem_resp_t resp, dram_resp;
  int checks = 0, failures = 0;
  int slow = 0;
  longint cyc = 0;
  longint sent_t [$]; logic [LINE_W-1:0] sent_d [$];
  longint dq_t [$]; logic [LINE_W-1:0] dq_d [$];
  int outst = 0, maxo = 0, nresp = 0, nlate = 0;
  dram_pad dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // behavioural DRAM: in-order, random latency (or 200 cycles when slow)
  always @(negedge clk) begin
    dram_resp_valid = 0;
    if (dq_t.size() > 0 && cyc >= dq_t[0]) begin
      dram_resp_valid = 1; dram_resp.data = dq_d[0];
      void'(dq_t.pop_front()); void'(dq_d.pop_front());
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (dram_req_valid && dram_req_ready && !dram_req.write) begin
      longint t; t = cyc + (slow ? 200 : 3 + $urandom % 98);
      if (dq_t.size() > 0 && t <= dq_t[dq_t.size()-1]) t = dq_t[dq_t.size()-1] + 1;
      dq_t.push_back(t); dq_d.push_back({16{$urandom}});
      sent_t.push_back(cyc); sent_d.push_back(dq_d[dq_d.size()-1]);
      outst++;
    end
    if (resp_valid && resp_ready) begin
      chk(resp.data == sent_d[0], "data in order");
      if (!slow) chk(cyc - sent_t[0] == 120, $sformatf("padded latency %0d", cyc - sent_t[0]));
      else chk(cyc - sent_t[0] > 120, "slow DRAM still answered");
      void'(sent_t.pop_front()); void'(sent_d.pop_front());
      outst--; nresp++;
    end
    if (late) nlate++;
    if (outst > maxo) maxo = outst;
    chk(outst <= 24, "at most 24 outstanding");
  end

  initial begin
    req_valid = 0; req = '0; resp_ready = 1; dram_req_ready = 1; dram_resp_valid = 0; dram_resp = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      req_valid = ($urandom % 3 != 0); req.write = ($urandom % 5 == 0);
      req.laddr = {$urandom, $urandom}; req.data = {16{$urandom}};
      dram_req_ready = ($urandom % 8 != 0);
      #1;
      if (req_valid && req.write) chk(dram_req_valid == dram_req_ready || dram_req_valid, "writes pass through");
      chk(!req_valid || dram_req == req, "request forwarded unchanged");
    end
    @(negedge clk); req_valid = 0;
    repeat (300) @(negedge clk);
    chk(outst == 0 && nlate == 0, "drained, never late");
    chk(maxo == 24, "outstanding limit reached");
    slow = 1;
    @(negedge clk); req_valid = 1; req.write = 0; @(negedge clk); req_valid = 0;
    repeat (250) @(negedge clk);
    chk(nlate > 0 && outst == 0, "late flag for slow DRAM");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
