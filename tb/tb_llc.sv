// tb_llc: random byte-masked writes and line reads from both cores into the
// LLC at its full size (1024 sets x 16 ways), backed by a behavioural memory
// with random latency and back-pressure. A reference image of memory checks
// every read response (so evictions must write dirty lines back correctly).
// Region 0 is reconfigured to a single set and region 1 to 4 sets, which
// forces evictions; every access must land inside its region's set range.
// Hit latency is measured on an idle cache: 10 cycles from the moment the
// request leaves the input queue (11 from acceptance). The events for hit,
// miss and write-back must all occur.
module tb_llc;
  import citadel_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  logic cfg_we = 0; logic [5:0] cfg_region; logic [9:0] cfg_base; logic [8:0] cfg_size_m1;
  logic [SIRT_W-1:0] sirt;
  logic req_valid, req_ready, resp_valid, resp_ready; llc_req_t req; llc_resp_t resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready; mem_req_t mem_req; mem_resp_t mem_resp;
  logic ev_hit, ev_miss, ev_writeback; logic [9:0] cur_set;
  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_wb = 0;
  longint cyc = 0;
  logic [LINE_W-1:0] ref_mem [logic [LADDR_W-1:0]];   // architectural value
  logic [LINE_W-1:0] dram    [logic [LADDR_W-1:0]];   // backing memory
  llc_req_t sent [$];
  logic [LINE_W-1:0] expect_q [$];   // read data expected, taken when the request is accepted
  int rbase [64], rsize [64];

  llc dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [LINE_W-1:0] rd(input logic [LADDR_W-1:0] a, input logic [LINE_W-1:0] m [logic [LADDR_W-1:0]]);
    return m.exists(a) ? m[a] : {8{a, 14'h0}};
  endfunction

  // behavioural memory: one request at a time, random latency
  logic [LINE_W-1:0] mdata; int mwait = -1;
  always @(posedge clk) if (rst_n) begin
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req.write) begin dram[mem_req.laddr] = mem_req.data; n_wb++; end
      else begin mdata = rd(mem_req.laddr, dram); mwait = 1 + $urandom % 30; end
    end
    if (mem_resp_valid && mem_resp_ready) mwait = -1;
    else if (mwait > 0) mwait--;
  end
  logic bp = 0;   // random response back-pressure once enabled
  always @(negedge clk) begin
    resp_ready = bp ? ($urandom % 4 != 0) : 1'b1;
    mem_req_ready = ($urandom % 4 != 0);
    mem_resp_valid = (mwait == 0);
    mem_resp.data = mdata;
  end

  // responses: in order, data checked against the reference image
  always @(posedge clk) if (rst_n) begin
    if (ev_hit) n_hit++;
    if (ev_miss) n_miss++;
    if (resp_valid && resp_ready) begin
      llc_req_t r; int rg;
      logic [LINE_W-1:0] e;
      r = sent.pop_front(); e = expect_q.pop_front();
      rg = int'(r.laddr[24:19]);
      chk(resp.core == r.core && resp.src == r.src && resp.write == r.write, "response routing fields");
      if (!r.write) chk(resp.data == e, $sformatf("read data %h", r.laddr));
      chk(int'(cur_set) >= rbase[rg] && int'(cur_set) < rbase[rg] + rsize[rg], "set inside the region's range");
    end
  end

  function automatic logic [LADDR_W-1:0] addr(input int region, input int line);
    return LADDR_W'(DRAM_BASE >> 6) + (LADDR_W'(region) << 19) + LADDR_W'(line * 1024 + line % 7);
  endfunction

  task automatic send(input logic [LADDR_W-1:0] a, input logic w);
    @(negedge clk);
    req = '0; req.core = 1'($urandom); req.src = 1'($urandom); req.write = w; req.laddr = a;
    req.be = w ? {$urandom, $urandom} : '0; req.data = {16{$urandom}};
    req_valid = 1;
    do @(posedge clk); while (!req_ready);
    sent.push_back(req); expect_q.push_back(rd(a, ref_mem));
    if (w) begin
      logic [LINE_W-1:0] v; v = rd(a, ref_mem);
      for (int b = 0; b < 64; b++) if (req.be[b]) v[b*8 +: 8] = req.data[b*8 +: 8];
      ref_mem[a] = v;
    end
    @(negedge clk); req_valid = 0;
  endtask

  task automatic config_region(input int r, input int b, input int s);
    @(negedge clk); cfg_we = 1; cfg_region = 6'(r); cfg_base = 10'(b); cfg_size_m1 = 9'(s - 1);
    @(negedge clk); cfg_we = 0; rbase[r] = b; rsize[r] = s;
  endtask

  initial begin
    longint t0;
    req_valid = 0; req = '0; cfg_region = 0; cfg_base = 0; cfg_size_m1 = 0;
    for (int r = 0; r < 64; r++) begin rbase[r] = r * 16; rsize[r] = 16; end
    repeat (2) @(posedge clk); rst_n = 1;
    config_region(0, 1000, 1);
    config_region(1, 1001, 4);
    chk(sirt[0 +: 19] == {10'd1000, 9'd0}, "table image");
    // hit latency on an idle cache
    send(addr(2, 3), 0);
    while (sent.size() != 0) @(negedge clk);
    @(negedge clk); req = '0; req.laddr = addr(2, 3); req_valid = 1;
    @(posedge clk); t0 = cyc; sent.push_back(req); expect_q.push_back(rd(req.laddr, ref_mem)); @(negedge clk); req_valid = 0;
    while (!resp_valid) @(negedge clk);
    chk(cyc - t0 == 11, $sformatf("hit latency from acceptance %0d (10 + 1 queue cycle)", cyc - t0));
    // random traffic
    bp = 1;
    for (int it = 0; it < 3000; it++) begin
      int rg; rg = ($urandom % 3 == 0) ? 2 + $urandom % 3 : $urandom % 2;
      send(addr(rg, $urandom % 24), ($urandom % 2 == 0));
      if ($urandom % 16 == 0) begin
        while (sent.size() != 0) @(negedge clk);
      end
    end
    while (sent.size() != 0) @(negedge clk);
    chk(n_hit > 100 && n_miss > 100 && n_wb > 50, $sformatf("events hit=%0d miss=%0d wb=%0d", n_hit, n_miss, n_wb));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    $display("hang: sent=%0d st=%0d qcnt=%0d mwait=%0d n_hit=%0d n_miss=%0d", sent.size(), dut.st_q, dut.q_cnt_q, mwait, n_hit, n_miss);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
