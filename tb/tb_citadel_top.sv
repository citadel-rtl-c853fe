// tb_citadel_top: end-to-end test of the Citadel hardware at its full size
// (two cores, 1 MB 16-way LLC with 1024 sets, 64 regions, 120-cycle padded
// DRAM); the top has no parameters, so this is also the full-size test.
//
// Behavioural models around the top stand in for the baseline processor:
//   - a ROB model for core 0 that allocates ROB tags in order, sends memory
//     micro-ops into the reservation station (some waiting on an operand that
//     is woken later), retires completed ones from the head and drives
//     rob_head;
//   - a page walker per core that answers walk requests after a few cycles
//     from a fixed virtual-to-physical map, checking the page-table root;
//   - an L1-D model per core for non-bypassed accesses;
//   - core 1 as an L1 refill/write-back source on the LLC port (several
//     requests in flight) and the zero-device window;
//   - a DRAM with random latency of at most 100 cycles.
//
// Core 0 runs an enclave: private VA range [1 GB, 2 GB) mapped to region 1,
// shared pages at 256 MB mapped to region 20, and a page at 512 MB mapped to
// region 21, which the enclave's shared bitmap does not grant (access fault).
// The test runs Safe mode, then Burst mode, then Safe mode again, and flushes
// core 0 in between. Checked throughout:
//   - in Safe mode a shared enclave access only leaves the Safe-mode check at
//     the ROB head; in Burst mode shared accesses also leave early;
//   - the fetch gate follows the mode (BTB target vs. pc+4);
//   - bypassed loads return the bytes last stored through the LLC, L1-path
//     accesses reach the L1 with the expected physical address;
//   - walks use the enclave root for private and the OS root for shared
//     addresses; region 21 faults;
//   - LLC responses to core 1 carry the right data (write-backs of evicted
//     dirty lines included), zero-window reads return zeros;
//   - every DRAM read is answered exactly 120 cycles after it was issued and
//     the padding is never late;
//   - accesses of a region stay within its configured LLC set range.
// Last, it runs the fine-grain LLC flush workload: one region's single set
// is filled with 16 dirty lines and flushed with 16 zero-device reads; the
// cycles taken are printed and every line must reach DRAM.
// Each mechanism is counted and must have happened at least once.
module tb_citadel_top;
  import citadel_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------------------------------------------------------- ports
  priv_e                priv          [NCORES];
  logic                 kill          [NCORES];
  logic [ROB_TAG_W-1:0] rob_head      [NCORES];
  logic                 csr_we        [NCORES];
  logic [11:0]          csr_addr      [NCORES];
  logic [XLEN-1:0]      csr_wdata     [NCORES];
  logic [XLEN-1:0]      csr_rdata     [NCORES];
  logic                 spec_barrier  [NCORES];
  logic                 cfg_we        [NCORES];
  logic [2:0]           cfg_sel       [NCORES];
  logic [XLEN-1:0]      cfg_wdata     [NCORES];
  logic [XLEN-1:0]      f_pc          [NCORES];
  logic                 btb_hit       [NCORES];
  logic [XLEN-1:0]      btb_target    [NCORES];
  logic [XLEN-1:0]      f_next_pc     [NCORES];
  logic                 d_valid       [NCORES];
  logic [XLEN-1:0]      d_pc          [NCORES];
  logic [XLEN-1:0]      d_pred_pc     [NCORES];
  logic                 d_is_branch   [NCORES];
  logic                 d_is_jal      [NCORES];
  logic                 d_is_ret      [NCORES];
  logic [XLEN-1:0]      d_direct_target [NCORES];
  logic                 bht_taken     [NCORES];
  logic [XLEN-1:0]      ras_top       [NCORES];
  logic                 d_redirect    [NCORES];
  logic [XLEN-1:0]      d_redirect_pc [NCORES];
  logic [2:0]           upd_in        [NCORES];
  logic [2:0]           upd_out       [NCORES];
  logic                 enq_valid     [NCORES];
  logic                 enq_ready     [NCORES];
  mem_uop_t             enq_uop       [NCORES];
  logic [PREG_W-1:0]    enq_src1      [NCORES];
  logic                 enq_src1_rdy  [NCORES];
  logic [PREG_W-1:0]    enq_src2      [NCORES];
  logic                 enq_src2_rdy  [NCORES];
  logic [1:0]           wake_valid    [NCORES];
  logic [1:0][PREG_W-1:0] wake_tag    [NCORES];
  logic                 walk_valid    [NCORES];
  logic [26:0]          walk_vpn      [NCORES];
  logic                 walk_private  [NCORES];
  logic [XLEN-1:0]      walk_root     [NCORES];
  logic                 fill_valid    [NCORES];
  logic [1:0]           fill_level    [NCORES];
  logic [43:0]          fill_ppn      [NCORES];
  logic                 l1_req_valid  [NCORES];
  logic                 l1_req_ready  [NCORES];
  logic [PADDR_W-1:0]   l1_req_pa     [NCORES];
  mem_uop_t             l1_req_uop    [NCORES];
  logic                 l1_resp_valid [NCORES];
  logic [XLEN-1:0]      l1_resp_data  [NCORES];
  logic                 l1_llc_req_valid  [NCORES];
  logic                 l1_llc_req_ready  [NCORES];
  llc_req_t             l1_llc_req        [NCORES];
  logic                 l1_llc_resp_valid [NCORES];
  llc_resp_t            l1_llc_resp       [NCORES];
  logic                 done_valid    [NCORES];
  logic [XLEN-1:0]      done_data     [NCORES];
  logic [ROB_TAG_W-1:0] done_rob_tag  [NCORES];
  logic                 fault_valid   [NCORES];
  logic [ROB_TAG_W-1:0] fault_rob_tag [NCORES];
  logic                 flush_trigger [NCORES];
  logic                 flush_busy    [NCORES];
  logic [3:0]           flush_req_ext [NCORES];
  logic [3:0]           flush_done_ext [NCORES];
  logic                 ev_squash     [NCORES];
  logic                 ev_redispatch [NCORES];
  logic                 ev_bypass     [NCORES];
  logic                 ev_tlb_miss   [NCORES];
  logic                 ev_mshr_full  [NCORES];
  logic                   llc_cfg_we;
  logic [REGION_ID_W-1:0] llc_cfg_region;
  logic [SET_BASE_W-1:0]  llc_cfg_base;
  logic [SET_SIZE_W-1:0]  llc_cfg_size_m1;
  logic [SIRT_W-1:0]      llc_sirt;
  logic ev_llc_hit, ev_llc_miss, ev_llc_writeback, ev_zero_read, ev_pad_late;
  logic dram_req_valid, dram_req_ready, dram_resp_valid;
  mem_req_t dram_req; mem_resp_t dram_resp;

  citadel_top dut (.*);

  // ------------------------------------------------------------ checking
  int checks = 0, failures = 0;
  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // mechanism counters
  int n_squash, n_redisp, n_bypass, n_tlb_miss, n_fault, n_safe_hold, n_burst_early;
  int n_fetch_gate, n_fetch_btb, n_llc_hit, n_llc_miss, n_llc_wb, n_zero, n_mshr_full;
  int set_flush_cycles;
  int n_flush, n_pad, n_l1_path, n_walk_priv, n_walk_shared, n_llc_resp_c1, n_wake;

  // --------------------------------------------------------- address map
  localparam logic [XLEN-1:0] EPTBR = 64'h8000_0001_0000, PTBR = 64'h8000_0002_0000;
  localparam logic [XLEN-1:0] VA_PRIV = 64'h4000_0000, VA_SHARED = 64'h1000_0000, VA_FAULT = 64'h2000_0000;

  function automatic logic [PADDR_W-1:0] pa_of(input logic [XLEN-1:0] va);
    logic [PADDR_W-1:0] r;
    r = (va >= VA_PRIV && va < 2 * VA_PRIV) ? 1 : (va >= VA_FAULT && va < VA_FAULT + 64'h1000_0000) ? 21 : 20;
    return DRAM_BASE + (r << REGION_SHIFT) + PADDR_W'(va[20:0]);
  endfunction

  // ----------------------------------------------- memory images (bytes)
  logic [7:0] llc_img [logic [PADDR_W-1:0]];   // what the LLC/DRAM side holds
  logic [7:0] dram_img [logic [PADDR_W-1:0]];  // what DRAM holds
  function automatic logic [7:0] ib(input logic [PADDR_W-1:0] a);
    return llc_img.exists(a) ? llc_img[a] : (a[7:0] * 8'd7) ^ a[15:8];
  endfunction
  function automatic logic [7:0] db(input logic [PADDR_W-1:0] a);
    return dram_img.exists(a) ? dram_img[a] : (a[7:0] * 8'd7) ^ a[15:8];
  endfunction

  // ---------------------------------------------------------------- DRAM
  longint dq_due [$]; logic [LADDR_W-1:0] dq_addr [$]; longint pad_sent [$];
  always @(posedge clk) if (rst_n) begin
    if (dram_req_valid && dram_req_ready) begin
      if (dram_req.write) begin
        for (int b = 0; b < 64; b++) dram_img[{dram_req.laddr, 6'(b)}] = dram_req.data[b*8 +: 8];
      end else begin
        longint t; t = cyc + 5 + $urandom % 96;
        if (dq_due.size() > 0 && t <= dq_due[dq_due.size()-1]) t = dq_due[dq_due.size()-1] + 1;
        dq_due.push_back(t); dq_addr.push_back(dram_req.laddr); pad_sent.push_back(cyc);
      end
    end
    if (dut.u_pad.resp_valid && dut.u_pad.resp_ready) begin
      chk(cyc - pad_sent[0] == longint'(MEM_LATENCY), $sformatf("padded DRAM latency %0d", cyc - pad_sent[0]));
      void'(pad_sent.pop_front()); n_pad++;
    end
    chk(!ev_pad_late, "padding never late");
  end
  always @(negedge clk) begin
    dram_req_ready = ($urandom % 8 != 0);
    dram_resp_valid = 0;
    if (dq_due.size() > 0 && cyc >= dq_due[0]) begin
      dram_resp_valid = 1;
      for (int b = 0; b < 64; b++) dram_resp.data[b*8 +: 8] = db({dq_addr[0], 6'(b)});
      void'(dq_due.pop_front()); void'(dq_addr.pop_front());
    end
  end

  // --------------------------------------------------- page walker model
  for (genvar c = 0; c < NCORES; c++) begin : g_walker
    int wait_n = -1;
    always @(posedge clk) if (rst_n) begin
      if (fill_valid[c]) wait_n = -1;
      else if (walk_valid[c] && wait_n < 0) begin
        wait_n = 2 + $urandom % 6;
        chk(walk_root[c] == (walk_private[c] ? EPTBR : PTBR), "walk uses the root of the address' side");
        if (walk_private[c]) n_walk_priv++; else n_walk_shared++;
      end else if (wait_n > 0) wait_n--;
    end
    always @(negedge clk) begin
      fill_valid[c] = (wait_n == 0);
      fill_level[c] = 2'd0;
      fill_ppn[c]   = 44'(pa_of({37'd0, walk_vpn[c]} << 12) >> 12);
    end
  end

  // ----------------------------------------------------------- L1 models
  for (genvar c = 0; c < NCORES; c++) begin : g_l1
    int lat = -1;
    mem_uop_t u;
    always @(posedge clk) if (rst_n) begin
      if (l1_req_valid[c] && l1_req_ready[c]) begin
        u = l1_req_uop[c];
        chk(l1_req_pa[c] == pa_of(u.base + {{52{u.imm[11]}}, u.imm}), "L1 request physical address");
        lat = 1 + $urandom % 3; n_l1_path++;
      end else if (lat > 0) lat--;
      else if (lat == 0 && l1_resp_valid[c]) lat = -1;
    end
    always @(negedge clk) begin
      l1_req_ready[c]  = 1'($urandom);
      l1_resp_valid[c] = (lat == 0);
      l1_resp_data[c]  = 64'hA11 + 64'(u.rob_tag);
    end
  end

  // ------------------------------------------------------- core 0 ROB model
  typedef struct {
    int tag; logic store; logic [1:0] size; logic [XLEN-1:0] va; logic [XLEN-1:0] sdata;
    logic done; logic fault;
  } rob_ent_t;
  rob_ent_t rob [$];
  int next_tag = 0;
  logic burst_phase = 0;
  int pend_wake = -1; logic [PREG_W-1:0] pend_wake_tag;

  always_comb rob_head[0] = (rob.size() > 0) ? ROB_TAG_W'(rob[0].tag) : ROB_TAG_W'(next_tag);

  function automatic int rob_find(input int tag);
    foreach (rob[i]) if (rob[i].tag == tag && !rob[i].done) return i;
    return -1;
  endfunction

  // completion, retirement and the Safe-mode invariant
  always @(posedge clk) if (rst_n) begin
    if (done_valid[0]) begin
      int i; i = rob_find(int'(done_rob_tag[0]));
      chk(i >= 0, "completion for an in-flight ROB entry");
      if (i >= 0) begin
        logic [PADDR_W-1:0] pa; pa = pa_of(rob[i].va);
        if (rob[i].va < VA_PRIV || rob[i].va >= 2 * VA_PRIV) begin   // shared: bypass path
          if (rob[i].store) begin
            for (int b = 0; b < (1 << rob[i].size); b++) llc_img[pa + PADDR_W'(b)] = rob[i].sdata[b*8 +: 8];
          end else begin
            logic [XLEN-1:0] e; e = '0;
            for (int b = 0; b < (1 << rob[i].size); b++) e[b*8 +: 8] = ib(pa + PADDR_W'(b));
            chk(done_data[0] == e, $sformatf("bypassed load data va=%h", rob[i].va));
          end
        end else chk(done_data[0] == 64'hA11 + 64'(rob[i].tag), "L1-path load data");
        rob[i].done = 1;
      end
    end
    if (fault_valid[0]) begin
      int i; i = rob_find(int'(fault_rob_tag[0]));
      chk(i >= 0 && rob[i].va >= VA_FAULT && rob[i].va < VA_FAULT + 64'h1000_0000, "fault only for region 21");
      if (i >= 0) begin rob[i].done = 1; rob[i].fault = 1; end
      n_fault++;
    end
    while (rob.size() > 0 && rob[0].done) void'(rob.pop_front());
    // Safe-mode invariant at the check's output
    if (dut.g_core[0].u_slice.chk_out_valid && dut.g_core[0].u_slice.chk_out_ready &&
        !dut.g_core[0].u_slice.chk_out_private) begin
      if (!burst_phase) begin
        chk(dut.g_core[0].u_slice.chk_out_uop.rob_tag == rob_head[0], "Safe mode: shared access leaves only at ROB head");
        n_safe_hold++;
      end else if (dut.g_core[0].u_slice.chk_out_uop.rob_tag != rob_head[0]) n_burst_early++;
    end
    if (ev_squash[0]) n_squash++;
    if (ev_redispatch[0]) n_redisp++;
    if (ev_bypass[0]) n_bypass++;
    if (ev_tlb_miss[0]) n_tlb_miss++;
    if (ev_llc_hit) n_llc_hit++;
    if (ev_llc_miss) n_llc_miss++;
    if (ev_llc_writeback) n_llc_wb++;
    if (ev_zero_read) n_zero++;
    if (ev_mshr_full[1] || ev_mshr_full[0]) n_mshr_full++;
    // operand wake-up for a dependent micro-op
    if (pend_wake > 0) pend_wake--;
  end
  always @(negedge clk) begin
    wake_valid[0] = {1'b0, pend_wake == 0};
    wake_tag[0]   = {7'd0, pend_wake_tag};
    if (pend_wake == 0) begin pend_wake = -1; n_wake++; end
  end

  task automatic issue_uop();
    rob_ent_t e; mem_uop_t u; int kind;
    kind = $urandom % 20;
    e.tag = next_tag % 64; e.store = 1'($urandom); e.size = 2'($urandom);
    if (kind < 8)       e.va = VA_PRIV   + 64'(($urandom % 32) * 64 + ($urandom % 8) * 8);
    else if (kind < 19) e.va = VA_SHARED + 64'(($urandom % 40) * 4096 + ($urandom % 4) * 64 + ($urandom % 8) * 8);
    else                e.va = VA_FAULT  + 64'(($urandom % 4) * 4096);
    e.va[2:0] = 3'd0;
    e.sdata = {$urandom, $urandom}; e.done = 0; e.fault = 0;
    u = '0; u.is_store = e.store; u.size = e.size; u.rob_tag = ROB_TAG_W'(e.tag);
    u.imm = 12'($urandom % 256) & 12'hFF8; u.base = e.va - 64'(u.imm); u.sdata = e.sdata;
    enq_uop[0] = u; enq_src2[0] = '0; enq_src2_rdy[0] = 1;
    if (pend_wake < 0 && $urandom % 8 == 0) begin
      enq_src1[0] = 7'(40 + $urandom % 20); enq_src1_rdy[0] = 0;
      pend_wake_tag = enq_src1[0]; pend_wake = 3 + $urandom % 10;
    end else begin enq_src1[0] = 7'd1; enq_src1_rdy[0] = 1; end
    enq_valid[0] = 1;
    do @(posedge clk); while (!enq_ready[0]);
    rob.push_back(e); next_tag++;
    @(negedge clk); enq_valid[0] = 0;
  endtask

  task automatic run_core0(input int n);
    for (int i = 0; i < n; i++) begin
      while (rob.size() >= 12) @(negedge clk);
      issue_uop();
      repeat ($urandom % 3) @(negedge clk);
    end
    while (rob.size() != 0) @(negedge clk);
  endtask

  // ------------------------------------------- core 1: L1 traffic on the LLC
  llc_req_t c1_sent [$]; logic [LINE_W-1:0] c1_exp [$];
  always @(posedge clk) if (rst_n) begin
    if (l1_llc_resp_valid[1]) begin
      llc_req_t r; logic [LINE_W-1:0] e;
      r = c1_sent.pop_front(); e = c1_exp.pop_front();
      if (!r.write) chk(l1_llc_resp[1].data == e, $sformatf("LLC line for core 1 %h", r.laddr));
      chk(l1_llc_resp[1].write == r.write && l1_llc_resp[1].src == 0, "LLC response fields");
      n_llc_resp_c1++;
    end
    chk(!l1_llc_resp_valid[0], "core 0 never gets an L1 response it did not ask for");
  end
  task automatic c1_send(input logic [PADDR_W-1:0] pa, input logic w);
    llc_req_t r; logic [LINE_W-1:0] e;
    r = '0; r.core = 1; r.src = 0; r.write = w; r.laddr = pa[55:6]; r.be = '1; r.data = {16{$urandom}};
    for (int b = 0; b < 64; b++) e[b*8 +: 8] = (pa >= ZERO_BASE) ? 8'd0 : ib({r.laddr, 6'(b)});
    l1_llc_req[1] = r; l1_llc_req_valid[1] = 1;
    do @(posedge clk); while (!l1_llc_req_ready[1]);
    c1_sent.push_back(r); c1_exp.push_back(e);
    if (w) for (int b = 0; b < 64; b++) llc_img[{r.laddr, 6'(b)}] = r.data[b*8 +: 8];
    @(negedge clk); l1_llc_req_valid[1] = 0;
  endtask
  task automatic run_core1(input int n);
    for (int i = 0; i < n; i++) begin
      int k; k = $urandom % 10;
      if (k == 0) c1_send(ZERO_BASE + 56'(($urandom % 64) * 64), 0);
      else c1_send(DRAM_BASE + (56'd40 << REGION_SHIFT) + 56'(($urandom % 40) * 64 * 1024), ($urandom % 2 == 0));
      if ($urandom % 4 == 0) repeat ($urandom % 300) @(negedge clk);
    end
  endtask

  // ---------------------------------------------------------- fetch gate
  task automatic check_fetch(input logic burst);
    for (int c = 0; c < NCORES; c++) begin
      f_pc[c] = {$urandom, $urandom} & ~64'h3; btb_hit[c] = 1; btb_target[c] = {$urandom, $urandom};
    end
    #1;
    chk(f_next_pc[0] == (burst ? f_pc[0] + 4 : btb_target[0]), "core 0 fetch follows its mode");
    chk(f_next_pc[1] == btb_target[1], "core 1 keeps its BTB");
    if (burst) n_fetch_gate++; else n_fetch_btb++;
  endtask

  // --------------------------------------------------------- LLC set check
  always @(posedge clk) if (rst_n && (ev_llc_hit || ev_llc_miss)) begin
    int rg, base, size;
    rg = int'(dut.u_llc.r_q.laddr[24:19]);
    base = int'(llc_sirt[rg*19+9 +: 10]); size = int'(llc_sirt[rg*19 +: 9]) + 1;
    chk(int'(dut.u_llc.cur_set) >= base && int'(dut.u_llc.cur_set) < base + size, "LLC access inside its region's sets");
  end

  // -------------------------------------------------------------- helpers
  task automatic sm_cfg(input int c, input int sel, input logic [XLEN-1:0] v);
    @(negedge clk); cfg_we[c] = 1; cfg_sel[c] = 3'(sel); cfg_wdata[c] = v;
    @(negedge clk); cfg_we[c] = 0;
  endtask
  task automatic llc_cfg(input int r, input int b, input int s);
    @(negedge clk); llc_cfg_we = 1; llc_cfg_region = 6'(r); llc_cfg_base = 10'(b); llc_cfg_size_m1 = 9'(s - 1);
    @(negedge clk); llc_cfg_we = 0;
  endtask
  task automatic set_mspec(input logic [4:0] v);
    @(negedge clk); csr_we[0] = 1; csr_addr[0] = CSR_MSPEC; csr_wdata[0] = 64'(v);
    #1 chk(spec_barrier[0], "MSPEC write is a speculation barrier");
    @(negedge clk); csr_we[0] = 0; #1 chk(csr_rdata[0] == 64'(v), "MSPEC readback");
  endtask
  task automatic flush_core0();
    @(negedge clk); flush_trigger[0] = 1; @(negedge clk); flush_trigger[0] = 0;
    chk(flush_busy[0] && flush_req_ext[0] == 4'hF, "flush asks pipeline, L1s and MSHRs");
    while (flush_busy[0]) begin
      flush_done_ext[0] = 4'($urandom) & flush_req_ext[0];
      @(negedge clk); flush_done_ext[0] = 0;
    end
    n_flush++;
  endtask

  // ------------------------------------------------------------ stimulus
  initial begin
    for (int c = 0; c < NCORES; c++) begin
      priv[c] = PRIV_M; kill[c] = 0; csr_we[c] = 0; csr_addr[c] = CSR_MSPEC; csr_wdata[c] = 0;
      cfg_we[c] = 0; cfg_sel[c] = 0; cfg_wdata[c] = 0; f_pc[c] = 0; btb_hit[c] = 0; btb_target[c] = 0;
      d_valid[c] = 0; d_pc[c] = 0; d_pred_pc[c] = 0; d_is_branch[c] = 0; d_is_jal[c] = 0; d_is_ret[c] = 0;
      d_direct_target[c] = 0; bht_taken[c] = 0; ras_top[c] = 0; upd_in[c] = 0;
      enq_valid[c] = 0; enq_uop[c] = '0; enq_src1[c] = 0; enq_src1_rdy[c] = 1; enq_src2[c] = 0; enq_src2_rdy[c] = 1;
      wake_valid[c] = 0; wake_tag[c] = '0; l1_llc_req_valid[c] = 0; l1_llc_req[c] = '0;
      flush_trigger[c] = 0; flush_done_ext[c] = 0;
    end
    rob_head[1] = 0;
    llc_cfg_we = 0; llc_cfg_region = 0; llc_cfg_base = 0; llc_cfg_size_m1 = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    // security monitor (machine mode) sets up the enclave on core 0
    sm_cfg(0, 1, 64'hFFFF_FFFF_C000_0000);      // evmask: 1 GB range
    sm_cfg(0, 0, VA_PRIV);                      // evbase
    sm_cfg(0, 2, EPTBR);
    sm_cfg(0, 3, PTBR);
    sm_cfg(0, 4, 64'h2);                        // private bitmap: region 1
    sm_cfg(0, 5, 64'h1 << 20);                  // shared bitmap: region 20 (not 21)
    llc_cfg(20, 100, 2);                        // enclave shared region: 2 sets
    llc_cfg(40, 200, 1);                        // core 1's region: 1 set (forces evictions)
    llc_cfg(21, 300, 4);
    @(negedge clk); priv[0] = PRIV_U; priv[1] = PRIV_S;

    // phase 1: Safe mode
    check_fetch(0);
    fork run_core0(400); run_core1(120); join
    // flush, then Burst mode
    flush_core0();
    set_mspec(BURST_ON); burst_phase = 1;
    check_fetch(1);
    fork run_core0(300); run_core1(60); join
    check_fetch(1);
    // back to Safe mode
    set_mspec(BURST_OFF); burst_phase = 0;
    check_fetch(0);
    flush_core0();
    fork run_core0(200); begin
      // burst of core 1 requests to overflow its 8 LLC slots
      for (int i = 0; i < 20; i++) c1_send(DRAM_BASE + (56'd40 << REGION_SHIFT) + 56'((i + 100) * 64 * 1024), 0);
    end join
    while (c1_sent.size() != 0 || pad_sent.size() != 0) @(negedge clk);

    // fine-grain LLC flush of one 16-way set: region 50 gets a single set,
    // 16 dirty lines are placed in it, then 16 zero-device reads that map to
    // the same set evict them all
    llc_cfg(50, 400, 1);
    for (int i = 0; i < 16; i++) c1_send(DRAM_BASE + (56'd50 << REGION_SHIFT) + 56'(i * 64 * 1024), 1);
    while (c1_sent.size() != 0 || pad_sent.size() != 0) @(negedge clk);
    begin
      int wb0; longint t0;
      wb0 = n_llc_wb; t0 = cyc;
      for (int i = 0; i < 16; i++) c1_send(ZERO_BASE + (56'd50 << REGION_SHIFT) + 56'((i + 16) * 64 * 1024), 0);
      while (c1_sent.size() != 0) @(negedge clk);
      set_flush_cycles = int'(cyc - t0);
      chk(n_llc_wb - wb0 == 16, $sformatf("set flush writes back all 16 dirty lines (%0d)", n_llc_wb - wb0));
      for (int i = 0; i < 16; i++) begin
        logic [PADDR_W-1:0] a; a = DRAM_BASE + (56'd50 << REGION_SHIFT) + 56'(i * 64 * 1024);
        for (int b = 0; b < 64; b++) chk(db(a + 56'(b)) == ib(a + 56'(b)), "flushed line reached DRAM");
      end
      $display("set flush: 16 zero-device reads evicted one 16-way set in %0d cycles", set_flush_cycles);
    end

    $display("mechanisms: squash=%0d redispatch=%0d safe_hold=%0d burst_early=%0d bypass=%0d tlb_miss=%0d walks priv/shared=%0d/%0d fault=%0d wake=%0d",
             n_squash, n_redisp, n_safe_hold, n_burst_early, n_bypass, n_tlb_miss, n_walk_priv, n_walk_shared, n_fault, n_wake);
    $display("            fetch btb/gated=%0d/%0d llc hit/miss/wb=%0d/%0d/%0d zero=%0d mshr_full=%0d flush=%0d pad=%0d l1=%0d c1_resp=%0d",
             n_fetch_btb, n_fetch_gate, n_llc_hit, n_llc_miss, n_llc_wb, n_zero, n_mshr_full, n_flush, n_pad, n_l1_path, n_llc_resp_c1);
    chk(n_squash > 0,      "mechanism: Safe-mode squash");
    chk(n_redisp > 0,      "mechanism: re-dispatch at ROB head");
    chk(n_safe_hold > 0,   "mechanism: shared access held to ROB head");
    chk(n_burst_early > 0, "mechanism: Burst mode pipelines shared accesses");
    chk(n_bypass > 0,      "mechanism: L1-D bypass");
    chk(n_l1_path > 0,     "mechanism: private accesses use the L1");
    chk(n_tlb_miss > 0,    "mechanism: TLB miss");
    chk(n_walk_priv > 0 && n_walk_shared > 0, "mechanism: dual page tables");
    chk(n_fault > 0,       "mechanism: region bitmap fault");
    chk(n_wake > 0,        "mechanism: operand wake-up");
    chk(n_fetch_gate > 0 && n_fetch_btb > 0, "mechanism: fetch predictor gating");
    chk(n_llc_hit > 0,     "mechanism: LLC hit");
    chk(n_llc_miss > 0,    "mechanism: LLC miss");
    chk(n_llc_wb > 0,      "mechanism: LLC write-back");
    chk(n_zero > 0,        "mechanism: zero device read");
    chk(n_mshr_full > 0,   "mechanism: MSHR partition limit");
    chk(n_flush == 2,      "mechanism: flush");
    chk(n_pad > 0,         "mechanism: DRAM latency padding");
    chk(n_llc_resp_c1 > 0, "mechanism: LLC responses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    $display("watchdog: rob=%0d c1_sent=%0d", rob.size(), c1_sent.size());
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
