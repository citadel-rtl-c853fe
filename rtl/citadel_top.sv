// citadel_top: the Citadel isolation hardware of a two-core processor and
// its shared memory system.
//
// Per core (core_mem_slice): the MSPEC speculation CSR and the predictor
// gates of the fetch pipeline (Burst mode), the memory reservation station
// and Safe-mode check that hold speculative shared accesses back until they
// reach the ROB head, the enclave private-range check that selects the
// enclave or OS page table, the private/shared-tagged TLB, the region-bitmap
// access check, the L1-D bypass for enclave shared accesses, and the
// software-triggered flush controller.
//
// Shared (uncore): each core's LLC traffic (its L1 refills and write-backs
// plus its bypassed accesses) is merged per core, held to the core's static
// share of the LLC's 16 outstanding-request slots, and arbitrated
// round-robin into the LLC.  The LLC maps every line into the set range of
// its memory region (set-index range table, programmed through cfg_*).
// Below the LLC, reads to the zero-device window are answered with zeros
// and every other request goes to DRAM through the fixed-latency padding
// block.
//
// The out-of-order cores themselves, their L1 caches, branch predictors and
// page walkers, and the DRAM controller are the baseline processor's and are
// reached through this module's ports.  All per-core ports are arrays
// indexed by core number.
module citadel_top
  import citadel_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // ---------------------------------------------------------- per core
  input  priv_e                priv          [NCORES],
  input  logic                 kill          [NCORES],
  input  logic [ROB_TAG_W-1:0] rob_head      [NCORES],
  input  logic                 csr_we        [NCORES],
  input  logic [11:0]          csr_addr      [NCORES],
  input  logic [XLEN-1:0]      csr_wdata     [NCORES],
  output logic [XLEN-1:0]      csr_rdata     [NCORES],
  output logic                 spec_barrier  [NCORES],
  input  logic                 cfg_we        [NCORES],
  input  logic [2:0]           cfg_sel       [NCORES],
  input  logic [XLEN-1:0]      cfg_wdata     [NCORES],
  input  logic [XLEN-1:0]      f_pc          [NCORES],
  input  logic                 btb_hit       [NCORES],
  input  logic [XLEN-1:0]      btb_target    [NCORES],
  output logic [XLEN-1:0]      f_next_pc     [NCORES],
  input  logic                 d_valid       [NCORES],
  input  logic [XLEN-1:0]      d_pc          [NCORES],
  input  logic [XLEN-1:0]      d_pred_pc     [NCORES],
  input  logic                 d_is_branch   [NCORES],
  input  logic                 d_is_jal      [NCORES],
  input  logic                 d_is_ret      [NCORES],
  input  logic [XLEN-1:0]      d_direct_target [NCORES],
  input  logic                 bht_taken     [NCORES],
  input  logic [XLEN-1:0]      ras_top       [NCORES],
  output logic                 d_redirect    [NCORES],
  output logic [XLEN-1:0]      d_redirect_pc [NCORES],
  input  logic [2:0]           upd_in        [NCORES],
  output logic [2:0]           upd_out       [NCORES],
  input  logic                 enq_valid     [NCORES],
  output logic                 enq_ready     [NCORES],
  input  mem_uop_t             enq_uop       [NCORES],
  input  logic [PREG_W-1:0]    enq_src1      [NCORES],
  input  logic                 enq_src1_rdy  [NCORES],
  input  logic [PREG_W-1:0]    enq_src2      [NCORES],
  input  logic                 enq_src2_rdy  [NCORES],
  input  logic [1:0]           wake_valid    [NCORES],
  input  logic [1:0][PREG_W-1:0] wake_tag    [NCORES],
  output logic                 walk_valid    [NCORES],
  output logic [26:0]          walk_vpn      [NCORES],
  output logic                 walk_private  [NCORES],
  output logic [XLEN-1:0]      walk_root     [NCORES],
  input  logic                 fill_valid    [NCORES],
  input  logic [1:0]           fill_level    [NCORES],
  input  logic [43:0]          fill_ppn      [NCORES],
  output logic                 l1_req_valid  [NCORES],
  input  logic                 l1_req_ready  [NCORES],
  output logic [PADDR_W-1:0]   l1_req_pa     [NCORES],
  output mem_uop_t             l1_req_uop    [NCORES],
  input  logic                 l1_resp_valid [NCORES],
  input  logic [XLEN-1:0]      l1_resp_data  [NCORES],
  // L1 refills / write-backs of each core towards the LLC
  input  logic                 l1_llc_req_valid  [NCORES],
  output logic                 l1_llc_req_ready  [NCORES],
  input  llc_req_t             l1_llc_req        [NCORES],
  output logic                 l1_llc_resp_valid [NCORES],
  output llc_resp_t            l1_llc_resp       [NCORES],
  output logic                 done_valid    [NCORES],
  output logic [XLEN-1:0]      done_data     [NCORES],
  output logic [ROB_TAG_W-1:0] done_rob_tag  [NCORES],
  output logic                 fault_valid   [NCORES],
  output logic [ROB_TAG_W-1:0] fault_rob_tag [NCORES],
  input  logic                 flush_trigger [NCORES],
  output logic                 flush_busy    [NCORES],
  output logic [3:0]           flush_req_ext [NCORES],
  input  logic [3:0]           flush_done_ext [NCORES],
  output logic                 ev_squash     [NCORES],
  output logic                 ev_redispatch [NCORES],
  output logic                 ev_bypass     [NCORES],
  output logic                 ev_tlb_miss   [NCORES],
  output logic                 ev_mshr_full  [NCORES],
  // ------------------------------------------------ LLC MMIO (SM only)
  input  logic                   llc_cfg_we,
  input  logic [REGION_ID_W-1:0] llc_cfg_region,
  input  logic [SET_BASE_W-1:0]  llc_cfg_base,
  input  logic [SET_SIZE_W-1:0]  llc_cfg_size_m1,
  output logic [SIRT_W-1:0]      llc_sirt,
  output logic                   ev_llc_hit,
  output logic                   ev_llc_miss,
  output logic                   ev_llc_writeback,
  output logic                   ev_zero_read,
  output logic                   ev_pad_late,
  // ------------------------------------------------------- DRAM port
  output logic                 dram_req_valid,
  input  logic                 dram_req_ready,
  output mem_req_t             dram_req,
  input  logic                 dram_resp_valid,
  input  mem_resp_t            dram_resp
);
  // per-core LLC traffic
  logic       byp_req_valid [NCORES];
  logic       byp_req_ready [NCORES];
  llc_req_t   byp_req       [NCORES];
  logic       byp_resp_valid[NCORES];
  logic [NCORES-1:0] merged_valid, merged_ready, core_valid, core_ready, resp_fire, mshr_full;
  llc_req_t [NCORES-1:0] merged_req;
  logic [NCORES-1:0] src_grant_all;

  llc_req_t   llc_in;
  logic       llc_in_valid, llc_in_ready;
  logic       llc_resp_valid;
  llc_resp_t  llc_resp;

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    core_mem_slice #(.CORE_ID(c)) u_slice (
      .clk, .rst_n, .priv(priv[c]), .kill(kill[c]), .rob_head(rob_head[c]),
      .csr_we(csr_we[c]), .csr_addr(csr_addr[c]), .csr_wdata(csr_wdata[c]),
      .csr_rdata(csr_rdata[c]), .spec_barrier(spec_barrier[c]),
      .cfg_we(cfg_we[c]), .cfg_sel(cfg_sel[c]), .cfg_wdata(cfg_wdata[c]),
      .f_pc(f_pc[c]), .btb_hit(btb_hit[c]), .btb_target(btb_target[c]), .f_next_pc(f_next_pc[c]),
      .d_valid(d_valid[c]), .d_pc(d_pc[c]), .d_pred_pc(d_pred_pc[c]),
      .d_is_branch(d_is_branch[c]), .d_is_jal(d_is_jal[c]), .d_is_ret(d_is_ret[c]),
      .d_direct_target(d_direct_target[c]), .bht_taken(bht_taken[c]), .ras_top(ras_top[c]),
      .d_redirect(d_redirect[c]), .d_redirect_pc(d_redirect_pc[c]),
      .upd_in(upd_in[c]), .upd_out(upd_out[c]),
      .enq_valid(enq_valid[c]), .enq_ready(enq_ready[c]), .enq_uop(enq_uop[c]),
      .enq_src1(enq_src1[c]), .enq_src1_rdy(enq_src1_rdy[c]),
      .enq_src2(enq_src2[c]), .enq_src2_rdy(enq_src2_rdy[c]),
      .wake_valid(wake_valid[c]), .wake_tag(wake_tag[c]),
      .walk_valid(walk_valid[c]), .walk_vpn(walk_vpn[c]), .walk_private(walk_private[c]),
      .walk_root(walk_root[c]), .fill_valid(fill_valid[c]), .fill_level(fill_level[c]),
      .fill_ppn(fill_ppn[c]),
      .l1_req_valid(l1_req_valid[c]), .l1_req_ready(l1_req_ready[c]), .l1_req_pa(l1_req_pa[c]),
      .l1_req_uop(l1_req_uop[c]), .l1_resp_valid(l1_resp_valid[c]), .l1_resp_data(l1_resp_data[c]),
      .llc_req_valid(byp_req_valid[c]), .llc_req_ready(byp_req_ready[c]), .llc_req(byp_req[c]),
      .llc_resp_valid(byp_resp_valid[c]), .llc_resp(llc_resp),
      .done_valid(done_valid[c]), .done_data(done_data[c]), .done_rob_tag(done_rob_tag[c]),
      .fault_valid(fault_valid[c]), .fault_rob_tag(fault_rob_tag[c]),
      .flush_trigger(flush_trigger[c]), .flush_busy(flush_busy[c]),
      .flush_req_ext(flush_req_ext[c]), .flush_done_ext(flush_done_ext[c]),
      .ev_squash(ev_squash[c]), .ev_redispatch(ev_redispatch[c]),
      .ev_bypass(ev_bypass[c]), .ev_tlb_miss(ev_tlb_miss[c]));

    // merge this core's L1 traffic and bypass traffic (round-robin)
    logic [1:0]           src_valid, src_ready;
    llc_req_t [1:0]       src_req;
    logic                 src_grant;
    assign src_grant_all[c] = src_grant;
    assign src_valid = {byp_req_valid[c], l1_llc_req_valid[c]};
    assign src_req   = {byp_req[c], l1_llc_req[c]};
    assign l1_llc_req_ready[c] = src_ready[0];
    assign byp_req_ready[c]    = src_ready[1];

    llc_arbiter #(.N(2)) u_merge (
      .clk, .rst_n, .req_valid(src_valid), .req_ready(src_ready), .req(src_req),
      .out_valid(merged_valid[c]), .out_ready(merged_ready[c]), .out(merged_req[c]),
      .grant_idx(src_grant));

    // responses
    assign resp_fire[c]         = llc_resp_valid && (llc_resp.core == CORE_W'(c));
    assign byp_resp_valid[c]    = resp_fire[c] && llc_resp.src;
    assign l1_llc_resp_valid[c] = resp_fire[c] && !llc_resp.src;
    assign l1_llc_resp[c]       = llc_resp;
    assign ev_mshr_full[c]      = mshr_full[c] && merged_valid[c];
  end

  // static partition of the LLC's outstanding-request slots
  mshr_partition #(.N(NCORES), .TOTAL(LLC_MAX_OUTST)) u_mshr (
    .clk, .rst_n, .in_valid(merged_valid), .in_ready(merged_ready),
    .out_valid(core_valid), .out_ready(core_ready), .resp_fire, .full(mshr_full));

  // fair round-robin arbiter at the LLC entry
  logic [CORE_W-1:0] core_grant;
  llc_arbiter #(.N(NCORES)) u_arb (
    .clk, .rst_n, .req_valid(core_valid), .req_ready(core_ready), .req(merged_req),
    .out_valid(llc_in_valid), .out_ready(llc_in_ready), .out(llc_in), .grant_idx(core_grant));

  // shared LLC
  logic      mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  mem_req_t  mem_req;
  mem_resp_t mem_resp;
  logic [$clog2(LLC_SETS)-1:0] llc_cur_set;

  llc u_llc (
    .clk, .rst_n,
    .cfg_we(llc_cfg_we), .cfg_region(llc_cfg_region), .cfg_base(llc_cfg_base),
    .cfg_size_m1(llc_cfg_size_m1), .sirt(llc_sirt),
    .req_valid(llc_in_valid), .req_ready(llc_in_ready), .req(llc_in),
    .resp_valid(llc_resp_valid), .resp_ready(1'b1), .resp(llc_resp),
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp_ready, .mem_resp,
    .ev_hit(ev_llc_hit), .ev_miss(ev_llc_miss), .ev_writeback(ev_llc_writeback),
    .cur_set(llc_cur_set));

  // memory side: zero device or padded DRAM
  logic      zd_req_ready, zd_resp_valid, zd_window;
  mem_resp_t zd_resp;
  logic      pad_req_ready, pad_resp_valid;
  mem_resp_t pad_resp;

  zero_device u_zero (
    .clk, .rst_n, .req_valid(mem_req_valid && zd_window), .req_ready(zd_req_ready),
    .req(mem_req), .resp_valid(zd_resp_valid), .resp_ready(mem_resp_ready), .resp(zd_resp),
    .in_window(zd_window));

  dram_pad u_pad (
    .clk, .rst_n, .req_valid(mem_req_valid && !zd_window), .req_ready(pad_req_ready),
    .req(mem_req), .resp_valid(pad_resp_valid), .resp_ready(mem_resp_ready), .resp(pad_resp),
    .dram_req_valid, .dram_req_ready, .dram_req, .dram_resp_valid, .dram_resp,
    .late(ev_pad_late));

  assign mem_req_ready  = zd_window ? zd_req_ready : pad_req_ready;
  assign mem_resp_valid = zd_resp_valid || pad_resp_valid;
  assign mem_resp       = zd_resp_valid ? zd_resp : pad_resp;
  assign ev_zero_read   = zd_resp_valid && mem_resp_ready;

  logic unused;
  assign unused = ^{core_grant, llc_cur_set, src_grant_all};
endmodule
