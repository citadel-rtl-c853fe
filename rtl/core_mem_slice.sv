// core_mem_slice: Citadel's additions to one core, wired as in the core's
// memory execution pipeline and front end.
//
// Memory pipeline, in order:
//   mem_rs  ->  safe_mode_check  ->  translation (tagged_tlb +
//   mem_region_check)  ->  l1d_bypass  ->  L1-D port or LLC port.
// The reservation station keeps each access until the Safe-mode check has
// let it through; squashed shared accesses are re-dispatched from the ROB
// head.  The translation stage looks the virtual address up in the tagged
// TLB under the private/shared tag given by dual_pt_select; on a miss it asks
// the (external) page walker, naming the page-table root to walk, and waits
// for the refill; on a hit it checks the physical region against the region
// bitmap of the address' side and either passes the access on or reports
// an access fault to the core.  MSPEC (spec_csr) controls the Safe-mode
// check and the fetch predictor gates (fetch_pred_gate); flush_ctrl flushes
// the TLB itself and asks the pipeline, L1s and MSHRs outside to flush.
//
// The rest of the core (rename, ROB, ALUs, L1 caches, predictors, page
// walker) is the baseline processor's and is reached through ports.  The
// single-entry translation stage is this design's simplification.
//
// SM configuration port cfg_sel: 0 evbase, 1 evmask, 2 eptbr, 3 ptbr,
// 4 private region bitmap, 5 shared region bitmap.
module core_mem_slice
  import citadel_pkg::*;
#(
  parameter int unsigned CORE_ID = 0
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  priv_e                priv,
  input  logic                 kill,
  input  logic [ROB_TAG_W-1:0] rob_head,
  // CSR and SM configuration
  input  logic                 csr_we,
  input  logic [11:0]          csr_addr,
  input  logic [XLEN-1:0]      csr_wdata,
  output logic [XLEN-1:0]      csr_rdata,
  output logic                 spec_barrier,
  input  logic                 cfg_we,
  input  logic [2:0]           cfg_sel,
  input  logic [XLEN-1:0]      cfg_wdata,
  // front end
  input  logic [XLEN-1:0]      f_pc,
  input  logic                 btb_hit,
  input  logic [XLEN-1:0]      btb_target,
  output logic [XLEN-1:0]      f_next_pc,
  input  logic                 d_valid,
  input  logic [XLEN-1:0]      d_pc,
  input  logic [XLEN-1:0]      d_pred_pc,
  input  logic                 d_is_branch,
  input  logic                 d_is_jal,
  input  logic                 d_is_ret,
  input  logic [XLEN-1:0]      d_direct_target,
  input  logic                 bht_taken,
  input  logic [XLEN-1:0]      ras_top,
  output logic                 d_redirect,
  output logic [XLEN-1:0]      d_redirect_pc,
  input  logic [2:0]           upd_in,          // btb, bht, ras training requests
  output logic [2:0]           upd_out,
  // rename -> memory reservation station
  input  logic                 enq_valid,
  output logic                 enq_ready,
  input  mem_uop_t             enq_uop,
  input  logic [PREG_W-1:0]    enq_src1,
  input  logic                 enq_src1_rdy,
  input  logic [PREG_W-1:0]    enq_src2,
  input  logic                 enq_src2_rdy,
  input  logic [1:0]           wake_valid,
  input  logic [1:0][PREG_W-1:0] wake_tag,
  // page walker
  output logic                 walk_valid,
  output logic [26:0]          walk_vpn,
  output logic                 walk_private,
  output logic [XLEN-1:0]      walk_root,
  input  logic                 fill_valid,
  input  logic [1:0]           fill_level,
  input  logic [43:0]          fill_ppn,
  // L1-D port
  output logic                 l1_req_valid,
  input  logic                 l1_req_ready,
  output logic [PADDR_W-1:0]   l1_req_pa,
  output mem_uop_t             l1_req_uop,
  input  logic                 l1_resp_valid,
  input  logic [XLEN-1:0]      l1_resp_data,
  // LLC port of the bypass path
  output logic                 llc_req_valid,
  input  logic                 llc_req_ready,
  output llc_req_t             llc_req,
  input  logic                 llc_resp_valid,
  input  llc_resp_t            llc_resp,
  // results to the ROB
  output logic                 done_valid,
  output logic [XLEN-1:0]      done_data,
  output logic [ROB_TAG_W-1:0] done_rob_tag,
  output logic                 fault_valid,
  output logic [ROB_TAG_W-1:0] fault_rob_tag,
  // flush control
  input  logic                 flush_trigger,
  output logic                 flush_busy,
  output logic [3:0]           flush_req_ext,   // pipeline, L1-I, L1-D, MSHR
  input  logic [3:0]           flush_done_ext,
  // events
  output logic                 ev_squash,
  output logic                 ev_redispatch,
  output logic                 ev_bypass,
  output logic                 ev_tlb_miss
);
  localparam int IW = $clog2(MEMRS_ENTRIES);

  spec_ctrl_t ctrl;
  logic       burst;
  // observable state not used further inside the slice
  logic [NREGIONS-1:0]    bm_private, bm_shared;
  logic [REGION_ID_W-1:0] region;
  logic                   flush_done_pulse;

  spec_csr u_csr (
    .clk, .rst_n, .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .priv,
    .ctrl, .burst, .barrier(spec_barrier));

  fetch_pred_gate u_fpg (
    .ctrl, .f_pc, .btb_hit, .btb_target, .f_next_pc,
    .d_valid, .d_pc, .d_pred_pc, .d_is_branch, .d_is_jal, .d_is_ret,
    .d_direct_target, .bht_taken, .ras_top, .d_redirect, .d_redirect_pc,
    .upd_btb_in(upd_in[0]), .upd_bht_in(upd_in[1]), .upd_ras_in(upd_in[2]),
    .upd_btb(upd_out[0]), .upd_bht(upd_out[1]), .upd_ras(upd_out[2]));

  // ------------------------------------------------- reservation station
  logic           disp_valid, disp_ready;
  mem_uop_t       disp_uop;
  logic [IW-1:0]  disp_idx, deq_idx, redisp_idx;
  logic [IW:0]    occupancy;
  logic           deq_valid, redisp_valid, disp_redispatch;

  mem_rs u_rs (
    .clk, .rst_n, .kill,
    .enq_valid, .enq_ready, .enq_uop, .enq_src1, .enq_src1_rdy, .enq_src2, .enq_src2_rdy,
    .wake_valid, .wake_tag, .rob_head,
    .disp_valid, .disp_ready, .disp_uop, .disp_idx, .disp_redispatch,
    .deq_valid, .deq_idx, .redisp_valid, .redisp_idx, .occupancy);

  // ------------------------------------------------------ Safe-mode check
  logic [XLEN-1:0] chk_va, tr_va_in;
  logic            chk_private, mech_en;
  logic            chk_out_valid, chk_out_ready, chk_out_private, chk_safe;
  mem_uop_t        chk_out_uop;
  logic [XLEN-1:0] pt_root;

  // the range check serves the Safe-mode stage; its page-table root is
  // latched with the access when it enters translation
  dual_pt_select u_dpt (
    .clk, .rst_n, .cfg_we(cfg_we && cfg_sel < 3'd4), .cfg_sel(cfg_sel[1:0]),
    .cfg_wdata, .va(chk_va), .is_private(chk_private), .mech_en, .pt_root);

  safe_mode_check u_chk (
    .clk, .rst_n, .kill, .ctrl, .rob_head,
    .in_valid(disp_valid), .in_ready(disp_ready), .in_uop(disp_uop), .in_idx(disp_idx),
    .va(chk_va), .va_private(chk_private), .mech_en,
    .out_valid(chk_out_valid), .out_ready(chk_out_ready), .out_uop(chk_out_uop),
    .out_va(tr_va_in), .out_private(chk_out_private),
    .deq_valid, .deq_idx, .redisp_valid, .redisp_idx, .safe(chk_safe), .squash(ev_squash));

  assign ev_redispatch = disp_valid && disp_ready && disp_redispatch;

  // ---------------------------------------------------- translation stage
  typedef enum logic [1:0] {T_IDLE, T_LOOKUP, T_WALK} tstate_e;
  tstate_e         ts_q;
  mem_uop_t        tr_uop_q;
  logic [XLEN-1:0] tr_va_q;
  logic            tr_priv_q;
  logic            tlb_hit, region_ok, tlb_flush;
  logic [PADDR_W-1:0] tr_pa;
  logic            byp_in_ready;

  logic [XLEN-1:0] tr_root_q;

  tagged_tlb u_tlb (
    .clk, .rst_n, .flush(tlb_flush),
    .va(tr_va_q[38:0]), .va_private(tr_priv_q), .hit(tlb_hit), .pa(tr_pa),
    .fill_valid, .fill_vpn(tr_va_q[38:12]), .fill_private(tr_priv_q), .fill_level, .fill_ppn);

  mem_region_check u_mrc (
    .clk, .rst_n, .cfg_we(cfg_we && cfg_sel[2]), .cfg_sel(cfg_sel[0]),
    .cfg_wdata(cfg_wdata[NREGIONS-1:0]), .bm_private(bm_private), .bm_shared(bm_shared),
    .priv, .pa(tr_pa), .va_private(tr_priv_q), .region(region), .allowed(region_ok));

  assign chk_out_ready = (ts_q == T_IDLE);
  assign walk_valid    = (ts_q == T_WALK);
  assign walk_vpn      = tr_va_q[38:12];
  assign walk_private  = tr_priv_q;
  assign walk_root     = tr_root_q;
  assign ev_tlb_miss   = (ts_q == T_LOOKUP) && !tlb_hit;
  assign fault_valid   = (ts_q == T_LOOKUP) && tlb_hit && !region_ok;
  assign fault_rob_tag = tr_uop_q.rob_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts_q <= T_IDLE; tr_uop_q <= '0; tr_va_q <= '0; tr_priv_q <= 1'b0; tr_root_q <= '0;
    end else if (kill) begin
      ts_q <= T_IDLE;
    end else begin
      unique case (ts_q)
        T_IDLE: if (chk_out_valid) begin
          tr_uop_q  <= chk_out_uop;
          tr_va_q   <= tr_va_in;
          tr_priv_q <= chk_out_private;
          tr_root_q <= pt_root;
          ts_q      <= T_LOOKUP;
        end
        T_LOOKUP: begin
          if (!tlb_hit)                   ts_q <= T_WALK;
          else if (!region_ok)            ts_q <= T_IDLE;
          else if (byp_in_ready)          ts_q <= T_IDLE;
        end
        T_WALK: if (fill_valid) ts_q <= T_LOOKUP;
        default: ts_q <= T_IDLE;
      endcase
    end
  end

  // -------------------------------------------------------- L1-D bypass
  logic byp_in_valid, bypassed;
  assign byp_in_valid = (ts_q == T_LOOKUP) && tlb_hit && region_ok;

  l1d_bypass u_byp (
    .clk, .rst_n, .core_id(CORE_W'(CORE_ID)),
    .in_valid(byp_in_valid), .in_ready(byp_in_ready), .in_uop(tr_uop_q), .in_pa(tr_pa),
    .in_private(tr_priv_q), .mech_en,
    .l1_req_valid, .l1_req_ready, .l1_req_pa, .l1_req_uop, .l1_resp_valid, .l1_resp_data,
    .llc_req_valid, .llc_req_ready, .llc_req, .llc_resp_valid, .llc_resp,
    .resp_valid(done_valid), .resp_data(done_data), .resp_rob_tag(done_rob_tag),
    .bypassed);

  assign ev_bypass = byp_in_valid && byp_in_ready && bypassed;

  // ------------------------------------------------------- flush control
  logic [4:0] fl_req, fl_done;
  flush_ctrl #(.NUNITS(5)) u_flush (
    .clk, .rst_n, .trigger(flush_trigger), .busy(flush_busy),
    .flush_req(fl_req), .flush_done(fl_done), .done_pulse(flush_done_pulse));

  assign tlb_flush     = fl_req[4];
  assign flush_req_ext = fl_req[3:0];
  assign fl_done       = {fl_req[4], flush_done_ext};

  logic                   unused;
  assign unused = ^{burst, occupancy, chk_safe, bm_private, bm_shared, region, flush_done_pulse};
endmodule
