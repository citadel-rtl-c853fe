// safe_mode_check: the first stage of the memory execution pipeline, where
// Safe mode decides whether an access may touch shared microarchitecture.
//
// The stage registers an access dispatched by the memory reservation station,
// computes its virtual address (base + sign-extended immediate) and asks the
// enclave range check whether the address is private.  An access is safe when
//   - the Safe-mode mechanism is off (empty enclave range), or
//   - it targets private (trusted) memory, or
//   - Burst mode is on (shared accesses may be pipelined), or
//   - it is non-speculative, i.e. it is at the head of the ROB;
// when speculation is disabled altogether (machine mode, or MSPEC.NOSPEC)
// only the last condition counts.  A safe access moves on to translation
// and the reservation station is told to dequeue its entry.  An unsafe one
// is squashed here, before the TLB or any cache sees it, and the station is
// told to re-dispatch it once it reaches the ROB head.  The decision rule is
// the paper's; the one-entry stage register and the valid/ready handshake are
// this design's.
//
// Timing: an access spends one cycle in the stage if translation is ready.
module safe_mode_check
  import citadel_pkg::*;
#(
  parameter int unsigned RS_ENTRIES = MEMRS_ENTRIES
)(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         kill,
  input  spec_ctrl_t                   ctrl,
  input  logic [ROB_TAG_W-1:0]         rob_head,
  // from the reservation station
  input  logic                         in_valid,
  output logic                         in_ready,
  input  mem_uop_t                     in_uop,
  input  logic [$clog2(RS_ENTRIES)-1:0] in_idx,
  // enclave range check (combinational, outside)
  output logic [XLEN-1:0]              va,
  input  logic                         va_private,
  input  logic                         mech_en,
  // to translation
  output logic                         out_valid,
  input  logic                         out_ready,
  output mem_uop_t                     out_uop,
  output logic [XLEN-1:0]              out_va,
  output logic                         out_private,
  // back to the reservation station
  output logic                         deq_valid,
  output logic [$clog2(RS_ENTRIES)-1:0] deq_idx,
  output logic                         redisp_valid,
  output logic [$clog2(RS_ENTRIES)-1:0] redisp_idx,
  output logic                         safe,
  output logic                         squash
);
  logic                          v_q;
  mem_uop_t                      uop_q;
  logic [$clog2(RS_ENTRIES)-1:0] idx_q;
  logic                          nonspec;

  assign va      = uop_q.base + {{(XLEN-12){uop_q.imm[11]}}, uop_q.imm};
  assign nonspec = (uop_q.rob_tag == rob_head);

  always_comb begin
    if (ctrl.spec_disable)   safe = nonspec;
    else if (!mech_en)       safe = 1'b1;
    else if (va_private)     safe = 1'b1;
    else if (!ctrl.delay_shared) safe = 1'b1;
    else                     safe = nonspec;
  end

  assign out_valid    = v_q && safe;
  assign out_uop      = uop_q;
  assign out_va       = va;
  assign out_private  = va_private;
  assign deq_valid    = out_valid && out_ready;
  assign deq_idx      = idx_q;
  assign squash       = v_q && !safe;
  assign redisp_valid = squash;
  assign redisp_idx   = idx_q;

  // the stage empties when its access leaves (or is squashed)
  assign in_ready = !v_q || squash || (out_valid && out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q   <= 1'b0;
      uop_q <= '0;
      idx_q <= '0;
    end else if (kill) begin
      v_q   <= 1'b0;
    end else if (in_ready) begin
      v_q   <= in_valid;
      uop_q <= in_uop;
      idx_q <= in_idx;
    end
  end
endmodule
