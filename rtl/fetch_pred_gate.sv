// fetch_pred_gate: next-PC selection in the fetch and decode stages, with the
// predictor gates Citadel adds for Burst mode.
//
// The fetch stage normally takes its next PC from the BTB on a hit and from
// pc+4 otherwise.  Decode may redirect fetch: a conditional branch predicted
// taken by the BHT, a direct jump, or a return predicted by the RAS.  Each of
// these sources passes through an enable from the MSPEC CSR.  With all three
// off (Burst mode) the only prediction left is pc+4, i.e. straight-line
// speculation: no jump, branch or return is ever followed speculatively.
// Training outputs (BTB/BHT/RAS updates) are gated by train_en.
//
// The predictors themselves (256-entry BTB, 8-entry RAS, tournament BHT) are
// the baseline core's and stay outside; this module sees their outputs.
// Treating direct jumps as predictions too (they are not followed in Burst
// mode) is this design's reading of "the only prediction is pc+4".
//
// Purely combinational.
module fetch_pred_gate
  import citadel_pkg::*;
(
  input  spec_ctrl_t       ctrl,
  // fetch stage
  input  logic [XLEN-1:0]  f_pc,
  input  logic             btb_hit,
  input  logic [XLEN-1:0]  btb_target,
  output logic [XLEN-1:0]  f_next_pc,
  // decode stage
  input  logic             d_valid,
  input  logic [XLEN-1:0]  d_pc,
  input  logic [XLEN-1:0]  d_pred_pc,     // PC fetch followed after this instruction
  input  logic             d_is_branch,
  input  logic             d_is_jal,
  input  logic             d_is_ret,
  input  logic [XLEN-1:0]  d_direct_target,
  input  logic             bht_taken,
  input  logic [XLEN-1:0]  ras_top,
  output logic             d_redirect,
  output logic [XLEN-1:0]  d_redirect_pc,
  // training requests from the back end
  input  logic             upd_btb_in,
  input  logic             upd_bht_in,
  input  logic             upd_ras_in,
  output logic             upd_btb,
  output logic             upd_bht,
  output logic             upd_ras
);
  always_comb begin
    f_next_pc = (ctrl.btb_en && btb_hit) ? btb_target : f_pc + XLEN'(4);
  end

  always_comb begin
    logic [XLEN-1:0] want;
    want = d_pc + XLEN'(4);
    if (d_is_branch && ctrl.bht_en && bht_taken) want = d_direct_target;
    if (d_is_jal    && ctrl.btb_en)              want = d_direct_target;
    if (d_is_ret    && ctrl.ras_en)              want = ras_top;
    d_redirect    = d_valid && (want != d_pred_pc);
    d_redirect_pc = want;
  end

  assign upd_btb = upd_btb_in && ctrl.train_en;
  assign upd_bht = upd_bht_in && ctrl.train_en;
  assign upd_ras = upd_ras_in && ctrl.train_en;
endmodule
