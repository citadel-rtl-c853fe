// flush_ctrl: software-triggered flush of a core's temporally shared
// microarchitectural state (relaxed flushing policy).
//
// On a switch between security domains the core's pipeline, L1 caches,
// TLBs, translation cache and MSHRs must be emptied.  Rather than flushing on
// every trap, the hardware leaves the decision to the security monitor: it
// writes the flush register, this block raises a flush request to every
// unit and waits until each one has reported completion (in any order),
// and the register reads back busy until then.  The monitor can thus skip
// the flush on traps and calls between an enclave and its own private
// monitor copy.  The trigger-register policy is the paper's; the
// request/done handshake and the unit list are this design's.
//
// Timing: flush_req is high from the cycle after the write until the cycle
// after the last unit's done pulse.
module flush_ctrl
  import citadel_pkg::*;
#(
  parameter int unsigned NUNITS = 5   // pipeline, L1-I, L1-D, TLB/ATC, MSHR
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              trigger,        // SM write to the flush register
  output logic              busy,
  output logic [NUNITS-1:0] flush_req,
  input  logic [NUNITS-1:0] flush_done,
  output logic              done_pulse
);
  logic              busy_q;
  logic [NUNITS-1:0] pend_q;

  assign busy       = busy_q;
  assign flush_req  = busy_q ? pend_q : '0;
  assign done_pulse = busy_q && ((pend_q & ~flush_done) == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      pend_q <= '0;
    end else if (!busy_q) begin
      if (trigger) begin
        busy_q <= 1'b1;
        pend_q <= '1;
      end
    end else begin
      pend_q <= pend_q & ~flush_done;
      if (done_pulse) busy_q <= 1'b0;
    end
  end
endmodule
