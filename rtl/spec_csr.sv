// spec_csr: the MSPEC control/status register that selects how a core
// speculates.
//
// Software writes MSPEC with a CSR instruction (csrwi MSPEC, BURST_ON /
// BURST_OFF in the Burst-mode snippets).  The register decodes into the
// per-core speculation controls used by the fetch pipeline (BTB, RAS and BHT
// enables, predictor training) and by the memory pipeline (delay shared
// accesses until the ROB head, or delay every access).  Safe mode is the
// reset state: MSPEC = 0 keeps predictors on and delays shared accesses.
// Burst mode turns the BTB, RAS and BHT off, so fetch falls back to the
// static pc+4 prediction, and lets shared accesses be pipelined.  Machine
// mode (the security monitor) never speculates.
//
// A write to MSPEC also acts as a speculation barrier: `barrier` pulses for
// one cycle with the write so the core can squash and refetch younger
// instructions.  The CSR number 0x7C0 and the field layout are this design's
// own choice; the paper only names the register and its controls.
//
// Timing: the write takes effect on the next rising edge; reads and the
// decoded controls are combinational from the register.
module spec_csr
  import citadel_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        csr_we,       // CSR write (already committed)
  input  logic [11:0] csr_addr,
  input  logic [XLEN-1:0] csr_wdata,
  output logic [XLEN-1:0] csr_rdata,
  input  priv_e       priv,
  output spec_ctrl_t  ctrl,
  output logic        burst,
  output logic        barrier
);
  logic [4:0] mspec_q;
  logic       hit;

  assign hit = csr_we && (csr_addr == CSR_MSPEC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   mspec_q <= BURST_OFF;
    else if (hit) mspec_q <= csr_wdata[4:0];
  end

  assign csr_rdata = (csr_addr == CSR_MSPEC) ? {{(XLEN-5){1'b0}}, mspec_q} : '0;
  assign barrier   = hit;

  always_comb begin
    logic m_mode, no_pred;
    m_mode  = (priv == PRIV_M);
    burst   = mspec_q[MSPEC_BURST] && !m_mode;
    no_pred = burst || mspec_q[MSPEC_NOPRED];
    ctrl.btb_en       = !no_pred;
    ctrl.ras_en       = !no_pred;
    ctrl.bht_en       = !no_pred;
    ctrl.train_en     = !mspec_q[MSPEC_NOTRAIN];
    ctrl.delay_shared = !burst;
    ctrl.spec_disable = m_mode || mspec_q[MSPEC_NOSPEC];
  end
endmodule
